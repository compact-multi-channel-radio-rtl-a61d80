// tb_uart_rx: self-checking test of uart_rx.
// Sends random bytes at 10 clocks per bit (1 MHz clock, 100 kBd), checks each
// received byte against the sent one, checks that rx_valid comes between 9.4
// and 10 bit times after the start edge, that a byte with a 0 stop bit raises
// frame_err and no rx_valid, and that a short glitch is not taken as a start.
module tb_uart_rx;
  localparam int CPB = 10;
  logic clk = 0, rst_n = 0, rxd = 1;
  logic rx_valid, frame_err;
  logic [7:0] rx_data;
  int checks = 0, failures = 0;
  int n_valid = 0, n_ferr = 0;
  longint t_start, t_valid;
  longint cyc = 0;

  uart_rx #(.CLK_HZ(1_000_000), .BAUD(100_000)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;
  always @(posedge clk) begin
    if (rx_valid) begin n_valid++; t_valid = cyc; end
    if (frame_err) n_ferr++;
  end

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  task automatic send(input logic [7:0] b, input bit stop);
    @(negedge clk); rxd = 0; t_start = cyc;
    repeat (CPB) @(negedge clk);
    for (int i = 0; i < 8; i++) begin rxd = b[i]; repeat (CPB) @(negedge clk); end
    rxd = stop; repeat (CPB) @(negedge clk);
    rxd = 1;    repeat (CPB) @(negedge clk);
  endtask

  initial begin
    repeat (3) @(posedge clk); rst_n = 1; repeat (20) @(posedge clk);
    for (int k = 0; k < 40; k++) begin
      logic [7:0] b; int nv;
      b = 8'($urandom);
      nv = n_valid;
      send(b, 1);
      chk(n_valid == nv + 1, $sformatf("byte %0d: one rx_valid", k));
      chk(rx_data == b, $sformatf("byte %0d: got %02x want %02x", k, rx_data, b));
      chk(t_valid - t_start >= 94 && t_valid - t_start <= 100,
          $sformatf("byte %0d: rx_valid %0d cycles after start edge", k, t_valid - t_start));
    end
    begin
      int nv, nf;
      nv = n_valid; nf = n_ferr;
      send(8'hA5, 0);
      repeat (2*CPB) @(negedge clk);
      chk(n_valid == nv, "bad stop bit gives no byte");
      chk(n_ferr == nf + 1, "bad stop bit gives frame_err");
      // a 2-cycle glitch is not a start bit
      nv = n_valid; nf = n_ferr;
      rxd = 0; repeat (2) @(negedge clk); rxd = 1;
      repeat (12*CPB) @(negedge clk);
      chk(n_valid == nv && n_ferr == nf, "glitch ignored");
      send(8'h3C, 1);
      chk(rx_data == 8'h3C && n_valid == nv + 1, "receives after glitch");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
