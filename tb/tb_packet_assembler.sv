// tb_packet_assembler: self-checking test of packet_assembler.
// Feeds random ten-byte packets with random gaps and checks that each packet
// comes out once, one cycle after its tenth byte, with the first byte in the
// channel field. Then sends three bytes, lets the idle timeout expire and
// checks that the partial packet is dropped and the next full packet is
// framed correctly.
module tb_packet_assembler;
  import rfgen_pkg::*;
  localparam int TO = 50;
  logic clk = 0, rst_n = 0;
  logic rx_valid = 0; logic [7:0] rx_data = 0;
  logic pkt_valid, resync;
  packet_t pkt;
  int checks = 0, failures = 0, n_pkt = 0, n_resync = 0;
  longint cyc = 0, t_last_byte, t_pkt;

  packet_assembler #(.IDLE_TIMEOUT(TO)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) begin
    cyc++;
    if (pkt_valid) begin n_pkt++; t_pkt = cyc; end
    if (resync) n_resync++;
  end

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  task automatic put(input logic [7:0] b);
    @(negedge clk); rx_valid = 1; rx_data = b;
    @(negedge clk); rx_valid = 0; t_last_byte = cyc;
    repeat ($urandom_range(0, 5)) @(negedge clk);
  endtask

  task automatic send_pkt(input logic [79:0] p);
    for (int i = 9; i >= 0; i--) put(p[8*i +: 8]);
  endtask

  initial begin
    repeat (3) @(posedge clk); rst_n = 1;
    for (int k = 0; k < 30; k++) begin
      logic [79:0] p; int np;
      p = {$urandom, $urandom, 16'($urandom)};
      np = n_pkt;
      send_pkt(p);
      repeat (2) @(negedge clk);
      chk(n_pkt == np + 1, $sformatf("pkt %0d: one pkt_valid", k));
      chk(pkt == p, $sformatf("pkt %0d: got %h want %h", k, pkt, p));
      chk(pkt.channel == p[79:72], "first byte is channel");
      chk(t_pkt == t_last_byte + 1, $sformatf("pkt %0d: latency %0d", k, t_pkt - t_last_byte));
    end
    begin
      int np; logic [79:0] p;
      np = n_pkt;
      put(8'h11); put(8'h22); put(8'h33);
      repeat (TO + 10) @(negedge clk);
      chk(n_resync == 1, "timeout drops partial packet");
      p = 80'h03_0E_0123456789ABCDEF;
      send_pkt(p);
      repeat (2) @(negedge clk);
      chk(n_pkt == np + 1 && pkt == p, "framing recovered after timeout");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
