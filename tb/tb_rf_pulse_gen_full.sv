// tb_rf_pulse_gen_full: one complete operation of the controller at its
// default parameters (50 MHz clock, 115200 baud, 1024-word RAM image).
// Over the UART it loads the eight single-tone profiles of channel 0, the
// last and first words of channel 5's 1024-word RAM (so the whole RAM is
// streamed), the Raman table of the published Fig. 3 into channel 0 and a
// two-step table into every other channel by broadcast; then it preloads all
// DDSs, triggers once and checks the preloaded registers and RAM, the common
// start edge and channel 0's step lengths in clock cycles.
module tb_rf_pulse_gen_full;
  import rfgen_pkg::*;
  localparam int N = 8;
  localparam int CPB = (50_000_000 + 115_200 / 2) / 115_200;   // 434
  logic clk = 0, rst_n = 0, uart_rxd = 1, trigger_in = 0;
  logic [N-1:0] dds_sclk, dds_sdio, dds_cs_n, dds_io_update, cfg_busy, seq_running;
  logic [N-1:0] cfg_done, seq_done, trig_missed;
  dds_pins_t dds_pins [N];
  logic pkt_err, pkt_resync, uart_frame_err;
  int checks = 0, failures = 0;
  longint cyc = 0;

  rf_pulse_gen_top dut (.*);

  for (genvar c = 0; c < N; c++) begin : g_dds
    ad9910_model dds (.sclk(dds_sclk[c]), .sdio(dds_sdio[c]), .cs_n(dds_cs_n[c]),
                      .io_update(dds_io_update[c]), .profile(dds_pins[c].profile),
                      .drctl(dds_pins[c].drctl), .drhold(dds_pins[c].drhold));
  end

  always #10 clk = ~clk;   // 20 ns period
  always @(posedge clk) cyc++;

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask
  task automatic ubyte(input logic [7:0] b);
    @(negedge clk); uart_rxd = 0; repeat (CPB) @(negedge clk);
    for (int i = 0; i < 8; i++) begin uart_rxd = b[i]; repeat (CPB) @(negedge clk); end
    uart_rxd = 1; repeat (CPB + 2) @(negedge clk);
  endtask
  task automatic pkt(input logic [7:0] ch, input logic [7:0] a, input logic [63:0] d);
    logic [79:0] p; p = {ch, a, d};
    for (int i = 9; i >= 0; i--) ubyte(p[8*i +: 8]);
  endtask

  initial begin
    static logic [2:0] raman [7] = '{3'b100, 3'b000, 3'b001, 3'b000, 3'b010, 3'b110, 3'b111};
    static int dur [7] = '{400, 250, 400, 1000, 800, 1000, 400};   // 8 us pi/2 pulse = 400 cycles
    logic [63:0] prof [8];
    logic [31:0] w0, wlast;
    repeat (3) @(posedge clk); rst_n = 1; repeat (5) @(posedge clk);
    for (int p = 0; p < 8; p++) begin
      prof[p] = {$urandom, $urandom};
      pkt(8'd0, 8'h0E + 8'(p), prof[p]);
    end
    w0 = $urandom; wlast = $urandom;
    pkt(8'd5, A_RAM, {16'h0, 16'd1023, wlast});
    pkt(8'd5, A_RAM, {16'h0, 16'd0, w0});
    pkt(CH_BROADCAST, A_IDLE, 64'({3'b110, 2'b00}));
    pkt(CH_BROADCAST, A_STEP_BASE + 8'd0, 64'({1'b0, 1'b0, 3'b100, 2'b00, 32'd300}));
    pkt(CH_BROADCAST, A_STEP_BASE + 8'd1, 64'({1'b1, 1'b0, 3'b111, 2'b00, 32'd500}));
    for (int k = 0; k < 7; k++)
      pkt(8'd0, A_STEP_BASE + 8'(k), 64'({k == 6, 1'b0, raman[k], 2'b00, 32'(dur[k])}));
    pkt(CH_BROADCAST, A_CFG, 0);
    repeat (10) @(negedge clk);
    chk(cfg_busy[0] && cfg_busy[5], "preload running on channels 0 and 5");
    while (cfg_busy != '0) @(negedge clk);
    repeat (3) @(negedge clk);
    for (int p = 0; p < 8; p++)
      chk(g_dds[0].dds.act_reg[14 + p] == prof[p], $sformatf("ch0 profile %0d in DDS", p));
    chk(g_dds[5].dds.n_ramw == 1024, $sformatf("ch5 RAM words streamed: %0d", g_dds[5].dds.n_ramw));
    chk(g_dds[5].dds.ram[0] == w0 && g_dds[5].dds.ram[1023] == wlast, "ch5 RAM first/last word");
    chk(g_dds[0].dds.n_ioupd == 1 && g_dds[7].dds.n_ioupd == 1, "IO_UPDATE issued");
    begin
      longint t_trig;
      @(negedge clk); trigger_in = 1; t_trig = cyc + 1;
      while (seq_running == '0 && cyc < t_trig + 20) @(negedge clk);
      chk(seq_running == '1, "all channels start on one edge");
      chk(cyc == t_trig + 3, $sformatf("start %0d cycles after trigger", cyc - t_trig));
      for (int k = 0; k < 7; k++) begin
        int n; n = 0;
        while (dds_pins[0].profile == raman[k] && n < 5000) begin n++; @(negedge clk); end
        chk(n == dur[k], $sformatf("ch0 step %0d held %0d want %0d", k, n, dur[k]));
      end
      trigger_in = 0;
      repeat (5) @(negedge clk);
      chk(seq_running == '0 && dds_pins[0].profile == 3'b110, "sequence over, idle");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20_000_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
