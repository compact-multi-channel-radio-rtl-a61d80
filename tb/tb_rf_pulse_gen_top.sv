// tb_rf_pulse_gen_top: end-to-end test of the eight-channel controller.
// Everything goes in through the UART pin, as from the host, at 10 clocks
// per bit; every channel drives an AD9910 serial-port model. The test
//   * writes all eight profile registers of every channel and RAM words for
//     channel 1, loads pulse tables (ch0: Raman table of Fig. 3, ch1: 3D
//     cooling table of Fig. 4, ch2: a DRG scan that grows each shot, ch3..7:
//     short two-step tables), and sets the idle state by broadcast;
//   * sends a packet for a channel that does not exist (pkt_err) and a
//     partial packet that the idle timeout drops (pkt_resync);
//   * broadcasts the preload command and triggers while it runs (ignored),
//     then compares each model's registers and RAM with what was sent;
//   * triggers three times: checks that all eight channels leave the idle
//     state on the same clock edge, three clocks after the trigger edge is
//     sampled, that each channel's steps last as programmed, that a trigger
//     during a sequence is flagged, and that the scan step of ch2 grows by
//     the increment each shot.
// Each mechanism is counted and a failure is counted for one never seen.
module tb_rf_pulse_gen_top;
  import rfgen_pkg::*;
  localparam int N = 8, CPB = 10, DEPTH = 64;
  logic clk = 0, rst_n = 0, uart_rxd = 1, trigger_in = 0;
  logic [N-1:0] dds_sclk, dds_sdio, dds_cs_n, dds_io_update, cfg_busy, seq_running;
  logic [N-1:0] cfg_done, seq_done, trig_missed;
  dds_pins_t dds_pins [N];
  logic pkt_err, pkt_resync, uart_frame_err;
  int checks = 0, failures = 0;
  longint cyc = 0;
  // mechanism counters
  int m_pkt_err = 0, m_resync = 0, m_preload = 0, m_ram = 0, m_ignored_cfg = 0,
      m_missed = 0, m_sync_start = 0, m_grow = 0, m_broadcast = 0, m_ioupd = 0;

  rf_pulse_gen_top #(.CLK_HZ(1_000_000), .BAUD(100_000), .IDLE_TIMEOUT(400),
                     .RAM_DEPTH(DEPTH)) dut (.*);

  for (genvar c = 0; c < N; c++) begin : g_dds
    ad9910_model dds (.sclk(dds_sclk[c]), .sdio(dds_sdio[c]), .cs_n(dds_cs_n[c]),
                      .io_update(dds_io_update[c]), .profile(dds_pins[c].profile),
                      .drctl(dds_pins[c].drctl), .drhold(dds_pins[c].drhold));
  end

  always #5 clk = ~clk;
  always @(posedge clk) begin
    cyc++;
    if (rst_n) begin   // outputs are only meaningful out of reset
      if (pkt_err) m_pkt_err++;
      if (pkt_resync) m_resync++;
      if (|trig_missed) m_missed++;
      m_preload += $countones(cfg_done);
    end
  end

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
    if (ch == CH_BROADCAST) m_broadcast++;
  endtask
  function automatic logic [63:0] stepw(input logic [2:0] prof, input bit c, input bit h,
                                        input bit grow, input bit last, input int dur);
    return 64'({last, grow, prof, c, h, 32'(dur)});
  endfunction

  logic [63:0] prof_w [N][8];
  logic [31:0] ramw [16];
  dds_pins_t   tbl [N][$];
  int          tdur[N][$];
  bit          tgrow[N][$];
  localparam int INC = 6;

  task automatic add_step(input int c, input logic [2:0] prof, input bit dc, input bit dh,
                          input bit grow, input int dur);
    tbl[c].push_back('{profile: prof, drctl: dc, drhold: dh});
    tdur[c].push_back(dur); tgrow[c].push_back(grow);
  endtask

  // Follows one channel's pins from the start edge and checks step lengths.
  task automatic follow(input int c, input int shot);
    for (int k = 0; k < tbl[c].size(); k++) begin
      int n, want; n = 0;
      want = tdur[c][k] + (tgrow[c][k] ? INC * shot : 0);
      while (dds_pins[c] == tbl[c][k] && n < 5000) begin n++; @(negedge clk); end
      chk(n == want, $sformatf("shot %0d ch%0d step %0d held %0d want %0d", shot, c, k, n, want));
      if (tgrow[c][k] && shot > 0 && n == want) m_grow++;
    end
    chk(dds_pins[c] == '{profile: 3'b110, drctl: 1'b0, drhold: 1'b0},
        $sformatf("shot %0d ch%0d back to idle", shot, c));
  endtask

  initial begin
    static logic [2:0] raman [7] = '{3'b100, 3'b000, 3'b001, 3'b000, 3'b010, 3'b110, 3'b111};
    static logic [2:0] cool3d[7] = '{3'b100, 3'b000, 3'b001, 3'b011, 3'b001, 3'b101, 3'b111};
    repeat (3) @(posedge clk); rst_n = 1; repeat (5) @(posedge clk);
    // tables
    for (int k = 0; k < 7; k++) add_step(0, raman[k], 0, 0, 0, $urandom_range(3, 40));
    for (int k = 0; k < 7; k++) add_step(1, cool3d[k], k == 1, 0, 0, $urandom_range(3, 40));
    add_step(2, 3'b000, 1, 0, 1, 10);
    add_step(2, 3'b000, 1, 1, 0, 25);
    add_step(2, 3'b000, 0, 0, 0, 8);
    for (int c = 3; c < N; c++) begin
      add_step(c, 3'(c - 3), 0, 0, 0, 5 + 3 * c);
      add_step(c, 3'b111, 0, 0, 0, 7 + c);
    end
    // register images
    for (int c = 0; c < N; c++)
      for (int p = 0; p < 8; p++) begin
        prof_w[c][p] = {$urandom, $urandom};
        pkt(8'(c), 8'h0E + 8'(p), prof_w[c][p]);
      end
    for (int w = 0; w < 16; w++) begin
      ramw[w] = $urandom;
      pkt(8'd1, A_RAM, {16'h0, 16'(w), ramw[w]});
    end
    for (int c = 0; c < N; c++)
      for (int k = 0; k < tbl[c].size(); k++)
        pkt(8'(c), A_STEP_BASE + 8'(k),
            stepw(tbl[c][k].profile, tbl[c][k].drctl, tbl[c][k].drhold, tgrow[c][k],
                  k == tbl[c].size() - 1, tdur[c][k]));
    pkt(8'd2, A_GROW_INC, 64'(INC));
    pkt(CH_BROADCAST, A_IDLE, 64'({3'b110, 2'b00}));
    // error cases
    pkt(8'd9, 8'h0E, 64'h1);
    ubyte(8'h01); ubyte(8'h0E); ubyte(8'h55);
    repeat (600) @(negedge clk);
    chk(m_pkt_err == 1, "unknown channel reported");
    chk(m_resync == 1, "partial packet dropped");
    for (int c = 0; c < N; c++)
      chk(dds_pins[c].profile == 3'b110, $sformatf("ch%0d idle profile 6 by broadcast", c));
    // preload everything, trigger during it
    pkt(CH_BROADCAST, A_CFG, 0);
    repeat (20) @(negedge clk);
    chk(cfg_busy == '1, "all channels preloading");
    trigger_in = 1; repeat (5) @(negedge clk); trigger_in = 0;
    repeat (3) @(negedge clk);
    if (seq_running == '0) m_ignored_cfg++;
    chk(seq_running == '0, "trigger ignored during preload");
    while (cfg_busy != '0) @(negedge clk);
    repeat (3) @(negedge clk);
    chk(m_preload == N, $sformatf("all %0d channels finished preload (%0d)", N, m_preload));
    for (int c = 0; c < N; c++) begin
      int nio;
      case (c)
        0: nio = g_dds[0].dds.n_ioupd; 1: nio = g_dds[1].dds.n_ioupd;
        2: nio = g_dds[2].dds.n_ioupd; 3: nio = g_dds[3].dds.n_ioupd;
        4: nio = g_dds[4].dds.n_ioupd; 5: nio = g_dds[5].dds.n_ioupd;
        6: nio = g_dds[6].dds.n_ioupd; default: nio = g_dds[7].dds.n_ioupd;
      endcase
      if (nio == 1) m_ioupd++;
    end
    chk(m_ioupd == N, "one IO_UPDATE per DDS");
    for (int p = 0; p < 8; p++) begin
      chk(g_dds[0].dds.act_reg[14 + p] == prof_w[0][p], $sformatf("ch0 profile %0d", p));
      chk(g_dds[1].dds.act_reg[14 + p] == prof_w[1][p], $sformatf("ch1 profile %0d", p));
      chk(g_dds[2].dds.act_reg[14 + p] == prof_w[2][p], $sformatf("ch2 profile %0d", p));
      chk(g_dds[3].dds.act_reg[14 + p] == prof_w[3][p], $sformatf("ch3 profile %0d", p));
      chk(g_dds[4].dds.act_reg[14 + p] == prof_w[4][p], $sformatf("ch4 profile %0d", p));
      chk(g_dds[5].dds.act_reg[14 + p] == prof_w[5][p], $sformatf("ch5 profile %0d", p));
      chk(g_dds[6].dds.act_reg[14 + p] == prof_w[6][p], $sformatf("ch6 profile %0d", p));
      chk(g_dds[7].dds.act_reg[14 + p] == prof_w[7][p], $sformatf("ch7 profile %0d", p));
    end
    for (int w = 0; w < 16; w++) begin
      chk(g_dds[1].dds.ram[w] == ramw[w], $sformatf("ch1 RAM word %0d", w));
      if (g_dds[1].dds.ram[w] == ramw[w]) m_ram++;
    end
    chk(g_dds[0].dds.n_ramw == 0, "no RAM traffic on ch0");
    // three shots
    for (int shot = 0; shot < 3; shot++) begin
      longint t_trig; bit left_together;
      @(negedge clk); trigger_in = 1; t_trig = cyc + 1;
      // wait until any channel leaves idle
      while (seq_running == '0 && cyc < t_trig + 20) @(negedge clk);
      left_together = (seq_running == '1);
      chk(left_together, $sformatf("shot %0d: all channels start on one edge", shot));
      chk(cyc == t_trig + 3, $sformatf("shot %0d: start %0d cycles after trigger", shot, cyc - t_trig));
      if (left_together) m_sync_start++;
      fork
        follow(0, shot); follow(1, shot); follow(2, shot); follow(3, shot);
        follow(4, shot); follow(5, shot); follow(6, shot); follow(7, shot);
        begin
          repeat (10) @(negedge clk); trigger_in = 0;
          if (shot == 1) begin
            repeat (5) @(negedge clk); trigger_in = 1;    // during the sequence
            repeat (5) @(negedge clk); trigger_in = 0;
          end
        end
      join
      repeat (400) @(negedge clk);
      chk(seq_running == '0, "all sequences ended");
    end
    chk(m_missed > 0, "trigger during sequence flagged");
    // every mechanism must have happened
    chk(m_broadcast > 0, "mechanism: broadcast packet");
    chk(m_pkt_err > 0,   "mechanism: packet error");
    chk(m_resync > 0,    "mechanism: packet resync");
    chk(m_preload > 0,   "mechanism: DDS preload");
    chk(m_ram > 0,       "mechanism: RAM preload");
    chk(m_ioupd > 0,     "mechanism: IO_UPDATE");
    chk(m_ignored_cfg > 0, "mechanism: trigger held off by preload");
    chk(m_missed > 0,    "mechanism: trigger during sequence");
    chk(m_sync_start > 0, "mechanism: synchronous start");
    chk(m_grow > 0,      "mechanism: per-shot DRG step");
    $display("mechanisms: broadcast=%0d pkt_err=%0d resync=%0d preload=%0d ram=%0d ioupd=%0d held_off=%0d missed=%0d sync_start=%0d grow=%0d",
             m_broadcast, m_pkt_err, m_resync, m_preload, m_ram, m_ioupd, m_ignored_cfg,
             m_missed, m_sync_start, m_grow);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2_000_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
