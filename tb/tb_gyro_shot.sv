// tb_gyro_shot: a complete atom-gyroscope shot on the controller.
// Five channels play the light sequences of a cold-atom gyroscope: 2D
// cooling, 3D cooling, repumping, Raman and blow-away. Channels 5..7 are
// left unprogrammed and must stay idle. The clock (50 MHz) and RAM size
// (1024 words) are the defaults; only the baud rate is raised, to 5 MBd, so
// that loading the full RAM is quick to simulate.
//   * ch1 (3D cooling) gets a 1024-word RAM frequency sweep,
//     FTW(k) = 0x1999_9999 + k * 0x0004_0000, preloaded and checked word by
//     word in the DDS model. Its table follows the profile order of the
//     published Fig. 4, with DRCTL high during the sweep step (amplitude
//     ramp).
//   * ch3 (Raman) follows the profile order of the published Fig. 3, with
//     an 8 us (400-cycle) pi/2 pulse.
//   * The stage durations are illustrative values chosen for this test
//     (0.5 ms per shot); the published design treats them as adjustable.
// After two triggers every channel's pins are compared with their expected
// timeline on every clock cycle from the common start edge.
module tb_gyro_shot;
  import rfgen_pkg::*;
  localparam int N = 8, CPB = 10, US = 50;   // 50 cycles per microsecond
  logic clk = 0, rst_n = 0, uart_rxd = 1, trigger_in = 0;
  logic [N-1:0] dds_sclk, dds_sdio, dds_cs_n, dds_io_update, cfg_busy, seq_running;
  logic [N-1:0] cfg_done, seq_done, trig_missed;
  dds_pins_t dds_pins [N];
  logic pkt_err, pkt_resync, uart_frame_err;
  int checks = 0, failures = 0;

  rf_pulse_gen_top #(.BAUD(5_000_000)) dut (.*);
  for (genvar c = 0; c < N; c++) begin : g_dds
    ad9910_model dds (.sclk(dds_sclk[c]), .sdio(dds_sdio[c]), .cs_n(dds_cs_n[c]),
                      .io_update(dds_io_update[c]), .profile(dds_pins[c].profile),
                      .drctl(dds_pins[c].drctl), .drhold(dds_pins[c].drhold));
  end
  always #10 clk = ~clk;

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

  dds_pins_t idle [N];
  dds_pins_t tp   [N][$];   // step pins
  int        td   [N][$];   // step durations in cycles

  task automatic step(input int c, input logic [2:0] prof, input bit dc, input int us);
    tp[c].push_back('{profile: prof, drctl: dc, drhold: 1'b0});
    td[c].push_back(us * US);
  endtask

  function automatic logic [31:0] ftw(input int k);
    return 32'h1999_9999 + 32'(k) * 32'h0004_0000;
  endfunction

  initial begin
    for (int c = 0; c < N; c++) idle[c] = '0;
    // ch0 2D cooling: on (profile 0) while loading, off-band (1) after
    idle[0] = '{3'b000, 1'b0, 1'b0};
    step(0, 3'b000, 0, 90);  step(0, 3'b001, 0, 400);
    // ch1 3D cooling: Fig. 4 profile order, sweep step with amplitude ramp
    idle[1] = '{3'b110, 1'b0, 1'b0};
    step(1, 3'b100, 0, 20);  step(1, 3'b000, 1, 100); step(1, 3'b001, 0, 240);
    step(1, 3'b011, 0, 10);  step(1, 3'b001, 0, 10);  step(1, 3'b101, 0, 10);
    step(1, 3'b111, 0, 20);
    // ch2 repumping
    idle[2] = '{3'b010, 1'b0, 1'b0};
    step(2, 3'b010, 0, 120); step(2, 3'b011, 0, 240); step(2, 3'b001, 0, 10);
    step(2, 3'b011, 0, 20);
    // ch3 Raman: Fig. 3 profile order
    idle[3] = '{3'b110, 1'b0, 1'b0};
    step(3, 3'b110, 0, 210); step(3, 3'b100, 0, 10); step(3, 3'b000, 0, 30);
    step(3, 3'b001, 0, 8);   step(3, 3'b000, 0, 40); step(3, 3'b010, 0, 16);
    step(3, 3'b110, 0, 40);  step(3, 3'b111, 0, 8);
    // ch4 blow-away
    idle[4] = '{3'b110, 1'b0, 1'b0};
    step(4, 3'b110, 0, 230); step(4, 3'b100, 0, 10); step(4, 3'b110, 0, 10);

    repeat (3) @(posedge clk); rst_n = 1; repeat (5) @(posedge clk);
    // programming
    for (int c = 0; c < 5; c++) begin
      pkt(8'(c), A_IDLE, 64'(idle[c]));
      for (int p = 0; p < 8; p++) pkt(8'(c), 8'h0E + 8'(p), {32'(p), 32'(c)});
      for (int k = 0; k < tp[c].size(); k++)
        pkt(8'(c), A_STEP_BASE + 8'(k),
            64'({k == tp[c].size() - 1, 1'b0, tp[c][k], 32'(td[c][k])}));
    end
    pkt(8'd1, 8'h00, 64'h0000_0000_8040_0000);   // CFR1 example value
    for (int k = 0; k < 1024; k++) pkt(8'd1, A_RAM, {16'h0, 16'(k), ftw(k)});
    pkt(CH_BROADCAST, A_CFG, 0);
    repeat (5) @(negedge clk);
    while (cfg_busy != '0) @(negedge clk);
    repeat (3) @(negedge clk);
    chk(g_dds[1].dds.n_ramw == 1024, $sformatf("1024 RAM words sent (%0d)", g_dds[1].dds.n_ramw));
    begin
      int bad; bad = 0;
      for (int k = 0; k < 1024; k++) if (g_dds[1].dds.ram[k] != ftw(k)) bad++;
      chk(bad == 0, $sformatf("RAM sweep in DDS: %0d words wrong", bad));
    end
    chk(g_dds[3].dds.act_reg[16] == {32'd2, 32'd3}, "Raman pi profile (0x10) in DDS");
    chk(g_dds[6].dds.n_xfer == 0, "unprogrammed channel sends nothing");
    for (int shot = 0; shot < 2; shot++) begin
      int len, bad [N];
      len = 0;
      for (int c = 0; c < N; c++) begin
        int s; s = 0;
        foreach (td[c][k]) s += td[c][k];
        if (s > len) len = s;
        bad[c] = 0;
      end
      @(negedge clk); trigger_in = 1;
      while (seq_running == '0) @(negedge clk);
      chk(seq_running[4:0] == 5'b11111 && seq_running[7:5] == '0,
          $sformatf("shot %0d: five programmed channels start together", shot));
      // walk the timelines from the start edge
      for (int t = 0; t < len + 10; t++) begin
        for (int c = 0; c < N; c++) begin
          dds_pins_t e; int acc; e = idle[c]; acc = 0;
          foreach (td[c][k]) begin
            if (t >= acc && t < acc + td[c][k]) e = tp[c][k];
            acc += td[c][k];
          end
          if (dds_pins[c] != e) bad[c]++;
        end
        if (t == 100) trigger_in = 0;
        @(negedge clk);
      end
      for (int c = 0; c < N; c++)
        chk(bad[c] == 0, $sformatf("shot %0d ch%0d: %0d cycles off the timeline", shot, c, bad[c]));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5_000_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
