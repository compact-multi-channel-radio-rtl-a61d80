// tb_pulse_sequencer: self-checking test of pulse_sequencer.
// 1. Loads the Raman pulse table of the published Fig. 3 (idle profile 6 =
//    register 0x14, then profiles 4, 0, 1, 0, 2, 6, 7) with random durations,
//    triggers it and compares the pins with the expected timeline on every
//    clock cycle: each step's pins for exactly its duration, starting one
//    clock after start, then the idle state. Also checks that consecutive
//    states of that table differ in one PROFILE bit, as the figure intends.
// 2. A DRG scan table (DRCTL step marked grow, DRHOLD step, ramp-down step):
//    the DRCTL step must last one increment longer on every shot, and return
//    to its programmed length after shot_clr.
// 3. A start during a running sequence is ignored and flagged, and a start
//    before any step is written leaves the pins idle.
module tb_pulse_sequencer;
  import rfgen_pkg::*;
  localparam int STEPS = 16;
  logic clk = 0, rst_n = 0;
  logic wr_en = 0; logic [7:0] wr_addr = 0; logic [63:0] wr_data = 0;
  logic shot_clr = 0, start = 0;
  dds_pins_t pins;
  logic running, shot_done, start_missed;
  logic [3:0] cur_step;
  int checks = 0, failures = 0, n_missed = 0, n_done = 0;

  pulse_sequencer #(.STEPS(STEPS)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) begin
    if (start_missed) n_missed++;
    if (shot_done) n_done++;
  end

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  task automatic wr(input logic [7:0] a, input logic [63:0] d);
    @(negedge clk); wr_en = 1; wr_addr = a; wr_data = d;
    @(negedge clk); wr_en = 0;
  endtask

  function automatic logic [63:0] step_word(input logic [2:0] prof, input bit c,
      input bit h, input bit grow, input bit last, input int dur);
    return 64'({last, grow, prof, c, h, 32'(dur)});
  endfunction

  // Trigger and compare against an expected per-cycle pin list.
  task automatic run(input dds_pins_t exp[$], input dds_pins_t idle, input string tag,
                     input bit poke = 0);
    int bad; bad = 0;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    for (int n = 0; n < exp.size(); n++) begin
      if (pins != exp[n]) bad++;
      if (poke && n == 3) start = 1;
      if (poke && n == 4) start = 0;
      @(negedge clk);
    end
    chk(bad == 0, $sformatf("%s: %0d cycles differ from the timeline", tag, bad));
    chk(pins == idle && !running, {tag, ": back to idle after last step"});
  endtask

  initial begin
    dds_pins_t exp[$], idle;
    static logic [2:0] prof [8] = '{3'b100, 3'b000, 3'b001, 3'b000, 3'b010, 3'b110, 3'b111, 3'b000};
    int dur [7];
    repeat (3) @(posedge clk); rst_n = 1; repeat (3) @(posedge clk);
    // ---- 0. empty table: a start must leave the pins idle ----
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    repeat (3) @(negedge clk);
    chk(!running && pins == '0 && n_done == 0, "start with an empty table is ignored");
    // ---- 1. Raman table (Fig. 3) ----
    idle = '{profile: 3'b110, drctl: 1'b0, drhold: 1'b0};
    wr(A_IDLE, 64'(idle));
    repeat (2) @(negedge clk);
    chk(pins == idle, "idle pins before trigger");
    for (int k = 0; k < 7; k++) begin
      dur[k] = $urandom_range(1, 25);
      wr(A_STEP_BASE + 8'(k), step_word(prof[k], 0, 0, 0, k == 6, dur[k]));
    end
    for (int k = 0; k < 7; k++) begin
      logic [2:0] prev;
      prev = (k == 0) ? idle.profile : prof[k-1];
      chk($countones(prev ^ prof[k]) == 1, $sformatf("Fig. 3 step %0d changes one PROFILE pin", k));
    end
    chk($countones(prof[6] ^ idle.profile) == 1, "Fig. 3 last step to idle changes one pin");
    for (int rep = 0; rep < 3; rep++) begin
      exp.delete();
      for (int k = 0; k < 7; k++)
        repeat (dur[k]) exp.push_back('{profile: prof[k], drctl: 1'b0, drhold: 1'b0});
      run(exp, idle, $sformatf("raman shot %0d", rep), rep == 2);
    end
    repeat (2) @(negedge clk);
    chk(n_missed == 1, $sformatf("start during sequence flagged (%0d)", n_missed));
    chk(n_done == 3, "shot_done once per sequence");
    // ---- 2. DRG scan: DRCTL step grows by INC per shot ----
    begin
      int base, inc, hold, down;
      base = 5; inc = 3; hold = 12; down = 4;
      wr(A_SHOT_CLR, 0);
      wr(A_GROW_INC, 64'(inc));
      wr(A_STEP_BASE + 0, step_word(3'b011, 1, 0, 1, 0, base));
      wr(A_STEP_BASE + 1, step_word(3'b011, 1, 1, 0, 0, hold));
      wr(A_STEP_BASE + 2, step_word(3'b011, 0, 0, 0, 1, down));
      @(negedge clk); shot_clr = 1; @(negedge clk); shot_clr = 0;
      for (int shot = 0; shot < 5; shot++) begin
        exp.delete();
        repeat (base + inc * shot) exp.push_back('{profile: 3'b011, drctl: 1'b1, drhold: 1'b0});
        repeat (hold)              exp.push_back('{profile: 3'b011, drctl: 1'b1, drhold: 1'b1});
        repeat (down)              exp.push_back('{profile: 3'b011, drctl: 1'b0, drhold: 1'b0});
        run(exp, idle, $sformatf("scan shot %0d", shot));
      end
      @(negedge clk); shot_clr = 1; @(negedge clk); shot_clr = 0;
      exp.delete();
      repeat (base) exp.push_back('{profile: 3'b011, drctl: 1'b1, drhold: 1'b0});
      repeat (hold) exp.push_back('{profile: 3'b011, drctl: 1'b1, drhold: 1'b1});
      repeat (down) exp.push_back('{profile: 3'b011, drctl: 1'b0, drhold: 1'b0});
      run(exp, idle, "scan after clear");
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
