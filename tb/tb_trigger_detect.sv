// tb_trigger_detect: self-checking test of trigger_detect.
// Raises the trigger at random times and lengths and checks that exactly one
// start pulse follows each rising edge, three clock edges after the edge that
// first samples the trigger high, and none on falling edges or steady levels.
module tb_trigger_detect;
  logic clk = 0, rst_n = 0, trig_in = 0, start;
  int checks = 0, failures = 0, n_start = 0;
  longint cyc = 0, t_start;

  trigger_detect dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) begin
    cyc++;
    if (start) begin n_start++; t_start = cyc; end
  end

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (3) @(posedge clk); rst_n = 1; repeat (5) @(posedge clk);
    for (int k = 0; k < 50; k++) begin
      int ns; longint t_rise;
      ns = n_start;
      @(negedge clk); trig_in = 1; t_rise = cyc + 1;  // sampled on next edge
      repeat ($urandom_range(2, 20)) @(negedge clk);
      trig_in = 0;
      repeat ($urandom_range(6, 20)) @(negedge clk);
      chk(n_start == ns + 1, $sformatf("edge %0d: one start pulse (%0d)", k, n_start - ns));
      // start is seen at the posedge after it was set: set on edge t_rise+2
      chk(t_start == t_rise + 3, $sformatf("edge %0d: latency %0d", k, t_start - t_rise));
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
