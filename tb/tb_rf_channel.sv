// tb_rf_channel: self-checking test of one rf_channel against the AD9910
// serial-port model.
// Programs the eight profile registers (0x0E..0x15), CFR1 and 20 RAM words,
// preloads, and checks that the model's active registers and RAM hold what
// was written after one IO_UPDATE. The 3D-cooling pin table of the
// published Fig. 4 (profiles 6, 4, 0, 1, 3, 1, 5, 7) is loaded before the
// preload; a trigger given during the preload must not start it. After the
// preload a trigger must play it, each step with its programmed length.
module tb_rf_channel;
  import rfgen_pkg::*;
  localparam int DEPTH = 64;
  logic clk = 0, rst_n = 0;
  logic wr_en = 0; logic [7:0] wr_addr = 0; logic [63:0] wr_data = 0;
  logic cfg_start = 0, shot_clr = 0, start = 0;
  logic dds_sclk, dds_sdio, dds_cs_n, dds_io_update;
  dds_pins_t dds_pins;
  logic cfg_busy, cfg_done, running, shot_done, start_missed;
  int checks = 0, failures = 0;
  int busy_not_idle = 0;   // cycles where the pins left idle during a preload

  rf_channel #(.RAM_DEPTH(DEPTH)) dut (.*);
  ad9910_model dds (.sclk(dds_sclk), .sdio(dds_sdio), .cs_n(dds_cs_n),
                    .io_update(dds_io_update), .profile(dds_pins.profile),
                    .drctl(dds_pins.drctl), .drhold(dds_pins.drhold));
  always #5 clk = ~clk;
  always @(posedge clk) if (rst_n && cfg_busy && dds_pins.profile != 3'b110) busy_not_idle++;

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask
  task automatic wr(input logic [7:0] a, input logic [63:0] d);
    @(negedge clk); wr_en = 1; wr_addr = a; wr_data = d;
    @(negedge clk); wr_en = 0;
  endtask

  initial begin
    logic [63:0] prof_w [8];
    logic [31:0] cfr1, ramw [20];
    static logic [2:0]  seq [8] = '{3'b100, 3'b000, 3'b001, 3'b011, 3'b001, 3'b101, 3'b111, 3'b000};
    int dur [7];
    repeat (3) @(posedge clk); rst_n = 1; repeat (3) @(posedge clk);
    cfr1 = 32'h8040_0000;                       // RAM enable, example value
    wr(8'h00, 64'(cfr1));
    for (int p = 0; p < 8; p++) begin
      prof_w[p] = {$urandom, $urandom};
      wr(8'h0E + 8'(p), prof_w[p]);
    end
    for (int w = 0; w < 20; w++) begin
      ramw[w] = $urandom;
      wr(A_RAM, {16'h0, 16'(w), ramw[w]});
    end
    wr(A_IDLE, 64'({3'b110, 2'b00}));
    // Fig. 4 pin table
    for (int k = 0; k < 7; k++) begin
      dur[k] = $urandom_range(2, 30);
      wr(A_STEP_BASE + 8'(k), 64'({k == 6, 1'b0, seq[k], 2'b00, 32'(dur[k])}));
    end
    // preload, with a trigger in the middle of it
    @(negedge clk); cfg_start = 1; @(negedge clk); cfg_start = 0;
    repeat (50) @(negedge clk);
    start = 1; @(negedge clk); start = 0;
    @(negedge clk);
    chk(!running, "trigger ignored while preloading");
    while (!cfg_done) @(negedge clk);
    repeat (2) @(negedge clk);
    chk(busy_not_idle == 0, $sformatf("pins idle during the preload (%0d cycles not)", busy_not_idle));
    chk(dds.n_ioupd == 1, "one IO_UPDATE");
    chk(dds.n_xfer == 10, $sformatf("10 serial transfers (%0d)", dds.n_xfer));
    chk(dds.act_reg[0][31:0] == cfr1, "CFR1 active in DDS");
    for (int p = 0; p < 8; p++)
      chk(dds.act_reg[14 + p] == prof_w[p], $sformatf("profile %0d register active in DDS", p));
    for (int w = 0; w < 20; w++)
      chk(dds.ram[w] == ramw[w], $sformatf("RAM word %0d", w));
    chk(dds.n_ramw == 20, "exactly 20 RAM words sent");
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    for (int k = 0; k < 7; k++) begin
      int n; n = 0;
      while (dds_pins.profile == seq[k] && running && n < 100) begin n++; @(negedge clk); end
      chk(n == dur[k], $sformatf("step %0d profile %b held %0d cycles, want %0d", k, seq[k], n, dur[k]));
    end
    chk(!running && dds_pins.profile == 3'b110, "back to idle profile 6");
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
