// tb_dds_preloader: self-checking test of dds_preloader.
// Writes random AD9910 register images (including the reserved 0x05) and RAM
// words, starts a preload and collects the byte stream with a random-ready
// sink that also imitates the serial master's busy flag. The expected stream
// is built here from the register widths of the AD9910 data sheet: one
// transfer per written register in address order, then one RAM transfer of
// words 0..N-1, then one IO_UPDATE pulse of IOUP_CYCLES cycles after busy
// falls. Also checks that writes during a preload are ignored.
module tb_dds_preloader;
  import rfgen_pkg::*;
  localparam int DEPTH = 64, IOUP = 4;
  logic clk = 0, rst_n = 0;
  logic wr_en = 0; logic [7:0] wr_addr = 0; logic [63:0] wr_data = 0;
  logic cfg_start = 0;
  logic byte_valid, byte_last, byte_ready = 0, ser_busy = 0;
  logic [7:0] byte_data;
  logic io_update, busy, done;
  int checks = 0, failures = 0;

  logic [63:0] ref_reg [22];
  bit          ref_v   [22];
  logic [31:0] ref_ram [DEPTH];
  int          ref_n;
  byte unsigned got[$];       // bytes, with 0x100 marker avoided: keep lengths
  int          xfer_len[$];
  int          cur_len;
  int          io_len, io_pulses, busy_left;
  bit          io_after_busy;

  dds_preloader #(.RAM_DEPTH(DEPTH), .IOUP_CYCLES(IOUP)) dut (.*);
  always #5 clk = ~clk;

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // Byte sink imitating the serial master.
  always @(posedge clk) begin
    if (byte_valid && byte_ready) begin
      got.push_back(byte_data);
      cur_len++;
      if (byte_last) begin xfer_len.push_back(cur_len); cur_len = 0; busy_left = 20; end
    end
    if (busy_left > 0) busy_left--;
    ser_busy <= (busy_left > 0);
    byte_ready <= ($urandom_range(0, 2) != 0);
    if (io_update) begin
      io_len++;
      if (ser_busy) io_after_busy = 0;
    end
  end
  always @(posedge io_update) io_pulses++;

  task automatic wr(input logic [7:0] a, input logic [63:0] d);
    @(negedge clk); wr_en = 1; wr_addr = a; wr_data = d;
    @(negedge clk); wr_en = 0;
  endtask

  task automatic run_and_check(input string tag);
    byte unsigned exp[$]; int exp_len[$];
    for (int a = 0; a < 22; a++) if (ref_v[a] && dds_reg_bytes(5'(a)) != 0) begin
      int nb; nb = dds_reg_bytes(5'(a));
      exp.push_back(8'(a));
      for (int i = nb - 1; i >= 0; i--) exp.push_back(ref_reg[a][8*i +: 8]);
      exp_len.push_back(nb + 1);
    end
    if (ref_n > 0) begin
      exp.push_back(8'h16);
      for (int w = 0; w < ref_n; w++)
        for (int i = 3; i >= 0; i--) exp.push_back(ref_ram[w][8*i +: 8]);
      exp_len.push_back(1 + 4 * ref_n);
    end
    got.delete(); xfer_len.delete(); cur_len = 0; io_len = 0; io_pulses = 0;
    io_after_busy = 1;
    @(negedge clk); cfg_start = 1; @(negedge clk); cfg_start = 0;
    chk(busy, {tag, ": busy after start"});
    // a write during the preload must be ignored
    wr(8'h07, 64'hDEAD_BEEF);
    while (!done) @(negedge clk);
    @(negedge clk);
    chk(!busy, {tag, ": idle after done"});
    chk(got.size() == exp.size(), $sformatf("%s: %0d bytes, want %0d", tag, got.size(), exp.size()));
    chk(got == exp, {tag, ": byte stream"});
    chk(xfer_len == exp_len, {tag, ": transfer framing"});
    chk(io_pulses == 1 && io_len == IOUP, $sformatf("%s: io_update %0d pulses %0d cycles", tag, io_pulses, io_len));
    chk(io_after_busy, {tag, ": io_update after serial port idle"});
  endtask

  initial begin
    ref_n = 0;
    for (int a = 0; a < 22; a++) begin ref_v[a] = 0; ref_reg[a] = '0; end
    repeat (3) @(posedge clk); rst_n = 1; repeat (3) @(posedge clk);
    // round 1: a few registers, no RAM
    foreach (ref_v[a]) if ($urandom_range(0, 2) == 0 || a == 5 || a == 8 || a == 14) begin
      ref_reg[a] = {$urandom, $urandom};
      ref_v[a] = 1;
      wr(8'(a), ref_reg[a]);
    end
    run_and_check("regs");
    // round 2: rewrite some registers and load RAM words (out of order)
    for (int a = 14; a < 22; a++) begin
      ref_reg[a] = {$urandom, $urandom}; ref_v[a] = 1; wr(8'(a), ref_reg[a]);
    end
    ref_n = 37;
    for (int w = ref_n - 1; w >= 0; w--) begin
      ref_ram[w] = $urandom;
      wr(A_RAM, {16'h0, 16'(w), ref_ram[w]});
    end
    wr(A_RAM, {16'h0, 16'(DEPTH + 3), 32'h1234_5678});   // out of range: ignored
    wr(8'h40, 64'h1);                                     // not a DDS address
    run_and_check("regs+ram");
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
