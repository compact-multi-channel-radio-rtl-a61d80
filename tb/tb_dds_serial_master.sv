// tb_dds_serial_master: self-checking test of dds_serial_master.
// Sends transfers of 1..12 random bytes, sometimes with the next byte offered
// late, and decodes SDIO on every SCLK rising edge while CS_N is low. Checks
// the bit stream of each CS_N-low window against the bytes sent (MSB first),
// that SCLK never rises with CS_N high, that consecutive SCLK rising edges
// inside a byte are 2*SCLK_HALF clocks apart, and that CS_N stays high for at
// least SCLK_HALF clocks between transfers.
module tb_dds_serial_master;
  localparam int H = 2;
  logic clk = 0, rst_n = 0;
  logic byte_valid = 0, byte_last = 0; logic [7:0] byte_data = 0;
  logic byte_ready, sclk, sdio, cs_n, busy;
  int checks = 0, failures = 0;
  bit exp_bits[$];     // bits of the transfer being sent
  bit got_bits[$];
  longint cyc = 0, t_rise = 0, t_csup = 0;
  int bits_in_byte = 0, n_xfer = 0;
  logic sclk_d = 0, cs_d = 1;

  dds_serial_master #(.SCLK_HALF(H)) dut (.*);
  always #5 clk = ~clk;

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // Monitor, sampled on the system clock.
  always @(posedge clk) begin
    cyc++;
    sclk_d <= sclk; cs_d <= cs_n;
    if (sclk && !sclk_d) begin
      chk(!cs_n, "sclk rises only while selected");
      got_bits.push_back(sdio);
      if (bits_in_byte % 8 != 0)
        chk(cyc - t_rise == 2*H, $sformatf("sclk period %0d", cyc - t_rise));
      bits_in_byte++;
      t_rise = cyc;
    end
    if (!cs_n && cs_d) begin
      chk(cyc - t_csup >= H || n_xfer == 0, $sformatf("cs_n high time %0d", cyc - t_csup));
      bits_in_byte = 0;
    end
    if (cs_n && !cs_d) begin
      t_csup = cyc; n_xfer++;
    end
  end

  initial begin
    repeat (3) @(posedge clk); rst_n = 1; repeat (3) @(posedge clk);
    n_xfer = 0;   // ignore the cs_n edge of leaving reset
    for (int k = 0; k < 60; k++) begin
      int n;
      n = $urandom_range(1, 12);
      exp_bits.delete(); got_bits.delete();
      for (int i = 0; i < n; i++) begin
        logic [7:0] b;
        b = 8'($urandom);
        for (int j = 7; j >= 0; j--) exp_bits.push_back(b[j]);
        @(negedge clk);
        if ($urandom_range(0, 3) == 0) repeat ($urandom_range(1, 30)) @(negedge clk);
        byte_valid = 1; byte_data = b; byte_last = (i == n - 1);
        do @(posedge clk); while (!byte_ready);
        @(negedge clk); byte_valid = 0; byte_last = 0;
      end
      wait (!busy);
      @(negedge clk);
      chk(cs_n, "cs_n high after transfer");
      chk(got_bits.size() == exp_bits.size(),
          $sformatf("xfer %0d: %0d bits, want %0d", k, got_bits.size(), exp_bits.size()));
      chk(got_bits == exp_bits, $sformatf("xfer %0d: bit stream", k));
      chk(n_xfer == k + 1, $sformatf("one cs_n window per transfer %0d %0d", n_xfer, k));
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
