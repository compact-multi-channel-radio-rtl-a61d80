// tb_cmd_decoder: self-checking test of cmd_decoder.
// Drives random packets (valid and invalid channels and addresses) and
// compares the one-cycle outputs with a reference decode written here from
// the address map: write, preload, clear, or error.
module tb_cmd_decoder;
  import rfgen_pkg::*;
  localparam int N = 8;
  logic clk = 0, rst_n = 0, pkt_valid = 0;
  packet_t pkt;
  logic [N-1:0] wr_en, cfg_start, shot_clr;
  logic [7:0] wr_addr; logic [63:0] wr_data; logic pkt_err;
  int checks = 0, failures = 0;

  cmd_decoder #(.NUM_CH(N)) dut (.*);
  always #5 clk = ~clk;

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    pkt = '0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int k = 0; k < 400; k++) begin
      logic [7:0] ch, ad; logic [N-1:0] sel; bit chok, isw, iscfg, isclr;
      case ($urandom_range(0, 3))
        0: ch = 8'hFF;
        1: ch = 8'($urandom);
        default: ch = 8'($urandom_range(0, 7));
      endcase
      case ($urandom_range(0, 4))
        0: ad = 8'($urandom_range(0, 8'h16));
        1: ad = 8'($urandom_range(8'h40, 8'h4F));
        2: ad = 8'($urandom_range(8'h50, 8'h51));
        3: ad = 8'($urandom_range(8'h5E, 8'h62));
        default: ad = 8'($urandom);
      endcase
      chok = (ch == 8'hFF) || (ch < 8);
      sel  = (ch == 8'hFF) ? '1 : (ch < 8 ? N'(1) << ch : '0);
      isw  = (ad <= 8'h16) || (ad >= 8'h40 && ad <= 8'h51);
      iscfg = (ad == 8'h60); isclr = (ad == 8'h61);
      @(negedge clk);
      pkt = '{channel: ch, addr: ad, data: {$urandom, $urandom}};
      pkt_valid = 1;
      @(negedge clk);
      pkt_valid = 0;
      chk(wr_en     == ((chok && isw)   ? sel : '0), $sformatf("wr_en ch=%h ad=%h", ch, ad));
      chk(cfg_start == ((chok && iscfg) ? sel : '0), $sformatf("cfg ch=%h ad=%h", ch, ad));
      chk(shot_clr  == ((chok && isclr) ? sel : '0), $sformatf("clr ch=%h ad=%h", ch, ad));
      chk(pkt_err   == !(chok && (isw || iscfg || isclr)), $sformatf("err ch=%h ad=%h", ch, ad));
      if (chok && isw) chk(wr_addr == ad && wr_data == pkt.data, "address and data forwarded");
      @(negedge clk);
      chk(wr_en == '0 && cfg_start == '0 && shot_clr == '0 && !pkt_err, "outputs are pulses");
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
