// ad9910_model: behavioural model of the AD9910 serial port, for testbenches.
//
// Not synthesizable and not a model of the RF output: it decodes the 3-wire
// serial writes (MSB first, SDIO sampled on SCLK rising edges while CS_N is
// low) into a buffered register file, moves it to the active registers on a
// rising IO_UPDATE, and stores RAM writes (instruction 0x16, 32 bits per word
// from RAM word 0 on). Register widths are those of the AD9910 data sheet.
// Testbenches read act_reg, ram, n_xfer and n_ioupd hierarchically.
module ad9910_model (
  input logic       sclk,
  input logic       sdio,
  input logic       cs_n,
  input logic       io_update,
  input logic [2:0] profile,
  input logic       drctl,
  input logic       drhold
);
  import rfgen_pkg::*;
  logic [63:0] buf_reg [32];
  logic [63:0] act_reg [32];
  logic [31:0] ram     [1024];
  int          n_xfer  = 0;   // completed transfers (CS_N rising)
  int          n_ioupd = 0;
  int          n_ramw  = 0;   // RAM words received

  logic [7:0]  instr;
  logic [63:0] sh;
  int          nbit = 0;
  int          ramp;

  initial begin
    for (int i = 0; i < 32; i++) begin buf_reg[i] = '0; act_reg[i] = '0; end
    for (int i = 0; i < 1024; i++) ram[i] = '0;
  end

  always @(negedge cs_n) begin nbit = 0; ramp = 0; sh = '0; end
  always @(posedge cs_n) if (nbit > 0) n_xfer++;

  always @(posedge sclk) if (!cs_n) begin
    if (nbit < 8) begin
      instr = {instr[6:0], sdio};
    end else begin
      sh = {sh[62:0], sdio};
      if (instr[4:0] == 5'h16) begin
        if ((nbit - 8) % 32 == 31) begin
          if (ramp < 1024) ram[ramp] = sh[31:0];
          ramp++; n_ramw++;
        end
      end else if (nbit - 8 == 8 * dds_reg_bytes(instr[4:0]) - 1) begin
        buf_reg[instr[4:0]] = sh;
      end
    end
    nbit++;
  end

  always @(posedge io_update) begin
    n_ioupd++;
    for (int i = 0; i < 32; i++) act_reg[i] = buf_reg[i];
  end
endmodule
