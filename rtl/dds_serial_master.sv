// dds_serial_master: writes bytes into one AD9910 through its serial I/O port.
//
// The FPGA loads all DDS parameters through the AD9910's 3-wire serial port
// before a pulse sequence runs. This master takes a byte stream with a
// valid/ready handshake: the first byte of a transfer is the AD9910
// instruction byte (R/W bit 7 = 0 for write, register address in bits 4:0),
// the following bytes are register or RAM data, and byte_last marks the final
// byte. cs_n goes low when the first byte is accepted and stays low until the
// last byte has been shifted, so a transfer may be arbitrarily long (a RAM
// load is one transfer of 4 bytes per word). Bits go out MSB first; sdio
// changes while sclk is low and the DDS samples it on the sclk rising edge,
// as the AD9910 data sheet specifies. sclk runs at clk/(2*SCLK_HALF) and
// idles low. If the next byte is not yet offered, sclk simply pauses with
// cs_n held low. cs_n returns high for at least SCLK_HALF cycles between
// transfers. The signalling follows the AD9910 data sheet; SCLK_HALF is this
// implementation's choice (12.5 MHz at a 50 MHz clock).
module dds_serial_master #(
  parameter int unsigned SCLK_HALF = 2
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       byte_valid,
  input  logic [7:0] byte_data,
  input  logic       byte_last,
  output logic       byte_ready,
  output logic       sclk,
  output logic       sdio,
  output logic       cs_n,
  output logic       busy
);
  localparam int unsigned HW = (SCLK_HALF < 2) ? 1 : $clog2(SCLK_HALF);

  typedef enum logic [2:0] {S_IDLE, S_LOW, S_HIGH, S_NEXT, S_END} state_t;
  state_t      state;
  logic [7:0]  shreg;
  logic [2:0]  bitn;
  logic        last_q;
  logic [HW-1:0] hcnt;

  assign byte_ready = (state == S_IDLE) || (state == S_NEXT);
  assign busy       = (state != S_IDLE);
  wire   take       = byte_valid && byte_ready;
  wire   half_done  = (hcnt == HW'(SCLK_HALF - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; shreg <= '0; bitn <= '0; last_q <= 1'b0; hcnt <= '0;
      sclk <= 1'b0; sdio <= 1'b0; cs_n <= 1'b1;
    end else begin
      case (state)
        S_IDLE, S_NEXT: if (take) begin
          cs_n   <= 1'b0;
          sdio   <= byte_data[7];
          shreg  <= {byte_data[6:0], 1'b0};
          last_q <= byte_last;
          bitn   <= '0;
          hcnt   <= '0;
          state  <= S_LOW;
        end
        S_LOW: if (half_done) begin
          sclk <= 1'b1; hcnt <= '0; state <= S_HIGH;
        end else hcnt <= hcnt + 1'b1;
        S_HIGH: if (half_done) begin
          sclk <= 1'b0; hcnt <= '0;
          if (bitn == 3'd7) begin
            state <= last_q ? S_END : S_NEXT;
          end else begin
            bitn  <= bitn + 1'b1;
            sdio  <= shreg[7];
            shreg <= {shreg[6:0], 1'b0};
            state <= S_LOW;
          end
        end else hcnt <= hcnt + 1'b1;
        S_END: if (half_done) begin
          // cs_n rises half a period after the last sclk falling edge; then
          // stays high for another half period before the next transfer.
          hcnt <= '0;
          if (cs_n) state <= S_IDLE;
          cs_n <= 1'b1;
        end else hcnt <= hcnt + 1'b1;
        default: state <= S_IDLE;
      endcase
    end
  end

  // The DDS only sees clock edges while it is selected.
  a_sclk_in_cs: assert property (@(posedge clk) disable iff (!rst_n)
    sclk |-> !cs_n);
endmodule
