// packet_assembler: groups ten received characters into one 80-bit packet.
//
// Following the published protocol, ten successive UART characters make one
// packet and the first of them is the channel number. Bytes are shifted in so
// that the first byte ends in bits 79:72 (the channel field of packet_t) and
// the tenth in bits 7:0. pkt_valid pulses for one cycle, the cycle after the
// tenth byte's strobe, with pkt stable until the next packet completes.
// As this design's own addition, a partly received packet is dropped after
// IDLE_TIMEOUT clock cycles without a byte, so that framing recovers from a
// lost character (0 disables the timeout).
module packet_assembler
  import rfgen_pkg::*;
#(
  parameter int unsigned IDLE_TIMEOUT = 500_000
) (
  input  logic    clk,
  input  logic    rst_n,
  input  logic    rx_valid,
  input  logic [7:0] rx_data,
  output logic    pkt_valid,
  output packet_t pkt,
  output logic    resync        // one-cycle pulse: partial packet dropped
);
  localparam int unsigned TW = (IDLE_TIMEOUT < 2) ? 1 : $clog2(IDLE_TIMEOUT + 1);

  logic [8*PKT_BYTES-9:0] shreg;   // first nine bytes
  logic [3:0]             nbytes;
  logic [TW-1:0]          idle_cnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      shreg <= '0; nbytes <= '0; idle_cnt <= '0;
      pkt_valid <= 1'b0; pkt <= '0; resync <= 1'b0;
    end else begin
      pkt_valid <= 1'b0;
      resync    <= 1'b0;
      if (rx_valid) begin
        idle_cnt <= '0;
        if (nbytes == 4'(PKT_BYTES - 1)) begin
          pkt       <= {shreg[8*PKT_BYTES-9:0], rx_data};
          pkt_valid <= 1'b1;
          nbytes    <= '0;
        end else begin
          shreg  <= {shreg[8*PKT_BYTES-17:0], rx_data};
          nbytes <= nbytes + 1'b1;
        end
      end else if (IDLE_TIMEOUT != 0 && nbytes != 0) begin
        if (idle_cnt == TW'(IDLE_TIMEOUT - 1)) begin
          nbytes   <= '0;
          idle_cnt <= '0;
          resync   <= 1'b1;
        end else idle_cnt <= idle_cnt + 1'b1;
      end
    end
  end
endmodule
