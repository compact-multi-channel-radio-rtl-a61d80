// cmd_decoder: interprets host packets and routes their data.
//
// Every packet names a channel (or 0xFF for all channels) and an address. The
// decoder checks both and, one clock cycle after pkt_valid, either
//   * raises wr_en for the addressed channel(s) with wr_addr/wr_data set, for
//     DDS register images (0x00..0x15), a DDS RAM word (0x16), a sequencer
//     step (0x40..0x4F), the idle pin state (0x50) or the sweep increment
//     (0x51);
//   * raises cfg_start (0x60: preload the DDS from the stored images) or
//     shot_clr (0x61: clear the per-trigger sweep offset);
//   * or raises pkt_err for an unknown channel or address, and does nothing.
// All outputs are one-cycle pulses. The published design describes a state
// machine that sends the received data to its location; this address map and
// the broadcast channel are this implementation's own choices.
module cmd_decoder
  import rfgen_pkg::*;
#(
  parameter int unsigned NUM_CH = NUM_CH_DEF
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              pkt_valid,
  input  packet_t           pkt,
  output logic [NUM_CH-1:0] wr_en,
  output logic [7:0]        wr_addr,
  output logic [63:0]       wr_data,
  output logic [NUM_CH-1:0] cfg_start,
  output logic [NUM_CH-1:0] shot_clr,
  output logic              pkt_err
);
  typedef enum logic [1:0] {K_WRITE, K_CFG, K_CLR, K_BAD} kind_t;

  kind_t             kind;
  logic [NUM_CH-1:0] sel;
  logic              ch_ok;

  always_comb begin
    ch_ok = 1'b1;
    sel   = '0;
    if (pkt.channel == CH_BROADCAST)           sel = '1;
    else if (32'(pkt.channel) < NUM_CH)        sel[pkt.channel[$clog2(NUM_CH)-1:0]] = 1'b1;
    else                                       ch_ok = 1'b0;

    if (pkt.addr <= A_RAM ||
        (pkt.addr >= A_STEP_BASE && pkt.addr < A_STEP_BASE + 8'd16) ||
        pkt.addr == A_IDLE || pkt.addr == A_GROW_INC)  kind = K_WRITE;
    else if (pkt.addr == A_CFG)                         kind = K_CFG;
    else if (pkt.addr == A_SHOT_CLR)                    kind = K_CLR;
    else                                                kind = K_BAD;
    if (!ch_ok) kind = K_BAD;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_en <= '0; cfg_start <= '0; shot_clr <= '0; pkt_err <= 1'b0;
      wr_addr <= '0; wr_data <= '0;
    end else begin
      wr_en <= '0; cfg_start <= '0; shot_clr <= '0; pkt_err <= 1'b0;
      if (pkt_valid) begin
        wr_addr <= pkt.addr;
        wr_data <= pkt.data;
        case (kind)
          K_WRITE: wr_en     <= sel;
          K_CFG:   cfg_start <= sel;
          K_CLR:   shot_clr  <= sel;
          default: pkt_err   <= 1'b1;
        endcase
      end
    end
  end
endmodule
