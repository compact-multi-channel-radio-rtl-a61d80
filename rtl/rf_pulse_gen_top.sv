// rf_pulse_gen_top: eight-channel RF pulse-sequence controller for AD9910 DDSs.
//
// A host sends 10-byte packets over a UART (uart_rx, packet_assembler);
// cmd_decoder routes each to one channel or to all of them. Each rf_channel
// stores its DDS register and RAM images and its pulse table, and on a preload
// command writes the images into its AD9910 over a serial port and pulses
// IO_UPDATE. When the external trigger rises (trigger_detect), all channels
// start their sequences on the same clock edge and from then on only drive
// PROFILE[2:0], DRCTL and DRHOLD, so no serial traffic delays a frequency
// or amplitude switch. A trigger is ignored while any channel is still
// preloading, so that the channels never start apart.
//
// Timing: a trigger rising edge first sampled on clock edge E moves every
// channel's pins to its step 0 on edge E+3. Ports are per-channel arrays of
// the AD9910 control pins plus a few status outputs. The eight-channel
// structure, the ten-byte packets and the trigger-started, pin-only
// switching follow the published design; clock rate, baud rate and the
// packet address map are this implementation's choices.
module rf_pulse_gen_top
  import rfgen_pkg::*;
#(
  parameter int unsigned NUM_CH       = NUM_CH_DEF,
  parameter int unsigned CLK_HZ       = 50_000_000,
  parameter int unsigned BAUD         = 115_200,
  parameter int unsigned IDLE_TIMEOUT = 500_000,
  parameter int unsigned RAM_DEPTH    = 1024,
  parameter int unsigned STEPS        = 16,
  parameter int unsigned SCLK_HALF    = 2,
  parameter int unsigned IOUP_CYCLES  = 4
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              uart_rxd,
  input  logic              trigger_in,
  output logic [NUM_CH-1:0] dds_sclk,
  output logic [NUM_CH-1:0] dds_sdio,
  output logic [NUM_CH-1:0] dds_cs_n,
  output logic [NUM_CH-1:0] dds_io_update,
  output dds_pins_t         dds_pins [NUM_CH],
  output logic [NUM_CH-1:0] cfg_busy,
  output logic [NUM_CH-1:0] seq_running,
  output logic [NUM_CH-1:0] cfg_done,      // preload finished (pulse)
  output logic [NUM_CH-1:0] seq_done,      // sequence finished (pulse)
  output logic [NUM_CH-1:0] trig_missed,   // trigger during a sequence
  output logic              pkt_err,       // unknown channel or address
  output logic              pkt_resync,    // partial packet dropped
  output logic              uart_frame_err
);
  logic       rx_valid, pkt_valid, start;
  logic [7:0] rx_data;
  packet_t    pkt;
  logic [NUM_CH-1:0] wr_en, cfg_start, shot_clr;
  logic [7:0]  wr_addr;
  logic [63:0] wr_data;

  uart_rx #(.CLK_HZ(CLK_HZ), .BAUD(BAUD)) u_rx (
    .clk, .rst_n, .rxd(uart_rxd), .rx_valid, .rx_data,
    .frame_err(uart_frame_err));

  packet_assembler #(.IDLE_TIMEOUT(IDLE_TIMEOUT)) u_pa (
    .clk, .rst_n, .rx_valid, .rx_data, .pkt_valid, .pkt, .resync(pkt_resync));

  cmd_decoder #(.NUM_CH(NUM_CH)) u_dec (
    .clk, .rst_n, .pkt_valid, .pkt, .wr_en, .wr_addr, .wr_data,
    .cfg_start, .shot_clr, .pkt_err);

  trigger_detect u_trig (.clk, .rst_n, .trig_in(trigger_in), .start);

  wire start_all = start && (cfg_busy == '0);

  for (genvar c = 0; c < NUM_CH; c++) begin : g_ch
    rf_channel #(.RAM_DEPTH(RAM_DEPTH), .STEPS(STEPS),
                 .SCLK_HALF(SCLK_HALF), .IOUP_CYCLES(IOUP_CYCLES)) u_ch (
      .clk, .rst_n, .wr_en(wr_en[c]), .wr_addr, .wr_data,
      .cfg_start(cfg_start[c]), .shot_clr(shot_clr[c]), .start(start_all),
      .dds_sclk(dds_sclk[c]), .dds_sdio(dds_sdio[c]), .dds_cs_n(dds_cs_n[c]),
      .dds_io_update(dds_io_update[c]), .dds_pins(dds_pins[c]),
      .cfg_busy(cfg_busy[c]), .cfg_done(cfg_done[c]),
      .running(seq_running[c]), .shot_done(seq_done[c]),
      .start_missed(trig_missed[c]));
  end
endmodule
