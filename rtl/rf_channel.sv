// rf_channel: everything the controller keeps for one DDS.
//
// One channel joins a dds_preloader (register and RAM images, preload
// sequencing), a dds_serial_master (the AD9910 3-wire serial port) and a
// pulse_sequencer (the timed PROFILE/DRCTL/DRHOLD states). Host writes go to
// both the preloader and the sequencer, which each pick their own addresses.
// cfg_start begins a preload; start begins the pulse sequence, but is
// ignored while the channel is preloading. The PROFILE pins show the idle
// state during a preload, which selects the RAM profile for RAM writes.
// Giving every DDS its own serial port, so that all eight load in parallel,
// is this implementation's choice.
module rf_channel
  import rfgen_pkg::*;
#(
  parameter int unsigned RAM_DEPTH   = 1024,
  parameter int unsigned STEPS       = 16,
  parameter int unsigned SCLK_HALF   = 2,
  parameter int unsigned IOUP_CYCLES = 4
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        wr_en,
  input  logic [7:0]  wr_addr,
  input  logic [63:0] wr_data,
  input  logic        cfg_start,
  input  logic        shot_clr,
  input  logic        start,
  // AD9910 pins
  output logic        dds_sclk,
  output logic        dds_sdio,
  output logic        dds_cs_n,
  output logic        dds_io_update,
  output dds_pins_t   dds_pins,
  // status
  output logic        cfg_busy,
  output logic        cfg_done,
  output logic        running,
  output logic        shot_done,
  output logic        start_missed
);
  logic       bv, bl, br, ser_busy;
  logic [7:0] bd;

  dds_preloader #(.RAM_DEPTH(RAM_DEPTH), .IOUP_CYCLES(IOUP_CYCLES)) u_pre (
    .clk, .rst_n, .wr_en, .wr_addr, .wr_data, .cfg_start,
    .byte_valid(bv), .byte_data(bd), .byte_last(bl), .byte_ready(br),
    .ser_busy, .io_update(dds_io_update), .busy(cfg_busy), .done(cfg_done));

  dds_serial_master #(.SCLK_HALF(SCLK_HALF)) u_ser (
    .clk, .rst_n, .byte_valid(bv), .byte_data(bd), .byte_last(bl),
    .byte_ready(br), .sclk(dds_sclk), .sdio(dds_sdio), .cs_n(dds_cs_n),
    .busy(ser_busy));

  pulse_sequencer #(.STEPS(STEPS)) u_seq (
    .clk, .rst_n, .wr_en, .wr_addr, .wr_data, .shot_clr,
    .start(start && !cfg_busy), .pins(dds_pins), .running,
    .shot_done, .start_missed);
endmodule
