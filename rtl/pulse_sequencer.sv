// pulse_sequencer: per-channel timer that plays a pin sequence on the DDS.
//
// Because all frequencies, amplitudes and ramps are preloaded into the DDS,
// a pulse sequence is just a timed series of PROFILE[2:0], DRCTL and DRHOLD
// pin states. This block holds a table of up to STEPS steps, each with a pin
// state, a duration in clock cycles, a 'grow' flag and a 'last' flag
// (step_t). Between sequences the pins hold a programmable idle state.
//
// When start pulses and no sequence is running, the pins change to step 0 on
// the next clock edge; each step's pins are then held for exactly its
// duration (a duration of 0 counts as 1), after which the next step's pins
// appear on the same edge the timer expires. After the step marked last, the
// last step written since reset, or step STEPS-1, the pins return to the
// idle state and shot_done pulses. A start is ignored while step 0 has never
// been written, so an unused channel stays idle. A start during a running
// sequence is ignored and reported on start_missed.
//
// Frequency or phase scans (one DRG step further on every trigger): steps
// with the grow flag last grow_off cycles longer than programmed, where
// grow_off rises by the programmed increment after every completed sequence
// and is cleared by shot_clr. With DRCTL high during such a step the DDS
// ramps for one more ramp interval each shot; a following step with DRHOLD
// high holds the reached value, and one with both low ramps back down.
//
// Writes: wr_addr 0x40+k loads step k from wr_data[38:0]; 0x50 loads the idle
// pins from wr_data[4:0]; 0x51 loads the increment. Table writes during a
// running sequence are ignored. The pin-only switching and the per-trigger
// DRG stepping follow the published design; the table format, its size and
// the growing-duration mechanism are this implementation's choices.
module pulse_sequencer
  import rfgen_pkg::*;
#(
  parameter int unsigned STEPS = 16,
  parameter int unsigned DUR_W = 32
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        wr_en,
  input  logic [7:0]  wr_addr,
  input  logic [63:0] wr_data,
  input  logic        shot_clr,
  input  logic        start,
  output dds_pins_t   pins,
  output logic        running,
  output logic        shot_done,
  output logic        start_missed
);
  localparam int unsigned SW = $clog2(STEPS);

  logic [SW-1:0]  cur_step;

  step_t          table_q [STEPS];
  logic [STEPS-1:0] step_ok;      // step written since reset
  dds_pins_t      idle;
  logic [DUR_W-1:0] grow_inc, grow_off, timer;

  wire [7:0] step_off = wr_addr - A_STEP_BASE;
  wire       tbl_we   = wr_en && !running;

  function automatic logic [DUR_W-1:0] eff_dur(input step_t s,
                                               input logic [DUR_W-1:0] off);
    logic [DUR_W-1:0] d;
    d = DUR_W'(s.duration) + (s.grow ? off : '0);
    return (d == 0) ? DUR_W'(1) : d;
  endfunction

  always_ff @(posedge clk) begin
    if (tbl_we && wr_addr >= A_STEP_BASE && 32'(step_off) < STEPS)
      table_q[step_off[SW-1:0]] <= step_t'(wr_data[$bits(step_t)-1:0]);
  end

  wire   last_step = table_q[cur_step].last || (32'(cur_step) == STEPS - 1) ||
                     !step_ok[cur_step + 1'b1];
  step_t next_s;
  assign next_s = table_q[cur_step + 1'b1];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      step_ok <= '0;
      idle <= '0; grow_inc <= '0; grow_off <= '0; timer <= '0;
      pins <= '0; running <= 1'b0; cur_step <= '0;
      shot_done <= 1'b0; start_missed <= 1'b0;
    end else begin
      shot_done    <= 1'b0;
      start_missed <= start && running;
      if (tbl_we && wr_addr >= A_STEP_BASE && 32'(step_off) < STEPS)
        step_ok[step_off[SW-1:0]] <= 1'b1;
      if (tbl_we && wr_addr == A_IDLE)     idle     <= dds_pins_t'(wr_data[4:0]);
      if (tbl_we && wr_addr == A_GROW_INC) grow_inc <= DUR_W'(wr_data[31:0]);
      if (!running) begin
        if (shot_clr) grow_off <= '0;
        if (start && step_ok[0]) begin
          running  <= 1'b1;
          cur_step <= '0;
          pins     <= table_q[0].pins;
          timer    <= eff_dur(table_q[0], grow_off) - 1'b1;
        end else begin
          pins <= idle;
        end
      end else if (timer == 0) begin
        if (last_step) begin
          running   <= 1'b0;
          pins      <= idle;
          grow_off  <= shot_clr ? '0 : grow_off + grow_inc;
          shot_done <= 1'b1;
        end else begin
          cur_step <= cur_step + 1'b1;
          pins     <= next_s.pins;
          timer    <= eff_dur(next_s, grow_off) - 1'b1;
        end
      end else begin
        timer <= timer - 1'b1;
        if (shot_clr) grow_off <= '0;
      end
    end
  end
endmodule
