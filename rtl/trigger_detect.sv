// trigger_detect: rising-edge detector for the external trigger input.
//
// The pulse sequences of all channels start when the rising edge of the
// external trigger is detected. The asynchronous input passes a two-flop
// synchroniser; a third flop holds the previous level, and start pulses for
// exactly one clock cycle when the synchronised level goes from 0 to 1.
// Timing: start goes high on the third rising clock edge counting the one
// that first samples trig_in high (two synchroniser stages plus the edge
// register), and stays high for one cycle.
// The synchroniser depth is this implementation's choice.
module trigger_detect (
  input  logic clk,
  input  logic rst_n,
  input  logic trig_in,
  output logic start
);
  logic [2:0] sh;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sh    <= '0;
      start <= 1'b0;
    end else begin
      sh    <= {sh[1:0], trig_in};
      start <= sh[1] & ~sh[2];
    end
  end
endmodule
