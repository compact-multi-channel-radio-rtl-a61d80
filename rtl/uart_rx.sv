// uart_rx: 8N1 asynchronous serial receiver for the host link.
//
// The host talks to the generator through a USB-to-UART bridge. This receiver
// synchronises rxd with two flip-flops, detects the falling start-bit edge,
// checks the start bit again half a bit later and then samples each data bit
// (LSB first) and the stop bit in the middle of its bit period. A received
// byte is presented on rx_data with a one-cycle rx_valid strobe at the middle
// of the stop bit; frame_err pulses instead when the stop bit reads 0.
// Baud rate and clock frequency are not fixed by the published design; 115200
// baud and a 50 MHz clock are this implementation's defaults.
module uart_rx #(
  parameter int unsigned CLK_HZ = 50_000_000,
  parameter int unsigned BAUD   = 115_200
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       rxd,
  output logic       rx_valid,
  output logic [7:0] rx_data,
  output logic       frame_err
);
  localparam int unsigned CPB  = (CLK_HZ + BAUD / 2) / BAUD;  // clocks per bit
  localparam int unsigned CW   = $clog2(CPB + 1);

  typedef enum logic [1:0] {S_IDLE, S_START, S_DATA, S_STOP} state_t;
  state_t          state;
  logic [1:0]      sync;
  logic [CW-1:0]   cnt;
  logic [2:0]      bitn;
  logic [7:0]      shreg;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) sync <= 2'b11;
    else        sync <= {sync[0], rxd};
  end
  wire rx_s = sync[1];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; cnt <= '0; bitn <= '0; shreg <= '0;
      rx_valid <= 1'b0; rx_data <= '0; frame_err <= 1'b0;
    end else begin
      rx_valid  <= 1'b0;
      frame_err <= 1'b0;
      case (state)
        S_IDLE: if (!rx_s) begin
          state <= S_START;
          cnt   <= CW'(CPB / 2 - 1);
        end
        S_START: if (cnt == 0) begin
          if (!rx_s) begin
            state <= S_DATA; cnt <= CW'(CPB - 1); bitn <= '0;
          end else begin
            state <= S_IDLE;                 // glitch, not a start bit
          end
        end else cnt <= cnt - 1'b1;
        S_DATA: if (cnt == 0) begin
          shreg <= {rx_s, shreg[7:1]};
          cnt   <= CW'(CPB - 1);
          if (bitn == 3'd7) state <= S_STOP;
          bitn  <= bitn + 1'b1;
        end else cnt <= cnt - 1'b1;
        S_STOP: if (cnt == 0) begin
          state <= S_IDLE;
          if (rx_s) begin rx_valid <= 1'b1; rx_data <= shreg; end
          else      frame_err <= 1'b1;
        end else cnt <= cnt - 1'b1;
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
