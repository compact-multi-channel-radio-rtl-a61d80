// rfgen_pkg: types and constants shared by the RF pulse-sequence generator.
//
// The generator drives eight AD9910 direct digital synthesisers (DDS). A host
// sends 10-byte packets over a UART: byte 1 is the channel number, byte 2 an
// address, bytes 3..10 a 64-bit big-endian data field. The ten-byte packet and
// the leading channel byte follow the published design; the address map below
// is this implementation's own choice. Register numbers 0x00..0x16 are the
// AD9910's own (profiles 0x0E..0x15, RAM 0x16); their byte widths come from the
// AD9910 data sheet.
package rfgen_pkg;

  localparam int unsigned NUM_CH_DEF = 8;    // eight DDS channels
  localparam int unsigned PKT_BYTES  = 10;   // ten characters per packet

  // Channel byte value that addresses every channel at once.
  localparam logic [7:0] CH_BROADCAST = 8'hFF;

  // Address byte map.
  localparam logic [7:0] A_REG_LAST  = 8'h15;  // 0x00..0x15 AD9910 registers
  localparam logic [7:0] A_RAM       = 8'h16;  // one 32-bit RAM word
  localparam logic [7:0] A_STEP_BASE = 8'h40;  // 0x40..0x4F sequencer steps
  localparam logic [7:0] A_IDLE      = 8'h50;  // pin state between sequences
  localparam logic [7:0] A_GROW_INC  = 8'h51;  // per-shot duration increment
  localparam logic [7:0] A_CFG       = 8'h60;  // command: preload the DDS
  localparam logic [7:0] A_SHOT_CLR  = 8'h61;  // command: clear sweep offset

  localparam int unsigned NUM_DDS_REGS = 22;   // 0x00..0x15

  typedef struct packed {
    logic [7:0]  channel;
    logic [7:0]  addr;
    logic [63:0] data;
  } packet_t;

  // Pins that the sequencer drives on one DDS while a sequence runs.
  typedef struct packed {
    logic [2:0] profile;  // PROFILE[2:0]
    logic       drctl;    // DRCTL: digital ramp direction
    logic       drhold;   // DRHOLD: digital ramp hold
  } dds_pins_t;

  // One sequencer step as stored (data[38:0] of a step packet).
  typedef struct packed {
    logic        last;      // data[38]: final step of the sequence
    logic        grow;      // data[37]: duration grows by the increment per shot
    dds_pins_t   pins;      // data[36:32]
    logic [31:0] duration;  // data[31:0]: clock cycles the pins are held
  } step_t;

  // Byte width of an AD9910 register write (0: reserved, not written).
  function automatic int unsigned dds_reg_bytes(input logic [4:0] a);
    case (a)
      5'h05, 5'h06:                        return 0;
      5'h08:                               return 2;
      5'h0B, 5'h0C, 5'h0E, 5'h0F, 5'h10,
      5'h11, 5'h12, 5'h13, 5'h14, 5'h15:   return 8;
      default:                             return 4;
    endcase
  endfunction

endpackage
