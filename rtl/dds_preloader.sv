// dds_preloader: one channel's AD9910 parameter store and preload engine.
//
// The key idea of the generator is that every parameter a pulse sequence
// needs is written into the DDS before the sequence starts, so that during
// the sequence only the PROFILE, DRCTL and DRHOLD pins change. This block
// keeps the channel's image of the AD9910 control registers 0x00..0x15 (each
// up to 64 bits; the eight profile registers are 0x0E..0x15) and of its RAM
// (register 0x16, RAM_DEPTH words of 32 bits). Host packets write the images
// through wr_en/wr_addr/wr_data; a RAM word packet carries the word index in
// wr_data[47:32] and the word in wr_data[31:0]. Writes arriving while a
// preload runs are ignored.
//
// On cfg_start the block streams, as a byte stream for dds_serial_master:
//   1. for each register written since reset, in ascending address order, one
//      transfer of an instruction byte and the register's bytes, MSB first
//      (2, 4 or 8 bytes as the AD9910 data sheet gives; 0x05/0x06 are
//      reserved and skipped);
//   2. if any RAM word was written, one transfer of instruction 0x16 followed
//      by words 0..N-1 (N = highest index written + 1), 4 bytes each;
//   3. after the serial port has finished, an IO_UPDATE pulse of IOUP_CYCLES
//      clock cycles, which makes the DDS apply what it received.
// busy is high from the cycle after cfg_start until io_update falls; done
// pulses for one cycle at the end. The RAM is written into whatever RAM
// profile the idle PROFILE pins select, so the host chooses that profile.
// The register numbers, the 1024-word RAM and the preload-then-pins scheme
// follow the published design; the ordering, the IO_UPDATE pulse and the
// packet fields are this implementation's choices.
module dds_preloader
  import rfgen_pkg::*;
#(
  parameter int unsigned RAM_DEPTH   = 1024,
  parameter int unsigned IOUP_CYCLES = 4
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        wr_en,
  input  logic [7:0]  wr_addr,
  input  logic [63:0] wr_data,
  input  logic        cfg_start,
  output logic        byte_valid,
  output logic [7:0]  byte_data,
  output logic        byte_last,
  input  logic        byte_ready,
  input  logic        ser_busy,
  output logic        io_update,
  output logic        busy,
  output logic        done
);
  localparam int unsigned RW = (RAM_DEPTH < 2) ? 1 : $clog2(RAM_DEPTH);
  localparam int unsigned IW = (IOUP_CYCLES < 2) ? 1 : $clog2(IOUP_CYCLES);

  typedef enum logic [3:0] {
    S_IDLE, S_SCAN, S_REG_INSTR, S_REG_DATA, S_RAM_INSTR,
    S_RAM_FETCH, S_RAM_LOAD, S_RAM_DATA, S_WAIT_SER, S_IOUP
  } state_t;

  // Images.
  logic [63:0]             regs [NUM_DDS_REGS];
  logic [NUM_DDS_REGS-1:0] reg_valid;
  logic [31:0]             ram  [RAM_DEPTH];
  logic [RW:0]             ram_count;   // highest written index + 1
  logic [31:0]             ram_q;

  state_t      state;
  logic [4:0]  idx;
  logic [RW-1:0] ridx;
  logic [63:0] shreg;
  logic [3:0]  cnt;
  logic [IW-1:0] iocnt;
  logic        ser_seen;

  wire [15:0] ram_widx = wr_data[47:32];
  wire        img_we   = wr_en && state == S_IDLE && !cfg_start;

  // Register image.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      reg_valid <= '0;
      ram_count <= '0;
    end else if (img_we) begin
      if (wr_addr <= A_REG_LAST) reg_valid[wr_addr[4:0]] <= 1'b1;
      if (wr_addr == A_RAM && 32'(ram_widx) < RAM_DEPTH &&
          (RW+1)'(ram_widx) >= ram_count)
        ram_count <= (RW+1)'(ram_widx) + 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (img_we && wr_addr <= A_REG_LAST) regs[wr_addr[4:0]] <= wr_data;
  end

  // RAM image: one write port, one registered read port.
  always_ff @(posedge clk) begin
    if (img_we && wr_addr == A_RAM && 32'(ram_widx) < RAM_DEPTH)
      ram[ram_widx[RW-1:0]] <= wr_data[31:0];
    ram_q <= ram[ridx];
  end

  // Byte stream towards the serial master.
  always_comb begin
    byte_valid = 1'b0;
    byte_data  = '0;
    byte_last  = 1'b0;
    case (state)
      S_REG_INSTR: begin byte_valid = 1'b1; byte_data = {3'b000, idx}; end
      S_RAM_INSTR: begin byte_valid = 1'b1; byte_data = A_RAM; end
      S_REG_DATA:  begin byte_valid = 1'b1; byte_data = shreg[63:56];
                         byte_last  = (cnt == 4'd1); end
      S_RAM_DATA:  begin byte_valid = 1'b1; byte_data = shreg[63:56];
                         byte_last  = (cnt == 4'd1) &&
                                      ((RW+1)'(ridx) == ram_count - 1'b1); end
      default: ;
    endcase
  end

  wire take = byte_valid && byte_ready;
  int unsigned nb;
  assign nb = dds_reg_bytes(idx);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; idx <= '0; ridx <= '0; shreg <= '0; cnt <= '0;
      iocnt <= '0; io_update <= 1'b0; done <= 1'b0; ser_seen <= 1'b0;
    end else begin
      done <= 1'b0;
      case (state)
        S_IDLE: if (cfg_start) begin
          idx <= '0; state <= S_SCAN;
        end
        S_SCAN: begin
          if (32'(idx) == NUM_DDS_REGS) begin
            state <= (ram_count != 0) ? S_RAM_INSTR : S_WAIT_SER;
          end else if (reg_valid[idx] && nb != 0) begin
            shreg <= regs[idx] << (8 * (8 - nb));
            cnt   <= 4'(nb);
            state <= S_REG_INSTR;
          end else idx <= idx + 1'b1;
        end
        S_REG_INSTR: if (take) state <= S_REG_DATA;
        S_REG_DATA: if (take) begin
          shreg <= shreg << 8;
          cnt   <= cnt - 1'b1;
          if (cnt == 4'd1) begin idx <= idx + 1'b1; state <= S_SCAN; end
        end
        S_RAM_INSTR: if (take) begin ridx <= '0; state <= S_RAM_FETCH; end
        S_RAM_FETCH: state <= S_RAM_LOAD;     // ram_q valid next cycle
        S_RAM_LOAD: begin
          shreg <= {ram_q, 32'h0};
          cnt   <= 4'd4;
          state <= S_RAM_DATA;
        end
        S_RAM_DATA: if (take) begin
          shreg <= shreg << 8;
          cnt   <= cnt - 1'b1;
          if (cnt == 4'd1) begin
            if (byte_last) state <= S_WAIT_SER;
            else begin ridx <= ridx + 1'b1; state <= S_RAM_FETCH; end
          end
        end
        S_WAIT_SER: begin
          // Wait one cycle for the serial master to take up the last byte,
          // then until it has finished shifting.
          ser_seen <= 1'b1;
          if (ser_seen && !ser_busy) begin
            ser_seen  <= 1'b0;
            io_update <= 1'b1;
            iocnt     <= '0;
            state     <= S_IOUP;
          end
        end
        S_IOUP: if (iocnt == IW'(IOUP_CYCLES - 1)) begin
          io_update <= 1'b0;
          done      <= 1'b1;
          state     <= S_IDLE;
        end else iocnt <= iocnt + 1'b1;
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy = (state != S_IDLE);
endmodule
