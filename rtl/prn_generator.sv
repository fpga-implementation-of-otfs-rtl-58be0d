// prn_generator: pseudo-random test-bit source of the OTFS transmitter.
//
// A 16-bit Fibonacci LFSR with feedback polynomial
// f(x) = 1 + x^11 + x^13 + x^14 + x^16, seeded with all ones. Each output bit
// is the XOR of register bits 0, 2, 3 and 5 (the "first, third, fourth and
// sixth" bits counted from the output end, i.e. taps 16, 14, 13, 11); that
// bit is also shifted in at the top while the register moves one place
// towards bit 0. The polynomial, the seed and the tap positions follow the
// paper; so does the bit budget: after `start` the generator emits
// FRAME_SYMBOLS * log2(M) bits (8192, 12288, 16384 or 20480 for 4-, 8-, 16-
// and 32-QAM) and then returns to IDLE.
//
// Interface: `start` (one cycle, accepted in IDLE) latches `order` and reseeds
// the register. Bits leave on a valid/ready stream (`bit_o`, `bit_valid`,
// `bit_ready`); the register advances on every accepted bit, so with
// `bit_ready` held high one bit is produced per clock. Back-pressure and the
// reseed on every start are this design's choices. `done` pulses for one
// cycle after the last bit of the frame has been accepted.
module prn_generator
  import otfs_pkg::*;
#(
  parameter int unsigned LFSR_W        = 16,
  parameter logic [15:0] SEED          = 16'hFFFF,
  parameter int unsigned FRAME_SYMS    = otfs_pkg::FRAME_SYMBOLS
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       start,
  input  qam_order_e order,
  output logic       bit_o,
  output logic       bit_valid,
  input  logic       bit_ready,
  output logic       busy,
  output logic       done
);

  typedef enum logic {IDLE, GO} state_e;

  localparam int unsigned CNT_W = $clog2(FRAME_SYMS * 5 + 1);

  state_e             state;
  logic [LFSR_W-1:0]  shift_reg;
  logic [CNT_W-1:0]   bit_count;
  logic [CNT_W-1:0]   number_of_bits;
  logic               feedback;

  assign feedback  = shift_reg[0] ^ shift_reg[2] ^ shift_reg[3] ^ shift_reg[5];
  assign bit_o     = feedback;
  assign bit_valid = (state == GO);
  assign busy      = (state == GO);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state          <= IDLE;
      shift_reg      <= SEED[LFSR_W-1:0];
      bit_count      <= '0;
      number_of_bits <= '0;
      done           <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        IDLE: begin
          if (start) begin
            state          <= GO;
            shift_reg      <= SEED[LFSR_W-1:0];
            bit_count      <= '0;
            number_of_bits <= CNT_W'(FRAME_SYMS * bits_per_symbol(order));
          end
        end
        GO: begin
          if (bit_ready) begin
            shift_reg <= {feedback, shift_reg[LFSR_W-1:1]};
            bit_count <= bit_count + 1'b1;
            if (bit_count == number_of_bits - 1'b1) begin
              state <= IDLE;
              done  <= 1'b1;
            end
          end
        end
        default: state <= IDLE;
      endcase
    end
  end

endmodule
