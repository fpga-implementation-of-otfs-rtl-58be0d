// qam_modulator: maps the serial bit stream onto 4/8/16/32-QAM symbols.
//
// Bits arrive one per handshake, first bit = most significant bit of the
// symbol label (the order in which a bit-input QAM mapper reads them). After
// log2(M) bits the label addresses the constellation look-up table
// (otfs_pkg::qam_point) and the symbol's real and imaginary parts are
// registered on the output as 12-bit two's-complement 2.10 numbers. The
// table-driven mapping, the four orders and the 2.10 format follow the paper;
// the label-to-point assignment of 32-QAM, and the handshakes, are this
// design's choices (see otfs_pkg).
//
// Interface: `order` must be stable for a whole frame. Input stream
// `bit_i/bit_valid/bit_ready`; output stream `sym/sym_valid/sym_ready`, one
// symbol register deep. `bit_ready` is high whenever the output register is
// empty or being emptied, so with a ready sink the modulator takes one bit
// per clock and emits one symbol every log2(M) clocks, one clock after its
// last bit.
module qam_modulator
  import otfs_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  qam_order_e order,
  input  logic       bit_i,
  input  logic       bit_valid,
  output logic       bit_ready,
  output sym12_t     sym,
  output logic       sym_valid,
  input  logic       sym_ready
);

  logic [3:0] label_hi;   // bits collected so far, newest in bit 0
  logic [2:0] nbits;      // number of bits collected
  logic [4:0] label;      // full label once the last bit arrives
  logic       last_bit;

  assign bit_ready = !sym_valid || sym_ready;
  assign label     = {label_hi, bit_i};
  assign last_bit  = (32'(nbits) == bits_per_symbol(order) - 1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      label_hi  <= '0;
      nbits     <= '0;
      sym       <= '0;
      sym_valid <= 1'b0;
    end else begin
      if (sym_valid && sym_ready) sym_valid <= 1'b0;
      if (bit_valid && bit_ready) begin
        if (last_bit) begin
          // Mask the label to log2(M) bits before the table look-up.
          sym       <= qam_point(order, label & 5'(qam_size(order) - 1));
          sym_valid <= 1'b1;
          label_hi  <= '0;
          nbits     <= '0;
        end else begin
          label_hi  <= label[3:0];
          nbits     <= nbits + 1'b1;
        end
      end
    end
  end

  // A presented symbol must stay put until it is taken.
  assert property (@(posedge clk) disable iff (!rst_n)
                   sym_valid && !sym_ready |=> sym_valid && $stable(sym));

endmodule
