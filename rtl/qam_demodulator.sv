// qam_demodulator: hard-decision QAM demapper, complex samples in, bits out.
//
// Each received delay-Doppler sample (16-bit parts, same 2.10 scale as the
// transmitted symbols) is compared with every point of the selected
// constellation (otfs_pkg::qam_point, the modulator's own table); the label
// of the point at the smallest squared Euclidean distance is kept and sent
// out as log2(M) bits, most significant bit first, the order in which the
// modulator took them in. Nearest-point demapping follows the paper; the
// exhaustive search (up to 32 distance computations in one clock) and the
// bit-serial output are this design's choices, the simplest that match the
// bit-serial source.
//
// Interface: `order` stable for a frame. Sample stream in
// (`in_data/in_valid/in_ready`), bit stream out (`bit_o/bit_valid/
// bit_ready`). A sample is decided in the clock it is accepted; its first
// bit is valid the next clock, and the next sample is accepted together
// with the last bit, so a ready sink gets one bit per clock.
module qam_demodulator
  import otfs_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  qam_order_e order,
  input  cplx16_t    in_data,
  input  logic       in_valid,
  output logic       in_ready,
  output logic       bit_o,
  output logic       bit_valid,
  input  logic       bit_ready
);

  logic [4:0] label;       // label being sent out
  logic [2:0] nleft;       // bits of `label` still to send
  logic [4:0] best;        // decision for the sample at the input

  // Exhaustive nearest-point search.
  always_comb begin
    logic [34:0]        best_d;
    logic [34:0]        d;
    logic signed [16:0] dr, di;
    sym12_t             p;
    best   = '0;
    best_d = '1;
    p      = '0;
    dr     = '0;
    di     = '0;
    d      = '0;
    for (int k = 0; k < 32; k++) begin
      if (k < int'(qam_size(order))) begin
        p  = qam_point(order, 5'(k));
        dr = 17'(in_data.re) - 17'(p.re);
        di = 17'(in_data.im) - 17'(p.im);
        d  = 35'(dr * dr) + 35'(di * di);
        if (d < best_d) begin
          best_d = d;
          best   = 5'(k);
        end
      end
    end
  end

  assign bit_valid  = (nleft != 0);
  assign bit_o      = (nleft != 0) && label[3'(nleft - 1'b1)];
  assign in_ready   = (nleft == 0) || (nleft == 1 && bit_ready);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      label <= '0;
      nleft <= '0;
    end else begin
      if (bit_valid && bit_ready) nleft <= nleft - 1'b1;
      if (in_valid && in_ready) begin
        label <= best;
        nleft <= 3'(bits_per_symbol(order));
      end
    end
  end

endmodule
