// isfft_heisenberg: the transmitter's transform chain, delay-Doppler frame
// in, time-domain OTFS samples out.
//
//   ISFFT       symplectic_fft: IFFT down each 64-sample column of the
//               delay-Doppler matrix, transpose through the block RAM, FFT
//               down each transposed column. Out comes the time-frequency
//               frame X[n,m], one 64-subcarrier column per time slot n.
//   Heisenberg  one more 64-point IFFT per time slot, turning the 64
//               subcarrier values of slot n into its 64 time samples (the
//               discrete Heisenberg transform with no cyclic prefix; the
//               transmit pulse is applied afterwards, by pulse_mult in the
//               top level).
//
// The ISFFT structure follows the paper. The paper gives the Heisenberg
// transform only as an equation and draws it next to, not inside, the
// ISFFT block; realising it as a per-slot IFFT, with the pulse as a separate
// multiplier and a rectangular (all-ones) time-frequency transmit window, is
// this design's choice. All
// transforms are unitary, so signal power is preserved end to end.
//
// Interface: input = column-major frame stream with `in_last` per column;
// output = 4096 time samples, `out_last` at the end of each 64-sample
// slot, `out_frame_last` at the end of the frame. Valid/ready throughout.
module isfft_heisenberg
  import otfs_pkg::*;
#(
  parameter int unsigned N = otfs_pkg::N_DOPPLER,
  parameter int unsigned M = otfs_pkg::M_DELAY
) (
  input  logic    clk,
  input  logic    rst_n,
  input  cplx16_t in_data,
  input  logic    in_valid,
  output logic    in_ready,
  input  logic    in_last,
  output cplx16_t out_data,
  output logic    out_valid,
  input  logic    out_ready,
  output logic    out_last,
  output logic    out_frame_last
);

  cplx16_t tf_data;
  logic    tf_valid, tf_ready, tf_last, tf_frame_last;
  logic    frame_end_seen;   // the slot now in the Heisenberg core ends the frame

  symplectic_fft #(.ROWS(N), .COLS(M), .INV1(1'b1), .INV2(1'b0)) u_isfft (
    .clk, .rst_n,
    .in_data, .in_valid, .in_ready, .in_last,
    .out_data(tf_data), .out_valid(tf_valid), .out_ready(tf_ready),
    .out_last(tf_last), .out_frame_last(tf_frame_last)
  );

  fft_core #(.N(M), .INVERSE(1'b1)) u_heisenberg (
    .clk, .rst_n,
    .s_data(tf_data), .s_valid(tf_valid), .s_ready(tf_ready), .s_last(tf_last),
    .m_data(out_data), .m_valid(out_valid), .m_ready(out_ready), .m_last(out_last)
  );

  // The Heisenberg core handles one slot at a time, so remembering whether
  // the slot it took in closed the frame is enough to mark the frame end.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) frame_end_seen <= 1'b0;
    else if (tf_valid && tf_ready && tf_last) frame_end_seen <= tf_frame_last;
  end

  assign out_frame_last = out_valid && out_last && frame_end_seen;

endmodule
