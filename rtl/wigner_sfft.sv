// wigner_sfft: the receiver's transform chain, time-domain OTFS samples in,
// delay-Doppler frame out.
//
//   Wigner  a 64-point FFT per time slot (the discrete Wigner transform; the
//           multiplication by the conjugate receive pulse that precedes it
//           is pulse_mult, in the top level), giving the time-frequency frame
//           Y[n,m], one 64-subcarrier column per slot, scaled by 1/sqrt(64).
//   SFFT    symplectic_fft: IFFT down each slot's 64 subcarriers, transpose
//           through the block RAM, FFT across the slots, scaled in total by
//           1/sqrt(N*M). Out comes the delay-Doppler frame in the same
//           column-major order in which the transmitter took it in.
//
// That the Wigner transform is an FFT divided by the square root of the
// number of subcarriers, and that the SFFT is an IFFT/FFT pair around a
// transpose, follows the paper. The rectangular time-frequency receive
// window is this design's choice (the paper names a receive window but does
// not give it).
//
// Interface: input = 4096 samples with `in_last` on the last sample of each
// slot; output = column-major frame, `out_last` per column,
// `out_frame_last` at the end of the frame. Valid/ready throughout.
module wigner_sfft
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
  logic    tf_valid, tf_ready, tf_last;

  fft_core #(.N(M), .INVERSE(1'b0)) u_wigner (
    .clk, .rst_n,
    .s_data(in_data), .s_valid(in_valid), .s_ready(in_ready), .s_last(in_last),
    .m_data(tf_data), .m_valid(tf_valid), .m_ready(tf_ready), .m_last(tf_last)
  );

  // The stored frame is N slots of M subcarriers: ROWS = M, COLS = N.
  symplectic_fft #(.ROWS(M), .COLS(N), .INV1(1'b1), .INV2(1'b0)) u_sfft (
    .clk, .rst_n,
    .in_data(tf_data), .in_valid(tf_valid), .in_ready(tf_ready), .in_last(tf_last),
    .out_data, .out_valid, .out_ready, .out_last, .out_frame_last
  );

endmodule
