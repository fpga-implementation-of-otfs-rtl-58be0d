// otfs_top: OTFS modulator and demodulator with built-in test-bit source,
// one 64 x 64 delay-Doppler frame at a time.
//
//   prn_generator -> qam_modulator -> array_reshape -> isfft_heisenberg
//     -> pulse_mult (g_tx) -> tx_* ports   ...channel...   rx_* ports ->
//   pulse_mult (conj g_rx) -> wigner_sfft -> qam_demodulator -> out_bit
//
// A `start` pulse (taken only when no frame is in flight) latches the
// modulation order and lets the LFSR emit 4096*log2(M) bits; they are mapped
// to 4096 QAM symbols, arranged as a 64 x 64 delay-Doppler matrix, taken to
// the time-frequency plane by the ISFFT and to 4096 time samples (64 slots
// of 64) by the Heisenberg transform, and each slot is multiplied by the
// transmit pulse g_tx. Those leave on the tx_* stream. The
// time-domain channel between transmitter and receiver (and any RF front
// end) is outside this design: the rx_* stream takes the received samples
// back; they are multiplied by the conjugate receive pulse, and the Wigner
// transform and SFFT return them to the delay-Doppler
// plane, and the demodulator turns them into 4096*log2(M) bits on
// out_bit. `frame_done` pulses with the last bit. For a loop-back test
// connect tx_* to rx_* directly; the output bits then equal the LFSR bits.
// Both pulses reset to the rectangular pulse (all coefficients 1.0); they
// are loaded, between frames, through `pulse_we_tx/pulse_we_rx`,
// `pulse_addr` and `pulse_coef` (Q1.14).
//
// The chain of blocks follows the paper's top-level architecture, with the
// Heisenberg and Wigner transforms attached to the ISFFT and SFFT; bringing
// the time-domain samples out as ports, and accepting a new frame only
// after the previous one has been demodulated, are this design's choices.
//
// All streams are valid/ready with 16-bit {im, re} samples; `tx_last` and
// `rx_last` mark the last sample of each 64-sample slot.
module otfs_top
  import otfs_pkg::*;
#(
  parameter int unsigned N = otfs_pkg::N_DOPPLER,
  parameter int unsigned M = otfs_pkg::M_DELAY
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       start,
  input  qam_order_e order,
  output logic       busy,
  // transmit and receive pulse coefficients
  input  logic                 pulse_we_tx,
  input  logic                 pulse_we_rx,
  input  logic [$clog2(M)-1:0] pulse_addr,
  input  cplx16_t              pulse_coef,
  // time-domain transmit samples, towards the channel
  output cplx16_t    tx_data,
  output logic       tx_valid,
  input  logic       tx_ready,
  output logic       tx_last,
  output logic       tx_frame_last,
  // time-domain receive samples, from the channel
  input  cplx16_t    rx_data,
  input  logic       rx_valid,
  output logic       rx_ready,
  input  logic       rx_last,
  // demodulated bits
  output logic       out_bit,
  output logic       out_valid,
  input  logic       out_ready,
  output logic       frame_done
);

  localparam int unsigned SYMS  = N * M;
  localparam int unsigned BIT_W = $clog2(SYMS * 5 + 1);

  qam_order_e         cfg_order;
  logic               in_flight;
  logic               prn_start;
  logic [BIT_W-1:0]   out_bits;

  // source
  logic    prn_bit, prn_valid, prn_ready, prn_busy, prn_done;
  sym12_t  qam_sym;
  logic    qam_valid, qam_ready;
  cplx16_t dd_data;
  logic    dd_valid, dd_ready, dd_last, dd_frame_last;
  // time-domain samples between the transforms and the pulse multipliers
  cplx16_t hb_data, rw_data;
  logic    hb_valid, hb_ready, hb_last, hb_frame_last;
  logic    rw_valid, rw_ready, rw_last;
  // receiver
  cplx16_t rdd_data;
  logic    rdd_valid, rdd_ready, rdd_last, rdd_frame_last;

  assign prn_start = start && !in_flight;
  assign busy      = in_flight;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cfg_order <= QAM32;
      in_flight <= 1'b0;
      out_bits  <= '0;
    end else begin
      if (prn_start) begin
        cfg_order <= order;
        in_flight <= 1'b1;
        out_bits  <= '0;
      end else if (out_valid && out_ready) begin
        out_bits <= out_bits + 1'b1;
        if (frame_done) in_flight <= 1'b0;
      end
    end
  end

  assign frame_done = in_flight && out_valid && out_ready &&
                      (32'(out_bits) == SYMS * bits_per_symbol(cfg_order) - 1);

  prn_generator #(.FRAME_SYMS(SYMS)) u_prn (
    .clk, .rst_n, .start(prn_start), .order(order),
    .bit_o(prn_bit), .bit_valid(prn_valid), .bit_ready(prn_ready),
    .busy(prn_busy), .done(prn_done)
  );

  qam_modulator u_qam_mod (
    .clk, .rst_n, .order(cfg_order),
    .bit_i(prn_bit), .bit_valid(prn_valid), .bit_ready(prn_ready),
    .sym(qam_sym), .sym_valid(qam_valid), .sym_ready(qam_ready)
  );

  array_reshape #(.ROWS(N), .COLS(M)) u_reshape (
    .clk, .rst_n,
    .in_sym(qam_sym), .in_valid(qam_valid), .in_ready(qam_ready),
    .out_data(dd_data), .out_valid(dd_valid), .out_ready(dd_ready),
    .col_last(dd_last), .frame_last(dd_frame_last)
  );

  isfft_heisenberg #(.N(N), .M(M)) u_tx (
    .clk, .rst_n,
    .in_data(dd_data), .in_valid(dd_valid), .in_ready(dd_ready), .in_last(dd_last),
    .out_data(hb_data), .out_valid(hb_valid), .out_ready(hb_ready),
    .out_last(hb_last), .out_frame_last(hb_frame_last)
  );

  pulse_mult #(.LEN(M), .CONJ(1'b0)) u_tx_pulse (
    .clk, .rst_n,
    .coef_we(pulse_we_tx), .coef_addr(pulse_addr), .coef_wdata(pulse_coef),
    .s_data(hb_data), .s_valid(hb_valid), .s_ready(hb_ready),
    .s_last(hb_last), .s_flast(hb_frame_last),
    .m_data(tx_data), .m_valid(tx_valid), .m_ready(tx_ready),
    .m_last(tx_last), .m_flast(tx_frame_last)
  );

  pulse_mult #(.LEN(M), .CONJ(1'b1)) u_rx_pulse (
    .clk, .rst_n,
    .coef_we(pulse_we_rx), .coef_addr(pulse_addr), .coef_wdata(pulse_coef),
    .s_data(rx_data), .s_valid(rx_valid), .s_ready(rx_ready),
    .s_last(rx_last), .s_flast(1'b0),
    .m_data(rw_data), .m_valid(rw_valid), .m_ready(rw_ready),
    .m_last(rw_last), .m_flast()
  );

  wigner_sfft #(.N(N), .M(M)) u_rx (
    .clk, .rst_n,
    .in_data(rw_data), .in_valid(rw_valid), .in_ready(rw_ready), .in_last(rw_last),
    .out_data(rdd_data), .out_valid(rdd_valid), .out_ready(rdd_ready),
    .out_last(rdd_last), .out_frame_last(rdd_frame_last)
  );

  qam_demodulator u_qam_demod (
    .clk, .rst_n, .order(cfg_order),
    .in_data(rdd_data), .in_valid(rdd_valid), .in_ready(rdd_ready),
    .bit_o(out_bit), .bit_valid(out_valid), .bit_ready(out_ready)
  );

  // The reshaped frame ends exactly when the LFSR has produced its last bit's
  // symbol, and the receiver's frame end falls on the 4096th sample.
  assert property (@(posedge clk) disable iff (!rst_n)
                   dd_valid && dd_ready && dd_frame_last |-> !prn_busy);
  assert property (@(posedge clk) disable iff (!rst_n)
                   prn_done |-> in_flight);
  assert property (@(posedge clk) disable iff (!rst_n)
                   rdd_valid && rdd_ready && rdd_frame_last |-> rdd_last);

endmodule
