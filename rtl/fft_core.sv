// fft_core: N-point complex FFT / IFFT on a valid/ready sample stream.
//
// Stands in for the vendor FFT core that the transceiver's (I)SFFT, Heisenberg
// and Wigner transforms are built from; it has that core's kind of interface
// (32-bit {im, re} samples, tlast on the N-th sample of a transform) and its
// function, but its insides are this design's own and deliberately simple:
// a single-buffer, in-place radix-2 decimation-in-time engine.
//
//   LOAD    accepts N samples, written at bit-reversed addresses, sign
//           extended to IW bits (no scaling inside, so no overflow).
//   COMPUTE log2(N) stages of N/2 butterflies, one butterfly per clock:
//           t = x[i1]*W, x[i0] = x[i0]+t, x[i1] = x[i0]-t, with
//           W = exp(-+j*2*pi*k/N) in Q1.14 and rounding after the product.
//   UNLOAD  presents the N results in natural order, each shifted right by
//           log2(N)/2 bits (rounded, then saturated to 16 bits).
//
// The final shift by log2(N)/2 makes the transform unitary (1/sqrt(N),
// 1/8 for N = 64): it is the same scaling the paper obtains by taking bits
// [18:3] of the core's unscaled output, and it is the 1/sqrt(.) normalization
// of the SFFT/Wigner equations. Unlike a plain bit slice the shift rounds:
// truncation biases every sample by -1/2 LSB, and the following transforms
// pile that bias up in the zero-frequency bin (about -32 LSB after the four
// transforms of the receiver). INVERSE selects exp(+j...) (IFFT).
//
// Timing: N + (N/2)*log2(N) + N clocks per transform with a ready sink
// (320 for N = 64). `s_ready` is low during COMPUTE and UNLOAD: that is the
// core's back-pressure on its source.
module fft_core
  import otfs_pkg::*;
#(
  parameter int unsigned N       = 64,
  parameter bit          INVERSE = 1'b0
) (
  input  logic    clk,
  input  logic    rst_n,
  input  cplx16_t s_data,
  input  logic    s_valid,
  output logic    s_ready,
  input  logic    s_last,
  output cplx16_t m_data,
  output logic    m_valid,
  input  logic    m_ready,
  output logic    m_last
);

  localparam int unsigned L  = $clog2(N);
  localparam int unsigned IW = SAMPLE_W + L + 2;   // internal word width
  localparam int unsigned OUT_SHIFT = L / 2;

  typedef struct packed {
    logic signed [IW-1:0] im;
    logic signed [IW-1:0] re;
  } cplx_int_t;

  typedef enum logic [1:0] {LOAD, COMPUTE, UNLOAD} state_e;

  state_e             state;
  cplx_int_t          mem [N];
  logic [L-1:0]       cnt;       // sample counter in LOAD/UNLOAD
  logic [L-2:0]       bfly;      // butterfly index within a stage
  logic [$clog2(L+1)-1:0] stage;

  function automatic logic [L-1:0] bitrev(logic [L-1:0] a);
    logic [L-1:0] r;
    for (int i = 0; i < int'(L); i++) r[i] = a[L-1-i];
    return r;
  endfunction

  // Butterfly addresses and twiddle of the current (stage, bfly).
  logic [L-1:0]        half, i0, i1, j;
  logic [4:0]          k64;
  logic signed [15:0]  wc, ws;
  cplx_int_t           a, b;
  logic signed [IW+16:0] pr, pi;
  logic signed [IW-1:0]  tr, ti;

  always_comb begin
    half = L'(1) << stage;
    j    = L'(bfly) & (half - 1'b1);
    i0   = ((L'(bfly) >> stage) << (stage + 1)) | j;
    i1   = i0 | half;
    // k = j * N/(2*half) on the N-point circle = j * 64/(2*half) on the table
    k64  = 5'((32'(j) * 64) >> (stage + 1));
    wc   = tw_cos(k64);
    ws   = INVERSE ? tw_sin(k64) : -tw_sin(k64);
    a    = mem[i0];
    b    = mem[i1];
    pr   = (IW+17)'(b.re) * wc - (IW+17)'(b.im) * ws;
    pi   = (IW+17)'(b.re) * ws + (IW+17)'(b.im) * wc;
    tr   = IW'((pr + (IW+17)'(1 <<< 13)) >>> 14);
    ti   = IW'((pi + (IW+17)'(1 <<< 13)) >>> 14);
  end

  // Output scaling and saturation.
  function automatic logic signed [SAMPLE_W-1:0] scale_sat(logic signed [IW-1:0] v);
    logic signed [IW-1:0] s;
    s = (v + IW'(OUT_SHIFT > 0 ? (1 << (OUT_SHIFT - 1)) : 0)) >>> OUT_SHIFT;
    if (s > IW'(32767))       return 16'sh7FFF;
    else if (s < -IW'(32768)) return 16'sh8000;
    else                      return s[SAMPLE_W-1:0];
  endfunction

  assign s_ready   = (state == LOAD);
  assign m_valid   = (state == UNLOAD);
  assign m_last    = (state == UNLOAD) && (32'(cnt) == N - 1);
  assign m_data.re = scale_sat(mem[cnt].re);
  assign m_data.im = scale_sat(mem[cnt].im);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= LOAD;
      cnt   <= '0;
      bfly  <= '0;
      stage <= '0;
    end else begin
      unique case (state)
        LOAD: if (s_valid) begin
          cnt <= cnt + 1'b1;
          if (32'(cnt) == N - 1) begin
            state <= COMPUTE;
            bfly  <= '0;
            stage <= '0;
          end
        end
        COMPUTE: begin
          bfly <= bfly + 1'b1;
          if (32'(bfly) == N / 2 - 1) begin
            stage <= stage + 1'b1;
            if (32'(stage) == L - 1) state <= UNLOAD;
          end
        end
        UNLOAD: if (m_ready) begin
          cnt <= cnt + 1'b1;
          if (32'(cnt) == N - 1) state <= LOAD;
        end
        default: state <= LOAD;
      endcase
    end
  end

  // Sample memory: one write in LOAD, two (the butterfly) in COMPUTE.
  always_ff @(posedge clk) begin
    if (state == LOAD && s_valid) begin
      mem[bitrev(cnt)].re <= IW'(s_data.re);
      mem[bitrev(cnt)].im <= IW'(s_data.im);
    end else if (state == COMPUTE) begin
      mem[i0].re <= a.re + tr;
      mem[i0].im <= a.im + ti;
      mem[i1].re <= a.re - tr;
      mem[i1].im <= a.im - ti;
    end
  end

  // tlast must mark the N-th sample of every transform.
  assert property (@(posedge clk) disable iff (!rst_n)
                   s_valid && s_ready |-> (s_last == (32'(cnt) == N - 1)));

endmodule
