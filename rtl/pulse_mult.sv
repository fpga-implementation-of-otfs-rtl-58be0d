// pulse_mult: multiplies a stream of time-domain slots, sample by sample,
// by a programmable complex pulse of LEN coefficients.
//
// Sample t of every slot (t counts from 0 after each `s_last`) is multiplied
// by coefficient g[t]: m = s * g[t] in the transmitter (CONJ = 0, pulse
// shaping after the Heisenberg IFFT) and m = s * conj(g[t]) in the receiver
// (CONJ = 1, the multiplication by the conjugate receive pulse that comes
// before the Wigner FFT). Coefficients are Q1.14 ({im, re}, 16384 = 1.0);
// the product is rounded back to the stream's scale and saturated to 16
// bits. After reset every coefficient is 1.0, the rectangular pulse, and
// the block passes samples through unchanged.
//
// That the transmit signal is pulse shaped and that the receiver multiplies
// by a conjugate before its FFT follows the paper; the paper gives no pulse,
// so the coefficient table is loaded from outside, and its format and the
// write port are this design's own choices.
//
// Interface: coefficient write port `coef_we/coef_addr/coef_wdata`, meant
// to be used between frames (a write takes effect from the next sample that
// uses that coefficient). Sample stream in `s_*`, out `m_*`, valid/ready;
// `s_last` must mark the LEN-th sample of a slot; `s_flast` (frame end) is
// carried along with the sample. Timing: one register stage, one sample per
// clock when the sink is ready.
module pulse_mult
  import otfs_pkg::*;
#(
  parameter int unsigned LEN  = otfs_pkg::M_DELAY,
  parameter bit          CONJ = 1'b0
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    coef_we,
  input  logic [$clog2(LEN)-1:0]  coef_addr,
  input  cplx16_t                 coef_wdata,
  input  cplx16_t                 s_data,
  input  logic                    s_valid,
  output logic                    s_ready,
  input  logic                    s_last,
  input  logic                    s_flast,
  output cplx16_t                 m_data,
  output logic                    m_valid,
  input  logic                    m_ready,
  output logic                    m_last,
  output logic                    m_flast
);

  localparam int unsigned AW = $clog2(LEN);
  localparam logic signed [15:0] ONE = 16'sd16384;

  cplx16_t          coef [LEN];
  logic [AW-1:0]    idx;
  logic signed [16:0] g_re, g_im;   // 17 bits: -(-32768) must not wrap
  logic signed [33:0] pr, pi;

  function automatic logic signed [15:0] round_sat(logic signed [33:0] v);
    logic signed [33:0] s;
    s = (v + 34'sd8192) >>> 14;
    if (s > 34'sd32767)       return 16'sh7FFF;
    else if (s < -34'sd32768) return 16'sh8000;
    else                      return s[15:0];
  endfunction

  always_comb begin
    g_re = 17'(coef[idx].re);
    g_im = CONJ ? -17'(coef[idx].im) : 17'(coef[idx].im);
    pr   = 34'(s_data.re) * 34'(g_re) - 34'(s_data.im) * 34'(g_im);
    pi   = 34'(s_data.re) * 34'(g_im) + 34'(s_data.im) * 34'(g_re);
  end

  assign s_ready = !m_valid || m_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < int'(LEN); i++) coef[i] <= '{im: '0, re: ONE};
    end else if (coef_we) begin
      coef[coef_addr] <= coef_wdata;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      idx     <= '0;
      m_valid <= 1'b0;
      m_data  <= '0;
      m_last  <= 1'b0;
      m_flast <= 1'b0;
    end else begin
      if (m_valid && m_ready) m_valid <= 1'b0;
      if (s_valid && s_ready) begin
        m_valid   <= 1'b1;
        m_data.re <= round_sat(pr);
        m_data.im <= round_sat(pi);
        m_last    <= s_last;
        m_flast   <= s_flast;
        idx       <= s_last ? '0 : idx + 1'b1;
      end
    end
  end

  // A slot is exactly LEN samples long.
  assert property (@(posedge clk) disable iff (!rst_n)
                   s_valid && s_ready |-> s_last == (32'(idx) == LEN - 1));
  // The output holds while it waits for the sink.
  assert property (@(posedge clk) disable iff (!rst_n)
                   m_valid && !m_ready |=> m_valid && $stable(m_data));

endmodule
