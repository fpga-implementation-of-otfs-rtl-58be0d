// tb_pulse_mult: drives the same sample stream into a transmit-side
// (CONJ = 0) and a receive-side (CONJ = 1) pulse multiplier.
//
// First one slot goes through with the coefficients left at their reset
// value: both outputs must equal the input, at one sample per clock. Then
// random Q1.14 coefficients (full 16-bit range, so some products saturate)
// are written and four slots of random samples are sent with random stalls
// on both sides. Each output sample is compared with s * g[t] and
// s * conj(g[t]) worked out here in floating point, rounded to nearest and
// clamped to 16 bits; `m_last` and `m_flast` must follow their samples.
module tb_pulse_mult;
  import otfs_pkg::*;

  localparam int LEN = 64;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic          coef_we = 1'b0;
  logic [5:0]    coef_addr = '0;
  cplx16_t       coef_wdata = '0;
  cplx16_t       s_data = '0;
  logic          s_valid = 1'b0, s_last = 1'b0, s_flast = 1'b0;
  logic          s_ready0, s_ready1;
  cplx16_t       m_data0, m_data1;
  logic          m_valid0, m_valid1, m_last0, m_last1, m_flast0, m_flast1;
  logic          m_ready = 1'b1;

  int checks = 0, failures = 0;

  pulse_mult #(.LEN(LEN), .CONJ(1'b0)) dut_tx (
    .clk, .rst_n, .coef_we, .coef_addr, .coef_wdata,
    .s_data, .s_valid, .s_ready(s_ready0), .s_last, .s_flast,
    .m_data(m_data0), .m_valid(m_valid0), .m_ready, .m_last(m_last0), .m_flast(m_flast0)
  );
  pulse_mult #(.LEN(LEN), .CONJ(1'b1)) dut_rx (
    .clk, .rst_n, .coef_we, .coef_addr, .coef_wdata,
    .s_data, .s_valid, .s_ready(s_ready1), .s_last, .s_flast,
    .m_data(m_data1), .m_valid(m_valid1), .m_ready, .m_last(m_last1), .m_flast(m_flast1)
  );

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // Reference coefficients and expected outputs.
  int g_re [LEN];
  int g_im [LEN];

  function automatic int rnd_clamp(real x);
    real r;
    r = $floor(x + 0.5);
    if (r > 32767.0) return 32767;
    if (r < -32768.0) return -32768;
    return int'(r);
  endfunction

  typedef struct {
    int re0, im0, re1, im1;
    bit last, flast;
  } exp_t;

  exp_t exp_q [$];
  int   n_out = 0, n_err = 0, n_mark_err = 0, n_sat = 0;
  bit   stalls = 1'b0;

  always @(posedge clk) begin
    if (rst_n && m_valid0 && m_ready) begin
      exp_t e;
      e = exp_q.pop_front();
      if (int'(m_data0.re) != e.re0 || int'(m_data0.im) != e.im0 ||
          int'(m_data1.re) != e.re1 || int'(m_data1.im) != e.im1) begin
        if (n_err < 5)
          $display("sample %0d: tx (%0d,%0d) expected (%0d,%0d), rx (%0d,%0d) expected (%0d,%0d)",
                   n_out, m_data0.re, m_data0.im, e.re0, e.im0, m_data1.re, m_data1.im, e.re1, e.im1);
        n_err++;
      end
      if (m_last0 != e.last || m_last1 != e.last || m_flast0 != e.flast || m_flast1 != e.flast)
        n_mark_err++;
      if (m_valid1 != m_valid0) n_mark_err++;
      if (e.re0 == 32767 || e.re0 == -32768 || e.im0 == 32767 || e.im0 == -32768) n_sat++;
      n_out++;
    end
  end

  task automatic send_slot(bit frame_end, output int cyc);
    cyc = 0;
    for (int t = 0; t < LEN; t++) begin
      exp_t e;
      real sr, si;
      s_data.re = 16'($urandom);
      s_data.im = 16'($urandom);
      s_last    = (t == LEN - 1);
      s_flast   = frame_end && (t == LEN - 1);
      sr = real'(s_data.re);
      si = real'(s_data.im);
      e.re0  = rnd_clamp((sr * g_re[t] - si * g_im[t]) / 16384.0);
      e.im0  = rnd_clamp((sr * g_im[t] + si * g_re[t]) / 16384.0);
      e.re1  = rnd_clamp((sr * g_re[t] + si * g_im[t]) / 16384.0);
      e.im1  = rnd_clamp((si * g_re[t] - sr * g_im[t]) / 16384.0);
      e.last = s_last;
      e.flast = s_flast;
      s_valid = stalls ? ($urandom % 4 != 0) : 1'b1;
      m_ready = stalls ? ($urandom % 3 != 0) : 1'b1;
      @(posedge clk);
      while (!(s_valid && s_ready0)) begin
        @(negedge clk);
        cyc++;
        s_valid = stalls ? ($urandom % 4 != 0) : 1'b1;
        m_ready = stalls ? ($urandom % 3 != 0) : 1'b1;
        @(posedge clk);
      end
      if (s_ready1 != s_ready0) n_mark_err++;
      exp_q.push_back(e);
      @(negedge clk);
      cyc++;
    end
    s_valid = 1'b0;
  endtask

  initial begin
    int cyc;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    // Reset value: the rectangular pulse, g[t] = 1.0.
    for (int t = 0; t < LEN; t++) begin
      g_re[t] = 16384;
      g_im[t] = 0;
    end
    send_slot(1'b0, cyc);
    check(cyc == LEN, $sformatf("%0d clocks for one slot without stalls", cyc));
    m_ready = 1'b1;
    repeat (3) @(negedge clk);
    check(n_out == LEN && n_err == 0, "rectangular pulse does not pass samples unchanged");
    // Random pulse.
    for (int t = 0; t < LEN; t++) begin
      coef_we      = 1'b1;
      coef_addr    = 6'(t);
      coef_wdata.re = 16'($urandom);
      coef_wdata.im = 16'($urandom);
      if (t == 7) coef_wdata.im = 16'sh8000;   // the one value whose negation overflows
      g_re[t] = int'(coef_wdata.re);
      g_im[t] = int'(coef_wdata.im);
      @(negedge clk);
    end
    coef_we = 1'b0;
    stalls  = 1'b1;
    for (int s = 0; s < 4; s++) send_slot(s == 3, cyc);
    m_ready = 1'b1;
    repeat (5) @(negedge clk);
    check(n_out == 5 * LEN, $sformatf("%0d samples out", n_out));
    check(n_err == 0, $sformatf("%0d samples wrong", n_err));
    check(n_mark_err == 0, $sformatf("%0d slot/frame markers or handshakes wrong", n_mark_err));
    check(n_sat > 0, "no saturated product exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
