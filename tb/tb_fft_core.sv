// tb_fft_core: checks the 64-point FFT and IFFT cores against a
// floating-point DFT computed from its definition (tb_dft_pkg).
//
// Eight random transforms go through a forward and an inverse core side by
// side; the second half of them with random back-pressure on the output.
// Each result must lie within 6 LSB of round(DFT/sqrt(64)) in both parts,
// `m_last` must mark the 64th output, and without stalls a transform must
// take exactly 64 + 192 + 64 = 320 clocks from its first accepted input to
// its last output, with `s_ready` low in between.
module tb_fft_core;
  import otfs_pkg::*;
  import tb_dft_pkg::*;

  localparam int N = 64;
  localparam int TOL = 6;
  localparam int T_XFORM = 2 * N + (N / 2) * $clog2(N);   // 320 for N = 64

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  cplx16_t s_data;
  logic    s_valid = 1'b0, s_last;
  logic    s_ready_f, s_ready_i;
  cplx16_t m_data_f, m_data_i;
  logic    m_valid_f, m_valid_i, m_last_f, m_last_i;
  logic    m_ready = 1'b1;

  int checks = 0, failures = 0;

  fft_core #(.N(N), .INVERSE(1'b0)) dut_f (
    .clk, .rst_n, .s_data, .s_valid, .s_ready(s_ready_f), .s_last,
    .m_data(m_data_f), .m_valid(m_valid_f), .m_ready, .m_last(m_last_f));
  fft_core #(.N(N), .INVERSE(1'b1)) dut_i (
    .clk, .rst_n, .s_data, .s_valid, .s_ready(s_ready_i), .s_last,
    .m_data(m_data_i), .m_valid(m_valid_i), .m_ready, .m_last(m_last_i));

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    real xr[], xi[], fr[], fi[], ir[], ii[];
    int  k, cyc, mag;
    bit  stalls;
    xr = new[N];
    xi = new[N];
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    for (int t = 0; t < 8; t++) begin
      stalls = (t >= 4);
      mag = (t % 2 == 0) ? 1200 : 4000;
      for (int n = 0; n < N; n++) begin
        xr[n] = real'(int'($urandom % (2 * mag + 1)) - mag);
        xi[n] = real'(int'($urandom % (2 * mag + 1)) - mag);
      end
      if (t == 0) begin   // an impulse: flat spectrum of 1000/8 = 125
        for (int n = 0; n < N; n++) begin xr[n] = 0.0; xi[n] = 0.0; end
        xr[0] = 1000.0;
      end
      dft(xr, xi, 1'b0, fr, fi);
      dft(xr, xi, 1'b1, ir, ii);
      // feed
      cyc = 0;
      for (int n = 0; n < N; n++) begin
        s_data.re = 16'(int'(xr[n]));
        s_data.im = 16'(int'(xi[n]));
        s_valid   = 1'b1;
        s_last    = (n == N - 1);
        @(posedge clk);
        check(s_ready_f && s_ready_i, "core not ready while loading");
        @(negedge clk);
        cyc++;
      end
      s_valid = 1'b0;
      s_last  = 1'b0;
      // collect
      k = 0;
      while (k < N) begin
        m_ready = stalls ? ($urandom % 2 == 0) : 1'b1;
        @(posedge clk);
        if (s_ready_f) begin
          check(!m_valid_f, "s_ready high during unload");
        end
        if (m_valid_f && m_ready) begin
          check(m_valid_i, "forward and inverse cores out of step");
          check(absr(real'(m_data_f.re) - fr[k]) <= TOL && absr(real'(m_data_f.im) - fi[k]) <= TOL,
                $sformatf("FFT t%0d bin %0d: got (%0d,%0d), want (%f,%f)", t, k,
                          m_data_f.re, m_data_f.im, fr[k], fi[k]));
          check(absr(real'(m_data_i.re) - ir[k]) <= TOL && absr(real'(m_data_i.im) - ii[k]) <= TOL,
                $sformatf("IFFT t%0d bin %0d: got (%0d,%0d), want (%f,%f)", t, k,
                          m_data_i.re, m_data_i.im, ir[k], ii[k]));
          check(m_last_f == (k == N - 1) && m_last_i == (k == N - 1), "m_last misplaced");
          k++;
        end
        @(negedge clk);
        cyc++;
      end
      if (!stalls) check(cyc == T_XFORM, $sformatf("transform took %0d clocks, want %0d", cyc, T_XFORM));
      m_ready = 1'b1;
      @(negedge clk);
    end
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
