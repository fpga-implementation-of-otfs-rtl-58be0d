// tb_isfft_heisenberg: checks the transmitter transform chain, ISFFT followed
// by the Heisenberg transform (a 64-point IFFT per time slot), against a
// floating-point reference (tb_dft_pkg): sfft2d() then an IFFT of every
// 64-sample block. Two random 64 x 64 delay-Doppler frames of QAM-like
// amplitude are sent back to back, the second with random output stalls;
// samples must match within TOL LSB, slot and frame markers must be right,
// and the first frame must finish within three passes of 64 transforms of
// 320 clocks plus a margin of 64 clocks per column.
module tb_isfft_heisenberg;
  import otfs_pkg::*;
  import tb_dft_pkg::*;

  localparam int ROWS = 64;
  localparam int COLS = 64;
  localparam int SZ   = ROWS * COLS;
  // 3 passes of column transforms, each n + (n/2)*log2(n) + n clocks
  // plus 64 clocks of margin (3 * 64 * 384 for 64 x 64)
  function automatic int T_COL(int n);
    return 2 * n + (n / 2) * $clog2(n) + 64;
  endfunction
  localparam int BUDGET = COLS * T_COL(ROWS) + 2 * ROWS * T_COL(COLS);
  localparam int TOL  = 10;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  cplx16_t in_data;
  logic    in_valid = 1'b0, in_ready, in_last = 1'b0;
  cplx16_t out_data;
  logic    out_valid, out_ready = 1'b1, out_last, out_frame_last;

  int checks = 0, failures = 0;

  isfft_heisenberg #(.N(ROWS), .M(COLS)) dut (.clk, .rst_n, .in_data, .in_valid, .in_ready, .in_last, .out_data, .out_valid, .out_ready, .out_last, .out_frame_last);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // Reference outputs of the frames sent, in output order.
  real exp_r [$], exp_i [$];
  int  n_out = 0, n_bad = 0, n_mark = 0, max_err = 0;
  int  first_in_cyc = -1, frame_end_cyc [$];
  int  cyc = 0;
  bit  stalls = 1'b0;

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && in_valid && in_ready && first_in_cyc < 0) first_in_cyc <= cyc;
    if (rst_n && out_valid && out_ready) begin
      real er, ei;
      int e;
      er = exp_r.pop_front();
      ei = exp_i.pop_front();
      e = int'(absr(real'(out_data.re) - er) + 0.5);
      if (int'(absr(real'(out_data.im) - ei) + 0.5) > e) e = int'(absr(real'(out_data.im) - ei) + 0.5);
      if (e > max_err) max_err = e;
      if (e > TOL) begin
        n_bad++;
        if (n_bad < 5) $display("sample %0d: got (%0d,%0d) want (%f,%f)", n_out, out_data.re, out_data.im, er, ei);
      end
      if (out_last != (n_out % COLS == COLS - 1) || out_frame_last != (n_out % SZ == SZ - 1)) n_mark++;
      if (out_frame_last) frame_end_cyc.push_back(cyc);
      n_out++;
    end
  end
  always @(negedge clk) out_ready <= stalls ? ($urandom % 3 != 0) : 1'b1;

  initial begin
    real xr[], xi[], yr[], yi[];
    int mag;
    xr = new[SZ];
    xi = new[SZ];
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    for (int f = 0; f < 2; f++) begin
      mag = 1145;
      for (int k = 0; k < SZ; k++) begin
        xr[k] = real'(int'($urandom % (2 * mag + 1)) - mag);
        xi[k] = real'(int'($urandom % (2 * mag + 1)) - mag);
      end
      begin real ar[], ai[]; sfft2d(xr, xi, ROWS, COLS, ar, ai); blocks(ar, ai, COLS, 1'b1, yr, yi); end
      foreach (yr[k]) begin exp_r.push_back(yr[k]); exp_i.push_back(yi[k]); end
      if (f == 1) stalls = 1'b1;
      for (int k = 0; k < SZ; k++) begin
        in_data.re = 16'($rtoi(xr[k]));
        in_data.im = 16'($rtoi(xi[k]));
        in_last    = (k % ROWS == ROWS - 1);
        in_valid   = 1'b1;
        do @(posedge clk); while (!in_ready);
        @(negedge clk);
      end
      in_valid = 1'b0;
      in_last  = 1'b0;
    end
    while (n_out < 2 * SZ) @(negedge clk);
    repeat (5) @(negedge clk);
    $display("samples %0d, max error %0d LSB, first frame done %0d clocks after its first input",
             n_out, max_err, frame_end_cyc[0] - first_in_cyc);
    check(n_out == 2 * SZ, $sformatf("%0d samples out", n_out));
    check(n_bad == 0, $sformatf("%0d samples off by more than %0d LSB", n_bad, TOL));
    check(n_mark == 0, $sformatf("%0d column/frame markers wrong", n_mark));
    check(frame_end_cyc.size() == 2, "frame ends not seen twice");
    check(frame_end_cyc[0] - first_in_cyc <= BUDGET,
          $sformatf("first frame took %0d clocks, budget %0d", frame_end_cyc[0] - first_in_cyc, BUDGET));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
