// tb_qam_demodulator: checks the nearest-point decisions and the bit order.
//
// For every order, every label's ideal point (from tables of amplitude
// levels written out here, the same ones tb_qam_modulator checks) is sent
// with a random offset of up to +-40% of half the point spacing in each
// part; the demodulator must return the label, most significant bit first.
// A point pushed 60% of the spacing towards a neighbour must decide for the
// neighbour. Random back-pressure on the bit output is used for half of the
// samples; without it the block must deliver one bit per clock.
module tb_qam_demodulator;
  import otfs_pkg::*;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  qam_order_e order = QAM4;
  cplx16_t    in_data;
  logic       in_valid = 1'b0, in_ready;
  logic       bit_o, bit_valid, bit_ready = 1'b1;

  int checks = 0, failures = 0;

  qam_demodulator dut (.clk, .rst_n, .order, .in_data, .in_valid, .in_ready, .bit_o, .bit_valid, .bit_ready);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic void ref_levels(qam_order_e o, int lab, output int li, output int lq);
    int q4i[4]  = '{-1, -1, 1, 1};
    int q4q[4]  = '{1, -1, 1, -1};
    int q8i[8]  = '{-3, -3, -1, -1, 3, 3, 1, 1};
    int q8q[8]  = '{1, -1, 1, -1, 1, -1, 1, -1};
    int q16i[16] = '{-3, -3, -3, -3, -1, -1, -1, -1, 3, 3, 3, 3, 1, 1, 1, 1};
    int q16q[16] = '{3, 1, -3, -1, 3, 1, -3, -1, 3, 1, -3, -1, 3, 1, -3, -1};
    int q32i[32] = '{-5, -5, -5, -5, -3, -3, -3, -3, -3, -3, -1, -1, -1, -1, -1, -1,
                      1,  1,  1,  1,  1,  1,  3,  3,  3,  3,  3,  3,  5,  5,  5,  5};
    int q32q[32] = '{ 3,  1, -1, -3,  5,  3,  1, -1, -3, -5,  5,  3,  1, -1, -3, -5,
                      5,  3,  1, -1, -3, -5,  5,  3,  1, -1, -3, -5,  3,  1, -1, -3};
    case (o)
      QAM4:    begin li = q4i[lab];  lq = q4q[lab];  end
      QAM8:    begin li = q8i[lab];  lq = q8q[lab];  end
      QAM16:   begin li = q16i[lab]; lq = q16q[lab]; end
      default: begin li = q32i[lab]; lq = q32q[lab]; end
    endcase
  endfunction

  // Scale of one amplitude unit (half the point spacing) in 2.10.
  function automatic real unit_of(qam_order_e o);
    case (o)
      QAM4:    return 724.08;
      QAM8:    return 418.05;
      QAM16:   return 323.82;
      default: return 228.97;
    endcase
  endfunction

  function automatic int find_label(qam_order_e o, int li, int lq);
    int a, b;
    for (int k = 0; k < (1 << (int'(o) + 2)); k++) begin
      ref_levels(o, k, a, b);
      if (a == li && b == lq) return k;
    end
    return -1;
  endfunction

  int exp_q [$];     // expected bits, in order
  int n_bits = 0, n_bad = 0;
  bit stalls = 1'b0;

  always @(posedge clk) begin
    if (rst_n && bit_valid && bit_ready) begin
      if (exp_q.size() == 0 || int'(bit_o) != exp_q.pop_front()) n_bad++;
      n_bits++;
    end
  end
  always @(negedge clk) bit_ready <= stalls ? ($urandom % 2 == 0) : 1'b1;

  task automatic send(qam_order_e o, real re, real im, int lab);
    int bps;
    bps = int'(o) + 2;
    in_data.re = 16'($rtoi(re));
    in_data.im = 16'($rtoi(im));
    in_valid   = 1'b1;
    do @(posedge clk); while (!in_ready);
    for (int b = bps - 1; b >= 0; b--) exp_q.push_back(int'(lab[b]));
    @(negedge clk);
    in_valid = 1'b0;
  endtask

  initial begin
    qam_order_e o;
    int li, lq, m, nb, cyc, lab2;
    real u, dr, di;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    for (int oi = 0; oi < 4; oi++) begin
      o = qam_order_e'(oi);
      order = o;
      m = 1 << (oi + 2);
      u = unit_of(o);
      for (int pass = 0; pass < 2; pass++) begin
        stalls = (pass == 1);
        nb = n_bits;
        cyc = 0;
        for (int lab = 0; lab < m; lab++) begin
          ref_levels(o, lab, li, lq);
          dr = (real'(int'($urandom % 81)) - 40.0) / 100.0 * u;
          di = (real'(int'($urandom % 81)) - 40.0) / 100.0 * u;
          send(o, real'(li) * u + dr, real'(lq) * u + di, lab);
        end
        while (exp_q.size() != 0) @(negedge clk);
        @(negedge clk);
      end
      // 60% of the spacing (1.2 units) towards the right-hand neighbour.
      for (int lab = 0; lab < m; lab++) begin
        ref_levels(o, lab, li, lq);
        lab2 = find_label(o, li + 2, lq);
        if (lab2 >= 0) send(o, (real'(li) + 1.2) * u, real'(lq) * u, lab2);
      end
      while (exp_q.size() != 0) @(negedge clk);
      @(negedge clk);
      // throughput: m symbols back to back, one bit per clock
      stalls = 1'b0;
      @(negedge clk);
      nb = n_bits;
      cyc = 0;
      fork
        for (int lab = 0; lab < m; lab++) begin
          ref_levels(o, lab, li, lq);
          send(o, real'(li) * u, real'(lq) * u, lab);
        end
        while (n_bits - nb < m * (oi + 2)) begin @(negedge clk); cyc++; end
      join
      check(cyc <= m * (oi + 2) + 2, $sformatf("%s: %0d clocks for %0d bits", o.name(), cyc, m * (oi + 2)));
    end
    check(exp_q.size() == 0, "bits missing");
    check(n_bad == 0, $sformatf("%0d of %0d bits wrong", n_bad, n_bits));
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
