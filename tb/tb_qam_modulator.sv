// tb_qam_modulator: checks the bit-to-symbol mapping of all four orders.
//
// The expected points are written out here as tables of amplitude levels
// (the Gray-labelled rectangular 4/8/16-QAM constellations and the
// column-by-column labelled 32-point cross), times the 2.10 scale of the
// order: 724 for 4-QAM; 418/1254 for 8-QAM; 324/971 for 16-QAM;
// 229/687/1145 for 32-QAM. The 4-QAM table is also the one printed in the
// paper's simulation waveform (Re -724,-724,724,724; Im 724,-724,724,-724).
// Every label of every order is sent, most significant bit first, followed by
// random labels under random back-pressure; each symbol must appear one clock
// after its last bit when the sink is ready, and the average power of each
// constellation must be within 1% of 1.0.
module tb_qam_modulator;
  import otfs_pkg::*;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  qam_order_e order = QAM4;
  logic       bit_i = 1'b0, bit_valid = 1'b0, bit_ready;
  sym12_t     sym;
  logic       sym_valid, sym_ready = 1'b1;

  int checks = 0, failures = 0;

  qam_modulator dut (.clk, .rst_n, .order, .bit_i, .bit_valid, .bit_ready, .sym, .sym_valid, .sym_ready);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // Expected amplitude levels (I, Q) per label.
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

  function automatic int scaled(qam_order_e o, int l);
    int a, m;
    a = (l < 0) ? -l : l;
    case (o)
      QAM4:    m = 724;
      QAM8:    m = (a == 1) ? 418 : 1254;
      QAM16:   m = (a == 1) ? 324 : 971;
      default: m = (a == 1) ? 229 : (a == 3) ? 687 : 1145;
    endcase
    return (l < 0) ? -m : m;
  endfunction

  task automatic send_symbol(qam_order_e o, int lab, bit stalls);
    int bps, li, lq, wait_cyc;
    bps = int'(o) + 2;
    ref_levels(o, lab, li, lq);
    for (int b = bps - 1; b >= 0; b--) begin
      bit_i     = lab[b];
      bit_valid = 1'b1;
      do @(posedge clk); while (!bit_ready);
      @(negedge clk);
    end
    bit_valid = 1'b0;
    wait_cyc = 0;
    while (1) begin
      sym_ready = stalls ? ($urandom % 2 == 0) : 1'b1;
      @(posedge clk);
      if (sym_valid && sym_ready) break;
      @(negedge clk);
      wait_cyc++;
    end
    if (!stalls) check(wait_cyc == 0, $sformatf("symbol %0d cycles late", wait_cyc));
    check(int'(sym.re) == scaled(o, li) && int'(sym.im) == scaled(o, lq),
          $sformatf("%s label %0d: got (%0d,%0d), want (%0d,%0d)", o.name(), lab,
                    sym.re, sym.im, scaled(o, li), scaled(o, lq)));
    @(negedge clk);
    sym_ready = 1'b1;
  endtask

  initial begin
    qam_order_e o;
    real p;
    int li, lq, m;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    for (int oi = 0; oi < 4; oi++) begin
      o = qam_order_e'(oi);
      order = o;
      m = 1 << (oi + 2);
      p = 0.0;
      for (int lab = 0; lab < m; lab++) begin
        send_symbol(o, lab, 1'b0);
        ref_levels(o, lab, li, lq);
        p += real'(scaled(o, li)) ** 2 + real'(scaled(o, lq)) ** 2;
      end
      p = p / real'(m) / (1024.0 * 1024.0);
      check(p > 0.99 && p < 1.01, $sformatf("%s average power %f", o.name(), p));
      repeat (40) send_symbol(o, int'($urandom % m), 1'b1);
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
