// tb_prn_generator: checks the LFSR bit source against the recurrence
//   b[t] = b[t-16] ^ b[t-14] ^ b[t-13] ^ b[t-11],  b[-16..-1] = 1
// (the sequence of f(x) = 1 + x^11 + x^13 + x^14 + x^16 seeded with ones).
// A 4-QAM frame (8192 bits) runs with the sink always ready and must take
// one bit per clock; an 8-QAM frame (12288 bits) runs with random
// back-pressure, and a 32-QAM frame (20480 bits) checks the largest budget.
// `done` must pulse once, after the last bit, and `busy` must then fall.
// On the 32-QAM frame the normalised autocorrelation of the bits (mapped to
// +-1) must be below 4/sqrt(20480) = 0.028 in magnitude at every lag from 1
// to 256: the white-noise-like behaviour expected of a maximal-length LFSR.
module tb_prn_generator;
  import otfs_pkg::*;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic       start = 1'b0;
  qam_order_e order = QAM4;
  logic       bit_o, bit_valid, busy, done;
  logic       bit_ready = 1'b1;

  int checks = 0, failures = 0;

  prn_generator dut (.clk, .rst_n, .start, .order, .bit_o, .bit_valid, .bit_ready, .busy, .done);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic run(qam_order_e o, bit stalls);
    bit ref_bits [];
    bit got_bits [];
    int nbits, got, cyc, errs, ndone;
    real worst;
    nbits = 4096 * (int'(o) + 2);
    ref_bits = new[nbits + 16];
    for (int i = 0; i < 16; i++) ref_bits[i] = 1'b1;
    for (int t = 16; t < nbits + 16; t++)
      ref_bits[t] = ref_bits[t-16] ^ ref_bits[t-14] ^ ref_bits[t-13] ^ ref_bits[t-11];
    @(negedge clk);
    order = o;
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    got = 0; cyc = 0; errs = 0; ndone = 0;
    got_bits = new[nbits];
    while (got < nbits && cyc < 100000) begin
      bit_ready = stalls ? ($urandom % 3 != 0) : 1'b1;
      @(posedge clk);
      if (done) ndone++;
      if (bit_valid && bit_ready) begin
        if (bit_o != ref_bits[got + 16]) errs++;
        got_bits[got] = bit_o;
        got++;
      end
      @(negedge clk);
      cyc++;
    end
    bit_ready = 1'b1;
    if (o == QAM32) begin
      worst = 0.0;
      for (int lag = 1; lag <= 256; lag++) begin
        int acc;
        real r;
        acc = 0;
        for (int t = 0; t + lag < nbits; t++)
          acc += (got_bits[t] == got_bits[t + lag]) ? 1 : -1;
        r = real'(acc) / real'(nbits - lag);
        if (r < 0.0) r = -r;
        if (r > worst) worst = r;
      end
      $display("32-QAM frame: largest |autocorrelation| at lags 1..256 = %f", worst);
      check(worst < 4.0 / $sqrt(real'(nbits)), $sformatf("autocorrelation %f too large", worst));
    end
    check(got == nbits, $sformatf("%0d bits, want %0d", got, nbits));
    check(errs == 0, $sformatf("%s: %0d bits differ from the reference", o.name(), errs));
    if (!stalls) check(cyc == nbits, $sformatf("%0d clocks for %0d bits", cyc, nbits));
    @(posedge clk);
    if (done) ndone++;
    check(ndone == 1, $sformatf("done pulsed %0d times", ndone));
    check(!busy && !bit_valid, "generator not idle after its frame");
    repeat (5) @(posedge clk);
    check(!bit_valid, "bits produced while idle");
    @(negedge clk);
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    run(QAM4, 1'b0);
    run(QAM8, 1'b1);
    run(QAM32, 1'b0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
