// tb_otfs_top: end-to-end test of the OTFS transceiver at its default size
// (64 x 64 frame), with the transmit samples looped back to the receiver.
//
// Five frames are sent: 32-QAM (the main configuration), then 4-, 8- and
// 16-QAM, then 32-QAM again with random stalls on the loop-back link and on
// the bit sink. Before the last frame a non-rectangular pulse, the phase
// ramp g[t] = exp(j*2*pi*3t/64) in Q1.14, is loaded into both the transmit
// and the receive pulse multipliers; every transmitted sample of that frame
// must then equal the same sample of the first frame (same bits, same
// order) times g[t], rounded, and the receiver must still return every
// bit. Every demodulated bit is compared with a reference bit
// sequence computed here from the LFSR recurrence
//   b[t] = b[t-16] ^ b[t-14] ^ b[t-13] ^ b[t-11],  b[-16..-1] = 1,
// which is the sequence of f(x) = 1 + x^11 + x^13 + x^14 + x^16 seeded with
// ones. The test also checks the bit count of each frame, that a `start`
// during a frame is ignored, the mean power of the transmitted samples, and
// the latency from `start` to `frame_done` against the architecture's cycle
// budget. It counts how often each mechanism occurred (mode switches,
// ignored starts, source back-pressure, link and sink stalls, transposes,
// frames with a shaped pulse)
// and fails if one never did.
module tb_otfs_top;
  import otfs_pkg::*;

  logic       clk = 1'b0;
  logic       rst_n = 1'b0;
  logic       start = 1'b0;
  qam_order_e order = QAM32;
  logic       busy;
  cplx16_t    tx_data;
  logic       tx_valid, tx_ready, tx_last, tx_frame_last;
  logic       rx_ready;
  logic       out_bit, out_valid, out_ready, frame_done;
  logic       link_open;
  logic       pulse_we_tx = 1'b0, pulse_we_rx = 1'b0;
  logic [5:0] pulse_addr = '0;
  cplx16_t    pulse_coef = '0;

  int checks = 0;
  int failures = 0;

  always #5 clk = ~clk;

  otfs_top dut (
    .clk, .rst_n, .start, .order, .busy,
    .pulse_we_tx, .pulse_we_rx, .pulse_addr, .pulse_coef,
    .tx_data, .tx_valid, .tx_ready, .tx_last, .tx_frame_last,
    .rx_data(tx_data), .rx_valid(tx_valid && link_open), .rx_ready, .rx_last(tx_last),
    .out_bit, .out_valid, .out_ready, .frame_done
  );

  assign tx_ready = rx_ready && link_open;

  // ---- stimulus controls ----------------------------------------------------
  bit stall_mode = 1'b0;
  always_ff @(posedge clk) begin
    link_open <= stall_mode ? (($urandom % 4) != 0) : 1'b1;
    out_ready <= stall_mode ? (($urandom % 3) != 0) : 1'b1;
  end

  // ---- reference bits ---------------------------------------------------------
  bit ref_bits [];
  task automatic make_ref(int nbits);
    ref_bits = new[nbits + 16];
    for (int i = 0; i < 16; i++) ref_bits[i] = 1'b1;
    for (int t = 16; t < nbits + 16; t++)
      ref_bits[t] = ref_bits[t-16] ^ ref_bits[t-14] ^ ref_bits[t-13] ^ ref_bits[t-11];
  endtask

  // ---- monitors ----------------------------------------------------------------
  int   bit_idx = 0;
  int   bit_err = 0;
  int   n_mode_switch = 0, n_ignored_start = 0, n_src_stall = 0;
  int   n_link_stall = 0, n_sink_stall = 0, n_transpose = 0;
  int   n_tx = 0, n_tx_last = 0, n_tx_frame_last = 0;
  real  tx_power = 0.0;
  // transmitted samples of the first frame, and the pulse checks
  cplx16_t ref_tx [FRAME_SYMBOLS];
  int   g_re [64];
  int   g_im [64];
  int   tx_base = 0;
  bit   record_tx = 1'b0, check_pulse = 1'b0;
  int   n_pulse_err = 0, n_pulse_frames = 0;

  function automatic int rnd_q14(real x);
    return int'($floor(x / 16384.0 + 0.5));
  endfunction

  always_ff @(posedge clk) begin
    if (rst_n) begin
      if (out_valid && out_ready) begin
        if (out_bit != ref_bits[bit_idx + 16]) bit_err <= bit_err + 1;
        bit_idx <= bit_idx + 1;
      end
      if (out_valid && !out_ready) n_sink_stall <= n_sink_stall + 1;
      if (tx_valid && !tx_ready) n_link_stall <= n_link_stall + 1;
      if (dut.prn_valid && !dut.prn_ready) n_src_stall <= n_src_stall + 1;
      if (dut.u_tx.u_isfft.wea && 32'(dut.u_tx.u_isfft.addra) == FRAME_SYMBOLS - 1)
        n_transpose <= n_transpose + 1;
      if (dut.u_rx.u_sfft.wea && 32'(dut.u_rx.u_sfft.addra) == FRAME_SYMBOLS - 1)
        n_transpose <= n_transpose + 1;
      if (tx_valid && tx_ready) begin
        n_tx      <= n_tx + 1;
        n_tx_last <= n_tx_last + int'(tx_last);
        n_tx_frame_last <= n_tx_frame_last + int'(tx_frame_last);
        tx_power  <= tx_power + real'(tx_data.re) * real'(tx_data.re)
                              + real'(tx_data.im) * real'(tx_data.im);
        if (record_tx) ref_tx[n_tx - tx_base] <= tx_data;
        if (check_pulse) begin
          cplx16_t r;
          int      t;
          r = ref_tx[n_tx - tx_base];
          t = (n_tx - tx_base) % 64;
          if (int'(tx_data.re) != rnd_q14(real'(r.re) * g_re[t] - real'(r.im) * g_im[t]) ||
              int'(tx_data.im) != rnd_q14(real'(r.re) * g_im[t] + real'(r.im) * g_re[t]))
            n_pulse_err <= n_pulse_err + 1;
        end
      end
    end
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // Runs one frame and checks it.
  task automatic run_frame(qam_order_e o, bit stalls, qam_order_e prev);
    int nbits;
    int cyc;
    int tx_before;
    real p_before;
    real mean_p;
    real exp_p;
    nbits = FRAME_SYMBOLS * bits_per_symbol(o);
    make_ref(nbits);
    stall_mode = stalls;
    @(negedge clk);
    bit_idx   = 0;
    bit_err   = 0;
    tx_before = n_tx;
    tx_base   = n_tx;
    p_before  = tx_power;
    order     = o;
    start     = 1'b1;
    if (o != prev) n_mode_switch++;
    @(negedge clk);
    start = 1'b0;
    order = QAM4;              // must be ignored: the order was latched
    cyc = 1;
    // A second start in the middle of the frame must be ignored.
    repeat (100) @(negedge clk);
    cyc += 100;
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    cyc++;
    n_ignored_start++;
    while (!frame_done) begin
      @(negedge clk);
      cyc++;
    end
    @(negedge clk);
    check(bit_idx == nbits, $sformatf("%0d-bit frame: %0d bits out", nbits, bit_idx));
    check(bit_err == 0, $sformatf("order %s: %0d bit errors", o.name(), bit_err));
    check(!busy, "busy after frame_done");
    check(n_tx - tx_before == FRAME_SYMBOLS, $sformatf("tx samples %0d", n_tx - tx_before));
    // Unitary transforms: mean tx power equals the constellation's, 1024^2.
    mean_p = (tx_power - p_before) / real'(FRAME_SYMBOLS);
    exp_p  = 1024.0 * 1024.0;
    check(mean_p > 0.9 * exp_p && mean_p < 1.1 * exp_p,
          $sformatf("mean tx power %f, expected about %f", mean_p, exp_p));
    // Latency budget without stalls. The first IFFT core takes a column as
    // fast as the LFSR fills it (64*log2(M) clocks) and then needs 256 more
    // (compute + unload); the other three core pairs need at most 320 clocks
    // per column each, and the two transposed read-outs add one clock per
    // sample of hand-over at most.
    if (!stalls) begin
      int budget;
      budget = 64 * (64 * int'(bits_per_symbol(o)) + 256) + 3 * 64 * 320 + 2 * FRAME_SYMBOLS;
      check(cyc <= budget, $sformatf("latency %0d cycles above budget %0d", cyc, budget));
    end
    $display("frame %s stalls=%0d: %0d bits, %0d errors, latency %0d cycles, tx power %f",
             o.name(), stalls, bit_idx, bit_err, cyc, mean_p);
  endtask

  initial begin
    repeat (5) @(negedge clk);
    rst_n = 1'b1;
    repeat (5) @(negedge clk);
    record_tx = 1'b1;
    run_frame(QAM32, 1'b0, QAM32);
    record_tx = 1'b0;
    run_frame(QAM4,  1'b0, QAM32);
    run_frame(QAM8,  1'b0, QAM4);
    run_frame(QAM16, 1'b0, QAM8);
    // Load the phase-ramp pulse into both multipliers, between frames.
    for (int t = 0; t < 64; t++) begin
      g_re[t] = int'($floor(16384.0 * $cos(2.0 * 3.14159265358979 * 3.0 * t / 64.0) + 0.5));
      g_im[t] = int'($floor(16384.0 * $sin(2.0 * 3.14159265358979 * 3.0 * t / 64.0) + 0.5));
      pulse_we_tx   = 1'b1;
      pulse_we_rx   = 1'b1;
      pulse_addr    = 6'(t);
      pulse_coef.re = 16'(g_re[t]);
      pulse_coef.im = 16'(g_im[t]);
      @(negedge clk);
    end
    pulse_we_tx = 1'b0;
    pulse_we_rx = 1'b0;
    check_pulse = 1'b1;
    n_pulse_frames++;
    run_frame(QAM32, 1'b1, QAM16);
    check_pulse = 1'b0;
    check(n_pulse_err == 0, $sformatf("%0d transmitted samples not equal to first frame times pulse", n_pulse_err));
    check(n_tx_last == 5 * 64, $sformatf("tx_last count %0d", n_tx_last));
    check(n_tx_frame_last == 5, $sformatf("tx_frame_last count %0d", n_tx_frame_last));
    $display("mechanisms: mode_switch=%0d ignored_start=%0d src_stall=%0d link_stall=%0d sink_stall=%0d transpose=%0d shaped_pulse_frames=%0d",
             n_mode_switch, n_ignored_start, n_src_stall, n_link_stall, n_sink_stall, n_transpose,
             n_pulse_frames);
    check(n_mode_switch > 0, "no mode switch");
    check(n_ignored_start > 0, "no ignored start");
    check(n_src_stall > 0, "no source back-pressure");
    check(n_link_stall > 0, "no link stall");
    check(n_sink_stall > 0, "no sink stall");
    check(n_transpose == 10, $sformatf("transposes %0d", n_transpose));
    check(n_pulse_frames > 0, "no frame with a shaped pulse");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3_000_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
