// tb_array_reshape: sends two frames of 4096 random 12-bit symbols through
// the reshaper, the second with random stalls on both sides, and checks
// that every sample comes out unchanged and sign-extended to 16 bits, in
// order, with `col_last` on every 64th sample and `frame_last` on every
// 4096th, and that with no stalls one sample passes per clock.
module tb_array_reshape;
  import otfs_pkg::*;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  sym12_t  in_sym;
  logic    in_valid = 1'b0, in_ready;
  cplx16_t out_data;
  logic    out_valid, out_ready = 1'b1, col_last, frame_last;

  int checks = 0, failures = 0;

  array_reshape dut (.clk, .rst_n, .in_sym, .in_valid, .in_ready, .out_data, .out_valid,
                     .out_ready, .col_last, .frame_last);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  sym12_t sent [$];
  int     n_out = 0;
  int     n_err = 0;
  int     n_last_err = 0;
  bit     stalls = 1'b0;

  always @(posedge clk) begin
    if (rst_n && out_valid && out_ready) begin
      sym12_t e;
      e = sent.pop_front();
      if (int'(out_data.re) != int'(e.re) || int'(out_data.im) != int'(e.im)) n_err++;
      if (col_last != (n_out % 64 == 63) || frame_last != (n_out % 4096 == 4095)) n_last_err++;
      n_out++;
    end
  end

  initial begin
    int cyc;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int f = 0; f < 2; f++) begin
      stalls = (f == 1);
      cyc = 0;
      for (int k = 0; k < 4096; k++) begin
        in_sym.re = 12'($urandom);
        in_sym.im = 12'($urandom);
        in_valid  = stalls ? ($urandom % 4 != 0) : 1'b1;
        out_ready = stalls ? ($urandom % 3 != 0) : 1'b1;
        @(posedge clk);
        while (!(in_valid && in_ready)) begin
          @(negedge clk);
          cyc++;
          in_valid  = stalls ? ($urandom % 4 != 0) : 1'b1;
          out_ready = stalls ? ($urandom % 3 != 0) : 1'b1;
          @(posedge clk);
        end
        sent.push_back(in_sym);
        @(negedge clk);
        cyc++;
      end
      in_valid = 1'b0;
      out_ready = 1'b1;
      repeat (4) @(negedge clk);
      if (!stalls) check(cyc == 4096, $sformatf("%0d clocks for 4096 samples", cyc));
    end
    check(n_out == 8192, $sformatf("%0d samples out", n_out));
    check(n_err == 0, $sformatf("%0d samples changed", n_err));
    check(n_last_err == 0, $sformatf("%0d column/frame markers wrong", n_last_err));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
