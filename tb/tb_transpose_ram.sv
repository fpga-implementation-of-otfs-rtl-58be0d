// tb_transpose_ram: fills the 4096 x 32 RAM with a random pattern, reads it
// back in transposed order (address (r % 64) * 64 + r / 64), and checks that
// each word appears one clock after its address, that `doutb` holds while
// `enb` is low, and that a read of the address being written returns the
// old word.
module tb_transpose_ram;

  logic        clk = 1'b0;
  always #5 clk = ~clk;

  logic        wea = 1'b0, enb = 1'b0;
  logic [11:0] addra = '0, addrb = '0;
  logic [31:0] dina = '0, doutb;
  logic [31:0] model [4096];

  int checks = 0, failures = 0;

  transpose_ram dut (.clk, .wea, .addra, .dina, .enb, .addrb, .doutb);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    logic [31:0] held;
    int bad;
    @(negedge clk);
    for (int a = 0; a < 4096; a++) begin
      model[a] = $urandom;
      wea = 1'b1; addra = 12'(a); dina = model[a];
      @(negedge clk);
    end
    wea = 1'b0;
    bad = 0;
    for (int r = 0; r < 4096; r++) begin
      enb = 1'b1;
      addrb = 12'((r % 64) * 64 + r / 64);
      @(negedge clk);
      if (doutb != model[(r % 64) * 64 + r / 64]) bad++;
    end
    check(bad == 0, $sformatf("%0d transposed reads wrong", bad));
    // hold while enb is low
    held = doutb;
    enb = 1'b0;
    addrb = 12'd5;
    repeat (3) @(negedge clk);
    check(doutb == held, "doutb changed with enb low");
    // read-during-write to the same address returns the old word
    enb = 1'b1; addrb = 12'd77; wea = 1'b1; addra = 12'd77; dina = ~model[77];
    @(negedge clk);
    check(doutb == model[77], "read during write did not return the old word");
    wea = 1'b0;
    @(negedge clk);
    check(doutb == ~model[77], "write not visible on the next read");
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
