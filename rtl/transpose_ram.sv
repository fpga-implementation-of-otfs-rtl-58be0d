// transpose_ram: the corner-turn memory of the (I)SFFT, a simple dual-port
// block RAM of DEPTH words of WIDTH bits (4096 x 32 by default: one 64 x 64
// matrix of 16+16-bit complex samples).
//
// Port A writes (`wea`, `addra`, `dina`); port B reads `addrb` when `enb` is
// high and returns `doutb` one clock later (registered output with read
// enable, as a block RAM does); `doutb` holds while `enb` is low. Read and
// write in the same clock to the same address return the old word. The size
// and the 32-bit word {im, re} follow the paper; the one-clock read latency
// is this design's choice.
module transpose_ram #(
  parameter int unsigned DEPTH = 4096,
  parameter int unsigned WIDTH = 32
) (
  input  logic                     clk,
  input  logic                     wea,
  input  logic [$clog2(DEPTH)-1:0] addra,
  input  logic [WIDTH-1:0]         dina,
  input  logic                     enb,
  input  logic [$clog2(DEPTH)-1:0] addrb,
  output logic [WIDTH-1:0]         doutb
);

  logic [WIDTH-1:0] ram [DEPTH];

  always_ff @(posedge clk) begin
    if (wea) ram[addra] <= dina;
    if (enb) doutb <= ram[addrb];
  end

endmodule
