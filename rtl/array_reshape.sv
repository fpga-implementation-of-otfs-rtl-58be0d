// array_reshape: arranges the 4096 QAM symbols of a frame as a 64 x 64
// delay-Doppler matrix for the ISFFT.
//
// The matrix is filled column by column (symbol k goes to row k mod ROWS of
// column k / ROWS), so reshaping needs no storage: the block counts the
// symbols, sign-extends each 12-bit 2.10 part to the 16-bit samples of the
// FFT streams, and marks with `col_last` the last sample of every column
// (the FFT cores' tlast) and with `frame_last` the last sample of the frame.
// The 64 x 64 shape, the column-major order and the sign extension to 16
// bits follow the paper (its listing of the FFT feed); the register stage
// and handshakes are this design's own.
//
// Interface: valid/ready in and out; one register stage, one sample per
// clock, one clock of latency.
module array_reshape
  import otfs_pkg::*;
#(
  parameter int unsigned ROWS = otfs_pkg::N_DOPPLER,
  parameter int unsigned COLS = otfs_pkg::M_DELAY
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  sym12_t                    in_sym,
  input  logic                      in_valid,
  output logic                      in_ready,
  output cplx16_t                   out_data,
  output logic                      out_valid,
  input  logic                      out_ready,
  output logic                      col_last,
  output logic                      frame_last
);

  logic [$clog2(ROWS)-1:0] row_cnt;
  logic [$clog2(COLS)-1:0] col_cnt;

  assign in_ready = !out_valid || out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      row_cnt    <= '0;
      col_cnt    <= '0;
      out_data   <= '0;
      out_valid  <= 1'b0;
      col_last   <= 1'b0;
      frame_last <= 1'b0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (in_valid && in_ready) begin
        out_data.re <= SAMPLE_W'(in_sym.re);
        out_data.im <= SAMPLE_W'(in_sym.im);
        out_valid   <= 1'b1;
        col_last    <= (32'(row_cnt) == ROWS - 1);
        frame_last  <= (32'(row_cnt) == ROWS - 1) && (32'(col_cnt) == COLS - 1);
        if (32'(row_cnt) == ROWS - 1) begin
          row_cnt <= '0;
          col_cnt <= (32'(col_cnt) == COLS - 1) ? '0 : col_cnt + 1'b1;
        end else begin
          row_cnt <= row_cnt + 1'b1;
        end
      end
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n)
                   out_valid && !out_ready |=> out_valid && $stable(out_data));

endmodule
