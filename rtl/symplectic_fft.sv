// symplectic_fft: the 2-D symplectic finite Fourier transform engine, used
// as the ISFFT in the transmitter and as the SFFT in the receiver.
//
// A frame of ROWS x COLS complex samples arrives column by column (ROWS
// samples per column, `in_last` on the last sample of each column).
//   1. Every column goes through a ROWS-point transform (core 1, an IFFT by
//      default).
//   2. The results are recorded in a block RAM column-major: column c at
//      addresses c*ROWS .. c*ROWS+ROWS-1 (state RECORD_IFFT_DATA).
//   3. Once the whole frame is stored the RAM is read transposed: output
//      column j is addresses j, j+ROWS, j+2*ROWS, ... (state
//      OUTPUT_OTFS_DATA), and each such COLS-sample column goes through a
//      COLS-point transform (core 2, an FFT by default).
// The output is the transposed 2-D transform, ROWS columns of COLS samples,
// with `out_last` on the last sample of each column and `out_frame_last` on
// the last of the frame. This IFFT / transpose-through-BRAM / FFT structure,
// the 4096-word BRAM and its addressing follow the paper.
//
// With unitary (1/sqrt(N)) cores the same circuit serves both directions:
// ISFFT of a delay-Doppler frame x[p,q] stored column q = (x[0,q]..x[63,q])
// is IFFT over p then FFT over q; SFFT of a time-frequency frame stored as
// one 64-subcarrier column per time slot is IFFT over the subcarriers then
// FFT over the slots. Both leave in the order the next stage wants.
//
// Timing: a single RAM buffer, so recording of frame k+1 waits until frame
// k has been read out; core 1 then holds its results and back-pressures its
// input. Read-out runs at one sample per clock into core 2 whenever core 2
// is loading. The RAM has one clock of read latency, covered by a one-entry
// pending register.
module symplectic_fft
  import otfs_pkg::*;
#(
  parameter int unsigned ROWS = otfs_pkg::N_DOPPLER,
  parameter int unsigned COLS = otfs_pkg::M_DELAY,
  parameter bit          INV1 = 1'b1,
  parameter bit          INV2 = 1'b0
) (
  input  logic    clk,
  input  logic    rst_n,
  input  cplx16_t in_data,
  input  logic    in_valid,
  output logic    in_ready,
  input  logic    in_last,
  output cplx16_t out_data,
  output logic    out_valid,
  input  logic    out_ready,
  output logic    out_last,
  output logic    out_frame_last
);

  localparam int unsigned DEPTH = ROWS * COLS;
  localparam int unsigned AW    = $clog2(DEPTH);
  localparam int unsigned RW    = $clog2(ROWS);
  localparam int unsigned CW    = $clog2(COLS);

  typedef enum logic {RECORD_IFFT_DATA, OUTPUT_OTFS_DATA} rec_state_e;

  rec_state_e rec_state;

  // Core 1 (column transform) output.
  cplx16_t c1_data;
  logic    c1_valid, c1_ready, c1_last;

  // Core 2 (transposed-column transform) input/output.
  cplx16_t c2_in;
  logic    c2_in_valid, c2_in_ready, c2_in_last;
  logic    c2_out_valid, c2_out_last;

  // RAM ports.
  logic          wea, enb;
  logic [AW-1:0] addra, addrb;
  logic [31:0]   dina, doutb;

  // Read-out bookkeeping.
  logic [AW-1:0] rd_cnt;     // next sample index (transposed order) to read
  logic          rd_done;    // every sample of the frame has been read
  logic          pend;       // doutb holds a sample not yet given to core 2
  logic          pend_last_col, pend_last_frame;
  logic [AW-1:0] out_cnt;

  fft_core #(.N(ROWS), .INVERSE(INV1)) u_core1 (
    .clk, .rst_n,
    .s_data (in_data), .s_valid(in_valid), .s_ready(in_ready), .s_last(in_last),
    .m_data (c1_data), .m_valid(c1_valid), .m_ready(c1_ready), .m_last(c1_last)
  );

  transpose_ram #(.DEPTH(DEPTH), .WIDTH(32)) u_ram (
    .clk, .wea, .addra, .dina, .enb, .addrb, .doutb
  );

  fft_core #(.N(COLS), .INVERSE(INV2)) u_core2 (
    .clk, .rst_n,
    .s_data (c2_in), .s_valid(c2_in_valid), .s_ready(c2_in_ready), .s_last(c2_in_last),
    .m_data (out_data), .m_valid(c2_out_valid), .m_ready(out_ready), .m_last(c2_out_last)
  );

  // ---- Recording ------------------------------------------------------------
  assign c1_ready = (rec_state == RECORD_IFFT_DATA);
  assign wea      = c1_valid && c1_ready;
  assign dina     = c1_data;

  // ---- Transposed read-out --------------------------------------------------
  // Sample r of the read-out: output column r / COLS, element r % COLS,
  // stored at address element*ROWS + column.
  logic [RW-1:0] rd_col;
  logic [CW-1:0] rd_elem;
  assign rd_col  = RW'(rd_cnt / AW'(COLS));
  assign rd_elem = CW'(rd_cnt % AW'(COLS));
  assign addrb   = AW'(32'(rd_elem) * ROWS + 32'(rd_col));
  assign enb     = (rec_state == OUTPUT_OTFS_DATA) && !rd_done && (!pend || c2_in_ready);

  assign c2_in       = doutb;
  assign c2_in_valid = pend;
  assign c2_in_last  = pend_last_col;

  assign out_valid      = c2_out_valid;
  assign out_last       = c2_out_last;
  assign out_frame_last = c2_out_valid && c2_out_last && (32'(out_cnt) == DEPTH - 1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rec_state       <= RECORD_IFFT_DATA;
      addra           <= '0;
      rd_cnt          <= '0;
      rd_done         <= 1'b0;
      pend            <= 1'b0;
      pend_last_col   <= 1'b0;
      pend_last_frame <= 1'b0;
      out_cnt         <= '0;
    end else begin
      unique case (rec_state)
        RECORD_IFFT_DATA: begin
          if (wea) begin
            addra <= addra + 1'b1;
            if (32'(addra) == DEPTH - 1) begin
              rec_state <= OUTPUT_OTFS_DATA;
              rd_cnt    <= '0;
              rd_done   <= 1'b0;
            end
          end
        end
        OUTPUT_OTFS_DATA: begin
          if (pend && c2_in_ready) pend <= 1'b0;
          if (enb) begin
            pend            <= 1'b1;
            pend_last_col   <= (32'(rd_elem) == COLS - 1);
            pend_last_frame <= (32'(rd_cnt) == DEPTH - 1);
            rd_cnt          <= rd_cnt + 1'b1;
            if (32'(rd_cnt) == DEPTH - 1) rd_done <= 1'b1;
          end
          // The frame is finished once its last sample has entered core 2.
          if (pend && c2_in_ready && pend_last_frame) begin
            rec_state <= RECORD_IFFT_DATA;
            addra     <= '0;
            rd_done   <= 1'b0;
          end
        end
        default: rec_state <= RECORD_IFFT_DATA;
      endcase
      if (c2_out_valid && out_ready)
        out_cnt <= (32'(out_cnt) == DEPTH - 1) ? '0 : out_cnt + 1'b1;
    end
  end

  // Core 1's tlast must fall on the last row of each recorded column.
  assert property (@(posedge clk) disable iff (!rst_n)
                   wea |-> c1_last == (32'(addra % AW'(ROWS)) == ROWS - 1));
  // The RAM is written only while recording and read only while outputting.
  assert property (@(posedge clk) disable iff (!rst_n)
                   wea |-> rec_state == RECORD_IFFT_DATA);
  assert property (@(posedge clk) disable iff (!rst_n)
                   enb |-> rec_state == OUTPUT_OTFS_DATA);

endmodule
