// otfs_pkg: types, constants and look-up functions shared by the OTFS
// transceiver.
//
// * cplx16_t is one complex sample as it travels on the internal streams:
//   16-bit two's-complement real and imaginary parts, packed {im, re} like
//   the 32-bit tdata word of the FFT cores.
// * qam_order_e selects the constellation (4/8/16/32-QAM) at run time.
// * qam_point() is the constellation look-up table. Points are the
//   unit-average-power constellations scaled to 2.10 fixed point (12-bit
//   signed, 1024 = 1.0), e.g. 4-QAM uses +-724 (0.7071) and 16-QAM +-324 and
//   +-971 (0.948). The 4-, 8- and 16-QAM labelings are the Gray labelings of
//   the common rectangular constellations: the upper label bits pick the
//   in-phase level, the lower bits the quadrature level, Gray coded so that
//   neighbours differ in one bit. 32-QAM is the 6x6 cross constellation
//   (corners removed) labelled column by column, I from -5 to +5 and Q from
//   high to low in each column; that labeling is this design's own choice.
// * tw_cos()/tw_sin() give the 64-point FFT twiddle factors
//   cos(2*pi*k/64) and sin(2*pi*k/64) in Q1.14 (16384 = 1.0), from a
//   quarter-wave table QW[k] = round(16384*cos(2*pi*k/64)), k = 0..16.
package otfs_pkg;

  // Frame geometry: N Doppler bins by M delay bins, 64 x 64 = 4096 symbols.
  localparam int unsigned N_DOPPLER     = 64;
  localparam int unsigned M_DELAY       = 64;
  localparam int unsigned FRAME_SYMBOLS = N_DOPPLER * M_DELAY;

  // Sample widths: 12-bit 2.10 symbols, 16-bit samples on the FFT streams.
  localparam int unsigned SYM_W    = 12;
  localparam int unsigned SAMPLE_W = 16;

  typedef struct packed {
    logic signed [SAMPLE_W-1:0] im;
    logic signed [SAMPLE_W-1:0] re;
  } cplx16_t;

  typedef struct packed {
    logic signed [SYM_W-1:0] im;
    logic signed [SYM_W-1:0] re;
  } sym12_t;

  typedef enum logic [1:0] {
    QAM4  = 2'd0,
    QAM8  = 2'd1,
    QAM16 = 2'd2,
    QAM32 = 2'd3
  } qam_order_e;

  // log2 of the modulation order: 2..5 bits per symbol.
  function automatic int unsigned bits_per_symbol(qam_order_e order);
    return 32'(order) + 2;
  endfunction

  // Number of constellation points M.
  function automatic int unsigned qam_size(qam_order_e order);
    return 32'd1 << bits_per_symbol(order);
  endfunction

  // Value of amplitude level +-1/+-3/+-5 in 2.10 fixed point for a given
  // order, i.e. round(1024 * level / sqrt(Eavg)), Eavg = 2, 6, 10, 20.
  function automatic logic signed [SYM_W-1:0] qam_level(qam_order_e order, int level);
    int mag;
    int a;
    a = (level < 0) ? -level : level;
    unique case (order)
      QAM4:    mag = 724;
      QAM8:    mag = (a == 1) ? 418 : 1254;
      QAM16:   mag = (a == 1) ? 324 : 971;
      default: mag = (a == 1) ? 229 : ((a == 3) ? 687 : 1145);
    endcase
    return (level < 0) ? SYM_W'(-mag) : SYM_W'(mag);
  endfunction

  // Gray-coded 2-bit level index -> amplitude: 00:-3 01:-1 11:+1 10:+3.
  function automatic int gray2_level(logic [1:0] g);
    unique case (g)
      2'b00:   return -3;
      2'b01:   return -1;
      2'b11:   return 1;
      default: return 3;
    endcase
  endfunction

  // Constellation look-up: symbol label -> 2.10 fixed-point I/Q.
  function automatic sym12_t qam_point(qam_order_e order, logic [4:0] label);
    sym12_t p;
    int li;
    int lq;
    int cnt;
    li = 0;
    lq = 0;
    unique case (order)
      QAM4: begin
        li = label[1] ? 1 : -1;
        lq = label[0] ? -1 : 1;
      end
      QAM8: begin
        li = gray2_level(label[2:1]);
        lq = label[0] ? -1 : 1;
      end
      QAM16: begin
        li = gray2_level(label[3:2]);
        lq = -gray2_level(label[1:0]);
      end
      default: begin
        // 6x6 cross: walk the grid column by column, skipping the corners.
        cnt = 0;
        for (int c = 0; c < 6; c++) begin
          for (int r = 0; r < 6; r++) begin
            if (!((c == 0 || c == 5) && (r == 0 || r == 5))) begin
              if (cnt == int'(label)) begin
                li = 2 * c - 5;
                lq = 5 - 2 * r;
              end
              cnt++;
            end
          end
        end
      end
    endcase
    p.re = qam_level(order, li);
    p.im = qam_level(order, lq);
    return p;
  endfunction

  // Quarter-wave cosine table, Q1.14.
  function automatic logic signed [15:0] qw_cos(int unsigned k);
    unique case (k)
      0:  return 16'sd16384;  1:  return 16'sd16305;  2:  return 16'sd16069;
      3:  return 16'sd15679;  4:  return 16'sd15137;  5:  return 16'sd14449;
      6:  return 16'sd13623;  7:  return 16'sd12665;  8:  return 16'sd11585;
      9:  return 16'sd10394;  10: return 16'sd9102;   11: return 16'sd7723;
      12: return 16'sd6270;   13: return 16'sd4756;   14: return 16'sd3196;
      15: return 16'sd1606;   default: return 16'sd0;
    endcase
  endfunction

  // cos(2*pi*k/64), k = 0..31.
  function automatic logic signed [15:0] tw_cos(logic [4:0] k);
    return (k <= 5'd16) ? qw_cos(32'(k)) : -qw_cos(32'(6'd32 - 6'(k)));
  endfunction

  // sin(2*pi*k/64), k = 0..31.
  function automatic logic signed [15:0] tw_sin(logic [4:0] k);
    return (k <= 5'd16) ? qw_cos(32'(5'd16 - k)) : qw_cos(32'(k - 5'd16));
  endfunction

endpackage
