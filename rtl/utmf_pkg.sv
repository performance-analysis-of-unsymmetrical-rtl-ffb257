// utmf_pkg: types and constants shared by the unsymmetrical trimmed median
// filter (UTMF) blocks.
//
// The filter works on one 3x3 window of 8-bit grey-scale pixels at a time.
// A pixel equal to 0 or 255 is treated as a salt-and-pepper candidate; the
// rest of the window is "non-noisy". The constants below are the pixel width,
// the window size, the two detection thresholds (40 and 20, the values used in
// the paper's output stage) and the lookup table used when every pixel of a
// window is 0 or 255.
package utmf_pkg;

  localparam int unsigned PIX_W  = 8;   // pixel width, dynamic range 0..255
  localparam int unsigned WIN_N  = 9;   // pixels in a 3x3 window
  localparam int unsigned CNT_W  = 4;   // width of a 0..9 counter

  typedef logic [PIX_W-1:0] pixel_t;
  typedef logic [CNT_W-1:0] count_t;
  typedef pixel_t           window_t [WIN_N];

  localparam pixel_t PIX_MIN = '0;      // "pepper" value
  localparam pixel_t PIX_MAX = '1;      // "salt" value (255)

  // Default thresholds: |centre - UTMED| > T marks the centre pixel noisy,
  // |median - UTMED| > T1 marks the window median noisy.
  localparam pixel_t T_DEFAULT  = 8'd40;
  localparam pixel_t T1_DEFAULT = 8'd20;

  // States of the FSMD scheduler, in the order the paper names them.
  typedef enum logic [2:0] {
    S_IDLE         = 3'd0,
    S_DAT1         = 3'd1,
    S_INDEX        = 3'd2,
    S_DECISION     = 3'd3,
    S_OUT_EVEN     = 3'd4,
    S_OUT_ODD      = 3'd5,
    S_FINAL        = 3'd6,
    S_OUTPUT_FINAL = 3'd7
  } state_t;

  // How the output pixel of a window was chosen.
  typedef enum logic [2:0] {
    OUT_KEEP   = 3'd0,  // centre not noisy, left unaltered
    OUT_MEDIAN = 3'd1,  // centre noisy, median not noisy: median
    OUT_UTMED  = 3'd2,  // centre and median noisy: trimmed median
    OUT_ALL0   = 3'd3,  // every pixel 0
    OUT_ALL255 = 3'd4,  // every pixel 255
    OUT_MIXLUT = 3'd5   // every pixel 0 or 255, both present: mean from LUT
  } out_kind_t;

  // Mean of a window holding only 0s and 255s, indexed by the number of 0s:
  // floor((9 - zeros) * 255 / 9). Entries for 2..8 zeros are the paper's
  // table (198,170,141,113,85,56,28); 0, 1 and 9 zeros follow the same formula.
  function automatic pixel_t mix_mean(input count_t zeros);
    unique case (zeros)
      4'd0:    mix_mean = 8'd255;
      4'd1:    mix_mean = 8'd226;
      4'd2:    mix_mean = 8'd198;
      4'd3:    mix_mean = 8'd170;
      4'd4:    mix_mean = 8'd141;
      4'd5:    mix_mean = 8'd113;
      4'd6:    mix_mean = 8'd85;
      4'd7:    mix_mean = 8'd56;
      4'd8:    mix_mean = 8'd28;
      default: mix_mean = 8'd0;
    endcase
  endfunction

endpackage
