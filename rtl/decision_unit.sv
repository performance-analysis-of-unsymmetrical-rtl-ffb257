// decision_unit: impulse detection and correction for one window.
//
// Two absolute-difference comparators and a 3-input multiplexer, as in the
// output part of the paper's architecture:
//   noisy_pixel  = |centre - utmed| > T
//   noisy_median = |median - utmed| > T1
//   out = !noisy_pixel   ? centre   (pixel left unaltered)
//       : !noisy_median  ? median   (pixel replaced by the window median)
//       :                  utmed    (both noisy: unsymmetrical trimmed median)
// T=40 and T1=20 are the paper's values for its output stage. Purely
// combinational; the scheduler registers the result.
module decision_unit
  import utmf_pkg::*;
#(
  parameter pixel_t T  = T_DEFAULT,
  parameter pixel_t T1 = T1_DEFAULT
) (
  input  pixel_t    centre_i,
  input  pixel_t    median_i,
  input  pixel_t    utmed_i,
  output pixel_t    out_o,
  output logic      noisy_pixel_o,
  output logic      noisy_median_o,
  output out_kind_t kind_o
);

  function automatic pixel_t absdiff(input pixel_t a, input pixel_t b);
    return (a > b) ? pixel_t'(a - b) : pixel_t'(b - a);
  endfunction

  always_comb begin
    noisy_pixel_o  = absdiff(centre_i, utmed_i) > T;
    noisy_median_o = absdiff(median_i, utmed_i) > T1;
    if (!noisy_pixel_o) begin
      out_o  = centre_i;
      kind_o = OUT_KEEP;
    end else if (!noisy_median_o) begin
      out_o  = median_i;
      kind_o = OUT_MEDIAN;
    end else begin
      out_o  = utmed_i;
      kind_o = OUT_UTMED;
    end
  end

endmodule
