// utmf_top: unsymmetrical trimmed median filter for one 3x3 window.
//
// The filter replaces the centre pixel of a 3x3 window only when it looks
// like an impulse. The window is sorted by the snake sorting network; the
// sorted pixels are parked in the memory array; the FSMD scheduler counts the
// 0s and 255s, computes the unsymmetrical trimmed median (UTMED, the median
// of the pixels that are neither 0 nor 255) and its decision unit outputs
//   centre  if |centre - UTMED| <= 40,
//   median  if the centre is noisy but |median - UTMED| <= 20,
//   UTMED   if both are noisy.
// A window made only of 0s and 255s gives 0, 255 or its mean directly.
// This is the paper's sequential architecture (sorter -> memory array ->
// FSMD -> two comparators and a multiplexer).
//
// Interface: ip11..ip33 are the window pixels, row then column. A window is
// taken on a clock edge with valid_i && ready_o. The design processes one
// window at a time (this flow control is not in the paper): ready_o falls
// when a window is taken and rises again with op_valid_o. op_o is registered,
// pulses op_valid_o for one cycle and holds until the next result. ro[0..8]
// shows the sorted window in the memory array, median_o its median, utmed_o
// the last trimmed median, kind_o how the output was chosen, f_o and l_o
// the scheduler's 0 and 255 counters and state_o its state.
// Timing: op_o is valid 13 clock edges after the edge that takes a window
// that needs the full decision (5 sorter stages, 1 memory load, 7 scheduler
// states), 8 or 9 edges for windows made only of 0s and 255s. rst is
// synchronous and active high.
module utmf_top
  import utmf_pkg::*;
(
  input  logic      clk,
  input  logic      rst,
  input  logic      valid_i,
  output logic      ready_o,
  input  pixel_t    ip11, ip12, ip13,
  input  pixel_t    ip21, ip22, ip23,
  input  pixel_t    ip31, ip32, ip33,
  output pixel_t    op_o,
  output logic      op_valid_o,
  output out_kind_t kind_o,
  output pixel_t    ro       [WIN_N],
  output pixel_t    median_o,
  output pixel_t    utmed_o,
  output count_t    f_o,
  output count_t    l_o,
  output state_t    state_o
);

  pixel_t win [WIN_N];
  logic   busy, take;

  always_comb begin
    win = '{ip11, ip12, ip13, ip21, ip22, ip23, ip31, ip32, ip33};
  end

  assign ready_o = ~busy;
  assign take    = valid_i & ready_o;

  always_ff @(posedge clk) begin
    if (rst)             busy <= 1'b0;
    else if (take)       busy <= 1'b1;
    else if (op_valid_o) busy <= 1'b0;
  end

  // sorting network
  logic   srt_valid;
  pixel_t srt_s [WIN_N];
  pixel_t srt_centre;

  snake_sorter u_sorter (
    .clk     (clk),
    .rst     (rst),
    .valid_i (take),
    .x       (win),
    .valid_o (srt_valid),
    .s       (srt_s),
    .median_o(),
    .centre_o(srt_centre)
  );

  // memory array
  logic   mem_valid, mem_clear;
  pixel_t mem_centre, mem_median;

  memory_array u_memory (
    .clk     (clk),
    .rst     (rst),
    .load_i  (srt_valid),
    .s_i     (srt_s),
    .centre_i(srt_centre),
    .clear_i (mem_clear),
    .valid_o (mem_valid),
    .ro      (ro),
    .centre_o(mem_centre),
    .median_o(mem_median)
  );

  // FSMD scheduler with the decision unit
  fsmd_scheduler u_fsmd (
    .clk        (clk),
    .rst        (rst),
    .mem_valid_i(mem_valid),
    .ro         (ro),
    .centre_i   (mem_centre),
    .median_i   (mem_median),
    .mem_clear_o(mem_clear),
    .op_o       (op_o),
    .op_valid_o (op_valid_o),
    .kind_o     (kind_o),
    .utmed_o    (utmed_o),
    .f_o        (f_o),
    .l_o        (l_o),
    .state_o    (state_o)
  );

  assign median_o = mem_median;

  // A new sorted window may only arrive while the memory array is free.
  a_no_overwrite: assert property (@(posedge clk) disable iff (rst)
    srt_valid |-> !mem_valid);

endmodule
