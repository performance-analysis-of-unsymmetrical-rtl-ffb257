// memory_array: register bank holding one sorted window for the scheduler.
//
// The paper places a "memory array" between the sorting network and the FSMD
// scheduler; the scheduler reads it by rank index ("memory(index)"). The
// paper names the block but gives no insides, so it is built here as the
// simplest thing that does the job: nine pixel registers plus the centre
// pixel, written together when load_i is high and held otherwise. Ranks are
// 0-based here (ro[0] is the smallest). The median is ro[4].
//
// Timing: ro/centre_o change on the clock edge at which load_i is high;
// valid_o rises with them and stays high until clear_i (the scheduler's
// acknowledgement) or rst. When load_i and clear_i coincide the load wins.
module memory_array
  import utmf_pkg::*;
(
  input  logic   clk,
  input  logic   rst,
  input  logic   load_i,
  input  pixel_t s_i      [WIN_N],
  input  pixel_t centre_i,
  input  logic   clear_i,
  output logic   valid_o,
  output pixel_t ro       [WIN_N],
  output pixel_t centre_o,
  output pixel_t median_o
);

  always_ff @(posedge clk) begin
    if (rst) begin
      valid_o  <= 1'b0;
      ro       <= '{default: '0};
      centre_o <= '0;
    end else if (load_i) begin
      valid_o  <= 1'b1;
      ro       <= s_i;
      centre_o <= centre_i;
    end else if (clear_i) begin
      valid_o  <= 1'b0;
    end
  end

  assign median_o = ro[WIN_N/2];

endmodule
