// three_cell_sorter: orders three pixels into minimum, middle and maximum.
//
// This is the processing element every stage of the snake sorting network is
// built from (the paper's "three cell sorter"). The paper gives only its
// function; the insides here are the plain three compare-exchange network
// (k1/k2, then the larger against k3, then the two smaller). Purely
// combinational, no clock; ties keep their values, so the outputs are always
// a permutation of the inputs.
module three_cell_sorter #(
  parameter int unsigned W = 8
) (
  input  logic [W-1:0] k1,
  input  logic [W-1:0] k2,
  input  logic [W-1:0] k3,
  output logic [W-1:0] min_o,
  output logic [W-1:0] mid_o,
  output logic [W-1:0] max_o
);

  logic [W-1:0] lo_a, hi_a, lo_b;

  always_comb begin
    // compare-exchange k1,k2
    lo_a = (k1 > k2) ? k2 : k1;
    hi_a = (k1 > k2) ? k1 : k2;
    // larger of the pair against k3 gives the maximum
    max_o = (hi_a > k3) ? hi_a : k3;
    lo_b  = (hi_a > k3) ? k3 : hi_a;
    // the two remaining values give minimum and middle
    min_o = (lo_a > lo_b) ? lo_b : lo_a;
    mid_o = (lo_a > lo_b) ? lo_a : lo_b;
  end

endmodule
