// snake_sorter: snake-like shear sorting network for a 3x3 window.
//
// The nine pixels x[0..8] are the window in row-major order (x[0]=top-left,
// x[4]=centre). Following the paper's algorithm, five stages of three-cell
// sorters are applied:
//   1. row sort   - rows 1 and 3 ascending, row 2 descending (snake order)
//   2. column sort - every column ascending, top to bottom
//   3. row sort again (snake order)
//   4. column sort again
//   5. semi-diagonal sort - the upper semi-diagonal (row1 col2, row1 col3,
//      row2 col3) and the lower semi-diagonal (row2 col1, row3 col1,
//      row3 col2) are each sorted ascending.
// That is 3+3+3+3+2 = 14 three-cell sorters, as in the paper. The result is read in snake
// order (row 1 left to right, row 2 right to left, row 3 left to right):
//   s[0] = top-left, s[1..3] = upper semi-diagonal, s[4] = centre (median),
//   s[5..7] = lower semi-diagonal, s[8] = bottom-right.
//
// Two shear phases followed by the two semi-diagonal sorts alone (14 sorters)
// do not sort every input: s[0..2] and s[6..8] are always the true ranks, but
// s[3], s[4] and s[5] - the middle row, the median among them - can be out of
// order; the window 0,0,1,1,1,1,0,0,1 comes out as 0,0,0,1,0,1,1,1,1, and
// the window 177,0,0,205,255,187,155,25,124 gives a median of 124 instead of
// 155. With FINAL_ROW_SORT=1 (default) a fifteenth three-cell sorter orders
// the middle row (snake order, right to left) after the semi-diagonal sorts,
// inside the same stage; exhaustive 0/1 testing shows the network then sorts
// every window, as the algorithm requires. FINAL_ROW_SORT=0 gives the
// 14-sorter network exactly as drawn.
//
// Timing: with REG_STAGES=1 (default) a register follows every stage, so the
// result appears 5 clock cycles after x/valid_i are sampled and a new window
// can enter every cycle. The centre pixel travels alongside (centre_o) so it
// stays aligned with its sorted window. With REG_STAGES=0 the network is purely
// combinational (the paper's sorter-only comparison is of that form) and the
// clock is unused.
module snake_sorter
  import utmf_pkg::*;
#(
  parameter bit REG_STAGES     = 1'b1,
  parameter bit FINAL_ROW_SORT = 1'b1
) (
  input  logic    clk,
  input  logic    rst,
  input  logic    valid_i,
  input  pixel_t  x        [WIN_N],
  output logic    valid_o,
  output pixel_t  s        [WIN_N],
  output pixel_t  median_o,
  output pixel_t  centre_o
);

  localparam int unsigned NSTG = 5;

  // m[k] is the 3x3 matrix entering stage k (k=0 is the input window),
  // q[k] is what stage k produces, before its optional register.
  pixel_t m [NSTG+1][3][3];
  pixel_t q [NSTG][3][3];
  logic   v [NSTG+1];
  pixel_t c [NSTG+1];

  always_comb begin
    for (int r = 0; r < 3; r++)
      for (int k = 0; k < 3; k++)
        m[0][r][k] = x[3*r+k];
    v[0] = valid_i;
    c[0] = x[4];
  end

  // Stages 0..3: alternating snake row sorts and column sorts.
  for (genvar g = 0; g < 4; g++) begin : g_shear
    for (genvar i = 0; i < 3; i++) begin : g_cell
      pixel_t lo, mi, hi;
      if (g % 2 == 0) begin : g_row
        three_cell_sorter #(.W(PIX_W)) u_sort (
          .k1(m[g][i][0]), .k2(m[g][i][1]), .k3(m[g][i][2]),
          .min_o(lo), .mid_o(mi), .max_o(hi));
        if (i == 1) begin : g_desc
          assign q[g][i][0] = hi;
          assign q[g][i][1] = mi;
          assign q[g][i][2] = lo;
        end else begin : g_asc
          assign q[g][i][0] = lo;
          assign q[g][i][1] = mi;
          assign q[g][i][2] = hi;
        end
      end else begin : g_col
        three_cell_sorter #(.W(PIX_W)) u_sort (
          .k1(m[g][0][i]), .k2(m[g][1][i]), .k3(m[g][2][i]),
          .min_o(lo), .mid_o(mi), .max_o(hi));
        assign q[g][0][i] = lo;
        assign q[g][1][i] = mi;
        assign q[g][2][i] = hi;
      end
    end
  end

  // Stage 4: semi-diagonal sorts into d; corners and centre pass straight
  // through. Then the optional middle-row sort.
  pixel_t d [3][3];
  three_cell_sorter #(.W(PIX_W)) u_upper (
    .k1(m[4][0][1]), .k2(m[4][0][2]), .k3(m[4][1][2]),
    .min_o(d[0][1]), .mid_o(d[0][2]), .max_o(d[1][2]));
  three_cell_sorter #(.W(PIX_W)) u_lower (
    .k1(m[4][1][0]), .k2(m[4][2][0]), .k3(m[4][2][1]),
    .min_o(d[1][0]), .mid_o(d[2][0]), .max_o(d[2][1]));
  assign d[0][0] = m[4][0][0];
  assign d[1][1] = m[4][1][1];
  assign d[2][2] = m[4][2][2];

  if (FINAL_ROW_SORT) begin : g_row_fix
    three_cell_sorter #(.W(PIX_W)) u_middle (
      .k1(d[1][0]), .k2(d[1][1]), .k3(d[1][2]),
      .min_o(q[4][1][2]), .mid_o(q[4][1][1]), .max_o(q[4][1][0]));
    for (genvar k = 0; k < 3; k++) begin : g_rows
      assign q[4][0][k] = d[0][k];
      assign q[4][2][k] = d[2][k];
    end
  end else begin : g_no_fix
    assign q[4] = d;
  end

  // Stage registers (or plain wires when REG_STAGES=0).
  for (genvar g = 0; g < NSTG; g++) begin : g_pipe
    if (REG_STAGES) begin : g_reg
      always_ff @(posedge clk) begin
        if (rst) v[g+1] <= 1'b0;
        else     v[g+1] <= v[g];
        c[g+1] <= c[g];
        m[g+1] <= q[g];
      end
    end else begin : g_wire
      always_comb begin
        v[g+1] = v[g];
        c[g+1] = c[g];
        m[g+1] = q[g];
      end
    end
  end

  // Read the final matrix in snake order.
  always_comb begin
    s[0] = m[NSTG][0][0];
    s[1] = m[NSTG][0][1];
    s[2] = m[NSTG][0][2];
    s[3] = m[NSTG][1][2];
    s[4] = m[NSTG][1][1];
    s[5] = m[NSTG][1][0];
    s[6] = m[NSTG][2][0];
    s[7] = m[NSTG][2][1];
    s[8] = m[NSTG][2][2];
  end

  assign valid_o  = v[NSTG];
  assign median_o = m[NSTG][1][1];
  assign centre_o = c[NSTG];

endmodule
