// tb_utmf_top: end-to-end test of the whole filter at its default settings.
//
// Windows are offered back to back with valid_i held high, so the one-window-
// at-a-time flow control stalls the source for every window. Each result is
// compared with an independent model: the window is put through the snake
// network model (which, with the final middle-row sort, equals a true sort)
// and then the trimmed-median decision (utmf_ref_pkg). Checked:
//  - the paper's three worked examples and the three windows of its
//    simulation figure give the printed outputs (155, 155, 119, 12, 83, 13);
//  - 13 clock edges from taking a window to op_valid when the decision path
//    is used (counting the taking edge), 8 for all-0/all-255 windows and 9
//    for windows made only of 0s and 255s;
//  - ro shows the sorted window while it is processed;
//  - with windows offered back to back, a new window is taken every 14
//    edges after a full-decision window.
// Every mechanism must occur at least once: each output kind (pixel kept,
// median, trimmed median, all 0, all 255, 0/255 mean table), odd and even
// trimmed-array lengths and source stalls.
module tb_utmf_top;
  import utmf_pkg::*;
  import utmf_ref_pkg::*;

  logic      clk = 0, rst = 1, valid_i = 0, ready, op_valid;
  pixel_t    ip [WIN_N];
  pixel_t    op, med, utmed, ro [WIN_N];
  out_kind_t kind;
  count_t    f, l;
  state_t    state;

  utmf_top dut (
    .clk(clk), .rst(rst), .valid_i(valid_i), .ready_o(ready),
    .ip11(ip[0]), .ip12(ip[1]), .ip13(ip[2]),
    .ip21(ip[3]), .ip22(ip[4]), .ip23(ip[5]),
    .ip31(ip[6]), .ip32(ip[7]), .ip33(ip[8]),
    .op_o(op), .op_valid_o(op_valid), .kind_o(kind), .ro(ro),
    .median_o(med), .utmed_o(utmed), .f_o(f), .l_o(l), .state_o(state));

  always #5 clk = ~clk;

  int checks = 0, failures = 0, cycle = 0;
  int seen_kind [6] = '{default: 0};
  int n_odd = 0, n_even = 0, n_stall = 0, prev_take = 0;
  bit prev_long = 0;

  always @(posedge clk) cycle++;
  always @(negedge clk) if (!rst && valid_i && !ready) n_stall++;

  task automatic chk(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL %s at cycle %0d", what, cycle);
    end
  endtask

  localparam int NWIN = 4000;
  int unsigned wins [NWIN][9];
  int          nwin = 0;
  int          expect_op [6] = '{155, 155, 119, 12, 83, 13};

  task automatic add9(input int a0, a1, a2, a3, a4, a5, a6, a7, a8);
    wins[nwin] = '{a0, a1, a2, a3, a4, a5, a6, a7, a8};
    nwin++;
  endtask

  task automatic run(input int n);
    win_t w, s, t;
    int   k, e, c0, lat, exp_lat, nz, nl;
    for (int i = 0; i < 9; i++) w[i] = wins[n][i];
    s = snake_net(w);
    t = true_sort(w);
    chk(s == t, "reference network sorts");
    e = utmf_filter(s, w[4], 40, 20, k);
    for (int i = 0; i < 9; i++) ip[i] = pixel_t'(w[i]);
    valid_i = 1;
    @(posedge clk iff ready);
    #1;
    c0 = cycle;
    // back-to-back: after a full-decision window the next one is taken 14
    // edges after the previous one, after a table/shortcut window earlier
    if (n > 0 && prev_long) chk(c0 - prev_take == 14, $sformatf("window period %0d", c0 - prev_take));
    prev_take = c0;
    @(negedge clk iff op_valid);
    valid_i = 0;
    lat = cycle - c0;
    exp_lat = (k == 3 || k == 4) ? 7 : (k == 5) ? 8 : 12;
    chk(lat == exp_lat, $sformatf("latency %0d edges after the taking edge, expected %0d",
                                  lat, exp_lat));
    chk(int'(op) == e, $sformatf("window %0d: op %0d expected %0d", n, op, e));
    chk(int'(kind) == k, "kind");
    for (int i = 0; i < 9; i++) chk(int'(ro[i]) == s[i], "ro");
    if (n < 6) chk(int'(op) == expect_op[n], $sformatf("paper example %0d: op %0d expected %0d", n, op, expect_op[n]));
    seen_kind[k]++;
    prev_long = (k <= 2);
    nz = 0; nl = 0;
    foreach (t[i]) begin if (t[i] == 0) nz++; if (t[i] == 255) nl++; end
    if (k <= 2) begin
      if ((9 - nz - nl) % 2) n_odd++; else n_even++;
    end
  endtask

  initial begin
    add9(177, 0, 0, 205, 255, 187, 155, 25, 124);   // case (a)
    add9(0, 185, 255, 0, 0, 255, 125, 255, 255);    // case (b)
    add9(0, 0, 255, 104, 119, 255, 0, 103, 255);    // case 3
    add9(255, 12, 0, 255, 83, 13, 12, 12, 12);      // simulation figure, window 1
    add9(255, 12, 0, 255, 83, 13, 12, 140, 76);     // window 2
    add9(255, 12, 0, 255, 83, 13, 255, 255, 255);   // window 3
    add9(0, 0, 0, 0, 0, 0, 0, 0, 0);
    add9(255, 255, 255, 255, 255, 255, 255, 255, 255);
    add9(0, 255, 255, 0, 255, 0, 255, 255, 0);
    add9(99, 72, 197, 9, 11, 111, 121, 8, 27);
    while (nwin < NWIN) begin
      int p, r;
      p = $urandom_range(0, 100);
      for (int i = 0; i < 9; i++) begin
        r = $urandom_range(0, 99);
        wins[nwin][i] = (r < p / 2) ? 0 : (r < p) ? 255 : $urandom_range(0, 255);
      end
      nwin++;
    end
    foreach (ip[i]) ip[i] = '0;
    repeat (3) @(posedge clk);
    #1 rst = 0;
    for (int n = 0; n < NWIN; n++) begin
      run(n);
      // offer the next window straight away so that it has to wait
      valid_i = 1;
    end
    valid_i = 0;
    foreach (seen_kind[i]) chk(seen_kind[i] > 0, $sformatf("output kind %0d occurred", i));
    chk(n_odd > 0,     "odd trimmed length occurred");
    chk(n_even > 0,    "even trimmed length occurred");
    chk(n_stall > 0,   "source stall occurred");
    $display("kinds keep=%0d median=%0d utmed=%0d all0=%0d all255=%0d table=%0d",
             seen_kind[0], seen_kind[1], seen_kind[2], seen_kind[3], seen_kind[4], seen_kind[5]);
    $display("odd=%0d even=%0d stall cycles=%0d", n_odd, n_even, n_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
