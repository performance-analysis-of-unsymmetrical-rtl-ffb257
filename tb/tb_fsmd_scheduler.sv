// tb_fsmd_scheduler: drives the scheduler the way the memory array does.
//
// Each test window is sorted in the testbench, presented on ro/centre/median
// with mem_valid held until mem_clear, and the registered output is compared
// with utmf_ref_pkg::utmf_filter. Checked as well: the trimmed median on the
// long path, the output kind, the number of clock edges from the window's
// arrival to op_valid (7 through OUTPUT_FINAL, 2 for an all-0 or all-255
// window, 3 for a window of only 0s and 255s), that the FSM stays in
// OUTPUT_FINAL for 3 cycles, and that every state and every output kind was
// reached. The windows include the paper's worked examples.
module tb_fsmd_scheduler;
  import utmf_pkg::*;
  import utmf_ref_pkg::*;

  logic      clk = 0, rst = 1, mem_valid = 0, mem_clear, op_valid;
  pixel_t    ro [WIN_N], centre, median, op, utmed;
  out_kind_t kind;
  count_t    f, l;
  state_t    state;
  int checks = 0, failures = 0, cycle = 0;
  int seen_state [8] = '{default: 0};
  int seen_kind  [6] = '{default: 0};
  int of_cycles = 0;

  fsmd_scheduler dut (.clk(clk), .rst(rst), .mem_valid_i(mem_valid), .ro(ro),
                      .centre_i(centre), .median_i(median), .mem_clear_o(mem_clear),
                      .op_o(op), .op_valid_o(op_valid), .kind_o(kind), .utmed_o(utmed),
                      .f_o(f), .l_o(l), .state_o(state));

  always #5 clk = ~clk;
  always @(posedge clk) cycle++;
  always @(negedge clk) if (!rst) begin
    seen_state[state]++;
    if (state == S_OUTPUT_FINAL) of_cycles++;
  end

  task automatic chk(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL %s at cycle %0d", what, cycle);
    end
  endtask

  localparam int NWIN = 3000;
  int unsigned wins [NWIN][9];
  int          nwin = 0;

  task automatic add(input int unsigned w [9]);
    for (int i = 0; i < 9; i++) wins[nwin][i] = w[i];
    nwin++;
  endtask

  // one window through the scheduler
  task automatic run(input int n);
    win_t w, s;
    int   k, e, c0, lat, exp_lat;
    int   dp, m, nz, nl, ut;
    for (int i = 0; i < 9; i++) w[i] = wins[n][i];
    s = true_sort(w);
    e = utmf_filter(s, w[4], 40, 20, k);
    for (int i = 0; i < 9; i++) ro[i] = pixel_t'(s[i]);
    centre    = pixel_t'(w[4]);
    median    = pixel_t'(s[4]);
    mem_valid = 1;
    c0 = cycle;
    of_cycles = 0;
    @(negedge clk iff op_valid);
    lat = cycle - c0;
    exp_lat = (k == 3 || k == 4) ? 2 : (k == 5) ? 3 : 7;
    chk(lat == exp_lat, $sformatf("latency %0d expected %0d", lat, exp_lat));
    chk(int'(op) == e, $sformatf("op %0d expected %0d (window %0d)", op, e, n));
    chk(int'(kind) == k, "kind");
    seen_kind[k]++;
    if (k <= 2) begin
      // trimmed median computed independently
      nz = 0; nl = 0;
      foreach (s[i]) begin if (s[i] == 0) nz++; if (s[i] == 255) nl++; end
      m  = 9 - nz - nl;
      ut = (m % 2) ? s[nz + m/2] : (s[nz + m/2 - 1] + s[nz + m/2]) / 2;
      chk(int'(utmed) == ut, "utmed");
    end
    @(negedge clk iff mem_clear);
    @(posedge clk);
    #1 mem_valid = 0;
    if (k <= 2) chk(of_cycles == 3, "OUTPUT_FINAL held 3 cycles");
    chk(state == S_IDLE, "back in IDLE");
    @(posedge clk);
    #1;
  endtask

  initial begin
    int unsigned w [9];
    // worked examples (row-major windows) and the three windows of Fig. 5
    w = '{177, 0, 0, 205, 255, 187, 155, 25, 124};   add(w);  // case (a) -> 155
    w = '{0, 185, 255, 0, 0, 255, 125, 255, 255};    add(w);  // case (b) -> 155
    w = '{0, 0, 255, 104, 119, 255, 0, 103, 255};    add(w);  // case 3   -> 119
    w = '{255, 12, 0, 255, 83, 13, 12, 12, 12};      add(w);  // Fig. 5   -> 12
    w = '{255, 12, 0, 255, 83, 13, 12, 140, 76};     add(w);  // Fig. 5   -> 83
    w = '{255, 12, 0, 255, 83, 13, 255, 255, 255};   add(w);  // Fig. 5   -> 13
    w = '{default: 0};   add(w);
    w = '{default: 255}; add(w);
    w = '{0, 255, 0, 255, 0, 255, 0, 255, 0};        add(w);
    w = '{255, 255, 255, 255, 0, 255, 255, 255, 255}; add(w);  // one 0
    while (nwin < NWIN) begin
      int p;
      p = $urandom_range(0, 100);
      for (int i = 0; i < 9; i++) begin
        int r;
        r = $urandom_range(0, 99);
        wins[nwin][i] = (r < p / 2) ? 0 : (r < p) ? 255 : $urandom_range(0, 255);
      end
      nwin++;
    end
    foreach (ro[i]) ro[i] = '0;
    centre = '0; median = '0;
    repeat (3) @(posedge clk);
    #1 rst = 0;
    @(posedge clk);
    #1;
    for (int n = 0; n < NWIN; n++) begin
      run(n);
      if (n == 0) chk(op == 155 && utmed == 166, "case (a) values");
      if (n == 1) chk(op == 155 && utmed == 155, "case (b) values");
      if (n == 2) chk(op == 119 && utmed == 104, "case 3 values");
      if (n == 3) chk(op == 12, "Fig. 5 window 1");
      if (n == 4) chk(op == 83, "Fig. 5 window 2");
      if (n == 5) chk(op == 13, "Fig. 5 window 3");
      if (n == 9) chk(op == 226, "one-zero table entry");
    end
    foreach (seen_state[i]) chk(seen_state[i] > 0, $sformatf("state %0d reached", i));
    foreach (seen_kind[i])  chk(seen_kind[i] > 0, $sformatf("kind %0d produced", i));
    $display("kinds: keep=%0d median=%0d utmed=%0d all0=%0d all255=%0d mixlut=%0d",
             seen_kind[0], seen_kind[1], seen_kind[2], seen_kind[3], seen_kind[4], seen_kind[5]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (60000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
