// tb_snake_sorter: checks the snake sorting network, pipelined (default).
//
// Three instances run side by side: the default one (with the final middle-row
// sort), one with FINAL_ROW_SORT=0 (the 14-sorter network as drawn) and a
// purely combinational one (REG_STAGES=0), checked in the same cycle.
// A new window enters every clock: the paper's Fig. 1 example, all 512
// windows of 0s and 1s, windows of 0/255 impulses and random windows. Each
// output is compared with an independent model of the same network
// (utmf_ref_pkg::snake_net). The default instance must equal a true sort on
// every window; for the 14-sorter one the testbench checks that ranks 0-2
// and 6-8 equal a true sort and that the middle ranks do differ for some
// windows (the known weakness of that network). It also
// checks the latency (the result is visible after the 5th clock edge,
// counting the edge that samples the window) and that centre_o tracks the window centre.
module tb_snake_sorter;
  import utmf_pkg::*;
  import utmf_ref_pkg::*;

  localparam int LAT = 5;

  logic   clk = 0, rst = 1, valid_i = 0, valid_o, valid_r;
  pixel_t x [WIN_N], s [WIN_N], med, centre;
  pixel_t sr [WIN_N], med_r, centre_r;
  int checks = 0, failures = 0, missorted = 0, cycle = 0;

  snake_sorter dut (.clk(clk), .rst(rst), .valid_i(valid_i), .x(x),
                    .valid_o(valid_o), .s(s), .median_o(med), .centre_o(centre));
  // purely combinational variant, checked against the window on its inputs
  logic   valid_c;
  pixel_t sc [WIN_N], med_c, centre_c;
  snake_sorter #(.REG_STAGES(1'b0)) dut_comb (
                    .clk(clk), .rst(rst), .valid_i(valid_i), .x(x),
                    .valid_o(valid_c), .s(sc), .median_o(med_c), .centre_o(centre_c));
  int n_comb = 0;
  always @(negedge clk) if (!rst && valid_i) begin
    win_t w, t;
    for (int i = 0; i < 9; i++) w[i] = x[i];
    t = true_sort(w);
    for (int i = 0; i < 9; i++) chk(sc[i] == pixel_t'(t[i]), "combinational rank");
    chk(valid_c && med_c == sc[4] && centre_c == x[4], "combinational valid/median/centre");
    n_comb++;
  end

  snake_sorter #(.FINAL_ROW_SORT(1'b0)) dut_raw (
                    .clk(clk), .rst(rst), .valid_i(valid_i), .x(x),
                    .valid_o(valid_r), .s(sr), .median_o(med_r), .centre_o(centre_r));

  always #5 clk = ~clk;
  always @(posedge clk) cycle++;

  localparam int NWIN = 4513;
  win_t wins [NWIN];           // the test windows, generated up front
  int   in_cyc [NWIN];         // cycle at which window n was taken
  int   n_out = 0;

  task automatic chk(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL %s at cycle %0d", what, cycle);
    end
  endtask

  // scoreboard, sampled at the falling edge
  always @(negedge clk) if (!rst && valid_o) begin
    win_t w, e, t;
    int   c0;
    if (n_out >= NWIN) chk(0, "unexpected output");
    else begin
      w  = wins[n_out];
      c0 = in_cyc[n_out];
      n_out++;
      e  = snake_net(w, 1'b1);
      t  = true_sort(w);
      chk(cycle - c0 == LAT - 1, "latency");
      chk(valid_r, "valid of the 14-sorter instance");
      for (int i = 0; i < 9; i++) chk(s[i] == pixel_t'(e[i]), $sformatf("rank %0d", i));
      for (int i = 0; i < 9; i++) chk(s[i] == pixel_t'(t[i]), $sformatf("true rank %0d", i));
      chk(med == s[4], "median");
      chk(centre == pixel_t'(w[4]), "centre");
      e = snake_net(w, 1'b0);
      for (int i = 0; i < 9; i++) chk(sr[i] == pixel_t'(e[i]), $sformatf("14-sorter rank %0d", i));
      for (int i = 0; i < 9; i++) if (i < 3 || i > 5) chk(sr[i] == pixel_t'(t[i]), "14-sorter outer rank");
      chk(med_r == sr[4] && centre_r == centre, "14-sorter median/centre");
      if (e != t) missorted++;
    end
  end

  // window number n of the test sequence
  task automatic gen(input int n);
    int unsigned f1 [9] = '{99, 72, 197, 9, 11, 111, 121, 8, 27};  // Fig. 1
    for (int i = 0; i < 9; i++) begin
      int r = $urandom_range(0, 3);
      if (n == 0)         wins[n][i] = f1[i];
      else if (n <= 512)  wins[n][i] = ((n - 1) >> i) & 1;
      else if (n <= 2512) wins[n][i] = (r == 0) ? 0 : (r == 1) ? 255 : $urandom_range(0, 255);
      else                wins[n][i] = $urandom_range(0, 255);
    end
  endtask

  pixel_t fig1 [WIN_N] = '{8, 9, 11, 27, 72, 99, 111, 121, 197};

  initial begin
    for (int n = 0; n < NWIN; n++) gen(n);
    foreach (x[i]) x[i] = '0;
    repeat (3) @(posedge clk);
    #1 rst = 0;
    for (int n = 0; n < NWIN; n++) begin
      for (int i = 0; i < 9; i++) x[i] = pixel_t'(wins[n][i]);
      valid_i = 1;
      @(posedge clk);
      #1;
      in_cyc[n] = cycle;
    end
    valid_i = 0;
    repeat (LAT + 2) @(posedge clk);
    chk(n_out == NWIN, "all outputs seen");
    chk(missorted > 0, "14-sorter network mis-sorts some windows");
    chk(n_comb == NWIN, "combinational variant checked on every window");
    $display("windows the 14-sorter network leaves unsorted: %0d of %0d", missorted, NWIN);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // The Fig. 1 example (first window) must come out as the paper prints it.
  initial begin
    @(negedge clk iff (!rst && valid_o));
    for (int i = 0; i < 9; i++) chk(s[i] == fig1[i] && sr[i] == fig1[i], "Fig. 1 example");
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
