// tb_memory_array: loads random windows into the memory array and checks
// that they appear one edge later, are held while load is low, that clear
// drops valid without touching the data, that load wins over clear, and that
// the median output is rank 4.
module tb_memory_array;
  import utmf_pkg::*;

  logic   clk = 0, rst = 1, load = 0, clear = 0, valid;
  pixel_t s_i [WIN_N], ro [WIN_N], c_i, c_o, med;
  pixel_t exp_s [WIN_N], exp_c;
  logic   exp_v;
  int checks = 0, failures = 0;

  memory_array dut (.clk(clk), .rst(rst), .load_i(load), .s_i(s_i), .centre_i(c_i),
                    .clear_i(clear), .valid_o(valid), .ro(ro), .centre_o(c_o),
                    .median_o(med));

  always #5 clk = ~clk;

  task automatic chk(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    foreach (s_i[i]) s_i[i] = '0;
    c_i = '0;
    exp_v = 0; exp_c = '0; exp_s = '{default: '0};
    repeat (2) @(posedge clk);
    #1 rst = 0;
    chk(valid == 0, "valid after reset");
    repeat (3000) begin
      foreach (s_i[i]) s_i[i] = pixel_t'($urandom);
      c_i   = pixel_t'($urandom);
      load  = ($urandom_range(0, 2) == 0);
      clear = ($urandom_range(0, 2) == 0);
      @(posedge clk);
      if (load) begin exp_s = s_i; exp_c = c_i; exp_v = 1; end
      else if (clear) exp_v = 0;
      #1;
      chk(valid == exp_v, "valid");
      for (int i = 0; i < 9; i++) chk(ro[i] == exp_s[i], "ro");
      chk(c_o == exp_c, "centre");
      chk(med == exp_s[4], "median");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
