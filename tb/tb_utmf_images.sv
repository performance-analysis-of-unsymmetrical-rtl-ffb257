// tb_utmf_images: runs the filter over small test images with the noise
// types of the evaluation: fixed-value (salt-and-pepper) impulse noise at
// 10%..90%, random-valued impulse noise at 10%..90%, zero-mean Gaussian noise
// of variance 0.001..0.009 (intensities scaled to 0..1) and mixed noise (30%
// salt-and-pepper on top of Gaussian noise of variance 0.001).
//
// The image is a generated 32x32 8-bit test pattern (ramps plus a
// checkerboard, values 30..193); the noise is drawn with $urandom. Every
// interior pixel is filtered through utmf_top at its default settings (one
// window at a time, the edge pixels are left as they are) and each output
// pixel is compared with the reference model. For each case the testbench
// prints the MSE and PSNR of the noisy and of the restored interior against
// the clean image, and checks that the filter lowers the error for
// salt-and-pepper noise up to 70%.
module tb_utmf_images;
  import utmf_pkg::*;
  import utmf_ref_pkg::*;

  localparam int N = 32;

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

  int checks = 0, failures = 0;
  int orig [N][N], noisy [N][N], rest [N][N];

  task automatic chk(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL %s", what);
    end
  endtask

  function automatic int clip(input int v);
    return (v < 0) ? 0 : (v > 255) ? 255 : v;
  endfunction

  // approximately normal sample, sum of 12 uniforms
  function automatic real gauss(input real sigma);
    real acc = 0.0;
    for (int k = 0; k < 12; k++) acc += real'($urandom_range(0, 65535)) / 65536.0;
    return (acc - 6.0) * sigma;
  endfunction

  // noise: 0 fixed-value impulse, 1 random-valued impulse, 2 Gaussian,
  // 3 mixed; level: impulse percentage or variance x 1000
  task automatic make_noisy(input int kind_n, input int level);
    real sigma;
    sigma = $sqrt(real'(level) / 1000.0) * 255.0;
    for (int y = 0; y < N; y++)
      for (int x = 0; x < N; x++) begin
        int v, r;
        v = orig[y][x];
        if (kind_n == 2 || kind_n == 3) v = clip(v + int'(gauss(sigma)));
        r = $urandom_range(0, 99);
        if ((kind_n == 0 || kind_n == 3) && r < level_imp(kind_n, level))
          v = ($urandom_range(0, 1) == 0) ? 0 : 255;
        if (kind_n == 1 && r < level)
          v = $urandom_range(0, 255);
        noisy[y][x] = v;
      end
  endtask

  function automatic int level_imp(input int kind_n, input int level);
    return (kind_n == 3) ? 30 : level;
  endfunction

  task automatic filter_image();
    for (int y = 0; y < N; y++)
      for (int x = 0; x < N; x++) rest[y][x] = noisy[y][x];
    for (int y = 1; y < N - 1; y++)
      for (int x = 1; x < N - 1; x++) begin
        win_t w, s;
        int   e, k;
        for (int i = 0; i < 9; i++) w[i] = noisy[y - 1 + i / 3][x - 1 + i % 3];
        s = snake_net(w);
        e = utmf_filter(s, w[4], 40, 20, k);
        for (int i = 0; i < 9; i++) ip[i] = pixel_t'(w[i]);
        valid_i = 1;
        @(posedge clk iff ready);
        #1 valid_i = 0;
        @(negedge clk iff op_valid);
        rest[y][x] = op;
        chk(int'(op) == e, $sformatf("pixel (%0d,%0d) %0d expected %0d", y, x, op, e));
      end
  endtask

  function automatic real mse(input int a [N][N]);
    real acc = 0.0;
    for (int y = 1; y < N - 1; y++)
      for (int x = 1; x < N - 1; x++)
        acc += real'((a[y][x] - orig[y][x]) * (a[y][x] - orig[y][x]));
    return acc / real'((N - 2) * (N - 2));
  endfunction

  function automatic real psnr(input real m);
    return (m == 0.0) ? 99.0 : 10.0 * $log10(255.0 * 255.0 / m);
  endfunction

  task automatic run_case(input int kind_n, input int level, input string name);
    real mn, mr;
    make_noisy(kind_n, level);
    filter_image();
    mn = mse(noisy);
    mr = mse(rest);
    $display("%-28s noisy MSE %8.1f PSNR %5.2f dB | restored MSE %8.1f PSNR %5.2f dB",
             name, mn, psnr(mn), mr, psnr(mr));
    if (kind_n == 0 && level <= 70) chk(mr < mn, $sformatf("%s: error reduced", name));
  endtask

  initial begin
    for (int y = 0; y < N; y++)
      for (int x = 0; x < N; x++)
        orig[y][x] = 30 + 2 * x + y + ((((x / 8) + (y / 8)) % 2) * 100);
    foreach (ip[i]) ip[i] = '0;
    repeat (3) @(posedge clk);
    #1 rst = 0;
    for (int p = 10; p <= 90; p += 10) run_case(0, p, $sformatf("salt-and-pepper %0d%%", p));
    for (int p = 10; p <= 90; p += 10) run_case(1, p, $sformatf("random-valued %0d%%", p));
    for (int v = 1; v <= 9; v++)       run_case(2, v, $sformatf("Gaussian var 0.00%0d", v));
    run_case(3, 1, "mixed 30% + var 0.001");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
