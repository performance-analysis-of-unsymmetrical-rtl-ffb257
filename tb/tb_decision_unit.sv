// tb_decision_unit: checks the detection/correction multiplexer with the
// paper's three worked examples and with random centre/median/UTMED triples
// against a reference written from the two threshold rules (T=40, T1=20).
module tb_decision_unit;
  import utmf_pkg::*;

  pixel_t    c, m, u, out;
  logic      np, nm;
  out_kind_t kind;
  int checks = 0, failures = 0;
  int n_kind [3] = '{0, 0, 0};

  decision_unit dut (.centre_i(c), .median_i(m), .utmed_i(u), .out_o(out),
                     .noisy_pixel_o(np), .noisy_median_o(nm), .kind_o(kind));

  task automatic check(input int ci, mi, ui);
    int dp, dm, e, ek;
    c = pixel_t'(ci); m = pixel_t'(mi); u = pixel_t'(ui);
    #1;
    dp = (ci > ui) ? ci - ui : ui - ci;
    dm = (mi > ui) ? mi - ui : ui - mi;
    if (dp <= 40)      begin e = ci; ek = 0; end
    else if (dm <= 20) begin e = mi; ek = 1; end
    else               begin e = ui; ek = 2; end
    checks++;
    if (int'(out) != e || int'(kind) != ek || np != (dp > 40) || nm != (dm > 20)) begin
      failures++;
      if (failures < 20) $display("FAIL c=%0d m=%0d u=%0d out=%0d exp=%0d", ci, mi, ui, out, e);
    end
    n_kind[ek]++;
  endtask

  initial begin
    // worked examples: (centre, median, UTMED) -> output
    check(255, 155, 166); if (out != 155) begin failures++; $display("FAIL case a"); end
    check(0, 185, 155);   if (out != 155) begin failures++; $display("FAIL case b"); end
    check(119, 104, 104); if (out != 119) begin failures++; $display("FAIL case 3"); end
    checks += 3;
    // thresholds exactly at and just past the limits
    check(140, 0, 100); check(141, 0, 100); check(141, 120, 100); check(141, 121, 100);
    repeat (20000) check($urandom_range(0, 255), $urandom_range(0, 255), $urandom_range(0, 255));
    foreach (n_kind[k]) begin
      checks++;
      if (n_kind[k] == 0) begin failures++; $display("FAIL output kind %0d never chosen", k); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
