// tb_three_cell_sorter: checks the three-cell sorter against a reference
// ordering for every combination of a set of corner values and for random
// triples. Combinational block: each vector settles for 1 ns.
module tb_three_cell_sorter;
  logic [7:0] k1, k2, k3, mn, md, mx;
  int checks = 0, failures = 0;

  three_cell_sorter #(.W(8)) dut (.k1(k1), .k2(k2), .k3(k3),
                                  .min_o(mn), .mid_o(md), .max_o(mx));

  task automatic check(input logic [7:0] a, b, c);
    logic [7:0] v[3];
    k1 = a; k2 = b; k3 = c;
    #1;
    v = '{a, b, c};
    v.sort();
    checks++;
    if (mn !== v[0] || md !== v[1] || mx !== v[2]) begin
      failures++;
      $display("FAIL in %0d %0d %0d -> %0d %0d %0d", a, b, c, mn, md, mx);
    end
  endtask

  initial begin
    logic [7:0] corner[6] = '{0, 1, 12, 128, 254, 255};
    foreach (corner[i]) foreach (corner[j]) foreach (corner[k])
      check(corner[i], corner[j], corner[k]);
    repeat (5000) check(8'($urandom), 8'($urandom), 8'($urandom));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
