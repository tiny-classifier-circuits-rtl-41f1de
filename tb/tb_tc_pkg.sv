// tb_tc_pkg -- self-checking test of the package's elaboration-time helpers.
//
// gate_eval against the truth tables of and/or/nand/nor; random_genome graphs
// checked to be acyclic (every gate source below the gate's own node number)
// and to use all four functions; genome_ok rejecting a graph with a forward
// edge; active_inputs, active_gate_count, mask_count and mask_pos on a
// hand-built graph whose answers are known; and the default accelerator graph
// (16 inputs, 300 gates, seed 105), whose 40 active gates and 13 used inputs
// were counted with a separate implementation of the same procedure.
module tb_tc_pkg;
  import tc_pkg::*;

  int checks = 0, failures = 0;

  task automatic check(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin : watchdog
    #1000000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    genome_t     g;
    input_mask_t m;
    int          seen [4];
    // truth tables
    for (int a = 0; a < 2; a++)
      for (int b = 0; b < 2; b++) begin
        check($sformatf("and %0d%0d", a, b),  gate_eval(FN_AND,  1'(a), 1'(b)), a & b);
        check($sformatf("or %0d%0d", a, b),   gate_eval(FN_OR,   1'(a), 1'(b)), a | b);
        check($sformatf("nand %0d%0d", a, b), gate_eval(FN_NAND, 1'(a), 1'(b)), (a & b) ^ 1);
        check($sformatf("nor %0d%0d", a, b),  gate_eval(FN_NOR,  1'(a), 1'(b)), (a | b) ^ 1);
      end
    // random graphs are legal and use the whole function set
    for (int s = 1; s <= 20; s++) begin
      int bad = 0;
      g = random_genome(10, 100, 3, s);
      for (int i = 0; i < 100; i++) begin
        if (int'(g.src_a[i]) >= 10 + i || int'(g.src_b[i]) >= 10 + i) bad++;
        seen[int'(g.fn[i])]++;
      end
      for (int o = 0; o < 3; o++) if (int'(g.out_src[o]) >= 110) bad++;
      check($sformatf("seed %0d edges", s), bad, 0);
      check($sformatf("seed %0d genome_ok", s), genome_ok(g, 10, 100, 3), 1);
    end
    for (int f = 0; f < 4; f++) check($sformatf("function %0d used", f), seen[f] > 0, 1);
    // hand graph: inputs 0..4; n5 = and(0,1); n6 = or(2,n5); n7 = nand(3,3); out = n6
    g = '0;
    g.fn[0] = FN_AND;  g.src_a[0] = 0; g.src_b[0] = 1;
    g.fn[1] = FN_OR;   g.src_a[1] = 2; g.src_b[1] = 5;
    g.fn[2] = FN_NAND; g.src_a[2] = 3; g.src_b[2] = 3;
    g.out_src[0] = 6;
    check("hand genome_ok", genome_ok(g, 5, 3, 1), 1);
    m = active_inputs(g, 5, 3, 1);
    check("hand active_inputs", longint'(m[4:0]), 5'b00111);
    check("hand active gates", active_gate_count(g, 5, 3, 1), 2);
    check("hand mask_count", mask_count(m, 5), 3);
    check("hand mask_pos 2", mask_pos(m, 2), 2);
    check("hand mask_pos 4", mask_pos(m, 4), 3);
    // forward edge is rejected
    g.src_b[1] = 7;
    check("forward edge rejected", genome_ok(g, 5, 3, 1), 0);
    // default accelerator graph
    g = random_genome(16, 300, 1, 105);
    check("default active gates", active_gate_count(g, 16, 300, 1), 40);
    check("default used inputs", mask_count(active_inputs(g, 16, 300, 1), 16), 13);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
