// tb_tc_classifier -- self-checking test of the combinational classifier.
//
// Part 1 drives a hand-built 3-input, 7-gate graph through all 8 input
// patterns and compares its four outputs with the Boolean functions the graph
// was built to compute (XOR from four NANDs, NOR, OR, AND), written directly
// as expressions. Part 2 takes a 300-gate, 16-input, 4-output graph from the
// random initialisation and compares the circuit with a software walk of the
// same graph, for 400 random input rows.
module tb_tc_classifier;
  import tc_pkg::*;

  int checks = 0, failures = 0;

  // node 0=a 1=b 2=c; gates are nodes 3..9
  function automatic genome_t hand_genome();
    genome_t g = '0;
    g.fn[0] = FN_NAND; g.src_a[0] = 0; g.src_b[0] = 1;  // n3 = ~(a&b)
    g.fn[1] = FN_NAND; g.src_a[1] = 0; g.src_b[1] = 3;  // n4
    g.fn[2] = FN_NAND; g.src_a[2] = 1; g.src_b[2] = 3;  // n5
    g.fn[3] = FN_NAND; g.src_a[3] = 4; g.src_b[3] = 5;  // n6 = a^b
    g.fn[4] = FN_NOR;  g.src_a[4] = 0; g.src_b[4] = 2;  // n7 = ~(a|c)
    g.fn[5] = FN_OR;   g.src_a[5] = 6; g.src_b[5] = 2;  // n8 = (a^b)|c
    g.fn[6] = FN_AND;  g.src_a[6] = 0; g.src_b[6] = 2;  // n9 = a&c
    g.out_src[0] = 6; g.out_src[1] = 7; g.out_src[2] = 8; g.out_src[3] = 9;
    return g;
  endfunction

  localparam genome_t HAND = hand_genome();
  localparam genome_t RAND = random_genome(16, 300, 4, 7);

  logic [2:0]  in1;
  logic [3:0]  out1;
  logic [15:0] in2;
  logic [3:0]  out2;

  tc_classifier #(.N_INPUTS(3), .N_GATES(7), .N_OUTPUTS(4), .GENOME(HAND)) u_hand (
    .in_bits(in1), .class_bits(out1));

  tc_classifier #(.N_INPUTS(16), .N_GATES(300), .N_OUTPUTS(4), .GENOME(RAND)) u_rand (
    .in_bits(in2), .class_bits(out2));

  // Independent walk of a graph: node values in an int array, functions by code.
  function automatic logic [3:0] walk(genome_t g, int n_in, int n_gates, logic [15:0] x);
    int v [0:1023];
    int a, b, r;
    logic [3:0] y;
    for (int k = 0; k < n_in; k++) v[k] = int'(x[k]);
    for (int i = 0; i < n_gates; i++) begin
      a = v[int'(g.src_a[i])];
      b = v[int'(g.src_b[i])];
      case (int'(g.fn[i]))
        0: r = a * b;
        1: r = (a + b > 0) ? 1 : 0;
        2: r = 1 - a * b;
        default: r = (a + b > 0) ? 0 : 1;
      endcase
      v[n_in + i] = r;
    end
    for (int o = 0; o < 4; o++) y[o] = v[int'(g.out_src[o])][0];
    return y;
  endfunction

  task automatic check(string what, logic [3:0] got, logic [3:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %b expected %b", what, got, exp);
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
    logic a, b, c;
    in1 = '0;
    in2 = '0;
    for (int p = 0; p < 8; p++) begin
      in1 = 3'(p);
      {c, b, a} = 3'(p);
      #1;
      check($sformatf("hand p=%0d", p), out1, {a & c, (a ^ b) | c, ~(a | c), a ^ b});
    end
    for (int t = 0; t < 400; t++) begin
      in2 = 16'($urandom);
      #1;
      check($sformatf("rand x=%h", in2), out2, walk(RAND, 16, 300, in2));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
