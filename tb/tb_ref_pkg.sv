// tb_ref_pkg -- reference model shared by the accelerator testbenches.
//
// walk() evaluates a classifier graph in software, node by node, keeping node
// values in an int array and applying each gate's function by its code
// (0 and, 1 or, 2 nand, 3 nor) with integer arithmetic. It shares nothing with
// the RTL's evaluation but the graph itself.
package tb_ref_pkg;
  import tc_pkg::*;

  typedef logic [MAX_INPUTS-1:0] row_t;

  function automatic logic [MAX_OUTPUTS-1:0] walk(genome_t g, int n_in, int n_gates,
                                                  int n_out, row_t x);
    int v [MAX_NODES];
    int a, b, r;
    logic [MAX_OUTPUTS-1:0] y;
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
    y = '0;
    for (int o = 0; o < n_out; o++) y[o] = v[int'(g.out_src[o])][0];
    return y;
  endfunction
endpackage
