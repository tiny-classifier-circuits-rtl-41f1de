// tc_pkg -- shared types and elaboration-time helpers for the Tiny Classifier
// accelerator.
//
// A Tiny Classifier is a graph: I input nodes (the encoded feature bits), n
// function nodes (2-input gates) and O output nodes (the bits of the encoded
// class). Every gate reads two earlier nodes, so the graph is acyclic by
// construction and evaluates in index order. Node numbering used throughout:
//   node k, k <  N_INPUTS           : input bit k
//   node k, k >= N_INPUTS           : gate k - N_INPUTS
// The gate function set is the paper's full set F = {and, or, nand, nor}; all
// four are symmetric, so the order of a gate's two sources does not matter.
//
// genome_t packs one graph into a fixed-size packed struct so that it can be
// handed to a module as a single parameter. Its capacity (MAX_GATES, MAX_INPUTS,
// MAX_OUTPUTS) is this design's choice: 512 gates covers the 300-gate budget
// and the 400-gate exploration, 8192 inputs covers the widest table evaluated
// (1637 features at four bits each), 8 outputs covers 256 classes.
//
// random_genome() reproduces the paper's initialisation step: each gate gets a
// function drawn uniformly from F and two sources drawn uniformly from the
// nodes before it; each output is wired to one node drawn uniformly from all
// input and gate nodes. The pseudo-random source (xorshift32) is this design's
// choice. It stands in for an evolved circuit when no trained graph is given.
// active_inputs() finds the input bits that have a path to an output, which is
// what the paper sizes the input buffer by.
package tc_pkg;

  localparam int unsigned MAX_GATES   = 512;
  localparam int unsigned MAX_INPUTS  = 8192;
  localparam int unsigned MAX_OUTPUTS = 8;
  localparam int unsigned MAX_NODES   = MAX_INPUTS + MAX_GATES;
  localparam int unsigned NODE_W      = $clog2(MAX_NODES);

  // Gate function set F (Sec. "Tiny Classifier Design Space": full FS).
  typedef enum logic [1:0] {
    FN_AND  = 2'd0,
    FN_OR   = 2'd1,
    FN_NAND = 2'd2,
    FN_NOR  = 2'd3
  } gate_fn_e;

  typedef logic [NODE_W-1:0]     node_idx_t;
  typedef logic [MAX_INPUTS-1:0] input_mask_t;

  // One classifier graph. Entries past the configured gate/output count are
  // ignored.
  typedef struct packed {
    gate_fn_e  [MAX_GATES-1:0]   fn;
    node_idx_t [MAX_GATES-1:0]   src_a;
    node_idx_t [MAX_GATES-1:0]   src_b;
    node_idx_t [MAX_OUTPUTS-1:0] out_src;
  } genome_t;

  // Value of one 2-input gate.
  function automatic logic gate_eval(gate_fn_e fn, logic a, logic b);
    case (fn)
      FN_AND:  return a & b;
      FN_OR:   return a | b;
      FN_NAND: return ~(a & b);
      default: return ~(a | b);
    endcase
  endfunction

  function automatic logic [31:0] xorshift32(logic [31:0] s);
    logic [31:0] x;
    x = s;
    x = x ^ (x << 13);
    x = x ^ (x >> 17);
    x = x ^ (x << 5);
    return x;
  endfunction

  // The paper's initialisation procedure with a deterministic generator.
  function automatic genome_t random_genome(int unsigned n_in, int unsigned n_gates,
                                            int unsigned n_out, int unsigned seed);
    genome_t     g;
    logic [31:0] s;
    g = '0;
    s = seed ^ 32'h9E37_79B9;
    if (s == 32'd0) s = 32'd1;
    for (int unsigned i = 0; i < MAX_GATES; i++) begin
      if (i < n_gates) begin
        s = xorshift32(s);
        g.fn[i] = gate_fn_e'(s[1:0]);
        s = xorshift32(s);
        g.src_a[i] = node_idx_t'(s % (n_in + i));
        s = xorshift32(s);
        g.src_b[i] = node_idx_t'(s % (n_in + i));
      end
    end
    for (int unsigned o = 0; o < MAX_OUTPUTS; o++) begin
      if (o < n_out) begin
        s = xorshift32(s);
        g.out_src[o] = node_idx_t'(s % (n_in + n_gates));
      end
    end
    return g;
  endfunction

  // 1 when every gate reads only earlier nodes and every output reads an
  // existing node, i.e. the graph is a legal acyclic circuit of this size.
  function automatic bit genome_ok(genome_t g, int unsigned n_in, int unsigned n_gates,
                                   int unsigned n_out);
    bit ok;
    ok = (n_gates <= MAX_GATES) && (n_in <= MAX_INPUTS) && (n_out <= MAX_OUTPUTS)
         && (n_in > 0) && (n_out > 0);
    for (int unsigned i = 0; i < MAX_GATES; i++)
      if (i < n_gates)
        if (int'(g.src_a[i]) >= int'(n_in + i) || int'(g.src_b[i]) >= int'(n_in + i)) ok = 1'b0;
    for (int unsigned o = 0; o < MAX_OUTPUTS; o++)
      if (o < n_out && int'(g.out_src[o]) >= int'(n_in + n_gates)) ok = 1'b0;
    return ok;
  endfunction

  // Marks every node with a path to an output (the paper's "active" nodes).
  function automatic logic [MAX_NODES-1:0] active_nodes(genome_t g, int unsigned n_in,
                                                        int unsigned n_gates,
                                                        int unsigned n_out);
    logic [MAX_NODES-1:0] act;
    act = '0;
    for (int unsigned o = 0; o < MAX_OUTPUTS; o++)
      if (o < n_out) act[g.out_src[o]] = 1'b1;
    for (int i = int'(MAX_GATES) - 1; i >= 0; i--)
      if (i < int'(n_gates) && act[n_in + i]) begin
        act[g.src_a[i]] = 1'b1;
        act[g.src_b[i]] = 1'b1;
      end
    return act;
  endfunction

  // Input bits the circuit consumes; the input buffer keeps only these.
  function automatic input_mask_t active_inputs(genome_t g, int unsigned n_in,
                                                int unsigned n_gates, int unsigned n_out);
    logic [MAX_NODES-1:0] act;
    input_mask_t          m;
    act = active_nodes(g, n_in, n_gates, n_out);
    m = '0;
    for (int unsigned k = 0; k < MAX_INPUTS; k++)
      if (k < n_in) m[k] = act[k];
    return m;
  endfunction

  // Number of gates with a path to an output (what synthesis keeps).
  function automatic int unsigned active_gate_count(genome_t g, int unsigned n_in,
                                                    int unsigned n_gates, int unsigned n_out);
    logic [MAX_NODES-1:0] act;
    int unsigned          c;
    act = active_nodes(g, n_in, n_gates, n_out);
    c = 0;
    for (int unsigned i = 0; i < MAX_GATES; i++)
      if (i < n_gates && act[n_in + i]) c++;
    return c;
  endfunction

  // Number of set bits among the low n bits of a mask.
  function automatic int unsigned mask_count(input_mask_t m, int unsigned n);
    int unsigned c;
    c = 0;
    for (int unsigned k = 0; k < MAX_INPUTS; k++)
      if (k < n && m[k]) c++;
    return c;
  endfunction

  // Position of input bit i inside the packed (used bits only) buffer row.
  function automatic int unsigned mask_pos(input_mask_t m, int unsigned i);
    int unsigned c;
    c = 0;
    for (int unsigned k = 0; k < MAX_INPUTS; k++)
      if (k < i && m[k]) c++;
    return c;
  endfunction

endpackage
