// tc_classifier -- the Tiny Classifier circuit: a combinational sea of 2-input
// logic gates that maps one row of encoded input bits to the encoded class.
//
// The circuit is the graph held in GENOME (see tc_pkg): gate g computes
// F(node[src_a[g]], node[src_b[g]]) with F one of and/or/nand/nor, and output
// bit o is node[out_src[o]]. Because gates only read earlier nodes, one pass in
// index order evaluates the whole graph; all indices are parameters, so after
// elaboration the loop is nothing but wires and gates. Gates with no path to an
// output are left in the description and removed by synthesis, exactly as the
// inactive material of an evolved graph carries no meaning.
//
// Interface: in_bits[N_INPUTS-1:0] (feature bits, feature f occupying bits
// [f*bits_per_input +: bits_per_input] by the accelerator's convention) and
// class_bits[N_OUTPUTS-1:0] (the binary-encoded class; 1 bit for two classes).
// Timing: purely combinational, no clock. The paper's gate budget is 300 gates
// (N_GATES default). The GENOME default is a graph built by the paper's random
// initialisation step (seeded by SEED); a trained graph from the evolutionary
// search is passed in its place. 2-input gates and binary class encoding are
// this design's reading of the paper.
module tc_classifier #(
  parameter int unsigned      N_INPUTS  = 16,
  parameter int unsigned      N_GATES   = 300,
  parameter int unsigned      N_OUTPUTS = 1,
  parameter int unsigned      SEED      = 105,
  parameter tc_pkg::genome_t  GENOME    = tc_pkg::random_genome(N_INPUTS, N_GATES,
                                                                N_OUTPUTS, SEED)
) (
  input  logic [N_INPUTS-1:0]  in_bits,
  output logic [N_OUTPUTS-1:0] class_bits
);

  localparam int unsigned N_NODES = N_INPUTS + N_GATES;

  if (!tc_pkg::genome_ok(GENOME, N_INPUTS, N_GATES, N_OUTPUTS)) begin : g_bad_genome
    $error("tc_classifier: GENOME is not an acyclic graph of this size");
  end

  logic [N_NODES-1:0] node;

  always_comb begin
    node = '0;
    node[N_INPUTS-1:0] = in_bits;
    for (int unsigned g = 0; g < N_GATES; g++)
      node[N_INPUTS + g] = tc_pkg::gate_eval(GENOME.fn[g],
                                             node[GENOME.src_a[g]],
                                             node[GENOME.src_b[g]]);
    for (int unsigned o = 0; o < N_OUTPUTS; o++)
      class_bits[o] = node[GENOME.out_src[o]];
  end

endmodule
