// tc_output_buffer -- one local output buffer of a classifier lane.
//
// Holds one prediction bit for each of DEPTH inferences. Following the paper,
// a lane instantiates bits_per_output of these, one per bit of the encoded
// class, so a binary classifier has a single one and a ten-class classifier
// four. The sequencer writes bit wr_bit of inference wr_addr on the rising
// edge when wr_en is high; the host reads inference rd_addr combinationally on
// rd_bit. No reset: an entry is undefined until its inference has run. Port
// style and read timing are this design's choices.
module tc_output_buffer #(
  parameter int unsigned  DEPTH = 150,
  localparam int unsigned AW    = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic          clk,
  input  logic          wr_en,
  input  logic [AW-1:0] wr_addr,
  input  logic          wr_bit,
  input  logic [AW-1:0] rd_addr,
  output logic          rd_bit
);

  logic mem [DEPTH];

  always_ff @(posedge clk)
    if (wr_en) mem[wr_addr] <= wr_bit;

  assign rd_bit = mem[rd_addr];

endmodule
