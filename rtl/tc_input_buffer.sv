// tc_input_buffer -- local input buffer of one classifier lane.
//
// Holds DEPTH inferences, one row of encoded input bits each. A full row is
// N_INPUTS = features x bits_per_input bits, but an evolved circuit usually
// reads only some of them; as the paper describes, the buffer keeps only the
// bits the circuit consumes. USED_MASK marks those bits (tc_pkg::active_inputs
// computes it from the circuit), and the storage row is popcount(USED_MASK)
// bits wide. Writes take a full-width row and drop the unused bits; reads
// return a full-width row with the unused bits as 0, which the circuit ignores.
//
// Interface: wr_en/wr_addr/wr_row write one row on the rising clock edge;
// rd_addr/rd_row read combinationally (a register-file style buffer), so a row
// written at one edge is readable in the next cycle. No reset: contents are
// undefined until written. Write and read port style, the read timing and the
// absence of reset are this design's choices; the paper gives the buffer's
// purpose and sizing only.
module tc_input_buffer #(
  parameter int unsigned         N_INPUTS  = 16,
  parameter int unsigned         DEPTH     = 150,
  parameter tc_pkg::input_mask_t USED_MASK = '1,
  localparam int unsigned        AW        = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic                clk,
  input  logic                wr_en,
  input  logic [AW-1:0]       wr_addr,
  input  logic [N_INPUTS-1:0] wr_row,
  input  logic [AW-1:0]       rd_addr,
  output logic [N_INPUTS-1:0] rd_row
);

  localparam int unsigned USED_W  = tc_pkg::mask_count(USED_MASK, N_INPUTS);
  localparam int unsigned STORE_W = (USED_W > 0) ? USED_W : 1;

  logic [STORE_W-1:0] mem [DEPTH];
  logic [STORE_W-1:0] wr_packed;
  logic [STORE_W-1:0] rd_packed;

  if (USED_W == 0) begin : g_none_used
    assign wr_packed = '0;
  end

  for (genvar i = 0; i < int'(N_INPUTS); i++) begin : g_bit
    if (USED_MASK[i]) begin : g_used
      localparam int unsigned P = tc_pkg::mask_pos(USED_MASK, i);
      assign wr_packed[P] = wr_row[i];
      assign rd_row[i]    = rd_packed[P];
    end else begin : g_dropped
      assign rd_row[i] = 1'b0;
    end
  end

  always_ff @(posedge clk)
    if (wr_en) mem[wr_addr] <= wr_packed;

  assign rd_packed = mem[rd_addr];

endmodule
