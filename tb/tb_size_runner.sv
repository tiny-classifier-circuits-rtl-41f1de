// tb_size_runner -- drives one accelerator sized for one dataset shape.
//
// Instantiates tc_accel_top with N_FEATURES x BITS_PER_INPUT inputs, N_OUTPUTS
// class bits, the default 300-gate budget and 150-row buffers, and a random
// initial graph (SEED). It pushes ROWS random rows through in batches of
// DEPTH, checks every prediction against tb_ref_pkg::walk and each run's busy
// time (rows in the batch), then raises finished. checks/failures are read by
// the enclosing testbench.
module tb_size_runner #(
  parameter string       NAME           = "shape",
  parameter int unsigned N_FEATURES     = 4,
  parameter int unsigned BITS_PER_INPUT = 4,
  parameter int unsigned N_OUTPUTS      = 1,
  parameter int unsigned ROWS           = 150,
  parameter int unsigned SEED           = 1
) (
  output logic finished,
  output int   checks,
  output int   failures
);
  import tc_pkg::*;
  import tb_ref_pkg::*;

  localparam int NI = N_FEATURES * BITS_PER_INPUT, NG = 300, NO = N_OUTPUTS, DEPTH = 150;
  localparam genome_t G = random_genome(NI, NG, NO, SEED);

  logic          clk = 1'b0, rst_n = 1'b0;
  logic          in_wr_en, start, busy, done;
  logic [0:0]    in_wr_lane, out_rd_lane;
  logic [7:0]    in_wr_addr, out_rd_addr;
  logic [NI-1:0] in_wr_row;
  logic [7:0]    num_rows;
  logic [NO-1:0] out_rd_class;
  logic [NI-1:0] rows [DEPTH];

  tc_accel_top #(.N_FEATURES(N_FEATURES), .BITS_PER_INPUT(BITS_PER_INPUT),
                 .N_OUTPUTS(N_OUTPUTS), .SEED(SEED)) u_dut (
    .clk, .rst_n, .in_wr_en, .in_wr_lane, .in_wr_addr, .in_wr_row, .start, .num_rows,
    .busy, .done, .out_rd_lane, .out_rd_addr, .out_rd_class);

  always #5 clk = ~clk;

  function automatic logic [NI-1:0] random_row();
    logic [NI-1:0] r;
    for (int k = 0; k < NI; k++) r[k] = 1'($urandom_range(1, 0));
    return r;
  endfunction

  initial begin
    int n, busy_cycles, multi;
    finished = 1'b0; checks = 0; failures = 0; multi = 0;
    in_wr_en = 1'b0; in_wr_lane = '0; in_wr_addr = '0; in_wr_row = '0;
    start = 1'b0; num_rows = '0; out_rd_lane = '0; out_rd_addr = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int base = 0; base < int'(ROWS); base += DEPTH) begin
      n = (int'(ROWS) - base < DEPTH) ? int'(ROWS) - base : DEPTH;
      for (int a = 0; a < n; a++) begin
        @(negedge clk);
        rows[a] = random_row();
        in_wr_en = 1'b1; in_wr_addr = 8'(a); in_wr_row = rows[a];
      end
      @(negedge clk);
      in_wr_en = 1'b0; start = 1'b1; num_rows = 8'(n);
      @(posedge clk);
      #1 start = 1'b0;
      busy_cycles = 0;
      while (!done) begin
        if (busy) busy_cycles++;
        @(posedge clk);
        #1;
      end
      checks++;
      if (busy_cycles != n) begin
        failures++;
        $display("FAIL %s batch at %0d: %0d busy cycles for %0d rows", NAME, base, busy_cycles, n);
      end
      for (int a = 0; a < n; a++) begin
        logic [NO-1:0] e;
        @(negedge clk);
        out_rd_addr = 8'(a);
        #1;
        e = walk(G, NI, NG, NO, row_t'(rows[a]))[NO-1:0];
        if (e != 0) multi++;
        checks++;
        if (out_rd_class !== e) begin
          failures++;
          $display("FAIL %s row %0d: got %0d expected %0d", NAME, base + a, out_rd_class, e);
        end
      end
    end
    $display("%s: %0d inputs, %0d class bits, %0d rows, %0d active gates, %0d stored input bits, %0d non-zero predictions",
             NAME, NI, NO, ROWS, active_gate_count(G, NI, NG, NO),
             mask_count(active_inputs(G, NI, NG, NO), NI), multi);
    finished = 1'b1;
  end
endmodule
