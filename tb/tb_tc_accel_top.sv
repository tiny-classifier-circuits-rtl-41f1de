// tb_tc_accel_top -- end-to-end test of the accelerator at reduced size.
//
// Three lanes, 4 features x 2 bits = 8 inputs, a 60-gate graph with a 2-bit
// class output, 16-entry buffers. The test fills every lane's input buffer with
// random rows, runs the sequencer, reads back every prediction and compares it
// with a software walk of the graph; it checks busy lasts num_rows cycles and
// done comes num_rows+1 cycles after the start edge. It then exercises:
//   - input pruning: rows are rewritten with every input bit the circuit does
//     not use flipped; predictions must not change,
//   - a partial run (10 rows) that must leave rows 10..15 untouched,
//   - num_rows = 0 (done at once, nothing written),
//   - num_rows above the depth (clamped to 16),
//   - parallel lanes and multi-bit class codes,
// and counts how often each happened; one that never happened is a failure.
module tb_tc_accel_top;
  import tc_pkg::*;
  import tb_ref_pkg::*;

  localparam int NF = 4, BPI = 2, NI = NF * BPI, NG = 60, NO = 2, DEPTH = 16, LANES = 3;
  localparam int SEED = 5;
  localparam genome_t G = random_genome(NI, NG, NO, SEED);
  localparam input_mask_t USED = active_inputs(G, NI, NG, NO);

  int checks = 0, failures = 0;
  int n_lane_results [LANES];
  int n_pruned_flips = 0, n_multibit = 0, n_zero_runs = 0, n_clamped = 0, n_partial = 0;

  logic          clk = 1'b0, rst_n = 1'b0;
  logic          in_wr_en, start, busy, done;
  logic [1:0]    in_wr_lane, out_rd_lane;
  logic [3:0]    in_wr_addr, out_rd_addr;
  logic [NI-1:0] in_wr_row;
  logic [4:0]    num_rows;
  logic [NO-1:0] out_rd_class;

  logic [NI-1:0] rows [LANES][DEPTH];
  logic [NO-1:0] expect_cls [LANES][DEPTH];

  tc_accel_top #(.N_FEATURES(NF), .BITS_PER_INPUT(BPI), .N_GATES(NG), .N_OUTPUTS(NO),
                 .DEPTH(DEPTH), .LANES(LANES), .SEED(SEED)) u_dut (
    .clk, .rst_n, .in_wr_en, .in_wr_lane, .in_wr_addr, .in_wr_row, .start, .num_rows,
    .busy, .done, .out_rd_lane, .out_rd_addr, .out_rd_class);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(string what, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  task automatic write_row(int l, int a, logic [NI-1:0] r);
    @(negedge clk);
    in_wr_en = 1'b1; in_wr_lane = 2'(l); in_wr_addr = 4'(a); in_wr_row = r;
    @(negedge clk);
    in_wr_en = 1'b0;
  endtask

  // Start a run and check busy/done timing; returns after done.
  task automatic run(int n, int rows_expected);
    int busy_cycles = 0, cyc = 0;
    @(negedge clk);
    start = 1'b1; num_rows = 5'(n);
    @(posedge clk);
    #1 start = 1'b0;
    while (!done) begin
      cyc++;
      if (busy) busy_cycles++;
      @(posedge clk);
      #1;
      if (cyc > 100) break;
    end
    // done is seen in cycle cyc+1 after the start edge
    check($sformatf("done latency n=%0d", n), cyc + 1, rows_expected + 1);
    check($sformatf("busy cycles n=%0d", n), busy_cycles, rows_expected);
  endtask

  task automatic read_all(string tag, int upto);
    for (int l = 0; l < LANES; l++)
      for (int a = 0; a < upto; a++) begin
        @(negedge clk);
        out_rd_lane = 2'(l); out_rd_addr = 4'(a);
        #1;
        check($sformatf("%s lane %0d row %0d", tag, l, a), int'(out_rd_class),
              int'(expect_cls[l][a]));
        n_lane_results[l]++;
        if (expect_cls[l][a][1]) n_multibit++;
      end
  endtask

  initial begin
    in_wr_en = 1'b0; in_wr_lane = '0; in_wr_addr = '0; in_wr_row = '0;
    start = 1'b0; num_rows = '0; out_rd_lane = '0; out_rd_addr = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;

    // 1: full run on all lanes
    for (int l = 0; l < LANES; l++)
      for (int a = 0; a < DEPTH; a++) begin
        rows[l][a] = NI'($urandom);
        expect_cls[l][a] = walk(G, NI, NG, NO, row_t'(rows[l][a]))[NO-1:0];
        write_row(l, a, rows[l][a]);
      end
    run(DEPTH, DEPTH);
    read_all("full", DEPTH);

    // 2: flip every unused input bit, partial run of 10 rows
    for (int l = 0; l < LANES; l++)
      for (int a = 0; a < DEPTH; a++) begin
        logic [NI-1:0] r;
        r = rows[l][a];
        for (int k = 0; k < NI; k++)
          if (!USED[k]) begin r[k] = ~r[k]; n_pruned_flips++; end
        // the rewritten row must classify like the original one
        check($sformatf("model pruning lane %0d row %0d", l, a),
              int'(walk(G, NI, NG, NO, row_t'(r))[NO-1:0]), int'(expect_cls[l][a]));
        rows[l][a] = r;
        write_row(l, a, r);
      end
    // rows 10..15: write new random data that must NOT be classified
    for (int l = 0; l < LANES; l++)
      for (int a = 10; a < DEPTH; a++) write_row(l, a, NI'($urandom));
    run(10, 10);
    n_partial++;
    read_all("pruned+partial", DEPTH);

    // 3: zero rows
    run(0, 0);
    n_zero_runs++;
    read_all("zero", DEPTH);

    // 4: clamp above depth, with fresh rows
    for (int l = 0; l < LANES; l++)
      for (int a = 0; a < DEPTH; a++) begin
        rows[l][a] = NI'($urandom);
        expect_cls[l][a] = walk(G, NI, NG, NO, row_t'(rows[l][a]))[NO-1:0];
        write_row(l, a, rows[l][a]);
      end
    run(25, DEPTH);
    n_clamped++;
    read_all("clamp", DEPTH);

    // mechanisms seen
    for (int l = 0; l < LANES; l++) begin
      $display("lane %0d results checked: %0d", l, n_lane_results[l]);
      check($sformatf("lane %0d used", l), int'(n_lane_results[l] > 0), 1);
    end
    $display("unused input bits flipped: %0d, multi-bit classes: %0d, zero runs: %0d, clamped runs: %0d, partial runs: %0d",
             n_pruned_flips, n_multibit, n_zero_runs, n_clamped, n_partial);
    check("pruning exercised", int'(n_pruned_flips > 0), 1);
    check("multi-bit class seen", int'(n_multibit > 0), 1);
    check("zero-row run", int'(n_zero_runs > 0), 1);
    check("clamped run", int'(n_clamped > 0), 1);
    check("partial run", int'(n_partial > 0), 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
