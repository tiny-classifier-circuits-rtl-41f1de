// tb_tc_accel_full -- one complete operation of the accelerator at its default
// size: one lane, 16 input bits (4 features x 4 bits), a 300-gate graph with a
// 1-bit class output and 150-row buffers. All 150 rows are written, classified
// in one run and read back against a software walk of the same graph; the run
// must take 150 busy cycles and signal done 151 cycles after start.
module tb_tc_accel_full;
  import tc_pkg::*;
  import tb_ref_pkg::*;

  // the accelerator's default graph
  localparam genome_t G = random_genome(16, 300, 1, 105);

  int checks = 0, failures = 0;
  int ones = 0;

  logic        clk = 1'b0, rst_n = 1'b0;
  logic        in_wr_en, start, busy, done;
  logic [0:0]  in_wr_lane, out_rd_lane;
  logic [7:0]  in_wr_addr, out_rd_addr;
  logic [15:0] in_wr_row;
  logic [7:0]  num_rows;
  logic [0:0]  out_rd_class;
  logic [15:0] rows [150];

  tc_accel_top u_dut (
    .clk, .rst_n, .in_wr_en, .in_wr_lane, .in_wr_addr, .in_wr_row, .start, .num_rows,
    .busy, .done, .out_rd_lane, .out_rd_addr, .out_rd_class);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int cyc, busy_cycles;
    logic exp_bit;
    in_wr_en = 1'b0; in_wr_lane = '0; in_wr_addr = '0; in_wr_row = '0;
    start = 1'b0; num_rows = '0; out_rd_lane = '0; out_rd_addr = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int a = 0; a < 150; a++) begin
      @(negedge clk);
      rows[a] = 16'($urandom);
      in_wr_en = 1'b1; in_wr_addr = 8'(a); in_wr_row = rows[a];
    end
    @(negedge clk);
    in_wr_en = 1'b0;
    start = 1'b1; num_rows = 8'd150;
    @(posedge clk);
    #1 start = 1'b0;
    cyc = 0; busy_cycles = 0;
    while (!done && cyc < 1000) begin
      cyc++;
      if (busy) busy_cycles++;
      @(posedge clk);
      #1;
    end
    checks++;
    if (cyc + 1 != 151 || busy_cycles != 150) begin
      failures++;
      $display("FAIL timing: done after %0d cycles, busy %0d", cyc + 1, busy_cycles);
    end
    for (int a = 0; a < 150; a++) begin
      @(negedge clk);
      out_rd_addr = 8'(a);
      #1;
      exp_bit = walk(G, 16, 300, 1, row_t'(rows[a]))[0];
      if (exp_bit) ones++;
      checks++;
      if (out_rd_class[0] !== exp_bit) begin
        failures++;
        $display("FAIL row %0d: got %b expected %b", a, out_rd_class[0], exp_bit);
      end
    end
    $display("rows predicted class 1: %0d of 150; active gates %0d of 300",
             ones, active_gate_count(G, 16, 300, 1));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
