// tb_workload_led -- the "led" workload on the accelerator.
//
// led is the seven-segment display problem: 7 binary features (segments
// top, upper-left, upper-right, middle, lower-left, lower-right, bottom), 10
// classes (digits), 500 rows, each segment inverted with probability 10%.
// The rows are generated here with that rule. With one bit per feature the
// accelerator has 7 inputs and a 4-bit binary class code (bits_per_output).
//
// No evolved graph is available, so the classifier graph is built by hand from
// the gate set {and, or, nand, nor}: 7 inverters (nand of a bit with itself),
// one 7-literal AND chain per digit (6 gates each) and an OR tree per class
// bit, 78 gates in all, inside the 300-gate budget. It outputs the digit whose
// pattern matches exactly and 0 otherwise.
//
// The 500 rows go through a 100-row input buffer in five runs (100 rows is
// the 20% test split). Each prediction is checked against a direct lookup of
// the pattern table; accuracy against the true digit is printed for
// information. Each run must take 100 busy cycles.
module tb_workload_led;
  import tc_pkg::*;

  localparam int NI = 7, NG = 78, NO = 4, DEPTH = 100, ROWS = 500;

  // segment patterns, bit k = segment k (order above)
  localparam logic [6:0] SEG [10] = '{
    7'b1110111, 7'b0100100, 7'b1011101, 7'b1101101, 7'b0101110,
    7'b1101011, 7'b1111011, 7'b0100101, 7'b1111111, 7'b1101111 };

  function automatic genome_t led_genome();
    genome_t g = '0;
    int gi = 0;
    int lit;
    int mint [10];
    int prev;
    for (int k = 0; k < 7; k++) begin              // inverters: node 7+k = ~x_k
      g.fn[gi] = FN_NAND; g.src_a[gi] = node_idx_t'(k); g.src_b[gi] = node_idx_t'(k); gi++;
    end
    for (int d = 0; d < 10; d++) begin             // minterm of digit d
      prev = SEG[d][0] ? 0 : 7;
      for (int k = 1; k < 7; k++) begin
        lit = SEG[d][k] ? k : 7 + k;
        g.fn[gi] = FN_AND; g.src_a[gi] = node_idx_t'(prev); g.src_b[gi] = node_idx_t'(lit);
        prev = NI + gi; gi++;
      end
      mint[d] = prev;
    end
    for (int b = 0; b < NO; b++) begin             // class bit b = OR of its minterms
      prev = -1;
      for (int d = 0; d < 10; d++)
        if (d[b]) begin
          if (prev < 0) prev = mint[d];
          else begin
            g.fn[gi] = FN_OR; g.src_a[gi] = node_idx_t'(prev); g.src_b[gi] = node_idx_t'(mint[d]);
            prev = NI + gi; gi++;
          end
        end
      g.out_src[b] = node_idx_t'(prev);
    end
    return g;
  endfunction

  localparam genome_t G = led_genome();

  int checks = 0, failures = 0, correct = 0, noisy = 0;

  logic          clk = 1'b0, rst_n = 1'b0;
  logic          in_wr_en, start, busy, done;
  logic [0:0]    in_wr_lane, out_rd_lane;
  logic [6:0]    in_wr_addr, out_rd_addr;
  logic [NI-1:0] in_wr_row;
  logic [6:0]    num_rows;
  logic [NO-1:0] out_rd_class;

  logic [6:0] x     [ROWS];
  int         label [ROWS];

  tc_accel_top #(.N_FEATURES(7), .BITS_PER_INPUT(1), .N_GATES(NG), .N_OUTPUTS(NO),
                 .DEPTH(DEPTH), .LANES(1), .GENOME(G)) u_dut (
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

  function automatic int lookup(logic [6:0] p);
    for (int d = 0; d < 10; d++) if (p == SEG[d]) return d;
    return 0;
  endfunction

  initial begin
    int busy_cycles;
    in_wr_en = 1'b0; in_wr_lane = '0; in_wr_addr = '0; in_wr_row = '0;
    start = 1'b0; num_rows = '0; out_rd_lane = '0; out_rd_addr = '0;
    // dataset
    for (int r = 0; r < ROWS; r++) begin
      label[r] = int'($urandom_range(9, 0));
      x[r] = SEG[label[r]];
      for (int k = 0; k < 7; k++)
        if ($urandom_range(9, 0) == 0) x[r] = x[r] ^ (7'd1 << k);
      if (x[r] != SEG[label[r]]) noisy++;
    end
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int base = 0; base < ROWS; base += DEPTH) begin
      for (int a = 0; a < DEPTH; a++) begin
        @(negedge clk);
        in_wr_en = 1'b1; in_wr_addr = 7'(a); in_wr_row = x[base + a];
      end
      @(negedge clk);
      in_wr_en = 1'b0; start = 1'b1; num_rows = 7'(DEPTH);
      @(posedge clk);
      #1 start = 1'b0;
      busy_cycles = 0;
      while (!done) begin
        if (busy) busy_cycles++;
        @(posedge clk);
        #1;
      end
      checks++;
      if (busy_cycles != DEPTH) begin
        failures++;
        $display("FAIL run at row %0d: %0d busy cycles", base, busy_cycles);
      end
      for (int a = 0; a < DEPTH; a++) begin
        @(negedge clk);
        out_rd_addr = 7'(a);
        #1;
        checks++;
        if (int'(out_rd_class) != lookup(x[base + a])) begin
          failures++;
          $display("FAIL row %0d pattern %b: got %0d expected %0d", base + a, x[base + a],
                   out_rd_class, lookup(x[base + a]));
        end
        if (int'(out_rd_class) == label[base + a]) correct++;
      end
    end
    $display("led: %0d rows, %0d with noise, accuracy against true digit %0d/%0d, gates %0d",
             ROWS, noisy, correct, ROWS, active_gate_count(G, NI, NG, NO));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
