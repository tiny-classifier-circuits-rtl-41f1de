// tb_tc_input_buffer -- self-checking test of the pruned input buffer.
//
// A 12-input buffer keeps only the bits set in its mask (7 of 12). Random rows
// are written to every entry, then each entry is read back and compared with
// the written row ANDed with the mask (dropped bits must read 0). Writes with
// wr_en low must not change an entry. The storage row width is checked to be
// the mask's population count, which is the point of the block.
module tb_tc_input_buffer;
  localparam int N     = 12;
  localparam int DEPTH = 10;
  localparam tc_pkg::input_mask_t MASK = tc_pkg::input_mask_t'(12'b1011_0010_1101);

  int checks = 0, failures = 0;

  logic          clk = 1'b0;
  logic          wr_en;
  logic [3:0]    wr_addr, rd_addr;
  logic [N-1:0]  wr_row, rd_row;
  logic [N-1:0]  model [DEPTH];

  tc_input_buffer #(.N_INPUTS(N), .DEPTH(DEPTH), .USED_MASK(MASK)) u_dut (
    .clk(clk), .wr_en(wr_en), .wr_addr(wr_addr), .wr_row(wr_row),
    .rd_addr(rd_addr), .rd_row(rd_row));

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (2000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(string what, logic [N-1:0] got, logic [N-1:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %b expected %b", what, got, exp);
    end
  endtask

  initial begin
    wr_en = 1'b0; wr_addr = '0; wr_row = '0; rd_addr = '0;
    checks++;
    if ($bits(u_dut.mem[0]) != 7) begin
      failures++;
      $display("FAIL storage width %0d, expected 7", $bits(u_dut.mem[0]));
    end
    for (int r = 0; r < 3; r++) begin
      for (int a = 0; a < DEPTH; a++) begin
        @(negedge clk);
        wr_en = 1'b1; wr_addr = 4'(a); wr_row = N'($urandom);
        model[a] = wr_row & MASK[N-1:0];
      end
      // writes with wr_en low are ignored
      for (int a = 0; a < DEPTH; a++) begin
        @(negedge clk);
        wr_en = 1'b0; wr_addr = 4'(a); wr_row = ~model[a];
      end
      @(negedge clk);
      for (int a = DEPTH - 1; a >= 0; a--) begin
        rd_addr = 4'(a);
        #1;
        check($sformatf("round %0d entry %0d", r, a), rd_row, model[a]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
