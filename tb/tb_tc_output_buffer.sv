// tb_tc_output_buffer -- self-checking test of a one-bit output buffer.
//
// Writes random bits to all entries, tries writes with wr_en low (must be
// ignored), and reads every entry back against a model array.
module tb_tc_output_buffer;
  localparam int DEPTH = 20;

  int checks = 0, failures = 0;

  logic       clk = 1'b0;
  logic       wr_en, wr_bit, rd_bit;
  logic [4:0] wr_addr, rd_addr;
  logic       model [DEPTH];

  tc_output_buffer #(.DEPTH(DEPTH)) u_dut (
    .clk(clk), .wr_en(wr_en), .wr_addr(wr_addr), .wr_bit(wr_bit),
    .rd_addr(rd_addr), .rd_bit(rd_bit));

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (2000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wr_en = 1'b0; wr_addr = '0; wr_bit = 1'b0; rd_addr = '0;
    for (int r = 0; r < 4; r++) begin
      for (int a = 0; a < DEPTH; a++) begin
        @(negedge clk);
        wr_en = 1'b1; wr_addr = 5'(a); wr_bit = 1'($urandom);
        model[a] = wr_bit;
      end
      for (int a = 0; a < DEPTH; a++) begin
        @(negedge clk);
        wr_en = 1'b0; wr_addr = 5'(a); wr_bit = ~model[a];
      end
      @(negedge clk);
      for (int a = 0; a < DEPTH; a++) begin
        rd_addr = 5'(a);
        #1;
        checks++;
        if (rd_bit !== model[a]) begin
          failures++;
          $display("FAIL round %0d entry %0d: got %b expected %b", r, a, rd_bit, model[a]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
