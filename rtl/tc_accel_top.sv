// tc_accel_top -- Tiny Classifier accelerator: buffered, optionally parallel
// classifier lanes with a sequencer.
//
// Structure (the paper's "one instance of a classifier circuit", replicated):
// each of LANES identical lanes has a local input buffer, one classifier
// circuit and N_OUTPUTS one-bit output buffers. The host fills the input
// buffers with encoded rows (lane in_wr_lane, row in_wr_addr), pulses start
// with num_rows, waits for done, and reads the encoded predictions back from
// the output buffers. All lanes run in lock step, so LANES inferences finish
// per clock; lane l's row r is an independent inference.
//
// Sequencer timing: start is sampled at a rising edge while idle; busy is high
// from the next cycle for exactly num_rows cycles, one row per cycle per lane
// (row r is read, classified combinationally and written to the output buffers
// at the edge that ends its cycle); done is a one-cycle pulse in the cycle
// after the last row, i.e. num_rows+1 cycles after the start edge. num_rows
// of 0 gives done in the cycle after start with nothing written; values above
// DEPTH are clamped to DEPTH. The host must not write the input buffers while
// busy (asserted).
//
// What follows the paper: the input/output buffers, their sizing (input rows of
// features x bits_per_input bits cut down to the bits the circuit uses;
// bits_per_output one-bit output buffers), identical classifier circuits in
// parallel with one input buffer each, and the 300-gate budget. This design's
// own choices: the sequencer and host port protocol, one inference per cycle,
// the buffer depth (150 rows: the 20% test split of the blood dataset), the
// defaults N_FEATURES=4 and BITS_PER_INPUT=4 (blood with four bits per
// input), binary class encoding, and the default graph built by the paper's
// random initialisation step in place of an evolved one.
module tc_accel_top #(
  parameter int unsigned     N_FEATURES     = 4,
  parameter int unsigned     BITS_PER_INPUT = 4,
  parameter int unsigned     N_INPUTS       = N_FEATURES * BITS_PER_INPUT,
  parameter int unsigned     N_GATES        = 300,
  parameter int unsigned     N_OUTPUTS      = 1,
  parameter int unsigned     DEPTH          = 150,
  parameter int unsigned     LANES          = 1,
  parameter int unsigned     SEED           = 105,
  parameter tc_pkg::genome_t GENOME         = tc_pkg::random_genome(N_INPUTS, N_GATES,
                                                                    N_OUTPUTS, SEED),
  localparam int unsigned    AW             = (DEPTH > 1) ? $clog2(DEPTH) : 1,
  localparam int unsigned    CW             = $clog2(DEPTH + 1),
  localparam int unsigned    LW             = (LANES > 1) ? $clog2(LANES) : 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // host: fill input buffers
  input  logic                 in_wr_en,
  input  logic [LW-1:0]        in_wr_lane,
  input  logic [AW-1:0]        in_wr_addr,
  input  logic [N_INPUTS-1:0]  in_wr_row,
  // host: run control
  input  logic                 start,
  input  logic [CW-1:0]        num_rows,
  output logic                 busy,
  output logic                 done,
  // host: read predictions
  input  logic [LW-1:0]        out_rd_lane,
  input  logic [AW-1:0]        out_rd_addr,
  output logic [N_OUTPUTS-1:0] out_rd_class
);

  localparam tc_pkg::input_mask_t USED_MASK =
    tc_pkg::active_inputs(GENOME, N_INPUTS, N_GATES, N_OUTPUTS);

  // ---------------------------------------------------------------- sequencer
  typedef enum logic {S_IDLE, S_RUN} seq_state_e;

  seq_state_e    state;
  logic [AW-1:0] row;
  logic [CW-1:0] last_row;   // num_rows - 1, latched at start

  assign busy = (state == S_RUN);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      row      <= '0;
      last_row <= '0;
      done     <= 1'b0;
    end else begin
      done <= 1'b0;
      case (state)
        S_IDLE: begin
          if (start) begin
            row <= '0;
            if (num_rows == '0) begin
              done <= 1'b1;
            end else begin
              last_row <= (num_rows > CW'(DEPTH)) ? CW'(DEPTH - 1) : num_rows - 1'b1;
              state    <= S_RUN;
            end
          end
        end
        default: begin  // S_RUN
          if (CW'(row) == last_row) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end else begin
            row <= row + 1'b1;
          end
        end
      endcase
    end
  end

  // -------------------------------------------------------------------- lanes
  logic [N_OUTPUTS-1:0] lane_rd_class [LANES];

  for (genvar l = 0; l < int'(LANES); l++) begin : g_lane
    logic [N_INPUTS-1:0]  row_bits;
    logic [N_OUTPUTS-1:0] pred;
    logic [N_OUTPUTS-1:0] rd_class;

    tc_input_buffer #(
      .N_INPUTS (N_INPUTS),
      .DEPTH    (DEPTH),
      .USED_MASK(USED_MASK)
    ) u_in_buf (
      .clk    (clk),
      .wr_en  (in_wr_en && (LANES == 1 || in_wr_lane == LW'(l))),
      .wr_addr(in_wr_addr),
      .wr_row (in_wr_row),
      .rd_addr(row),
      .rd_row (row_bits)
    );

    tc_classifier #(
      .N_INPUTS (N_INPUTS),
      .N_GATES  (N_GATES),
      .N_OUTPUTS(N_OUTPUTS),
      .GENOME   (GENOME)
    ) u_classifier (
      .in_bits   (row_bits),
      .class_bits(pred)
    );

    for (genvar b = 0; b < int'(N_OUTPUTS); b++) begin : g_obuf
      tc_output_buffer #(
        .DEPTH(DEPTH)
      ) u_out_buf (
        .clk    (clk),
        .wr_en  (busy),
        .wr_addr(row),
        .wr_bit (pred[b]),
        .rd_addr(out_rd_addr),
        .rd_bit (rd_class[b])
      );
    end

    assign lane_rd_class[l] = rd_class;
  end

  assign out_rd_class = lane_rd_class[(LANES == 1) ? 0 : out_rd_lane];

  // ------------------------------------------------------------- host rules
  a_no_write_while_busy: assert property (@(posedge clk)
    busy |-> !in_wr_en)
    else $error("tc_accel_top: input buffer written while busy");

  a_start_only_when_idle: assert property (@(posedge clk)
    busy |-> !start)
    else $error("tc_accel_top: start while busy");

endmodule
