// lsc_stage_ram: LL-pair storage of one decoding stage.
//
// Holds ENTRIES pairs of W-bit LLs organised as rows of up to P pairs
// (ROWS = ENTRIES/P rows when ENTRIES > P, else one row of ENTRIES pairs).
// A write stores one row, truncating the Q_max-bit PE outputs to W bits;
// this loses nothing because the LLs of a stage never exceed W bits.
// Reading serves the update of the stage below, which combines entry j
// (upper input a) with entry j + ENTRIES/2 (lower input b):
//   ENTRIES > P : a = row rd_row_a, b = row rd_row_b (addresses from the
//                 controller's address generator),
//   ENTRIES <= P: a = entries [0, ENTRIES/2), b = entries [ENTRIES/2, ENTRIES)
//                 of the single row, padded with zeros.
// Outputs are zero-extended to QMAX bits, so their upper QMAX-W bits are
// constant zero by design (the PEs are Q_max wide for every stage). Write is synchronous, read is
// asynchronous (a register file), so a stage can be read the cycle after it
// is written. The row organisation follows the semi-parallel SC decoder the
// reference design builds on; the register-file style is this design's
// choice.
module lsc_stage_ram #(
  parameter int unsigned ENTRIES = 1024,
  parameter int unsigned P       = 64,
  parameter int unsigned W       = 3,
  parameter int unsigned QMAX    = 13,
  parameter int unsigned RW      = 4     // row address width
) (
  input  logic                         clk,
  input  logic                         we,
  input  logic [RW-1:0]                wr_row,
  input  logic [P-1:0][1:0][QMAX-1:0]  wr_data,
  input  logic [RW-1:0]                rd_row_a,
  input  logic [RW-1:0]                rd_row_b,
  output logic [P-1:0][1:0][QMAX-1:0]  rd_a,
  output logic [P-1:0][1:0][QMAX-1:0]  rd_b
);

  localparam int unsigned ROWS = (ENTRIES > P) ? ENTRIES / P : 1;
  localparam int unsigned ENT  = (ENTRIES > P) ? P : ENTRIES;
  localparam int unsigned HALF = ENTRIES / 2;

  logic [ENT-1:0][1:0][W-1:0] mem [ROWS];

  always_ff @(posedge clk) begin
    if (we) begin
      for (int j = 0; j < int'(ENT); j++) begin
        mem[(ROWS > 1) ? int'(wr_row) : 0][j][0] <= wr_data[j][0][W-1:0];
        mem[(ROWS > 1) ? int'(wr_row) : 0][j][1] <= wr_data[j][1][W-1:0];
      end
    end
  end

  always_comb begin
    rd_a = '0;
    rd_b = '0;
    if (ENTRIES > P) begin
      for (int j = 0; j < int'(ENT); j++) begin
        rd_a[j][0] = QMAX'(mem[int'(rd_row_a) % ROWS][j][0]);
        rd_a[j][1] = QMAX'(mem[int'(rd_row_a) % ROWS][j][1]);
        rd_b[j][0] = QMAX'(mem[int'(rd_row_b) % ROWS][j][0]);
        rd_b[j][1] = QMAX'(mem[int'(rd_row_b) % ROWS][j][1]);
      end
    end else begin
      for (int j = 0; j < int'(HALF); j++) begin
        rd_a[j][0] = QMAX'(mem[0][j][0]);
        rd_a[j][1] = QMAX'(mem[0][j][1]);
        rd_b[j][0] = QMAX'(mem[0][j+HALF][0]);
        rd_b[j][1] = QMAX'(mem[0][j+HALF][1]);
      end
    end
  end

endmodule
