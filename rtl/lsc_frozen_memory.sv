// lsc_frozen_memory: the frozen-set memory (A^c) of the control unit.
//
// One bit per bit index i = 0..N-1: 1 if u_i is frozen to 0, 0 if it
// carries information. It is loaded before decoding, P bits per cycle
// (row r holds indices r*P .. r*P+P-1), so one decoder can serve any code
// of blocklength N and any rate. The controller reads the bit of the index
// being decoded (asynchronous read). A loadable memory rather than a fixed
// table is this design's choice.
module lsc_frozen_memory #(
  parameter int unsigned N = 1024,
  parameter int unsigned P = 64,
  localparam int unsigned LOGN = $clog2(N),
  localparam int unsigned RW   = (N / P > 1) ? $clog2(N / P) : 1
) (
  input  logic             clk,
  input  logic             ld_we,
  input  logic [RW-1:0]    ld_row,
  input  logic [P-1:0]     ld_data,
  input  logic [LOGN-1:0]  rd_idx,
  output logic             frozen
);

  localparam int unsigned ROWS = N / P;

  logic [P-1:0] mem [ROWS];

  always_ff @(posedge clk)
    if (ld_we) mem[int'(ld_row) % ROWS] <= ld_data;

  assign frozen = mem[int'(rd_idx) / P][int'(rd_idx) % P];

endmodule
