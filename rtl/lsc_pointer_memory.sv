// lsc_pointer_memory: the pointer memory of the path selection unit.
//
// Entry (l, s), for paths l = 0..L-1 and stages s = 1..logN-1, names the
// state memory that holds the stage-s LLs of path l; it is ceil(log2 L)
// bits wide, so the table has L*ceil(log2 L)*(logN-1) bits (18 for N = 1024,
// L = 2). Stage 0 needs no entry (nothing reads it) and stage logN is the
// shared channel memory. Three operations:
//   write (we)  : while stage wr_stage is computed every core writes its own
//                 memory, so row wr_stage becomes the identity 0..L-1;
//   read        : row rd_stage, the stage the cores read, drives the L LL
//                 multiplexers (rd_ptr[l] for core l);
//   copy (copy) : after path selection, row l of every stage is loaded from
//                 row parent[l] (the same crossbar copy as the partial-sum
//                 and path memories), which replaces copying the LLs.
// A write and a copy never fall in the same cycle. init loads the identity.
// Synchronous update, asynchronous read.
module lsc_pointer_memory
  import lsc_pkg::*;
#(
  parameter int unsigned N = 1024,
  parameter int unsigned L = 2,
  localparam int unsigned LOGN = $clog2(N),
  localparam int unsigned LW   = idx_w(L),
  localparam int unsigned SW   = $clog2(LOGN + 1)
) (
  input  logic                    clk,
  input  logic                    init,
  input  logic                    we,
  input  logic [SW-1:0]           wr_stage,
  input  logic [SW-1:0]           rd_stage,
  output logic [L-1:0][LW-1:0]    rd_ptr,
  input  logic                    copy,
  input  logic [L-1:0][LW-1:0]    parent
);

  // ptr[s-1] is the row of stage s
  logic [L-1:0][LW-1:0] ptr [LOGN-1];
  logic [L-1:0][LW-1:0] ident;

  always_comb
    for (int l = 0; l < int'(L); l++) ident[l] = LW'(l);

  always_ff @(posedge clk) begin
    if (init) begin
      for (int s = 0; s < int'(LOGN) - 1; s++) ptr[s] <= ident;
    end else if (copy) begin
      for (int s = 0; s < int'(LOGN) - 1; s++)
        for (int l = 0; l < int'(L); l++)
          ptr[s][l] <= ptr[s][int'(parent[l]) % L];
    end else if (we && wr_stage >= SW'(1) && wr_stage <= SW'(LOGN - 1)) begin
      ptr[int'(wr_stage) - 1] <= ident;
    end
  end

  always_comb begin
    rd_ptr = ident;
    for (int s = 1; s < int'(LOGN); s++)
      if (rd_stage == SW'(s)) rd_ptr = ptr[s-1];
  end

endmodule
