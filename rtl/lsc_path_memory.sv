// lsc_path_memory: decided-bit memory of one list path.
//
// Holds the N decisions u_1 .. u_N of the path. On commit the memory loads
// the whole content of path parent_sel through its crossbar input and, in
// the same cycle, writes decision bit_val at index bit_idx, so duplicating
// a path takes a single cycle, as the reference design requires. For frozen
// bits the controller commits 0 with parent_sel = own index. init clears the
// memory. After the last bit, path 0 holds the decoded word (the sorter puts
// the best path first). Synchronous write; the content is always visible on
// state_out.
module lsc_path_memory
  import lsc_pkg::*;
#(
  parameter int unsigned N = 1024,
  parameter int unsigned L = 2,
  localparam int unsigned LOGN = $clog2(N),
  localparam int unsigned LW   = idx_w(L)
) (
  input  logic                  clk,
  input  logic                  init,
  input  logic                  commit,
  input  logic [LW-1:0]         parent_sel,
  input  logic [L-1:0][N-1:0]   states_in,
  input  logic                  bit_val,
  input  logic [LOGN-1:0]       bit_idx,
  output logic [N-1:0]          state_out
);

  logic [N-1:0] bits;

  always_ff @(posedge clk) begin
    if (init) begin
      bits <= '0;
    end else if (commit) begin
      bits          <= states_in[int'(parent_sel) % L];
      bits[bit_idx] <= bit_val;
    end
  end

  assign state_out = bits;

endmodule
