// lsc_psum_memory: partial-sum memory of one list path.
//
// For every stage s = 0 .. logN-1 the memory keeps the 2^s partial sums that
// the g updates of stage s need: the polar encoding (x = u * F^{(x)s}, with
// F = [1 0; 1 1]) of the 2^s bits decided in the upper half of the current
// 2^(s+1)-bit block. Stage s sits at bit offset 2^s - 1, N-1 bits in all.
//
// Commit (commit = 1) stores the decision u for bit index k into the
// partial sums copied from path parent_sel: the crossbar in front of the
// cells lets every path memory load the whole state of any other in the same
// cycle, so path duplication costs one cycle. The update walks up the
// stages: c_0 = u; while bit s of k is 1 the block of stage s is complete
// and c_{s+1} = {c_s, left_s xor c_s} (upper half left xor right, lower half
// right); at the lowest stage s whose bit of k is 0, left_s <= c_s.
// The walk also forms the full N-bit block encoding c_logN; only its lower
// stages are stored, the top block is never needed.
// For a frozen bit the controller commits u = 0 with parent_sel = own index.
// The read port returns, for stage rd_stage and part rd_part, the P partial
// sums of the nodes processed in that cycle. init clears the memory.
// Synchronous update, asynchronous read. The copy-by-crossbar follows the
// reference design; the storage layout and update walk are this design's.
module lsc_psum_memory
  import lsc_pkg::*;
#(
  parameter int unsigned N = 1024,
  parameter int unsigned L = 2,
  parameter int unsigned P = 64,
  localparam int unsigned LOGN = $clog2(N),
  localparam int unsigned LW   = idx_w(L),
  localparam int unsigned SW   = $clog2(LOGN + 1),
  localparam int unsigned RW   = (N / P > 1) ? $clog2(N / P) : 1
) (
  input  logic                    clk,
  input  logic                    init,
  input  logic                    commit,
  input  logic [LW-1:0]           parent_sel,
  input  logic [L-1:0][N-2:0]     states_in,   // all L memories (crossbar)
  input  logic                    bit_val,
  input  logic [LOGN-1:0]         bit_idx,
  input  logic [SW-1:0]           rd_stage,
  input  logic [RW-1:0]           rd_part,
  output logic [P-1:0]            us,
  output logic [N-2:0]            state_out
);

  logic [N-2:0]   ps;
  logic [N-2:0]   base;
  logic [N-2:0]   next;
  logic [2*N-2:0] c;        // c_s at offset 2^s - 1, s = 0 .. logN
  logic [LOGN:0]  ones;     // ones[s]: bits s-1..0 of bit_idx are all 1

  assign base = states_in[int'(parent_sel) % L];

  assign c[0]    = bit_val;
  assign ones[0] = 1'b1;
  for (genvar s = 0; s < LOGN; s++) begin : g_upd
    localparam int unsigned OFF  = (2 ** s) - 1;
    localparam int unsigned OFFN = (2 ** (s + 1)) - 1;
    localparam int unsigned SZ   = 2 ** s;
    assign c[OFFN +: SZ]      = base[OFF +: SZ] ^ c[OFF +: SZ];
    assign c[OFFN + SZ +: SZ] = c[OFF +: SZ];
    assign ones[s+1]          = ones[s] & bit_idx[s];
    assign next[OFF +: SZ]    = (ones[s] && !bit_idx[s]) ? c[OFF +: SZ]
                                                         : base[OFF +: SZ];
  end

  always_ff @(posedge clk) begin
    if (init)        ps <= '0;
    else if (commit) ps <= next;
  end

  assign state_out = ps;

  // read port
  logic [P-1:0] rd_s [LOGN];
  for (genvar s = 0; s < LOGN; s++) begin : g_rd
    localparam int unsigned OFF = (2 ** s) - 1;
    localparam int unsigned SZ  = 2 ** s;
    if (SZ >= P) begin : g_wide
      assign rd_s[s] = ps[OFF + (int'(rd_part) % (SZ / P)) * P +: P];
    end else begin : g_narrow
      assign rd_s[s] = P'(ps[OFF +: SZ]);
    end
  end

  always_comb begin
    us = '0;
    for (int s = 0; s < int'(LOGN); s++)
      if (rd_stage == SW'(s)) us = rd_s[s];
  end

endmodule
