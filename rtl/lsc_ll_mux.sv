// lsc_ll_mux: LL multiplexer in front of one decoder core.
//
// Selects, for one core, the LL pairs read from state memory sel (an entry
// of the pointer memory), i.e. the memory in which the core's path finds the
// LLs of the stage it reads. When the stage being read is the channel stage
// (from_ch = 1) the shared channel memory is selected instead, since every
// path reads the same channel LLs. There are L such L-to-1 multiplexers in
// the decoder, one per core; the extra channel input is this design's way of
// sharing the channel memory. Purely combinational.
module lsc_ll_mux
  import lsc_pkg::*;
#(
  parameter int unsigned L    = 2,
  parameter int unsigned P    = 64,
  parameter int unsigned QMAX = 13,
  localparam int unsigned LW  = idx_w(L)
) (
  input  logic [L-1:0][P-1:0][1:0][QMAX-1:0] mem_a,
  input  logic [L-1:0][P-1:0][1:0][QMAX-1:0] mem_b,
  input  logic [P-1:0][1:0][QMAX-1:0]        ch_a,
  input  logic [P-1:0][1:0][QMAX-1:0]        ch_b,
  input  logic                               from_ch,
  input  logic [LW-1:0]                      sel,
  output logic [P-1:0][1:0][QMAX-1:0]        a,
  output logic [P-1:0][1:0][QMAX-1:0]        b
);

  always_comb begin
    if (from_ch) begin
      a = ch_a;
      b = ch_b;
    end else begin
      a = mem_a[int'(sel) % L];
      b = mem_b[int'(sel) % L];
    end
  end

endmodule
