// lsc_decoder_core: SC decoder core of the metric computation unit.
//
// P processing elements (lsc_pe) update up to P nodes of one stage of the
// decoding graph per cycle. Node j of the current part takes the pair a[j]
// and b[j] read from the next-higher stage and its partial sum us[j]; all
// PEs apply the same function (f or g) because a stage uses only one of
// them at a time. When a stage has fewer than P nodes only the low PEs carry
// meaningful results. At stage 0 the single output pair y[0] is the pair of
// path metrics of the two extensions (u_i = 0 and u_i = 1) of this core's
// path. Purely combinational; the state memories around it are clocked.
// The PE count follows the reference design; the bus layout is this
// design's choice.
module lsc_decoder_core
  import lsc_pkg::*;
#(
  parameter int unsigned P = 64,
  parameter int unsigned W = 13
) (
  input  pe_func_e                   func,
  input  logic [P-1:0]               us,
  input  logic [P-1:0][1:0][W-1:0]   a,
  input  logic [P-1:0][1:0][W-1:0]   b,
  output logic [P-1:0][1:0][W-1:0]   y,
  output logic [1:0][W-1:0]          metric   // y[0]: metrics at stage 0
);

  for (genvar j = 0; j < P; j++) begin : g_pe
    lsc_pe #(.W(W)) u_pe (
      .func (func),
      .us   (us[j]),
      .a    (a[j]),
      .b    (b[j]),
      .y    (y[j])
    );
  end

  assign metric = y[0];

endmodule
