// lsc_channel_memory: the channel LL memory shared by all decoder cores.
//
// Holds the N channel LL pairs {LL(x=0), LL(x=1)} of the received word,
// Q_ch bits each, in N/P rows of P pairs. The channel values are never
// overwritten during decoding, so a single copy serves every path. It is
// loaded one row per cycle through the load port (ld_*) before decoding.
// The read port serves the update of stage logN-1: pair j (a) and pair
// j + N/2 (b) of the part being processed. Outputs are zero-extended to
// Q_max bits (their upper Q_max-Q_ch bits are constant zero by design). Synchronous write, asynchronous read. The row-wide load port
// is this design's choice.
module lsc_channel_memory #(
  parameter int unsigned N   = 1024,
  parameter int unsigned P   = 64,
  parameter int unsigned QCH = 3,
  localparam int unsigned LOGN = $clog2(N),
  localparam int unsigned QMAX = QCH + LOGN,
  localparam int unsigned RW   = (N / P > 1) ? $clog2(N / P) : 1
) (
  input  logic                         clk,
  input  logic                         ld_we,
  input  logic [RW-1:0]                ld_row,
  input  logic [P-1:0][1:0][QCH-1:0]   ld_data,
  input  logic [RW-1:0]                rd_row_a,
  input  logic [RW-1:0]                rd_row_b,
  output logic [P-1:0][1:0][QMAX-1:0]  rd_a,
  output logic [P-1:0][1:0][QMAX-1:0]  rd_b
);

  logic [P-1:0][1:0][QMAX-1:0] wr_ext;

  always_comb begin
    for (int j = 0; j < int'(P); j++) begin
      wr_ext[j][0] = QMAX'(ld_data[j][0]);
      wr_ext[j][1] = QMAX'(ld_data[j][1]);
    end
  end

  lsc_stage_ram #(
    .ENTRIES (N),
    .P       (P),
    .W       (QCH),
    .QMAX    (QMAX),
    .RW      (RW)
  ) u_ram (
    .clk      (clk),
    .we       (ld_we),
    .wr_row   (ld_row),
    .wr_data  (wr_ext),
    .rd_row_a (rd_row_a),
    .rd_row_b (rd_row_b),
    .rd_a     (rd_a),
    .rd_b     (rd_b)
  );

endmodule
