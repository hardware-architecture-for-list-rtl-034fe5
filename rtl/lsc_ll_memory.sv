// lsc_ll_memory: intermediate-LL state memory of one list path.
//
// One lsc_stage_ram per stage s = 0 .. logN-1; stage s holds 2^s LL pairs of
// Q_ch + logN - s bits each, so the memory grows the word width by one bit
// per stage instead of saturating (channel LLs live in the shared
// lsc_channel_memory, stage logN). The core of path l always writes into
// memory l (port wr_*), while the read port is driven with a stage and
// row pair that is common to all memories; the LL multiplexers in front of
// the decoder cores then pick, per core, the memory named by the pointer
// memory. Reading stage 0 returns zeros (no stage reads it).
// Timing: synchronous write, asynchronous read.
module lsc_ll_memory #(
  parameter int unsigned N   = 1024,
  parameter int unsigned P   = 64,
  parameter int unsigned QCH = 3,
  localparam int unsigned LOGN = $clog2(N),
  localparam int unsigned QMAX = QCH + LOGN,
  localparam int unsigned SW   = $clog2(LOGN + 1),
  localparam int unsigned RW   = (N / P > 1) ? $clog2(N / P) : 1
) (
  input  logic                         clk,
  input  logic                         we,
  input  logic [SW-1:0]                wr_stage,
  input  logic [RW-1:0]                wr_row,
  input  logic [P-1:0][1:0][QMAX-1:0]  wr_data,
  input  logic [SW-1:0]                rd_stage,   // 1 .. logN-1
  input  logic [RW-1:0]                rd_row_a,
  input  logic [RW-1:0]                rd_row_b,
  output logic [P-1:0][1:0][QMAX-1:0]  rd_a,
  output logic [P-1:0][1:0][QMAX-1:0]  rd_b
);

  logic [P-1:0][1:0][QMAX-1:0] st_a [LOGN];
  logic [P-1:0][1:0][QMAX-1:0] st_b [LOGN];

  for (genvar s = 0; s < LOGN; s++) begin : g_stage
    lsc_stage_ram #(
      .ENTRIES (2 ** s),
      .P       (P),
      .W       (QCH + LOGN - s),
      .QMAX    (QMAX),
      .RW      (RW)
    ) u_ram (
      .clk      (clk),
      .we       (we && (wr_stage == SW'(s))),
      .wr_row   (wr_row),
      .wr_data  (wr_data),
      .rd_row_a (rd_row_a),
      .rd_row_b (rd_row_b),
      .rd_a     (st_a[s]),
      .rd_b     (st_b[s])
    );
  end

  always_comb begin
    rd_a = '0;
    rd_b = '0;
    for (int s = 1; s < int'(LOGN); s++) begin
      if (rd_stage == SW'(s)) begin
        rd_a = st_a[s];
        rd_b = st_b[s];
      end
    end
  end

endmodule
