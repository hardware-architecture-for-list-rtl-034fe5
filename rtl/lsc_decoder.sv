// lsc_decoder: list successive-cancellation decoder for polar codes.
//
// Top level. L paths are decoded side by side by L SC decoder cores of P
// PEs each (the metric computation unit). Each path owns a state memory
// (intermediate LLs, partial sums, decided bits); the channel LLs are stored
// once. Instead of copying the LLs of a duplicated path, a small pointer
// memory records for each path and stage which LL memory holds its values,
// and L multiplexers route each core's reads accordingly; only the small
// partial-sum, path and pointer memories are copied, through crossbars, in
// one cycle. A register and a radix-2L sorter choose the L best of the 2L
// extensions after every information bit (and after the last bit).
//
// Interface:
//   load : before start, write the N channel LL pairs {LL(x=0), LL(x=1)}
//          (Q_ch-bit negative log-likelihoods, e.g. quantised (y-mu(x))^2)
//          and the frozen-bit mask, one row of P indices per cycle
//          (ld_we, ld_row, ld_ll, ld_frozen).
//   start: one-cycle pulse in idle; busy stays high while decoding; done
//          pulses once, after which dec_bits holds u_1..u_N of the best path
//          (bit k = u_{k+1}) until the next start, and dec_metric its metric.
// Timing: 2N + (N/P)log2(N/(4P)) cycles of LL updates plus one selection
// cycle per information bit (plus one if the last bit is frozen), then one
// cycle to done; 2592 + 1 cycles for N = 1024, P = 64 and rate 1/2.
// Must not be loaded while busy.
module lsc_decoder
  import lsc_pkg::*;
#(
  parameter int unsigned N   = N_DEF,
  parameter int unsigned L   = L_DEF,
  parameter int unsigned P   = P_DEF,
  parameter int unsigned QCH = QCH_DEF,
  localparam int unsigned LOGN = $clog2(N),
  localparam int unsigned QMAX = QCH + LOGN,
  localparam int unsigned LW   = idx_w(L),
  localparam int unsigned SW   = $clog2(LOGN + 1),
  localparam int unsigned RW   = (N / P > 1) ? $clog2(N / P) : 1
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        ld_we,
  input  logic [RW-1:0]               ld_row,
  input  logic [P-1:0][1:0][QCH-1:0]  ld_ll,
  input  logic [P-1:0]                ld_frozen,
  input  logic                        start,
  output logic                        busy,
  output logic                        done,
  output logic [N-1:0]                dec_bits,
  output logic [QMAX-1:0]             dec_metric
);

  // ---------------- control unit ----------------
  ctrl_state_e     state;
  logic            init, frozen, mem_we, capture, commit, sel_sort, from_ch;
  logic [LOGN-1:0] k;
  logic [SW-1:0]   stage, rd_stage;
  logic [RW-1:0]   part, rd_row_a, rd_row_b;
  pe_func_e        func;

  lsc_controller #(.N(N), .P(P)) u_ctrl (
    .clk, .rst_n, .start, .frozen, .state, .busy, .done, .init, .k, .stage,
    .part, .func, .rd_stage, .from_ch, .rd_row_a, .rd_row_b, .mem_we,
    .capture, .commit, .sel_sort
  );

  lsc_frozen_memory #(.N(N), .P(P)) u_frozen (
    .clk, .ld_we, .ld_row, .ld_data(ld_frozen), .rd_idx(k), .frozen
  );

  // ---------------- state memories ----------------
  logic [P-1:0][1:0][QMAX-1:0]        ch_a, ch_b;
  logic [L-1:0][P-1:0][1:0][QMAX-1:0] mem_a, mem_b, core_a, core_b, core_y;
  logic [L-1:0][1:0][QMAX-1:0]        core_m;
  logic [L-1:0][P-1:0]                core_us;
  logic [L-1:0][N-2:0]                ps_state;
  logic [L-1:0][N-1:0]                path_state;

  lsc_channel_memory #(.N(N), .P(P), .QCH(QCH)) u_ch (
    .clk, .ld_we, .ld_row, .ld_data(ld_ll), .rd_row_a, .rd_row_b,
    .rd_a(ch_a), .rd_b(ch_b)
  );

  // ---------------- path selection ----------------
  logic [L-1:0][LW-1:0] ptr, sel_parent, commit_parent;
  logic [L-1:0]         sel_bits, sel_valid, live;
  logic [L-1:0][QMAX-1:0] sel_metric;

  lsc_pointer_memory #(.N(N), .L(L)) u_ptr (
    .clk, .init, .we(mem_we), .wr_stage(stage), .rd_stage, .rd_ptr(ptr),
    .copy(commit && sel_sort), .parent(sel_parent)
  );

  lsc_metric_sorter #(.L(L), .W(QMAX)) u_sort (
    .clk, .init, .capture, .metrics_in(core_m), .commit(commit && sel_sort),
    .parent(sel_parent), .bits(sel_bits), .out_metric(sel_metric),
    .out_valid(sel_valid), .valid(live)
  );

  // ---------------- per-path slices ----------------
  for (genvar l = 0; l < L; l++) begin : g_path
    assign commit_parent[l] = sel_sort ? sel_parent[l] : LW'(l);

    lsc_ll_memory #(.N(N), .P(P), .QCH(QCH)) u_llmem (
      .clk, .we(mem_we), .wr_stage(stage), .wr_row(part),
      .wr_data(core_y[l]), .rd_stage, .rd_row_a, .rd_row_b,
      .rd_a(mem_a[l]), .rd_b(mem_b[l])
    );

    lsc_ll_mux #(.L(L), .P(P), .QMAX(QMAX)) u_mux (
      .mem_a, .mem_b, .ch_a, .ch_b, .from_ch, .sel(ptr[l]),
      .a(core_a[l]), .b(core_b[l])
    );

    lsc_decoder_core #(.P(P), .W(QMAX)) u_core (
      .func, .us(core_us[l]), .a(core_a[l]), .b(core_b[l]),
      .y(core_y[l]), .metric(core_m[l])
    );

    lsc_psum_memory #(.N(N), .L(L), .P(P)) u_psum (
      .clk, .init, .commit, .parent_sel(commit_parent[l]),
      .states_in(ps_state), .bit_val(sel_sort && sel_bits[l]), .bit_idx(k),
      .rd_stage(stage), .rd_part(part), .us(core_us[l]),
      .state_out(ps_state[l])
    );

    lsc_path_memory #(.N(N), .L(L)) u_pathmem (
      .clk, .init, .commit, .parent_sel(commit_parent[l]),
      .states_in(path_state), .bit_val(sel_sort && sel_bits[l]), .bit_idx(k),
      .state_out(path_state[l])
    );
  end

  assign dec_bits = path_state[0];

  // metric of the best path, kept from the last selection
  always_ff @(posedge clk)
    if (commit && sel_sort) dec_metric <= sel_metric[0];

  a_no_load_busy: assert property (@(posedge clk) disable iff (!rst_n)
    !(ld_we && busy));
  a_best_live: assert property (@(posedge clk) disable iff (!rst_n)
    (commit && sel_sort) |-> sel_valid[0]);

endmodule
