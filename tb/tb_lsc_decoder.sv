// tb_lsc_decoder: end-to-end test of lsc_decoder at reduced size.
//
// N = 128, L = 4, P = 8, Q_ch = 3 (N/(4P) = 4, so the closed-form cycle
// count applies), 24 codewords from 0 to 4 dB Eb/N0. Everything is checked
// by tb_lsc_env against the behavioural list decoder; see there.
module tb_lsc_decoder;
  import lsc_pkg::*;

  localparam int N = 128, L = 4, P = 8, QCH = 3;
  localparam int LOGN = $clog2(N), QMAX = QCH + LOGN, LW = idx_w(L);
  localparam int RW = $clog2(N / P);

  logic clk, rst_n, ld_we, start, busy, done;
  logic [RW-1:0] ld_row;
  logic [P-1:0][1:0][QCH-1:0] ld_ll;
  logic [P-1:0] ld_frozen;
  logic [N-1:0] dec_bits;
  logic [QMAX-1:0] dec_metric;

  lsc_decoder #(.N(N), .L(L), .P(P), .QCH(QCH)) dut (.*);

  tb_lsc_env #(.N(N), .L(L), .P(P), .QCH(QCH), .FRAMES(24),
               .EBN0_LO(0.0), .EBN0_HI(4.0)) env (
    .clk, .rst_n, .ld_we, .ld_row, .ld_ll, .ld_frozen, .start, .busy, .done,
    .dec_bits, .dec_metric,
    .pr_commit(dut.commit), .pr_sel_sort(dut.sel_sort),
    .pr_mem_we(dut.mem_we), .pr_from_ch(dut.from_ch), .pr_ptr(dut.ptr),
    .pr_parent(dut.sel_parent)
  );
endmodule
