// tb_lsc_workload_l4: the second configuration of the reference design,
// N = 1024 with list size L = 4 (P = 64, Q_ch = 3). Decodes three codewords
// of the (1024, 512) code from 1.5 to 2.5 dB Eb/N0 and checks them against
// the behavioural list decoder and the cycle budget (see tb_lsc_env).
module tb_lsc_workload_l4;
  import lsc_pkg::*;

  localparam int N = 1024, L = 4, P = 64, QCH = 3;
  localparam int LOGN = $clog2(N), QMAX = QCH + LOGN, LW = idx_w(L);
  localparam int RW = $clog2(N / P);

  logic clk, rst_n, ld_we, start, busy, done;
  logic [RW-1:0] ld_row;
  logic [P-1:0][1:0][QCH-1:0] ld_ll;
  logic [P-1:0] ld_frozen;
  logic [N-1:0] dec_bits;
  logic [QMAX-1:0] dec_metric;

  lsc_decoder #(.N(N), .L(L), .P(P), .QCH(QCH)) dut (.*);

  tb_lsc_env #(.N(N), .L(L), .P(P), .QCH(QCH), .FRAMES(3),
               .EBN0_LO(1.5), .EBN0_HI(2.5)) env (
    .clk, .rst_n, .ld_we, .ld_row, .ld_ll, .ld_frozen, .start, .busy, .done,
    .dec_bits, .dec_metric,
    .pr_commit(dut.commit), .pr_sel_sort(dut.sel_sort),
    .pr_mem_we(dut.mem_we), .pr_from_ch(dut.from_ch), .pr_ptr(dut.ptr),
    .pr_parent(dut.sel_parent)
  );

  // outer watchdog, behind the one in tb_lsc_env
  initial begin
    repeat (8 * 4 * N) @(posedge clk);
    $display("FAIL: outer watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", env.checks, env.failures + 1);
    $finish;
  end
endmodule
