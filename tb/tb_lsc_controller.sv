// tb_lsc_controller: runs the controller (N = 64, P = 8) over random frozen
// masks and compares its outputs cycle by cycle with a schedule built here
// from the list SC algorithm: for bit k the stages from the lowest set bit
// of k (logN-1 for k = 0) down to 0, max(1, 2^s/P) parts each, g where bit
// s of k is 1, read rows p and p + 2^s/P, then either a same-cycle commit
// (frozen bit, not the last) or a capture followed by one selection cycle.
// Also checks the number of cycles from start to done.
module tb_lsc_controller;
  import lsc_pkg::*;
  localparam int N = 64, P = 8;
  localparam int LOGN = $clog2(N), SW = $clog2(LOGN + 1), RW = $clog2(N / P);
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic rst_n, start, frozen, busy, done, init, from_ch, mem_we, capture;
  logic commit, sel_sort;
  ctrl_state_e state;
  logic [LOGN-1:0] k;
  logic [SW-1:0] stage, rd_stage;
  logic [RW-1:0] part, rd_row_a, rd_row_b;
  pe_func_e func;
  bit fz [N];

  lsc_controller #(.N(N), .P(P)) dut (.*);

  assign frozen = fz[k];

  task automatic expect_cycle(input int ek, es, ep, input bit run,
                              input bit ecap, ecommit, esort);
    bit ok;
    ok = 1;
    if (run) begin
      if (int'(k) != ek || int'(stage) != es || int'(part) != ep) ok = 0;
      if (func != ((((ek >> es) & 1) != 0) ? PE_G : PE_F)) ok = 0;
      if (!mem_we || int'(rd_stage) != es + 1) ok = 0;
      if (from_ch != (es + 1 == LOGN)) ok = 0;
      if ((1 << es) >= P &&
          (int'(rd_row_a) != ep || int'(rd_row_b) != ep + (1 << es) / P))
        ok = 0;
    end else if (mem_we) ok = 0;
    if (capture != ecap || commit != ecommit || sel_sort != esort) ok = 0;
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 5) $display("FAIL at k=%0d s=%0d p=%0d", ek, es, ep);
    end
  endtask

  initial begin
    int t;
    rst_n = 0; start = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int cw = 0; cw < 6; cw++) begin
      automatic int nsel = 0;
      for (int i = 0; i < N; i++) fz[i] = (cw == 0) ? 1'(i < N / 2) : 1'($urandom);
      @(negedge clk);
      start = 1;
      #1;
      checks++;
      if (!init) failures++;
      @(negedge clk);
      start = 0;
      t = 1;
      for (int kk = 0; kk < N; kk++) begin
        automatic int s0 = LOGN - 1;
        if (kk != 0) for (int b = LOGN - 1; b >= 0; b--) if ((kk >> b) & 1) s0 = b;
        for (int s = s0; s >= 0; s--) begin
          automatic int np = ((1 << s) > P) ? (1 << s) / P : 1;
          for (int p = 0; p < np; p++) begin
            automatic bit lastc = (s == 0) && (p == np - 1);
            automatic bit fc = lastc && fz[kk] && kk < N - 1;
            expect_cycle(kk, s, p, 1, lastc && !fc, fc, 0);
            @(negedge clk);
            t++;
          end
        end
        if (!(fz[kk] && kk < N - 1)) begin
          nsel++;
          expect_cycle(kk, 0, 0, 0, 0, 1, 1);
          @(negedge clk);
          t++;
        end
      end
      checks++;
      if (!done || busy) failures++;
      $display("codeword %0d: %0d cycles, %0d selections", cw, t, nsel);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (6 * 4 * N + 100) @(posedge clk);
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
