// tb_lsc_env: stimulus, reference check and coverage for lsc_decoder.
//
// Drives one decoder instance (connected through ports by the enclosing
// testbench) through FRAMES codewords of a rate-1/2 polar code: random
// information bits, polar encoding, BPSK over AWGN at Eb/N0 values stepped
// from EBN0_LO to EBN0_HI dB, channel LLs round((y - mu(x))^2) saturated to
// Q_ch bits (step 1). Each frame is loaded row by row, started, and its
// decoded word and best-path metric are compared with the behavioural model
// lsc_ref; the cycle count from start to done is compared with the schedule
// sum_s (N/2^s) max(1, 2^s/P) + selections + 1, and, when the last bit is an
// information bit and N >= 4P, with the closed form (2+R)N +
// (N/P) log2(N/(4P)) + 1. It counts how often each mechanism of the design
// occurred (path duplication, path discard, frozen bit without selection,
// selection idle cycle, LL read redirected by the pointer memory)
// and fails for any that never did. A watchdog
// ends the run. Prints the TB_RESULT line and calls $finish.
module tb_lsc_env
  import lsc_pkg::*;
  import lsc_ref_pkg::*;
#(
  parameter int N       = 1024,
  parameter int L       = 2,
  parameter int P       = 64,
  parameter int QCH     = 3,
  parameter int FRAMES  = 2,
  parameter real EBN0_LO = 1.0,
  parameter real EBN0_HI = 3.0,
  localparam int LOGN = $clog2(N),
  localparam int QMAX = QCH + LOGN,
  localparam int LW   = idx_w(L),
  localparam int RW   = (N / P > 1) ? $clog2(N / P) : 1
) (
  output logic                        clk,
  output logic                        rst_n,
  output logic                        ld_we,
  output logic [RW-1:0]               ld_row,
  output logic [P-1:0][1:0][QCH-1:0]  ld_ll,
  output logic [P-1:0]                ld_frozen,
  output logic                        start,
  input  logic                        busy,
  input  logic                        done,
  input  logic [N-1:0]                dec_bits,
  input  logic [QMAX-1:0]             dec_metric,
  // probes into the decoder
  input  logic                        pr_commit,
  input  logic                        pr_sel_sort,
  input  logic                        pr_mem_we,
  input  logic                        pr_from_ch,
  input  logic [L-1:0][LW-1:0]        pr_ptr,
  input  logic [L-1:0][LW-1:0]        pr_parent
);

  int checks = 0, failures = 0;
  int n_dup = 0, n_discard = 0, n_frozen = 0, n_idle = 0, n_redirect = 0;
  int n_ok_frames = 0;
  longint cyc = 0;

  initial clk = 1'b0;
  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  // ---------------- mechanism counters ----------------
  always @(posedge clk) if (rst_n) begin
    if (pr_commit && !pr_sel_sort) n_frozen++;
    if (pr_commit && pr_sel_sort) begin
      bit used [L];
      bit dup, disc;
      dup = 1'b0;
      disc = 1'b0;
      n_idle++;
      for (int l = 0; l < L; l++) used[l] = 0;
      for (int l = 0; l < L; l++) begin
        if (used[pr_parent[l] % L]) dup = 1;
        used[pr_parent[l] % L] = 1;
      end
      for (int l = 0; l < L; l++) if (!used[l]) disc = 1;
      if (dup) n_dup++;
      if (disc) n_discard++;
    end
    if (pr_mem_we && !pr_from_ch)
      for (int l = 0; l < L; l++)
        if (pr_ptr[l] != LW'(l)) begin n_redirect++; break; end
  end

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", what);
    end
  endtask

  initial begin
    static int     K = N / 2;
    static lsc_ref #(N, L) ref_dec = new();
    bit     fz[];
    bit     info[];
    bit     x[];
    bit     exp_bits[];
    int     ch[][2];
    int     expected_cycles, sched, t0, t1;
    real    sigma, y, ebn0;

    rst_n = 1'b0; ld_we = 1'b0; ld_row = '0; ld_ll = '0; ld_frozen = '0;
    start = 1'b0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;

    frozen_set(fz, N, K, 0.5);
    sched = 0;
    for (int s = 0; s < LOGN; s++)
      sched += (N >> s) * (((1 << s) > P) ? (1 << s) / P : 1);

    for (int f = 0; f < FRAMES; f++) begin
      ebn0 = (FRAMES > 1) ? EBN0_LO + (EBN0_HI - EBN0_LO) * f / (FRAMES - 1)
                          : EBN0_LO;
      sigma = $sqrt(1.0 / (2.0 * 0.5 * $pow(10.0, ebn0 / 10.0)));
      info = new[N];
      x = new[N];
      ch = new[N];
      for (int i = 0; i < N; i++) begin
        info[i] = fz[i] ? 1'b0 : 1'($urandom);
        x[i] = info[i];
      end
      encode(x, N);
      for (int i = 0; i < N; i++) begin
        y = (x[i] ? -1.0 : 1.0) + sigma * gauss();
        ch[i][0] = quant((y - 1.0) * (y - 1.0), QCH);
        ch[i][1] = quant((y + 1.0) * (y + 1.0), QCH);
      end
      // load
      for (int r = 0; r < N / P; r++) begin
        @(negedge clk);
        ld_we = 1'b1;
        ld_row = RW'(r);
        for (int j = 0; j < P; j++) begin
          ld_ll[j][0] = QCH'(ch[r*P+j][0]);
          ld_ll[j][1] = QCH'(ch[r*P+j][1]);
          ld_frozen[j] = fz[r*P+j];
        end
      end
      @(negedge clk);
      ld_we = 1'b0;
      start = 1'b1;
      t0 = int'(cyc);
      @(negedge clk);
      start = 1'b0;
      while (!done) @(negedge clk);
      t1 = int'(cyc);

      ref_dec.decode(ch, fz, exp_bits);
      begin
        bit same, ok;
        same = 1'b1;
        ok = 1'b1;
        for (int i = 0; i < N; i++) begin
          if (dec_bits[i] != exp_bits[i]) same = 0;
          if (dec_bits[i] != info[i]) ok = 0;
        end
        check(same, $sformatf("frame %0d: decoded word differs from model", f));
        if (ok) n_ok_frames++;
      end
      check(int'(dec_metric) == ref_dec.best_metric,
            $sformatf("frame %0d: metric %0d, model %0d", f, dec_metric,
                      ref_dec.best_metric));
      expected_cycles = sched + ref_dec.selections + 1;
      check(t1 - t0 == expected_cycles,
            $sformatf("frame %0d: %0d cycles, expected %0d", f, t1 - t0,
                      expected_cycles));
      if (!fz[N-1] && N >= 4 * P) begin
        automatic int closed = 2 * N + K + (N / P) * $clog2(N / (4 * P)) + 1;
        check(t1 - t0 == closed,
              $sformatf("frame %0d: %0d cycles, closed form %0d", f, t1 - t0,
                        closed));
      end
      $display("frame %0d EbN0=%.2f dB cycles=%0d metric=%0d error_free_so_far=%0d",
               f, ebn0, t1 - t0, dec_metric, n_ok_frames);
    end

    check(n_dup > 0,      "no path duplication happened");
    check(n_discard > 0,  "no path was discarded");
    check(n_frozen > 0,   "no frozen bit skipped selection");
    check(n_idle > 0,     "no selection idle cycle");
    check(n_redirect > 0, "no LL read was redirected by the pointer memory");
    $display("mechanisms: duplications=%0d discards=%0d frozen_commits=%0d selection_cycles=%0d redirected_reads=%0d frames_error_free=%0d/%0d",
             n_dup, n_discard, n_frozen, n_idle, n_redirect, n_ok_frames, FRAMES);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // watchdog
  initial begin
    repeat (FRAMES * (4 * N + N / P + 20) + 100) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
