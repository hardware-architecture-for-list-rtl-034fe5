// tb_lsc_metric_sorter: the metric sorter with L = 4 and 4-bit metrics (so
// that ties are frequent). Random metrics are captured, the metric inputs
// are then scrambled (the register must hold), and the L outputs are
// compared with a shadow that sorts the 2L candidates by (dead path, metric,
// candidate index) with a simple insertion sort. The live mask starts at
// path 0 only and follows the commits, as in the decoder.
module tb_lsc_metric_sorter;
  import lsc_pkg::*;
  localparam int L = 4, W = 4, LW = idx_w(L);
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic init, capture, commit;
  logic [L-1:0][1:0][W-1:0] metrics_in;
  logic [L-1:0][LW-1:0] parent;
  logic [L-1:0] bits, out_valid, valid;
  logic [L-1:0][W-1:0] out_metric;
  bit sv [L], nv [L];
  int m [L][2];

  lsc_metric_sorter #(.L(L), .W(W)) dut (.*);

  initial begin
    init = 0; capture = 0; commit = 0; metrics_in = '0;
    for (int run = 0; run < 50; run++) begin
      @(negedge clk);
      init = 1;
      @(negedge clk);
      init = 0;
      for (int l = 0; l < L; l++) sv[l] = (l == 0);
      repeat (8) begin
        int ord [2*L];
        @(negedge clk);
        capture = 1;
        for (int l = 0; l < L; l++) for (int u = 0; u < 2; u++) begin
          m[l][u] = $urandom % (1 << W);
          metrics_in[l][u] = W'(m[l][u]);
        end
        @(negedge clk);
        capture = 0;
        metrics_in = '1;
        #1;
        // shadow: insertion sort of the 2L candidates
        for (int c = 0; c < 2 * L; c++) begin
          automatic int pos = c;
          ord[c] = c;
          while (pos > 0) begin
            automatic int x = ord[pos-1], y = ord[pos];
            automatic int kx = (sv[x/2] ? 0 : 1000) + m[x/2][x%2];
            automatic int ky = (sv[y/2] ? 0 : 1000) + m[y/2][y%2];
            if (ky < kx) begin
              ord[pos-1] = y; ord[pos] = x; pos--;
            end else break;
          end
        end
        for (int r = 0; r < L; r++) begin
          checks++;
          if (int'(parent[r]) != ord[r] / 2 || bits[r] != 1'(ord[r] % 2) ||
              int'(out_metric[r]) != m[ord[r]/2][ord[r]%2] ||
              out_valid[r] != sv[ord[r]/2]) begin
            failures++;
            if (failures < 5) $display("FAIL slot %0d", r);
          end
        end
        commit = 1;
        for (int r = 0; r < L; r++) nv[r] = out_valid[r];
        @(negedge clk);
        commit = 0;
        sv = nv;
        checks++;
        for (int l = 0; l < L; l++) if (valid[l] != sv[l]) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
