// tb_lsc_path_memory: three path memories (N = 16, L = 3) wired through
// their crossbar inputs. Each cycle every path copies a random parent and
// writes a random decision at the current index; the contents are compared
// with a shadow after every commit, including idle cycles and init.
module tb_lsc_path_memory;
  import lsc_pkg::*;
  localparam int N = 16, L = 3, LOGN = $clog2(N), LW = idx_w(L);
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic init, commit;
  logic [L-1:0][LW-1:0] parent_sel;
  logic [L-1:0] bit_val;
  logic [LOGN-1:0] bit_idx;
  logic [L-1:0][N-1:0] st, sh, nsh;

  for (genvar l = 0; l < L; l++) begin : g
    lsc_path_memory #(.N(N), .L(L)) dut (
      .clk, .init, .commit, .parent_sel(parent_sel[l]), .states_in(st),
      .bit_val(bit_val[l]), .bit_idx, .state_out(st[l]));
  end

  initial begin
    init = 0; commit = 0; parent_sel = '0; bit_val = '0; bit_idx = '0;
    for (int cw = 0; cw < 8; cw++) begin
      @(negedge clk);
      init = 1;
      @(negedge clk);
      init = 0;
      sh = '0;
      checks++;
      if (st != sh) failures++;
      for (int k = 0; k < N; k++) begin
        @(negedge clk);
        commit = ($urandom % 5) != 0;
        bit_idx = LOGN'(k);
        for (int l = 0; l < L; l++) begin
          parent_sel[l] = LW'($urandom % L);
          bit_val[l] = 1'($urandom);
          nsh[l] = sh[parent_sel[l]];
          nsh[l][k] = bit_val[l];
        end
        @(negedge clk);
        if (commit) sh = nsh;
        commit = 0;
        checks++;
        if (st != sh) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
