// tb_lsc_psum_memory: two partial-sum memories (N = 16, L = 2, P = 4)
// wired through their crossbar inputs as in the decoder. For every bit
// index k each path commits a random decision on top of the state of a
// random parent path; a shadow keeps the decided bits of each path. Before
// every g update that the next index needs (stages s with bit s of k+1
// set), every part of the read port is compared with the polar encoding of
// the 2^s bits decided in the upper half of the block, recomputed from the
// shadow. Repeated over several codewords, with init in between.
module tb_lsc_psum_memory;
  import lsc_pkg::*;
  import lsc_ref_pkg::*;
  localparam int N = 16, L = 2, P = 4;
  localparam int LOGN = $clog2(N), LW = idx_w(L);
  localparam int SW = $clog2(LOGN + 1), RW = $clog2(N / P);
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic init, commit;
  logic [L-1:0][LW-1:0] parent_sel;
  logic [L-1:0] bit_val;
  logic [LOGN-1:0] bit_idx;
  logic [SW-1:0] rd_stage;
  logic [RW-1:0] rd_part;
  logic [L-1:0][P-1:0] us;
  logic [L-1:0][N-2:0] st;
  bit sh [L][N];

  for (genvar l = 0; l < L; l++) begin : g
    lsc_psum_memory #(.N(N), .L(L), .P(P)) dut (
      .clk, .init, .commit, .parent_sel(parent_sel[l]), .states_in(st),
      .bit_val(bit_val[l]), .bit_idx, .rd_stage, .rd_part, .us(us[l]),
      .state_out(st[l]));
  end

  initial begin
    init = 0; commit = 0; parent_sel = '0; bit_val = '0; bit_idx = '0;
    rd_stage = '0; rd_part = '0;
    for (int cw = 0; cw < 6; cw++) begin
      @(negedge clk);
      init = 1;
      @(negedge clk);
      init = 0;
      for (int l = 0; l < L; l++) for (int i = 0; i < N; i++) sh[l][i] = 0;
      for (int k = 0; k < N; k++) begin
        bit nsh [L][N];
        @(negedge clk);
        commit = 1;
        bit_idx = LOGN'(k);
        for (int l = 0; l < L; l++) begin
          if ($urandom % 3 == 0) begin
            parent_sel[l] = LW'(l); bit_val[l] = 1'b0;   // frozen bit
          end else begin
            parent_sel[l] = LW'($urandom % L); bit_val[l] = 1'($urandom);
          end
          for (int i = 0; i < N; i++) nsh[l][i] = sh[parent_sel[l]][i];
          nsh[l][k] = bit_val[l];
        end
        @(negedge clk);
        commit = 0;
        sh = nsh;
        if (k + 1 < N)
          for (int s = 0; s < LOGN; s++)
            if (((k + 1) >> s) & 1) begin
              automatic int h = 1 << s;
              automatic int base = ((k + 1) >> (s + 1)) << (s + 1);
              for (int p = 0; p < ((h > P) ? h / P : 1); p++) begin
                rd_stage = SW'(s);
                rd_part = RW'(p);
                #1;
                for (int l = 0; l < L; l++) begin
                  bit v[];
                  v = new[h];
                  for (int j = 0; j < h; j++) v[j] = sh[l][base + j];
                  encode(v, h);
                  checks++;
                  for (int j = 0; j < P && j < h; j++)
                    if (us[l][j] != v[p*P + j]) begin
                      failures++;
                      if (failures < 5)
                        $display("FAIL k=%0d s=%0d p=%0d l=%0d j=%0d", k + 1,
                                 s, p, l, j);
                    end
                end
              end
            end
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
