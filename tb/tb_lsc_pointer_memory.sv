// tb_lsc_pointer_memory: a pointer memory for N = 32 (stages 1..4) and
// L = 4 under a random mix of stage writes (row := identity), copies from
// random parents and idle cycles, compared with a shadow table on every
// row of the read port after each cycle. Writes to stage 0 and to the
// channel stage must change nothing.
module tb_lsc_pointer_memory;
  import lsc_pkg::*;
  localparam int N = 32, L = 4, LOGN = $clog2(N), LW = idx_w(L);
  localparam int SW = $clog2(LOGN + 1);
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic init, we, copy;
  logic [SW-1:0] wr_stage, rd_stage;
  logic [L-1:0][LW-1:0] rd_ptr, parent;
  int sh [LOGN+1][L], nsh [LOGN+1][L];

  lsc_pointer_memory #(.N(N), .L(L)) dut (.*);

  task automatic compare();
    for (int s = 1; s < LOGN; s++) begin
      rd_stage = SW'(s);
      #1;
      for (int l = 0; l < L; l++) begin
        checks++;
        if (int'(rd_ptr[l]) != sh[s][l]) begin
          failures++;
          if (failures < 5) $display("FAIL s=%0d l=%0d", s, l);
        end
      end
    end
  endtask

  initial begin
    init = 0; we = 0; copy = 0; wr_stage = '0; rd_stage = 1; parent = '0;
    @(negedge clk);
    init = 1;
    @(negedge clk);
    init = 0;
    for (int s = 0; s <= LOGN; s++) for (int l = 0; l < L; l++) sh[s][l] = l;
    compare();
    repeat (400) begin
      automatic int op = $urandom % 3;
      @(negedge clk);
      nsh = sh;
      if (op == 0) begin
        we = 1; wr_stage = SW'($urandom % (LOGN + 1));
        if (wr_stage >= 1 && wr_stage < LOGN)
          for (int l = 0; l < L; l++) nsh[wr_stage][l] = l;
      end else if (op == 1) begin
        copy = 1;
        for (int l = 0; l < L; l++) begin
          parent[l] = LW'($urandom % L);
          for (int s = 1; s < LOGN; s++) nsh[s][l] = sh[s][parent[l]];
        end
      end
      @(negedge clk);
      we = 0; copy = 0;
      sh = nsh;
      compare();
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
