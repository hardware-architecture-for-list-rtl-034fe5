// lsc_controller: control unit of the list SC decoder.
//
// Three counters drive the whole decoder: the index k = i-1 of the bit
// being decoded, the stage s being updated and the part p_s of that stage
// (a stage of 2^s nodes takes max(1, 2^s/P) cycles on P PEs). All cores run
// in lock step, so one controller serves them all.
//
// Schedule of bit k: the stages from s0 down to 0 are updated, where s0 =
// logN-1 for k = 0 and otherwise the position of the lowest 1 of k (the
// stages above s0 still hold valid LLs). Stage s applies g if bit s of k is
// 1 and f otherwise ("func & stage"); it reads stage s+1 (the channel memory
// when s+1 = logN) and writes stage s ("MemAddr": row p_s is written; rows
// p_s and p_s + 2^s/P are read when 2^s >= P). After stage 0:
//   frozen bit, k < N-1: every path commits u = 0 in that same cycle
//                        (commit, sel_sort = 0) and the next bit starts;
//   otherwise          : the stage-0 metrics are captured (capture) and the
//                        next cycle is the path-selection cycle (ST_SORT),
//                        in which all state memories commit the sorter's
//                        choice (commit, sel_sort = 1).
// The last bit always goes through selection so that path 0 ends up the
// best. A codeword thus takes 2N + (N/P) log2(N/(4P)) + (selections) cycles
// for N >= 4P. start (in ST_IDLE) also pulses init, which clears the state
// memories; done pulses one cycle after the last selection.
// The counter set and the cycle budget follow the reference design; the
// state machine encoding is this design's choice.
module lsc_controller
  import lsc_pkg::*;
#(
  parameter int unsigned N = 1024,
  parameter int unsigned P = 64,
  localparam int unsigned LOGN = $clog2(N),
  localparam int unsigned SW   = $clog2(LOGN + 1),
  localparam int unsigned RW   = (N / P > 1) ? $clog2(N / P) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic              frozen,     // A^c bit of index k
  output ctrl_state_e       state,
  output logic              busy,
  output logic              done,
  output logic              init,
  output logic [LOGN-1:0]   k,
  output logic [SW-1:0]     stage,      // stage being written
  output logic [RW-1:0]     part,
  output pe_func_e          func,
  output logic [SW-1:0]     rd_stage,   // stage being read (stage + 1)
  output logic              from_ch,    // reading the channel memory
  output logic [RW-1:0]     rd_row_a,
  output logic [RW-1:0]     rd_row_b,
  output logic              mem_we,     // LL and pointer memory write
  output logic              capture,    // metric register load
  output logic              commit,     // state memories commit decision
  output logic              sel_sort    // commit uses the sorter's choice
);

  logic [RW:0]     nparts;
  logic            last_part;
  logic [SW-1:0]   next_s0;
  logic [LOGN-1:0] k_next;

  // first stage to update for bit index x (x != 0): lowest set bit
  function automatic logic [SW-1:0] first_stage(input logic [LOGN-1:0] x);
    first_stage = SW'(LOGN - 1);
    for (int b = int'(LOGN) - 1; b >= 0; b--)
      if (x[b]) first_stage = SW'(b);
  endfunction

  always_comb begin
    nparts    = ((1 << stage) > P) ? (RW + 1)'((1 << stage) / P) : (RW + 1)'(1);
    last_part = ((RW + 1)'(part) == nparts - 1'b1);
    k_next    = k + 1'b1;
    next_s0   = first_stage(k_next);
    func      = k[stage] ? PE_G : PE_F;
    rd_stage  = stage + 1'b1;
    from_ch   = (rd_stage == SW'(LOGN));
    if ((1 << stage) >= P) begin
      rd_row_a = part;
      rd_row_b = part + RW'((1 << stage) / P);
    end else begin
      rd_row_a = '0;
      rd_row_b = '0;
    end
    busy     = (state == ST_RUN) || (state == ST_SORT);
    done     = (state == ST_DONE);
    init     = (state == ST_IDLE) && start;
    mem_we   = (state == ST_RUN);
    capture  = (state == ST_RUN) && last_part && (stage == '0) &&
               !(frozen && k != LOGN'(N - 1));
    commit   = ((state == ST_RUN) && last_part && (stage == '0) && frozen &&
                k != LOGN'(N - 1)) || (state == ST_SORT);
    sel_sort = (state == ST_SORT);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= ST_IDLE;
      k     <= '0;
      stage <= '0;
      part  <= '0;
    end else begin
      unique case (state)
        ST_IDLE: if (start) begin
          state <= ST_RUN;
          k     <= '0;
          stage <= SW'(LOGN - 1);
          part  <= '0;
        end
        ST_RUN: begin
          if (!last_part) begin
            part <= part + 1'b1;
          end else if (stage != '0) begin
            stage <= stage - 1'b1;
            part  <= '0;
          end else if (commit) begin   // frozen bit: no selection
            k     <= k_next;
            stage <= next_s0;
            part  <= '0;
          end else begin
            state <= ST_SORT;
          end
        end
        ST_SORT: begin
          if (k == LOGN'(N - 1)) begin
            state <= ST_DONE;
          end else begin
            state <= ST_RUN;
            k     <= k_next;
            stage <= next_s0;
            part  <= '0;
          end
        end
        ST_DONE: state <= ST_IDLE;
        default: state <= ST_IDLE;
      endcase
    end
  end

  // A codeword is never restarted while it is being decoded.
  a_no_restart: assert property (@(posedge clk) disable iff (!rst_n)
    (busy |-> !init));
  // Metric capture and commit are exclusive.
  a_cap_commit: assert property (@(posedge clk) disable iff (!rst_n)
    !(capture && commit));

endmodule
