// lsc_pkg: constants and types shared by the list successive-cancellation
// (list SC) polar decoder.
//
// The default code and decoder sizes are those of the reference design:
// blocklength N = 1024, list size L = 2, P = 64 processing elements per
// decoder core and Q_ch = 3 bits per channel log-likelihood. Every module
// takes these as parameters; the constants here are only their defaults.
// The PE function code and the controller state type are shared between the
// controller, the decoder cores and the testbenches.
package lsc_pkg;

  localparam int unsigned N_DEF   = 1024;  // blocklength
  localparam int unsigned L_DEF   = 2;     // list size
  localparam int unsigned P_DEF   = 64;    // processing elements per core
  localparam int unsigned QCH_DEF = 3;     // bits per channel LL

  // Function applied by a processing element.
  typedef enum logic {
    PE_F = 1'b0,   // f: min-sum check-node style combination
    PE_G = 1'b1    // g: partial-sum controlled addition
  } pe_func_e;

  // Controller state.
  typedef enum logic [1:0] {
    ST_IDLE = 2'd0,   // waiting for start
    ST_RUN  = 2'd1,   // LL updates, one stage part per cycle
    ST_SORT = 2'd2,   // path selection (the idle cycle after each info bit)
    ST_DONE = 2'd3    // one-cycle done pulse
  } ctrl_state_e;

  // Width of a list index (at least one bit).
  function automatic int unsigned idx_w(input int unsigned n);
    return (n > 1) ? $clog2(n) : 1;
  endfunction

endpackage
