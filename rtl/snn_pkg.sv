// snn_pkg: types and constants shared by the spike-time training network.
//
// Spike times are 4-bit timestamps (Universal Time Coding). Time 15 (TMAX)
// is the virtual spike of a neuron that never fired, so it also means "no
// spike". Weights are 12-bit two's complement Q5.7, four of them packed into
// one 48-bit memory word (lane m in bits 12m+11:12m). Deltas are 10-bit Q1.9.
// A backward spike is 5 bits: a sign (1 = negative, STN) and a 4-bit time;
// time 15 again means "no spike". The widths are the paper's; the packing
// order and the saturation helpers are this design's choice.
package snn_pkg;

  localparam int T_BITS  = 4;
  localparam int TMAX    = 15;
  localparam int LANES   = 4;
  localparam int W_BITS  = 12;
  localparam int W_FRAC  = 7;
  localparam int WORD_W  = LANES * W_BITS;   // 48-bit weight word
  localparam int SWORD_W = LANES * T_BITS;   // 16-bit spike-time word
  localparam int D_BITS  = 10;
  localparam int LR_BITS = 10;

  typedef logic [T_BITS-1:0]        stime_t;
  typedef logic signed [W_BITS-1:0] weight_t;
  typedef logic signed [D_BITS-1:0] delta_t;

  typedef struct packed {
    logic   neg;   // 1: negative backward spike (STN), 0: positive (STP)
    stime_t tau;   // backward spike time, TMAX = none
  } bspike_t;

  // Layer operation issued by the controller to a layer's BRAM port.
  typedef enum logic [1:0] {
    OP_NOP  = 2'd0,
    OP_FWD  = 2'd1,   // forward integration sweep
    OP_UPD  = 2'd2,   // read-modify-write weight update
    OP_READ = 2'd3    // plain read (backpropagation or host readback)
  } layer_op_e;

  localparam weight_t W_MAX = weight_t'(2**(W_BITS-1) - 1);
  localparam weight_t W_MIN = weight_t'(-(2**(W_BITS-1)));

  // Saturating weight + increment.
  function automatic weight_t sat_add(weight_t w, logic signed [W_BITS+8:0] dw);
    logic signed [W_BITS+9:0] s;
    s = (W_BITS+10)'(w) + (W_BITS+10)'(dw);
    if (s > (W_BITS+10)'(W_MAX))      return W_MAX;
    else if (s < (W_BITS+10)'(W_MIN)) return W_MIN;
    else                              return weight_t'(s);
  endfunction

endpackage
