// ff_pkg: constants and types shared by the sparse SNN accelerator.
//
// The accelerator runs integer-only inference of a spiking CNN: 4-bit
// weights, 1-bit spikes, per-channel integer bias and threshold. The number
// of time steps T=4, the 4-bit weight width and tau_m=2 come from the paper's
// evaluation; the bias, membrane and threshold widths are this design's own
// choice (the paper does not give them).
package ff_pkg;
  localparam int unsigned T_STEPS = 4;   // time steps per inference
  localparam int unsigned WW      = 4;   // weight width (signed)
  localparam int unsigned BW      = 8;   // bias width (signed), assumed
  localparam int unsigned VW      = 16;  // membrane / threshold width, assumed

  // Selector of the parameter RAM written by the configuration port.
  typedef enum logic [1:0] {
    CFG_MASK   = 2'd0,   // bitmap mask RAM, one PCI-bit word per vector
    CFG_WEIGHT = 2'd1,   // non-zero weight RAM
    CFG_BIAS   = 2'd2,   // per-channel bias RAM
    CFG_VTH    = 2'd3    // per-channel threshold RAM
  } cfg_sel_e;

  // One operation issued by the weight-retrieval logic to the neuron.
  typedef enum logic [1:0] {
    OP_NONE = 2'd0,
    OP_PAIR = 2'd1,      // accumulate one non-zero weight
    OP_BIAS = 2'd2       // add bias, update membrane, emit spike
  } op_kind_e;

  function automatic int unsigned clog2_min1(int unsigned v);
    return (v <= 1) ? 1 : $clog2(v);
  endfunction
endpackage
