// psp_pkg: types and constants shared by the probabilistic spike propagation
// accelerator.
//
// The accelerator evaluates a spiking network in timesteps. A spike of neuron i
// is propagated to the first termpt entries of i's outgoing synapse list, sorted
// by falling weight magnitude, and every reached target receives the same
// weight w_hat (the largest weight of that list). Excitatory and inhibitory
// synapses form two separate lists per neuron ("polarity" 0 and 1).
//
// The number of piecewise-linear segments (5) is the one the paper evaluates;
// all widths and record layouts below are this design's own choices.
package psp_pkg;

  localparam int NSEG    = 5;   // PWL segments per sorted weight list
  localparam int ID_W    = 16;  // neuron identifier width
  localparam int W_W     = 16;  // synaptic weight width (signed two's complement)
  localparam int POS_W   = 16;  // position in a sorted list, list length, termpt
  localparam int ADDR_W  = 32;  // on-chip / off-chip index memory address
  localparam int V_W     = 24;  // membrane potential width (signed, saturating)
  localparam int PIX_W   = 8;   // input intensity width
  localparam int CFG_W   = 128; // configuration write data width

  typedef logic [ID_W-1:0]         neuron_id_t;
  typedef logic signed [W_W-1:0]   weight_t;
  typedef logic [POS_W-1:0]        pos_t;
  typedef logic [ADDR_W-1:0]       addr_t;
  typedef logic signed [V_W-1:0]   potential_t;

  // Polarity of a synapse list.
  typedef enum logic {POL_EXC = 1'b0, POL_INH = 1'b1} polarity_e;

  // Per neuron and polarity: where its sorted target list lives.
  // Positions [0, onc_len) are on chip at onc_base + pos; positions
  // [onc_len, n_max) are off chip at off_base + (pos - onc_len).
  typedef struct packed {
    pos_t    n_max;     // number of outgoing synapses of this polarity (N_i^max)
    weight_t w_hat;     // applied weight: w_i^max (exc) or w_i^min (inh)
    pos_t    onc_len;   // how many leading indices are kept on chip
    addr_t   onc_base;  // on-chip index memory address of position 0
    addr_t   off_base;  // off-chip address of position onc_len
  } desc_t;             // 112 bits

  // One PWL segment of a sorted weight-magnitude curve. The segment starts at
  // list position x_k with magnitude w_k; slope_k = positions per unit of
  // magnitude, unsigned Q16.16. Magnitudes w_k do not rise with k.
  typedef struct packed {
    logic [W_W-1:0] w_k;
    pos_t           x_k;
    logic [31:0]    slope_k;
  } pwl_seg_t;          // 64 bits

  // A weight update travelling from propagation to evaluation.
  typedef struct packed {
    neuron_id_t target;
    weight_t    weight;
  } update_t;

  // Configuration write targets (software side of the accelerator).
  typedef enum logic [1:0] {
    CFG_PIXEL = 2'd0,   // addr = input neuron, wdata[7:0] = intensity
    CFG_DESC  = 2'd1,   // addr = 2*neuron + polarity, wdata[111:0] = desc_t
    CFG_PWL   = 2'd2,   // addr = 8*(2*neuron + polarity) + segment, wdata[63:0] = pwl_seg_t
    CFG_ONC   = 2'd3    // addr = on-chip index slot, wdata[15:0] = neuron id
  } cfg_sel_e;

endpackage
