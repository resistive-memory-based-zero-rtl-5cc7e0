// lsm_pkg: constants and types shared by the liquid-state-machine (LSM)
// zero-shot learning datapath.
//
// The design encodes event streams with a fixed, random, recurrent spiking
// network whose synapses are the conductances of a 512x512 resistive
// crossbar, counts the spikes of its 200 leaky integrate-and-fire neurons over
// a time window, and maps the counts through a trainable fully connected
// layer into either class scores or an embedding that is matched by cosine
// similarity against stored embeddings of another modality.
//
// Sizes that come from the published system: 512x512 array, 64 rows driven in
// parallel, 14-bit ADC, 200 recurrent neurons, 256 vision inputs (16x16
// pixels), 64 audio inputs (frequency channels), 64-dimensional projection.
// Word widths and the row map of the shared array are this design's choice.
package lsm_pkg;

  // Crossbar and its read chain
  localparam int XB_ROWS   = 512;   // rows (bit lines) of the array
  localparam int XB_COLS   = 512;   // columns of the array
  localparam int ROW_GROUP = 64;    // rows driven together in one read
  localparam int N_GROUPS  = XB_ROWS / ROW_GROUP;
  localparam int ADC_W     = 14;    // ADC resolution
  localparam int G_W       = 8;     // conductance code, LSB = 0.25 uS

  // LSM sizes
  localparam int H         = 200;   // recurrent LIF neurons
  localparam int U_VIS     = 256;   // vision inputs (16x16 crop)
  localparam int U_AUD     = 64;    // audio inputs (frequency bands)
  localparam int U_MAX     = 256;   // widest input vector
  localparam int VIS_IN_BASE = 0;   // first vision input row
  localparam int AUD_IN_BASE = 192; // first audio input row
  localparam int REC_BASE  = 256;   // first recurrent row (rows 256..455)

  // Word widths
  localparam int CUR_W     = 18;    // summed synaptic current
  localparam int U_W       = 16;    // membrane potential
  localparam int CNT_W     = 8;     // spike counter
  localparam int W_W       = 8;     // projection weight
  localparam int B_W       = 24;    // projection bias
  localparam int Z_W       = 16;    // projected feature
  localparam int ACC_W     = 40;    // similarity accumulators

  // Projection / readout
  localparam int P         = 64;    // projection dimension
  localparam int NMOD      = 2;     // one weight set per modality
  localparam int NGAL      = 32;    // gallery entries for zero-shot search

  typedef enum logic [0:0] {
    MOD_VISION = 1'b0,
    MOD_AUDIO  = 1'b1
  } modality_e;

  typedef enum logic [1:0] {
    OP_CLASSIFY = 2'd0,   // encode, readout layer, argmax
    OP_ENROLL   = 2'd1,   // encode, project, store in gallery slot
    OP_QUERY    = 2'd2    // encode, project, search gallery
  } op_e;

  // Run-time LIF hyper-parameters (grid-searched in the published work)
  typedef struct packed {
    logic signed [U_W-1:0] u_th;       // firing threshold
    logic signed [U_W-1:0] u_rest;     // resting / reset potential
    logic        [3:0]     leak_shift; // 1/tau_mem = 2^-leak_shift
    logic        [3:0]     in_shift;   // 1/c_mem   = 2^-in_shift
  } lif_cfg_t;

endpackage
