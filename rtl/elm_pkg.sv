// Shared types and constants of the random-feature ELM system.
//
// The chip (D-ELM) produces one raw spike count per hidden neuron per
// conversion; the FPGA side turns the count stream into activations and feeds
// either the cognizance checker or the output layer.  The two record types
// below are the words of those two streams.  Sizes follow the paper: a 14-bit
// count bus (C<13:0> in the chip block diagram), 8-bit RLSU activations,
// up to 12800 virtual hidden neurons (100 reruns of 128 physical neurons).
package elm_pkg;

  localparam int unsigned CW     = 14;     // counter / scanner bus width
  localparam int unsigned HB     = 8;      // quantised RLSU activation width
  localparam int unsigned L_VIRT_MAX = 12800;  // largest number of virtual hidden neurons
  localparam int unsigned IDX_W  = $clog2(L_VIRT_MAX);  // 14 bits of hidden index

  // Activation function of the hidden layer.
  typedef enum logic {
    NL_RLSU     = 1'b0,   // rectified linear saturating unit, eq. (4)
    NL_TRISTATE = 1'b1    // +1 / 0 / -1, eq. (5)
  } nl_mode_e;

  // Which saturation level an activation sits at (for the cognizance check).
  typedef enum logic [1:0] {
    SAT_NONE = 2'd0,      // RLSU strictly between 0 and th
    SAT_LOW  = 2'd1,      // RLSU at 0, tristate at -1
    SAT_ZERO = 2'd2,      // tristate at 0
    SAT_HIGH = 2'd3       // RLSU at th, tristate at +1
  } sat_e;

  // Raw count of one virtual hidden neuron, as scanned off the chip.
  typedef struct packed {
    logic             valid;
    logic             last;    // last neuron of the image
    logic [IDX_W-1:0] idx;     // virtual hidden index j = r*N + n
    logic [CW-1:0]    count;   // h_j
  } hid_t;

  // Activation H_j of one hidden neuron.
  typedef struct packed {
    logic             valid;
    logic             last;
    logic [IDX_W-1:0] idx;
    logic [HB-1:0]    mag;     // RLSU: quantised value 0..255; tristate: 1 if non-zero
    logic             neg;     // tristate: -1
    sat_e             sat;
  } act_t;

endpackage
