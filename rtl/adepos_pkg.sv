// adepos_pkg: constants and types shared by the ADEPOS anomaly-detection datapath.
//
// The network size follows the configuration the design is built for: an ensemble of
// NBL_MAX = 9 boundary-mode ELM base learners with L = 20 hidden neurons each, fed by
// D = 5 time-domain features quantised to 6-bit unsigned integers. Arithmetic is 16-bit
// (16x16 multiplier) with 32-bit accumulators.
//
// Parameter memory layout (this design's own choice). Each base learner occupies
// BL_WORDS = BL_HDR + L*(D+2) consecutive 16-bit words:
//   word 0,1 : output target R (low, high half of a signed 32-bit value)
//   word 2,3 : threshold lambda (low, high half of an unsigned 32-bit value)
//   then for every hidden neuron j = 0..L-1, D+2 words:
//            b_j, W_j0 .. W_j(D-1), beta_j          (all signed 16-bit)
// Base learner k starts at word k*BL_WORDS.
// With the optional neuron-generation variant the layout is different: a shared block of
// physical neurons first, then smaller per-learner blocks (see elm_bl_ng).
package adepos_pkg;

  parameter int unsigned L       = 20;  // hidden neurons per base learner
  parameter int unsigned NBL_MAX = 9;   // base learners in the ensemble
  parameter int unsigned D       = 5;   // input features
  parameter int unsigned X_W     = 6;   // feature width (unsigned integer)
  parameter int unsigned WORD_W  = 16;  // data word / multiplier operand width
  parameter int unsigned ACC_W   = 32;  // accumulator width
  parameter int unsigned BL_HDR  = 4;   // header words per base learner
  parameter int unsigned NBL_W   = 4;   // width of an N_BL count (0..15)

  // words occupied by one base learner
  function automatic int unsigned bl_words(input int unsigned l, input int unsigned d);
    return BL_HDR + l * (d + 2);
  endfunction

  // Neuron generation (optional variant, see elm_bl_ng): number of physical neurons
  // needed so that their pairwise differences give nbl*l distinct virtual neurons, i.e.
  // the smallest n with n*(n-1)/2 >= nbl*l, which equals ceil((1+sqrt(1+8*nbl*l))/2).
  function automatic int unsigned ng_phys(input int unsigned nbl, input int unsigned l);
    int unsigned n;
    n = 2;
    while (n * (n - 1) / 2 < nbl * l) n++;
    return n;
  endfunction

  // words of the shared physical-neuron block: per neuron b_m, W_m0 .. W_m(D-1)
  function automatic int unsigned ng_phys_words(input int unsigned lphy, input int unsigned d);
    return lphy * (d + 1);
  endfunction

  // words per base learner with neuron generation: header, then per virtual neuron a
  // pair word {index_a[7:0], index_b[7:0]} and beta
  function automatic int unsigned ng_bl_words(input int unsigned l);
    return BL_HDR + 2 * l;
  endfunction

  // multiplier operations (named after the MSP430 hardware multiplier registers)
  typedef enum logic [1:0] {
    OP_MPY  = 2'd0,  // acc = a*b, unsigned
    OP_MPYS = 2'd1,  // acc = a*b, signed
    OP_MAC  = 2'd2,  // acc += a*b, unsigned
    OP_MACS = 2'd3   // acc += a*b, signed
  } mac_op_e;

  // host (UART) command bytes
  localparam logic [7:0] CMD_WPROG = 8'h57;  // 'W' addr_hi addr_lo data_hi data_lo
  localparam logic [7:0] CMD_WDATA = 8'h58;  // 'X' index data
  localparam logic [7:0] CMD_START = 8'h53;  // 'S' run one inference on the stored sample

  // result of one inference, as returned to the host
  typedef struct packed {
    logic             declare_fault;  // N_BL reached NBL_MAX and the vote still says fault
    logic             vote_fault;     // majority vote of the last evaluated ensemble
    logic [1:0]       rsvd;
    logic [NBL_W-1:0] n_bl;           // number of active base learners after the decision
  } result_t;

endpackage
