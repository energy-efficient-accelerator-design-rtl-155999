// dcn_pkg: types and constants shared by the deformable-convolution accelerator.
//
// Number formats. Features and weights are signed 8-bit fixed point, as the
// accelerator's PEs are 8-bit. A sampling index (alpha, beta) is an unsigned
// fixed-point number with IDX_INT integer and IDX_FRAC fraction bits. The four
// bilinear-interpolation (BLI) coefficients are signed 8-bit numbers with
// IDX_FRAC fraction bits, so 1.0 is 64 and still fits an 8-bit PE weight. The
// widths of the index, the coefficients and the accumulator are this design's
// choice; the 8-bit data width follows the paper.
//
// The command structure carries one already-decoded accelerator operation:
// the instruction encoding itself is not specified, so the top takes commands
// in this decoded form.
package dcn_pkg;

  localparam int FEAT_W   = 8;
  localparam int ACC_W    = 32;
  localparam int IDX_INT  = 10;
  localparam int IDX_FRAC = 6;
  localparam int IDX_W    = IDX_INT + IDX_FRAC;
  localparam int COEF_W   = 8;
  localparam int GRID_MAX = 8;                    // up to 8x8 tiles per map
  localparam int NT_MAX   = GRID_MAX * GRID_MAX;  // 64 tiles
  localparam int TID_W    = $clog2(NT_MAX);

  typedef logic signed [FEAT_W-1:0] feat_t;
  typedef logic signed [ACC_W-1:0]  acc_t;
  typedef logic signed [COEF_W-1:0] coef_t;
  typedef logic [IDX_W-1:0]         idx_t;

  // One sampling location as stored in the index buffer.
  typedef struct packed {
    idx_t alpha;
    idx_t beta;
  } idx_pair_t;

  // BLI coefficients in PE order inside a cluster: eta, mu, theta, gamma,
  // multiplying the lb, lt, rb, rt neighbours respectively.
  typedef struct packed {
    coef_t eta;
    coef_t mu;
    coef_t theta;
    coef_t gamma;
  } bli_coef_t;

  // Corner order used by the address converter (Eq. 4 names).
  typedef enum logic [1:0] {
    C_LB = 2'd0,   // (floor a, floor b)
    C_RB = 2'd1,   // (ceil a,  floor b)
    C_LT = 2'd2,   // (floor a, ceil b)
    C_RT = 2'd3    // (ceil a,  ceil b)
  } corner_e;

  typedef enum logic [2:0] {
    OP_NOP   = 3'd0,
    OP_CONV  = 3'd1,   // output-stationary matrix multiply on the array
    OP_BLI   = 3'd2,   // deformed features from indices, into the output buffer
    OP_TDT   = 3'd3,   // build the tile dependency table from the indices
    OP_SCHED = 3'd4    // start the runtime tile scheduler
  } op_e;

  typedef struct packed {
    op_e         op;
    logic        swap;      // CONV: 0 in->out buffer, 1 out->in buffer (fusion)
    logic [15:0] len;       // CONV: reduction length K; BLI/TDT: number of indices
    logic [15:0] a_base;    // CONV: feature slice address; BLI/TDT: index base
    logic [15:0] w_base;    // CONV: weight word address;   BLI: coefficient base
    logic [15:0] o_base;    // CONV/BLI: destination word address
    logic [4:0]  shift;     // CONV: requantisation shift
    logic [15:0] cfg_i;     // BLI: channel groups ceil(c/(A/4))
    logic [15:0] cfg_j;     // BLI: H/2
    logic [15:0] cfg_t0;    // BLI: base index T0
    logic [15:0] per_tile;  // TDT: indices per output tile
  } cmd_t;

  // Saturate an accumulator to a feature after an arithmetic right shift.
  function automatic feat_t requant(acc_t v, logic [4:0] sh);
    acc_t s;
    s = v >>> sh;
    if (s > acc_t'(127))       return feat_t'(127);
    else if (s < acc_t'(-128)) return feat_t'(-128);
    else                       return feat_t'(s);
  endfunction

  // Number of ones in a tile bit vector (the NZ bit counter).
  function automatic logic [TID_W:0] popcount(logic [NT_MAX-1:0] v);
    logic [TID_W:0] n;
    n = '0;
    for (int k = 0; k < NT_MAX; k++) n += (TID_W+1)'(v[k]);
    return n;
  endfunction

endpackage
