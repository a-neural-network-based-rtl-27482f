// onlad_pkg: types, constants and fixed-point helpers shared by the ONLAD core.
//
// Number format: every matrix element, input value, forgetting factor and score is a
// 32-bit signed fixed-point number with 10 integer bits (sign included) and 22
// fraction bits (Q10.22), as printed in the packet-format figure. Products are formed
// at full width and shifted right by 22 with truncation toward minus infinity; every
// conversion back to 32 bits saturates. Rounding and saturation are this design's
// choice: the paper only names the 32-bit format.
//
// The 3-bit mode codes are the ones printed in the packet-format figure. The order of
// the four parameter targets inside 3'b000..3'b011 (alpha, beta, P, b) follows the
// order in which the core's block diagram lists them; the paper does not print it.
//
// Memory ports are carried as two structs: mem_req_t (LANES read addresses plus LANES
// write enables/addresses/data) and mem_rsp_t (LANES read data, valid in the same
// cycle as the address). LANES = 2 follows the unrolling factor of 2 in the paper.
package onlad_pkg;

  localparam int FX_W    = 32;   // word width (paper: 32-bit fixed point)
  localparam int FX_FRAC = 22;   // fraction bits (paper: decimal 22-bit)
  localparam int IDX_W   = 29;   // index field of a packet (paper: 29-bit unsigned)
  localparam int LANES   = 2;    // arithmetic units per matrix operation (paper: factor 2)
  localparam int ACC_W   = 80;   // accumulator: a Q20.44 product sum plus guard bits
  localparam int RECIP_W = 48;   // reciprocal word, Q26.22, holds 1/x for x >= 2^-22

  typedef logic signed [FX_W-1:0]    fx_t;
  typedef logic        [IDX_W-1:0]   idx_t;
  typedef logic signed [ACC_W-1:0]   acc_t;
  typedef logic signed [RECIP_W-1:0] recip_t;

  localparam fx_t FX_ONE = fx_t'(1) <<< FX_FRAC;
  localparam fx_t FX_MAX = {1'b0, {(FX_W-1){1'b1}}};
  localparam fx_t FX_MIN = {1'b1, {(FX_W-1){1'b0}}};
  // epsilon = 1e-4 (paper), 1e-4 * 2^22 = 419.4 -> 419
  localparam fx_t FX_EPS = fx_t'(419);

  // Mode field of an input packet (3 most significant bits)
  typedef enum logic [2:0] {
    MODE_ALPHA   = 3'b000,
    MODE_BETA    = 3'b001,
    MODE_P       = 3'b010,
    MODE_B       = 3'b011,
    MODE_INPUT   = 3'b100,
    MODE_FF      = 3'b101,
    MODE_TRAIN   = 3'b110,
    MODE_PREDICT = 3'b111
  } mode_e;

  // 64-bit input packet: mode[63:61], index[60:32], value[31:0]
  typedef struct packed {
    mode_e mode;
    idx_t  index;
    fx_t   value;
  } in_pkt_t;

  // What an output packet carries
  typedef enum logic [1:0] {
    OUT_UNUSED  = 2'd0,
    OUT_SUCCESS = 2'd1,
    OUT_SCORE   = 2'd2
  } out_kind_e;

  // Which unit drives the memory buses
  typedef enum logic [1:0] {
    OWN_HOST    = 2'd0,
    OWN_TRAIN   = 2'd1,
    OWN_PREDICT = 2'd2
  } owner_e;

  typedef struct packed {
    logic [LANES-1:0]       we;
    idx_t [LANES-1:0]       waddr;
    fx_t  [LANES-1:0]       wdata;
    idx_t [LANES-1:0]       raddr;
  } mem_req_t;

  typedef struct packed {
    fx_t [LANES-1:0] rdata;
  } mem_rsp_t;

  localparam mem_req_t MEM_REQ_IDLE = '0;

  // Parameter-buffer write coming from the packet parser
  typedef struct packed {
    logic  valid;
    mode_e target;
    idx_t  index;
    fx_t   value;
  } host_wr_t;

  // Saturate a wide signed value to 32 bits
  function automatic fx_t fx_sat(input acc_t v);
    if (v > acc_t'(FX_MAX))      return FX_MAX;
    else if (v < acc_t'(FX_MIN)) return FX_MIN;
    else                         return fx_t'(v);
  endfunction

  // Accumulated Q.44 product sum -> Q10.22
  function automatic fx_t fx_from_acc(input acc_t a);
    return fx_sat(a >>> FX_FRAC);
  endfunction

  // Full-width product of two Q10.22 values (Q20.44), sign-extended
  function automatic acc_t fx_prod(input fx_t a, input fx_t b);
    logic signed [2*FX_W-1:0] p;
    p = a * b;
    return acc_t'(p);
  endfunction

  function automatic fx_t fx_mul(input fx_t a, input fx_t b);
    return fx_from_acc(fx_prod(a, b));
  endfunction

  // Q10.22 times a Q26.22 reciprocal
  function automatic fx_t fx_mul_recip(input fx_t a, input recip_t r);
    logic signed [FX_W+RECIP_W-1:0] p;
    p = a * r;
    return fx_from_acc(acc_t'(p));
  endfunction

  function automatic fx_t fx_add(input fx_t a, input fx_t b);
    return fx_sat(acc_t'(a) + acc_t'(b));
  endfunction

  function automatic fx_t fx_sub(input fx_t a, input fx_t b);
    return fx_sat(acc_t'(a) - acc_t'(b));
  endfunction

endpackage
