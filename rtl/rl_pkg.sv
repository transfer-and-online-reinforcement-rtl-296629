// rl_pkg: shared types, constants and fixed-point helpers of the logic die.
//
// Number format: every activation, weight, gradient and pSUM is a 16-bit signed
// fixed-point value, as the paper states (16-bit fixed point). The split between
// integer and fraction bits is not given; this design uses Q8.8 (FRAC_BITS = 8).
// Products are truncated toward minus infinity (arithmetic shift) and every
// addition saturates to the 16-bit range.
//
// A PE link is 128 bits wide (paper: 128-bit connections between PEs). It is
// read as LANES = 8 lanes of 16 bits, one lane per MAC of the PE.
//
// The array command (pe_cmd_t) is this design's own micro-operation set: the paper
// describes the dataflows (row-stationary convolution, vertical and row-wise pSUM
// accumulation, row/column vector propagation) but no instruction encoding.
package rl_pkg;

  localparam int DATA_W    = 16;               // paper: 16 bit fixed-point
  localparam int FRAC_BITS = 8;                // assumed Q8.8
  localparam int LANES     = 8;                // paper: 8 MACs, 8 comparators per PE
  localparam int LINK_W    = DATA_W * LANES;   // paper: 128-bit links
  localparam int RF_AW     = 9;                // RF address width (288 words need 9 bits)
  localparam int N_ACTIONS = 5;                // paper: A = {0,1,2,3,4}

  typedef logic signed [DATA_W-1:0] fx_t;
  typedef fx_t [LANES-1:0]          vec_t;     // one 128-bit link word

  // PE micro-operations. "nbr" values are the registered outputs of the
  // neighbouring PE, so every move is one hop per clock.
  typedef enum logic [4:0] {
    PE_NOP       = 5'd0,
    PE_RF_WR_BUS = 5'd1,   // RF[a]  <= broadcast bus word of this column
    PE_X_SH_E    = 5'd2,   // X      <= X of west neighbour (vector moves east)
    PE_X_SH_S    = 5'd3,   // X      <= X of north neighbour (vector moves down)
    PE_X_SH_W    = 5'd4,   // X      <= X of east neighbour (vector moves west)
    PE_X_SH_DIAG = 5'd5,   // X      <= X of lower-left neighbour (moves to upper right)
    PE_X_LD_RF   = 5'd6,   // X      <= RF[a]
    PE_X_ST_RF   = 5'd7,   // RF[a]  <= X
    PE_X_LD_ACC  = 5'd8,   // X      <= ACC
    PE_ACC_CLR   = 5'd9,   // ACC    <= 0
    PE_ACC_LD_RF = 5'd10,  // ACC    <= RF[a]
    PE_ACC_ST_RF = 5'd11,  // RF[a]  <= ACC
    PE_MAC_X     = 5'd12,  // ACC[k] <= ACC[k] + X[lane] * RF[a][k]
    PE_MAC_RF    = 5'd13,  // ACC[k] <= ACC[k] + RF[b][lane] * RF[a][k]
    PE_DOT       = 5'd14,  // ACC[lane] <= ACC[lane] + sum_k X[k] * RF[a][k]
    PE_PS_ADD_S  = 5'd15,  // ACC    <= ACC + ACC of south neighbour (vertical pSUM)
    PE_PS_ADD_W  = 5'd16,  // ACC    <= ACC + ACC of west neighbour (row-wise pSUM)
    PE_PS_MOV_S  = 5'd17,  // ACC    <= ACC of south neighbour (drain toward row 0)
    PE_ACC_ADD_X = 5'd18,  // ACC    <= ACC + X
    PE_RELU      = 5'd19,  // ACC[k] <= max(ACC[k], 0)
    PE_MAXP_RF   = 5'd20   // ACC[k] <= max(ACC[k], RF[a][k])
  } pe_op_e;

  typedef struct packed {
    pe_op_e           op;
    logic [RF_AW-1:0] addr_a;  // RF address of the 8-lane operand / write address
    logic [RF_AW-1:0] addr_b;  // RF address of the scalar operand (PE_MAC_RF)
    logic [2:0]       lane;    // lane that supplies the scalar / receives the dot product
  } pe_cmd_t;


  // Datapath controls produced by the per-PE control unit (pe_ctrl).
  typedef enum logic [2:0] {
    ALU_MAC  = 3'd0,  // acc[k] + scalar * w[k]
    ALU_DOT  = 3'd1,  // acc[lane] + sum_k x[k] * w[k]
    ALU_ADD  = 3'd2,  // acc[k] + addend[k]
    ALU_RELU = 3'd3,  // max(acc[k], 0)
    ALU_MAX  = 3'd4   // max(acc[k], w[k])
  } alu_fn_e;

  typedef enum logic [1:0] {RFW_BUS, RFW_X, RFW_ACC}              rf_wsel_e;
  typedef enum logic [2:0] {XS_W, XS_N, XS_E, XS_DIAG, XS_RF, XS_ACC} x_sel_e;
  typedef enum logic [1:0] {AS_ALU, AS_ZERO, AS_RF, AS_SOUTH}     acc_sel_e;
  typedef enum logic [1:0] {AD_SOUTH, AD_WEST, AD_X}               addend_sel_e;

  typedef struct packed {
    logic        rf_we;
    rf_wsel_e    rf_wsel;
    logic        x_we;
    x_sel_e      x_sel;
    logic        acc_we;
    acc_sel_e    acc_sel;
    alu_fn_e     alu_fn;
    logic        scalar_from_x;   // 1: scalar = X[lane], 0: scalar = RF[b][lane]
    addend_sel_e addend_sel;
  } pe_ctl_t;

  // Operations of the global-buffer port that faces the array.
  typedef enum logic [2:0] {
    GB_NONE     = 3'd0,
    GB_RD       = 3'd1,  // read word: drives broadcast bus and both array edges next cycle
    GB_WR_NORTH = 3'd2,  // write the accumulators of PE row 0
    GB_WR_EAST  = 3'd3,  // write the accumulators of the last PE column
    GB_WR_QERR  = 3'd4   // write the Q-unit error vector (lanes 0..4 of slice 0)
  } gb_op_e;

  // Q-unit operations.
  typedef enum logic [1:0] {
    Q_NONE   = 2'd0,
    Q_SELECT = 2'd1,     // latch Q(s,.) and pick the action
    Q_TARGET = 2'd2      // take Q(s',.), form r + gamma*max Q(s',.) and the error
  } q_op_e;

  function automatic fx_t fx_sat(input logic signed [47:0] v);
    if (v > 48'sd32767)       return 16'sh7fff;
    else if (v < -48'sd32768) return 16'sh8000;
    else                      return fx_t'(v[DATA_W-1:0]);
  endfunction

  function automatic fx_t fx_add(input fx_t a, input fx_t b);
    return fx_sat(48'(a) + 48'(b));
  endfunction

  function automatic fx_t fx_mul(input fx_t a, input fx_t b);
    logic signed [31:0] p;
    p = 32'(a) * 32'(b);
    return fx_sat(48'(p >>> FRAC_BITS));
  endfunction

  function automatic fx_t fx_max(input fx_t a, input fx_t b);
    return (a > b) ? a : b;
  endfunction

endpackage
