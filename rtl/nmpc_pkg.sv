// nmpc_pkg: types and constants shared by the KKT linear-solver accelerator.
//
// All arithmetic is IEEE-754 single precision (the paper's arithmetic). The
// package holds the 32-bit float type, the entry format of the offline MAC
// schedule used by the sparse matrix-vector lanes, the instruction format of
// the MINRES micro-program, and the MINRES program itself.
//
// Following the paper: single precision, adder latency 6 and multiplier
// latency 5, one schedule shared by all blocks, MINRES with two divisions and
// two square roots per iteration. Own choices: the field widths, the
// instruction set and the register/vector allocation of the program.
package nmpc_pkg;

  typedef logic [31:0] fp32_t;

  localparam fp32_t FP_ZERO = 32'h0000_0000;
  localparam fp32_t FP_ONE  = 32'h3F80_0000;

  localparam int unsigned LAT_MUL = 5;
  localparam int unsigned LAT_ADD = 6;

  // Widths of the schedule fields (row/column inside a block, stored value index).
  localparam int unsigned ROW_W = 8;
  localparam int unsigned NZ_W  = 8;

  // One scheduled multiply-accumulate: y[row] += a[aidx] * x[col].
  // valid = 0 is an empty slot (a bubble) in the schedule.
  typedef struct packed {
    logic             valid;
    logic [NZ_W-1:0]  aidx;
    logic [ROW_W-1:0] col;
    logic [ROW_W-1:0] row;
  } sched_t;

  // Negate a float by flipping its sign bit.
  function automatic fp32_t fp_neg(fp32_t a);
    return {~a[31], a[30:0]};
  endfunction

  // ---------------------------------------------------------------------------
  // MINRES micro-program
  // ---------------------------------------------------------------------------
  typedef enum logic [3:0] {
    OP_HALT  = 4'd0,
    OP_SLI   = 4'd1,  // s[d] = imm
    OP_SMOV  = 4'd2,  // s[d] = s[a]
    OP_SNEG  = 4'd3,  // s[d] = -s[a]
    OP_SMUL  = 4'd4,  // s[d] = s[a] * s[b]
    OP_SADD  = 4'd5,  // s[d] = s[a] + s[b]
    OP_SSUB  = 4'd6,  // s[d] = s[a] - s[b]
    OP_SDIV  = 4'd7,  // s[d] = s[a] / s[b]
    OP_SSQRT = 4'd8,  // s[d] = sqrt(s[a])
    OP_VZERO = 4'd9,  // v[d] = 0
    OP_VAXPBY= 4'd10, // v[d] = s[a]*v[va] + s[b]*v[vb]
    OP_VDOT  = 4'd11, // s[d] = v[va] . v[vb]
    OP_VSPMV = 4'd12, // v[d] = A * v[va]
    OP_BEQZ  = 4'd13, // if s[a] == 0 goto imm
    OP_LOOP  = 4'd14  // iter++ ; if iter < niter goto imm
  } op_t;

  typedef struct packed {
    op_t         op;
    logic [4:0]  d;
    logic [4:0]  a;
    logic [4:0]  b;
    logic [4:0]  va;
    logic [4:0]  vb;
    logic [31:0] imm;
  } instr_t;

  // Vector slots of the Lanczos / MINRES state.
  localparam logic [4:0] V_B = 5'd0, V_X = 5'd1, V_V = 5'd2, V_VOLD = 5'd3,
                         V_VN = 5'd4, V_AV = 5'd5, V_W = 5'd6, V_WOLD = 5'd7,
                         V_WN = 5'd8;
  localparam int unsigned NVEC = 9;

  // Scalar registers.
  localparam logic [4:0] R_ZERO = 5'd0, R_ONE = 5'd1, R_BETA = 5'd2, R_ETA = 5'd3,
                         R_GAM = 5'd4, R_GAMO = 5'd5, R_SIG = 5'd6, R_SIGO = 5'd7,
                         R_T8 = 5'd8, R_ALPHA = 5'd9, R_T10 = 5'd10, R_T11 = 5'd11,
                         R_BETAN = 5'd12, R_DELTA = 5'd13, R_RHO1 = 5'd14,
                         R_RHO2 = 5'd15, R_RHO3 = 5'd16, R_IRHO = 5'd17,
                         R_T18 = 5'd18, R_IBETA = 5'd19, R_T20 = 5'd20;

  function automatic instr_t mk(op_t op, logic [4:0] d = 0, logic [4:0] a = 0, logic [4:0] b = 0,
                                logic [4:0] va = 0, logic [4:0] vb = 0, logic [31:0] imm = 0);
    instr_t i;
    i.op = op; i.d = d; i.a = a; i.b = b; i.va = va; i.vb = vb; i.imm = imm;
    return i;
  endfunction

  localparam int unsigned PROG_LEN = 64;
  localparam int unsigned LOOP_PC  = 15;
  localparam int unsigned DONE_PC  = 59;

  // MINRES (Paige and Saunders) on A z = b, x0 = 0. Returns instruction pc.
  function automatic instr_t minres_prog(int unsigned pc);
    case (pc)
      // initialisation
      0:  return mk(OP_SLI,   R_ZERO, .imm(FP_ZERO));
      1:  return mk(OP_SLI,   R_ONE,  .imm(FP_ONE));
      2:  return mk(OP_VZERO, V_VOLD);
      3:  return mk(OP_VZERO, V_W);
      4:  return mk(OP_VZERO, V_WOLD);
      5:  return mk(OP_VZERO, V_X);
      6:  return mk(OP_VDOT,  R_BETA, .va(V_B), .vb(V_B));
      7:  return mk(OP_SSQRT, R_BETA, R_BETA);                   // beta1 = ||b||
      8:  return mk(OP_SMOV,  R_ETA, R_BETA);                    // eta = beta1
      9:  return mk(OP_SMOV,  R_GAM, R_ONE);                     // gamma = 1
      10: return mk(OP_SMOV,  R_GAMO, R_ONE);                    // gamma_old = 1
      11: return mk(OP_SMOV,  R_SIG, R_ZERO);                    // sigma = 0 (sigma_old is 0 from start)
      12: return mk(OP_BEQZ,  0, R_BETA, .imm(DONE_PC));          // b = 0: z = 0
      13: return mk(OP_VAXPBY, V_VN, R_ONE, R_ZERO, V_B, V_B);   // vn = b
      14: return mk(OP_SDIV,  R_IBETA, R_ONE, R_BETA);
      // (pc 15 is the loop head; the first pass normalises b into v)
      15: return mk(OP_VAXPBY, V_V, R_IBETA, R_ZERO, V_VN, V_VN); // v = vn/beta
      16: return mk(OP_VSPMV, V_AV, .va(V_V));                    // Lanczos: A v
      17: return mk(OP_VDOT,  R_ALPHA, .va(V_V), .vb(V_AV));      // alpha
      18: return mk(OP_SNEG,  R_T10, R_ALPHA);
      19: return mk(OP_SNEG,  R_T11, R_BETA);
      20: return mk(OP_VAXPBY, V_VN, R_ONE, R_T10, V_AV, V_V);    // vn = Av - alpha v
      21: return mk(OP_VAXPBY, V_VN, R_ONE, R_T11, V_VN, V_VOLD); //      - beta v_old
      22: return mk(OP_VDOT,  R_BETAN, .va(V_VN), .vb(V_VN));
      23: return mk(OP_SSQRT, R_BETAN, R_BETAN);                  // beta_new (sqrt 1)
      24: return mk(OP_SMUL,  R_DELTA, R_GAM, R_ALPHA);
      25: return mk(OP_SMUL,  R_T20, R_GAMO, R_SIG);
      26: return mk(OP_SMUL,  R_T20, R_T20, R_BETA);
      27: return mk(OP_SSUB,  R_DELTA, R_DELTA, R_T20);           // delta
      28: return mk(OP_SMUL,  R_T20, R_DELTA, R_DELTA);
      29: return mk(OP_SMUL,  R_T18, R_BETAN, R_BETAN);
      30: return mk(OP_SADD,  R_RHO1, R_T20, R_T18);
      31: return mk(OP_SSQRT, R_RHO1, R_RHO1);                    // rho1 (sqrt 2)
      32: return mk(OP_SMUL,  R_RHO2, R_SIG, R_ALPHA);
      33: return mk(OP_SMUL,  R_T20, R_GAMO, R_GAM);
      34: return mk(OP_SMUL,  R_T20, R_T20, R_BETA);
      35: return mk(OP_SADD,  R_RHO2, R_RHO2, R_T20);             // rho2
      36: return mk(OP_SMUL,  R_RHO3, R_SIGO, R_BETA);            // rho3
      37: return mk(OP_SDIV,  R_IRHO, R_ONE, R_RHO1);             // 1/rho1 (div 1)
      38: return mk(OP_SMOV,  R_GAMO, R_GAM);
      39: return mk(OP_SMOV,  R_SIGO, R_SIG);
      40: return mk(OP_SMUL,  R_GAM, R_DELTA, R_IRHO);            // gamma
      41: return mk(OP_SMUL,  R_SIG, R_BETAN, R_IRHO);            // sigma
      42: return mk(OP_SMUL,  R_RHO3, R_RHO3, R_IRHO);
      43: return mk(OP_SNEG,  R_RHO3, R_RHO3);
      44: return mk(OP_SMUL,  R_RHO2, R_RHO2, R_IRHO);
      45: return mk(OP_SNEG,  R_RHO2, R_RHO2);
      46: return mk(OP_VAXPBY, V_WN, R_IRHO, R_RHO3, V_V, V_WOLD);// wn = (v - rho3 w_old
      47: return mk(OP_VAXPBY, V_WN, R_ONE, R_RHO2, V_WN, V_W);  //       - rho2 w)/rho1
      48: return mk(OP_SMUL,  R_T18, R_GAM, R_ETA);
      49: return mk(OP_VAXPBY, V_X, R_ONE, R_T18, V_X, V_WN);    // x += gamma eta wn
      50: return mk(OP_SMUL,  R_ETA, R_SIG, R_ETA);
      51: return mk(OP_SNEG,  R_ETA, R_ETA);                      // eta = -sigma eta
      52: return mk(OP_VAXPBY, V_VOLD, R_ONE, R_ZERO, V_V, V_V); // shift the recurrences
      53: return mk(OP_VAXPBY, V_WOLD, R_ONE, R_ZERO, V_W, V_W);
      54: return mk(OP_VAXPBY, V_W, R_ONE, R_ZERO, V_WN, V_WN);
      55: return mk(OP_BEQZ,  0, R_BETAN, .imm(DONE_PC));         // Krylov space exhausted
      56: return mk(OP_SMOV,  R_BETA, R_BETAN);
      57: return mk(OP_SDIV,  R_IBETA, R_ONE, R_BETAN);           // 1/beta_new (div 2)
      58: return mk(OP_LOOP,  .imm(LOOP_PC));
      59: return mk(OP_HALT);
      default: return mk(OP_HALT);
    endcase
  endfunction

endpackage
