// epur_pkg: types, constants and arithmetic shared by the LSTM processing unit.
//
// Number format: all datapath values are 32-bit floating point (sign, 8-bit
// biased exponent, 23-bit fraction). Zero exponent is treated as zero
// (denormals flushed), results are truncated rather than rounded, and an
// exponent overflow saturates to infinity; NaN is not produced on purpose.
// The arithmetic is written as functions so the pipelined unit modules
// (fp_add, fp_mul, fp_exp, fp_rcp, fp_cmp) and the dot-product tree share one
// definition.
//
// The Multifunctional Unit (MU) program of each gate is also defined here as
// a constant table (mu_prog). It follows the step list of the reference
// design's MU table: peephole product, bias, sigmoid as 1/(1+e^-x), tanh as
// (e^x-e^-x)/(e^x+e^-x), the cell-state update and the output product, with
// the MWL partial (dequantised forward-connection result) added first.
package epur_pkg;

  localparam int NGATES = 4;

  // Gate / Computation Unit index
  typedef enum logic [1:0] {
    G_INPUT  = 2'd0,
    G_FORGET = 2'd1,
    G_CELL   = 2'd2,
    G_OUTPUT = 2'd3
  } gate_e;

  localparam logic [31:0] FP_ONE   = 32'h3F80_0000;
  localparam logic [31:0] FP_LOG2E = 32'h3FB8_AA3B;  // 1.4426950
  localparam logic [31:0] FP_Q127  = 32'h42FE_0000;  // 127.0

  // ------------------------------------------------------------------
  // Floating-point arithmetic
  // ------------------------------------------------------------------
  function automatic logic [31:0] fp_mul_f(input logic [31:0] a, input logic [31:0] b);
    logic        s;
    logic [47:0] p;
    logic [9:0]  e;
    logic [22:0] f;
    s = a[31] ^ b[31];
    if (a[30:23] == 8'd0 || b[30:23] == 8'd0) return {s, 31'd0};
    p = {1'b1, a[22:0]} * {1'b1, b[22:0]};
    if (p[47]) begin
      f = p[46:24];
      e = {2'b00, a[30:23]} + {2'b00, b[30:23]} - 10'd126;
    end else begin
      f = p[45:23];
      e = {2'b00, a[30:23]} + {2'b00, b[30:23]} - 10'd127;
    end
    if (e[9] || e == 10'd0) return {s, 31'd0};          // underflow
    if (e >= 10'd255) return {s, 8'hFF, 23'd0};         // overflow
    return {s, e[7:0], f};
  endfunction

  function automatic logic [31:0] fp_add_f(input logic [31:0] a, input logic [31:0] b);
    logic [31:0] l, s;
    logic [7:0]  d;
    logic [26:0] ml, ms;   // 1.f with three extra low bits
    logic [27:0] sum;
    logic [8:0]  e;
    int          lz;
    if (b[30:23] == 8'd0) return (a[30:23] == 8'd0) ? 32'd0 : a;
    if (a[30:23] == 8'd0) return b;
    if (a[30:0] >= b[30:0]) begin l = a; s = b; end
    else begin l = b; s = a; end
    d  = l[30:23] - s[30:23];
    ml = {1'b1, l[22:0], 3'b000};
    ms = (d > 8'd26) ? 27'd0 : ({1'b1, s[22:0], 3'b000} >> d);
    e  = {1'b0, l[30:23]};
    if (l[31] == s[31]) begin
      sum = {1'b0, ml} + {1'b0, ms};
      if (sum[27]) begin
        sum = sum >> 1;
        e   = e + 9'd1;
      end
      if (e >= 9'd255) return {l[31], 8'hFF, 23'd0};
      return {l[31], e[7:0], sum[25:3]};
    end
    sum = {1'b0, ml} - {1'b0, ms};
    if (sum == 28'd0) return 32'd0;
    lz = 0;
    for (int i = 26; i >= 0; i--) begin
      if (sum[i]) break;
      lz++;
    end
    if ({23'd0, e} <= lz) return 32'd0;                  // underflow
    sum = sum << lz;
    e   = e - 9'(lz);
    return {l[31], e[7:0], sum[25:3]};
  endfunction

  function automatic logic [31:0] fp_neg_f(input logic [31:0] a);
    return {~a[31], a[30:0]};
  endfunction

  // e^x = 2^(x*log2(e)). The product is turned into a signed Q8.23 fixed
  // point number; its integer part becomes the exponent and 2^frac is
  // evaluated with the series of e^(frac*ln2) up to the 8th power, in Q2.30.
  function automatic logic [31:0] fp_exp_f(input logic [31:0] a);
    logic [31:0] y;
    int          sh;
    logic [31:0] mag;     // |y| in Q8.23
    logic signed [32:0] fx;
    logic signed [32:0] n;
    logic [22:0] fr;
    logic [63:0] z, acc, t;
    int          ebias;
    if (a[30:23] == 8'd0) return FP_ONE;
    y  = fp_mul_f(a, FP_LOG2E);
    sh = int'(y[30:23]) - 127;
    if (sh >= 7) return y[31] ? 32'd0 : 32'h7F80_0000;   // |y| >= 128
    if (sh < -24) return FP_ONE;
    if (sh >= 0) mag = {8'd0, 1'b1, y[22:0]} << sh;
    else         mag = {8'd0, 1'b1, y[22:0]} >> (-sh);
    fx = y[31] ? -$signed({1'b0, mag}) : $signed({1'b0, mag});
    n  = fx >>> 23;                      // floor
    fr = fx[22:0];
    // z = frac * ln2 in Q0.30 (ln2 = 0x2C5C85FE in Q0.30)
    z   = ({41'd0, fr} * 64'h2C5C_85FE) >> 23;
    // Horner: 1 + z(1 + z/2(1 + z/3(... (1 + z/8))))
    acc = 64'd1 << 30;
    for (int k = 8; k >= 1; k--) begin
      t   = (z * acc) >> 30;
      acc = (64'd1 << 30) + t / 64'(k);
    end
    // acc in [1,2) as Q2.30
    ebias = int'(n) + 127;
    if (acc[31]) begin            // rounding pushed it to 2.0
      acc   = acc >> 1;
      ebias = ebias + 1;
    end
    if (ebias <= 0)  return 32'd0;
    if (ebias >= 255) return 32'h7F80_0000;
    return {1'b0, 8'(ebias), acc[29:7]};
  endfunction

  // 1/x by integer division of the significand.
  function automatic logic [31:0] fp_rcp_f(input logic [31:0] a);
    logic [47:0] q;
    int          e;
    if (a[30:23] == 8'd0) return {a[31], 8'hFF, 23'd0};
    if (a[22:0] == 23'd0) begin
      e = 254 - int'(a[30:23]);
      if (e <= 0) return {a[31], 31'd0};
      return {a[31], 8'(e), 23'd0};
    end
    q = (48'd1 << 47) / {24'd0, 1'b1, a[22:0]};   // in (2^23, 2^24)
    e = 253 - int'(a[30:23]);
    if (e <= 0) return {a[31], 31'd0};
    return {a[31], 8'(e), q[22:0]};
  endfunction

  // Ordering of two FP values: returns {lt, eq, gt}
  function automatic logic [2:0] fp_cmp_f(input logic [31:0] a, input logic [31:0] b);
    logic [31:0] x, y;
    logic        lt, eq;
    x = (a[30:23] == 8'd0) ? 32'd0 : a;
    y = (b[30:23] == 8'd0) ? 32'd0 : b;
    eq = (x == y);
    if (x[31] != y[31]) lt = x[31];
    else if (x[31])     lt = (x[30:0] > y[30:0]);
    else                lt = (x[30:0] < y[30:0]);
    return {lt, eq, !lt && !eq};
  endfunction

  // Round half away from zero of |a| < 128 to an integer magnitude.
  function automatic logic [7:0] fp_round_mag_f(input logic [31:0] a);
    logic [31:0] m;
    int          sh;
    if (a[30:23] == 8'd0) return 8'd0;
    sh = int'(a[30:23]) - 127;          // value = 1.f * 2^sh
    if (sh < -1) return 8'd0;
    if (sh > 7)  return 8'd255;
    // Q9.23 then add one half (bit 22) and keep the integer part
    m = {8'd0, 1'b1, a[22:0]};
    if (sh >= 0) m = m << sh;
    else         m = m >> 1;
    m = m + 32'h0040_0000;
    return (m[31:23] > 9'd255) ? 8'd255 : m[30:23];
  endfunction

  // ------------------------------------------------------------------
  // MU program
  // ------------------------------------------------------------------
  typedef enum logic [4:0] {
    OP_END,   // end of program for this element
    OP_DPU,   // rd = DPU output
    OP_DEQ,   // rd = dequantised MWL partial of this neuron
    OP_LDW,   // rd = weight buffer scalar: imm 0 = bias, 1 = peephole weight
    OP_LDC,   // rd = c_{t-1}[k] from the input buffer (0 at the first step)
    OP_LDK,   // rd = 1.0
    OP_LDB,   // rd = quantisation scale beta
    OP_ADD,   // rd = ra + rb
    OP_SUB,   // rd = ra - rb
    OP_MUL,   // rd = ra * rb
    OP_NEG,   // rd = -ra
    OP_EXP,   // rd = e^ra
    OP_RCP,   // rd = 1/ra
    OP_QNT,   // quantise ra to 8 bits and store it as MWL partial
    OP_RECV,  // rd = next value on incoming link imm
    OP_SEND,  // outgoing link <= ra
    OP_WRC,   // broadcast c_t = ra to the input buffers
    OP_WRH    // broadcast h_t = ra to the input buffers and the OM
  } mu_op_e;

  typedef struct packed {
    mu_op_e     op;
    logic [2:0] rd;
    logic [2:0] ra;
    logic [2:0] rb;
    logic       imm;   // operand select for LDW / RECV
    logic       pp;    // skipped when peephole connections are off
  } mu_instr_t;

  localparam int MU_PROG_LEN = 32;

  function automatic mu_instr_t I(mu_op_e op, int rd = 0, int ra = 0, int rb = 0,
                                  bit imm = 1'b0, bit pp = 1'b0);
    mu_instr_t x;
    x.op = op; x.rd = 3'(rd); x.ra = 3'(ra); x.rb = 3'(rb); x.imm = imm; x.pp = pp;
    return x;
  endfunction

  // phase 0: MWL step 1 (forward connections only), phase 1: step 2
  function automatic mu_instr_t mu_prog(gate_e g, logic phase, int pc);
    mu_instr_t p[MU_PROG_LEN];
    for (int i = 0; i < MU_PROG_LEN; i++) p[i] = I(OP_END);
    if (!phase) begin
      p[0] = I(OP_DPU, 0);
      p[1] = I(OP_LDB, 1);
      p[2] = I(OP_MUL, 0, 0, 1);          // beta * o_k
      p[3] = I(OP_QNT, 0, 0);             // round, saturate, store
    end else if (g == G_INPUT || g == G_FORGET) begin
      p[0]  = I(OP_DPU, 0);               // R0 = DPU_O
      p[1]  = I(OP_DEQ, 1);
      p[2]  = I(OP_ADD, 0, 0, 1);         // + forward partial
      p[3]  = I(OP_LDC, 1, 0, 0, 0, 1);   // c_{t-1}
      p[4]  = I(OP_LDW, 2, 0, 0, 1, 1);   // W_ic / W_fc
      p[5]  = I(OP_MUL, 1, 1, 2, 0, 1);   // R1 = W_c . c_{t-1}
      p[6]  = I(OP_ADD, 0, 0, 1, 0, 1);   // R0 += R1
      p[7]  = I(OP_LDW, 2, 0, 0, 0);      // b
      p[8]  = I(OP_ADD, 0, 0, 2);         // R0 += b
      p[9]  = I(OP_NEG, 0, 0);            // sigmoid
      p[10] = I(OP_EXP, 0, 0);
      p[11] = I(OP_LDK, 2);
      p[12] = I(OP_ADD, 0, 0, 2);
      p[13] = I(OP_RCP, 0, 0);
      p[14] = I(OP_SEND, 0, 0);           // send i_t / f_t
    end else if (g == G_CELL) begin
      p[0]  = I(OP_DPU, 0);
      p[1]  = I(OP_DEQ, 1);
      p[2]  = I(OP_ADD, 0, 0, 1);
      p[3]  = I(OP_LDW, 2, 0, 0, 0);
      p[4]  = I(OP_ADD, 0, 0, 2);         // R0 = DPU_O + b_c
      p[5]  = I(OP_NEG, 1, 0);            // tanh
      p[6]  = I(OP_EXP, 1, 1);
      p[7]  = I(OP_EXP, 0, 0);
      p[8]  = I(OP_SUB, 2, 0, 1);
      p[9]  = I(OP_ADD, 0, 0, 1);
      p[10] = I(OP_RCP, 0, 0);
      p[11] = I(OP_MUL, 0, 2, 0);         // g_t
      p[12] = I(OP_RECV, 1, 0, 0, 0);     // i_t
      p[13] = I(OP_RECV, 2, 0, 0, 1);     // f_t
      p[14] = I(OP_MUL, 0, 0, 1);         // g_t * i_t
      p[15] = I(OP_LDC, 3);
      p[16] = I(OP_MUL, 1, 2, 3);         // f_t * c_{t-1}
      p[17] = I(OP_ADD, 0, 0, 1);         // c_t
      p[18] = I(OP_WRC, 0, 0);            // to input buffers (c_{t-1} of next step)
      p[19] = I(OP_SEND, 0, 0);           // c_t to output gate
      p[20] = I(OP_NEG, 1, 0);            // tanh(c_t)
      p[21] = I(OP_EXP, 1, 1);
      p[22] = I(OP_EXP, 0, 0);
      p[23] = I(OP_SUB, 2, 0, 1);
      p[24] = I(OP_ADD, 0, 0, 1);
      p[25] = I(OP_RCP, 0, 0);
      p[26] = I(OP_MUL, 0, 2, 0);
      p[27] = I(OP_SEND, 0, 0);           // phi(c_t)
    end else begin
      p[0]  = I(OP_DPU, 0);
      p[1]  = I(OP_DEQ, 1);
      p[2]  = I(OP_ADD, 0, 0, 1);
      p[3]  = I(OP_LDW, 2, 0, 0, 0);
      p[4]  = I(OP_ADD, 0, 0, 2);         // R0 = DPU_O + b_o
      p[5]  = I(OP_RECV, 1, 0, 0, 0);     // c_t
      p[6]  = I(OP_LDW, 2, 0, 0, 1, 1);   // W_oc
      p[7]  = I(OP_MUL, 1, 1, 2, 0, 1);
      p[8]  = I(OP_ADD, 0, 0, 1, 0, 1);
      p[9]  = I(OP_NEG, 0, 0);            // sigmoid
      p[10] = I(OP_EXP, 0, 0);
      p[11] = I(OP_LDK, 2);
      p[12] = I(OP_ADD, 0, 0, 2);
      p[13] = I(OP_RCP, 0, 0);
      p[14] = I(OP_RECV, 1, 0, 0, 0);     // phi(c_t)
      p[15] = I(OP_MUL, 0, 0, 1);         // h_t
      p[16] = I(OP_WRH, 0, 0);
    end
    return p[pc];
  endfunction

  // ------------------------------------------------------------------
  // Layer configuration written by the host before each pass
  // ------------------------------------------------------------------
  typedef struct packed {
    logic [10:0] n_hid;       // H, neurons per gate (<= 1024)
    logic [6:0]  kx;          // forward sub-vectors per neuron: ceil(I/16)
    logic [6:0]  kh;          // recurrent sub-vectors per neuron: ceil(H/16)
    logic [19:0] seq_len;     // T
    logic        reverse;     // backward pass: x_T .. x_1
    logic        peephole;    // peephole connections on
    logic        src_half;    // OM half holding x; h goes to the other half
    logic [18:0] h_stride;    // words between h_t and h_{t+1} in the OM
    logic [18:0] h_col;       // word offset of this pass inside h_t (bidirectional concat)
    logic [18:0] wb_param;    // weight-buffer word address of {b, W_c} pairs
    logic [3:0][31:0] beta;   // quantisation scale per gate
  } layer_cfg_t;

  // Tag carried with each dot product through the DPU
  typedef struct packed {
    logic        phase;       // 0: MWL step 1, 1: step 2
    logic        first_step;  // s == 0
    logic [10:0] k;           // neuron
    logic [19:0] s;           // step index inside the pass
    logic [19:0] t;           // sequence position (s, or T-1-s when reversed)
  } dtag_t;

endpackage
