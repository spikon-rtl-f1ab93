// spikon_pkg -- types, constants and FP32 arithmetic shared by the SpikON accelerator.
//
// The accelerator computes in IEEE-754 single precision (FP32). The functions below are
// combinational FP32 add, multiply, divide, square root and compare. All of them round to
// nearest-even. Subnormal inputs are read as zero and results that would be subnormal are
// flushed to zero; this simplification is this design's own choice (the source design only
// states that the arithmetic is FP32). Overflow gives infinity; NaN inputs give a quiet NaN.
//
// The package also holds the SIMD core's instruction set (opcode enum and decoded-instruction
// struct), the BTPE job descriptor and the global-SRAM request struct used by the memory
// controller. The instruction encoding, job descriptor and request format are this design's
// own, since none of them is published.
package spikon_pkg;

  // ---------------------------------------------------------------- sizes
  localparam int unsigned FP_W        = 32;
  localparam int unsigned LANES       = 24;    // BTP-dataflow lanes
  localparam int unsigned PU_PER_LANE = 64;    // 4 arrays x 4x4 PUs
  localparam int unsigned SIMD_UNITS  = 64;    // FP32 units in the SNN core executor
  localparam int unsigned VEC_W       = 2048;  // 64 x FP32
  localparam int unsigned BEAT_W      = 512;   // 16 x FP32
  localparam int unsigned GADDR_W     = 12;    // 1 MB global SRAM of 2048-bit words
  localparam int unsigned DV_W        = 16;    // data-volume counter width

  localparam logic [31:0] FP_ZERO = 32'h0000_0000;
  localparam logic [31:0] FP_ONE  = 32'h3f80_0000;
  localparam logic [31:0] FP_QNAN = 32'h7fc0_0000;

  // ---------------------------------------------------------------- FP32 helpers
  function automatic logic fp_is_zero(input logic [31:0] a);
    return a[30:23] == 8'd0;                 // zero or flushed subnormal
  endfunction

  function automatic logic fp_is_nan(input logic [31:0] a);
    return (a[30:23] == 8'hff) && (a[22:0] != 23'd0);
  endfunction

  function automatic logic fp_is_inf(input logic [31:0] a);
    return (a[30:23] == 8'hff) && (a[22:0] == 23'd0);
  endfunction

  // Normalise and round. The value is m * 2^(e - 127 - 62): a leading one at bit 62 of m
  // means biased exponent e. 'sticky' stands for non-zero bits below bit 0 of m.
  function automatic logic [31:0] fp_round(input logic s, input int e, input logic [63:0] m,
                                           input logic sticky);
    int          p;
    int          e2;
    logic [63:0] m2;
    logic [24:0] keep;
    logic        g, st, up;
    if (m == 64'd0) return {s, 31'd0};
    p = 0;
    for (int i = 0; i < 64; i++) if (m[i]) p = i;
    m2   = m << (63 - p);
    e2   = e + p - 62;
    keep = {1'b0, m2[63:40]};
    g    = m2[39];
    st   = (|m2[38:0]) | sticky;
    up   = g & (st | keep[0]);
    keep = keep + {24'd0, up};
    if (keep[24]) begin
      keep = keep >> 1;
      e2   = e2 + 1;
    end
    if (e2 >= 255) return {s, 8'hff, 23'd0};
    if (e2 <= 0)   return {s, 31'd0};
    return {s, e2[7:0], keep[22:0]};
  endfunction

  function automatic logic [31:0] fp_add(input logic [31:0] a, input logic [31:0] b);
    logic [31:0] x, y;
    logic [63:0] mx, my, lost;
    logic        sticky;
    int          d;
    if (fp_is_nan(a) || fp_is_nan(b)) return FP_QNAN;
    if (fp_is_inf(a) && fp_is_inf(b)) return (a[31] == b[31]) ? a : FP_QNAN;
    if (fp_is_inf(a)) return a;
    if (fp_is_inf(b)) return b;
    if (fp_is_zero(a) && fp_is_zero(b)) return {a[31] & b[31], 31'd0};
    if (fp_is_zero(a)) return b;
    if (fp_is_zero(b)) return a;
    // x: the operand of larger magnitude
    if (a[30:0] >= b[30:0]) begin x = a; y = b; end
    else begin x = b; y = a; end
    mx = {1'b0, 1'b1, x[22:0], 39'd0};
    my = {1'b0, 1'b1, y[22:0], 39'd0};
    d  = int'(x[30:23]) - int'(y[30:23]);
    if (d > 63) begin
      sticky = 1'b1;
      my     = 64'd0;
    end else begin
      lost   = my & ((64'd1 << d) - 64'd1);
      sticky = lost != 64'd0;
      my     = my >> d;
    end
    if (x[31] == y[31]) return fp_round(x[31], int'(x[30:23]), mx + my, sticky);
    // subtraction: a lost tail of y makes the true difference slightly smaller
    if (mx - my - {63'd0, sticky} == 64'd0) return FP_ZERO;
    return fp_round(x[31], int'(x[30:23]), mx - my - {63'd0, sticky}, sticky);
  endfunction

  function automatic logic [31:0] fp_sub(input logic [31:0] a, input logic [31:0] b);
    return fp_add(a, {~b[31], b[30:0]});
  endfunction

  function automatic logic [31:0] fp_mul(input logic [31:0] a, input logic [31:0] b);
    logic        s;
    logic [47:0] p;
    s = a[31] ^ b[31];
    if (fp_is_nan(a) || fp_is_nan(b)) return FP_QNAN;
    if (fp_is_inf(a) || fp_is_inf(b))
      return (fp_is_zero(a) || fp_is_zero(b)) ? FP_QNAN : {s, 8'hff, 23'd0};
    if (fp_is_zero(a) || fp_is_zero(b)) return {s, 31'd0};
    p = {24'd0, 1'b1, a[22:0]} * {24'd0, 1'b1, b[22:0]};
    return fp_round(s, int'(a[30:23]) + int'(b[30:23]) - 127, {p, 16'd0}, 1'b0);
  endfunction

  function automatic logic [31:0] fp_div(input logic [31:0] a, input logic [31:0] b);
    logic        s;
    logic [63:0] num, q, r;
    s = a[31] ^ b[31];
    if (fp_is_nan(a) || fp_is_nan(b)) return FP_QNAN;
    if (fp_is_inf(a)) return fp_is_inf(b) ? FP_QNAN : {s, 8'hff, 23'd0};
    if (fp_is_inf(b)) return {s, 31'd0};
    if (fp_is_zero(b)) return fp_is_zero(a) ? FP_QNAN : {s, 8'hff, 23'd0};
    if (fp_is_zero(a)) return {s, 31'd0};
    num = {24'd0, 1'b1, a[22:0], 16'd0} << 24;         // mantissa(a) * 2^40
    q   = num / {40'd0, 1'b1, b[22:0]};
    r   = num % {40'd0, 1'b1, b[22:0]};
    return fp_round(s, int'(a[30:23]) - int'(b[30:23]) + 127, q << 22, r != 64'd0);
  endfunction

  function automatic logic [31:0] fp_sqrt(input logic [31:0] a);
    logic [63:0] x, rem, root, trial;
    int          eu;
    if (fp_is_nan(a)) return FP_QNAN;
    if (fp_is_zero(a)) return a;
    if (a[31]) return FP_QNAN;
    if (fp_is_inf(a)) return a;
    eu = int'(a[30:23]) - 127;
    x  = {40'd0, 1'b1, a[22:0]} << 29;                 // value * 2^52
    if (eu % 2 != 0) begin
      x  = x << 1;
      eu = eu - 1;
    end
    rem  = 64'd0;
    root = 64'd0;
    for (int i = 27; i >= 0; i--) begin
      rem   = (rem << 2) | ((x >> (2 * i)) & 64'd3);
      trial = (root << 2) | 64'd1;
      if (rem >= trial) begin
        rem  = rem - trial;
        root = (root << 1) | 64'd1;
      end else begin
        root = root << 1;
      end
    end
    return fp_round(1'b0, eu / 2 + 127, root << 36, rem != 64'd0);
  endfunction

  // a >= b for ordered FP32 values (+0 and -0 compare equal)
  function automatic logic fp_ge(input logic [31:0] a, input logic [31:0] b);
    logic [31:0] ka, kb;
    if (fp_is_zero(a) && fp_is_zero(b)) return 1'b1;
    ka = a[31] ? ~a : (a | 32'h8000_0000);
    kb = b[31] ? ~b : (b | 32'h8000_0000);
    if (fp_is_zero(a)) ka = 32'h8000_0000;
    if (fp_is_zero(b)) kb = 32'h8000_0000;
    return ka >= kb;
  endfunction

  // ---------------------------------------------------------------- SIMD core ISA
  // ALU: [31:26] opcode, [25:21] rd, [20:16] rs1, [15:11] rs2.
  // LD:  [31:26] opcode, [25:21] rd, [11:0] global-SRAM address.
  // ST:  [31:26] opcode, [25:21] register to store, [11:0] global-SRAM address.
  // Vector registers are named by 5 bits; bits [1:0] are ignored because a 64-wide vector
  // occupies four consecutive 512-bit registers.
  typedef enum logic [5:0] {
    OP_NOP   = 6'd0,
    OP_ADD   = 6'd1,
    OP_SUB   = 6'd2,
    OP_MUL   = 6'd3,
    OP_DIV   = 6'd4,
    OP_SQRT  = 6'd5,
    OP_MAX   = 6'd6,
    OP_MIN   = 6'd7,
    OP_LIF   = 6'd8,   // rd = beta * rs1 + rs2            (charging)
    OP_FIRE  = 6'd9,   // rd = (rs1 >= rs2) ? 1.0 : 0.0    (firing)
    OP_RESET = 6'd10,  // rd = rs1 - (rs1 >= rs2 ? rs2 : 0) (resetting)
    OP_SG    = 6'd11,  // rd = max(0, 1 - |rs1 - rs2|)     (triangle surrogate)
    OP_RSUM  = 6'd12,  // rd = sum of all elements of rs1, broadcast
    OP_RMAX  = 6'd13,  // rd = largest element of rs1, broadcast
    OP_LD    = 6'd16,  // rd = global[addr]
    OP_ST    = 6'd17,  // global[addr] = register in the rd field
    OP_HALT  = 6'd63
  } opcode_e;

  // FP32 unit operation (the ALU subset of the opcodes)
  typedef enum logic [3:0] {
    FU_ADD, FU_SUB, FU_MUL, FU_DIV, FU_SQRT, FU_MAX, FU_MIN,
    FU_LIF, FU_FIRE, FU_RESET, FU_SG, FU_PASS, FU_RSUM, FU_RMAX
  } fu_op_e;

  typedef struct packed {
    opcode_e      op;
    fu_op_e       fu_op;
    logic [4:0]   rd;
    logic [4:0]   rs1;
    logic [4:0]   rs2;
    logic [11:0]  addr;
    logic         uses_rs1;
    logic         uses_rs2;
    logic         writes_rd;
    logic         is_load;
    logic         is_store;
    logic         is_halt;
  } dec_instr_t;

  // ---------------------------------------------------------------- global SRAM port
  typedef struct packed {
    logic               valid;
    logic               we;
    logic [GADDR_W-1:0] addr;
    logic [VEC_W-1:0]   wdata;
  } mem_req_t;

  // ---------------------------------------------------------------- BTPE job
  typedef struct packed {
    logic [GADDR_W-1:0] a_base;      // lane l reads A words a_base + l*dv ..
    logic [GADDR_W-1:0] b_base;      // B words (low 512 bits used), shared by all lanes
    logic [GADDR_W-1:0] out_base;    // lane l's 64 results go to out_base + l
    logic [DV_W-1:0]    data_volume; // operand pairs per PU
    logic [4:0]         timesteps;   // T (1..24)
    logic [4:0]         nlanes;      // active lanes (1..24)
    logic               dense;       // 1 = dense mode, 0 = sparse mode
    logic               reuse;       // CTCR: add previous timestep's result
  } btpe_job_t;

endpackage
