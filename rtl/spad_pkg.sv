// spad_pkg -- types, command format and floating-point arithmetic shared by
// every block of the SPAD Prefill/Decode chip template.
//
// Arithmetic: the systolic arrays multiply FP16 operands and accumulate in
// FP32; the vector units work on FP32. An FP16 x FP16 product always fits an
// FP32 significand exactly (11 x 11 = 22 bits), so the tensor path needs only
// an FP32 multiplier and an FP32 adder. Both round to nearest, ties to even.
// Subnormal inputs and results are flushed to (signed) zero, overflow gives
// infinity and any NaN input gives the canonical quiet NaN. The precisions
// (FP16/BF16 tensor, FP32 non-tensor) are the paper's; the rounding, subnormal
// and special-value policy is this design's own choice.
//
// Command format: a host writes cmd_t words to the chip. addr0/addr1 are the
// sources, addr2 the destination, len the number of words (or K for a matmul).
// Which memory each address names depends on the opcode, see op_e.
package spad_pkg;

  typedef enum logic [3:0] {
    OP_MATMUL    = 4'd0,  // lane: C(addr2) = A(addr0) x B(addr1), K = len, all in L1
    OP_VEC       = 4'd1,  // lane: dst(addr2) = vop(src0(addr0), src1(addr1)), len words of L1
    OP_L2_LOAD   = 4'd2,  // core: L1(addr2..) <- L2(addr0..), len words
    OP_L2_STORE  = 4'd3,  // core: L2(addr2..) <- L1(addr0..), len words
    OP_MEM_LOAD  = 4'd4,  // memory controller: L2(addr2..) <- DRAM(addr0..)
    OP_MEM_STORE = 4'd5,  // memory controller: DRAM(addr2..) <- L2(addr0..)
    OP_IC_SEND   = 4'd6   // interconnect: remote L2 byte address addr2.. <- L2(addr0..)
  } op_e;

  typedef enum logic [1:0] {
    VOP_ADD = 2'd0,  // a + b
    VOP_MUL = 2'd1,  // a * b
    VOP_MAX = 2'd2,  // max(a, b)
    VOP_FMA = 2'd3   // a * scalar + b   (two FLOPs per element)
  } vop_e;

  typedef struct packed {
    op_e         op;
    logic [15:0] core;    // target core for OP_MATMUL .. OP_L2_STORE
    logic [7:0]  lane;    // target lane for OP_MATMUL / OP_VEC
    vop_e        vop;
    logic [31:0] addr0;
    logic [31:0] addr1;
    logic [31:0] addr2;
    logic [31:0] len;
    logic [31:0] scalar;  // FP32 scalar of VOP_FMA
  } cmd_t;

  localparam logic [31:0] FP32_QNAN = 32'h7FC0_0000;

  function automatic logic [31:0] fp16_to_fp32(input logic [15:0] h);
    logic [4:0] e;
    e = h[14:10];
    if (e == 5'd0)       return {h[15], 31'd0};
    else if (e == 5'd31) return {h[15], 8'hFF, h[9:0], 13'd0};
    else                 return {h[15], 8'(e) + 8'd112, h[9:0], 13'd0};
  endfunction

  function automatic logic fp32_is_nan(input logic [31:0] a);
    return (a[30:23] == 8'hFF) && (a[22:0] != 23'd0);
  endfunction

  function automatic logic fp32_is_inf(input logic [31:0] a);
    return (a[30:23] == 8'hFF) && (a[22:0] == 23'd0);
  endfunction

  // Round a normalised significand (hidden bit dropped) with guard/sticky and
  // pack it; ex is the biased exponent, possibly out of range.
  function automatic logic [31:0] fp32_round_pack(input logic s, input logic signed [11:0] ex,
                                                  input logic [22:0] man, input logic g,
                                                  input logic st);
    logic [23:0] m;
    logic signed [11:0] e;
    m = {1'b0, man};
    e = ex;
    if (g && (st || man[0])) m = m + 24'd1;
    if (m[23]) begin
      e = e + 12'sd1;
      m = 24'd0;
    end
    if (e >= 12'sd255) return {s, 8'hFF, 23'd0};
    if (e <= 12'sd0)   return {s, 31'd0};
    return {s, e[7:0], m[22:0]};
  endfunction

  function automatic logic [31:0] fp32_mul(input logic [31:0] a, input logic [31:0] b);
    logic s;
    logic [47:0] p;
    logic signed [11:0] e;
    logic a_zero, b_zero;
    s = a[31] ^ b[31];
    a_zero = (a[30:23] == 8'd0);
    b_zero = (b[30:23] == 8'd0);
    if (fp32_is_nan(a) || fp32_is_nan(b)) return FP32_QNAN;
    if (fp32_is_inf(a) || fp32_is_inf(b)) begin
      if (a_zero || b_zero) return FP32_QNAN;
      return {s, 8'hFF, 23'd0};
    end
    if (a_zero || b_zero) return {s, 31'd0};
    p = {24'd0, 1'b1, a[22:0]} * {24'd0, 1'b1, b[22:0]};
    e = 12'(a[30:23]) + 12'(b[30:23]) - 12'sd127;
    if (p[47]) return fp32_round_pack(s, e + 12'sd1, p[46:24], p[23], |p[22:0]);
    else       return fp32_round_pack(s, e, p[45:23], p[22], |p[21:0]);
  endfunction

  function automatic logic [31:0] fp32_add(input logic [31:0] a, input logic [31:0] b);
    logic [31:0] x, y;          // |x| >= |y|
    logic [7:0] d;
    logic [26:0] mx, my;        // 1.23 significand + guard, round, sticky
    logic [27:0] r;
    logic signed [11:0] e;
    logic sticky;
    int lz;
    if (fp32_is_nan(a) || fp32_is_nan(b)) return FP32_QNAN;
    if (fp32_is_inf(a) && fp32_is_inf(b) && (a[31] != b[31])) return FP32_QNAN;
    if (fp32_is_inf(a)) return a;
    if (fp32_is_inf(b)) return b;
    if (a[30:23] == 8'd0) return (b[30:23] == 8'd0) ? {a[31] & b[31], 31'd0} : b;
    if (b[30:23] == 8'd0) return a;
    if (a[30:0] >= b[30:0]) begin x = a; y = b; end
    else                    begin x = b; y = a; end
    d  = x[30:23] - y[30:23];
    mx = {1'b1, x[22:0], 3'b000};
    my = {1'b1, y[22:0], 3'b000};
    if (d >= 8'd27) begin
      my = 27'd1;                              // only the sticky bit survives
    end else if (d != 8'd0) begin
      sticky = |(my & ((27'd1 << d) - 27'd1));
      my = (my >> d) | {26'd0, sticky};
    end
    e = 12'(x[30:23]);
    if (x[31] == y[31]) begin
      r = {1'b0, mx} + {1'b0, my};
      if (r[27]) begin
        r = {1'b0, r[27:2], r[1] | r[0]};
        e = e + 12'sd1;
      end
    end else begin
      r = {1'b0, mx} - {1'b0, my};
      if (r == 28'd0) return 32'd0;
      lz = 0;
      for (int i = 26; i >= 0; i--) begin
        if (r[i]) break;
        lz++;
      end
      r = r << lz;
      e = e - 12'(lz);
    end
    return fp32_round_pack(x[31], e, r[25:3], r[2], |r[1:0]);
  endfunction

  function automatic logic [31:0] fp32_max(input logic [31:0] a, input logic [31:0] b);
    if (fp32_is_nan(a) || fp32_is_nan(b)) return FP32_QNAN;
    if (a[31] != b[31]) return a[31] ? b : a;
    if (a[31] == 1'b0) return (a[30:0] >= b[30:0]) ? a : b;
    return (a[30:0] <= b[30:0]) ? a : b;
  endfunction

  // One multiply-accumulate of the tensor datapath: acc + a*b, a and b FP16.
  function automatic logic [31:0] fp16_mac(input logic [31:0] acc, input logic [15:0] a,
                                           input logic [15:0] b);
    return fp32_add(acc, fp32_mul(fp16_to_fp32(a), fp16_to_fp32(b)));
  endfunction

endpackage
