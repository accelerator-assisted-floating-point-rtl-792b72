// asip_pkg -- types, constants and arithmetic shared by the whole processor.
//
// Number format. The vector core and the systolic array compute on complex
// bfloat16: each of the real and imaginary parts is a 16-bit float with a sign
// bit, an 8-bit exponent (bias 127) and a 7-bit fraction, i.e. the upper half
// of an IEEE float32. A complex value is 32 bits, real part in the upper half.
// A vector is 16 such values (512 bits), the width of the vector core, of one
// row of the systolic array and of one word of the parallel vector memory.
//
// Arithmetic choices (the format is the paper's, the following details are this
// design's own): subnormal inputs and results are flushed to zero, results are
// rounded to nearest-even, an exponent overflow gives infinity, and NaN is not
// propagated specially. Complex multiply rounds each of the four real products
// and each of the two sums, so (a+jb)(c+jd) = rnd(rnd(ac) - rnd(bd)) + j rnd(rnd(ad) + rnd(bc)).
//
// The CNN accelerator keeps a 16-bit signed fixed-point format; CNN_FRAC is the
// number of fraction bits used when the DMA converts bfloat16 into it.
package asip_pkg;

  localparam int unsigned LANES     = 16;        // SIMD lanes / systolic array side
  localparam int unsigned PVM_WORDS = 8192;      // 512 kB / (16 lanes * 4 bytes)
  localparam int unsigned PVM_AW    = 13;        // vector address width
  localparam int unsigned CNN_WORDS = 19648;     // 614 kB / (16 lanes * 2 bytes)
  localparam int unsigned CNN_AW    = 15;
  localparam int unsigned CNN_FRAC  = 8;         // fraction bits of the CNN fixed-point format

  typedef logic [15:0] bf16_t;

  typedef struct packed {
    bf16_t re;
    bf16_t im;
  } cbf16_t;

  typedef cbf16_t [LANES-1:0] cvec_t;            // one complex vector, lane 0 in the low bits
  typedef logic signed [15:0] fx16_t;            // CNN fixed-point value
  typedef fx16_t [LANES-1:0] fxvec_t;            // one CNN memory word

  // Access modes of the parallel vector memory (Table VI: mode0 row, mode1 column).
  typedef enum logic [0:0] {
    MODE_ROW = 1'b0,
    MODE_COL = 1'b1
  } access_mode_e;

  // A request to the parallel vector memory, as issued by the vector core, the
  // systolic array or the DMA. addr is a vector address; mask enables lanes on
  // a write. Read data returns one cycle after the request.
  typedef struct packed {
    logic                valid;
    logic                we;
    access_mode_e        mode;
    logic [PVM_AW-1:0]   addr;
    logic [LANES-1:0]    mask;
    cvec_t               wdata;
  } pvm_req_t;

  // A request to the CNN vector memory (one 16 x 16-bit word per access).
  typedef struct packed {
    logic                valid;
    logic                we;
    logic [CNN_AW-1:0]   addr;
    fxvec_t              wdata;
  } cnn_req_t;

  // ---------------- vector core operation ----------------
  localparam int unsigned NVREG = 8;             // vector registers v0..v7
  localparam int unsigned NSREG = 8;             // complex scalar registers vs0..vs7

  // first operand selection in decode
  typedef enum logic [1:0] {
    OP1_VR1  = 2'd0,   // vector register as read
    OP1_CONJ = 2'd1,   // its conjugate
    OP1_ZERO = 2'd2    // zero vector
  } op1_sel_e;

  // second operand selection in decode
  typedef enum logic [2:0] {
    OP2_VR2      = 3'd0,   // vector register as read
    OP2_CONJ     = 3'd1,   // its conjugate
    OP2_IDX_BC   = 3'd2,   // element vr2[sr] broadcast to all lanes
    OP2_IDX_CONJ = 3'd3,   // conj(vr2[sr]) broadcast
    OP2_SCALAR   = 3'd4    // scalar register sr broadcast
  } op2_sel_e;

  // execute-stage operation
  typedef enum logic [2:0] {
    VALU_SUB  = 3'd0,  // vd1 - vd2
    VALU_ADD  = 3'd1,  // vd1 + vd2
    VALU_MUL  = 3'd2,  // vd1 * vd2 (lane-wise complex)
    VALU_IDXW = 3'd3,  // vd1 with element [xd] replaced by the scalar sr
    VALU_PASS = 3'd4   // vd1 unchanged (moves and stores)
  } valu_e;

  // One decoded vector instruction, as delivered by the issue stage.
  typedef struct packed {
    logic                 valid;
    op1_sel_e             op1;
    op2_sel_e             op2;
    valu_e                alu;
    logic [2:0]           vr1, vr2, vr3;   // vector sources
    logic [2:0]           sr;              // scalar source
    logic [2:0]           vd;              // vector destination
    logic [2:0]           sd;              // scalar destination (dot product)
    logic                 vd_we;           // write vd in writeback
    logic                 mac;             // post-execute: add vr3 to the result
    logic                 dot;             // reduce the result to sd
    logic                 idx_rd;          // element vd1[xr] to the RISC-V register file
    logic                 load;            // vector load into vd
    logic                 store;           // vector store of vd1
    access_mode_e         mode;            // memory access mode
    logic                 mask_en;         // store mask from the low 16 bits of sr
    logic [PVM_AW-1:0]    addr;            // vector memory address
    logic [31:0]          xr;              // RISC-V register operand (index)
  } vop_t;

  localparam bf16_t BF16_ZERO = 16'h0000;
  localparam bf16_t BF16_ONE  = 16'h3F80;
  localparam bf16_t BF16_INF  = 16'h7F80;

  function automatic logic bf16_is_zero(bf16_t a);
    return a[14:7] == 8'd0;
  endfunction

  function automatic bf16_t bf16_neg(bf16_t a);
    return {~a[15], a[14:0]};
  endfunction

  // Pack sign, biased exponent (may be out of range) and a rounded 7-bit fraction.
  function automatic bf16_t bf16_pack(logic s, logic signed [11:0] e, logic [6:0] f);
    if (e <= 0)        return {s, 15'd0};
    else if (e >= 255) return {s, 8'hFF, 7'd0};
    else               return {s, e[7:0], f};
  endfunction

  function automatic bf16_t bf16_mul(bf16_t a, bf16_t b);
    logic               s;
    logic        [15:0] p;
    logic signed [11:0] e;
    logic        [7:0]  m;           // {hidden, fraction} before rounding
    logic               g, st;
    logic        [8:0]  r;
    s = a[15] ^ b[15];
    if (bf16_is_zero(a) || bf16_is_zero(b)) return {s, 15'd0};
    p = {1'b1, a[6:0]} * {1'b1, b[6:0]};
    e = 12'(signed'({4'd0, a[14:7]})) + 12'(signed'({4'd0, b[14:7]})) - 12'sd127;
    if (p[15]) begin
      m  = p[15:8]; g = p[7]; st = |p[6:0]; e = e + 12'sd1;
    end else begin
      m  = p[14:7]; g = p[6]; st = |p[5:0];
    end
    r = {1'b0, m} + {8'd0, g & (st | m[0])};
    if (r[8]) begin
      r = r >> 1; e = e + 12'sd1;
    end
    return bf16_pack(s, e, r[6:0]);
  endfunction

  function automatic bf16_t bf16_add(bf16_t a, bf16_t b);
    bf16_t              hi_op, lo_op;
    logic        [7:0]  d;
    logic        [18:0] mb, ms, sum;   // 1 carry + 1 hidden + 7 fraction + 10 guard bits
    logic               st;
    logic signed [11:0] e;
    logic        [4:0]  lz;
    logic        [7:0]  m;
    logic               g, st2;
    logic        [8:0]  r;
    if (bf16_is_zero(a)) return bf16_is_zero(b) ? {a[15] & b[15], 15'd0} : b;
    if (bf16_is_zero(b)) return a;
    if (a[14:0] >= b[14:0]) begin hi_op = a; lo_op = b; end
    else                    begin hi_op = b; lo_op = a; end
    d  = hi_op[14:7] - lo_op[14:7];
    mb = {2'b01, hi_op[6:0], 10'd0};
    ms = {2'b01, lo_op[6:0], 10'd0};
    if (d > 8'd18) begin
      ms = 19'd1;                      // only the sticky bit survives
    end else begin
      st = 1'b0;
      for (int i = 0; i < 19; i++) if (i < int'(d)) st = st | ms[i];
      ms = (ms >> d) | {18'd0, st};
    end
    sum = (hi_op[15] ^ lo_op[15]) ? mb - ms : mb + ms;
    if (sum == 19'd0) return BF16_ZERO;
    e = 12'(signed'({4'd0, hi_op[14:7]}));
    if (sum[18]) begin
      sum = {1'b0, sum[18:2], sum[1] | sum[0]};
      e   = e + 12'sd1;
    end else begin
      // distance of the leading one from bit 17 (the highest set bit is assigned last)
      lz = 5'd0;
      for (int i = 0; i <= 17; i++) if (sum[i]) lz = 5'(17 - i);
      sum = sum << lz;
      e   = e - 12'(lz);
    end
    m   = sum[17:10];
    g   = sum[9];
    st2 = |sum[8:0];
    r   = {1'b0, m} + {8'd0, g & (st2 | m[0])};
    if (r[8]) begin
      r = r >> 1; e = e + 12'sd1;
    end
    return bf16_pack(hi_op[15], e, r[6:0]);
  endfunction

  function automatic bf16_t bf16_sub(bf16_t a, bf16_t b);
    return bf16_add(a, bf16_neg(b));
  endfunction

  function automatic cbf16_t c_add(cbf16_t a, cbf16_t b);
    return '{re: bf16_add(a.re, b.re), im: bf16_add(a.im, b.im)};
  endfunction

  function automatic cbf16_t c_sub(cbf16_t a, cbf16_t b);
    return '{re: bf16_sub(a.re, b.re), im: bf16_sub(a.im, b.im)};
  endfunction

  function automatic cbf16_t c_mul(cbf16_t a, cbf16_t b);
    return '{re: bf16_sub(bf16_mul(a.re, b.re), bf16_mul(a.im, b.im)),
             im: bf16_add(bf16_mul(a.re, b.im), bf16_mul(a.im, b.re))};
  endfunction

  function automatic cbf16_t c_conj(cbf16_t a);
    return '{re: a.re, im: bf16_neg(a.im)};
  endfunction

  function automatic cvec_t v_conj(cvec_t a);
    cvec_t r;
    for (int i = 0; i < LANES; i++) r[i] = c_conj(a[i]);
    return r;
  endfunction

  // bfloat16 -> 16-bit fixed point with CNN_FRAC fraction bits, truncating
  // toward zero and saturating.
  function automatic fx16_t bf16_to_fx(bf16_t a);
    logic signed [11:0] sh;
    logic        [38:0] mag;
    logic        [15:0] q;
    if (bf16_is_zero(a)) return '0;
    // value = 1.f * 2^(e-127); fixed = value * 2^CNN_FRAC = {1,f} * 2^(e-127-7+CNN_FRAC)
    sh = 12'(signed'({4'd0, a[14:7]})) - 12'sd134 + 12'(CNN_FRAC);
    if (sh >= 12'sd8) q = 16'h7FFF;
    else if (sh <= -12'sd8) q = 16'd0;
    else begin
      mag = {31'd0, 1'b1, a[6:0]};
      if (sh >= 0) mag = mag << sh;
      else         mag = mag >> (-sh);
      q = (mag > 39'h7FFF) ? 16'h7FFF : mag[15:0];
    end
    return a[15] ? fx16_t'(-signed'(q)) : fx16_t'(q);
  endfunction

endpackage
