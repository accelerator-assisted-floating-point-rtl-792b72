// rsqrt_unit -- bfloat16 inverse square root, y = 1/sqrt(x), in two pipeline stages.
//
// The scalar core offers an inverse-square-root instruction (inv.sqrt) whose
// execution path is split over two stages to shorten the critical path; the
// two stages here correspond to the "inverse sqrt 1" and "inverse sqrt 2"
// boxes of the scalar pipeline.
//
// How it works. x = s * 2^(2h), where the significand s lies in [1,4) (the
// exponent parity decides whether the bfloat16 fraction is taken as 1.f or
// 2 * 1.f). Then 1/sqrt(x) = r * 2^(-h) with r = 1/sqrt(s) in (0.5, 1].
// r is found in fixed point by Newton-Raphson, r' = r (3 - s r^2) / 2, from a
// linear seed. Stage 1 forms the seed and the first iteration, stage 2 the
// second iteration, normalisation and rounding to nearest. The result is within
// one unit in the last place of the exact value.
//
// The paper computes this function with harmonized parabolic synthesis; the
// coefficients of that method are not given, so the Newton-Raphson datapath is
// this design's own substitute with the same latency of two stages.
// Zero in gives +infinity, a negative input gives the quiet NaN 16'h7FC0.
//
// Interface: in_valid/x are sampled on a rising clock edge; out_valid/y appear
// two edges later. A new operand can be accepted every cycle.
module rsqrt_unit
  import asip_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  input  bf16_t x,
  output logic  out_valid,
  output bf16_t y
);

  // significand s as Q2.14, seed/iterate r as Q1.16
  function automatic logic [16:0] nr_step(logic [15:0] s, logic [16:0] r);
    logic [33:0] r2;      // Q2.32
    logic [49:0] sr2;     // Q4.46
    logic [35:0] t;       // Q4.32
    logic [35:0] u;       // 3 - s r^2, Q4.32
    logic [52:0] p;
    r2  = r * r;
    sr2 = s * r2;
    t   = sr2[49:14];
    u   = (36'd3 << 32) - t;
    p   = r * u;          // Q5.48
    return p[49:33];      // divide by two, back to Q1.16
  endfunction

  typedef enum logic [1:0] {K_NORMAL, K_ZERO, K_NEG} kind_e;

  // ---------------- stage 1 ----------------
  logic [15:0]        s1_s;
  logic [16:0]        s1_r;
  logic signed [9:0]  s1_h;
  kind_e              s1_kind;
  logic               s1_valid;

  logic [15:0]        s_c;
  logic [16:0]        seed_c;
  logic signed [9:0]  u_c, h_c;

  always_comb begin
    u_c = 10'(signed'({2'b00, x[14:7]})) - 10'sd127;
    if (u_c[0]) begin
      s_c = {1'b1, x[6:0], 8'd0};          // odd exponent: s = 2 * 1.f in [2,4)
      h_c = (u_c - 10'sd1) >>> 1;
      // chord of 1/sqrt(s) over [2,4): 0.7071 - 0.1036 (s - 2)
      seed_c = 17'd46341 - 17'(((32'(s_c) - 32'd32768) * 32'd6790) >> 14);
    end else begin
      s_c = {2'b01, x[6:0], 7'd0};         // even exponent: s = 1.f in [1,2)
      h_c = u_c >>> 1;
      // chord of 1/sqrt(s) over [1,2): 1 - 0.2929 (s - 1)
      seed_c = 17'd65536 - 17'(((32'(s_c) - 32'd16384) * 32'd19195) >> 14);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_valid <= 1'b0;
      s1_s     <= '0;
      s1_r     <= '0;
      s1_h     <= '0;
      s1_kind  <= K_NORMAL;
    end else begin
      s1_valid <= in_valid;
      s1_s     <= s_c;
      s1_r     <= nr_step(s_c, seed_c);
      s1_h     <= h_c;
      s1_kind  <= bf16_is_zero(x) ? K_ZERO : (x[15] ? K_NEG : K_NORMAL);
    end
  end

  // ---------------- stage 2 ----------------
  logic [16:0]        r_c;
  logic [17:0]        rr_c;
  logic signed [11:0] e_c;
  bf16_t              y_c;

  always_comb begin
    r_c = nr_step(s1_s, s1_r);
    y_c = '0;
    e_c = '0;
    rr_c = '0;
    unique case (s1_kind)
      K_ZERO: y_c = BF16_INF;
      K_NEG:  y_c = 16'h7FC0;
      default: begin
        if (r_c >= 17'd65536 - 17'd128) begin
          // r rounds to 1.0
          e_c = 12'sd127 - 12'(s1_h);
          y_c = bf16_pack(1'b0, e_c, 7'd0);
        end else begin
          // r in (0.5,1): 2r = 1.f, fraction bits r[14:8], round half up on r[7]
          rr_c = {1'b0, r_c} + 18'd128;
          e_c  = 12'sd126 - 12'(s1_h);
          y_c  = bf16_pack(1'b0, e_c, rr_c[14:8]);
        end
      end
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      y         <= '0;
    end else begin
      out_valid <= s1_valid;
      y         <= y_c;
    end
  end

endmodule
