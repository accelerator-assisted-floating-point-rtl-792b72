// tb_rsqrt_unit -- self-checking test of the two-stage inverse square root.
// Feeds one random positive bfloat16 per cycle (plus 1.0, 4.0, 0.25, zero and
// a negative number), checks every result against 1/sqrt computed in real
// arithmetic (at most one unit in the last place apart) and checks that each
// result appears exactly two cycles after its operand.
module tb_rsqrt_unit;
  import asip_pkg::*;
  import tb_ref_pkg::*;

  logic  clk = 1'b0;
  logic  rst_n = 1'b0;
  logic  in_valid;
  bf16_t x, y;
  logic  out_valid;
  int    checks = 0, failures = 0;

  rsqrt_unit dut (.clk, .rst_n, .in_valid, .x, .out_valid, .y);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  bf16_t q_x [$];
  int    q_t [$];
  int    cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  function automatic int ulp_dist(bf16_t a, bf16_t b);
    int d = int'(a) - int'(b);
    return d < 0 ? -d : d;
  endfunction

  // scoreboard
  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      bf16_t xi, ex;
      int    t;
      xi = q_x.pop_front();
      t  = q_t.pop_front();
      checks++;
      if (cycle - t != 2) begin
        failures++;
        $display("latency %0d, expected 2", cycle - t);
      end
      if (bf16_is_zero(xi))      ex = BF16_INF;
      else if (xi[15])           ex = 16'h7FC0;
      else                       ex = r2bf(1.0 / $sqrt(bf2r(xi)));
      checks++;
      if ((xi[15] || bf16_is_zero(xi)) ? (y !== ex) : (ulp_dist(y, ex) > 1)) begin
        failures++;
        if (failures < 10) $display("rsqrt(%h) = %h, expected %h", xi, y, ex);
      end
    end
  end

  task automatic push(bf16_t v);
    in_valid <= 1'b1;
    x        <= v;
    q_x.push_back(v);
    q_t.push_back(cycle + 1);
    @(posedge clk);
  endtask

  initial begin
    in_valid = 1'b0;
    x = '0;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    push(16'h3F80);   // 1.0
    push(16'h4080);   // 4.0
    push(16'h3E80);   // 0.25
    push(16'h4000);   // 2.0
    push(16'h0000);
    push(16'hC000);
    for (int i = 0; i < 3000; i++) push({1'b0, rnd_bf(60, 190)} [15:0] & 16'h7FFF);
    in_valid <= 1'b0;
    repeat (5) @(posedge clk);
    if (q_x.size() != 0) begin failures++; $display("%0d results missing", q_x.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
