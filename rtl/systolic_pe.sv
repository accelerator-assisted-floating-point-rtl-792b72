// systolic_pe -- one processing element of the 16 x 16 systolic array: the
// inner buffer registers for the left operand (passed on to the right) and the
// top operand (passed on downwards), each with a valid tag, and a complex
// bfloat16 multiply-accumulate unit whose accumulator holds one element of the
// output block (output-stationary dataflow).
//
// Timing: a_in/b_in are registered on the rising edge; when both registered
// operands are valid the accumulator adds their product on the next edge.
// clear zeroes the accumulator (it takes priority over an accumulation).
module systolic_pe
  import asip_pkg::*;
(
  input  logic   clk,
  input  logic   rst_n,
  input  logic   clear,
  input  cbf16_t a_in,
  input  logic   a_vin,
  input  cbf16_t b_in,
  input  logic   b_vin,
  output cbf16_t a_out,
  output logic   a_vout,
  output cbf16_t b_out,
  output logic   b_vout,
  output cbf16_t acc
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      a_out  <= '0;
      b_out  <= '0;
      a_vout <= 1'b0;
      b_vout <= 1'b0;
      acc    <= '0;
    end else begin
      a_out  <= a_in;
      a_vout <= a_vin;
      b_out  <= b_in;
      b_vout <= b_vin;
      if (clear)                 acc <= '0;
      else if (a_vout && b_vout) acc <= c_add(acc, c_mul(a_out, b_out));
    end
  end

endmodule
