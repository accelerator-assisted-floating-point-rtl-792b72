// cnn_conv_engine -- row-stationary 3 x 3 convolution datapath of the CNN
// accelerator: three processing units (PU 1-3), one per filter row, each a row
// of processing elements (PEs) with three multipliers and an adder.
//
// How it works. PU k holds filter row k (taps w[k][0..2]) and receives one
// activation row of LANES+2 entries: the LANES pixels of a 16-pixel output
// segment plus one halo pixel on each side (zero at an image border, which is
// the padding "0" input of the multiplexers). PE p of PU k computes
//   w[k][0]*act[k][p] + w[k][1]*act[k][p+1] + w[k][2]*act[k][p+2],
// and the three PU results of a PE column are summed with the incoming partial
// sum, so one call adds the contribution of one input channel to LANES output
// pixels. Products are fixed point: act and w carry CNN_FRAC fraction bits, the
// partial sums keep 2*CNN_FRAC fraction bits in 32 bits.
//
// Interface and timing: act/w/psum_in are sampled when in_valid is high;
// psum_out and out_valid follow one clock later (one pipeline register).
//
// Paper versus design choice: three PUs of PEs with three multipliers and an
// adder each, the row buffer feeding activation rows and the zero padding
// inputs follow the figure of the accelerator. The figure numbers its PEs and
// row entries slightly differently (PE 0..16, entries 0..17); here a PU has
// exactly LANES PEs so that a result row is one memory word. The 32-bit partial
// sum width is this design's choice.
module cnn_conv_engine
  import asip_pkg::*;
(
  input  logic                              clk,
  input  logic                              rst_n,
  input  logic                              in_valid,
  input  fx16_t [2:0][LANES+1:0]            act,      // [PU][row entry]
  input  fx16_t [2:0][2:0]                  w,        // [PU][tap]
  input  logic signed [LANES-1:0][31:0]     psum_in,
  output logic                              out_valid,
  output logic signed [LANES-1:0][31:0]     psum_out
);

  logic signed [LANES-1:0][31:0] sum_c;

  always_comb begin
    for (int p = 0; p < LANES; p++) begin
      logic signed [31:0] s;
      s = psum_in[p];
      for (int k = 0; k < 3; k++)
        for (int t = 0; t < 3; t++)
          s = s + 32'($signed(act[k][p+t]) * $signed(w[k][t]));
      sum_c[p] = s;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      psum_out  <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) psum_out <= sum_c;
    end
  end

endmodule
