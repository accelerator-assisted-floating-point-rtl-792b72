// tb_cnn_conv_engine -- random activation rows, coefficients and incoming
// partial sums for the three-PU convolution engine, compared with a direct
// 3 x 3 sum of products; checks the one-cycle latency and that out_valid
// follows in_valid.
module tb_cnn_conv_engine;
  import asip_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  logic in_valid = 1'b0, out_valid;
  fx16_t [2:0][LANES+1:0] act;
  fx16_t [2:0][2:0] w;
  logic signed [LANES-1:0][31:0] psum_in, psum_out, expect_q;
  int checks = 0, failures = 0;

  cnn_conv_engine dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    act = '0; w = '0; psum_in = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 2000; t++) begin
      @(negedge clk);
      for (int k = 0; k < 3; k++) begin
        for (int e = 0; e < LANES + 2; e++) act[k][e] = fx16_t'($urandom);
        for (int j = 0; j < 3; j++) w[k][j] = fx16_t'($urandom % 1024) - fx16_t'(512);
      end
      for (int p = 0; p < LANES; p++) begin
        logic signed [31:0] s;
        psum_in[p] = 32'($urandom % 65536) - 32'sd32768;
        s = psum_in[p];
        for (int k = 0; k < 3; k++)
          for (int j = 0; j < 3; j++) s += int'($signed(act[k][p+j])) * int'($signed(w[k][j]));
        expect_q[p] = s;
      end
      in_valid = 1'b1;
      @(negedge clk);
      in_valid = 1'b0;
      checks++;
      if (!out_valid || psum_out !== expect_q) begin
        failures++;
        if (failures < 5) $display("trial %0d: valid %b got %h expected %h", t, out_valid, psum_out, expect_q);
      end
      @(negedge clk);
      checks++;
      if (out_valid) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
