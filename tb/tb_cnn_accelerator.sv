// tb_cnn_accelerator -- runs a small convolution layer (2 input planes of
// 6 x 32, 3 filters, ReLU) and then a 2 x 2 max-pool layer on its result, with
// the accelerator connected to a CNN vector memory that randomly refuses
// requests. Every output pixel is compared with a reference computed in the
// testbench (zero padding, Q7.8 arithmetic, truncating shift, saturation).
// Also checks that busy stays high during a layer and that done pulses once.
module tb_cnn_accelerator;
  import asip_pkg::*;

  localparam int H = 6, WW = 2, W = 16 * WW, CI = 2, CO = 3;
  localparam int IN_B = 100, W_B = 20, OUT_B = 400, POOL_B = 1000;

  logic clk = 1'b0, rst_n = 1'b0;
  logic start = 1'b0, op_pool = 1'b0, relu = 1'b0;
  logic [CNN_AW-1:0] in_base = '0, out_base = '0, w_base = '0;
  logic [7:0] height = '0;
  logic [3:0] wwords = '0;
  logic [4:0] cin = '0, cout = '0;
  logic busy, done;
  cnn_req_t acc_req, tb_req, mem_req;
  logic mem_gnt, deny;
  fxvec_t rdata;
  int checks = 0, failures = 0, done_count = 0;

  cnn_accelerator dut (.clk, .rst_n, .start, .op_pool, .relu, .in_base, .out_base, .w_base,
                       .height, .wwords, .cin, .cout, .busy, .done,
                       .mem_req(acc_req), .mem_gnt, .mem_rdata(rdata));
  cnn_vector_memory mem (.clk, .req(mem_req), .rdata);

  always #5 clk = ~clk;
  always @(posedge clk) deny <= ($urandom % 4) == 0;
  assign mem_gnt = !deny;
  always_comb begin
    mem_req = tb_req.valid ? tb_req : acc_req;
    if (!tb_req.valid && deny) mem_req.valid = 1'b0;
  end
  always @(posedge clk) if (done) done_count++;

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int img [CI][H][W];
  int coef [CO][CI][9];
  int conv_ref [CO][H][W];

  // lane l of a word, taken from the flat vector
  function automatic int lane(fxvec_t w, int l);
    logic [16*LANES-1:0] flat;
    flat = w;
    return int'($signed(flat[16*l +: 16]));
  endfunction

  function automatic fxvec_t set_lane(fxvec_t w, int l, int v);
    logic [16*LANES-1:0] flat;
    flat = w;
    flat[16*l +: 16] = 16'(v);
    return flat;
  endfunction

  task automatic wr(int a, fxvec_t d);
    tb_req = '0; tb_req.valid = 1; tb_req.we = 1; tb_req.addr = CNN_AW'(a); tb_req.wdata = d;
    @(negedge clk);
    tb_req = '0;
  endtask

  task automatic rd(int a, output fxvec_t d);
    tb_req = '0; tb_req.valid = 1; tb_req.addr = CNN_AW'(a);
    @(negedge clk);
    tb_req = '0;
    d = rdata;
  endtask

  task automatic run_layer(bit pool, int ib, int ob, int hh, int wwd, int nci, int nco);
    int t0, c;
    op_pool = pool; relu = 1; in_base = CNN_AW'(ib); out_base = CNN_AW'(ob); w_base = CNN_AW'(W_B);
    height = 8'(hh); wwords = 4'(wwd); cin = 5'(nci); cout = 5'(nco);
    c = done_count;
    start = 1; @(negedge clk); start = 0;
    checks++;
    if (!busy) begin failures++; $display("busy not raised"); end
    while (busy) @(negedge clk);
    @(negedge clk);
    checks++;
    if (done_count != c + 1) begin failures++; $display("done count %0d", done_count - c); end
  endtask

  initial begin
    fxvec_t d;
    tb_req = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // input planes
    for (int c = 0; c < CI; c++)
      for (int y = 0; y < H; y++)
        for (int x = 0; x < W; x++) img[c][y][x] = int'($urandom % 1024) - 512;
    for (int c = 0; c < CI; c++)
      for (int y = 0; y < H; y++)
        for (int xw = 0; xw < WW; xw++) begin
          for (int l = 0; l < LANES; l++) d = set_lane(d, l, img[c][y][16*xw+l]);
          wr(IN_B + (c * H + y) * WW + xw, d);
        end
    for (int o = 0; o < CO; o++)
      for (int c = 0; c < CI; c++) begin
        d = '0;
        for (int k = 0; k < 9; k++) begin
          coef[o][c][k] = int'($urandom % 512) - 256;
          d = set_lane(d, k, coef[o][c][k]);
        end
        wr(W_B + o * CI + c, d);
      end
    // reference convolution
    for (int o = 0; o < CO; o++)
      for (int y = 0; y < H; y++)
        for (int x = 0; x < W; x++) begin
          int s;
          s = 0;
          for (int c = 0; c < CI; c++)
            for (int ky = 0; ky < 3; ky++)
              for (int kx = 0; kx < 3; kx++) begin
                int yy, xx;
                yy = y + ky - 1; xx = x + kx - 1;
                if (yy >= 0 && yy < H && xx >= 0 && xx < W) s += img[c][yy][xx] * coef[o][c][3*ky+kx];
              end
          s = s >>> CNN_FRAC;
          if (s < 0) s = 0;
          if (s > 32767) s = 32767;
          conv_ref[o][y][x] = s;
        end

    run_layer(0, IN_B, OUT_B, H, WW, CI, CO);
    for (int o = 0; o < CO; o++)
      for (int y = 0; y < H; y++)
        for (int xw = 0; xw < WW; xw++) begin
          rd(OUT_B + (o * H + y) * WW + xw, d);
          for (int l = 0; l < LANES; l++) begin
            checks++;
            if (int'(lane(d, l)) != conv_ref[o][y][16*xw+l]) begin
              failures++;
              if (failures < 10) $display("conv o%0d y%0d x%0d: %0d expected %0d", o, y, 16*xw+l, lane(d, l), conv_ref[o][y][16*xw+l]);
            end
          end
        end

    run_layer(1, OUT_B, POOL_B, H, WW, CO, 0);
    for (int o = 0; o < CO; o++)
      for (int y = 0; y < H / 2; y++) begin
        rd(POOL_B + o * (H / 2) + y, d);
        for (int l = 0; l < LANES; l++) begin
          int m;
          m = conv_ref[o][2*y][2*l];
          if (conv_ref[o][2*y][2*l+1] > m) m = conv_ref[o][2*y][2*l+1];
          if (conv_ref[o][2*y+1][2*l] > m) m = conv_ref[o][2*y+1][2*l];
          if (conv_ref[o][2*y+1][2*l+1] > m) m = conv_ref[o][2*y+1][2*l+1];
          checks++;
          if (int'(lane(d, l)) != m) begin
            failures++;
            if (failures < 10) $display("pool o%0d y%0d l%0d: %0d expected %0d", o, y, l, lane(d, l), m);
          end
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
