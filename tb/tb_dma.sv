// tb_dma -- the copy-and-split DMA between two behavioural memories. A random
// complex matrix is placed in the source memory in 16 x 16 block layout; the
// DMA is run plain and transposed, with random refusals on both memory ports,
// and every destination word is compared with the real and imaginary parts
// converted to fixed point by a reference written here (value * 2^CNN_FRAC,
// truncated toward zero, saturated). Checks the minimum of 4 cycles per vector.
module tb_dma;
  import asip_pkg::*;
  import tb_ref_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  logic start = 0, transpose = 0;
  logic [PVM_AW-1:0] src;
  logic [CNN_AW-1:0] dst_re, dst_im;
  logic [5:0] rows_blk, cols_blk;
  logic busy, done;
  pvm_req_t pvm_req;
  logic pvm_gnt, cnn_gnt;
  cvec_t pvm_rdata;
  cnn_req_t cnn_req;
  bit deny = 0;
  int checks = 0, failures = 0;

  dma dut (.clk, .rst_n, .start, .src, .dst_re, .dst_im, .rows_blk, .cols_blk, .transpose,
           .busy, .done, .pvm_req, .pvm_gnt, .pvm_rdata, .cnn_req, .cnn_gnt);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [31:0] H [][];       // element matrix
  fxvec_t cmem [int];

  always @(negedge clk) begin
    pvm_gnt = !(deny && $urandom % 4 == 0);
    cnn_gnt = !(deny && $urandom % 4 == 0);
  end

  // source memory answers with the matrix in block layout (row or column mode)
  int R, C;
  always @(posedge clk) begin
    if (pvm_req.valid && pvm_gnt) begin
      int a, blk, k, bi, bj;
      a = int'(pvm_req.addr) - int'(src);
      blk = a / 16; k = a % 16;
      bi = blk % (R / 16); bj = blk / (R / 16);
      for (int l = 0; l < 16; l++)
        pvm_rdata[l] <= (pvm_req.mode == MODE_ROW) ? H[bi * 16 + k][bj * 16 + l] : H[bi * 16 + l][bj * 16 + k];
    end
    if (cnn_req.valid && cnn_gnt && cnn_req.we) cmem[int'(cnn_req.addr)] = cnn_req.wdata;
  end

  function automatic logic signed [15:0] ref_fx(logic [15:0] b);
    real v;
    v = bf2r(b) * real'(1 << CNN_FRAC);
    if (v >= 32767.0) return 16'sd32767;
    if (v <= -32767.0) return -16'sd32767;
    return 16'(int'($rtoi(v)));
  endfunction

  task automatic run(int rr, int cc, bit tr, bit dn);
    int t0, cycles, orows, ocols;
    R = rr; C = cc; deny = dn;
    H = new[R];
    foreach (H[i]) begin
      H[i] = new[C];
      foreach (H[i][j]) H[i][j] = {rnd_bf(110, 140), rnd_bf(110, 140)};
    end
    H[0][0] = {16'h4780, 16'hC780};        // +-65536: saturates
    cmem.delete();
    @(negedge clk);
    src = 13'd1000; dst_re = 15'd100; dst_im = 15'd5000;
    rows_blk = 6'(R / 16); cols_blk = 6'(C / 16); transpose = tr; start = 1;
    @(negedge clk);
    start = 0;
    t0 = $time;
    while (!done) @(negedge clk);
    cycles = ($time - t0) / 10;
    checks++;
    if (cycles < 4 * R * C / 16) begin failures++; $display("too fast: %0d cycles", cycles); end
    if (!dn && cycles != 4 * R * C / 16) begin failures++; $display("%0d cycles, expected %0d", cycles, 4 * R * C / 16); end
    orows = tr ? C : R;
    ocols = tr ? R : C;
    for (int i = 0; i < orows; i++)
      for (int j = 0; j < ocols; j++) begin
        logic [31:0] e;
        int w;
        e = tr ? H[j][i] : H[i][j];
        w = i * (ocols / 16) + j / 16;
        checks += 2;
        if (!cmem.exists(100 + w) || cmem[100 + w][j % 16] !== ref_fx(e[31:16])) begin
          failures++;
          if (failures < 10) $display("re[%0d][%0d] wrong: w=%0d exists=%0d got %h exp %h", i, j, w, cmem.exists(100 + w), cmem.exists(100+w) ? cmem[100 + w][j % 16] : 0, ref_fx(e[31:16]));
        end
        if (!cmem.exists(5000 + w) || cmem[5000 + w][j % 16] !== ref_fx(e[15:0])) begin
          failures++;
          if (failures < 10) $display("im[%0d][%0d] wrong", i, j);
        end
      end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    run(32, 48, 0, 0);
    run(32, 48, 1, 1);
    run(64, 32, 0, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
