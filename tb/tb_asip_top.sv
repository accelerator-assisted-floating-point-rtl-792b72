// tb_asip_top -- end-to-end test of the processor's vector part at its full
// size (no parameter overrides). One program exercises every mechanism:
//   1. the host port fills the parallel vector memory with A (16 x 32) and
//      B (32 x 16) in the block-wise column-major layout;
//   2. the vector core loads a row (row mode) and a column (column mode) of A,
//      adds them (a read-after-write dependency, so a pipeline bubble), reads
//      one element back to the scalar side with an indexed read and stores the
//      sum; a stall from the scalar core is applied around one operation;
//   3. sys.sz / sys.des / sys.mul compute C = A B on the systolic array while
//      the vector core keeps loading, so its accesses are refused and it stalls;
//      the run time is checked against the array's schedule;
//   4. a Gramian run computes G = A A^H;
//   5. the DMA copies C, transposed, into real and imaginary fixed-point planes
//      of the CNN memory;
//   6. the CNN accelerator runs a 3 x 3 convolution with ReLU over those two
//      planes and a 2 x 2 max pool on the result;
//   7. the inverse square root unit is used twice.
// All results are compared with references computed in the testbench. Each
// mechanism is counted and the test fails if one of them never happened.
module tb_asip_top;
  import asip_pkg::*;
  import tb_ref_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;

  vop_t v_op;
  logic v_op_ready, v_stall;
  logic xw_valid, sw_valid;
  logic [31:0] xw;
  logic [2:0] sw_addr;
  cbf16_t sw;
  logic s_we;
  logic [2:0] s_waddr;
  cbf16_t s_wdata;
  logic sz_we, des_we, mul_we, mul_gramian;
  logic [5:0] sz_m, sz_n, sz_p;
  logic [PVM_AW-1:0] des_addr, mul_addr_a, mul_addr_b;
  logic sa_busy, sa_done;
  logic dma_start, dma_transpose, dma_busy, dma_done;
  logic [PVM_AW-1:0] dma_src;
  logic [CNN_AW-1:0] dma_dst_re, dma_dst_im;
  logic [5:0] dma_rows_blk, dma_cols_blk;
  logic cnn_start, cnn_op_pool, cnn_relu, cnn_busy, cnn_done;
  logic [CNN_AW-1:0] cnn_in_base, cnn_out_base, cnn_w_base;
  logic [7:0] cnn_height;
  logic [3:0] cnn_wwords;
  logic [4:0] cnn_cin, cnn_cout;
  logic rs_valid, rs_out_valid;
  bf16_t rs_x, rs_y;
  pvm_req_t host_req;
  logic host_gnt;
  cvec_t host_rdata;
  cnn_req_t cnn_host_req;
  logic cnn_host_gnt;
  fxvec_t cnn_host_rdata;

  asip_top dut (.*);

  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- mechanism counters ----------------
  int n_host_wr = 0, n_row_ld = 0, n_col_ld = 0, n_store = 0, n_bubble = 0, n_mem_stall = 0;
  int n_ext_stall = 0, n_idx_rd = 0, n_gemm = 0, n_gram = 0, n_dma_tr = 0, n_conv = 0, n_pool = 0;
  int n_rsqrt = 0;

  logic [31:0] xw_seen;
  always @(posedge clk) if (xw_valid) xw_seen <= xw;

  always @(posedge clk) if (rst_n) begin
    if (host_req.valid && host_req.we && host_gnt) n_host_wr++;
    if (dut.proc_req.valid && !dut.proc_gnt) n_mem_stall++;
    if (dut.proc_req.valid && dut.proc_gnt && !dut.proc_req.we && dut.proc_req.mode == MODE_ROW) n_row_ld++;
    if (dut.proc_req.valid && dut.proc_gnt && !dut.proc_req.we && dut.proc_req.mode == MODE_COL) n_col_ld++;
    if (dut.proc_req.valid && dut.proc_gnt && dut.proc_req.we) n_store++;
    if (v_op.valid && !v_op_ready && !v_stall && !(dut.proc_req.valid && !dut.proc_gnt)) n_bubble++;
    if (v_stall) n_ext_stall++;
    if (xw_valid) n_idx_rd++;
    if (rs_out_valid) n_rsqrt++;
  end

  // ---------------- helpers ----------------
  task automatic host_write(int addr, cvec_t d, access_mode_e mode = MODE_ROW);
    host_req = '0; host_req.valid = 1; host_req.we = 1; host_req.mode = mode; host_req.mask = '1;
    host_req.addr = PVM_AW'(addr); host_req.wdata = d;
    @(negedge clk);
    while (!host_gnt) @(negedge clk);
    host_req = '0;
  endtask

  // the grant is decided combinationally: wait at the falling edge until it is given
  task automatic host_read(int addr, output cvec_t d, input access_mode_e mode = MODE_ROW);
    host_req = '0; host_req.valid = 1; host_req.mode = mode; host_req.addr = PVM_AW'(addr);
    #1;
    while (!host_gnt) begin @(negedge clk); #1; end
    @(negedge clk);
    host_req = '0;
    d = host_rdata;
  endtask

  task automatic cnn_write(int addr, fxvec_t d);
    cnn_host_req = '0; cnn_host_req.valid = 1; cnn_host_req.we = 1; cnn_host_req.addr = CNN_AW'(addr);
    cnn_host_req.wdata = d;
    #1;
    while (!cnn_host_gnt) begin @(negedge clk); #1; end
    @(negedge clk);
    cnn_host_req = '0;
  endtask

  task automatic cnn_read(int addr, output fxvec_t d);
    cnn_host_req = '0; cnn_host_req.valid = 1; cnn_host_req.addr = CNN_AW'(addr);
    #1;
    while (!cnn_host_gnt) begin @(negedge clk); #1; end
    @(negedge clk);
    cnn_host_req = '0;
    d = cnn_host_rdata;
  endtask

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

  // vector operation handshake: hold the operation until op_ready at a rising edge
  task automatic issue(vop_t o);
    @(negedge clk);
    v_op = o;
    #1;
    while (!v_op_ready) begin @(negedge clk); #1; end
    @(posedge clk);
    #1 v_op = '0;
  endtask

  function automatic vop_t nop();
    vop_t o;
    o = '0;
    o.valid = 1'b1;
    o.alu = VALU_PASS;
    return o;
  endfunction

  task automatic vload(int d, int addr, access_mode_e mode);
    vop_t o;
    o = nop(); o.load = 1; o.vd = 3'(d); o.addr = PVM_AW'(addr); o.mode = mode;
    issue(o);
  endtask

  // bfloat16 to the CNN fixed-point format, from the real value
  function automatic int ref_fx(logic [15:0] b);
    real v;
    int q;
    v = bf2r(b) * real'(1 << CNN_FRAC);
    if (v >= 32767.0) return 32767;
    if (v <= -32767.0) return -32767;
    q = int'(v);                     // rounds to nearest
    if (real'(q) > v && v >= 0.0) q--;  // make it truncate toward zero
    if (real'(q) < v && v < 0.0) q++;
    return q;
  endfunction

  function automatic cbf16_t rnd_small();
    return '{re: rnd_bf(119, 125), im: rnd_bf(119, 125)};
  endfunction

  task automatic check_c(string what, int base, logic [31:0] ref_m [16][16]);
    cvec_t d;
    for (int r = 0; r < 16; r++) begin
      host_read(base + r, d);
      for (int c = 0; c < 16; c++) begin
        checks++;
        if (d[c] !== ref_m[r][c]) begin
          failures++;
          if (failures < 10) $display("%s[%0d][%0d] = %h, expected %h", what, r, c, d[c], ref_m[r][c]);
        end
      end
    end
  endtask

  task automatic sys_run(int a, int b, int dst, bit gram, int expected_cycles);
    int t0, cycles;
    @(negedge clk);
    sz_m = 6'd1; sz_n = 6'd2; sz_p = 6'd1; sz_we = 1;
    @(negedge clk); sz_we = 0;
    des_addr = PVM_AW'(dst); des_we = 1;
    @(negedge clk); des_we = 0;
    mul_addr_a = PVM_AW'(a); mul_addr_b = PVM_AW'(b); mul_gramian = gram; mul_we = 1;
    @(negedge clk); mul_we = 0;
    t0 = int'($time);
    checks++;
    if (!sa_busy) begin failures++; $display("systolic array not busy after sys.mul"); end
    // keep the vector core loading while the array owns the memory
    for (int i = 0; i < 6; i++) vload(5, 3, MODE_ROW);
    while (sa_busy) @(negedge clk);
    cycles = (int'($time) - t0) / 10;
    $display("systolic run%s: %0d cycles, schedule %0d", gram ? " (Gramian)" : "", cycles, expected_cycles);
    checks++;
    if (cycles != expected_cycles) begin failures++; $display("cycle count mismatch"); end
    if (gram) n_gram++; else n_gemm++;
  endtask

  // ---------------- program ----------------
  logic [31:0] A [16][32], B [32][16], C [16][16], G [16][16];
  int planes [2][16][16];
  int coef [2][2][9];
  int conv [2][16][16];

  initial begin
    cvec_t d;
    fxvec_t f;
    vop_t o;
    logic [31:0] sum_ref [16];
    int t0;

    v_op = '0; v_stall = 0; s_we = 0; s_waddr = '0; s_wdata = '0;
    sz_we = 0; des_we = 0; mul_we = 0; mul_gramian = 0; sz_m = '0; sz_n = '0; sz_p = '0;
    des_addr = '0; mul_addr_a = '0; mul_addr_b = '0;
    dma_start = 0; dma_transpose = 0; dma_src = '0; dma_dst_re = '0; dma_dst_im = '0;
    dma_rows_blk = '0; dma_cols_blk = '0;
    cnn_start = 0; cnn_op_pool = 0; cnn_relu = 0; cnn_in_base = '0; cnn_out_base = '0; cnn_w_base = '0;
    cnn_height = '0; cnn_wwords = '0; cnn_cin = '0; cnn_cout = '0;
    rs_valid = 0; rs_x = '0;
    host_req = '0; cnn_host_req = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;

    // 1. matrices into the vector memory: A at 0 (two blocks), B at 64 (two blocks)
    foreach (A[i, k]) A[i][k] = rnd_small();
    foreach (B[k, j]) B[k][j] = rnd_small();
    for (int bj = 0; bj < 2; bj++)
      for (int r = 0; r < 16; r++) begin
        for (int c = 0; c < 16; c++) d[c] = A[r][16 * bj + c];
        host_write(16 * bj + r, d);
      end
    for (int bi = 0; bi < 2; bi++)
      for (int r = 0; r < 16; r++) begin
        for (int c = 0; c < 16; c++) d[c] = B[16 * bi + r][c];
        host_write(64 + 16 * bi + r, d);
      end

    // 2. vector core: row 3 of A, column 5 of A, their sum, indexed read, store
    vload(0, 3, MODE_ROW);
    vload(1, 5, MODE_COL);
    o = nop(); o.alu = VALU_ADD; o.vd = 3'd2; o.vr1 = 3'd0; o.vr2 = 3'd1; o.vd_we = 1;
    issue(o);
    // an indexed read of element 7 of v2 with a scalar-core stall on the way
    fork
      begin
        o = nop(); o.idx_rd = 1; o.vr1 = 3'd2; o.xr = 32'd7;
        issue(o);
      end
      begin
        @(negedge clk); v_stall = 1;
        repeat (4) @(negedge clk);
        v_stall = 0;
      end
    join
    o = nop(); o.store = 1; o.vr1 = 3'd2; o.addr = PVM_AW'(200); o.mode = MODE_ROW;
    issue(o);
    repeat (8) @(negedge clk);
    for (int c = 0; c < 16; c++) sum_ref[c] = ref_cadd(A[3][c], A[c][5]);
    host_read(200, d);
    checks++;
    if (xw_seen !== sum_ref[7]) begin failures++; $display("indexed read %h, expected %h", xw_seen, sum_ref[7]); end
    for (int c = 0; c < 16; c++) begin
      checks++;
      if (d[c] !== sum_ref[c]) begin
        failures++;
        if (failures < 10) $display("row+column sum lane %0d = %h, expected %h", c, d[c], sum_ref[c]);
      end
    end

    // 3. C = A B on the systolic array (one output block, N = 32)
    sys_run(0, 64, 320, 1'b0, 32 * (2 - 1) + 17 + 33 + 16);
    foreach (C[i, j]) begin
      C[i][j] = '0;
      for (int k = 0; k < 32; k++) C[i][j] = ref_cadd(C[i][j], ref_cmul(A[i][k], B[k][j]));
    end
    check_c("C", 320, C);

    // 4. Gramian G = A A^H
    sys_run(0, 0, 400, 1'b1, 16 * (2 - 1) + 1 + 33 + 16);
    foreach (G[i, j]) begin
      G[i][j] = '0;
      for (int k = 0; k < 32; k++) G[i][j] = ref_cadd(G[i][j], ref_cmul(A[i][k], ref_conj(A[j][k])));
    end
    check_c("G", 400, G);

    // 5. DMA: C transposed into planes re (CNN word 0..15) and im (16..31)
    @(negedge clk);
    dma_src = PVM_AW'(320); dma_dst_re = CNN_AW'(0); dma_dst_im = CNN_AW'(16);
    dma_rows_blk = 6'd1; dma_cols_blk = 6'd1; dma_transpose = 1; dma_start = 1;
    @(negedge clk); dma_start = 0;
    while (dma_busy) @(negedge clk);
    n_dma_tr++;
    for (int p = 0; p < 2; p++)
      for (int r = 0; r < 16; r++) begin
        cnn_read(16 * p + r, f);
        for (int c = 0; c < 16; c++) begin
          int e;
          e = ref_fx(p == 0 ? C[c][r][31:16] : C[c][r][15:0]);
          planes[p][r][c] = lane(f, c);
          checks++;
          if (lane(f, c) != e) begin
            failures++;
            if (failures < 10) $display("plane %0d [%0d][%0d] = %0d, expected %0d", p, r, c, lane(f, c), e);
          end
        end
      end

    // 6. CNN: 2 -> 2 planes, 3 x 3 convolution with ReLU, then 2 x 2 max pool
    for (int o2 = 0; o2 < 2; o2++)
      for (int c = 0; c < 2; c++) begin
        f = '0;
        for (int k = 0; k < 9; k++) begin
          coef[o2][c][k] = int'($urandom % 256) - 128;
          f = set_lane(f, k, coef[o2][c][k]);
        end
        cnn_write(100 + 2 * o2 + c, f);
      end
    foreach (conv[o2, y, x]) begin
      int s;
      s = 0;
      for (int c = 0; c < 2; c++)
        for (int ky = 0; ky < 3; ky++)
          for (int kx = 0; kx < 3; kx++)
            if (y + ky - 1 >= 0 && y + ky - 1 < 16 && x + kx - 1 >= 0 && x + kx - 1 < 16)
              s += planes[c][y + ky - 1][x + kx - 1] * coef[o2][c][3 * ky + kx];
      s = s >>> CNN_FRAC;
      conv[o2][y][x] = (s < 0) ? 0 : (s > 32767) ? 32767 : s;
    end
    @(negedge clk);
    cnn_op_pool = 0; cnn_relu = 1; cnn_in_base = CNN_AW'(0); cnn_out_base = CNN_AW'(200);
    cnn_w_base = CNN_AW'(100); cnn_height = 8'd16; cnn_wwords = 4'd1; cnn_cin = 5'd2; cnn_cout = 5'd2;
    cnn_start = 1;
    @(negedge clk); cnn_start = 0;
    while (cnn_busy) @(negedge clk);
    n_conv++;
    for (int o2 = 0; o2 < 2; o2++)
      for (int y = 0; y < 16; y++) begin
        cnn_read(200 + 16 * o2 + y, f);
        for (int x = 0; x < 16; x++) begin
          checks++;
          if (lane(f, x) != conv[o2][y][x]) begin
            failures++;
            if (failures < 10) $display("conv %0d [%0d][%0d] = %0d, expected %0d", o2, y, x, lane(f, x), conv[o2][y][x]);
          end
        end
      end
    // pooling needs an even number of words per row: the two 16 x 16 result
    // planes (32 consecutive words) are pooled as one plane of 16 rows x 32
    // pixels, whose row r holds conv rows 2(r % 8) and 2(r % 8) + 1 of plane r / 8
    @(negedge clk);
    cnn_op_pool = 1; cnn_in_base = CNN_AW'(200); cnn_out_base = CNN_AW'(300);
    cnn_height = 8'd16; cnn_wwords = 4'd2; cnn_cin = 5'd1;
    cnn_start = 1;
    @(negedge clk); cnn_start = 0;
    while (cnn_busy) @(negedge clk);
    n_pool++;
    for (int y = 0; y < 8; y++) begin
      cnn_read(300 + y, f);
      for (int l = 0; l < 16; l++) begin
        int m, px;
        m = -1;
        for (int dy = 0; dy < 2; dy++)
          for (int dx = 0; dx < 2; dx++) begin
            int row, x;
            row = 2 * y + dy; x = 2 * l + dx;
            px = conv[row / 8][2 * (row % 8) + x / 16][x % 16];
            if (px > m) m = px;
          end
        checks++;
        if (lane(f, l) != m) begin
          failures++;
          if (failures < 10) $display("pool [%0d][%0d] = %0d, expected %0d", y, l, lane(f, l), m);
        end
      end
    end

    // 7. inverse square root: 4.0 -> 0.5, 1.0 -> 1.0, latency two cycles
    @(negedge clk);
    rs_valid = 1; rs_x = 16'h4080;
    @(negedge clk);
    rs_x = 16'h3F80;
    @(negedge clk);
    rs_valid = 0;
    checks++;
    if (!rs_out_valid || rs_y !== 16'h3F00) begin failures++; $display("rsqrt(4) = %h", rs_y); end
    @(negedge clk);
    checks++;
    if (!rs_out_valid || rs_y !== 16'h3F80) begin failures++; $display("rsqrt(1) = %h", rs_y); end
    repeat (4) @(negedge clk);

    // every mechanism must have happened
    $display("host writes %0d, row loads %0d, column loads %0d, stores %0d, bubbles %0d, memory stalls %0d",
             n_host_wr, n_row_ld, n_col_ld, n_store, n_bubble, n_mem_stall);
    $display("scalar stalls %0d, indexed reads %0d, GEMM %0d, Gramian %0d, DMA transposed %0d, conv %0d, pool %0d, rsqrt %0d",
             n_ext_stall, n_idx_rd, n_gemm, n_gram, n_dma_tr, n_conv, n_pool, n_rsqrt);
    begin
      int counts [14];
      counts = '{n_host_wr, n_row_ld, n_col_ld, n_store, n_bubble, n_mem_stall, n_ext_stall,
                 n_idx_rd, n_gemm, n_gram, n_dma_tr, n_conv, n_pool, n_rsqrt};
      foreach (counts[i]) begin
        checks++;
        if (counts[i] == 0) begin failures++; $display("mechanism %0d never happened", i); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
