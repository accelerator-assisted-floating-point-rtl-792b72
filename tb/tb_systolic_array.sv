// tb_systolic_array -- the systolic array on a real parallel vector memory
// (data shuffler + banks). For several shapes, random complex bfloat16 matrices
// are written into memory in the block-wise column-major layout, the array is
// configured with the sys.sz / sys.des / sys.mul ports, and the result matrix
// read back from memory is compared bit-exactly with a reference computed in
// real arithmetic that rounds to bfloat16 after every product and sum, in the
// same order of k. The busy time of every run is compared with the cycle count
// of the schedule (32 N/16 + 64 per output block, 16 N/16 + 64 for a Gramian
// diagonal block) and printed next to the paper's estimate (M/16)(P/16)(2N+32).
module tb_systolic_array;
  import asip_pkg::*;
  import tb_ref_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  logic sz_we = 0, des_we = 0, mul_we = 0, mul_gramian = 0;
  logic [5:0] sz_m, sz_n, sz_p;
  logic [PVM_AW-1:0] des_addr, mul_addr_a, mul_addr_b;
  logic busy, done;
  pvm_req_t sa_req, tb_req, req;
  cvec_t rdata;
  logic [LANES-1:0]             bank_en, bank_we;
  logic [LANES-1:0][PVM_AW-1:0] bank_addr;
  cbf16_t [LANES-1:0]           bank_wdata, bank_rdata;
  int checks = 0, failures = 0;

  systolic_array dut (.clk, .rst_n, .sz_we, .sz_m, .sz_n, .sz_p, .des_we, .des_addr,
                      .mul_we, .mul_addr_a, .mul_addr_b, .mul_gramian, .busy, .done,
                      .pvm_req(sa_req), .pvm_rdata(rdata));
  assign req = busy ? sa_req : tb_req;
  data_shuffler u_sh (.clk, .rst_n, .req, .rdata, .bank_en, .bank_we, .bank_addr, .bank_wdata, .bank_rdata);
  parallel_vector_memory u_mem (.clk, .bank_en, .bank_we, .bank_addr, .bank_wdata, .bank_rdata);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  cbf16_t A [][], B [][];

  function automatic cbf16_t rnd_c();
    return '{re: rnd_bf(122, 130), im: rnd_bf(122, 130)};
  endfunction

  // write element-wise matrix M (R x C) at base in block layout, via row-mode writes
  task automatic store_matrix(ref cbf16_t m [][], input int R, input int C, input int base);
    for (int bj = 0; bj < C / 16; bj++)
      for (int bi = 0; bi < R / 16; bi++)
        for (int r = 0; r < 16; r++) begin
          tb_req = '0;
          tb_req.valid = 1'b1; tb_req.we = 1'b1; tb_req.mode = MODE_ROW; tb_req.mask = '1;
          tb_req.addr = PVM_AW'(base + (bj * (R / 16) + bi) * 16 + r);
          for (int c = 0; c < 16; c++) tb_req.wdata[c] = m[bi * 16 + r][bj * 16 + c];
          @(negedge clk);
        end
    tb_req = '0;
  endtask

  task automatic run(input int M, input int N, input int P, input bit gram);
    int a_base = 0, b_base = 2048, c_base = 4096;
    int t0, cycles, expected, paper;
    cbf16_t C [][];
    cbf16_t bv;
    A = new[M]; foreach (A[i]) begin A[i] = new[N]; foreach (A[i][k]) A[i][k] = rnd_c(); end
    if (gram) P = M;
    B = new[N]; foreach (B[k]) begin B[k] = new[P]; foreach (B[k][j]) B[k][j] = gram ? cbf16_t'(ref_conj(A[j][k])) : rnd_c(); end
    store_matrix(A, M, N, a_base);
    if (!gram) store_matrix(B, N, P, b_base);
    // configure: sys.sz, sys.des, sys.mul
    sz_m = 6'(M / 16); sz_n = 6'(N / 16); sz_p = 6'(P / 16); sz_we = 1;
    @(negedge clk); sz_we = 0;
    des_addr = PVM_AW'(c_base); des_we = 1;
    @(negedge clk); des_we = 0;
    mul_addr_a = PVM_AW'(a_base); mul_addr_b = PVM_AW'(b_base); mul_gramian = gram; mul_we = 1;
    @(negedge clk); mul_we = 0;
    t0 = $time;
    while (busy) @(negedge clk);
    cycles = ($time - t0) / 10;
    expected = 0;
    for (int bj = 0; bj < P / 16; bj++)
      for (int bi = 0; bi < M / 16; bi++)
        expected += (gram && bi == bj) ? (16 * (N / 16 - 1) + 1 + 33 + 16) : (32 * (N / 16 - 1) + 17 + 33 + 16);
    paper = (M / 16) * (P / 16) * (2 * N + 32);
    $display("%0dx%0d * %0dx%0d%s: %0d cycles (schedule %0d, paper estimate %0d)",
             M, N, N, P, gram ? " (Gramian)" : "", cycles, expected, paper);
    checks++;
    if (cycles != expected) begin failures++; $display("cycle count mismatch"); end
    // reference
    C = new[M];
    foreach (C[i]) begin
      C[i] = new[P];
      foreach (C[i][j]) begin
        C[i][j] = '0;
        for (int k = 0; k < N; k++) C[i][j] = ref_cadd(C[i][j], ref_cmul(A[i][k], B[k][j]));
      end
    end
    // read back C row by row
    for (int bj = 0; bj < P / 16; bj++)
      for (int bi = 0; bi < M / 16; bi++)
        for (int r = 0; r < 16; r++) begin
          tb_req = '0; tb_req.valid = 1'b1; tb_req.mode = MODE_ROW;
          tb_req.addr = PVM_AW'(c_base + (bj * (M / 16) + bi) * 16 + r);
          @(negedge clk);
          tb_req = '0;
          for (int c = 0; c < 16; c++) begin
            checks++;
            if (rdata[c] !== C[bi * 16 + r][bj * 16 + c]) begin
              failures++;
              if (failures < 10) $display("C[%0d][%0d] = %h, expected %h", bi * 16 + r, bj * 16 + c, rdata[c], C[bi * 16 + r][bj * 16 + c]);
            end
          end
        end
  endtask

  initial begin
    tb_req = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    run(16, 16, 16, 0);
    run(32, 32, 32, 0);
    run(16, 64, 32, 0);
    run(16, 128, 16, 1);
    run(32, 32, 32, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
