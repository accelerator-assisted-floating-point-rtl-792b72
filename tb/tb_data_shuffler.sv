// tb_data_shuffler -- the shuffler in front of a parallel vector memory.
// Writes several random 16 x 16 complex blocks row by row (row mode), then
// reads every row and every column back and compares with the matrix kept in
// the testbench; then writes columns in column mode with a random lane mask
// and checks rows again. Every access is a single cycle with one cycle of
// read latency.
module tb_data_shuffler;
  import asip_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  pvm_req_t req;
  cvec_t    rdata;
  logic [LANES-1:0]             bank_en, bank_we;
  logic [LANES-1:0][PVM_AW-1:0] bank_addr;
  cbf16_t [LANES-1:0]           bank_wdata, bank_rdata;
  int checks = 0, failures = 0;

  data_shuffler dut (.clk, .rst_n, .req, .rdata, .bank_en, .bank_we, .bank_addr, .bank_wdata, .bank_rdata);
  parallel_vector_memory u_mem (.clk, .bank_en, .bank_we, .bank_addr, .bank_wdata, .bank_rdata);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  localparam int NB = 4;
  cbf16_t m [NB][16][16];
  int     blkbase [NB] = '{0, 16, 4096, 8176};

  task automatic access(input logic we, input access_mode_e mode, input int addr,
                        input cvec_t wd, input logic [LANES-1:0] mask, output cvec_t rd);
    req.valid = 1'b1; req.we = we; req.mode = mode; req.addr = PVM_AW'(addr);
    req.wdata = wd; req.mask = mask;
    @(negedge clk);
    req.valid = 1'b0;
    rd = rdata;
  endtask

  task automatic check_all();
    cvec_t rd, dummy;
    for (int b = 0; b < NB; b++)
      for (int k = 0; k < 16; k++) begin
        access(1'b0, MODE_ROW, blkbase[b] + k, '0, '0, rd);
        for (int c = 0; c < 16; c++) begin
          checks++;
          if (rd[c] !== m[b][k][c]) begin failures++; if (failures < 10) $display("row %0d/%0d lane %0d: %h vs %h", b, k, c, rd[c], m[b][k][c]); end
        end
        access(1'b0, MODE_COL, blkbase[b] + k, '0, '0, rd);
        for (int r = 0; r < 16; r++) begin
          checks++;
          if (rd[r] !== m[b][r][k]) begin failures++; if (failures < 10) $display("col %0d/%0d lane %0d: %h vs %h", b, k, r, rd[r], m[b][r][k]); end
        end
      end
  endtask

  initial begin
    cvec_t wd, rd;
    logic [LANES-1:0] mask;
    req = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int b = 0; b < NB; b++)
      for (int r = 0; r < 16; r++) begin
        for (int c = 0; c < 16; c++) begin m[b][r][c] = cbf16_t'($urandom); wd[c] = m[b][r][c]; end
        access(1'b1, MODE_ROW, blkbase[b] + r, wd, '1, rd);
      end
    check_all();
    // masked column writes
    for (int b = 0; b < NB; b++)
      for (int c = 0; c < 16; c++) begin
        mask = LANES'($urandom);
        for (int r = 0; r < 16; r++) begin
          wd[r] = cbf16_t'($urandom);
          if (mask[r]) m[b][r][c] = wd[r];
        end
        access(1'b1, MODE_COL, blkbase[b] + c, wd, mask, rd);
      end
    check_all();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
