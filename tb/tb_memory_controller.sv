// tb_memory_controller -- the memory controller with a parallel vector memory
// behind it. Random requests from the systolic array, processor and host
// ports (row and column mode, reads and writes, over a few 16 x 16 blocks so
// that they collide) check the fixed priority (array, processor, DMA, host),
// that exactly the granted request reaches the memory, and the data read back
// against an element-level model of the skewed storage. A DMA copy-and-split
// then runs in the cycles left free and its CNN-memory writes are checked.
module tb_memory_controller;
  import asip_pkg::*;
  import tb_ref_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  pvm_req_t proc_req, sa_req, host_req;
  logic proc_gnt, sa_gnt, host_gnt;
  logic dma_start = 1'b0, dma_transpose = 1'b0, dma_busy, dma_done;
  logic [PVM_AW-1:0] dma_src = '0;
  logic [CNN_AW-1:0] dma_dst_re = '0, dma_dst_im = '0;
  logic [5:0] dma_rows_blk = '0, dma_cols_blk = '0;
  cnn_req_t cnn_req;
  logic cnn_gnt;
  cvec_t rdata;
  logic [LANES-1:0] bank_en, bank_we;
  logic [LANES-1:0][PVM_AW-1:0] bank_addr;
  cbf16_t [LANES-1:0] bank_wdata, bank_rdata;
  int checks = 0, failures = 0;

  memory_controller dut (.*);
  parallel_vector_memory mem (.clk, .bank_en, .bank_we, .bank_addr, .bank_wdata, .bank_rdata);

  always #5 clk = ~clk;
  assign cnn_gnt = 1'b1;

  initial begin : watchdog
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [31:0] E [4][16][16];   // element model: block, row, column

  function automatic pvm_req_t rnd_req();
    pvm_req_t r;
    r = '0;
    r.valid = ($urandom % 2) == 1;
    r.we    = ($urandom % 2) == 1;
    r.mode  = access_mode_e'($urandom % 2);
    r.addr  = PVM_AW'($urandom % 64);
    r.mask  = '1;
    for (int l = 0; l < LANES; l++) r.wdata[l] = cbf16_t'(rnd_cbf());
    return r;
  endfunction

  // the element of the model addressed by lane l of a request
  function automatic void pos(pvm_req_t r, int l, output int b, output int row, output int col);
    b = int'(r.addr) / 16;
    row = (r.mode == MODE_ROW) ? int'(r.addr) % 16 : l;
    col = (r.mode == MODE_ROW) ? l : int'(r.addr) % 16;
  endfunction

  initial begin
    pvm_req_t win;
    int b, row, col, n_wr;
    sa_req = '0; proc_req = '0; host_req = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // initialise the four blocks
    for (int a = 0; a < 64; a++) begin
      host_req = '0; host_req.valid = 1; host_req.we = 1; host_req.mask = '1; host_req.addr = PVM_AW'(a);
      for (int l = 0; l < LANES; l++) begin
        host_req.wdata[l] = cbf16_t'(rnd_cbf());
        E[a / 16][a % 16][l] = host_req.wdata[l];
      end
      @(negedge clk);
    end
    host_req = '0;
    for (int t = 0; t < 3000; t++) begin
      sa_req = rnd_req(); proc_req = rnd_req(); host_req = rnd_req();
      #1;
      // priority check
      checks++;
      if (sa_gnt !== sa_req.valid ||
          proc_gnt !== (proc_req.valid && !sa_req.valid) ||
          host_gnt !== (host_req.valid && !sa_req.valid && !proc_req.valid)) begin
        failures++;
        if (failures < 10) $display("grant %b%b%b for valid %b%b%b", sa_gnt, proc_gnt, host_gnt,
                                    sa_req.valid, proc_req.valid, host_req.valid);
      end
      win = sa_gnt ? sa_req : proc_gnt ? proc_req : host_gnt ? host_req : '0;
      @(posedge clk);
      #1;
      // read data of this cycle's granted read (registered at this edge)
      if (win.valid && !win.we) begin
        for (int l = 0; l < LANES; l++) begin
          pos(win, l, b, row, col);
          checks++;
          if (rdata[l] !== E[b][row][col]) begin
            failures++;
            if (failures < 10) $display("read %0d mode %0d lane %0d = %h, expected %h", win.addr, win.mode, l, rdata[l], E[b][row][col]);
          end
        end
      end
      if (win.valid && win.we)
        for (int l = 0; l < LANES; l++) begin
          pos(win, l, b, row, col);
          E[b][row][col] = win.wdata[l];
        end
      @(negedge clk);
    end
    sa_req = '0; proc_req = '0; host_req = '0;
    // DMA: block 1 (transposed) into CNN words 100.. (re) and 200.. (im)
    @(negedge clk);
    dma_src = PVM_AW'(16); dma_dst_re = CNN_AW'(100); dma_dst_im = CNN_AW'(200);
    dma_rows_blk = 6'd1; dma_cols_blk = 6'd1; dma_transpose = 1; dma_start = 1;
    @(negedge clk); dma_start = 0;
    n_wr = 0;
    while (dma_busy) begin
      @(posedge clk);
      if (cnn_req.valid && cnn_req.we) begin
        logic [16*LANES-1:0] flat;
        int r, im;
        n_wr++;
        flat = cnn_req.wdata;
        im = (int'(cnn_req.addr) >= 200) ? 1 : 0;
        r = int'(cnn_req.addr) - (im ? 200 : 100);
        for (int l = 0; l < LANES; l++) begin
          logic [15:0] src;
          src = im ? E[1][l][r][15:0] : E[1][l][r][31:16];
          checks++;
          if (flat[16*l +: 16] !== bf16_to_fx(src)) begin
            failures++;
            if (failures < 10) $display("dma word %0d lane %0d = %h, expected %h", cnn_req.addr, l, flat[16*l +: 16], bf16_to_fx(src));
          end
        end
      end
      @(negedge clk);
    end
    checks++;
    if (n_wr != 32) begin failures++; $display("dma wrote %0d words", n_wr); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
