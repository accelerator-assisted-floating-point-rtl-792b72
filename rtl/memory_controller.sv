// memory_controller -- access to the parallel vector memory for the processor,
// the systolic array and the DMA, plus the DMA's path into the CNN memory.
//
// It contains the two blocks of the paper's memory controller: the data
// shuffler, which turns a row/column vector request into per-bank addresses and
// rotates the data, and the copy-and-split DMA. The memory has one access per
// cycle, so requests are granted by fixed priority: systolic array, then
// processor, then DMA, then the external host port (the path by which input
// data, e.g. received pilots, enter the memory from outside the processor).
// A refused processor request stalls the vector core until it is granted, so
// the DMA and host use the cycles the array and the processor leave free. The
// priority order and the host port are this design's choices.
//
// Matrix layout (paper, Sec. on matrix memory layout): an R x C matrix at
// vector address base is cut into 16 x 16 blocks; block (bi, bj) starts at
// base + 16 (bj R/16 + bi). Row or column k of that block is then addressed as
// block start + k in row or column mode.
//
// Timing: a granted read returns its data on rdata one cycle later; the
// requester that was granted knows the data is its own.
module memory_controller
  import asip_pkg::*;
(
  input  logic                         clk,
  input  logic                         rst_n,
  // processor (vector core load/store unit)
  input  pvm_req_t                     proc_req,
  output logic                         proc_gnt,
  // systolic array
  input  pvm_req_t                     sa_req,
  output logic                         sa_gnt,
  input  pvm_req_t                     host_req,
  output logic                         host_gnt,
  // DMA configuration from the processor
  input  logic                         dma_start,
  input  logic [PVM_AW-1:0]            dma_src,
  input  logic [CNN_AW-1:0]            dma_dst_re,
  input  logic [CNN_AW-1:0]            dma_dst_im,
  input  logic [5:0]                   dma_rows_blk,
  input  logic [5:0]                   dma_cols_blk,
  input  logic                         dma_transpose,
  output logic                         dma_busy,
  output logic                         dma_done,
  // DMA towards the CNN vector memory
  output cnn_req_t                     cnn_req,
  input  logic                         cnn_gnt,
  // shared read data
  output cvec_t                        rdata,
  // parallel vector memory banks
  output logic [LANES-1:0]             bank_en,
  output logic [LANES-1:0]             bank_we,
  output logic [LANES-1:0][PVM_AW-1:0] bank_addr,
  output cbf16_t [LANES-1:0]           bank_wdata,
  input  cbf16_t [LANES-1:0]           bank_rdata
);

  pvm_req_t dma_req, sel;
  logic     dma_gnt;

  always_comb begin
    sa_gnt   = sa_req.valid;
    proc_gnt = proc_req.valid && !sa_req.valid;
    dma_gnt  = dma_req.valid && !sa_req.valid && !proc_req.valid;
    host_gnt = host_req.valid && !sa_req.valid && !proc_req.valid && !dma_req.valid;
    if (sa_req.valid)        sel = sa_req;
    else if (proc_req.valid) sel = proc_req;
    else if (dma_req.valid)  sel = dma_req;
    else                     sel = host_req;
  end

  data_shuffler u_shuffler (
    .clk, .rst_n,
    .req        (sel),
    .rdata      (rdata),
    .bank_en, .bank_we, .bank_addr, .bank_wdata, .bank_rdata
  );

  dma u_dma (
    .clk, .rst_n,
    .start     (dma_start),
    .src       (dma_src),
    .dst_re    (dma_dst_re),
    .dst_im    (dma_dst_im),
    .rows_blk  (dma_rows_blk),
    .cols_blk  (dma_cols_blk),
    .transpose (dma_transpose),
    .busy      (dma_busy),
    .done      (dma_done),
    .pvm_req   (dma_req),
    .pvm_gnt   (dma_gnt),
    .pvm_rdata (rdata),
    .cnn_req   (cnn_req),
    .cnn_gnt   (cnn_gnt)
  );

endmodule
