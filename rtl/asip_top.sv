// asip_top -- the vector part of the ASIP: vector core, memory controller
// (data shuffler and DMA), parallel vector memory, systolic array, inverse
// square root unit, and the CNN accelerator with its own vector memory.
//
// How it fits together.
//  - The vector core executes decoded vector instructions (vop_t) handed over
//    by the scalar core's issue logic; scalar-side results come back on the
//    xw (RISC-V register) and sw (vector scalar register) write ports.
//  - The systolic array is configured with sys.sz / sys.des / sys.mul; sys.mul
//    starts it. It reads its operands from and writes its result to the
//    parallel vector memory itself.
//  - The memory controller grants the single memory access per cycle by
//    priority: systolic array, vector core, DMA, host port. A refused vector
//    core access stalls the vector pipeline until it is granted, so vector code
//    can overlap with a systolic multiplication as long as it does not need
//    the memory.
//  - The DMA copies a complex matrix out of the parallel vector memory and
//    splits it into real and imaginary fixed-point planes in the CNN memory
//    (optionally transposed); the CNN accelerator then runs layers on them.
//    The CNN memory has one access per cycle: DMA first, then the accelerator,
//    then the host port.
//  - rsqrt_unit is the scalar core's two-stage inverse square root.
//
// Interface and timing. All ports are plain signals or packed structs.
// Configuration pulses (sz_we, des_we, mul_we, dma_start, cnn_start) are
// sampled on a rising edge; busy/done report progress, done pulses for one
// cycle. The two host ports are request/grant interfaces with read data one
// cycle after a granted read, as on the internal memories.
//
// Paper versus design choice: the set of units, the shared parallel vector
// memory, the copy-and-split DMA and the separate CNN memory follow the
// processor block diagram. The scalar RISC-V core, its instruction and scalar
// memories are outside this block (their instruction stream appears here as
// decoded vector operations and configuration pulses); the host ports and
// both arbitration orders are this design's choices.
module asip_top
  import asip_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  // vector instruction issue from the scalar core
  input  vop_t              v_op,
  output logic              v_op_ready,
  input  logic              v_stall,
  output logic              xw_valid,
  output logic [31:0]       xw,
  output logic              sw_valid,
  output logic [2:0]        sw_addr,
  output cbf16_t            sw,
  input  logic              s_we,
  input  logic [2:0]        s_waddr,
  input  cbf16_t            s_wdata,
  // systolic array configuration (sys.sz, sys.des, sys.mul)
  input  logic              sz_we,
  input  logic [5:0]        sz_m,
  input  logic [5:0]        sz_n,
  input  logic [5:0]        sz_p,
  input  logic              des_we,
  input  logic [PVM_AW-1:0] des_addr,
  input  logic              mul_we,
  input  logic [PVM_AW-1:0] mul_addr_a,
  input  logic [PVM_AW-1:0] mul_addr_b,
  input  logic              mul_gramian,
  output logic              sa_busy,
  output logic              sa_done,
  // DMA configuration
  input  logic              dma_start,
  input  logic [PVM_AW-1:0] dma_src,
  input  logic [CNN_AW-1:0] dma_dst_re,
  input  logic [CNN_AW-1:0] dma_dst_im,
  input  logic [5:0]        dma_rows_blk,
  input  logic [5:0]        dma_cols_blk,
  input  logic              dma_transpose,
  output logic              dma_busy,
  output logic              dma_done,
  // CNN accelerator configuration
  input  logic              cnn_start,
  input  logic              cnn_op_pool,
  input  logic              cnn_relu,
  input  logic [CNN_AW-1:0] cnn_in_base,
  input  logic [CNN_AW-1:0] cnn_out_base,
  input  logic [CNN_AW-1:0] cnn_w_base,
  input  logic [7:0]        cnn_height,
  input  logic [3:0]        cnn_wwords,
  input  logic [4:0]        cnn_cin,
  input  logic [4:0]        cnn_cout,
  output logic              cnn_busy,
  output logic              cnn_done,
  // inverse square root (scalar core execution unit)
  input  logic              rs_valid,
  input  bf16_t             rs_x,
  output logic              rs_out_valid,
  output bf16_t             rs_y,
  // host access to the parallel vector memory
  input  pvm_req_t          host_req,
  output logic              host_gnt,
  output cvec_t             host_rdata,
  // host access to the CNN memory
  input  cnn_req_t          cnn_host_req,
  output logic              cnn_host_gnt,
  output fxvec_t            cnn_host_rdata
);

  // ---------------- parallel vector memory side ----------------
  pvm_req_t proc_req, sa_req;
  logic     proc_gnt, sa_gnt;
  cvec_t    rdata;

  logic [LANES-1:0]             bank_en, bank_we;
  logic [LANES-1:0][PVM_AW-1:0] bank_addr;
  cbf16_t [LANES-1:0]           bank_wdata, bank_rdata;

  cnn_req_t dma_cnn_req, acc_req, cmem_req;
  logic     acc_gnt;
  fxvec_t   cmem_rdata;

  vector_core u_vector_core (
    .clk, .rst_n,
    .op        (v_op),
    .op_ready  (v_op_ready),
    .ext_stall (v_stall),
    .mem_req   (proc_req),
    .mem_gnt   (proc_gnt),
    .mem_rdata (rdata),
    .xw_valid, .xw, .sw_valid, .sw_addr, .sw,
    .s_we, .s_waddr, .s_wdata
  );

  systolic_array u_systolic_array (
    .clk, .rst_n,
    .sz_we, .sz_m, .sz_n, .sz_p,
    .des_we, .des_addr,
    .mul_we, .mul_addr_a, .mul_addr_b, .mul_gramian,
    .busy      (sa_busy),
    .done      (sa_done),
    .pvm_req   (sa_req),
    .pvm_rdata (rdata)
  );

  memory_controller u_memory_controller (
    .clk, .rst_n,
    .proc_req, .proc_gnt,
    .sa_req, .sa_gnt,
    .host_req, .host_gnt,
    .dma_start, .dma_src, .dma_dst_re, .dma_dst_im,
    .dma_rows_blk, .dma_cols_blk, .dma_transpose,
    .dma_busy, .dma_done,
    .cnn_req   (dma_cnn_req),
    .cnn_gnt   (1'b1),
    .rdata,
    .bank_en, .bank_we, .bank_addr, .bank_wdata, .bank_rdata
  );

  parallel_vector_memory u_parallel_vector_memory (
    .clk,
    .bank_en, .bank_we, .bank_addr, .bank_wdata, .bank_rdata
  );

  assign host_rdata = rdata;

  // the array's schedule has no wait states: it must win every access it asks for
  a_sa_granted: assert property (@(posedge clk) disable iff (!rst_n) sa_req.valid |-> sa_gnt);

  // ---------------- CNN side ----------------
  cnn_accelerator u_cnn_accelerator (
    .clk, .rst_n,
    .start     (cnn_start),
    .op_pool   (cnn_op_pool),
    .relu      (cnn_relu),
    .in_base   (cnn_in_base),
    .out_base  (cnn_out_base),
    .w_base    (cnn_w_base),
    .height    (cnn_height),
    .wwords    (cnn_wwords),
    .cin       (cnn_cin),
    .cout      (cnn_cout),
    .busy      (cnn_busy),
    .done      (cnn_done),
    .mem_req   (acc_req),
    .mem_gnt   (acc_gnt),
    .mem_rdata (cmem_rdata)
  );

  always_comb begin
    acc_gnt      = acc_req.valid && !dma_cnn_req.valid;
    cnn_host_gnt = cnn_host_req.valid && !dma_cnn_req.valid && !acc_req.valid;
    if (dma_cnn_req.valid)  cmem_req = dma_cnn_req;
    else if (acc_req.valid) cmem_req = acc_req;
    else                    cmem_req = cnn_host_req;
  end

  cnn_vector_memory u_cnn_vector_memory (
    .clk,
    .req   (cmem_req),
    .rdata (cmem_rdata)
  );

  assign cnn_host_rdata = cmem_rdata;

  rsqrt_unit u_rsqrt_unit (
    .clk, .rst_n,
    .in_valid  (rs_valid),
    .x         (rs_x),
    .out_valid (rs_out_valid),
    .y         (rs_y)
  );

endmodule
