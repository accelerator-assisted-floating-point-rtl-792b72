// data_shuffler -- address generation and element swizzling for the parallel
// vector memory.
//
// Matrices are stored as 16 x 16 blocks (block-wise column-major, see
// memory_controller.sv). A vector address a names block b = a / 16 and an index
// i = a % 16: in row mode (mode0) it is row i of block b, in column mode (mode1)
// column i. Element (r, c) of block b lives in bank (r + c) mod 16 at bank
// address 16 b + r (a skewed layout). Then both a row and a column of a block
// touch every bank exactly once:
//   row i:    lane c <-> bank (i + c) mod 16, bank address 16 b + i
//   column i: lane r <-> bank (i + r) mod 16, bank address 16 b + r
// i.e. in both modes lane l is rotated to bank (l + i) mod 16; only the bank
// addresses differ. A plain vector (not part of a matrix) is simply accessed in
// row mode. The lane mask of a write is rotated with the data.
//
// That the shuffler gives one-cycle row and column access is the paper's; the
// skewed layout that provides it is this design's choice.
//
// Timing: the request is combinationally turned into bank signals; the read
// data comes back one cycle later and is rotated back with the registered index.
module data_shuffler
  import asip_pkg::*;
#(
  parameter int unsigned AW = PVM_AW
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  pvm_req_t                 req,
  output cvec_t                    rdata,
  // towards the banks
  output logic [LANES-1:0]         bank_en,
  output logic [LANES-1:0]         bank_we,
  output logic [LANES-1:0][AW-1:0] bank_addr,
  output cbf16_t [LANES-1:0]       bank_wdata,
  input  cbf16_t [LANES-1:0]       bank_rdata
);

  logic [3:0]    idx;
  logic [AW-5:0] blk;
  logic [3:0]    idx_q;

  assign idx = req.addr[3:0];
  assign blk = req.addr[AW-1:4];

  always_comb begin
    for (int k = 0; k < LANES; k++) begin
      logic [3:0] lane;                         // lane that maps onto bank k
      lane          = 4'(k) - idx;
      bank_en[k]    = req.valid && (!req.we || req.mask[lane]);
      bank_we[k]    = req.we;
      bank_wdata[k] = req.wdata[lane];
      bank_addr[k]  = (req.mode == MODE_ROW) ? {blk, idx} : {blk, lane};
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) idx_q <= '0;
    else if (req.valid && !req.we) idx_q <= idx;
  end

  always_comb begin
    for (int l = 0; l < LANES; l++) rdata[l] = bank_rdata[4'(l) + idx_q];
  end

endmodule
