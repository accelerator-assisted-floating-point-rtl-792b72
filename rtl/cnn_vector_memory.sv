// cnn_vector_memory -- the 614 kB vector memory owned by the CNN accelerator.
//
// It holds the network's input planes (written by the DMA), its coefficients
// and the intermediate feature maps. One word is 16 signed 16-bit fixed-point
// values (32 bytes); DEPTH = 19648 words = 614 kB. Single port: one read or one
// write per cycle. A read returns the word on the next cycle. The size is the
// paper's; the word width equal to the vector lane count is this design's choice.
module cnn_vector_memory
  import asip_pkg::*;
#(
  parameter int unsigned DEPTH = CNN_WORDS
) (
  input  logic     clk,
  input  cnn_req_t req,
  output fxvec_t   rdata
);

  fxvec_t mem [DEPTH];

  always_ff @(posedge clk) begin
    if (req.valid) begin
      if (req.we) mem[req.addr] <= req.wdata;
      else        rdata         <= mem[req.addr];
    end
  end

endmodule
