// parallel_vector_memory -- the 512 kB vector memory shared by the vector core
// and the systolic array.
//
// It is built from LANES (16) independent single-port banks of 32-bit complex
// bfloat16 words, each DEPTH words deep (16 x 8192 x 4 bytes = 512 kB). Every
// bank has its own address, so one access can touch one element in each bank at
// 16 unrelated addresses; the data shuffler (data_shuffler.sv) uses this to read
// or write a whole row or a whole column of a 16 x 16 block in one cycle.
// The bank structure follows the paper's description of a parallel memory; the
// bank count equal to the lane count and the single port per bank are this
// design's choice.
//
// Timing: a bank reads or writes on the rising edge where bank_en is high;
// read data is registered and valid on the following cycle (bank_rdata holds
// it until the next read of that bank).
module parallel_vector_memory
  import asip_pkg::*;
#(
  parameter int unsigned DEPTH = PVM_WORDS,
  parameter int unsigned AW    = $clog2(DEPTH)
) (
  input  logic                    clk,
  input  logic [LANES-1:0]        bank_en,
  input  logic [LANES-1:0]        bank_we,
  input  logic [LANES-1:0][AW-1:0] bank_addr,
  input  cbf16_t [LANES-1:0]      bank_wdata,
  output cbf16_t [LANES-1:0]      bank_rdata
);

  for (genvar b = 0; b < LANES; b++) begin : g_bank
    cbf16_t mem [DEPTH];
    always_ff @(posedge clk) begin
      if (bank_en[b]) begin
        if (bank_we[b]) mem[bank_addr[b]] <= bank_wdata[b];
        else            bank_rdata[b]     <= mem[bank_addr[b]];
      end
    end
  end

endmodule
