// tb_parallel_vector_memory -- writes random words into every bank at
// independent random addresses, then reads them back (one cycle latency) and
// compares with a copy kept in the testbench. Also checks that a disabled bank
// neither writes nor changes its read data.
module tb_parallel_vector_memory;
  import asip_pkg::*;

  localparam int unsigned AW = PVM_AW;
  logic clk = 1'b0;
  logic [LANES-1:0]         bank_en, bank_we;
  logic [LANES-1:0][AW-1:0] bank_addr;
  cbf16_t [LANES-1:0]       bank_wdata, bank_rdata;
  int checks = 0, failures = 0;

  parallel_vector_memory dut (.clk, .bank_en, .bank_we, .bank_addr, .bank_wdata, .bank_rdata);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  cbf16_t model [LANES][logic [AW-1:0]];
  logic [AW-1:0] addrs [200][LANES];

  initial begin
    bank_en = '0; bank_we = '0; bank_addr = '0; bank_wdata = '0;
    @(negedge clk);
    for (int t = 0; t < 200; t++) begin
      for (int b = 0; b < LANES; b++) begin
        addrs[t][b]   = AW'($urandom);
        bank_addr[b]  = addrs[t][b];
        bank_wdata[b] = cbf16_t'($urandom);
        model[b][addrs[t][b]] = bank_wdata[b];
      end
      bank_en = '1; bank_we = '1;
      @(negedge clk);
    end
    for (int t = 0; t < 200; t++) begin
      for (int b = 0; b < LANES; b++) bank_addr[b] = addrs[t][b];
      bank_en = '1; bank_we = '0;
      @(negedge clk);
      for (int b = 0; b < LANES; b++) begin
        checks++;
        if (bank_rdata[b] !== model[b][addrs[t][b]]) begin
          failures++;
          if (failures < 10) $display("bank %0d addr %0d: %h, expected %h", b, addrs[t][b], bank_rdata[b], model[b][addrs[t][b]]);
        end
      end
    end
    // disabled banks: attempt a write with bank_en low, then read back
    bank_en = '0; bank_we = '1;
    for (int b = 0; b < LANES; b++) begin bank_addr[b] = addrs[0][b]; bank_wdata[b] = ~model[b][addrs[0][b]]; end
    @(negedge clk);
    bank_en = '1; bank_we = '0;
    @(negedge clk);
    for (int b = 0; b < LANES; b++) begin
      checks++;
      if (bank_rdata[b] !== model[b][addrs[0][b]]) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
