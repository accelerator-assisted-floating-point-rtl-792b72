// tb_cnn_vector_memory -- random writes over the whole address range of the
// CNN vector memory, then reads with one cycle of latency, compared with a
// copy kept in the testbench; a request with valid low must change nothing.
module tb_cnn_vector_memory;
  import asip_pkg::*;

  logic clk = 1'b0;
  cnn_req_t req;
  fxvec_t rdata;
  int checks = 0, failures = 0;

  cnn_vector_memory dut (.clk, .req, .rdata);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  fxvec_t model [int];
  int addrs [$];

  initial begin
    req = '0;
    @(negedge clk);
    for (int t = 0; t < 500; t++) begin
      int a;
      a = (t == 0) ? CNN_WORDS - 1 : (t == 1) ? 0 : int'($urandom % CNN_WORDS);
      req.valid = 1; req.we = 1; req.addr = CNN_AW'(a);
      for (int l = 0; l < LANES; l++) req.wdata[l] = fx16_t'($urandom);
      model[a] = req.wdata;
      addrs.push_back(a);
      @(negedge clk);
    end
    // a write with valid low
    req.valid = 0; req.we = 1; req.addr = CNN_AW'(addrs[0]); req.wdata = ~model[addrs[0]];
    @(negedge clk);
    foreach (addrs[t]) begin
      req.valid = 1; req.we = 0; req.addr = CNN_AW'(addrs[t]);
      @(negedge clk);
      checks++;
      if (rdata !== model[addrs[t]]) begin
        failures++;
        if (failures < 10) $display("word %0d: %h expected %h", addrs[t], rdata, model[addrs[t]]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
