// tb_vector_core -- drives decoded vector instructions into the vector core and
// checks every architectural result against a model kept in the testbench
// (real-arithmetic complex bfloat16 reference). A small behavioural memory
// answers loads one cycle after a grant and refuses some requests at random to
// exercise the memory stall. Covered: loads, stores (plain and masked), add,
// sub, multiply with every operand-1 and operand-2 selection, MAC with an
// indexed broadcast operand, dot product into a scalar register, indexed
// element write and read, external stall. Checks the read-after-write bubble
// count and that independent instructions issue one per cycle.
module tb_vector_core;
  import asip_pkg::*;
  import tb_ref_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  vop_t op;
  logic op_ready, ext_stall = 1'b0;
  pvm_req_t mem_req;
  logic mem_gnt;
  cvec_t mem_rdata;
  logic xw_valid, sw_valid;
  logic [31:0] xw;
  logic [2:0] sw_addr;
  cbf16_t sw;
  logic s_we = 1'b0;
  logic [2:0] s_waddr = '0;
  cbf16_t s_wdata = '0;
  int checks = 0, failures = 0;

  vector_core dut (.clk, .rst_n, .op, .op_ready, .ext_stall, .mem_req, .mem_gnt, .mem_rdata,
                   .xw_valid, .xw, .sw_valid, .sw_addr, .sw, .s_we, .s_waddr, .s_wdata);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // behavioural memory: plain vector addresses, random refusals
  cvec_t mem [logic [PVM_AW-1:0]];
  bit    deny_en = 1'b0;
  int    denials = 0;
  always @(negedge clk) mem_gnt = !(deny_en && ($urandom % 3 == 0));
  always @(posedge clk) begin
    if (mem_req.valid && mem_gnt) begin
      if (mem_req.we) begin
        cvec_t v;
        v = mem.exists(mem_req.addr) ? mem[mem_req.addr] : '0;
        for (int l = 0; l < LANES; l++) if (mem_req.mask[l]) v[l] = mem_req.wdata[l];
        mem[mem_req.addr] = v;
      end else mem_rdata <= mem.exists(mem_req.addr) ? mem[mem_req.addr] : '0;
    end
    if (mem_req.valid && !mem_gnt) denials++;
  end

  // architectural model
  logic [31:0] mv [NVREG][LANES];
  logic [31:0] ms [NSREG];
  logic [31:0] exp_x [$];
  logic [31:0] exp_s [$];

  always @(posedge clk) begin
    if (xw_valid) begin
      checks++;
      if (exp_x.size() == 0 || xw !== exp_x[0]) begin failures++; $display("xw %h unexpected", xw); end
      if (exp_x.size() != 0) void'(exp_x.pop_front());
    end
    if (sw_valid) begin
      checks++;
      if (exp_s.size() == 0 || sw !== exp_s[0]) begin failures++; $display("sw %h expected %h", sw, exp_s.size() ? exp_s[0] : 0); end
      if (exp_s.size() != 0) void'(exp_s.pop_front());
    end
  end

  function automatic vop_t nop();
    vop_t o = '0;
    o.valid = 1'b1;
    o.alu = VALU_PASS;
    return o;
  endfunction

  // op_ready depends only on the core's state, so it is stable once the
  // memory grant for the cycle has been decided just after the falling edge
  int cyc = 0;
  always @(posedge clk) cyc++;
  task automatic issue(vop_t o);
    @(negedge clk);
    op = o;
    #1;
    while (!op_ready) begin
      @(negedge clk);
      #1;
    end
    @(posedge clk);
    #1 op = '0;
  endtask

  // model helpers
  function automatic void m_binop(valu_e alu, int d, int a, int b, op1_sel_e s1, op2_sel_e s2, int sr);
    logic [31:0] x, y;
    for (int l = 0; l < LANES; l++) begin
      x = (s1 == OP1_ZERO) ? 32'h0 : (s1 == OP1_CONJ) ? ref_conj(mv[a][l]) : mv[a][l];
      unique case (s2)
        OP2_CONJ:     y = ref_conj(mv[b][l]);
        OP2_IDX_BC:   y = mv[b][ms[sr][3:0]];
        OP2_IDX_CONJ: y = ref_conj(mv[b][ms[sr][3:0]]);
        OP2_SCALAR:   y = ms[sr];
        default:      y = mv[b][l];
      endcase
      mv[d][l] = (alu == VALU_ADD) ? ref_cadd(x, y) : (alu == VALU_SUB) ? ref_csub(x, y) : ref_cmul(x, y);
    end
  endfunction

  function automatic vop_t mk(valu_e alu, int d, int a, int b, op1_sel_e s1 = OP1_VR1, op2_sel_e s2 = OP2_VR2, int sr = 0);
    vop_t o = nop();
    o.alu = alu; o.vd = 3'(d); o.vr1 = 3'(a); o.vr2 = 3'(b); o.op1 = s1; o.op2 = s2; o.sr = 3'(sr);
    o.vd_we = 1'b1;
    return o;
  endfunction

  task automatic do_op(valu_e alu, int d, int a, int b, op1_sel_e s1 = OP1_VR1, op2_sel_e s2 = OP2_VR2, int sr = 0);
    issue(mk(alu, d, a, b, s1, s2, sr));
    m_binop(alu, d, a, b, s1, s2, sr);
  endtask

  task automatic load(int d, int addr, access_mode_e mode = MODE_ROW);
    vop_t o = nop();
    o.load = 1'b1; o.vd = 3'(d); o.addr = PVM_AW'(addr); o.mode = mode;
    issue(o);
    for (int l = 0; l < LANES; l++) mv[d][l] = mem[PVM_AW'(addr)][l];
  endtask

  task automatic store(int s, int addr, bit masked = 0, int sr = 0);
    vop_t o = nop();
    o.store = 1'b1; o.vr1 = 3'(s); o.addr = PVM_AW'(addr); o.mask_en = masked; o.sr = 3'(sr);
    issue(o);
  endtask

  task automatic set_scalar(int r, logic [31:0] v);
    @(negedge clk);
    s_we = 1'b1; s_waddr = 3'(r); s_wdata = v;
    @(negedge clk);
    s_we = 1'b0;
    ms[r] = v;
  endtask

  task automatic drain();
    repeat (8) @(posedge clk);
  endtask

  // store every vector register and compare memory with the model
  task automatic check_regs(int base);
    for (int r = 0; r < NVREG; r++) store(r, base + r);
    drain();
    for (int r = 0; r < NVREG; r++)
      for (int l = 0; l < LANES; l++) begin
        checks++;
        if (mem[PVM_AW'(base + r)][l] !== mv[r][l]) begin
          failures++;
          if (failures < 12) $display("v%0d[%0d] = %h, expected %h", r, l, mem[PVM_AW'(base + r)][l], mv[r][l]);
        end
      end
  endtask

  initial begin
    int t0, t1, bubbles;
    vop_t o;
    logic [31:0] acc [4];
    logic [31:0] prod [LANES];
    op = '0;
    foreach (mv[r, l]) mv[r][l] = '0;
    foreach (ms[r]) ms[r] = '0;
    for (int a = 0; a < 8; a++) for (int l = 0; l < LANES; l++) mem[PVM_AW'(100 + a)][l] = cbf16_t'(rnd_cbf());
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    set_scalar(0, 32'h0000_0005);        // index 5
    set_scalar(2, rnd_cbf());            // a complex scalar
    set_scalar(3, 32'h0000_A5C3);        // store mask
    // loads
    for (int r = 0; r < 4; r++) load(r, 100 + r);
    drain();
    // independent instructions issue one per cycle
    do_op(VALU_ADD, 4, 0, 1);
    t0 = cyc;
    do_op(VALU_SUB, 5, 2, 3);
    do_op(VALU_MUL, 6, 0, 3);
    do_op(VALU_MUL, 7, 1, 2, OP1_CONJ, OP2_CONJ);
    t1 = cyc;
    checks++;
    if (t1 - t0 != 3) begin failures++; $display("3 independent ops took %0d cycles", t1 - t0); end
    drain();
    // dependent instruction: two bubbles (Execute and Post Execute)
    do_op(VALU_ADD, 4, 0, 1);
    t0 = cyc;
    do_op(VALU_MUL, 5, 4, 2);
    do_op(VALU_SUB, 6, 0, 1, OP1_ZERO);               // negation, independent
    t1 = cyc;
    bubbles = t1 - t0 - 2;
    checks++;
    if (bubbles != 2) begin failures++; $display("RAW bubbles %0d, expected 2", bubbles); end
    do_op(VALU_MUL, 7, 6, 2, OP1_VR1, OP2_IDX_BC, 0);  // v6 * v2[5]
    do_op(VALU_MUL, 3, 1, 2, OP1_VR1, OP2_IDX_CONJ, 0);
    do_op(VALU_MUL, 2, 0, 0, OP1_VR1, OP2_SCALAR, 2);  // v0 * vs2
    check_regs(200);
    // vmac v5 = v5 + v3 * v1[vs0]
    o = mk(VALU_MUL, 5, 3, 1, OP1_VR1, OP2_IDX_BC, 0);
    o.mac = 1'b1; o.vr3 = 3'd5;
    issue(o);
    for (int l = 0; l < LANES; l++) mv[5][l] = ref_cadd(ref_cmul(mv[3][l], mv[1][ms[0][3:0]]), mv[5][l]);
    // vdot vs1 = sum v2 * conj(v2)
    o = mk(VALU_MUL, 0, 2, 2, OP1_VR1, OP2_CONJ);
    o.vd_we = 1'b0; o.dot = 1'b1; o.sd = 3'd1;
    for (int l = 0; l < LANES; l++) prod[l] = ref_cmul(mv[2][l], ref_conj(mv[2][l]));
    for (int g = 0; g < 4; g++) acc[g] = ref_cadd(ref_cadd(prod[4*g], prod[4*g+1]), ref_cadd(prod[4*g+2], prod[4*g+3]));
    ms[1] = ref_cadd(ref_cadd(acc[0], acc[1]), ref_cadd(acc[2], acc[3]));
    exp_s.push_back(ms[1]);
    issue(o);
    // idxvm v4[x=9] = vs1 (uses the dot product just computed: scalar hazard)
    o = mk(VALU_IDXW, 4, 4, 0, OP1_VR1, OP2_VR2, 1);
    o.xr = 32'd9;
    issue(o);
    mv[4][9] = ms[1];
    // idxv x = v7[x=12]
    o = nop(); o.idx_rd = 1'b1; o.vr1 = 3'd7; o.xr = 32'd12;
    exp_x.push_back(mv[7][12]);
    issue(o);
    drain();
    // masked store of v6 to 300 over v5's contents, with memory refusals
    deny_en = 1'b1;
    store(5, 300);
    store(6, 300, 1'b1, 3);
    drain();
    for (int l = 0; l < LANES; l++) begin
      checks++;
      if (mem[PVM_AW'(300)][l] !== (ms[3][l] ? mv[6][l] : mv[5][l])) begin
        failures++;
        $display("masked store lane %0d: %h (v5 %h v6 %h)", l, mem[PVM_AW'(300)][l], mv[5][l], mv[6][l]);
      end
    end
    // external stall holds everything
    @(negedge clk);
    ext_stall = 1'b1;
    t0 = cyc;
    fork
      do_op(VALU_ADD, 0, 1, 2);
      begin
        repeat (5) @(posedge clk);
        #1 ext_stall = 1'b0;
      end
    join
    checks++;
    if (cyc - t0 < 6) begin failures++; $display("instruction accepted during external stall"); end
    check_regs(400);
    deny_en = 1'b0;
    checks++;
    if (denials == 0) begin failures++; $display("memory stall never exercised"); end
    checks++;
    if (exp_x.size() != 0 || exp_s.size() != 0) begin failures++; $display("missing scalar results"); end
    $display("memory refusals: %0d", denials);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
