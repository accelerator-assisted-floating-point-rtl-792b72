// vector_core -- the 16-lane complex bfloat16 SIMD pipeline of the processor.
//
// It has the same four stages as the scalar core's back end (after fetch):
//  Decode        reads the vector register file (vr1, vr2, vr3), the complex
//                scalar register file (sr) and takes the RISC-V register
//                operand xr. Operand 1 is vr1, conj(vr1) or zero; operand 2 is
//                vr2, conj(vr2), vr2[sr] broadcast, conj(vr2[sr]) broadcast, or
//                sr broadcast. The index in vr2[sr] is the low four bits of sr.
//  Execute       lane-wise subtract, add or complex multiply; the indexed write
//                (vd1 with element [xr] replaced by sr); the indexed read
//                vd1[xr] towards the RISC-V register file; the vector store
//                request (data vd1).
//  Post Execute  the MAC adder (result + vr3), the load data return, and the
//  / Memory      first half of the dot-product adder tree (16 lanes -> 4).
//  Writeback     vector result to vd, second half of the tree (4 -> 1) to the
//                scalar register sd, indexed read result to the RISC-V side.
// This is the paper's stage-by-stage description. The register counts (8
// vector, 8 scalar), the operation encoding (asip_pkg::vop_t, delivered
// already decoded by the issue logic), the use of sr's low bits as index and
// store mask, and the hazard handling below are this design's choices.
//
// Hazards: the register files write in Writeback and read in Decode with
// write-first bypass; an instruction whose source register is the destination
// of an instruction in Execute or Post Execute waits in Decode (a bubble is
// inserted). The whole pipeline freezes while ext_stall is high (a stall
// from the scalar core) or while a memory request in Execute is not granted,
// e.g. because the systolic array owns the memory in that cycle. Known
// limitation: ext_stall must not rise in the cycle right after a granted load
// (the returning data is taken only when the pipeline advances).
//
// Interface: op/op_ready is a valid/ready handshake into Decode. Loads and
// stores use mem_req/mem_gnt; load data is expected on mem_rdata one cycle
// after the grant. xw_valid/xw carry indexed-read results, sw_valid/sw_addr/sw
// dot products (also written into the scalar register file here).
module vector_core
  import asip_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  input  vop_t     op,
  output logic     op_ready,
  input  logic     ext_stall,
  // parallel vector memory
  output pvm_req_t mem_req,
  input  logic     mem_gnt,
  input  cvec_t    mem_rdata,
  // results towards the scalar side
  output logic     xw_valid,
  output logic [31:0] xw,
  output logic     sw_valid,
  output logic [2:0] sw_addr,
  output cbf16_t   sw,
  // scalar register write port (e.g. inverse square root results, moves)
  input  logic     s_we,
  input  logic [2:0] s_waddr,
  input  cbf16_t   s_wdata
);

  // ---------------- register files ----------------
  cvec_t  vrf [NVREG];
  cbf16_t srf [NSREG];

  // ---------------- pipeline registers ----------------
  vop_t   d_op;                      // instruction in Decode
  vop_t   e_op, p_op, w_op;          // in Execute, Post Execute, Writeback
  cvec_t  e_vd1, e_vd2, e_vr3;
  cbf16_t e_sr;
  cvec_t  p_ve, p_vr3;
  cbf16_t p_xe;
  cbf16_t p_psum [4];
  cvec_t  w_vp;
  cbf16_t w_psum [4];
  cbf16_t w_xe;

  logic stall_all, hazard, adv_d;

  // ---------------- Decode ----------------
  cvec_t  rd1, rd2, rd3, vd1_c, vd2_c;
  cbf16_t rs_c, el_c;

  function automatic logic w_hits(vop_t o, logic [2:0] r);
    return o.valid && (o.vd_we || o.load) && o.vd == r;
  endfunction

  always_comb begin
    // write-first bypass from Writeback
    rd1  = w_hits(w_op, d_op.vr1) ? w_vp : vrf[d_op.vr1];
    rd2  = w_hits(w_op, d_op.vr2) ? w_vp : vrf[d_op.vr2];
    rd3  = w_hits(w_op, d_op.vr3) ? w_vp : vrf[d_op.vr3];
    rs_c = (w_op.valid && w_op.dot && w_op.sd == d_op.sr) ? sw : srf[d_op.sr];
    unique case (d_op.op1)
      OP1_CONJ: vd1_c = v_conj(rd1);
      OP1_ZERO: vd1_c = '0;
      default:  vd1_c = rd1;
    endcase
    el_c = rd2[rs_c[3:0]];
    unique case (d_op.op2)
      OP2_CONJ:     vd2_c = v_conj(rd2);
      OP2_IDX_BC:   vd2_c = {LANES{el_c}};
      OP2_IDX_CONJ: vd2_c = {LANES{c_conj(el_c)}};
      OP2_SCALAR:   vd2_c = {LANES{rs_c}};
      default:      vd2_c = rd2;
    endcase
  end

  // read-after-write hazard against Execute and Post Execute
  always_comb begin
    hazard = 1'b0;
    for (int s = 0; s < 2; s++) begin
      vop_t o;
      o = (s == 0) ? e_op : p_op;
      if (w_hits(o, d_op.vr1) || w_hits(o, d_op.vr2) || w_hits(o, d_op.vr3)) hazard = 1'b1;
      if (o.valid && o.dot && o.sd == d_op.sr) hazard = 1'b1;
    end
    hazard = hazard && d_op.valid;
  end

  // ---------------- Execute ----------------
  cvec_t  ve_c;
  cbf16_t xe_c;

  always_comb begin
    for (int l = 0; l < LANES; l++) begin
      unique case (e_op.alu)
        VALU_SUB:  ve_c[l] = c_sub(e_vd1[l], e_vd2[l]);
        VALU_ADD:  ve_c[l] = c_add(e_vd1[l], e_vd2[l]);
        VALU_MUL:  ve_c[l] = c_mul(e_vd1[l], e_vd2[l]);
        VALU_IDXW: ve_c[l] = (4'(l) == e_op.xr[3:0]) ? e_sr : e_vd1[l];
        default:   ve_c[l] = e_vd1[l];
      endcase
    end
    xe_c = e_vd1[e_op.xr[3:0]];
    mem_req       = '0;
    mem_req.valid = e_op.valid && (e_op.load || e_op.store) && !ext_stall;
    mem_req.we    = e_op.store;
    mem_req.mode  = e_op.mode;
    mem_req.addr  = e_op.addr;
    mem_req.mask  = e_op.mask_en ? e_sr[15:0] : '1;
    mem_req.wdata = e_vd1;
  end

  assign stall_all = ext_stall || (mem_req.valid && !mem_gnt);
  assign adv_d     = !stall_all && !hazard;
  assign op_ready  = !stall_all && (!d_op.valid || !hazard);

  // ---------------- Post Execute ----------------
  cvec_t  vp_c;
  cbf16_t fin_c;

  always_comb begin
    for (int l = 0; l < LANES; l++) vp_c[l] = p_op.mac ? c_add(p_ve[l], p_vr3[l]) : p_ve[l];
    if (p_op.load) vp_c = mem_rdata;
    fin_c = c_add(c_add(w_psum[0], w_psum[1]), c_add(w_psum[2], w_psum[3]));
  end

  // ---------------- pipeline advance ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      d_op <= '0; e_op <= '0; p_op <= '0; w_op <= '0;
      e_vd1 <= '0; e_vd2 <= '0; e_vr3 <= '0; e_sr <= '0;
      p_ve <= '0; p_vr3 <= '0; p_xe <= '0; w_vp <= '0; w_xe <= '0;
      for (int g = 0; g < 4; g++) begin p_psum[g] <= '0; w_psum[g] <= '0; end
    end else if (!stall_all) begin
      // Decode
      if (op_ready) d_op <= op;
      else if (adv_d) d_op <= '0;
      // Execute
      if (adv_d) begin
        e_op  <= d_op;
        e_vd1 <= vd1_c;
        e_vd2 <= vd2_c;
        e_vr3 <= rd3;
        e_sr  <= rs_c;
      end else begin
        e_op <= '0;                     // bubble
      end
      // Post Execute
      p_op  <= e_op;
      p_ve  <= ve_c;
      p_vr3 <= e_vr3;
      p_xe  <= xe_c;
      for (int g = 0; g < 4; g++)
        p_psum[g] <= c_add(c_add(ve_c[4*g], ve_c[4*g+1]), c_add(ve_c[4*g+2], ve_c[4*g+3]));
      // Writeback
      w_op   <= p_op;
      w_vp   <= vp_c;
      w_xe   <= p_xe;
      w_psum <= p_psum;
    end
  end

  // ---------------- Writeback ----------------
  assign xw_valid = w_op.valid && w_op.idx_rd && !stall_all;
  assign xw       = w_xe;
  assign sw_valid = w_op.valid && w_op.dot && !stall_all;
  assign sw_addr  = w_op.sd;
  assign sw       = fin_c;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int r = 0; r < NVREG; r++) vrf[r] <= '0;
      for (int r = 0; r < NSREG; r++) srf[r] <= '0;
    end else begin
      if (!stall_all && w_op.valid && (w_op.vd_we || w_op.load)) vrf[w_op.vd] <= w_vp;
      if (sw_valid) srf[w_op.sd] <= fin_c;
      else if (s_we) srf[s_waddr] <= s_wdata;
    end
  end

  // a load or store must not also be a register-to-register operation reduction
  a_no_mem_dot: assert property (@(posedge clk) disable iff (!rst_n)
                                 op.valid |-> !((op.load || op.store) && op.dot));

endmodule
