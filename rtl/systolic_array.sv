// systolic_array -- tightly coupled 16 x 16 complex bfloat16 matrix-multiply
// accelerator working directly on the parallel vector memory.
//
// It computes C = A B for an (M x N) A and an (N x P) B, all dimensions
// multiples of 16 and all matrices stored as 16 x 16 blocks in block-wise
// column-major order (see memory_controller.sv). In Gramian mode B is not read:
// it is taken as A^H (so P = M), i.e. C = A A^H, by loading rows of A and
// conjugating them into the top buffers; a diagonal output block then needs
// only one read per row of A.
//
// Structure (the paper's three parts):
//  1. outer buffer registers: 16 left registers, each one row of the current
//     16 x 16 block of A (read from memory in row mode), and 16 top registers,
//     each one column of the current block of B (column mode). A register,
//     once started, shifts its 16 elements into the array one per cycle.
//  2. 16 x 16 systolic_pe: inner registers pass A elements right and B
//     elements down; each PE accumulates one element of the output block.
//  3. systolic control: configuration registers written by the three custom
//     instructions, and a scheduler made of a slot counter, output-block
//     counters and a bit shifter that starts left register i and top register
//     i exactly i cycles after a wave is launched. That skew makes A(i,k) and
//     B(k,j) meet in PE(i,j).
//
// Schedule of one 16 x 16 output block (cycle counts from its first slot):
//  - loads: one vector per cycle, for k-block kb at slots 32 kb .. 32 kb + 31,
//    alternating A row i and B column i (16 kb .. 16 kb + 15, one read each, in
//    Gramian mode on a diagonal block);
//  - the wave of k-block kb is launched at slot 32 kb + 17 (16 kb + 1): register
//    i starts i cycles later and feeds its first element one cycle after its
//    start, just after it has been filled; it is emptied exactly when the next
//    k-block's load rewrites it, so loads never pause;
//  - row r of the output block is complete 32 + r cycles after the last
//    launch, so write-back of the 16 rows of C starts 33 cycles after it and
//    takes 16 cycles. Total per output block: 32 N/16 + 34 cycles
//    (16 N/16 + 50 for a Gramian diagonal block), against the paper's estimate
//    of 2N + 32 per block.
// The block structure, the instructions, the counters and shifters and the
// Gramian conjugation are the paper's; the exact schedule above is this design's.
//
// Interface: sz_we/des_we/mul_we load the configuration (instructions sys.sz,
// sys.des, sys.mul); mul_we also starts the multiplication. busy stays high
// until the last row of C is written; done pulses for one cycle. The array owns
// the memory port while busy (pvm_req, highest priority, read data one cycle
// after the request).
module systolic_array
  import asip_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  // sys.sz m, n, p (in units of 16)
  input  logic              sz_we,
  input  logic [5:0]        sz_m,
  input  logic [5:0]        sz_n,
  input  logic [5:0]        sz_p,
  // sys.des address of C
  input  logic              des_we,
  input  logic [PVM_AW-1:0] des_addr,
  // sys.mul addresses of A and B, multiplication type; starts the array
  input  logic              mul_we,
  input  logic [PVM_AW-1:0] mul_addr_a,
  input  logic [PVM_AW-1:0] mul_addr_b,
  input  logic              mul_gramian,
  output logic              busy,
  output logic              done,
  // parallel vector memory
  output pvm_req_t          pvm_req,
  input  cvec_t             pvm_rdata
);

  localparam int N = LANES;

  // ---------------- configuration registers ----------------
  logic [5:0]        mb, nb, pb;
  logic [PVM_AW-1:0] addr_a, addr_b, addr_c;
  logic              gram;

  // ---------------- scheduler state ----------------
  typedef enum logic [1:0] {S_IDLE, S_COMPUTE, S_WRITE} state_e;
  state_e            state;
  logic [5:0]        bi, bj;        // output block counters
  logic [11:0]       slot;          // slot counter within the output block
  logic [3:0]        wr_row;
  logic              shared;        // Gramian diagonal block: one read feeds both sides
  logic [11:0]       per_kb;        // slots per k-block: 32, or 16 when shared
  logic [11:0]       launch_off;    // launch slot within a k-block
  logic [11:0]       last_launch;
  logic [N-2:0]      start_sr;      // bit shifter: start of register i = bit i-1

  assign shared      = gram && (bi == bj);
  assign per_kb      = shared ? 12'd16 : 12'd32;
  assign launch_off  = shared ? 12'd1 : 12'd17;
  assign last_launch = per_kb * 12'(nb - 6'd1) + launch_off;

  logic        load_slot, launch;
  logic [5:0]  kb;
  logic [3:0]  lidx;
  logic        l_is_a, l_is_b;
  logic [11:0] r;

  always_comb begin
    load_slot = (state == S_COMPUTE) && (slot < per_kb * 12'(nb));
    kb        = 6'(slot / per_kb);
    r         = slot % per_kb;
    lidx      = shared ? r[3:0] : r[4:1];
    l_is_a    = shared || !r[0];
    l_is_b    = shared || r[0];
    launch    = (state == S_COMPUTE) && (slot >= launch_off) && (slot <= last_launch)
                && ((slot - launch_off) % per_kb == 12'd0);
  end

  cbf16_t acc [N][N];               // accumulators of the PE grid

  // memory requests: loads while computing, rows of C while writing
  always_comb begin
    pvm_req = '0;
    if (load_slot) begin
      pvm_req.valid = 1'b1;
      pvm_req.we    = 1'b0;
      if (l_is_a) begin
        pvm_req.mode = MODE_ROW;
        pvm_req.addr = PVM_AW'(32'(addr_a) + (32'(kb) * 32'(mb) + 32'(bi)) * 16 + 32'(lidx));
      end else if (gram) begin
        // B = A^H: column i of block (kb, bj) of B is row i of block (bj, kb) of A
        pvm_req.mode = MODE_ROW;
        pvm_req.addr = PVM_AW'(32'(addr_a) + (32'(kb) * 32'(mb) + 32'(bj)) * 16 + 32'(lidx));
      end else begin
        pvm_req.mode = MODE_COL;
        pvm_req.addr = PVM_AW'(32'(addr_b) + (32'(bj) * 32'(nb) + 32'(kb)) * 16 + 32'(lidx));
      end
    end else if (state == S_WRITE) begin
      pvm_req.valid = 1'b1;
      pvm_req.we    = 1'b1;
      pvm_req.mode  = MODE_ROW;
      pvm_req.mask  = '1;
      pvm_req.addr  = PVM_AW'(32'(addr_c) + (32'(bj) * 32'(mb) + 32'(bi)) * 16 + 32'(wr_row));
      for (int j = 0; j < N; j++) pvm_req.wdata[j] = acc[wr_row][j];
    end
  end

  // ---------------- outer buffer registers ----------------
  cvec_t        lreg [N];            // left: rows of A
  cvec_t        treg [N];            // top: columns of B
  logic [4:0]   lcnt [N];            // elements still to shift out
  logic [4:0]   tcnt [N];
  logic         ld_q, ld_a_q, ld_b_q;
  logic [3:0]   ld_idx_q;
  logic [N-1:0] reg_start;

  always_comb begin
    reg_start[0] = launch;
    for (int i = 1; i < N; i++) reg_start[i] = start_sr[i-1];
  end

  cbf16_t       a_feed [N], b_feed [N];
  logic [N-1:0] a_fv, b_fv;
  always_comb begin
    for (int i = 0; i < N; i++) begin
      a_feed[i] = lreg[i][0];
      a_fv[i]   = (lcnt[i] != 5'd0);
      b_feed[i] = treg[i][0];
      b_fv[i]   = (tcnt[i] != 5'd0);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < N; i++) begin
        lreg[i] <= '0; treg[i] <= '0; lcnt[i] <= '0; tcnt[i] <= '0;
      end
      ld_q <= 1'b0; ld_a_q <= 1'b0; ld_b_q <= 1'b0; ld_idx_q <= '0;
      start_sr <= '0;
    end else begin
      ld_q     <= load_slot;
      ld_a_q   <= l_is_a;
      ld_b_q   <= l_is_b;
      ld_idx_q <= lidx;
      start_sr <= {start_sr[N-3:0], launch};
      for (int i = 0; i < N; i++) begin
        // shifting (element 0 is fed into the array this cycle)
        if (lcnt[i] != 5'd0) begin
          lreg[i] <= {cbf16_t'(0), lreg[i][N-1:1]};
          lcnt[i] <= lcnt[i] - 5'd1;
        end
        if (tcnt[i] != 5'd0) begin
          treg[i] <= {cbf16_t'(0), treg[i][N-1:1]};
          tcnt[i] <= tcnt[i] - 5'd1;
        end
        if (reg_start[i]) begin
          lcnt[i] <= 5'(N);
          tcnt[i] <= 5'(N);
        end
        // a load (the data of a read issued last cycle) has priority over the shift
        if (ld_q && ld_idx_q == 4'(i)) begin
          if (ld_a_q) lreg[i] <= pvm_rdata;
          if (ld_b_q) treg[i] <= gram ? v_conj(pvm_rdata) : pvm_rdata;
        end
      end
    end
  end

  // ---------------- PE grid ----------------
  cbf16_t a_w [N][N+1];
  cbf16_t b_w [N+1][N];
  logic   av_w [N][N+1];
  logic   bv_w [N+1][N];
  logic   clear;

  assign clear = (state == S_COMPUTE) && (slot == 12'd0);

  for (genvar i = 0; i < N; i++) begin : g_row
    assign a_w[i][0]  = a_feed[i];
    assign av_w[i][0] = a_fv[i];
    assign b_w[0][i]  = b_feed[i];
    assign bv_w[0][i] = b_fv[i];
    for (genvar j = 0; j < N; j++) begin : g_col
      systolic_pe u_pe (
        .clk, .rst_n, .clear,
        .a_in  (a_w[i][j]),   .a_vin  (av_w[i][j]),
        .b_in  (b_w[i][j]),   .b_vin  (bv_w[i][j]),
        .a_out (a_w[i][j+1]), .a_vout (av_w[i][j+1]),
        .b_out (b_w[i+1][j]), .b_vout (bv_w[i+1][j]),
        .acc   (acc[i][j])
      );
    end
  end

  // ---------------- control FSM ----------------
  assign busy = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      mb <= 6'd1; nb <= 6'd1; pb <= 6'd1;
      addr_a <= '0; addr_b <= '0; addr_c <= '0; gram <= 1'b0;
      bi <= '0; bj <= '0; slot <= '0; wr_row <= '0;
      done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (sz_we && state == S_IDLE) begin mb <= sz_m; nb <= sz_n; pb <= sz_p; end
      if (des_we && state == S_IDLE) addr_c <= des_addr;
      unique case (state)
        S_IDLE: if (mul_we) begin
          addr_a <= mul_addr_a;
          addr_b <= mul_addr_b;
          gram   <= mul_gramian;
          if (mul_gramian) pb <= mb;
          bi <= '0; bj <= '0; slot <= '0;
          state <= S_COMPUTE;
        end
        S_COMPUTE: begin
          if (slot == last_launch + 12'd32) begin
            state  <= S_WRITE;
            wr_row <= '0;
          end else begin
            slot <= slot + 12'd1;
          end
        end
        S_WRITE: begin
          wr_row <= wr_row + 4'd1;
          if (wr_row == 4'd15) begin
            slot  <= '0;
            state <= S_COMPUTE;
            if (bi != mb - 6'd1) bi <= bi + 6'd1;
            else begin
              bi <= '0;
              if (bj != pb - 6'd1) bj <= bj + 6'd1;
              else begin
                state <= S_IDLE;
                done  <= 1'b1;
              end
            end
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // configuration must describe at least one block in every dimension
  a_size_nonzero: assert property (@(posedge clk) disable iff (!rst_n)
                                   (state != S_IDLE) |-> (mb != 0 && nb != 0 && pb != 0));

endmodule
