// dma -- copy-and-split engine between the two vector memories.
//
// Positioning runs on the CNN accelerator, which has its own memory and a
// fixed-point datapath, while the channel matrix lives as complex bfloat16 in
// the parallel vector memory. Once started by the processor this engine reads a
// ROWS x COLS complex matrix (both multiples of 16, stored as 16 x 16 blocks in
// block-wise column-major order from vector address src) and writes its real
// parts and its imaginary parts as two separate row-major matrices into the
// CNN vector memory, starting at word addresses dst_re and dst_im. A row of
// the output matrix occupies COLS/16 consecutive words. With transpose set it
// reads columns instead of rows (column mode of the data shuffler) and writes
// the COLS x ROWS transpose, so that the matrix can be handed to the CNN in
// either orientation.
//
// From the paper: the copy, the split into real and imaginary planes, and that
// the processor launches it and it then runs on its own. This design's choices:
// the row-major destination layout, the bfloat16 to 16-bit fixed-point
// conversion (asip_pkg::bf16_to_fx, CNN_FRAC fraction bits), the optional
// transpose and the sequencing below.
//
// Timing: per source vector, a read request that is held until pvm_gnt, one
// cycle for the data, then two write cycles into the CNN memory (held until
// cnn_gnt), so at least 4 cycles per vector. done pulses for one cycle at the end.
module dma
  import asip_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  // configuration, sampled on start
  input  logic              start,
  input  logic [PVM_AW-1:0] src,
  input  logic [CNN_AW-1:0] dst_re,
  input  logic [CNN_AW-1:0] dst_im,
  input  logic [5:0]        rows_blk,   // ROWS / 16
  input  logic [5:0]        cols_blk,   // COLS / 16
  input  logic              transpose,
  output logic              busy,
  output logic              done,
  // parallel vector memory side
  output pvm_req_t          pvm_req,
  input  logic              pvm_gnt,
  input  cvec_t             pvm_rdata,
  // CNN vector memory side
  output cnn_req_t          cnn_req,
  input  logic              cnn_gnt
);

  typedef enum logic [2:0] {S_IDLE, S_READ, S_DATA, S_WR_RE, S_WR_IM} state_e;
  state_e state;

  logic [PVM_AW-1:0] src_q;
  logic [CNN_AW-1:0] dre_q, dim_q;
  logic [5:0]        rb_q, cb_q;
  logic              tr_q;
  logic [5:0]        bi, bj;
  logic [3:0]        i;
  cvec_t             buf_q;
  logic [CNN_AW-1:0] woff;

  // destination word offset of the current vector
  always_comb begin
    if (!tr_q) woff = CNN_AW'((32'(bi) * 16 + 32'(i)) * 32'(cb_q) + 32'(bj));
    else       woff = CNN_AW'((32'(bj) * 16 + 32'(i)) * 32'(rb_q) + 32'(bi));
  end

  always_comb begin
    pvm_req       = '0;
    pvm_req.valid = (state == S_READ);
    pvm_req.we    = 1'b0;
    pvm_req.mode  = tr_q ? MODE_COL : MODE_ROW;
    pvm_req.addr  = PVM_AW'(32'(src_q) + (32'(bj) * 32'(rb_q) + 32'(bi)) * 16 + 32'(i));
    cnn_req       = '0;
    cnn_req.valid = (state == S_WR_RE) || (state == S_WR_IM);
    cnn_req.we    = 1'b1;
    cnn_req.addr  = (state == S_WR_IM) ? dim_q + woff : dre_q + woff;
    for (int l = 0; l < LANES; l++)
      cnn_req.wdata[l] = bf16_to_fx((state == S_WR_IM) ? buf_q[l].im : buf_q[l].re);
  end

  assign busy = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      done  <= 1'b0;
      src_q <= '0; dre_q <= '0; dim_q <= '0; rb_q <= '0; cb_q <= '0; tr_q <= 1'b0;
      bi <= '0; bj <= '0; i <= '0;
      buf_q <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          src_q <= src; dre_q <= dst_re; dim_q <= dst_im;
          rb_q <= rows_blk; cb_q <= cols_blk; tr_q <= transpose;
          bi <= '0; bj <= '0; i <= '0;
          state <= S_READ;
        end
        S_READ:  if (pvm_gnt) state <= S_DATA;
        S_DATA:  begin buf_q <= pvm_rdata; state <= S_WR_RE; end
        S_WR_RE: if (cnn_gnt) state <= S_WR_IM;
        S_WR_IM: if (cnn_gnt) begin
          state <= S_READ;
          // advance in source order: index, row block, column block
          if (i != 4'd15) i <= i + 4'd1;
          else begin
            i <= '0;
            if (bi != rb_q - 6'd1) bi <= bi + 6'd1;
            else begin
              bi <= '0;
              if (bj != cb_q - 6'd1) bj <= bj + 6'd1;
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

endmodule
