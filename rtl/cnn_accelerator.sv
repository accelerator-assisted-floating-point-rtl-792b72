// cnn_accelerator -- fixed-point CNN accelerator: configuration registers, a
// layer scheduler and the row-stationary convolution engine.
//
// The accelerator runs one layer per start pulse, on feature maps kept in the
// CNN vector memory. A feature map of C planes, H rows and W = 16*WW columns
// stores pixel (c, y, x) in lane x%16 of word base + (c*H + y)*WW + x/16, the
// row-major layout that the DMA produces.
//
//  - op = CNN_CONV: 3 x 3 convolution with zero padding ("same" size), cin
//    input planes, cout output planes, optional ReLU. The nine coefficients of
//    filter (co, ci) sit in lanes 0..8 of word w_base + co*cin + ci, tap
//    (ky, kx) in lane 3*ky + kx. For each output word the scheduler, for every
//    input plane, reads the 3 x 3 neighbourhood of words (the centre word and
//    its left/right neighbours on the rows above, at and below, skipping reads
//    outside the image, which become zero padding) and the coefficient word,
//    then passes three activation rows of 18 entries to the convolution engine,
//    which adds that plane's contribution to 16 partial sums. After the last
//    plane the sums are shifted back to CNN_FRAC fraction bits, passed through
//    ReLU if enabled, saturated to 16 bits and written.
//  - op = CNN_POOL: 2 x 2 max pooling with stride 2 of cin planes of H x W into
//    planes of H/2 x W/2 (WW must be even); four reads and one write per output
//    word.
//
// Interface and timing: configuration inputs are sampled with start while the
// accelerator is idle; busy stays high until the layer is written, done pulses
// for one cycle at the end. Memory requests wait for mem_gnt; read data is
// taken one cycle after a granted read. A convolution costs at most
// 2*10 + 2 cycles per input plane and output word plus the write.
//
// Paper versus design choice: the network's building blocks (3 x 3
// convolutions, ReLU, 2 x 2 max pooling, 16 filters), the three-PU row
// stationary engine and the use of a private vector memory follow the paper.
// The fully connected output layer is not in hardware here (see the design
// notes); the memory layout, coefficient layout, the 16-bit Q7.8 number format,
// the sequential read schedule and the configuration interface are this
// design's choices, as the paper does not describe them.
module cnn_accelerator
  import asip_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  // configuration
  input  logic              start,
  input  logic              op_pool,    // 0: convolution, 1: max pool
  input  logic              relu,
  input  logic [CNN_AW-1:0] in_base,
  input  logic [CNN_AW-1:0] out_base,
  input  logic [CNN_AW-1:0] w_base,
  input  logic [7:0]        height,     // H, rows of the input planes
  input  logic [3:0]        wwords,     // W/16
  input  logic [4:0]        cin,
  input  logic [4:0]        cout,
  output logic              busy,
  output logic              done,
  // CNN vector memory
  output cnn_req_t          mem_req,
  input  logic              mem_gnt,
  input  fxvec_t            mem_rdata
);

  typedef enum logic [2:0] {S_IDLE, S_RD, S_CAP, S_RUN, S_ACC, S_WR} state_e;

  state_e            state;
  logic              c_pool, c_relu;
  logic [CNN_AW-1:0] c_in, c_out, c_w;
  logic [7:0]        c_h;
  logic [3:0]        c_ww;
  logic [4:0]        c_cin, c_cout;

  logic [4:0]        o, ci;          // output plane, input plane
  logic [7:0]        y;
  logic [3:0]        x;
  logic [3:0]        step;
  fxvec_t            buf_q [10];
  logic signed [LANES-1:0][31:0] acc;

  // engine
  logic                          eng_valid, eng_out_valid;
  fx16_t [2:0][LANES+1:0]        eng_act;
  fx16_t [2:0][2:0]              eng_w;
  logic signed [LANES-1:0][31:0] eng_psum;

  cnn_conv_engine u_engine (
    .clk, .rst_n,
    .in_valid  (eng_valid),
    .act       (eng_act),
    .w         (eng_w),
    .psum_in   (acc),
    .out_valid (eng_out_valid),
    .psum_out  (eng_psum)
  );

  always_comb begin
    for (int k = 0; k < 3; k++) begin
      eng_act[k][0] = buf_q[3*k][LANES-1];
      for (int l = 0; l < LANES; l++) eng_act[k][l+1] = buf_q[3*k+1][l];
      eng_act[k][LANES+1] = buf_q[3*k+2][0];
      for (int t = 0; t < 3; t++) eng_w[k][t] = buf_q[9][3*k+t];
    end
  end

  // address of the current read step and whether it lies inside the image
  logic              rd_need;
  logic [CNN_AW-1:0] rd_addr;
  logic [3:0]        last_step;
  logic [4:0]        o_last;
  logic [7:0]        y_last;
  logic [3:0]        x_last;

  always_comb begin
    int yy, xx;
    rd_need = 1'b1;
    rd_addr = '0;
    yy = 0;
    xx = 0;
    if (c_pool) begin
      yy = 2 * int'(y) + int'(step[1]);
      xx = 2 * int'(x) + int'(step[0]);
      rd_addr = CNN_AW'(int'(c_in) + (int'(o) * int'(c_h) + yy) * int'(c_ww) + xx);
    end else if (step == 4'd9) begin
      rd_addr = CNN_AW'(int'(c_w) + int'(o) * int'(c_cin) + int'(ci));
    end else begin
      yy = int'(y) + int'(step) / 3 - 1;
      xx = int'(x) + int'(step) % 3 - 1;
      rd_need = (yy >= 0) && (yy < int'(c_h)) && (xx >= 0) && (xx < int'(c_ww));
      rd_addr = CNN_AW'(int'(c_in) + (int'(ci) * int'(c_h) + yy) * int'(c_ww) + xx);
    end
    last_step = c_pool ? 4'd3 : 4'd9;
    o_last    = c_pool ? c_cin - 5'd1 : c_cout - 5'd1;
    y_last    = c_pool ? (c_h >> 1) - 8'd1 : c_h - 8'd1;
    x_last    = c_pool ? (c_ww >> 1) - 4'd1 : c_ww - 4'd1;
  end

  // result word
  fxvec_t wr_word;
  logic [CNN_AW-1:0] wr_addr;

  always_comb begin
    wr_word = '0;
    for (int l = 0; l < LANES; l++) begin
      logic signed [31:0] v;
      fx16_t a0, a1, b0, b1, m0, m1;
      a0 = buf_q[l / 8][2 * (l % 8)];
      a1 = buf_q[l / 8][2 * (l % 8) + 1];
      b0 = buf_q[2 + l / 8][2 * (l % 8)];
      b1 = buf_q[2 + l / 8][2 * (l % 8) + 1];
      m0 = (a0 > a1) ? a0 : a1;
      m1 = (b0 > b1) ? b0 : b1;
      v  = $signed(acc[l]) >>> CNN_FRAC;
      if (c_pool)                   wr_word[l] = (m0 > m1) ? m0 : m1;
      else if (c_relu && v < 0)     wr_word[l] = '0;
      else if (v > 32'sd32767)      wr_word[l] = 16'sh7FFF;
      else if (v < -32'sd32768)     wr_word[l] = 16'sh8000;
      else                          wr_word[l] = v[15:0];
    end
    if (c_pool)
      wr_addr = CNN_AW'(int'(c_out) + (int'(o) * (int'(c_h) / 2) + int'(y)) * (int'(c_ww) / 2) + int'(x));
    else
      wr_addr = CNN_AW'(int'(c_out) + (int'(o) * int'(c_h) + int'(y)) * int'(c_ww) + int'(x));
  end

  always_comb begin
    mem_req   = '0;
    eng_valid = (state == S_RUN);
    if (state == S_RD && rd_need) begin
      mem_req.valid = 1'b1;
      mem_req.addr  = rd_addr;
    end else if (state == S_WR) begin
      mem_req.valid = 1'b1;
      mem_req.we    = 1'b1;
      mem_req.addr  = wr_addr;
      mem_req.wdata = wr_word;
    end
  end

  assign busy = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= S_IDLE;
      done   <= 1'b0;
      c_pool <= 1'b0; c_relu <= 1'b0;
      c_in   <= '0; c_out <= '0; c_w <= '0;
      c_h    <= '0; c_ww <= '0; c_cin <= '0; c_cout <= '0;
      o <= '0; ci <= '0; y <= '0; x <= '0; step <= '0;
      acc    <= '0;
      for (int i = 0; i < 10; i++) buf_q[i] <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          c_pool <= op_pool; c_relu <= relu;
          c_in <= in_base; c_out <= out_base; c_w <= w_base;
          c_h <= height; c_ww <= wwords; c_cin <= cin; c_cout <= cout;
          o <= '0; ci <= '0; y <= '0; x <= '0; step <= '0;
          acc   <= '0;
          state <= S_RD;
        end
        S_RD: begin
          if (!rd_need) begin
            buf_q[step] <= '0;
            step  <= step + 4'd1;
            if (step == last_step) state <= c_pool ? S_WR : S_RUN;
          end else if (mem_gnt) begin
            state <= S_CAP;
          end
        end
        S_CAP: begin
          buf_q[step] <= mem_rdata;
          step  <= step + 4'd1;
          state <= (step == last_step) ? (c_pool ? S_WR : S_RUN) : S_RD;
        end
        S_RUN: state <= S_ACC;
        S_ACC: begin
          acc  <= eng_psum;
          step <= '0;
          if (ci == c_cin - 5'd1) begin
            state <= S_WR;
          end else begin
            ci    <= ci + 5'd1;
            state <= S_RD;
          end
        end
        S_WR: if (mem_gnt) begin
          ci   <= '0;
          step <= '0;
          acc  <= '0;
          state <= S_RD;
          if (x != x_last) x <= x + 4'd1;
          else begin
            x <= '0;
            if (y != y_last) y <= y + 8'd1;
            else begin
              y <= '0;
              if (o != o_last) o <= o + 5'd1;
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

  a_engine_result: assert property (@(posedge clk) disable iff (!rst_n)
    (state == S_ACC) |-> eng_out_valid);

endmodule
