// bin_cu: binary compute unit of the Binary Prediction Unit.
//
// Predicts whether a non-proxy neuron's ReLU input is negative from the 1-bit
// version of its dot product. Each input and weight is replaced by its sign
// (+1 for a clear sign bit, -1 for a set one), so a product is +1 exactly when
// the two sign bits agree (XNOR) and the binary dot product over the K inputs
// is p_bin = 2*agreements - K. The neuron's fitted line turns it into an
// estimate of the base-precision dot product, p_hat = (m*p_bin)>>>8 + b, which
// then goes through the same batch norm and residual addition as a real dot
// product. The neuron is predicted zero when the estimate is negative and its
// correlation coefficient c is at least the layer threshold T; with c < T the
// unit answers "not zero" at once, without computing.
//
// Interface: start with the neuron's header fields; sign words are read from
// the binary weight SRAM ring slot at slot_base (SLOT words, word j at
// slot_base + j%SLOT) as the loader makes them available (words_avail), and
// 'consumed' tells the loader which ring words may be overwritten. Inputs come
// from the input SRAM, eight per word, of which only the sign bits are used.
//
// Timing: per group of 64 weights, one cycle to read the sign word and eight
// to read the eight input words (SRAM latency 1 cycle), i.e. 9 cycles per 64
// inputs, then 2 cycles for the estimate. The result is held until res_ack.
//
// From the paper: sign binarisation, XNOR/count instead of multiplies, the
// fitted line y = m*x + b, the threshold test on c, batch norm and residual
// applied to the estimate. This design's own choices: the fixed-point formats
// of c (Q0.8), m (Q8.8) and b, the ring organisation and the timing.
module bin_cu
  import mor_pkg::*;
#(
  parameter int unsigned IN_AW = 11,
  parameter int unsigned BW_AW = 8,
  parameter int unsigned SLOT  = 32
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  logic [15:0]      k,
  input  logic [IN_AW-1:0] in_woff,
  input  logic [BW_AW-1:0] slot_base,
  input  logic [7:0]       c,
  input  logic [7:0]       thr,
  input  logic signed [15:0] m,
  input  logic signed [15:0] b,
  input  logic signed [15:0] bn_scale,
  input  logic signed [15:0] bn_bias,
  input  logic signed [7:0]  res,
  input  logic             res_en,
  input  logic [4:0]       out_shift,
  input  logic [15:0]      words_avail,
  output logic [15:0]      consumed,
  output logic [BW_AW-1:0] bw_raddr,
  input  logic [63:0]      bw_rdata,
  output logic [IN_AW-1:0] in_raddr,
  input  logic [63:0]      in_rdata,
  output logic             busy,
  output logic             res_valid,
  output logic             pred_zero,
  input  logic             res_ack
);
  typedef enum logic [2:0] {S_IDLE, S_WAITW, S_RUN, S_EST, S_BN, S_DONE} state_t;
  state_t state;

  logic [15:0] kw, j;
  logic [2:0]  cyc;
  logic [63:0] bw_q;
  logic        b_v;
  logic [7:0]  b_signs;
  logic [15:0] b_base;         // input position of the stage-B word
  logic [16:0] agree;
  logic signed [ACC_W-1:0] est;

  assign busy     = (state != S_IDLE);
  assign consumed = j;
  assign bw_raddr = BW_AW'(32'(slot_base) + (32'(j) % SLOT));
  assign in_raddr = IN_AW'(32'(in_woff) + (32'(j) << 3) + 32'(cyc));

  // agreements of the 8 sign pairs of one input word, positions >= K masked
  logic [3:0] word_agree;
  always_comb begin
    word_agree = '0;
    for (int i = 0; i < 8; i++)
      if ((32'(b_base) + i) < 32'(k) && (in_rdata[8*i+7] == b_signs[i]))
        word_agree += 1'b1;
  end

  logic signed [17:0] p_bin;
  assign p_bin = $signed({agree, 1'b0}) - $signed({2'b00, k});

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; kw <= '0; j <= '0; cyc <= '0; bw_q <= '0;
      b_v <= 1'b0; b_signs <= '0; b_base <= '0; agree <= '0; est <= '0;
      res_valid <= 1'b0; pred_zero <= 1'b0;
    end else begin
      case (state)
        S_IDLE: if (start) begin
          kw <= groups64(k); j <= '0; cyc <= '0; agree <= '0; b_v <= 1'b0;
          if (c < thr) begin
            state <= S_DONE; res_valid <= 1'b1; pred_zero <= 1'b0;
          end else state <= S_WAITW;
        end
        S_WAITW: begin
          // the first stage-B cycle of the previous group drains here
          if (b_v) agree <= agree + 17'(word_agree);
          b_v <= 1'b0;
          if (j == kw && !b_v) state <= S_EST;
          else if (j < kw && words_avail > j) begin
            state <= S_RUN; cyc <= '0;
          end
        end
        S_RUN: begin
          if (cyc == 3'd0) bw_q <= bw_rdata;
          // stage B for the previous cycle's input word
          if (b_v) agree <= agree + 17'(word_agree);
          b_v     <= 1'b1;
          b_signs <= (cyc == 3'd0) ? bw_rdata[7:0] : bw_q[8*cyc +: 8];
          b_base  <= 16'((32'(j) << 6) + (32'(cyc) << 3));
          cyc <= cyc + 1'b1;
          if (cyc == 3'd7) begin
            j <= j + 1'b1;
            state <= S_WAITW;
          end
        end
        S_EST: begin
          est <= ACC_W'(((32'(p_bin) * 32'(m)) >>> 8) + 32'(b));
          state <= S_BN;
        end
        S_BN: begin
          pred_zero <= relu_input(est, bn_scale, bn_bias, res, res_en, out_shift) < 0;
          res_valid <= 1'b1;
          state <= S_DONE;
        end
        S_DONE: if (res_ack) begin
          res_valid <= 1'b0;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  a_read_loaded: assert property (@(posedge clk) disable iff (!rst_n)
    (state == S_RUN) |-> (words_avail > j));
endmodule
