// compute_unit: base-precision neuron evaluator (CU).
//
// A CU computes one neuron at a time. When the Neurons Controller hands it a
// job (table row address, proxy or non-proxy) it fetches the row from external
// memory through its own port into a weight buffer, reads the matching inputs
// from the input SRAM and accumulates eight 8x8-bit products per cycle into
// the psum register. At the end it applies the folded batch norm, adds the
// residual input when the layer has one, decides the sign of the ReLU input,
// writes the requantised (ReLU'd) output byte to external memory at
// out_base + row*n_out + idx and reports {seq, cluster size, negative} back.
//
// Row format (see mor_pkg): proxies carry plain 8-bit weights; non-proxy rows
// carry the sign bits and the 7 remaining bits separately, so the CU requests
// every group of 64 weights as one sign word plus seven packed words and
// rebuilds the two's-complement weights. Both row kinds cost eight words per
// 64 weights, which lets a CU keep its 8 MACs/cycle from an 8-byte port.
//
// Timing: the header read (2 words) is issued first, then groups of eight
// words while the buffer has room (requests never exceed BUF_BYTES of data
// in flight or buffered), then the residual word. Words are gathered eight at
// a time; a full group is decoded into 64 weights and multiplied over 8
// cycles against 8 input words (one SRAM read per cycle, one cycle latency),
// while the next group is gathered. With memory keeping up, a neuron of fan-in
// K takes about K/8 cycles plus memory latency and ~5 cycles of overhead.
//
// From the paper: independent CUs with their own memory port, weight buffer
// (1 KB), MAC width 8, psum register, 8-bit precision, the weight/sign split of
// non-proxy rows. This design's own choices: the header word layout, the
// residual and batch-norm arithmetic (mor_pkg::relu_input), the requantisation
// of the output and the request ordering.
module compute_unit
  import mor_pkg::*;
#(
  parameter int unsigned BUF_BYTES = 1024,
  parameter int unsigned IN_AW     = 11
) (
  input  logic             clk,
  input  logic             rst_n,
  // job from the Neurons Controller
  input  logic             job_valid,
  input  cu_job_t          job,
  output logic             idle,
  input  row_ctx_t         ctx,
  // input SRAM read port
  output logic [IN_AW-1:0] in_raddr,
  input  logic [63:0]      in_rdata,
  // external memory port
  output mem_req_t         mem_req,
  input  mem_rsp_t         mem_rsp,
  // completion
  output logic             done_valid,
  output cu_done_t         done
);
  localparam int unsigned DEPTH = BUF_BYTES / 8;
  localparam int unsigned CW    = $clog2(DEPTH) + 1;

  typedef enum logic [1:0] {S_IDLE, S_RUN, S_POST, S_WRITE} state_t;
  state_t state;

  logic        is_proxy;
  addr_t       row_addr;
  logic [15:0] seq;
  logic [15:0] kw;

  // header
  logic [63:0] hdr0, hdr1;
  logic        hdr_rcvd;
  logic [7:0]  res_byte;
  logic [2:0]  res_sel;
  logic        res_rcvd;

  // request side
  logic        hdr_req_done, res_req_done, sub;
  logic [15:0] j_req;
  logic [CW-1:0] pend;
  logic [31:0] rcv_cnt;

  // weight buffer
  logic          f_push, f_pop, f_full, f_empty;
  logic [CW-1:0] f_count;
  logic [63:0]   f_dout;

  // gather / MAC
  logic [63:0]   asm_w [8];
  logic [3:0]    asm_cnt;
  logic signed [7:0] cur_w [64];
  logic          mac_busy;
  logic [2:0]    mac_cyc;
  logic [15:0]   mac_chunk;
  logic [15:0]   chunks_done;
  logic signed [7:0] b_w [8];
  logic          b_v;
  logic signed [ACC_W-1:0] psum;
  logic signed [47:0] y_q;

  assign idle = (state == S_IDLE);

  sync_fifo #(.WIDTH(64), .DEPTH(DEPTH)) u_wbuf (
    .clk, .rst_n,
    .push(f_push), .din(mem_rsp.rdata),
    .pop(f_pop), .dout(f_dout),
    .full(f_full), .empty(f_empty), .count(f_count)
  );

  // ---------------------------------------------------------------- requests
  logic  want_chunk, want_res;
  addr_t res_addr;
  assign res_addr = ctx.d.res_base + addr_t'(ctx.row) * addr_t'(ctx.d.n_out) + addr_t'(hdr0[15:0]);
  assign want_chunk = (j_req < kw) &&
                      (sub || (32'(f_count) + 32'(pend) + 32'd8 <= 32'(DEPTH)));
  assign want_res   = ctx.d.res_en && hdr_rcvd && !res_req_done && (j_req == kw);

  always_comb begin
    mem_req = '0;
    if (state == S_WRITE) begin
      mem_req.valid = 1'b1;
      mem_req.we    = 1'b1;
      mem_req.addr  = ctx.d.out_base + addr_t'(ctx.row) * addr_t'(ctx.d.n_out) + addr_t'(hdr0[15:0]);
      mem_req.len   = 4'd1;
      mem_req.wdata = quant_out(y_q, ctx.d.out_shift, ctx.d.relu_en);
    end else if (state == S_RUN) begin
      if (!hdr_req_done) begin
        mem_req.valid = 1'b1;
        mem_req.addr  = row_addr;
        mem_req.len   = 4'd2;
      end else if (want_res) begin
        mem_req.valid = 1'b1;
        mem_req.addr  = {res_addr[ADDR_W-1:3], 3'b000};
        mem_req.len   = 4'd1;
      end else if (want_chunk) begin
        mem_req.valid = 1'b1;
        if (is_proxy) begin
          mem_req.addr = row_addr + 32'd16 + (addr_t'(j_req) << 6);
          mem_req.len  = 4'd8;
        end else if (!sub) begin
          mem_req.addr = row_addr + 32'd16 + (addr_t'(j_req) << 3);
          mem_req.len  = 4'd1;
        end else begin
          mem_req.addr = row_addr + 32'd16 + (addr_t'(kw) << 3) + addr_t'(j_req) * 32'd56;
          mem_req.len  = 4'd7;
        end
      end
    end
  end

  wire req_fire = mem_req.valid && mem_rsp.ready;

  // response routing by beat number: 0-1 header, then 8*kw buffer words,
  // then the residual word
  logic [31:0] n_buf_beats;
  assign n_buf_beats = 32'(kw) << 3;
  assign f_push = mem_rsp.rvalid && (state == S_RUN) &&
                  (rcv_cnt >= 32'd2) && (rcv_cnt < 32'd2 + n_buf_beats);

  // ---------------------------------------------------------------- gather
  wire can_xfer = (asm_cnt == 4'd8) && (!mac_busy || mac_cyc == 3'd7);
  assign f_pop  = !f_empty && (asm_cnt < 4'd8);

  // weight decode of a gathered group
  logic signed [7:0] dec_w [64];
  logic [447:0] packed7;
  always_comb begin
    packed7 = {asm_w[7], asm_w[6], asm_w[5], asm_w[4], asm_w[3], asm_w[2], asm_w[1]};
    for (int i = 0; i < 64; i++) begin
      if (is_proxy) dec_w[i] = asm_w[i/8][8*(i%8) +: 8];
      else          dec_w[i] = {asm_w[0][i], packed7[7*i +: 7]};
    end
  end

  assign in_raddr = IN_AW'(32'(ctx.in_woff) + (32'(mac_chunk) << 3) + 32'(mac_cyc));

  // one cycle of eight products
  logic signed [ACC_W-1:0] prod_sum;
  always_comb begin
    prod_sum = '0;
    for (int b = 0; b < 8; b++)
      prod_sum += ACC_W'(b_w[b]) * ACC_W'($signed(in_rdata[8*b +: 8]));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      is_proxy <= 1'b0; row_addr <= '0; seq <= '0; kw <= '0;
      hdr0 <= '0; hdr1 <= '0; hdr_rcvd <= 1'b0;
      res_byte <= '0; res_sel <= '0; res_rcvd <= 1'b0;
      hdr_req_done <= 1'b0; res_req_done <= 1'b0; sub <= 1'b0;
      j_req <= '0; pend <= '0; rcv_cnt <= '0;
      asm_cnt <= '0; mac_busy <= 1'b0; mac_cyc <= '0; mac_chunk <= '0;
      chunks_done <= '0; b_v <= 1'b0; psum <= '0; y_q <= '0;
      done_valid <= 1'b0; done <= '0;
      for (int i = 0; i < 8; i++) begin asm_w[i] <= '0; b_w[i] <= '0; end
      for (int i = 0; i < 64; i++) cur_w[i] <= '0;
    end else begin
      done_valid <= 1'b0;
      case (state)
        S_IDLE: if (job_valid) begin
          state <= S_RUN;
          is_proxy <= job.is_proxy; row_addr <= job.row_addr; seq <= job.seq;
          kw <= groups64(ctx.d.k);
          hdr_rcvd <= 1'b0; res_rcvd <= !ctx.d.res_en;
          hdr_req_done <= 1'b0; res_req_done <= 1'b0; sub <= 1'b0;
          j_req <= '0; pend <= '0; rcv_cnt <= '0;
          asm_cnt <= '0; mac_busy <= 1'b0; mac_cyc <= '0; mac_chunk <= '0;
          chunks_done <= '0; b_v <= 1'b0; psum <= '0;
        end

        S_RUN: begin
          // requests
          if (req_fire) begin
            if (!hdr_req_done) hdr_req_done <= 1'b1;
            else if (want_res) begin
              res_req_done <= 1'b1;
              res_sel <= res_addr[2:0];
            end else if (is_proxy) begin
              j_req <= j_req + 1'b1;
            end else begin
              sub <= !sub;
              if (sub) j_req <= j_req + 1'b1;
            end
          end
          // outstanding buffer words
          pend <= pend + ((req_fire && hdr_req_done && !want_res) ? CW'(mem_req.len) : '0)
                       - CW'(f_push);
          // responses
          if (mem_rsp.rvalid) begin
            rcv_cnt <= rcv_cnt + 1;
            if (rcv_cnt == 32'd0) hdr0 <= mem_rsp.rdata;
            if (rcv_cnt == 32'd1) begin hdr1 <= mem_rsp.rdata; hdr_rcvd <= 1'b1; end
            if (rcv_cnt == 32'd2 + n_buf_beats) begin
              res_byte <= mem_rsp.rdata[8*res_sel +: 8];
              res_rcvd <= 1'b1;
            end
          end
          // gather
          if (f_pop) begin
            asm_w[asm_cnt[2:0]] <= f_dout;
            asm_cnt <= asm_cnt + 1'b1;
          end
          // MAC stage A: issue input read, hold weight slice
          if (can_xfer) begin
            for (int i = 0; i < 64; i++) cur_w[i] <= dec_w[i];
            asm_cnt <= '0;
          end
          if (mac_busy) begin
            for (int b = 0; b < 8; b++) b_w[b] <= cur_w[8*mac_cyc + b];
            b_v <= 1'b1;
            mac_cyc <= mac_cyc + 1'b1;
            if (mac_cyc == 3'd7) begin
              chunks_done <= chunks_done + 1'b1;
              mac_chunk   <= mac_chunk + 1'b1;
              mac_busy    <= can_xfer;
            end
          end else begin
            b_v <= 1'b0;
            if (can_xfer) begin mac_busy <= 1'b1; mac_cyc <= '0; end
          end
          // MAC stage B
          if (b_v) psum <= psum + prod_sum;
          // finish
          if (chunks_done == kw && !mac_busy && !b_v && hdr_rcvd && res_rcvd)
            state <= S_POST;
        end

        S_POST: begin
          y_q <= relu_input(psum, $signed(hdr1[15:0]), $signed(hdr1[31:16]),
                            $signed(res_byte), ctx.d.res_en, ctx.d.out_shift);
          state <= S_WRITE;
        end

        S_WRITE: if (mem_rsp.ready) begin
          state <= S_IDLE;
          done_valid    <= 1'b1;
          done.is_proxy <= is_proxy;
          done.seq      <= seq;
          done.cs       <= is_proxy ? hdr0[23:16] : 8'd0;
          done.neg      <= ctx.d.relu_en && (y_q < 0);
        end

        default: state <= S_IDLE;
      endcase
    end
  end

  a_no_stray_beat: assert property (@(posedge clk) disable iff (!rst_n)
    mem_rsp.rvalid |-> state == S_RUN);
  a_buf_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
    f_push |-> !f_full);
endmodule
