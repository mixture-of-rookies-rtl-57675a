// bin_pred_unit: Binary Prediction Unit.
//
// Runs the self-correlation half of the Mixture-of-Rookies predictor for the
// members of clusters whose proxy came out negative. It holds the binary
// weight SRAM and NBCU binCUs. Each binCU owns one slot: a ring of SLOT words
// of the SRAM (2 KB / 8 binCUs = 32 words = 2048 sign bits by default).
//
// Flow for one non-proxy neuron (table row address on req_*):
//   1. a free slot takes it; its two header words (idx, c, m, b, batch-norm
//      scale and bias) are read from external memory;
//   2. if the layer adds a residual, the residual byte is read;
//   3. the slot's binCU starts; the loader streams the row's sign words into
//      the ring as ring space frees up, and the binCU consumes them;
//   4. if the binCU predicts zero, a 0 byte is written to the neuron's output
//      address (the neuron is then finished without ever reaching a CU);
//   5. the result (row address, zero or not) is offered on res_*; non-zero
//      neurons are then sent by the Neurons Controller to a CU.
// Neurons with c < T skip steps 2 and 3 and are reported non-zero at once.
//
// The loader has one external memory port (the SRAM's write path in the
// accelerator diagram) and keeps at most one read in flight, taking requests
// from the slots in fixed priority order. The sign words are the ones of the
// non-proxy row itself, so no separate binary weight table is needed.
//
// From the paper: an SRAM for binary weights of non-proxy neurons, 8 binCUs
// that do not access external memory themselves, writing 0 for predicted-zero
// outputs. This design's own choices: the per-binCU ring slots, streaming the
// sign words so that any fan-in fits, the loader and its port, result order.
module bin_pred_unit
  import mor_pkg::*;
#(
  parameter int unsigned NBCU     = 8,
  parameter int unsigned BW_BYTES = 2048,
  parameter int unsigned IN_AW    = 11
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  row_ctx_t                    ctx,
  // neuron requests
  input  logic                        req_valid,
  input  addr_t                       req_addr,
  output logic                        req_ready,
  // results
  output logic                        res_valid,
  output addr_t                       res_addr,
  output logic                        res_zero,
  input  logic                        res_ready,
  // external memory
  output mem_req_t                    mem_req,
  input  mem_rsp_t                    mem_rsp,
  // input SRAM read ports
  output logic [NBCU-1:0][IN_AW-1:0]  in_raddr,
  input  logic [NBCU-1:0][63:0]       in_rdata,
  output logic                        busy
);
  localparam int unsigned BW_WORDS = BW_BYTES / 8;
  localparam int unsigned BW_AW    = $clog2(BW_WORDS);
  localparam int unsigned SLOT     = BW_WORDS / NBCU;
  localparam int unsigned SW       = $clog2(NBCU) > 0 ? $clog2(NBCU) : 1;

  typedef enum logic [2:0] {
    L_FREE, L_HDR, L_HDRW, L_RES, L_RESW, L_RUN, L_ZWR, L_REP
  } slot_state_t;
  typedef enum logic [1:0] {K_HDR, K_RES, K_SGN} kind_t;

  slot_state_t st [NBCU];
  addr_t       raddr_s [NBCU];
  logic [63:0] hdr0 [NBCU];
  logic [63:0] hdr1 [NBCU];
  logic [7:0]  resb [NBCU];
  logic [15:0] reqd [NBCU];
  logic [15:0] loaded [NBCU];
  logic        zero_s [NBCU];
  logic [NBCU-1:0] start;

  // binCU signals
  logic [NBCU-1:0][15:0]      consumed;
  logic [NBCU-1:0][BW_AW-1:0] bw_raddr;
  logic [NBCU-1:0][63:0]      bw_rdata;
  logic [NBCU-1:0]            b_busy, b_valid, b_zero, b_ack;

  // loader
  logic        ld_busy;
  logic [SW-1:0] ld_slot;
  kind_t       ld_kind;
  logic [3:0]  ld_left;
  logic        ld_first;
  logic [2:0]  ld_bsel;

  logic        bw_we;
  logic [BW_AW-1:0] bw_waddr;

  binweight_sram #(.BYTES(BW_BYTES), .NRD(NBCU)) u_bw (
    .clk, .we(bw_we), .waddr(bw_waddr), .wdata(mem_rsp.rdata),
    .raddr(bw_raddr), .rdata(bw_rdata)
  );

  logic [15:0] kw;
  assign kw = groups64(ctx.d.k);

  for (genvar s = 0; s < NBCU; s++) begin : g_bcu
    bin_cu #(.IN_AW(IN_AW), .BW_AW(BW_AW), .SLOT(SLOT)) u_bcu (
      .clk, .rst_n,
      .start(start[s]), .k(ctx.d.k), .in_woff(ctx.in_woff),
      .slot_base(BW_AW'(s * SLOT)),
      .c(hdr0[s][23:16]), .thr(ctx.d.thr),
      .m($signed(hdr1[s][47:32])), .b($signed(hdr1[s][63:48])),
      .bn_scale($signed(hdr1[s][15:0])), .bn_bias($signed(hdr1[s][31:16])),
      .res($signed(resb[s])), .res_en(ctx.d.res_en), .out_shift(ctx.d.out_shift),
      .words_avail(loaded[s]), .consumed(consumed[s]),
      .bw_raddr(bw_raddr[s]), .bw_rdata(bw_rdata[s]),
      .in_raddr(in_raddr[s]), .in_rdata(in_rdata[s]),
      .busy(b_busy[s]), .res_valid(b_valid[s]), .pred_zero(b_zero[s]),
      .res_ack(b_ack[s])
    );
  end

  function automatic addr_t out_addr(input logic [63:0] h0, input row_ctx_t cx, input addr_t base);
    return base + addr_t'(cx.row) * addr_t'(cx.d.n_out) + addr_t'(h0[15:0]);
  endfunction

  // ---------------------------------------------------------------- requests
  logic [NBCU-1:0] free_v, rep_v, need_v;
  logic [3:0]      sgn_len [NBCU];
  always_comb begin
    for (int s = 0; s < NBCU; s++) begin
      logic [15:0] left, room;
      free_v[s] = (st[s] == L_FREE);
      rep_v[s]  = (st[s] == L_REP);
      left = kw - reqd[s];
      room = 16'(SLOT) - (reqd[s] - consumed[s]);
      sgn_len[s] = 4'((left < 16'd8) ? left : 16'd8);
      need_v[s] = (st[s] == L_HDR) || (st[s] == L_RES) || (st[s] == L_ZWR) ||
                  ((st[s] == L_RUN) && (hdr0[s][23:16] >= ctx.d.thr) && (left != 0) &&
                   (room >= 16'(sgn_len[s])));
    end
  end

  logic          any_free, any_need, any_rep;
  logic [SW-1:0] free_sel, need_sel, rep_sel;
  always_comb begin
    any_free = 1'b0; any_need = 1'b0; any_rep = 1'b0;
    free_sel = '0; need_sel = '0; rep_sel = '0;
    for (int s = NBCU-1; s >= 0; s--) begin
      if (free_v[s]) begin any_free = 1'b1; free_sel = SW'(s); end
      if (need_v[s]) begin any_need = 1'b1; need_sel = SW'(s); end
      if (rep_v[s])  begin any_rep  = 1'b1; rep_sel  = SW'(s); end
    end
  end

  assign req_ready = any_free;
  assign res_valid = any_rep;
  assign res_addr  = raddr_s[rep_sel];
  assign res_zero  = zero_s[rep_sel];

  addr_t need_res_addr;
  assign need_res_addr = out_addr(hdr0[need_sel], ctx, ctx.d.res_base);

  always_comb begin
    mem_req = '0;
    if (!ld_busy && any_need) begin
      mem_req.valid = 1'b1;
      case (st[need_sel])
        L_HDR: begin mem_req.addr = raddr_s[need_sel]; mem_req.len = 4'd2; end
        L_RES: begin
          mem_req.addr = {need_res_addr[ADDR_W-1:3], 3'b000};
          mem_req.len  = 4'd1;
        end
        L_ZWR: begin
          mem_req.we    = 1'b1;
          mem_req.addr  = out_addr(hdr0[need_sel], ctx, ctx.d.out_base);
          mem_req.len   = 4'd1;
          mem_req.wdata = 8'd0;
        end
        default: begin
          mem_req.addr = raddr_s[need_sel] + 32'd16 + (addr_t'(reqd[need_sel]) << 3);
          mem_req.len  = sgn_len[need_sel];
        end
      endcase
    end
  end
  wire req_fire = mem_req.valid && mem_rsp.ready;

  assign bw_we    = mem_rsp.rvalid && ld_busy && (ld_kind == K_SGN);
  assign bw_waddr = BW_AW'(32'(ld_slot) * SLOT + (32'(loaded[ld_slot]) % SLOT));

  logic [NBCU-1:0] busy_v;
  always_comb for (int s = 0; s < NBCU; s++) busy_v[s] = (st[s] != L_FREE);
  assign busy = (|busy_v) || (|b_busy);

  always_comb begin
    b_ack = '0;
    for (int s = 0; s < NBCU; s++)
      b_ack[s] = (st[s] == L_REP) && res_ready && (rep_sel == SW'(s));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < NBCU; s++) begin
        st[s] <= L_FREE; raddr_s[s] <= '0; hdr0[s] <= '0; hdr1[s] <= '0;
        resb[s] <= '0; reqd[s] <= '0; loaded[s] <= '0; zero_s[s] <= 1'b0;
      end
      start <= '0;
      ld_busy <= 1'b0; ld_slot <= '0; ld_kind <= K_HDR; ld_left <= '0;
      ld_first <= 1'b0; ld_bsel <= '0;
    end else begin
      start <= '0;
      // new neuron
      if (req_valid && any_free) begin
        st[free_sel] <= L_HDR;
        raddr_s[free_sel] <= req_addr;
        reqd[free_sel] <= '0;
        loaded[free_sel] <= '0;
      end
      // issue
      if (req_fire) begin
        case (st[need_sel])
          L_HDR: begin
            st[need_sel] <= L_HDRW;
            ld_busy <= 1'b1; ld_kind <= K_HDR; ld_left <= 4'd2; ld_first <= 1'b1;
          end
          L_RES: begin
            st[need_sel] <= L_RESW;
            ld_busy <= 1'b1; ld_kind <= K_RES; ld_left <= 4'd1;
            ld_bsel <= need_res_addr[2:0];
          end
          L_ZWR: st[need_sel] <= L_REP;
          default: begin
            reqd[need_sel] <= reqd[need_sel] + 16'(sgn_len[need_sel]);
            ld_busy <= 1'b1; ld_kind <= K_SGN; ld_left <= sgn_len[need_sel];
          end
        endcase
        ld_slot <= need_sel;
      end
      // responses
      if (mem_rsp.rvalid && ld_busy) begin
        ld_left <= ld_left - 1'b1;
        if (ld_left == 4'd1) ld_busy <= 1'b0;
        case (ld_kind)
          K_HDR: begin
            if (ld_first) begin
              hdr0[ld_slot] <= mem_rsp.rdata;
              ld_first <= 1'b0;
            end else begin
              hdr1[ld_slot] <= mem_rsp.rdata;
              // header complete: low-correlation neurons skip the rest
              if (hdr0[ld_slot][23:16] < ctx.d.thr || !ctx.d.res_en) begin
                st[ld_slot] <= L_RUN; start[ld_slot] <= 1'b1;
              end else st[ld_slot] <= L_RES;
            end
          end
          K_RES: begin
            resb[ld_slot] <= mem_rsp.rdata[8*ld_bsel +: 8];
            st[ld_slot] <= L_RUN; start[ld_slot] <= 1'b1;
          end
          default: loaded[ld_slot] <= loaded[ld_slot] + 1'b1;
        endcase
      end
      // binCU results
      for (int s = 0; s < NBCU; s++) begin
        if (st[s] == L_RUN && b_valid[s] && !start[s]) begin
          zero_s[s] <= b_zero[s];
          st[s] <= b_zero[s] ? L_ZWR : L_REP;
        end
        if (b_ack[s]) st[s] <= L_FREE;
      end
    end
  end

  // a binCU result is only taken once its slot has stopped loading
  a_one_read: assert property (@(posedge clk) disable iff (!rst_n)
    req_fire && !mem_req.we |-> !ld_busy);
endmodule
