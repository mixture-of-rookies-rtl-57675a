// neurons_controller: schedules the neurons of one output row.
//
// Given a row context (layer descriptor, row number, input window), it runs
// the Mixture-of-Rookies flow over the proxy table and the non-proxy table:
//
//  * Proxies are handed to free CUs in table order, each tagged with a
//    sequence number. A CU reports back the proxy's cluster size and whether
//    its ReLU input was negative.
//  * Reports may come back out of order; a small reorder table (one entry per
//    proxy in flight) retires them in table order, so that the first member of
//    each cluster in the non-proxy table (the running sum of the earlier
//    cluster sizes) is known. A retired cluster {first member, size} goes into
//    the positive or the negative cluster queue: this is the small buffer of
//    available cluster members, which replaces a full per-row mask.
//  * Members of positive clusters go straight to CUs. Members of negative
//    clusters go to the Binary Prediction Unit; the ones it predicts non-zero
//    come back through a queue and go to CUs, the ones it predicts zero are
//    finished there (it writes their 0 output).
//  * CU priority: a non-proxy neuron (from the binary-unit queue first, then
//    from the positive cluster) always wins a free CU over the next proxy.
//    Proxies are issued only when no non-proxy neuron is waiting.
//
// One neuron is dispatched to a CU per cycle (lowest idle CU first) and one
// member per cycle to the binary unit. 'done' pulses once every proxy has
// retired, all queues are empty and every CU and binCU is idle.
//
// From the paper: proxies first unlock their clusters, non-proxy neurons have
// priority over proxies, the binary predictor overlaps with proxy evaluation,
// only a small buffer of cluster members is kept. This design's own choices:
// the reorder table, the queue depths and one dispatch per cycle.
module neurons_controller
  import mor_pkg::*;
#(
  parameter int unsigned NCU       = 8,
  parameter int unsigned CQ_DEPTH  = 8,
  parameter int unsigned BNZ_DEPTH = 8
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  row_ctx_t             ctx,
  output logic                 done,
  output logic                 running,
  // CUs
  input  logic [NCU-1:0]       cu_idle,
  output logic [NCU-1:0]       cu_job_valid,
  output cu_job_t              cu_job,
  input  logic [NCU-1:0]       cu_done_valid,
  input  cu_done_t [NCU-1:0]   cu_done,
  // Binary Prediction Unit
  output logic                 bp_req_valid,
  output addr_t                bp_req_addr,
  input  logic                 bp_req_ready,
  input  logic                 bp_res_valid,
  input  addr_t                bp_res_addr,
  input  logic                 bp_res_zero,
  output logic                 bp_res_ready,
  input  logic                 bp_busy,
  output nc_stats_t            stats
);
  localparam int unsigned ROB = 2 ** $clog2(NCU);
  localparam int unsigned RW  = $clog2(ROB) > 0 ? $clog2(ROB) : 1;
  localparam int unsigned CSW = $clog2(NCU) > 0 ? $clog2(NCU) : 1;

  typedef struct packed {
    logic [15:0] first;
    logic [7:0]  size;
  } cluster_t;

  logic [15:0] p_iss, p_ret, np_next;
  logic [ROB-1:0] rob_v, rob_neg;
  logic [7:0]  rob_cs [ROB];

  // cluster queues and cursors
  logic     pq_push, pq_pop, pq_full, pq_empty;
  logic     nq_push, nq_pop, nq_full, nq_empty;
  cluster_t q_din, pq_dout, nq_dout;
  logic [15:0] pos_idx, neg_idx;
  logic [7:0]  pos_left, neg_left;

  sync_fifo #(.WIDTH($bits(cluster_t)), .DEPTH(CQ_DEPTH)) u_posq (
    .clk, .rst_n, .push(pq_push), .din(q_din), .pop(pq_pop), .dout(pq_dout),
    .full(pq_full), .empty(pq_empty), .count());
  sync_fifo #(.WIDTH($bits(cluster_t)), .DEPTH(CQ_DEPTH)) u_negq (
    .clk, .rst_n, .push(nq_push), .din(q_din), .pop(nq_pop), .dout(nq_dout),
    .full(nq_full), .empty(nq_empty), .count());

  // queue of binary-predicted non-zero members
  logic  bq_push, bq_pop, bq_full, bq_empty;
  addr_t bq_dout;
  sync_fifo #(.WIDTH(ADDR_W), .DEPTH(BNZ_DEPTH)) u_bnzq (
    .clk, .rst_n, .push(bq_push), .din(bp_res_addr), .pop(bq_pop), .dout(bq_dout),
    .full(bq_full), .empty(bq_empty), .count());

  addr_t rowb;
  assign rowb = row_bytes(ctx.d.k);

  // ---------------------------------------------------------------- retire
  logic [RW-1:0] ret_slot;
  logic          ret_ok;
  assign ret_slot = p_ret[RW-1:0];
  assign ret_ok   = running && (p_ret != p_iss) && rob_v[ret_slot] &&
                    (rob_cs[ret_slot] == 8'd0 || (rob_neg[ret_slot] ? !nq_full : !pq_full));
  assign q_din.first = np_next;
  assign q_din.size  = rob_cs[ret_slot];
  assign pq_push = ret_ok && rob_cs[ret_slot] != 8'd0 && !rob_neg[ret_slot];
  assign nq_push = ret_ok && rob_cs[ret_slot] != 8'd0 &&  rob_neg[ret_slot];

  // ---------------------------------------------------------------- dispatch
  logic          any_idle;
  logic [CSW-1:0] cu_sel;
  always_comb begin
    any_idle = 1'b0; cu_sel = '0;
    for (int i = NCU-1; i >= 0; i--)
      if (cu_idle[i]) begin any_idle = 1'b1; cu_sel = CSW'(i); end
  end

  logic take_bnz, take_pos, take_proxy, proxy_ready;
  assign proxy_ready = running && (p_iss < ctx.d.n_proxy) && (32'(p_iss - p_ret) < ROB);
  assign take_bnz    = running && any_idle && !bq_empty;
  assign take_pos    = running && any_idle && bq_empty && (pos_left != 0);
  assign take_proxy  = any_idle && !take_bnz && !take_pos && proxy_ready;

  always_comb begin
    cu_job = '0;
    cu_job_valid = '0;
    if (take_bnz) begin
      cu_job.is_proxy = 1'b0;
      cu_job.row_addr = bq_dout;
    end else if (take_pos) begin
      cu_job.is_proxy = 1'b0;
      cu_job.row_addr = ctx.d.np_base + addr_t'(pos_idx) * rowb;
    end else begin
      cu_job.is_proxy = 1'b1;
      cu_job.row_addr = ctx.d.proxy_base + addr_t'(p_iss) * rowb;
      cu_job.seq      = p_iss;
    end
    if (take_bnz || take_pos || take_proxy) cu_job_valid[cu_sel] = 1'b1;
  end
  assign bq_pop = take_bnz;

  assign pq_pop = running && (pos_left == 0 || (pos_left == 8'd1 && take_pos)) && !pq_empty;
  assign nq_pop = running && (neg_left == 0 || (neg_left == 8'd1 && bp_req_valid && bp_req_ready)) && !nq_empty;

  assign bp_req_valid = running && (neg_left != 0);
  assign bp_req_addr  = ctx.d.np_base + addr_t'(neg_idx) * rowb;
  assign bp_res_ready = !bq_full;
  assign bq_push      = bp_res_valid && !bq_full && !bp_res_zero;

  // ---------------------------------------------------------------- state
  logic all_idle;
  assign all_idle = (&cu_idle) && !bp_busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      running <= 1'b0; done <= 1'b0;
      p_iss <= '0; p_ret <= '0; np_next <= '0;
      rob_v <= '0; rob_neg <= '0;
      for (int i = 0; i < ROB; i++) rob_cs[i] <= '0;
      pos_idx <= '0; pos_left <= '0; neg_idx <= '0; neg_left <= '0;
      stats <= '0;
    end else begin
      done <= 1'b0;
      if (start && !running) begin
        running <= 1'b1;
        p_iss <= '0; p_ret <= '0; np_next <= '0; rob_v <= '0;
      end
      if (take_proxy) p_iss <= p_iss + 1'b1;
      // CU reports
      for (int i = 0; i < NCU; i++)
        if (cu_done_valid[i] && cu_done[i].is_proxy) begin
          rob_v[cu_done[i].seq[RW-1:0]]   <= 1'b1;
          rob_neg[cu_done[i].seq[RW-1:0]] <= cu_done[i].neg;
          rob_cs[cu_done[i].seq[RW-1:0]]  <= cu_done[i].cs;
        end
      if (ret_ok) begin
        rob_v[ret_slot] <= 1'b0;
        p_ret   <= p_ret + 1'b1;
        np_next <= np_next + 16'(rob_cs[ret_slot]);
      end
      // positive cluster cursor
      if (take_pos) begin pos_idx <= pos_idx + 1'b1; pos_left <= pos_left - 1'b1; end
      if (pq_pop) begin pos_idx <= pq_dout.first; pos_left <= pq_dout.size; end
      // negative cluster cursor
      if (bp_req_valid && bp_req_ready) begin neg_idx <= neg_idx + 1'b1; neg_left <= neg_left - 1'b1; end
      if (nq_pop) begin neg_idx <= nq_dout.first; neg_left <= nq_dout.size; end
      // end of row
      if (running && !start && p_iss == ctx.d.n_proxy && p_ret == p_iss &&
          pq_empty && nq_empty && bq_empty && pos_left == 0 && neg_left == 0 &&
          !bp_res_valid && all_idle && cu_job_valid == '0) begin
        running <= 1'b0;
        done    <= 1'b1;
      end
      // counters
      if (take_proxy) stats.proxies <= stats.proxies + 1;
      if (ret_ok && rob_neg[ret_slot]) stats.proxy_neg <= stats.proxy_neg + 1;
      if (take_pos) stats.members_cu <= stats.members_cu + 1;
      if (bp_req_valid && bp_req_ready) stats.bin_req <= stats.bin_req + 1;
      if (bp_res_valid && bp_res_ready &&  bp_res_zero) stats.bin_zero <= stats.bin_zero + 1;
      if (bp_res_valid && bp_res_ready && !bp_res_zero) stats.bin_nonzero <= stats.bin_nonzero + 1;
      if ((take_bnz || take_pos) && proxy_ready) stats.np_priority <= stats.np_priority + 1;
    end
  end

  a_rob_free: assert property (@(posedge clk) disable iff (!rst_n)
    take_proxy |-> !rob_v[p_iss[RW-1:0]]);
  a_one_job: assert property (@(posedge clk) disable iff (!rst_n)
    $onehot0(cu_job_valid));
endmodule
