// mor_accel: DNN accelerator with the Mixture-of-Rookies ReLU output predictor.
//
// The accelerator skips neurons whose ReLU output it predicts to be zero. Two
// cheap predictors must agree before a neuron is skipped:
//  * spatial: neurons of a layer are grouped offline into clusters around a
//    proxy neuron (by the angle between weight vectors). The proxy is always
//    computed; if its ReLU input is negative its cluster members become
//    candidates for skipping, otherwise they are all computed;
//  * self-correlation: for a candidate, a binCU computes the 1-bit dot product
//    of the sign bits of inputs and weights and maps it through a per-neuron
//    fitted line (slope m, intercept b) to an estimate of the real dot
//    product. If the estimate (after batch norm and residual) is negative and
//    the neuron's correlation coefficient c reaches the layer threshold T, the
//    neuron is skipped and 0 written as its output.
//
// Structure: Layer Controller -> Row Controller -> Neurons Controller, which
// drives NCU compute units (8 MACs/cycle each, own memory port) and the Binary
// Prediction Unit (binary weight SRAM and NBCU binCUs). All units share the
// input SRAM, loaded by the Row Controller. Every memory client has a port of
// its own on the mem_req/mem_rsp arrays:
//     port 0 .. NCU-1   compute units
//     port NCU          Binary Prediction Unit (sign words, header, zero writes)
//     port NCU+1        Row Controller (input windows)
//     port NCU+2        Layer Controller (layer descriptors)
//
// Operation: pulse start with desc_base/n_layers; done pulses when the last
// layer has been written to external memory. stats and the Row Controller
// counters show how the predictor behaved; cur_layer is the layer running.
//
// Sizes follow the paper's main configuration (8 CUs of width 8, 8 binCUs,
// 16 KB input SRAM, 2 KB binary weight SRAM, 1 KB CU buffer, 8-byte port).
module mor_accel
  import mor_pkg::*;
#(
  parameter int unsigned NCU          = 8,
  parameter int unsigned NBCU         = 8,
  parameter int unsigned IN_BYTES     = 16384,
  parameter int unsigned BW_BYTES     = 2048,
  parameter int unsigned CU_BUF_BYTES = 1024,
  localparam int unsigned NPORT       = NCU + 3
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  start,
  input  addr_t                 desc_base,
  input  logic [15:0]           n_layers,
  output logic                  busy,
  output logic                  done,
  output mem_req_t [NPORT-1:0]  mem_req,
  input  mem_rsp_t [NPORT-1:0]  mem_rsp,
  output nc_stats_t             stats,
  output logic [31:0]           words_loaded,
  output logic [31:0]           words_reused,
  output logic [15:0]           cur_layer
);
  localparam int unsigned IN_WORDS = IN_BYTES / 8;
  localparam int unsigned IN_AW    = $clog2(IN_WORDS);

  // layer -> row controller
  logic        rc_start, rc_done;
  layer_desc_t rc_desc;

  // row -> neurons controller
  logic        nc_start, nc_done;
  row_ctx_t    ctx;

  // input SRAM
  logic                              in_we;
  logic [IN_AW-1:0]                  in_waddr;
  logic [63:0]                       in_wdata;
  logic [NCU+NBCU-1:0][IN_AW-1:0]    in_raddr;
  logic [NCU+NBCU-1:0][63:0]         in_rdata;

  // CUs
  logic [NCU-1:0]     cu_idle, cu_job_valid, cu_done_valid;
  cu_job_t            cu_job;
  cu_done_t [NCU-1:0] cu_done;

  // binary prediction unit
  logic  bp_req_valid, bp_req_ready, bp_res_valid, bp_res_zero, bp_res_ready, bp_busy;
  addr_t bp_req_addr, bp_res_addr;

  layer_controller u_layer (
    .clk, .rst_n, .start, .desc_base, .n_layers,
    .busy, .done, .layer(cur_layer),
    .mem_req(mem_req[NCU+2]), .mem_rsp(mem_rsp[NCU+2]),
    .rc_start, .rc_desc, .rc_done
  );

  row_controller #(.IN_WORDS(IN_WORDS)) u_row (
    .clk, .rst_n, .start(rc_start), .desc(rc_desc), .done(rc_done),
    .mem_req(mem_req[NCU+1]), .mem_rsp(mem_rsp[NCU+1]),
    .sram_we(in_we), .sram_waddr(in_waddr), .sram_wdata(in_wdata),
    .nc_start, .nc_ctx(ctx), .nc_done,
    .words_loaded, .words_reused
  );

  input_sram #(.BYTES(IN_BYTES), .NRD(NCU + NBCU)) u_insram (
    .clk, .we(in_we), .waddr(in_waddr), .wdata(in_wdata),
    .raddr(in_raddr), .rdata(in_rdata)
  );

  neurons_controller #(.NCU(NCU)) u_nc (
    .clk, .rst_n, .start(nc_start), .ctx, .done(nc_done), .running(),
    .cu_idle, .cu_job_valid, .cu_job, .cu_done_valid, .cu_done,
    .bp_req_valid, .bp_req_addr, .bp_req_ready,
    .bp_res_valid, .bp_res_addr, .bp_res_zero, .bp_res_ready, .bp_busy,
    .stats
  );

  for (genvar i = 0; i < NCU; i++) begin : g_cu
    compute_unit #(.BUF_BYTES(CU_BUF_BYTES), .IN_AW(IN_AW)) u_cu (
      .clk, .rst_n,
      .job_valid(cu_job_valid[i]), .job(cu_job), .idle(cu_idle[i]), .ctx,
      .in_raddr(in_raddr[i]), .in_rdata(in_rdata[i]),
      .mem_req(mem_req[i]), .mem_rsp(mem_rsp[i]),
      .done_valid(cu_done_valid[i]), .done(cu_done[i])
    );
  end

  bin_pred_unit #(.NBCU(NBCU), .BW_BYTES(BW_BYTES), .IN_AW(IN_AW)) u_bp (
    .clk, .rst_n, .ctx,
    .req_valid(bp_req_valid), .req_addr(bp_req_addr), .req_ready(bp_req_ready),
    .res_valid(bp_res_valid), .res_addr(bp_res_addr), .res_zero(bp_res_zero),
    .res_ready(bp_res_ready),
    .mem_req(mem_req[NCU]), .mem_rsp(mem_rsp[NCU]),
    .in_raddr(in_raddr[NCU +: NBCU]), .in_rdata(in_rdata[NCU +: NBCU]),
    .busy(bp_busy)
  );
endmodule
