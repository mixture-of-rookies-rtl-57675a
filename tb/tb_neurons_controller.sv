// tb_neurons_controller: self-checking test of the Neurons Controller.
//
// The controller (default: 8 CUs) is driven with behavioural CUs and a
// behavioural Binary Prediction Unit. A CU model takes a job when idle,
// works for a random 3..40 cycles and reports the proxy's cluster size and
// sign from the testbench's tables, so reports come back out of order. The
// binary unit model accepts requests with random back-pressure and answers
// after a random delay, in order, with a zero/non-zero outcome from a table.
// Several rows are run with random cluster sizes (including empty clusters)
// and signs. The testbench checks that every proxy is computed exactly once,
// that every member of a positive cluster goes to a CU exactly once and never
// to the binary unit, that every member of a negative cluster goes to the
// binary unit exactly once and to a CU only if predicted non-zero, that no
// job is given to a busy CU, that a non-proxy job is dispatched while a
// proxy is waiting at least once (priority), that done comes only after all
// of that, and that the statistics counters agree.
module tb_neurons_controller;
  import mor_pkg::*;

  localparam int NCU = 8;
  localparam int MAXN = 256;

  logic clk = 1'b0, rst_n = 1'b1;
  initial #1 rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #5_000_000;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  logic                start = 1'b0, done, running;
  row_ctx_t            ctx;
  logic [NCU-1:0]      cu_idle, cu_job_valid, cu_done_valid;
  cu_job_t             cu_job;
  cu_done_t [NCU-1:0]  cu_done;
  logic                bp_req_valid, bp_req_ready, bp_res_valid, bp_res_zero, bp_res_ready, bp_busy;
  addr_t               bp_req_addr, bp_res_addr;
  nc_stats_t           stats;

  neurons_controller dut (.clk, .rst_n, .start, .ctx, .done, .running, .cu_idle, .cu_job_valid,
                          .cu_job, .cu_done_valid, .cu_done, .bp_req_valid, .bp_req_addr,
                          .bp_req_ready, .bp_res_valid, .bp_res_addr, .bp_res_zero,
                          .bp_res_ready, .bp_busy, .stats);

  // ---- row under test
  int    n_proxy, n_mem, rb;
  int    cs [MAXN];
  bit    pneg [MAXN];
  bit    mzero [MAXN];
  int    owner [MAXN];
  int    proxy_runs [MAXN];
  int    mem_cu [MAXN];
  int    mem_bp [MAXN];
  int    priority_seen = 0;

  localparam addr_t PBASE = 32'h10_0000, NBASE = 32'h40_0000;

  // ---- CU models
  int  cnt [NCU];
  cu_job_t held [NCU];
  always @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cu_idle <= '1; cu_done_valid <= '0;
      for (int i = 0; i < NCU; i++) cnt[i] <= 0;
    end else begin
      for (int i = 0; i < NCU; i++) begin
        cu_done_valid[i] <= 1'b0;
        if (cu_job_valid[i]) begin
          check(cu_idle[i], $sformatf("job given to busy CU %0d", i));
          cu_idle[i] <= 1'b0;
          held[i] <= cu_job;
          cnt[i] <= 3 + $urandom % 38;
        end else if (!cu_idle[i]) begin
          if (cnt[i] == 0) begin
            cu_done_valid[i] <= 1'b1;
            cu_done[i].is_proxy <= held[i].is_proxy;
            cu_done[i].seq <= held[i].seq;
            cu_done[i].cs <= held[i].is_proxy ? 8'(cs[held[i].seq]) : 8'd0;
            cu_done[i].neg <= held[i].is_proxy ? pneg[held[i].seq] : 1'b0;
            cu_idle[i] <= 1'b1;
          end else cnt[i] <= cnt[i] - 1;
        end
      end
    end
  end

  // ---- job bookkeeping
  always @(posedge clk) if (rst_n && |cu_job_valid) begin
    check($onehot(cu_job_valid), "one job per cycle");
    if (cu_job.is_proxy) begin
      int s;
      s = int'((cu_job.row_addr - PBASE) / rb);
      check(cu_job.row_addr == PBASE + s * rb && s == int'(cu_job.seq) && s < n_proxy,
            $sformatf("proxy job address %h seq %0d", cu_job.row_addr, cu_job.seq));
      if (s < n_proxy) proxy_runs[s]++;
    end else begin
      int mm;
      mm = int'((cu_job.row_addr - NBASE) / rb);
      check(cu_job.row_addr == NBASE + mm * rb && mm < n_mem,
            $sformatf("member job address %h", cu_job.row_addr));
      if (mm < n_mem) begin
        mem_cu[mm]++;
        if (pneg[owner[mm]]) check(mem_bp[mm] == 1 && !mzero[mm],
                                   $sformatf("member %0d of a negative cluster on a CU", mm));
      end
      if (dut.proxy_ready) priority_seen++;
    end
  end

  // ---- binary unit model
  typedef struct { addr_t a; int due; } bq_t;
  bq_t bq[$];
  int  now = 0;
  always @(posedge clk) now++;
  assign bp_busy = bq.size() > 0;
  always @(negedge clk) begin
    bp_req_ready = ($urandom % 3) != 0;
    bp_res_valid = bq.size() > 0 && bq[0].due <= now;
    bp_res_addr  = bq.size() > 0 ? bq[0].a : '0;
    bp_res_zero  = bq.size() > 0 ? mzero[int'((bq[0].a - NBASE) / rb)] : 1'b0;
  end
  always @(posedge clk) if (rst_n) begin
    if (bp_res_valid && bp_res_ready) void'(bq.pop_front());
    if (bp_req_valid && bp_req_ready) begin
      int mm;
      bq_t e;
      mm = int'((bp_req_addr - NBASE) / rb);
      check(bp_req_addr == NBASE + mm * rb && mm < n_mem, $sformatf("bin request %h", bp_req_addr));
      if (mm < n_mem) begin
        check(pneg[owner[mm]], $sformatf("member %0d of a positive cluster sent to the binary unit", mm));
        mem_bp[mm]++;
      end
      e.a = bp_req_addr; e.due = now + 2 + $urandom % 30;
      bq.push_back(e);
    end
  end

  nc_stats_t s0;

  task automatic run_row(input int r, input int np, input int maxcs);
    int e_neg = 0, e_pos_mem = 0, e_bin = 0, e_zero = 0;
    n_proxy = np; n_mem = 0; rb = 8 * (2 + 8 * 2);
    for (int p = 0; p < np; p++) begin
      cs[p] = $urandom % (maxcs + 1);
      pneg[p] = $urandom % 2;
      proxy_runs[p] = 0;
      if (pneg[p]) e_neg++;
      for (int q = 0; q < cs[p]; q++) begin
        owner[n_mem] = p; mzero[n_mem] = $urandom % 2; mem_cu[n_mem] = 0; mem_bp[n_mem] = 0;
        if (pneg[p]) begin e_bin++; if (mzero[n_mem]) e_zero++; end
        else e_pos_mem++;
        n_mem++;
      end
    end
    ctx = '0;
    ctx.d.k = 16'd128; ctx.d.proxy_base = PBASE; ctx.d.np_base = NBASE;
    ctx.d.n_proxy = 16'(np); ctx.d.relu_en = 1'b1; ctx.row = 16'(r);
    s0 = stats;
    @(negedge clk); start = 1'b1;
    @(negedge clk); start = 1'b0;
    while (!done) @(negedge clk);
    for (int p = 0; p < np; p++) check(proxy_runs[p] == 1, $sformatf("row %0d proxy %0d computed %0d times", r, p, proxy_runs[p]));
    for (int mm = 0; mm < n_mem; mm++) begin
      if (pneg[owner[mm]]) begin
        check(mem_bp[mm] == 1, $sformatf("row %0d member %0d predicted %0d times", r, mm, mem_bp[mm]));
        check(mem_cu[mm] == (mzero[mm] ? 0 : 1), $sformatf("row %0d member %0d (zero %0d) on CU %0d times", r, mm, mzero[mm], mem_cu[mm]));
      end else begin
        check(mem_cu[mm] == 1 && mem_bp[mm] == 0, $sformatf("row %0d positive member %0d", r, mm));
      end
    end
    check(stats.proxies - s0.proxies == np, "stats proxies");
    check(stats.proxy_neg - s0.proxy_neg == e_neg, "stats negative proxies");
    check(stats.members_cu - s0.members_cu == e_pos_mem, "stats members to CU");
    check(stats.bin_req - s0.bin_req == e_bin, "stats binary requests");
    check(stats.bin_zero - s0.bin_zero == e_zero, "stats predicted zero");
    check(stats.bin_nonzero - s0.bin_nonzero == e_bin - e_zero, "stats predicted non-zero");
    check(cu_idle == '1 && bq.size() == 0, "all idle at done");
    @(negedge clk);
    check(!running, "not running after done");
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    run_row(0, 1, 0);
    run_row(1, 5, 3);
    run_row(2, 30, 6);
    run_row(3, 40, 12);
    run_row(4, 12, 0);
    check(priority_seen > 0, "a non-proxy dispatched while a proxy was ready");
    check(stats.np_priority == priority_seen, "priority counter");
    $display("priority events=%0d", priority_seen);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
