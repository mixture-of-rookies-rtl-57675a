// tb_bin_pred_unit: self-checking test of the Binary Prediction Unit.
//
// The unit (default size: 8 binCUs, 2 KB binary weight SRAM) is connected to
// the external memory model (random stalls) and to an input SRAM loaded by
// the testbench. A table of random non-proxy neurons (fan-ins 64, 200 and
// 2500, the last being larger than one binCU's 2048-bit ring slot so the
// sign words must be streamed) is written to memory and every neuron is
// requested, in random order and with random gaps. The testbench checks that
// each request is answered exactly once with the reference prediction, that
// predicted-zero neurons get a 0 byte written to their output address and
// the others keep their old output byte, that low-correlation neurons read
// no sign words, that several binCUs work at the same time, and that the
// unit is idle at the end.
module tb_bin_pred_unit;
  import mor_pkg::*;
  import tb_mor_pkg::*;

  localparam int NBCU = 8;
  localparam int N    = 40;

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

  row_ctx_t ctx;
  logic     req_valid = 1'b0, req_ready, res_valid, res_zero, res_ready = 1'b0, busy;
  addr_t    req_addr, res_addr;
  mem_req_t [0:0] mreq;
  mem_rsp_t [0:0] mrsp;
  logic [NBCU-1:0][10:0] in_raddr;
  logic [NBCU-1:0][63:0] in_rdata;
  logic        in_we = 1'b0;
  logic [10:0] in_wa;
  logic [63:0] in_wd;

  bin_pred_unit dut (.clk, .rst_n, .ctx, .req_valid, .req_addr, .req_ready, .res_valid,
                     .res_addr, .res_zero, .res_ready, .mem_req(mreq[0]), .mem_rsp(mrsp[0]),
                     .in_raddr, .in_rdata, .busy);
  input_sram #(.NRD(NBCU)) u_in (.clk, .we(in_we), .waddr(in_wa), .wdata(in_wd),
                                 .raddr(in_raddr), .rdata(in_rdata));
  ext_mem_model #(.NPORT(1), .LAT(8), .STALL(1'b1)) u_mem (.clk, .req(mreq), .rsp(mrsp));

  int max_busy = 0;
  always @(posedge clk) if ($countones(dut.b_busy) > max_busy) max_busy = $countones(dut.b_busy);

  int     kk, rb, row, n_out;
  bit     exp_zero [N];
  bit     answered [N];
  bit     lowc [N];
  int     idx_of [N];
  int     n_zero = 0, n_low = 0;

  task automatic setup(input int k_in, input bit res_en, input int thr);
    wvec_t x = new[k_in];
    logic [63:0] words[$];
    kk = k_in; rb = 8 * (2 + 8 * groups(kk)); row = 1; n_out = N;
    for (int i = 0; i < kk; i++) x[i] = byte'($urandom);
    for (int i = 0; i < 8 * groups(kk); i++) begin
      logic [63:0] v = '0;
      for (int q = 0; q < 8; q++) if (8 * i + q < kk) v[8*q +: 8] = x[8*i+q];
      @(negedge clk); in_we = 1'b1; in_wa = 11'(100 + i); in_wd = v;
    end
    @(negedge clk); in_we = 1'b0;
    ctx = '0;
    ctx.d.k = 16'(kk); ctx.d.n_out = 16'(n_out); ctx.d.out_base = 32'h8000;
    ctx.d.res_base = 32'h9000; ctx.d.out_shift = 5'd6; ctx.d.relu_en = 1'b1;
    ctx.d.res_en = res_en; ctx.d.thr = 8'(thr); ctx.row = 16'(row); ctx.in_woff = 11'd100;
    for (int t = 0; t < N; t++) begin
      wvec_t w = new[kk];
      int c = $urandom % 256, m = 128 + $urandom % 1024, b = int'($urandom % 201) - 100;
      int sc = 256 + $urandom % 768, bi = int'($urandom % 401) - 200;
      byte res = byte'(int'($urandom % 7) - 3);
      longint y;
      for (int i = 0; i < kk; i++) w[i] = byte'($urandom);
      idx_of[t] = t;
      nonproxy_row(t, c, sc, bi, m, b, w, kk, words);
      foreach (words[q]) u_mem.wr_word(32'h10_0000 + t * rb + 8 * q, words[q]);
      u_mem.wr_byte(32'h9000 + row * n_out + t, res);
      u_mem.wr_byte(32'h8000 + row * n_out + t, 8'h5A);
      y = ref_relu_in(ref_estimate(ref_bin_dot(w, x, kk), m, b), sc, bi, res, res_en, 6);
      lowc[t] = (c < thr);
      exp_zero[t] = !lowc[t] && (y < 0);
      answered[t] = 1'b0;
    end
  endtask

  // result consumer with random back-pressure; ready is set half a cycle
  // ahead, so a result is taken at the next rising edge iff valid && ready now
  int n_ans = 0;
  always @(negedge clk) begin
    res_ready = ($urandom % 3) != 0;
    #1;
    if (res_valid && res_ready) begin
      int t;
      t = int'((res_addr - 32'h10_0000) / rb);
      check(t >= 0 && t < N && (res_addr - 32'h10_0000) % rb == 0, $sformatf("result address %h", res_addr));
      if (t >= 0 && t < N) begin
        check(!answered[t], $sformatf("neuron %0d answered twice", t));
        check(res_zero == exp_zero[t], $sformatf("k=%0d neuron %0d: zero=%0d expected %0d (low c %0d)",
                                                 kk, t, res_zero, exp_zero[t], lowc[t]));
        answered[t] = 1'b1;
        if (exp_zero[t]) n_zero++;
        if (lowc[t]) n_low++;
      end
      n_ans++;
    end
  end

  task automatic run_set(input int k_in, input bit res_en, input int thr);
    int order[$];
    int rd0;
    setup(k_in, res_en, thr);
    n_ans = 0;
    for (int t = 0; t < N; t++) order.push_back(t);
    order.shuffle();
    rd0 = u_mem.words_read[0];
    foreach (order[i]) begin
      @(negedge clk);
      req_valid = 1'b1; req_addr = 32'h10_0000 + order[i] * rb;
      do @(posedge clk); while (!req_ready);
      @(negedge clk); req_valid = 1'b0;
      repeat ($urandom % 4) @(negedge clk);
    end
    while (n_ans < N || busy) @(negedge clk);
    repeat (2) @(negedge clk);
    for (int t = 0; t < N; t++) begin
      int got = int'(u_mem.rd_byte(32'h8000 + row * n_out + t));
      check(answered[t], $sformatf("k=%0d neuron %0d answered", kk, t));
      check(got == (exp_zero[t] ? 0 : 'h5A), $sformatf("k=%0d neuron %0d output byte %h", kk, t, got));
    end
    begin
      // words read: 2 header words each, residual byte word, sign words of the
      // neurons at or above the threshold
      int exp_words = 0;
      for (int t = 0; t < N; t++)
        exp_words += 2 + (lowc[t] ? 0 : (res_en ? 1 : 0) + groups(kk));
      check(u_mem.words_read[0] - rd0 == exp_words,
            $sformatf("k=%0d words read %0d expected %0d", kk, u_mem.words_read[0] - rd0, exp_words));
    end
    check(!busy && !res_valid, "idle at the end");
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    run_set(64, 1'b0, 90);
    run_set(200, 1'b1, 128);
    run_set(2500, 1'b1, 60);
    check(n_zero > 0 && n_low > 0, "zero and low-correlation outcomes seen");
    check(max_busy >= 4, $sformatf("binCUs in parallel: %0d", max_busy));
    $display("zero=%0d low=%0d max_parallel=%0d", n_zero, n_low, max_busy);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
