// tb_compute_unit: self-checking test of one Compute Unit.
//
// One compute_unit is connected to an input SRAM (loaded directly by the
// testbench) and to the external memory model. Random neurons, proxy and
// non-proxy rows, with and without residual and ReLU, several fan-ins
// including ones that are not multiples of 64, are handed to the CU one at a
// time. For each job the testbench checks the output byte written to memory,
// the reported cluster size, sign and sequence number, the number of words the
// CU read, and the cycle count: with an 8-wide MAC a neuron of fan-in K can
// not finish in fewer than K/8 cycles and, with memory keeping up, must finish
// within K/8 plus the memory latency and a small fixed overhead.
module tb_compute_unit;
  import mor_pkg::*;
  import tb_mor_pkg::*;

  localparam int LAT = 4;
  logic clk = 1'b0, rst_n = 1'b1;
  initial #1 rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #2_000_000;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  logic        job_valid = 1'b0;
  cu_job_t     job;
  logic        idle, done_valid;
  cu_done_t    done;
  row_ctx_t    ctx;
  logic [10:0] in_raddr;
  logic [63:0] in_rdata;
  mem_req_t [0:0] mreq;
  mem_rsp_t [0:0] mrsp;
  logic        sw_we = 1'b0;
  logic [10:0] sw_addr;
  logic [63:0] sw_data;

  compute_unit dut (.clk, .rst_n, .job_valid, .job, .idle, .ctx, .in_raddr, .in_rdata,
                    .mem_req(mreq[0]), .mem_rsp(mrsp[0]), .done_valid, .done);
  input_sram #(.NRD(1)) u_in (.clk, .we(sw_we), .waddr(sw_addr), .wdata(sw_data),
                              .raddr(in_raddr), .rdata(in_rdata));
  ext_mem_model #(.NPORT(1), .LAT(LAT)) u_mem (.clk, .req(mreq), .rsp(mrsp));

  int cyc = 0;
  always @(posedge clk) cyc++;

  task automatic run_one(input int t, input bit is_proxy, input int k, input bit relu,
                         input bit res_en);
    wvec_t w = new[k], x = new[k];
    logic [63:0] words[$];
    int idx = $urandom % 40, sc = 32 + $urandom % 200, bi = int'($urandom % 8000) - 4000;
    int sh = 6 + $urandom % 3, cs = $urandom % 9, c = $urandom % 256;
    int rw = 2 + 8 * groups(k) + (res_en ? 1 : 0);
    int row = $urandom % 3, n_out = 40;
    byte res = byte'(int'($urandom % 41) - 20);
    int rd0, c0, c1, woff = $urandom % 1500;
    longint y;
    int exp_q;
    for (int i = 0; i < k; i++) begin w[i] = byte'($urandom); x[i] = byte'($urandom); end
    if (is_proxy) proxy_row(idx, cs, sc, bi, w, k, words);
    else nonproxy_row(idx, c, sc, bi, 200, 10, w, k, words);
    foreach (words[q]) u_mem.wr_word(32'h1000 + 8 * q, words[q]);
    // inputs: word woff + i/8
    for (int i = 0; i < 8 * 8 * groups(k); i += 8) begin
      logic [63:0] v = '0;
      for (int b = 0; b < 8; b++) if (i + b < k) v[8*b +: 8] = x[i+b];
      @(negedge clk); sw_we = 1'b1; sw_addr = 11'(woff + i / 8); sw_data = v;
    end
    @(negedge clk); sw_we = 1'b0;
    ctx = '0;
    ctx.d.k = 16'(k); ctx.d.n_out = 16'(n_out); ctx.d.out_base = 32'h8000;
    ctx.d.res_base = 32'h9000; ctx.d.out_shift = 5'(sh); ctx.d.relu_en = relu;
    ctx.d.res_en = res_en; ctx.row = 16'(row); ctx.in_woff = 11'(woff);
    u_mem.wr_byte(32'h9000 + row * n_out + idx, res);
    u_mem.wr_byte(32'h8000 + row * n_out + idx, 8'hAA);
    y = ref_relu_in(ref_dot(w, x, k), sc, bi, res, res_en, sh);
    exp_q = ref_quant(y, sh, relu);
    rd0 = u_mem.words_read[0];
    job.is_proxy = is_proxy; job.row_addr = 32'h1000; job.seq = 16'(t);
    check(idle, "CU idle before the job");
    @(negedge clk); job_valid = 1'b1;
    c0 = cyc;
    @(negedge clk); job_valid = 1'b0;
    while (!done_valid) @(negedge clk);
    c1 = cyc;
    @(negedge clk);
    check(int'($signed(u_mem.rd_byte(32'h8000 + row * n_out + idx))) == exp_q,
          $sformatf("job %0d (proxy %0d k %0d): output %0d expected %0d", t, is_proxy, k,
                    $signed(u_mem.rd_byte(32'h8000 + row * n_out + idx)), exp_q));
    check(done.seq == 16'(t), $sformatf("job %0d: seq", t));
    check(done.is_proxy == is_proxy, $sformatf("job %0d: kind", t));
    check(done.neg == (relu && y < 0), $sformatf("job %0d: sign", t));
    if (is_proxy) check(done.cs == 8'(cs), $sformatf("job %0d: cluster size", t));
    check(u_mem.words_read[0] - rd0 == rw,
          $sformatf("job %0d: words read %0d expected %0d", t, u_mem.words_read[0] - rd0, rw));
    // rate: at most 8 MACs per cycle, and close to it when memory keeps up
    check(c1 - c0 >= k / 8, $sformatf("job %0d: %0d cycles is faster than 8 MAC/cycle", t, c1 - c0));
    check(c1 - c0 <= 8 * groups(k) + 2 * LAT + 32,
          $sformatf("job %0d: %0d cycles for k=%0d", t, c1 - c0, k));
  endtask

  initial begin
    int ks[6] = '{64, 72, 128, 200, 512, 1000};
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 24; t++)
      run_one(t, t % 2 == 0, ks[t % 6], (t % 4) != 3, (t % 3) == 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
