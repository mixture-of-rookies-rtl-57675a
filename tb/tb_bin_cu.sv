// tb_bin_cu: self-checking test of one binary compute unit.
//
// The bin_cu is connected to an input SRAM and a binary weight SRAM that the
// testbench loads directly. For random neurons (several fan-ins, including
// ones that are not multiples of 64; random slope, intercept, batch norm and
// residual) it checks the zero/non-zero prediction against an integer
// reference of the paper's rule (estimate from the 1-bit dot product through
// the neuron's line, zero if negative and c >= T), that c < T answers
// non-zero without computing, that the unit waits for sign words the loader
// has not delivered yet (words_avail is released slowly in half of the
// trials), and the cycle count: 9 cycles per group of 64 inputs plus a small
// fixed overhead when all sign words are available.
module tb_bin_cu;
  import mor_pkg::*;
  import tb_mor_pkg::*;

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

  logic        start = 1'b0, res_en = 1'b0, res_ack = 1'b0;
  logic [15:0] k = '0, words_avail = '0, consumed;
  logic [10:0] in_woff = '0, in_raddr;
  logic [7:0]  slot_base = '0, bw_raddr;
  logic [7:0]  c = '0, thr = '0;
  logic signed [15:0] m = '0, b = '0, bn_scale = '0, bn_bias = '0;
  logic signed [7:0]  res = '0;
  logic [4:0]  out_shift = '0;
  logic [63:0] bw_rdata, in_rdata;
  logic        busy, res_valid, pred_zero;
  logic        in_we = 1'b0, bw_we = 1'b0;
  logic [10:0] in_wa;
  logic [7:0]  bw_wa;
  logic [63:0] in_wd, bw_wd;

  bin_cu dut (.clk, .rst_n, .start, .k, .in_woff, .slot_base, .c, .thr, .m, .b, .bn_scale,
              .bn_bias, .res, .res_en, .out_shift, .words_avail, .consumed, .bw_raddr, .bw_rdata,
              .in_raddr, .in_rdata, .busy, .res_valid, .pred_zero, .res_ack);
  input_sram #(.NRD(1)) u_in (.clk, .we(in_we), .waddr(in_wa), .wdata(in_wd),
                              .raddr(in_raddr), .rdata(in_rdata));
  binweight_sram #(.NRD(1)) u_bw (.clk, .we(bw_we), .waddr(bw_wa), .wdata(bw_wd),
                                  .raddr(bw_raddr), .rdata(bw_rdata));

  int cyc = 0;
  always @(posedge clk) cyc++;

  int n_zero = 0, n_nonzero = 0, n_low = 0, n_waited = 0;

  task automatic run_one(input int t, input int kk, input bit slow);
    wvec_t w = new[kk], x = new[kk];
    logic [63:0] words[$];
    int kw = groups(kk), c0, c1, woff = $urandom % 2000, sb = 32 * ($urandom % 8);
    longint est, y;
    bit exp_zero;
    for (int i = 0; i < kk; i++) begin w[i] = byte'($urandom); x[i] = byte'($urandom); end
    nonproxy_row(0, 0, 0, 0, 0, 0, w, kk, words);
    // inputs
    for (int i = 0; i < 8 * kw; i++) begin
      logic [63:0] v = '0;
      for (int q = 0; q < 8; q++) if (8 * i + q < kk) v[8*q +: 8] = x[8*i+q];
      @(negedge clk); in_we = 1'b1; in_wa = 11'(woff + i); in_wd = v;
    end
    @(negedge clk); in_we = 1'b0;
    k = 16'(kk); in_woff = 11'(woff); slot_base = 8'(sb);
    c = 8'($urandom); thr = 8'(64 + $urandom % 128);
    m = 16'(128 + $urandom % 1024); b = 16'(int'($urandom % 201) - 100);
    bn_scale = 16'(256 + $urandom % 768); bn_bias = 16'(int'($urandom % 401) - 200);
    res = 8'(int'($urandom % 7) - 3); res_en = 1'($urandom % 2); out_shift = 5'(5 + $urandom % 3);
    est = ref_estimate(ref_bin_dot(w, x, kk), m, b);
    y = ref_relu_in(est, bn_scale, bn_bias, res, res_en, out_shift);
    exp_zero = (c >= thr) && (y < 0);
    words_avail = '0;
    if (!slow) begin
      for (int j = 0; j < kw; j++) begin
        @(negedge clk); bw_we = 1'b1; bw_wa = 8'(sb + j % 32); bw_wd = words[2+j];
      end
      @(negedge clk); bw_we = 1'b0; words_avail = 16'(kw);
    end
    @(negedge clk); start = 1'b1; c0 = cyc;
    @(negedge clk); start = 1'b0;
    // slow mode: sign words trickle in, one every 13 cycles
    if (slow)
      for (int j = 0; j < kw; j++) begin
        repeat (12) @(negedge clk);
        if (c >= thr) check(busy && !res_valid, $sformatf("trial %0d: waits for sign word %0d", t, j));
        bw_we = 1'b1; bw_wa = 8'(sb + j % 32); bw_wd = words[2+j];
        @(negedge clk); bw_we = 1'b0; words_avail = 16'(j + 1);
      end
    while (!res_valid) @(negedge clk);
    c1 = cyc;
    check(pred_zero == exp_zero, $sformatf("trial %0d k=%0d c=%0d thr=%0d: zero=%0d expected %0d",
                                           t, kk, c, thr, pred_zero, exp_zero));
    if (c < thr) begin
      n_low++;
      if (!slow) check(c1 - c0 <= 2, $sformatf("trial %0d: low correlation answered in %0d cycles", t, c1 - c0));
    end else if (!slow) begin
      check(c1 - c0 <= 9 * kw + 6, $sformatf("trial %0d: %0d cycles for %0d groups", t, c1 - c0, kw));
      check(c1 - c0 >= 9 * kw, $sformatf("trial %0d: only %0d cycles for %0d groups", t, c1 - c0, kw));
    end else n_waited++;
    if (exp_zero) n_zero++; else n_nonzero++;
    // the result is held until acknowledged
    repeat (3) @(negedge clk);
    check(res_valid, $sformatf("trial %0d: result held", t));
    res_ack = 1'b1;
    @(negedge clk); res_ack = 1'b0;
    check(!res_valid && !busy, $sformatf("trial %0d: released", t));
  endtask

  initial begin
    int ks[5] = '{64, 100, 128, 576, 2048};
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 80; t++) run_one(t, ks[t % 5], (t % 2) == 1);
    check(n_zero > 0 && n_nonzero > 0 && n_low > 0 && n_waited > 0, "all outcomes seen");
    $display("zero=%0d nonzero=%0d low=%0d waited=%0d", n_zero, n_nonzero, n_low, n_waited);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
