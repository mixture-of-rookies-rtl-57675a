// tb_mor_workloads: the accelerator at default sizes on layer shapes of the
// evaluated networks.
//
// Same construction and checks as tb_mor_accel (random network written in the
// proxy / non-proxy table format, integer reference model, every output byte,
// the event counters, the CU weight traffic and that every mechanism
// happens), but with the layer shapes that bound the design in the networks
// the predictor was evaluated on, at a reduced number of neurons and rows:
//
//   layer 0: speech network (TDS) fully connected layer, fan-in 1200, ReLU
//   layer 1: ResNet18 3x3 convolution over 512 channels (fan-in 4608, the
//            largest of the CNNs) with batch norm and residual input; windows
//            of consecutive rows overlap (stride of one pixel, 512 bytes)
//   layer 2: Darknet19 1x1 convolution over 1024 channels (fan-in 1024)
//
// Cluster sizes are random (0..6 members per proxy). The fan-ins and channel
// counts are those of the published network architectures; neuron counts are
// cut down to keep the simulation short.
module tb_mor_workloads;
  import mor_pkg::*;
  import tb_mor_pkg::*;

  localparam int NCU   = 8;
  localparam int NPORT = NCU + 3;
  localparam int NL    = 3;

  logic clk = 1'b0, rst_n = 1'b1, start = 1'b0;
  initial #1 rst_n = 1'b0;
  always #5 clk = ~clk;

  logic busy, done;
  mem_req_t [NPORT-1:0] mem_req;
  mem_rsp_t [NPORT-1:0] mem_rsp;
  nc_stats_t stats;
  logic [31:0] words_loaded, words_reused;
  logic [15:0] cur_layer;

  mor_accel dut (
    .clk, .rst_n, .start, .desc_base(32'h0), .n_layers(16'(NL)),
    .busy, .done, .mem_req, .mem_rsp, .stats, .words_loaded, .words_reused,
    .cur_layer
  );

  ext_mem_model #(.NPORT(NPORT), .LAT(12), .STALL(1'b1)) u_mem (
    .clk, .req(mem_req), .rsp(mem_rsp)
  );

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // ------------------------------------------------------------ network
  typedef struct {
    int k, n_rows, stride, n_out, n_proxy, thr, sh;
    bit relu, res;
    int in_base, out_base, proxy_base, np_base, res_base;
  } lspec_t;

  lspec_t L [NL];
  int     cs_of [NL][$];

  // per neuron (by table position: proxies 0..P-1, then members)
  wvec_t  W   [NL][$];
  int     IDX [NL][$];
  int     SC  [NL][$];
  int     BI  [NL][$];
  int     CC  [NL][$];
  int     MM  [NL][$];
  int     BB  [NL][$];
  byte    X   [NL][$];
  byte    RES [NL][$];

  // expected events
  int e_proxy = 0, e_proxy_neg = 0, e_members_cu = 0, e_bin_req = 0;
  int e_bin_zero = 0, e_bin_nonzero = 0, e_lowcorr = 0, e_cu_words = 0;
  int e_pos_proxy = 0;

  function automatic int rnd(input int lo, input int hi);
    return lo + int'($urandom % (hi - lo + 1));
  endfunction

  task automatic build();
    logic [63:0] words[$];
    int perm[$];
    L[0] = '{k:1200, n_rows:2, stride:1200, n_out:0, n_proxy:16, thr:128, sh:8, relu:1, res:0,
             in_base:'h80_0000, out_base:'h90_0000, proxy_base:'h100_0000, np_base:'h140_0000,
             res_base:'hA0_0000};
    L[1] = '{k:4608, n_rows:2, stride:512, n_out:0, n_proxy:12, thr:100, sh:9, relu:1, res:1,
             in_base:'h81_0000, out_base:'h91_0000, proxy_base:'h200_0000, np_base:'h240_0000,
             res_base:'hA1_0000};
    L[2] = '{k:1024, n_rows:2, stride:1024, n_out:0, n_proxy:12, thr:128, sh:8, relu:1, res:0,
             in_base:'h82_0000, out_base:'h92_0000, proxy_base:'h300_0000, np_base:'h340_0000,
             res_base:'hA2_0000};
    for (int l = 0; l < NL; l++) begin
      L[l].n_out = L[l].n_proxy;
      for (int p = 0; p < L[l].n_proxy; p++) begin
        cs_of[l].push_back(rnd(0, 6));
        L[l].n_out += cs_of[l][p];
      end
    end

    for (int l = 0; l < NL; l++) begin
      int n = L[l].n_out;
      int rb = 8 * (2 + 8 * groups(L[l].k));
      // descriptor
      u_mem.wr_word(32 * l + 0, {32'(L[l].out_base), 32'(L[l].in_base)});
      u_mem.wr_word(32 * l + 8, {32'(L[l].np_base), 32'(L[l].proxy_base)});
      u_mem.wr_word(32 * l + 16, {16'(n), 16'(L[l].n_rows), 16'(L[l].stride), 16'(L[l].k)});
      u_mem.wr_word(32 * l + 24, {16'(L[l].n_proxy), 1'b0, L[l].res, L[l].relu, 5'(L[l].sh),
                                  8'(L[l].thr), 32'(L[l].res_base)});
      // original output positions, shuffled
      perm.delete();
      for (int i = 0; i < n; i++) perm.push_back(i);
      perm.shuffle();
      for (int t = 0; t < n; t++) begin
        wvec_t w = new[L[l].k];
        bit proxy = (t < L[l].n_proxy);
        for (int i = 0; i < L[l].k; i++) w[i] = byte'(rnd(-128, 127));
        W[l].push_back(w);
        IDX[l].push_back(perm[t]);
        if (proxy) begin
          // proxies alternate clearly negative / clearly positive
          SC[l].push_back(16);
          BI[l].push_back((t % 2 == 0) ? -6000 : 6000);
          CC[l].push_back(0); MM[l].push_back(0); BB[l].push_back(0);
          proxy_row(perm[t], cs_of[l][t], 16, BI[l][t], w, L[l].k, words);
          foreach (words[q]) u_mem.wr_word(L[l].proxy_base + t * rb + 8 * q, words[q]);
        end else begin
          int mt = t - L[l].n_proxy;
          SC[l].push_back(64);
          BI[l].push_back(rnd(-500, 500));
          CC[l].push_back(rnd(0, 255));
          MM[l].push_back(rnd(128, 512));
          BB[l].push_back(($urandom % 2) ? -4000 : 4000);
          nonproxy_row(perm[t], CC[l][t], 64, BI[l][t], MM[l][t], BB[l][t], w, L[l].k, words);
          foreach (words[q]) u_mem.wr_word(L[l].np_base + mt * rb + 8 * q, words[q]);
        end
      end
      // inputs (whole words, padded past the last window)
      for (int i = 0; i < (L[l].n_rows - 1) * L[l].stride + 8 * 8 * groups(L[l].k); i++)
        X[l].push_back(byte'(rnd(-128, 127)));
      for (int i = 0; i < X[l].size(); i += 8) begin
        logic [63:0] x;
        for (int b = 0; b < 8; b++) x[8*b +: 8] = X[l][i+b];
        u_mem.wr_word(L[l].in_base + i, x);
      end
      // residuals and poisoned outputs
      for (int i = 0; i < L[l].n_rows * n; i++) begin
        RES[l].push_back(byte'(rnd(-20, 20)));
        u_mem.wr_byte(L[l].res_base + i, RES[l][i]);
        u_mem.wr_byte(L[l].out_base + i, 8'hAA);
      end
    end
  endtask

  // ------------------------------------------------------------ reference
  int expect_out [NL][$];

  task automatic reference();
    for (int l = 0; l < NL; l++) begin
      int n = L[l].n_out, k = L[l].k;
      int rw = 2 + 8 * groups(k) + (L[l].res ? 1 : 0);
      for (int i = 0; i < L[l].n_rows * n; i++) expect_out[l].push_back(0);
      for (int r = 0; r < L[l].n_rows; r++) begin
        wvec_t x = new[k];
        int first = L[l].n_proxy;
        for (int i = 0; i < k; i++) x[i] = X[l][r * L[l].stride + i];
        for (int p = 0; p < L[l].n_proxy; p++) begin
          longint y;
          bit neg;
          y = ref_relu_in(ref_dot(W[l][p], x, k), SC[l][p], BI[l][p],
                          RES[l][r*n + IDX[l][p]], L[l].res, L[l].sh);
          neg = L[l].relu && (y < 0);
          expect_out[l][r*n + IDX[l][p]] = ref_quant(y, L[l].sh, L[l].relu);
          e_proxy++; e_cu_words += rw;
          if (neg) e_proxy_neg++; else e_pos_proxy++;
          for (int q = 0; q < cs_of[l][p]; q++) begin
            int t = first + q;
            longint yt;
            bit skip = 1'b0;
            yt = ref_relu_in(ref_dot(W[l][t], x, k), SC[l][t], BI[l][t],
                             RES[l][r*n + IDX[l][t]], L[l].res, L[l].sh);
            if (!neg) e_members_cu++;
            else begin
              e_bin_req++;
              if (CC[l][t] < L[l].thr) e_lowcorr++;
              else begin
                longint yb;
                yb = ref_relu_in(ref_estimate(ref_bin_dot(W[l][t], x, k), MM[l][t], BB[l][t]),
                                 SC[l][t], BI[l][t], RES[l][r*n + IDX[l][t]], L[l].res, L[l].sh);
                skip = (yb < 0);
              end
              if (skip) e_bin_zero++; else e_bin_nonzero++;
            end
            if (!skip) e_cu_words += rw;
            expect_out[l][r*n + IDX[l][t]] = skip ? 0 : ref_quant(yt, L[l].sh, L[l].relu);
          end
          first += cs_of[l][p];
        end
      end
    end
  endtask

  // ------------------------------------------------------------ monitors
  int stall_cycles = 0, res_layers_seen = 0, norelu_seen = 0;
  always @(posedge clk) begin
    for (int p = 0; p < NPORT; p++)
      if (mem_req[p].valid && !mem_rsp[p].ready) stall_cycles++;
  end

  // ------------------------------------------------------------ run
  longint t0, t1;
  initial begin
    build();
    reference();
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(posedge clk);
    start = 1'b1;
    @(posedge clk);
    start = 1'b0;
    t0 = $time;
    wait (done);
    t1 = $time;
    @(posedge clk);

    for (int l = 0; l < NL; l++)
      for (int i = 0; i < L[l].n_rows * L[l].n_out; i++) begin
        int got;
        got = int'($signed(u_mem.rd_byte(L[l].out_base + i)));
        check(got == expect_out[l][i],
              $sformatf("layer %0d output %0d: got %0d expected %0d", l, i, got, expect_out[l][i]));
      end

    check(stats.proxies == e_proxy, $sformatf("proxies %0d vs %0d", stats.proxies, e_proxy));
    check(stats.proxy_neg == e_proxy_neg, $sformatf("negative proxies %0d vs %0d", stats.proxy_neg, e_proxy_neg));
    check(stats.members_cu == e_members_cu, $sformatf("members to CU %0d vs %0d", stats.members_cu, e_members_cu));
    check(stats.bin_req == e_bin_req, $sformatf("binary requests %0d vs %0d", stats.bin_req, e_bin_req));
    check(stats.bin_zero == e_bin_zero, $sformatf("predicted zero %0d vs %0d", stats.bin_zero, e_bin_zero));
    check(stats.bin_nonzero == e_bin_nonzero, $sformatf("predicted non-zero %0d vs %0d", stats.bin_nonzero, e_bin_nonzero));
    begin
      int cu_words = 0;
      for (int p = 0; p < NCU; p++) cu_words += u_mem.words_read[p];
      check(cu_words == e_cu_words, $sformatf("CU words read %0d vs %0d", cu_words, e_cu_words));
    end

    // every mechanism happened
    check(e_proxy_neg > 0,       "a negative proxy");
    check(e_pos_proxy > 0,       "a positive proxy");
    check(e_bin_zero > 0,        "a member predicted zero");
    check(e_bin_nonzero > e_lowcorr, "a member predicted non-zero by its estimate");
    check(e_lowcorr > 0,         "a member below the correlation threshold");
    check(stats.np_priority > 0, "a non-proxy taking a CU before a ready proxy");
    check(words_reused > 0,      "input words reused between rows");
    check(stall_cycles > 0,      "a memory port stall");

    $display("cycles=%0d proxies=%0d neg=%0d members_cu=%0d bin_req=%0d zero=%0d nonzero=%0d lowcorr=%0d priority=%0d reused=%0d stalls=%0d",
             (t1 - t0) / 10, stats.proxies, stats.proxy_neg, stats.members_cu, stats.bin_req,
             stats.bin_zero, stats.bin_nonzero, e_lowcorr, stats.np_priority, words_reused,
             stall_cycles);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
