// tb_row_controller: self-checking test of the Row Controller.
//
// The controller (default 16 KB input SRAM, 2048 words) is connected to the
// external memory model and to a behavioural input SRAM array; the Neurons
// Controller is replaced by a model that answers each row start with done
// after a random delay. Layers with overlapping windows (small stride), with
// disjoint windows (stride larger than the window) and with a window of 256
// words are run. At every row start the testbench checks that the SRAM holds
// the row's whole input window at (in_woff + i) mod 2048, that rows come in
// order with the right context, that only the words not already held were
// fetched (words_loaded / words_reused), that done follows the last row, and
// the load rate: with memory latency L and no stalls the first window of W
// words is ready within W + L + 8 cycles (one word per cycle).
module tb_row_controller;
  import mor_pkg::*;

  localparam int LAT = 10;
  localparam int IN_WORDS = 2048;

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

  logic         start = 1'b0, done, sram_we, nc_start, nc_done = 1'b0;
  layer_desc_t  desc;
  mem_req_t [0:0] mreq;
  mem_rsp_t [0:0] mrsp;
  logic [10:0]  sram_waddr;
  logic [63:0]  sram_wdata;
  row_ctx_t     nc_ctx;
  logic [31:0]  words_loaded, words_reused;

  row_controller dut (.clk, .rst_n, .start, .desc, .done, .mem_req(mreq[0]), .mem_rsp(mrsp[0]),
                      .sram_we, .sram_waddr, .sram_wdata, .nc_start, .nc_ctx, .nc_done,
                      .words_loaded, .words_reused);
  ext_mem_model #(.NPORT(1), .LAT(LAT)) u_mem (.clk, .req(mreq), .rsp(mrsp));

  logic [63:0] sram [IN_WORDS];
  always @(posedge clk) if (sram_we) sram[sram_waddr] <= sram_wdata;

  int cyc = 0;
  always @(posedge clk) cyc++;

  task automatic run_layer(input int k, input int stride, input int n_rows, input bit timed);
    int ww = 8 * ((k + 63) / 64);
    int exp_load = 0, exp_reuse = 0, l0, u0, c0;
    addr_t in_base = 32'h20_0000;
    for (int i = 0; i < (n_rows - 1) * stride / 8 + ww; i++)
      u_mem.wr_word(in_base + 8 * i, {$urandom, $urandom});
    desc = '0;
    desc.in_base = in_base; desc.k = 16'(k); desc.stride = 16'(stride);
    desc.n_rows = 16'(n_rows); desc.n_out = 16'd10; desc.n_proxy = 16'd2;
    for (int r = 0; r < n_rows; r++) begin
      int fresh = (r == 0 || stride / 8 >= ww) ? ww : stride / 8;
      exp_load += fresh; exp_reuse += ww - fresh;
    end
    l0 = words_loaded; u0 = words_reused;
    @(negedge clk); start = 1'b1; c0 = cyc;
    @(negedge clk); start = 1'b0;
    for (int r = 0; r < n_rows; r++) begin
      while (!nc_start) @(negedge clk);
      if (r == 0 && timed)
        check(cyc - c0 <= ww + LAT + 8, $sformatf("first window of %0d words loaded in %0d cycles", ww, cyc - c0));
      check(nc_ctx.row == 16'(r), $sformatf("row %0d: context row %0d", r, nc_ctx.row));
      check(nc_ctx.d.k == 16'(k) && nc_ctx.d.n_out == 16'd10, $sformatf("row %0d: descriptor", r));
      for (int i = 0; i < ww; i++) begin
        logic [63:0] e = u_mem.rd_word(longint'(in_base / 8) + longint'(r * stride / 8 + i));
        logic [63:0] g = sram[(int'(nc_ctx.in_woff) + i) % IN_WORDS];
        if (g !== e) begin
          check(1'b0, $sformatf("k=%0d stride=%0d row %0d word %0d", k, stride, r, i));
          break;
        end
      end
      checks++;
      repeat (1 + $urandom % 20) @(negedge clk);
      check(!done, "done before the last row finished");
      nc_done = 1'b1;
      @(negedge clk); nc_done = 1'b0;
    end
    while (!done) @(negedge clk);
    check(words_loaded - l0 == exp_load, $sformatf("k=%0d stride=%0d: loaded %0d expected %0d", k, stride, words_loaded - l0, exp_load));
    check(words_reused - u0 == exp_reuse, $sformatf("k=%0d stride=%0d: reused %0d expected %0d", k, stride, words_reused - u0, exp_reuse));
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    run_layer(128, 16, 6, 1'b1);
    run_layer(100, 256, 4, 1'b0);
    run_layer(2000, 64, 5, 1'b1);
    run_layer(576, 8, 40, 1'b0);
    run_layer(64, 64, 3, 1'b0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
