// tb_layer_controller: self-checking test of the Layer Controller.
//
// A table of random layer descriptors is written to the external memory
// model; the Row Controller is replaced by a model that answers each layer
// start with done after a random delay. The testbench checks that every layer
// is started once, in order, with the descriptor decoded from its four words,
// that the layer number output follows, that busy covers the whole run, that
// done pulses once after the last layer, that exactly four words are read per
// layer, and that a second run (different table) works after the first.
module tb_layer_controller;
  import mor_pkg::*;

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

  logic         start = 1'b0, busy, done, rc_start, rc_done = 1'b0;
  addr_t        desc_base = '0;
  logic [15:0]  n_layers = '0, layer;
  layer_desc_t  rc_desc;
  mem_req_t [0:0] mreq;
  mem_rsp_t [0:0] mrsp;

  layer_controller dut (.clk, .rst_n, .start, .desc_base, .n_layers, .busy, .done, .layer,
                        .mem_req(mreq[0]), .mem_rsp(mrsp[0]), .rc_start, .rc_desc, .rc_done);
  ext_mem_model #(.NPORT(1), .LAT(7), .STALL(1'b1)) u_mem (.clk, .req(mreq), .rsp(mrsp));

  int n_done = 0;
  always @(posedge clk) if (done) n_done++;

  task automatic run(input addr_t base, input int nl);
    logic [63:0] w [4];
    layer_desc_t exp_d [$];
    int r0 = u_mem.words_read[0], d0 = n_done;
    for (int l = 0; l < nl; l++) begin
      for (int q = 0; q < 4; q++) begin
        w[q] = {$urandom, $urandom};
        u_mem.wr_word(base + 32 * l + 8 * q, w[q]);
      end
      exp_d.push_back(unpack_desc(w[0], w[1], w[2], w[3]));
    end
    @(negedge clk); start = 1'b1; desc_base = base; n_layers = 16'(nl);
    @(negedge clk); start = 1'b0;
    for (int l = 0; l < nl; l++) begin
      while (!rc_start) begin
        check(busy, "busy while reading a descriptor");
        @(negedge clk);
      end
      check(rc_desc == exp_d[l], $sformatf("layer %0d descriptor", l));
      check(layer == 16'(l), $sformatf("layer number %0d", layer));
      repeat (2 + $urandom % 30) begin
        @(negedge clk);
        check(!rc_start && busy && !done, $sformatf("layer %0d: waiting for the row controller", l));
      end
      rc_done = 1'b1;
      @(negedge clk); rc_done = 1'b0;
    end
    while (busy) @(negedge clk);
    repeat (3) @(negedge clk);
    check(n_done - d0 == 1, "done pulsed once");
    check(u_mem.words_read[0] - r0 == 4 * nl, "four descriptor words per layer");
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    run(32'h1000, 5);
    run(32'h8000, 1);
    run(32'h2000, 18);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
