// tb_input_sram: self-checking test of the input_sram.
//
// Fills the whole array through the write port with random words while
// reading random addresses on all 16 read ports, and compares every read
// port against a reference array one cycle later (read latency is one cycle,
// a write is visible on the next cycle). Uses the default (paper) size of
// 16384 bytes.
module tb_input_sram;
  localparam int BYTES = 16384;
  localparam int NRD   = 16;
  localparam int WORDS = BYTES / 8;
  localparam int AW    = $clog2(WORDS);

  logic clk = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #10_000_000;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  logic                   we = 1'b0;
  logic [AW-1:0]          waddr = '0;
  logic [63:0]            wdata = '0;
  logic [NRD-1:0][AW-1:0] raddr = '0;
  logic [NRD-1:0][63:0]   rdata;

  input_sram dut (.clk, .we, .waddr, .wdata, .raddr, .rdata);

  logic [63:0] ref_mem [WORDS];
  logic [63:0] expect_q [NRD];
  bit          known [WORDS];

  initial begin
    foreach (known[i]) known[i] = 1'b0;
    // fill every word, reading random (possibly unwritten) words meanwhile
    for (int pass = 0; pass < 2; pass++)
      for (int i = 0; i < WORDS; i++) begin
        @(negedge clk);
        we = 1'b1; waddr = AW'(pass == 0 ? i : $urandom); wdata = {$urandom, $urandom};
        for (int p = 0; p < NRD; p++) raddr[p] = AW'($urandom);
        @(posedge clk);
        for (int p = 0; p < NRD; p++) expect_q[p] = ref_mem[raddr[p]];
        ref_mem[waddr] = wdata; known[waddr] = 1'b1;
        #1;
        for (int p = 0; p < NRD; p++)
          if (known[raddr[p]] && (pass == 1 || raddr[p] != waddr))
            check(rdata[p] === expect_q[p], $sformatf("pass %0d port %0d addr %0d", pass, p, raddr[p]));
      end
    // read-only sweep: every word on every port
    @(negedge clk); we = 1'b0;
    for (int i = 0; i < WORDS; i++) begin
      @(negedge clk);
      for (int p = 0; p < NRD; p++) raddr[p] = AW'(i + p);
      @(posedge clk); #1;
      for (int p = 0; p < NRD; p++)
        check(rdata[p] === ref_mem[AW'(i + p)], $sformatf("sweep port %0d addr %0d", p, i + p));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
