// input_sram: the accelerator's input buffer (16 KB by default).
//
// Holds the input window of the output row being computed, as 64-bit words of
// eight signed 8-bit inputs (input n of a word in byte n%8). The Row Controller
// writes it through one write port; every CU and every binCU has a read port of
// its own. A CU uses the eight bytes, a binCU only their eight sign bits. Reads
// are synchronous: the word addressed in cycle t appears on rdata in cycle t+1.
// Capacity follows the paper; the word width (the external port width) and the
// one-port-per-reader organisation are this design's choice. A real macro would
// be banked; the array here is the behaviour such a bank set must provide.
module input_sram #(
  parameter int unsigned BYTES = 16384,
  parameter int unsigned NRD   = 16,
  localparam int unsigned WORDS = BYTES / 8,
  localparam int unsigned AW    = $clog2(WORDS)
) (
  input  logic                    clk,
  input  logic                    we,
  input  logic [AW-1:0]           waddr,
  input  logic [63:0]             wdata,
  input  logic [NRD-1:0][AW-1:0]  raddr,
  output logic [NRD-1:0][63:0]    rdata
);
  logic [63:0] mem [WORDS];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
  end

  for (genvar i = 0; i < NRD; i++) begin : g_rd
    always_ff @(posedge clk) rdata[i] <= mem[raddr[i]];
  end
endmodule
