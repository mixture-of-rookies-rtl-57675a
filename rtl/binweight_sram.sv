// binweight_sram: binary-weight SRAM of the Binary Prediction Unit (2 KB by
// default).
//
// Stores the sign bits (binary weights) of the non-proxy neurons being
// predicted, 64 per word. The prediction unit's loader fills it from external
// memory through one write port; each binCU reads it through its own port.
// Reads are synchronous (data one cycle after the address). The unit divides
// it into one ring of SLOT words per binCU (see bin_pred_unit). Capacity is
// the paper's; organisation and word width are this design's choice.
module binweight_sram #(
  parameter int unsigned BYTES = 2048,
  parameter int unsigned NRD   = 8,
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
