// ext_mem_model: behavioural model of the external memory (testbench only).
//
// Stands in for the LPDDR4 main memory: a sparse array of 64-bit words with
// NPORT independent request ports of the accelerator's memory protocol
// (mor_pkg::mem_req_t / mem_rsp_t). A read of len words is answered LAT
// cycles after it is accepted, one word per cycle, in order per port. A write
// stores one byte at once. With STALL set, each port's ready drops at random
// about one cycle in four. Unwritten words read as zero. Not synthesizable.
// Counters: words read and bytes written, per port.
module ext_mem_model
  import mor_pkg::*;
#(
  parameter int unsigned NPORT = 1,
  parameter int unsigned LAT   = 10,
  parameter bit          STALL = 1'b0
) (
  input  logic                  clk,
  input  mem_req_t [NPORT-1:0]  req,
  output mem_rsp_t [NPORT-1:0]  rsp
);
  typedef struct {
    addr_t       addr;
    int unsigned len;
    longint      due;
  } rd_t;

  logic [63:0] mem [longint unsigned];
  rd_t         q [NPORT][$];
  int unsigned beat [NPORT];
  longint      now = 0;
  int unsigned words_read [NPORT];
  int unsigned bytes_written [NPORT];
  logic [NPORT-1:0] rdy = '1;
  logic [NPORT-1:0] rv  = '0;
  logic [63:0]      rd [NPORT];

  function automatic logic [63:0] rd_word(input longint unsigned wa);
    if (mem.exists(wa)) return mem[wa];
    return 64'd0;
  endfunction

  function automatic void wr_word(input addr_t byte_addr, input logic [63:0] d);
    mem[longint'(byte_addr >> 3)] = d;
  endfunction

  function automatic void wr_byte(input addr_t byte_addr, input logic [7:0] d);
    logic [63:0] w;
    int unsigned sh;
    sh = 8 * int'(byte_addr & 32'd7);
    w = rd_word(longint'(byte_addr >> 3));
    w = (w & ~(64'hFF << sh)) | (64'(d) << sh);
    mem[longint'(byte_addr >> 3)] = w;
  endfunction

  function automatic logic [7:0] rd_byte(input addr_t byte_addr);
    logic [63:0] w;
    int unsigned sh;
    sh = 8 * int'(byte_addr & 32'd7);
    w = rd_word(longint'(byte_addr >> 3));
    return 8'(w >> sh);
  endfunction

  initial begin
    for (int p = 0; p < NPORT; p++) begin
      beat[p] = 0; words_read[p] = 0; bytes_written[p] = 0;
      rd[p] = '0;
    end
  end

  always_comb
    for (int p = 0; p < NPORT; p++) begin
      rsp[p].ready  = rdy[p];
      rsp[p].rvalid = rv[p];
      rsp[p].rdata  = rd[p];
    end

  always @(posedge clk) begin
    now <= now + 1;
    for (int p = 0; p < NPORT; p++) begin
      // response beat
      if (q[p].size() > 0 && q[p][0].due <= now) begin
        rv[p] <= 1'b1;
        rd[p] <= rd_word(longint'(q[p][0].addr >> 3) + longint'(beat[p]));
        words_read[p]++;
        if (beat[p] + 1 == q[p][0].len) begin
          beat[p] = 0;
          void'(q[p].pop_front());
        end else beat[p]++;
      end else begin
        rv[p] <= 1'b0;
      end
      // new request
      if (req[p].valid && rdy[p]) begin
        if (req[p].we) begin
          wr_byte(req[p].addr, req[p].wdata);
          bytes_written[p]++;
        end else begin
          rd_t r;
          r.addr = req[p].addr; r.len = req[p].len; r.due = now + LAT;
          q[p].push_back(r);
        end
      end
      rdy[p] <= STALL ? (($urandom % 4) != 0) : 1'b1;
    end
  end
endmodule
