// row_controller: walks the output rows of one layer.
//
// A layer's output is divided into rows (output positions); every neuron of
// a row reads the same input window of K bytes, the window of row r starting
// at byte r*stride of the layer input. For each row the controller loads the
// window into the input SRAM and then starts the Neurons Controller, waiting
// for it to finish before moving to the next row.
//
// The input SRAM is used as a circular buffer indexed by absolute input word
// (word w of the input lives at SRAM word w mod WORDS). When consecutive
// windows overlap, as for strided convolution windows, only the words not
// already held are fetched: the load starts at the end of the previous window
// if that lies inside the new one. A window occupies 8*ceil(K/64) words (the
// CUs always read whole groups of 64 inputs), which must fit the SRAM.
//
// Loads are issued as back-to-back burst reads of up to 8 words on the
// controller's own memory port; the returning words are written into the SRAM
// in order, one per cycle. Counters report the words fetched and the words
// reused.
//
// From the paper: division of the layer output in rows, loading the row's
// inputs in blocks, reuse of inputs across strided windows, issuing the row to
// the Neurons Controller once its inputs are loaded. This design's own
// choices: the circular addressing, stride given in bytes (multiple of 8),
// one window per row and the burst sizes.
module row_controller
  import mor_pkg::*;
#(
  parameter int unsigned IN_WORDS = 2048,
  localparam int unsigned IN_AW   = $clog2(IN_WORDS)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  layer_desc_t       desc,
  output logic              done,
  // external memory
  output mem_req_t          mem_req,
  input  mem_rsp_t          mem_rsp,
  // input SRAM write port
  output logic              sram_we,
  output logic [IN_AW-1:0]  sram_waddr,
  output logic [63:0]       sram_wdata,
  // Neurons Controller
  output logic              nc_start,
  output row_ctx_t          nc_ctx,
  input  logic              nc_done,
  // counters
  output logic [31:0]       words_loaded,
  output logic [31:0]       words_reused
);
  typedef enum logic [1:0] {S_IDLE, S_SETUP, S_LOAD, S_RUN} state_t;
  state_t state;

  logic [15:0] row;
  logic [31:0] win_lo, win_hi, prev_hi, iss_w, rcv_w;
  logic        first;

  logic [31:0] lo_next, hi_next, from_next;
  assign lo_next   = (32'(row) * 32'(desc.stride)) >> 3;
  assign hi_next   = lo_next + (32'(groups64(desc.k)) << 3);
  assign from_next = (!first && prev_hi > lo_next && prev_hi <= hi_next) ? prev_hi : lo_next;

  logic [31:0] left;
  assign left = win_hi - iss_w;

  always_comb begin
    mem_req = '0;
    if (state == S_LOAD && iss_w < win_hi) begin
      mem_req.valid = 1'b1;
      mem_req.addr  = desc.in_base + (iss_w << 3);
      mem_req.len   = 4'((left < 32'd8) ? left : 32'd8);
    end
  end

  assign sram_we    = mem_rsp.rvalid && state == S_LOAD;
  assign sram_waddr = rcv_w[IN_AW-1:0];
  assign sram_wdata = mem_rsp.rdata;

  assign nc_ctx.d       = desc;
  assign nc_ctx.row     = row;
  assign nc_ctx.in_woff = 11'(win_lo[IN_AW-1:0]);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; row <= '0; first <= 1'b1;
      win_lo <= '0; win_hi <= '0; prev_hi <= '0; iss_w <= '0; rcv_w <= '0;
      done <= 1'b0; nc_start <= 1'b0;
      words_loaded <= '0; words_reused <= '0;
    end else begin
      done <= 1'b0;
      nc_start <= 1'b0;
      case (state)
        S_IDLE: if (start) begin
          row <= '0; first <= 1'b1;
          state <= (desc.n_rows == 0) ? S_IDLE : S_SETUP;
          if (desc.n_rows == 0) done <= 1'b1;
        end
        S_SETUP: begin
          win_lo <= lo_next; win_hi <= hi_next;
          iss_w  <= from_next; rcv_w <= from_next;
          words_reused <= words_reused + (from_next - lo_next);
          state <= S_LOAD;
        end
        S_LOAD: begin
          if (mem_req.valid && mem_rsp.ready) iss_w <= iss_w + 32'(mem_req.len);
          if (mem_rsp.rvalid) begin
            rcv_w <= rcv_w + 1;
            words_loaded <= words_loaded + 1;
          end
          if (rcv_w == win_hi) begin
            nc_start <= 1'b1;
            state <= S_RUN;
          end
        end
        S_RUN: if (nc_done) begin
          prev_hi <= win_hi; first <= 1'b0;
          if (row + 1'b1 == desc.n_rows) begin
            state <= S_IDLE; done <= 1'b1;
          end else begin
            row <= row + 1'b1; state <= S_SETUP;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  a_window_fits: assert property (@(posedge clk) disable iff (!rst_n)
    state == S_SETUP |-> (hi_next - lo_next) <= IN_WORDS);
endmodule
