// layer_controller: runs a network layer after layer.
//
// Processing starts with an external request (start, with the address of a
// table of layer descriptors and the number of layers). For each layer the
// controller reads its four-word descriptor (see mor_pkg::layer_desc_t) from
// external memory with one burst on its own port, hands it to the Row
// Controller, and waits until the Row Controller reports the layer done. After
// the last layer it pulses done. Layers run strictly one after another, so a
// layer may read what the previous one wrote.
//
// From the paper: the external request and consecutive evaluation of the
// layers through the Row Controller. This design's own choice: the descriptor
// table and its encoding.
module layer_controller
  import mor_pkg::*;
(
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  addr_t        desc_base,
  input  logic [15:0]  n_layers,
  output logic         busy,
  output logic         done,
  output logic [15:0]  layer,
  // external memory
  output mem_req_t     mem_req,
  input  mem_rsp_t     mem_rsp,
  // Row Controller
  output logic         rc_start,
  output layer_desc_t  rc_desc,
  input  logic         rc_done
);
  typedef enum logic [1:0] {S_IDLE, S_REQ, S_RECV, S_RUN} state_t;
  state_t state;

  addr_t       base;
  logic [15:0] nl;
  word_t       w [DESC_WORDS];
  logic [2:0]  beat;

  assign busy = (state != S_IDLE);

  always_comb begin
    mem_req = '0;
    if (state == S_REQ) begin
      mem_req.valid = 1'b1;
      mem_req.addr  = base + (addr_t'(layer) << 5);
      mem_req.len   = 4'(DESC_WORDS);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; base <= '0; nl <= '0; layer <= '0; beat <= '0;
      done <= 1'b0; rc_start <= 1'b0; rc_desc <= '0;
      for (int i = 0; i < DESC_WORDS; i++) w[i] <= '0;
    end else begin
      done <= 1'b0;
      rc_start <= 1'b0;
      case (state)
        S_IDLE: if (start) begin
          base <= desc_base; nl <= n_layers; layer <= '0;
          if (n_layers == 0) done <= 1'b1;
          else state <= S_REQ;
        end
        S_REQ: if (mem_rsp.ready) begin
          state <= S_RECV; beat <= '0;
        end
        S_RECV: if (mem_rsp.rvalid) begin
          w[beat[1:0]] <= mem_rsp.rdata;
          beat <= beat + 1'b1;
          if (beat == 3'(DESC_WORDS - 1)) begin
            rc_desc  <= unpack_desc(w[0], w[1], w[2], mem_rsp.rdata);
            rc_start <= 1'b1;
            state    <= S_RUN;
          end
        end
        S_RUN: if (rc_done) begin
          if (layer + 1'b1 == nl) begin
            state <= S_IDLE; done <= 1'b1;
          end else begin
            layer <= layer + 1'b1; state <= S_REQ;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
