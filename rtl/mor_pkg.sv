// mor_pkg: types, sizes and shared arithmetic of the Mixture-of-Rookies
// accelerator.
//
// The accelerator evaluates ReLU layers neuron by neuron. A neuron's row in
// external memory is a sequence of 64-bit words (the external port is 8 bytes
// wide). Both neuron tables use rows of the same length, 2 + 8*KW words, where
// KW = ceil(K/64) and K is the fan-in:
//
//   proxy row      word 0   [15:0] idx, [23:16] cluster size (members that
//                           follow in the non-proxy table), rest reserved
//                  word 1   [15:0] bn_scale (Q8.8), [31:16] bn_bias
//                  word 2.. 8*KW words of 8-bit weights, weight n in byte n%8
//                           of word n/8, zero padded to a multiple of 64
//   non-proxy row  word 0   [15:0] idx, [23:16] c (Pearson correlation, Q0.8)
//                  word 1   [15:0] bn_scale, [31:16] bn_bias,
//                           [47:32] m (slope, Q8.8), [63:48] b (intercept)
//                  word 2.. KW sign words (bit i of word j = sign of weight 64j+i)
//                  then     7*KW words holding the 7 low bits of every weight,
//                           packed back to back (weight n at bits 7n..7n+6 of
//                           the bit string of its group of seven words)
//
// The idx and cluster-size bit positions follow the published row format;
// the second header word and the word alignment are this design's choice.
// Removing the sign bit from the stored weights keeps both rows the same
// length, so predicting costs no extra weight traffic.
//
// A layer descriptor is four words in external memory (see layer_desc_t).
package mor_pkg;

  localparam int unsigned WORD_W      = 64;  // external port width, 8 B
  localparam int unsigned ADDR_W      = 32;  // byte address
  localparam int unsigned BURST_WORDS = 8;   // 64 B burst
  localparam int unsigned ACC_W       = 32;  // psum register width
  localparam int unsigned DESC_WORDS  = 4;

  typedef logic [WORD_W-1:0] word_t;
  typedef logic [ADDR_W-1:0] addr_t;

  // Memory port, one per client. A read returns `len` words (1..8) in order,
  // one per cycle when rvalid is high. A write stores the single byte wdata at
  // addr. A request is taken on a cycle where valid and ready are both high.
  typedef struct packed {
    logic       valid;
    logic       we;
    addr_t      addr;
    logic [3:0] len;
    logic [7:0] wdata;
  } mem_req_t;

  typedef struct packed {
    logic  ready;
    logic  rvalid;
    word_t rdata;
  } mem_rsp_t;

  typedef struct packed {
    addr_t       in_base;     // first byte of the layer's input vector
    addr_t       out_base;    // output of row r, neuron idx at out_base + r*n_out + idx
    addr_t       proxy_base;  // proxy table
    addr_t       np_base;     // non-proxy table
    addr_t       res_base;    // residual input, laid out like the output
    logic [15:0] k;           // fan-in of every neuron of the layer
    logic [15:0] stride;      // bytes between the windows of consecutive rows (multiple of 8)
    logic [15:0] n_rows;      // output rows (positions) of the layer
    logic [15:0] n_out;       // neurons per row
    logic [15:0] n_proxy;     // rows of the proxy table
    logic [7:0]  thr;         // correlation threshold T, Q0.8
    logic [4:0]  out_shift;   // output requantisation shift
    logic        relu_en;     // layer has a ReLU (predictor only used then)
    logic        res_en;      // layer adds a residual input before the ReLU
  } layer_desc_t;

  // Per output row context handed from the Row Controller downwards.
  typedef struct packed {
    layer_desc_t d;
    logic [15:0] row;
    logic [10:0] in_woff;     // input SRAM word holding input 0 of this row
  } row_ctx_t;

  // A neuron handed to a CU.
  typedef struct packed {
    logic        is_proxy;
    addr_t       row_addr;    // byte address of its table row
    logic [15:0] seq;         // proxy sequence number
  } cu_job_t;

  // Completion report of a CU.
  typedef struct packed {
    logic        is_proxy;
    logic [15:0] seq;
    logic [7:0]  cs;          // cluster size (proxies)
    logic        neg;         // ReLU input was negative
  } cu_done_t;

  // Event counters of the Neurons Controller (cumulative since reset).
  typedef struct packed {
    logic [31:0] proxies;        // proxies evaluated on a CU
    logic [31:0] proxy_neg;      // ... whose ReLU input was negative
    logic [31:0] members_cu;     // members of positive clusters sent straight to a CU
    logic [31:0] bin_req;        // members of negative clusters sent to the binary unit
    logic [31:0] bin_zero;       // ... predicted zero (never computed)
    logic [31:0] bin_nonzero;    // ... predicted non-zero (sent to a CU)
    logic [31:0] np_priority;    // cycles a non-proxy took a CU a ready proxy wanted
  } nc_stats_t;

  function automatic logic [15:0] groups64(input logic [15:0] k);
    return (k + 16'd63) >> 6;
  endfunction

  // Row length in bytes: (2 + 8*KW) words.
  function automatic addr_t row_bytes(input logic [15:0] k);
    return addr_t'((32'd2 + (32'(groups64(k)) << 3)) << 3);
  endfunction

  function automatic layer_desc_t unpack_desc(input word_t w0, input word_t w1,
                                              input word_t w2, input word_t w3);
    layer_desc_t d;
    d.in_base    = w0[31:0];
    d.out_base   = w0[63:32];
    d.proxy_base = w1[31:0];
    d.np_base    = w1[63:32];
    d.k          = w2[15:0];
    d.stride     = w2[31:16];
    d.n_rows     = w2[47:32];
    d.n_out      = w2[63:48];
    d.res_base   = w3[31:0];
    d.thr        = w3[39:32];
    d.out_shift  = w3[44:40];
    d.relu_en    = w3[45];
    d.res_en     = w3[46];
    d.n_proxy    = w3[63:48];
    return d;
  endfunction

  // ReLU input from a (real or estimated) dot product:
  //   y = (dot * bn_scale) >>> 8 + bn_bias + (res_en ? res << out_shift : 0)
  // Batch norm is folded into one scale (Q8.8) and one bias, both per neuron.
  // The residual byte is brought back to accumulator scale by out_shift.
  function automatic logic signed [47:0] relu_input(
      input logic signed [ACC_W-1:0] dot,
      input logic signed [15:0]      bn_scale,
      input logic signed [15:0]      bn_bias,
      input logic signed [7:0]       res,
      input logic                    res_en,
      input logic [4:0]              out_shift);
    logic signed [47:0] prod, r;
    prod = (48'(dot) * 48'(bn_scale)) >>> 8;
    r    = res_en ? (48'(res) <<< out_shift) : 48'sd0;
    return prod + 48'(bn_bias) + r;
  endfunction

  // Output byte: y >>> out_shift, saturated; clamped at zero under ReLU.
  function automatic logic [7:0] quant_out(input logic signed [47:0] y,
                                           input logic [4:0] out_shift,
                                           input logic relu_en);
    logic signed [47:0] s;
    s = y >>> out_shift;
    if (relu_en && s < 0)  return 8'd0;
    if (s > 48'sd127)      return 8'd127;
    if (s < -48'sd128)     return 8'h80;
    return s[7:0];
  endfunction

endpackage
