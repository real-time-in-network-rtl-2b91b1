// nn_pkg -- types and constants shared by the in-network inference pipeline.
//
// The NN encapsulation header follows the published field list: a 16-bit
// model identifier, 8-bit feature and output counts, a 16-bit fixed-point
// scale, 8 flag bits, and then one 32-bit value per input feature. All
// multi-byte fields are big-endian on the wire, as usual for network headers.
//
// The default sigmoid Taylor coefficients are the scaled constants for a
// scale of s = 16 (0.5 -> 32768, 1/4 -> 16384, -1/48 -> -1365, 1/1440 -> 45).
//
// Design choices of this implementation (not fixed by the published design):
// the flag bit that marks a rewritten packet, the L4 port that identifies
// NN-encapsulated traffic, the activation encoding and the control-plane
// address map.
package nn_pkg;

  // Width of one feature, weight, bias and output value on the wire.
  localparam int unsigned VAL_W = 32;

  // AXI4-Stream data width of the packet interface (64 bytes per beat).
  localparam int unsigned AXIS_W     = 512;
  localparam int unsigned BEAT_BYTES = AXIS_W / 8;

  // NN encapsulation header: 7 bytes in front of the features.
  localparam int unsigned NN_HDR_BYTES = 7;

  typedef struct packed {
    logic [15:0] model_id;
    logic [7:0]  feat_cnt;
    logic [7:0]  out_cnt;
    logic [15:0] scale;
    logic [7:0]  flags;
  } nn_hdr_t;

  // Flag bit set on egress when the features have been replaced by results.
  localparam logic [7:0] FLAG_RESULT = 8'h80;

  // Default L4 destination port that identifies NN-encapsulated packets.
  localparam logic [15:0] NN_PORT_DEFAULT = 16'h4E4E;

  // Protocol numbers.
  localparam logic [15:0] ETH_IPV4 = 16'h0800;
  localparam logic [15:0] ETH_IPV6 = 16'h86DD;
  localparam logic [7:0]  IP_TCP   = 8'd6;
  localparam logic [7:0]  IP_UDP   = 8'd17;

  // Activation applied to each output neuron.
  typedef enum logic [1:0] {
    ACT_NONE    = 2'd0,   // linear output (regression)
    ACT_RELU    = 2'd1,   // max(0, x)
    ACT_LEAKY   = 2'd2,   // x > 0 ? x : alpha * x (Leaky / Parametric ReLU)
    ACT_SIGMOID = 2'd3    // Taylor-approximated sigmoid
  } act_e;

  // Sigmoid Taylor constants at s = 16.
  localparam logic signed [31:0] SIG_C0_DEFAULT = 32'sd32768;
  localparam logic signed [31:0] SIG_C1_DEFAULT = 32'sd16384;
  localparam logic signed [31:0] SIG_C3_DEFAULT = -32'sd1365;
  localparam logic signed [31:0] SIG_C5_DEFAULT = 32'sd45;

  // Per-model control-plane entry.
  typedef struct packed {
    logic              valid;
    logic [15:0]       model_id;
    act_e              act;
    logic [2:0]        order;   // Taylor order: 1, 3 or 5
    logic signed [31:0] alpha;  // leaky slope, fixed point at the packet scale
    logic signed [31:0] offset; // encoding offset b of w_q = round(w*2^s) + b
    logic signed [31:0] c0;
    logic signed [31:0] c1;
    logic signed [31:0] c3;
    logic signed [31:0] c5;
  } model_entry_t;

  // Control-plane write address map: addr[31:28] region, addr[27:16] slot.
  localparam logic [3:0] CP_REG_MODEL  = 4'h0;  // addr[3:0] = field
  localparam logic [3:0] CP_REG_BIAS   = 4'h1;  // addr[7:0] = output index
  localparam logic [3:0] CP_REG_WEIGHT = 4'h2;  // addr[15:8] = output, addr[7:0] = feature

  localparam logic [3:0] MF_ID     = 4'd0;  // wdata[16] valid, wdata[15:0] model id
  localparam logic [3:0] MF_MODE   = 4'd1;  // wdata[1:0] activation, wdata[10:8] order
  localparam logic [3:0] MF_ALPHA  = 4'd2;
  localparam logic [3:0] MF_OFFSET = 4'd3;
  localparam logic [3:0] MF_C0     = 4'd4;
  localparam logic [3:0] MF_C1     = 4'd5;
  localparam logic [3:0] MF_C3     = 4'd6;
  localparam logic [3:0] MF_C5     = 4'd7;

  // One's-complement 16-bit addition with end-around carry.
  function automatic logic [15:0] csum_add(input logic [15:0] a, input logic [15:0] b);
    logic [16:0] s;
    s = {1'b0, a} + {1'b0, b};
    return s[15:0] + {15'd0, s[16]};
  endfunction

  // One's-complement sum of the two 16-bit halves of a 32-bit word.
  function automatic logic [15:0] csum_fold32(input logic [31:0] v);
    return csum_add(v[31:16], v[15:0]);
  endfunction

endpackage
