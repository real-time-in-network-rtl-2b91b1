// nn_inference_top -- in-network inference on a packet stream.
//
// Packets carry the input features of a small ML model in an encapsulation
// header behind their Ethernet / IP / UDP-or-TCP headers. The pipeline looks
// the model up in control-plane tables by the model ID in that header,
// evaluates it in fixed point (dense layer, then identity, ReLU, leaky ReLU or
// a Taylor-series sigmoid), writes the results back into the packet over the
// feature slots, marks the header and sends the packet on. Packets that are
// not NN packets, or name a model that is not loaded, pass through unchanged.
//
// Flow (one packet at a time, store-and-forward):
//   RX      nn_pkt_buffer receives the packet from s_axis (one beat/cycle)
//   DECODE  nn_hdr_parser + model lookup in nn_ctrl_tables, decide the path
//   COMPUTE nn_mac_engine: MAC over features, activation, write-back
//   FLAGS   nn_hdr_rewrite: set the result flag in the NN header
//   CSUM    nn_hdr_rewrite: patch the UDP/TCP checksum
//   TX      nn_pkt_buffer streams the packet out on m_axis
// s_axis_tready is low from the end of one packet until the previous one has
// left, so back-pressure reaches the sender.
//
// Latency of an inferred packet, in cycles from its last ingress beat to its
// first egress beat: out_cnt * ceil(feat_cnt / LANES) + out_cnt + 12.
//
// Control plane: cp_we / cp_addr / cp_wdata write the tables (map in nn_pkg).
// Counters: inferred packets, bypassed (not NN), model misses, malformed NN
// headers (no outputs, or more outputs than features), and packets dropped
// for being longer than the buffer.
//
// The header format, the control-plane tables, the fixed-point encoding and
// the activation functions follow the published design. The streaming
// interface, the store-and-forward buffer, the in-place result format and the
// checksum handling are this implementation's.
module nn_inference_top
  import nn_pkg::*;
#(
  parameter int unsigned PKT_BYTES = 2048,
  parameter int unsigned N_SLOTS   = 8,
  parameter int unsigned MAX_FEAT  = 255,
  parameter int unsigned MAX_OUT   = 255,
  parameter int unsigned LANES     = 8,
  parameter logic [15:0] NN_PORT   = NN_PORT_DEFAULT
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // ingress
  input  logic [AXIS_W-1:0]     s_axis_tdata,
  input  logic [BEAT_BYTES-1:0] s_axis_tkeep,
  input  logic                  s_axis_tvalid,
  input  logic                  s_axis_tlast,
  output logic                  s_axis_tready,
  // egress
  output logic [AXIS_W-1:0]     m_axis_tdata,
  output logic [BEAT_BYTES-1:0] m_axis_tkeep,
  output logic                  m_axis_tvalid,
  output logic                  m_axis_tlast,
  input  logic                  m_axis_tready,
  // control plane
  input  logic                  cp_we,
  input  logic [31:0]           cp_addr,
  input  logic [31:0]           cp_wdata,
  // statistics
  output logic [31:0]           cnt_inferred,
  output logic [31:0]           cnt_bypass,
  output logic [31:0]           cnt_miss,
  output logic [31:0]           cnt_bad,
  output logic [31:0]           cnt_drop
);

  localparam int unsigned GROUPS = (MAX_FEAT + LANES - 1) / LANES;
  localparam int unsigned SLOT_W = (N_SLOTS > 1) ? $clog2(N_SLOTS) : 1;
  localparam int unsigned OUT_W  = (MAX_OUT > 1) ? $clog2(MAX_OUT) : 1;
  localparam int unsigned GRP_W  = (GROUPS > 1) ? $clog2(GROUPS) : 1;
  localparam int unsigned LEN_W  = $clog2(PKT_BYTES + 1);
  localparam int unsigned OFF_W  = $clog2(PKT_BYTES);

  typedef enum logic [2:0] {T_RX, T_DECODE, T_COMPUTE, T_FLAGS, T_CSUM, T_TX, T_WAIT} tstate_e;
  tstate_e state;

  // buffer
  logic                   rx_done, rx_ovf, tx_start, tx_drop, tx_done;
  logic [LEN_W-1:0]       rx_len;
  logic [8*PKT_BYTES-1:0] pkt;
  logic                   wr_en;
  logic [OFF_W-1:0]       wr_off;
  logic [31:0]            wr_data;
  logic [2:0]             wr_nbytes;

  // parser
  logic                   p_is_nn, p_is_ipv4, p_is_udp;
  nn_hdr_t                p_hdr;
  logic [OFF_W-1:0]       p_l4_off, p_nn_off, p_feat_off, p_csum_off;

  // registered decode
  logic                   r_is_ipv4, r_is_udp;
  nn_hdr_t                r_hdr;
  logic [OFF_W-1:0]       r_l4_off, r_nn_off, r_feat_off, r_csum_off;
  logic [SLOT_W-1:0]      r_slot;
  logic [4:0]             r_s;

  // tables
  logic                   lk_hit;
  logic [SLOT_W-1:0]      lk_slot;
  model_entry_t           lk_entry;
  logic [SLOT_W-1:0]      w_slot, b_slot;
  logic [OUT_W-1:0]       w_out, b_out;
  logic [GRP_W-1:0]       w_grp;
  logic [LANES*32-1:0]    w_data;
  logic signed [31:0]     b_data;

  // engine
  logic                   e_start, e_busy, e_done;
  logic                   e_wr_en;
  logic [OFF_W-1:0]       e_wr_off;
  logic [31:0]            e_wr_data;
  logic [2:0]             e_wr_nbytes;
  logic [15:0]            sum_old, sum_new;

  // rewrite
  logic [7:0]             flags_out;
  logic [15:0]            csum_in, csum_out;
  logic                   csum_we;

  nn_pkt_buffer #(.PKT_BYTES(PKT_BYTES)) u_buf (
    .clk, .rst_n,
    .s_axis_tdata, .s_axis_tkeep, .s_axis_tvalid, .s_axis_tlast, .s_axis_tready,
    .rx_en(state == T_RX), .rx_done, .rx_len, .rx_ovf,
    .pkt, .wr_en, .wr_off, .wr_data, .wr_nbytes,
    .tx_start, .tx_drop, .tx_done,
    .m_axis_tdata, .m_axis_tkeep, .m_axis_tvalid, .m_axis_tlast, .m_axis_tready
  );

  nn_hdr_parser #(.PKT_BYTES(PKT_BYTES), .NN_PORT(NN_PORT)) u_parse (
    .pkt, .len(rx_len),
    .is_nn(p_is_nn), .is_ipv4(p_is_ipv4), .is_udp(p_is_udp), .hdr(p_hdr),
    .l4_off(p_l4_off), .nn_off(p_nn_off), .feat_off(p_feat_off), .csum_off(p_csum_off)
  );

  nn_ctrl_tables #(.N_SLOTS(N_SLOTS), .MAX_FEAT(MAX_FEAT), .MAX_OUT(MAX_OUT), .LANES(LANES)) u_tbl (
    .clk, .rst_n, .cp_we, .cp_addr, .cp_wdata,
    .lk_model_id(state == T_DECODE ? p_hdr.model_id : r_hdr.model_id),
    .lk_hit, .lk_slot, .lk_entry,
    .w_slot, .w_out, .w_grp, .w_data,
    .b_slot, .b_out, .b_data
  );

  nn_mac_engine #(.PKT_BYTES(PKT_BYTES), .N_SLOTS(N_SLOTS), .MAX_FEAT(MAX_FEAT),
                  .MAX_OUT(MAX_OUT), .LANES(LANES)) u_eng (
    .clk, .rst_n, .start(e_start), .slot(r_slot), .entry(lk_entry), .s(r_s),
    .feat_cnt(r_hdr.feat_cnt), .out_cnt(r_hdr.out_cnt), .feat_off(r_feat_off), .pkt,
    .w_slot, .w_out, .w_grp, .w_data, .b_slot, .b_out, .b_data,
    .wr_en(e_wr_en), .wr_off(e_wr_off), .wr_data(e_wr_data), .wr_nbytes(e_wr_nbytes),
    .busy(e_busy), .done(e_done), .sum_old, .sum_new
  );

  assign csum_in = {pkt[8 * 32'(r_csum_off) +: 8], pkt[8 * (32'(r_csum_off) + 1) +: 8]};

  nn_hdr_rewrite u_rw (
    .flags_in(r_hdr.flags),
    .flags_odd(1'(32'(r_nn_off) + 6 - 32'(r_l4_off))),
    .csum_in,
    .feat_odd(1'(32'(r_feat_off) - 32'(r_l4_off))),
    .sum_old, .sum_new,
    .is_ipv4(r_is_ipv4), .is_udp(r_is_udp),
    .flags_out, .csum_out, .csum_we
  );

  // packet write mux: engine during COMPUTE, header fields after it
  always_comb begin
    wr_en     = 1'b0;
    wr_off    = '0;
    wr_data   = '0;
    wr_nbytes = 3'd0;
    if (state == T_COMPUTE) begin
      wr_en     = e_wr_en;
      wr_off    = e_wr_off;
      wr_data   = e_wr_data;
      wr_nbytes = e_wr_nbytes;
    end else if (state == T_FLAGS) begin
      wr_en     = 1'b1;
      wr_off    = OFF_W'(32'(r_nn_off) + 6);
      wr_data   = {flags_out, 24'h0};
      wr_nbytes = 3'd1;
    end else if (state == T_CSUM) begin
      wr_en     = csum_we;
      wr_off    = r_csum_off;
      wr_data   = {csum_out, 16'h0};
      wr_nbytes = 3'd2;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state        <= T_RX;
      e_start      <= 1'b0;
      tx_start     <= 1'b0;
      tx_drop      <= 1'b0;
      r_is_ipv4    <= 1'b0;
      r_is_udp     <= 1'b0;
      r_hdr        <= '0;
      r_l4_off     <= '0;
      r_nn_off     <= '0;
      r_feat_off   <= '0;
      r_csum_off   <= '0;
      r_slot       <= '0;
      r_s          <= '0;
      cnt_inferred <= '0;
      cnt_bypass   <= '0;
      cnt_miss     <= '0;
      cnt_bad      <= '0;
      cnt_drop     <= '0;
    end else begin
      e_start  <= 1'b0;
      tx_start <= 1'b0;
      unique case (state)
        T_RX: if (rx_done) state <= T_DECODE;
        T_DECODE: begin
          r_is_ipv4  <= p_is_ipv4;
          r_is_udp   <= p_is_udp;
          r_hdr      <= p_hdr;
          r_l4_off   <= p_l4_off;
          r_nn_off   <= p_nn_off;
          r_feat_off <= p_feat_off;
          r_csum_off <= p_csum_off;
          r_slot     <= lk_slot;
          r_s        <= (p_hdr.scale > 16'd30) ? 5'd30 : p_hdr.scale[4:0];
          tx_drop    <= 1'b0;
          if (rx_ovf) begin
            cnt_drop <= cnt_drop + 1'b1;
            tx_drop  <= 1'b1;
            tx_start <= 1'b1;
            state    <= T_WAIT;
          end else if (!p_is_nn) begin
            cnt_bypass <= cnt_bypass + 1'b1;
            state      <= T_TX;
          end else if (!lk_hit) begin
            cnt_miss <= cnt_miss + 1'b1;
            state    <= T_TX;
          end else if (p_hdr.out_cnt == 8'd0 || p_hdr.out_cnt > p_hdr.feat_cnt ||
                       32'(p_hdr.feat_cnt) > MAX_FEAT || 32'(p_hdr.out_cnt) > MAX_OUT) begin
            cnt_bad <= cnt_bad + 1'b1;
            state   <= T_TX;
          end else begin
            e_start <= 1'b1;
            state   <= T_COMPUTE;
          end
        end
        T_COMPUTE: if (e_done) state <= T_FLAGS;
        T_FLAGS:   state <= T_CSUM;
        T_CSUM: begin
          cnt_inferred <= cnt_inferred + 1'b1;
          state        <= T_TX;
        end
        T_TX: begin
          tx_start <= 1'b1;
          state    <= T_WAIT;
        end
        T_WAIT: if (tx_done) state <= T_RX;
        default: state <= T_RX;
      endcase
    end
  end

  engine_done_only_in_compute: assert property (@(posedge clk) disable iff (!rst_n)
                                                e_done |-> state == T_COMPUTE)
    else $error("nn_inference_top: engine finished outside COMPUTE");

  engine_started_idle: assert property (@(posedge clk) disable iff (!rst_n)
                                        e_start |-> !e_busy)
    else $error("nn_inference_top: engine started while busy");

endmodule
