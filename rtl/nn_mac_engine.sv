// nn_mac_engine -- fixed-point dense layer run on the features of one packet.
//
// For each output j of the model (j < out_cnt) it computes
//
//   z_j = ( sum_i (w_ji - b) * x_i ) >> s  +  (bias_j - b)
//   y_j = act(z_j)
//
// where x_i are the 32-bit input features in the packet (i < feat_cnt), w_ji and
// bias_j come from the control-plane tables, b is the model's encoding offset
// (w_q = round(w * 2^s) + b, so w = (w_q - b) / 2^s) and s is the packet's
// scale. Features and weights share the same number of fractional bits, so
// the raw products carry 2s fractional bits; they are summed at full width
// (80 bits) and shifted back once. z saturates to 32 bits.
//
// How it works: LANES multipliers work on LANES features of one output per
// cycle. A sequencer walks outputs and feature groups, reading one weight word
// (LANES weights) and the output's bias from the tables each cycle. Stage 1
// multiplies and accumulates; on the last group of an output it adds the bias
// and saturates; stage 2 applies the activation and keeps the result in an
// output buffer. Results cannot be written into the packet during this phase
// because they overwrite features still being read. A write-back phase then
// stores y_j big-endian over feature slot j (one per cycle) and accumulates
// the one's-complement sums of the old and the new words, for the L4 checksum
// update.
//
// Timing: start (one cycle, with all inputs held stable until done) -> MAC
// phase of out_cnt * ceil(feat_cnt / LANES) cycles plus 3 cycles of pipeline
// -> write-back of out_cnt cycles -> done pulses. Requires
// 1 <= out_cnt <= feat_cnt.
//
// What follows the published design: weights, biases and activation
// parameters looked up per model in control-plane tables, shared fixed-point
// format, the offset/scale decoding, and results returned in the packet in
// place of the features. LANES, the pipeline, the truncating shift, the
// saturation and the write-back order are this implementation's choices.
module nn_mac_engine
  import nn_pkg::*;
#(
  parameter int unsigned PKT_BYTES = 2048,
  parameter int unsigned N_SLOTS   = 8,
  parameter int unsigned MAX_FEAT  = 255,
  parameter int unsigned MAX_OUT   = 255,
  parameter int unsigned LANES     = 8,
  localparam int unsigned GROUPS   = (MAX_FEAT + LANES - 1) / LANES,
  localparam int unsigned SLOT_W   = (N_SLOTS > 1) ? $clog2(N_SLOTS) : 1,
  localparam int unsigned OUT_W    = (MAX_OUT > 1) ? $clog2(MAX_OUT) : 1,
  localparam int unsigned GRP_W    = (GROUPS > 1) ? $clog2(GROUPS) : 1,
  localparam int unsigned OFF_W    = $clog2(PKT_BYTES)
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   start,
  input  logic [SLOT_W-1:0]      slot,
  input  model_entry_t           entry,
  input  logic [4:0]             s,
  input  logic [7:0]             feat_cnt,
  input  logic [7:0]             out_cnt,
  input  logic [OFF_W-1:0]       feat_off,
  input  logic [8*PKT_BYTES-1:0] pkt,
  // table read ports (synchronous, data one cycle after address)
  output logic [SLOT_W-1:0]      w_slot,
  output logic [OUT_W-1:0]       w_out,
  output logic [GRP_W-1:0]       w_grp,
  input  logic [LANES*32-1:0]    w_data,
  output logic [SLOT_W-1:0]      b_slot,
  output logic [OUT_W-1:0]       b_out,
  input  logic signed [31:0]     b_data,
  // packet write port
  output logic                   wr_en,
  output logic [OFF_W-1:0]       wr_off,
  output logic [31:0]            wr_data,
  output logic [2:0]             wr_nbytes,
  // status
  output logic                   busy,
  output logic                   done,
  output logic [15:0]            sum_old,
  output logic [15:0]            sum_new
);

  localparam int unsigned ACC_W = 80;

  typedef enum logic [1:0] {E_IDLE, E_MAC, E_WB} estate_e;
  estate_e state;

  function automatic logic [31:0] be32(input logic [8*PKT_BYTES-1:0] p, input int unsigned off);
    logic [31:0] v;
    for (int k = 0; k < 4; k++)
      v[(3 - k) * 8 +: 8] = (off + k < PKT_BYTES) ? p[8 * (off + k) +: 8] : 8'h00;
    return v;
  endfunction

  function automatic logic signed [31:0] sat32(input logic signed [ACC_W-1:0] v);
    if (v > ACC_W'(32'sh7FFF_FFFF))        return 32'sh7FFF_FFFF;
    else if (v < -ACC_W'(33'sh0_8000_0000)) return 32'sh8000_0000;
    else                                   return v[31:0];
  endfunction

  // issue counters
  logic              issuing;
  logic [7:0]        j_q, g_q, ngrp;
  // stage 1
  logic              p1_valid, p1_first, p1_last;
  logic [7:0]        p1_j;
  logic signed [31:0] p1_x [LANES];
  logic signed [ACC_W-1:0] acc, acc_n, prod_sum;
  logic signed [31:0] z_n;
  // stage 2
  logic              p2_valid;
  logic [7:0]        p2_j;
  logic signed [31:0] p2_z, y;
  // output buffer and write-back
  logic [31:0]       obuf [MAX_OUT];
  logic [7:0]        k_q;
  logic [31:0]       old_word;

  assign ngrp   = 8'((32'(feat_cnt) + LANES - 1) / LANES);
  assign w_slot = slot;
  assign b_slot = slot;
  assign w_out  = OUT_W'(j_q);
  assign w_grp  = GRP_W'(g_q);
  assign b_out  = OUT_W'(j_q);
  assign busy   = (state != E_IDLE);

  // stage 1 arithmetic
  always_comb begin
    prod_sum = '0;
    for (int l = 0; l < LANES; l++) begin
      logic signed [32:0] w_eff;
      w_eff    = 33'(signed'(w_data[l * 32 +: 32])) - 33'(entry.offset);
      prod_sum = prod_sum + ACC_W'(w_eff) * ACC_W'(p1_x[l]);
    end
    acc_n = (p1_first ? ACC_W'(0) : acc) + prod_sum;
    z_n   = sat32((acc_n >>> s) + ACC_W'(b_data) - ACC_W'(entry.offset));
  end

  nn_activation u_act (
    .act(entry.act), .z(p2_z), .s(s), .alpha(entry.alpha), .order(entry.order),
    .c0(entry.c0), .c1(entry.c1), .c3(entry.c3), .c5(entry.c5), .y(y)
  );

  // write-back port
  always_comb begin
    old_word  = be32(pkt, 32'(feat_off) + 4 * 32'(k_q));
    wr_en     = (state == E_WB);
    wr_off    = OFF_W'(32'(feat_off) + 4 * 32'(k_q));
    wr_data   = obuf[k_q];
    wr_nbytes = 3'd4;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= E_IDLE;
      issuing  <= 1'b0;
      j_q      <= '0;
      g_q      <= '0;
      k_q      <= '0;
      p1_valid <= 1'b0;
      p1_first <= 1'b0;
      p1_last  <= 1'b0;
      p1_j     <= '0;
      p2_valid <= 1'b0;
      p2_j     <= '0;
      p2_z     <= '0;
      acc      <= '0;
      done     <= 1'b0;
      sum_old  <= '0;
      sum_new  <= '0;
      for (int l = 0; l < LANES; l++) p1_x[l] <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        E_IDLE: if (start) begin
          state   <= E_MAC;
          issuing <= 1'b1;
          j_q     <= '0;
          g_q     <= '0;
          sum_old <= '0;
          sum_new <= '0;
        end
        E_MAC: begin
          // issue stage: table addresses are j_q / g_q this cycle
          p1_valid <= issuing;
          p1_first <= (g_q == 0);
          p1_last  <= (g_q == ngrp - 1);
          p1_j     <= j_q;
          for (int l = 0; l < LANES; l++) begin
            int unsigned idx;
            idx = 32'(g_q) * LANES + l;
            p1_x[l] <= (idx < 32'(feat_cnt)) ? signed'(be32(pkt, 32'(feat_off) + 4 * idx)) : '0;
          end
          if (issuing) begin
            if (g_q == ngrp - 1) begin
              g_q <= '0;
              if (j_q == out_cnt - 1) issuing <= 1'b0;
              else                    j_q <= j_q + 1'b1;
            end else begin
              g_q <= g_q + 1'b1;
            end
          end
          // stage 1
          if (p1_valid) acc <= acc_n;
          p2_valid <= p1_valid && p1_last;
          if (p1_valid && p1_last) begin
            p2_z <= z_n;
            p2_j <= p1_j;
          end
          if (!issuing && !p1_valid && !p2_valid) begin
            state <= E_WB;
            k_q   <= '0;
          end
        end
        E_WB: begin
          sum_old <= csum_add(sum_old, csum_fold32(old_word));
          sum_new <= csum_add(sum_new, csum_fold32(obuf[k_q]));
          if (k_q == out_cnt - 1) begin
            state <= E_IDLE;
            done  <= 1'b1;
          end else begin
            k_q <= k_q + 1'b1;
          end
        end
        default: state <= E_IDLE;
      endcase
    end
  end

  // stage 2: result buffer (no reset, written before it is read)
  always_ff @(posedge clk) begin
    if (state == E_MAC && p2_valid) obuf[p2_j] <= y;
  end

  start_only_when_idle: assert property (@(posedge clk) disable iff (!rst_n)
                                         start |-> state == E_IDLE)
    else $error("nn_mac_engine: start while busy");

endmodule
