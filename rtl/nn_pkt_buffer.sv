// nn_pkt_buffer -- single-packet store between the ingress and egress streams.
//
// The pipeline works store-and-forward: a whole packet is received into this
// buffer, the header is parsed and the inference runs on the stored bytes, the
// results are written back into the stored packet, and the packet is streamed
// out again. The store is PKT_BYTES long, BEAT_BYTES per AXI4-Stream beat.
//
// Ingress (s_axis_*): accepted while rx_en is high and the buffer is in its
// receive phase. Byte k of a beat is tdata[8k+7:8k] and is the k-th byte on
// the wire; tkeep is expected contiguous from lane 0 and partial only on the
// last beat. At tlast, rx_done pulses for one cycle with the packet length in
// bytes; rx_ovf is set if the packet was longer than the store (the excess is
// dropped). The buffer then holds the packet until tx_start.
//
// Random access: pkt exposes the whole store as a flat vector (byte b at
// pkt[8b+7:8b]) for the parser and the engine. The write port writes
// wr_nbytes (1..4) bytes of wr_data, most significant byte first, starting at
// byte offset wr_off (big-endian, as on the wire).
//
// Egress (m_axis_*): tx_start streams the stored rx length out, with tkeep
// trimmed on the last beat; tx_done pulses when the last beat is taken. A
// tx_start with tx_drop set discards the packet instead. The buffer then
// returns to the receive phase.
//
// This block is this implementation's own: the published design runs on a
// vendor P4 pipeline whose packet handling is not described. Timing: one beat
// per cycle in and out; rx_done one cycle after the last beat.
module nn_pkt_buffer
  import nn_pkg::*;
#(
  parameter int unsigned PKT_BYTES = 2048,
  localparam int unsigned BEATS    = PKT_BYTES / BEAT_BYTES,
  localparam int unsigned LEN_W    = $clog2(PKT_BYTES + 1),
  localparam int unsigned BEAT_W   = $clog2(BEATS + 1),
  localparam int unsigned OFF_W    = $clog2(PKT_BYTES)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // ingress stream
  input  logic [AXIS_W-1:0]     s_axis_tdata,
  input  logic [BEAT_BYTES-1:0] s_axis_tkeep,
  input  logic                  s_axis_tvalid,
  input  logic                  s_axis_tlast,
  output logic                  s_axis_tready,
  input  logic                  rx_en,
  output logic                  rx_done,
  output logic [LEN_W-1:0]      rx_len,
  output logic                  rx_ovf,
  // random access
  output logic [8*PKT_BYTES-1:0] pkt,
  input  logic                  wr_en,
  input  logic [OFF_W-1:0]      wr_off,
  input  logic [31:0]           wr_data,
  input  logic [2:0]            wr_nbytes,
  // egress stream
  input  logic                  tx_start,
  input  logic                  tx_drop,
  output logic                  tx_done,
  output logic [AXIS_W-1:0]     m_axis_tdata,
  output logic [BEAT_BYTES-1:0] m_axis_tkeep,
  output logic                  m_axis_tvalid,
  output logic                  m_axis_tlast,
  input  logic                  m_axis_tready
);

  typedef enum logic [1:0] {B_RX, B_HOLD, B_TX} bstate_e;
  bstate_e state;

  logic [AXIS_W-1:0] mem [BEATS];
  logic [BEAT_W-1:0] wbeat, rbeat, last_beat;
  logic [LEN_W-1:0]  len_q;
  logic              ovf_q;

  function automatic logic [$clog2(BEAT_BYTES+1)-1:0] keep_count(input logic [BEAT_BYTES-1:0] k);
    keep_count = '0;
    for (int i = 0; i < BEAT_BYTES; i++) keep_count += k[i];
  endfunction

  assign s_axis_tready = (state == B_RX) && rx_en;
  assign rx_len        = len_q;
  assign rx_ovf        = ovf_q;

  // flat view
  always_comb begin
    for (int i = 0; i < BEATS; i++) pkt[i*AXIS_W +: AXIS_W] = mem[i];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= B_RX;
      wbeat   <= '0;
      rbeat   <= '0;
      len_q   <= '0;
      ovf_q   <= 1'b0;
      rx_done <= 1'b0;
      tx_done <= 1'b0;
    end else begin
      rx_done <= 1'b0;
      tx_done <= 1'b0;
      unique case (state)
        B_RX: if (s_axis_tvalid && s_axis_tready) begin
          if (32'(wbeat) < BEATS) begin
            len_q <= LEN_W'(32'(wbeat) * BEAT_BYTES + 32'(keep_count(s_axis_tkeep)));
          end else begin
            ovf_q <= 1'b1;
          end
          if (s_axis_tlast) begin
            rx_done <= 1'b1;
            wbeat   <= '0;
            state   <= B_HOLD;
          end else if (32'(wbeat) < BEATS) begin
            wbeat <= wbeat + 1'b1;
          end
        end
        B_HOLD: if (tx_start) begin
          rbeat <= '0;
          if (tx_drop || len_q == '0) begin
            tx_done <= 1'b1;
            ovf_q   <= 1'b0;
            len_q   <= '0;
            state   <= B_RX;
          end else begin
            state <= B_TX;
          end
        end
        B_TX: if (m_axis_tready) begin
          if (rbeat == last_beat) begin
            tx_done <= 1'b1;
            ovf_q   <= 1'b0;
            len_q   <= '0;
            state   <= B_RX;
          end else begin
            rbeat <= rbeat + 1'b1;
          end
        end
        default: state <= B_RX;
      endcase
    end
  end

  // Packet store: ingress beats and byte rewrites. The two never overlap in
  // time (rewrites happen only while the packet is held).
  always_ff @(posedge clk) begin
    if (state == B_RX && s_axis_tvalid && s_axis_tready && 32'(wbeat) < BEATS)
      mem[wbeat[$clog2(BEATS)-1:0]] <= s_axis_tdata;
    if (wr_en) begin
      for (int k = 0; k < 4; k++) begin
        if (k < 32'(wr_nbytes) && 32'(wr_off) + k < PKT_BYTES)
          mem[(32'(wr_off) + k) / BEAT_BYTES][((32'(wr_off) + k) % BEAT_BYTES) * 8 +: 8]
              <= wr_data[(3 - k) * 8 +: 8];
      end
    end
  end

  // egress
  always_comb begin
    last_beat     = BEAT_W'((32'(len_q) + BEAT_BYTES - 1) / BEAT_BYTES - 1);
    m_axis_tvalid = (state == B_TX);
    m_axis_tdata  = mem[rbeat[$clog2(BEATS)-1:0]];
    m_axis_tlast  = (state == B_TX) && (rbeat == last_beat);
    m_axis_tkeep  = '1;
    if (m_axis_tlast && (32'(len_q) % BEAT_BYTES) != 0)
      m_axis_tkeep = BEAT_BYTES'((BEAT_BYTES'(1) << (32'(len_q) % BEAT_BYTES)) - 1);
  end

  // A rewrite must never coincide with an ingress beat.
  assert property (@(posedge clk) disable iff (!rst_n)
                   wr_en |-> state == B_HOLD)
    else $error("nn_pkt_buffer: byte write outside the hold phase");

endmodule
