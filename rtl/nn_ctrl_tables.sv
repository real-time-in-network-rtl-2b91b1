// nn_ctrl_tables -- control-plane tables that hold the models.
//
// The data plane never learns weights: the control plane writes them, and the
// packet pipeline only looks them up, so a model can be retrained and swapped
// without touching the pipeline. This block holds three tables:
//
//   model table  N_SLOTS entries, exact match on the 16-bit model ID of the
//                packet. Each entry carries the activation, the Taylor order,
//                the leaky slope alpha, the encoding offset b and the four
//                sigmoid Taylor coefficients (reset to the s = 16 constants
//                32768, 16384, -1365, 45).
//   bias memory  N_SLOTS x MAX_OUT values of 32 bits.
//   weight mem   N_SLOTS x MAX_OUT x GROUPS words of LANES x 32 bits, so the
//                inference engine reads LANES weights of one output per cycle.
//
// Interface: a simple write port (cp_we, cp_addr, cp_wdata; map in nn_pkg)
// that a host bridge would drive; a combinational model lookup (lk_model_id ->
// lk_hit, lk_slot, lk_entry); and synchronous read ports for weights and
// biases (address in cycle t, data in cycle t+1, like block RAM).
//
// The published design states only that weights, biases and Taylor
// coefficients sit in control-plane tables keyed by the model. The slot count,
// the memory organisation, the write port and the lowest-slot-wins rule for
// duplicate IDs are this implementation's choices. Writes outside the sizes
// are ignored.
module nn_ctrl_tables
  import nn_pkg::*;
#(
  parameter int unsigned N_SLOTS  = 8,
  parameter int unsigned MAX_FEAT = 255,
  parameter int unsigned MAX_OUT  = 255,
  parameter int unsigned LANES    = 8,
  localparam int unsigned GROUPS  = (MAX_FEAT + LANES - 1) / LANES,
  localparam int unsigned SLOT_W  = (N_SLOTS > 1) ? $clog2(N_SLOTS) : 1,
  localparam int unsigned OUT_W   = (MAX_OUT > 1) ? $clog2(MAX_OUT) : 1,
  localparam int unsigned GRP_W   = (GROUPS > 1) ? $clog2(GROUPS) : 1
) (
  input  logic                   clk,
  input  logic                   rst_n,
  // control-plane write port
  input  logic                   cp_we,
  input  logic [31:0]            cp_addr,
  input  logic [31:0]            cp_wdata,
  // model lookup
  input  logic [15:0]            lk_model_id,
  output logic                   lk_hit,
  output logic [SLOT_W-1:0]      lk_slot,
  output model_entry_t           lk_entry,
  // weight read port (synchronous)
  input  logic [SLOT_W-1:0]      w_slot,
  input  logic [OUT_W-1:0]       w_out,
  input  logic [GRP_W-1:0]       w_grp,
  output logic [LANES*32-1:0]    w_data,
  // bias read port (synchronous)
  input  logic [SLOT_W-1:0]      b_slot,
  input  logic [OUT_W-1:0]       b_out,
  output logic signed [31:0]     b_data
);

  localparam int unsigned WDEPTH = N_SLOTS * MAX_OUT * GROUPS;
  localparam int unsigned BDEPTH = N_SLOTS * MAX_OUT;

  model_entry_t        models [N_SLOTS];
  logic [LANES*32-1:0] wmem   [WDEPTH];
  logic [31:0]         bmem   [BDEPTH];

  // ---- write decode ----
  logic [3:0]  reg_sel;
  logic [11:0] wr_slot;
  logic [7:0]  wr_out_w, wr_feat, wr_out_b;
  logic [3:0]  wr_field;

  assign reg_sel  = cp_addr[31:28];
  assign wr_slot  = cp_addr[27:16];
  assign wr_out_w = cp_addr[15:8];
  assign wr_feat  = cp_addr[7:0];
  assign wr_out_b = cp_addr[7:0];
  assign wr_field = cp_addr[3:0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < N_SLOTS; k++) begin
        models[k].valid    <= 1'b0;
        models[k].model_id <= '0;
        models[k].act      <= ACT_NONE;
        models[k].order    <= 3'd3;
        models[k].alpha    <= '0;
        models[k].offset   <= '0;
        models[k].c0       <= SIG_C0_DEFAULT;
        models[k].c1       <= SIG_C1_DEFAULT;
        models[k].c3       <= SIG_C3_DEFAULT;
        models[k].c5       <= SIG_C5_DEFAULT;
      end
    end else if (cp_we && reg_sel == CP_REG_MODEL && 32'(wr_slot) < N_SLOTS) begin
      unique case (wr_field)
        MF_ID: begin
          models[wr_slot[SLOT_W-1:0]].valid    <= cp_wdata[16];
          models[wr_slot[SLOT_W-1:0]].model_id <= cp_wdata[15:0];
        end
        MF_MODE: begin
          models[wr_slot[SLOT_W-1:0]].act   <= act_e'(cp_wdata[1:0]);
          models[wr_slot[SLOT_W-1:0]].order <= cp_wdata[10:8];
        end
        MF_ALPHA:  models[wr_slot[SLOT_W-1:0]].alpha  <= cp_wdata;
        MF_OFFSET: models[wr_slot[SLOT_W-1:0]].offset <= cp_wdata;
        MF_C0:     models[wr_slot[SLOT_W-1:0]].c0     <= cp_wdata;
        MF_C1:     models[wr_slot[SLOT_W-1:0]].c1     <= cp_wdata;
        MF_C3:     models[wr_slot[SLOT_W-1:0]].c3     <= cp_wdata;
        MF_C5:     models[wr_slot[SLOT_W-1:0]].c5     <= cp_wdata;
        default: ;
      endcase
    end
  end

  // Weight and bias memories: no reset, written one 32-bit value at a time.
  always_ff @(posedge clk) begin
    if (cp_we && reg_sel == CP_REG_WEIGHT && 32'(wr_slot) < N_SLOTS &&
        32'(wr_out_w) < MAX_OUT && 32'(wr_feat) < MAX_FEAT) begin
      wmem[(32'(wr_slot) * MAX_OUT + 32'(wr_out_w)) * GROUPS + 32'(wr_feat) / LANES]
          [(32'(wr_feat) % LANES) * 32 +: 32] <= cp_wdata;
    end
    if (cp_we && reg_sel == CP_REG_BIAS && 32'(wr_slot) < N_SLOTS &&
        32'(wr_out_b) < MAX_OUT) begin
      bmem[32'(wr_slot) * MAX_OUT + 32'(wr_out_b)] <= cp_wdata;
    end
  end

  // ---- read ports ----
  always_ff @(posedge clk) begin
    w_data <= wmem[(32'(w_slot) * MAX_OUT + 32'(w_out)) * GROUPS + 32'(w_grp)];
    b_data <= bmem[32'(b_slot) * MAX_OUT + 32'(b_out)];
  end

  // ---- exact-match model lookup ----
  always_comb begin
    lk_hit   = 1'b0;
    lk_slot  = '0;
    for (int k = N_SLOTS - 1; k >= 0; k--) begin
      if (models[k].valid && models[k].model_id == lk_model_id) begin
        lk_hit  = 1'b1;
        lk_slot = SLOT_W'(k);
      end
    end
    lk_entry = models[lk_slot];
  end

endmodule
