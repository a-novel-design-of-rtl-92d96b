// ahcnn_top -- adaptive and hierarchical CNN accelerator (AH-CNN).
//
// A quantised ResNet-style classifier is cut into three convolution parts of
// growing depth. Only one part fits the device at a time, so the parts share a
// reconfigurable region; every image first goes through Part 1 (shallow), and
// only images on which the shallow branch is not confident enough are sent on
// to Part 2 and then Part 3, after the region has been reconfigured. The
// pooling + classifier (Part 4) and the decision layer are shared and stay in
// the static logic. Per image, the accelerator
//   1. takes the part's input map from the DMA stream (s_*): an RGB image for
//      Part 1, the stored output map of the previous part for Parts 2 and 3;
//   2. runs the configured part (reconfig_region);
//   3. streams the part's output map both into Part 4 (pool_fc) and, unless the
//      part is the last one, back out to the DMA (m_*) so that it can be kept
//      for the next part;
//   4. computes label, confidence and the high-priority top-n test
//      (confidence_unit) and the decision (decision_gate);
//   5. presents the result (res_*): label, confidence, and `deep` = this image
//      needs the next part.
// Which part is configured (rm_select), the decoupling during reconfiguration
// (rm_decouple), the batch loop and the DMA transfers belong to the host, as in
// the paper, where a processor script drives them; this logic is what the
// host drives.
//
// Configuration bus (cfg_*, one 32-bit write per cycle): cfg_addr[23:20] = 0..2
// Part 1..3 weights and shifts (the content of the partial bitstreams),
// 4 = Part 4 classifier, 5 = decision layer registers (see each module).
//
// Timing: one image at a time. A new input map is accepted once the previous
// result has been taken (res_valid && res_ready).
module ahcnn_top
  import ahcnn_pkg::*;
#(
  parameter int unsigned NUM_CLASSES = MAX_CLASSES
) (
  input  logic              clk,
  input  logic              rst_n,
  // configuration
  input  logic              cfg_we,
  input  logic [CFG_AW-1:0] cfg_addr,
  input  logic [CFG_DW-1:0] cfg_wdata,
  // partial reconfiguration (from the host's reconfiguration controller)
  input  logic [1:0]        rm_select,
  input  logic              rm_decouple,
  // input map from the DMA
  input  logic              s_valid,
  output logic              s_ready,
  input  logic [FM_W-1:0]   s_data,
  // output map to the DMA (kept for the next part)
  output logic              m_valid,
  input  logic              m_ready,
  output logic [FM_W-1:0]   m_data,
  output logic              m_last,
  // classification result
  output logic              res_valid,
  input  logic              res_ready,
  output result_t           res,
  output logic              busy
);

  // ---- reconfigurable region -------------------------------------------------------
  logic            r_out_valid, r_out_ready, r_out_last, r_busy;
  logic [FM_W-1:0] r_out_data;

  reconfig_region u_region (
    .clk, .rst_n, .rm_select, .rm_decouple,
    .in_valid(s_valid), .in_ready(s_ready), .in_data(s_data),
    .out_valid(r_out_valid), .out_ready(r_out_ready), .out_data(r_out_data),
    .out_last(r_out_last),
    .cfg_we, .cfg_addr, .cfg_wdata, .busy(r_busy));

  // ---- split the output map to Part 4 and (if needed later) the DMA -----------
  logic need_fm, p_ready, p_valid;
  assign need_fm     = (rm_select != 2'(NUM_BRANCH - 1));
  assign p_valid     = r_out_valid && (!need_fm || m_ready);
  assign m_valid     = r_out_valid && need_fm && p_ready;
  assign r_out_ready = p_ready && (!need_fm || m_ready);
  assign m_data      = r_out_data;
  assign m_last      = r_out_last;

  // ---- Part 4 ------------------------------------------------------------------------
  logic                  pool_done, pool_release;
  logic signed [Z_W-1:0] z [NUM_CLASSES];
  logic [6:0]            n_classes, top_n;
  logic [NUM_CLASSES-1:0] hp_mask;

  pool_fc #(.NUM_CLASSES(NUM_CLASSES)) u_pool_fc (
    .clk, .rst_n, .branch(rm_select), .n_classes,
    .in_valid(p_valid), .in_ready(p_ready), .in_data(r_out_data), .in_last(r_out_last),
    .done(pool_done), .z, .release_i(pool_release),
    .cfg_we(cfg_we && cfg_addr[23:20] == CFG_FC), .cfg_addr(cfg_addr[19:0]), .cfg_wdata);

  // ---- confidence and decision ----------------------------------------------------
  logic              c_done, c_hp;
  logic [6:0]        c_label;
  logic [BETA_W-1:0] c_beta;

  confidence_unit #(.NUM_CLASSES(NUM_CLASSES)) u_conf (
    .clk, .rst_n, .start(pool_done), .z, .n_classes, .hp_mask, .top_n,
    .done(c_done), .label(c_label), .beta(c_beta), .hp_hit(c_hp));

  logic              g_valid, g_deep;
  logic [BETA_W-1:0] g_gamma;

  decision_gate #(.NUM_CLASSES(NUM_CLASSES)) u_gate (
    .clk, .rst_n, .valid(c_done), .branch(rm_select), .beta(c_beta), .hp_hit(c_hp),
    .out_valid(g_valid), .deep(g_deep), .gamma_used(g_gamma),
    .n_classes, .top_n, .hp_mask,
    .cfg_we(cfg_we && cfg_addr[23:20] == CFG_GATE), .cfg_addr(cfg_addr[7:0]), .cfg_wdata);

  // ---- result register ---------------------------------------------------------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      res_valid <= 1'b0;
      res       <= '0;
    end else begin
      if (g_valid) begin
        res_valid  <= 1'b1;
        res.branch <= rm_select;
        res.label  <= c_label;
        res.beta   <= c_beta;
        res.hp_hit <= c_hp;
        res.deep   <= g_deep;
      end else if (res_valid && res_ready) begin
        res_valid <= 1'b0;
      end
    end
  end

  assign pool_release = res_valid && res_ready;
  assign busy         = r_busy || res_valid;

  // the split must never hand a word to one side only
  a_split: assert property (@(posedge clk) disable iff (!rst_n)
                            (p_valid && p_ready) |-> (r_out_valid && r_out_ready));

endmodule
