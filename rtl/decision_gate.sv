// decision_gate -- the decision layer of AH-CNN: decides, for one image and
// one branch, whether the deeper part must run or the branch's label is final.
//
// Following the paper's inference procedure: a trigger point Gamma is chosen
// for the desired accuracy Lambda; when a high-priority class appears in the
// top-n of the branch's output, Gamma is raised by Theta; the deeper part is
// activated when the confidence beta <= Gamma. The last branch (Part 3) has no
// deeper part, so its label is always final.
//
// This design's choices: Gamma comes from a small table, one entry per branch
// that has a successor (Parts 1 and 2) and per Lambda level (4 levels), written
// by the host from the confidence statistics (mean, standard deviation) it
// measured on the training set; Gamma + Theta saturates at 0xFFFF, which sends
// every image deeper. The gate also holds the other run-time settings of the
// decision: Lambda, n of the top-n test, the high-priority class mask and the
// number of classes in use.
//
// Register map (cfg_addr[7:0], 32-bit writes): 0x00-0x07 Gamma[branch =
// addr[2]][Lambda = addr[1:0]] (Q0.16); 0x08 Theta (Q0.16); 0x09 Lambda level;
// 0x0A top_n; 0x0B n_classes; 0x10-0x13 high-priority mask, 32 classes each.
//
// Timing: `valid` with the inputs for one cycle; one cycle later `out_valid`
// with `deep` and the Gamma that was used.
module decision_gate
  import ahcnn_pkg::*;
#(
  parameter int unsigned NUM_CLASSES = MAX_CLASSES
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   valid,
  input  logic [1:0]             branch,
  input  logic [BETA_W-1:0]      beta,
  input  logic                   hp_hit,
  output logic                   out_valid,
  output logic                   deep,
  output logic [BETA_W-1:0]      gamma_used,
  // settings used by the rest of the datapath
  output logic [6:0]             n_classes,
  output logic [6:0]             top_n,
  output logic [NUM_CLASSES-1:0] hp_mask,
  input  logic                   cfg_we,
  input  logic [7:0]             cfg_addr,
  input  logic [CFG_DW-1:0]      cfg_wdata
);

  localparam int unsigned MASK_W = ((NUM_CLASSES + 31) / 32) * 32;

  logic [BETA_W-1:0] gamma_tab [2][LAMBDA_LEVELS];
  logic [BETA_W-1:0] theta;
  logic [1:0]        lambda_sel;
  logic [MASK_W-1:0] mask_r;

  assign hp_mask = mask_r[NUM_CLASSES-1:0];

  // trigger point for this image
  logic [BETA_W:0]   gamma_sum;
  logic [BETA_W-1:0] gamma;
  always_comb begin
    gamma_sum = {1'b0, gamma_tab[branch[0]][lambda_sel]} + (hp_hit ? {1'b0, theta} : '0);
    gamma     = gamma_sum[BETA_W] ? '1 : gamma_sum[BETA_W-1:0];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid  <= 1'b0;
      deep       <= 1'b0;
      gamma_used <= '0;
    end else begin
      out_valid <= valid;
      if (valid) begin
        deep       <= (branch != 2'(NUM_BRANCH - 1)) && (beta <= gamma);
        gamma_used <= gamma;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int b = 0; b < 2; b++)
        for (int l = 0; l < LAMBDA_LEVELS; l++) gamma_tab[b][l] <= '0;
      theta      <= '0;
      lambda_sel <= '0;
      top_n      <= 7'd5;
      n_classes  <= 7'd10;
      mask_r     <= '0;
    end else if (cfg_we) begin
      if (cfg_addr[7:3] == 5'd0) gamma_tab[cfg_addr[2]][cfg_addr[1:0]] <= cfg_wdata[BETA_W-1:0];
      if (cfg_addr == 8'h08) theta      <= cfg_wdata[BETA_W-1:0];
      if (cfg_addr == 8'h09) lambda_sel <= cfg_wdata[1:0];
      if (cfg_addr == 8'h0A) top_n      <= cfg_wdata[6:0];
      if (cfg_addr == 8'h0B) n_classes  <= (cfg_wdata[6:0] > 7'(NUM_CLASSES)) ? 7'(NUM_CLASSES)
                                                                             : cfg_wdata[6:0];
      if (cfg_addr[7:4] == 4'h1 && 32'(cfg_addr[1:0]) * 32 < MASK_W)
        mask_r[cfg_addr[1:0]*32 +: 32] <= cfg_wdata;
    end
  end

endmodule
