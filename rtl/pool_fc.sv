// pool_fc -- Part 4 of the network, shared by all three branches: global
// average pooling of the last feature map of the active convolution part,
// followed by a fully connected layer with binary weights that produces one
// logit per class.
//
// The paper makes this the one part every branch uses, so it stays in the
// static region; it gives its function (pooling, then a fully connected layer
// with 1-bit weights and as many outputs as classes) but not its insides. Here:
//   * pooling: per-channel sums of the DIM^2 pixel words of the stream, then
//     p_c = sum_c >> (2*log2(DIM) - 3), the channel mean as unsigned Q5.3;
//     DIM is 32, 16 or 8 for branch 0, 1, 2;
//   * classifier: z_j = (sum_c (w[b][j][c] ? +p_c : -p_c)) >>> fc_shift[b],
//     a signed logit in Q.3 (a logit of 1.0 is 8). Each branch b has its own
//     weight set and shift, since each part was trained with its own head.
//     One class is computed per cycle.
// The pooling shift, the per-branch fc_shift scale and the absence of a bias
// are this design's choices.
//
// Interface: pixel words arrive on a valid/ready stream (in_last on the last
// word). After n_classes+2 cycles `done` pulses and the logits stay valid on
// `z` until `release` is pulsed, and only then is the next map accepted.
// Configuration (cfg_addr[19:18]): 0 = weight chunk, branch cfg_addr[17:16],
// class cfg_addr[15:8], channels 32*cfg_addr[0] .. +31 (bit c = weight of
// channel c, 1 = +1); 1 = fc_shift of branch cfg_addr[1:0].
module pool_fc
  import ahcnn_pkg::*;
#(
  parameter int unsigned NUM_CLASSES = MAX_CLASSES,
  parameter int unsigned CH          = MAX_CH
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic [1:0]          branch,      // active part, stable during a map
  input  logic [6:0]          n_classes,   // classes in use (<= NUM_CLASSES)
  input  logic                in_valid,
  output logic                in_ready,
  input  logic [FM_W-1:0]     in_data,
  input  logic                in_last,
  output logic                done,
  output logic signed [Z_W-1:0] z [NUM_CLASSES],
  input  logic                release_i,
  input  logic                cfg_we,
  input  logic [19:0]         cfg_addr,
  input  logic [CFG_DW-1:0]   cfg_wdata
);

  localparam int unsigned SUM_W = 16;   // 1024 * 31 < 2^16

  logic [CH-1:0]       fc_w [NUM_BRANCH][NUM_CLASSES];
  logic [3:0]          fc_shift [NUM_BRANCH];
  logic [SUM_W-1:0]    sum  [CH];
  logic [POOL_W-1:0]   pool [CH];
  logic [6:0]          j;

  typedef enum logic [1:0] {P_ACC, P_POOL, P_FC, P_HOLD} state_e;
  state_e state;

  assign in_ready = (state == P_ACC);

  // pooling shift per branch: 2*log2(side) - 3
  logic [3:0] pshift;
  always_comb begin
    unique case (branch)
      2'd0:    pshift = 4'd7;   // 32 x 32
      2'd1:    pshift = 4'd5;   // 16 x 16
      default: pshift = 4'd3;   //  8 x  8
    endcase
  end

  // one class of the classifier
  logic signed [Z_W+1:0] zsum;
  logic [CH-1:0]         wrow;
  always_comb begin
    wrow = fc_w[branch][j];
    zsum = '0;
    for (int c = 0; c < CH; c++) begin
      if (wrow[c]) zsum = zsum + $signed({2'b00, Z_W'(pool[c])});
      else         zsum = zsum - $signed({2'b00, Z_W'(pool[c])});
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= P_ACC;
      j     <= '0;
      done  <= 1'b0;
      for (int c = 0; c < CH; c++) sum[c] <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        P_ACC: if (in_valid) begin
          for (int c = 0; c < CH; c++)
            sum[c] <= sum[c] + SUM_W'(in_data[c*ACT_W +: ACT_W]);
          if (in_last) state <= P_POOL;
        end
        P_POOL: begin
          for (int c = 0; c < CH; c++) begin
            pool[c] <= POOL_W'(sum[c] >> pshift);
            sum[c]  <= '0;
          end
          j     <= '0;
          state <= P_FC;
        end
        P_FC: begin
          z[j] <= Z_W'(zsum >>> fc_shift[branch]);
          if (j == n_classes - 1 || j == 7'(NUM_CLASSES - 1)) begin
            done  <= 1'b1;
            state <= P_HOLD;
          end else begin
            j <= j + 1'b1;
          end
        end
        P_HOLD: if (release_i) state <= P_ACC;
        default: state <= P_ACC;
      endcase
    end
  end

  // configuration
  always_ff @(posedge clk) begin
    if (cfg_we && cfg_addr[19:18] == 2'd0 && cfg_addr[17:16] < 2'(NUM_BRANCH)
        && cfg_addr[15:8] < 8'(NUM_CLASSES))
      fc_w[cfg_addr[17:16]][cfg_addr[15:8]][cfg_addr[0]*32 +: 32] <= cfg_wdata;
    if (cfg_we && cfg_addr[19:18] == 2'd1 && cfg_addr[1:0] < 2'(NUM_BRANCH))
      fc_shift[cfg_addr[1:0]] <= cfg_wdata[3:0];
  end

  // a map must not arrive while the logits are held
  a_no_overrun: assert property (@(posedge clk) disable iff (!rst_n)
                                 state == P_HOLD |-> !(in_valid && in_ready));

endmodule
