// confidence_unit -- turns the logits of one branch into the three facts the
// decision layer needs: the predicted label (argmax), the confidence
// beta = max_j softmax(z)_j = 1 / sum_k exp(z_k - z_max), and whether any
// high-priority class is among the top-n classes.
//
// The paper defines the confidence as the softmax of the classifier output and
// the top-n test on the high-priority set; how they are computed is this
// design's own, sequential and small:
//   1. MAX  (n cycles): z_max and its index, the lowest index on ties.
//   2. SUM  (n cycles): for each class, d = z_max - z_k (Q.3), exponent
//      t = d * log2(e) rounded to 1/32, exp(-d) = 2^-frac(t) >> int(t) with
//      2^-frac from a 32-entry table, round(65536 * 2^(-f/32)); the terms add
//      up in Q.16. In the same cycle all n logits are compared with z_k to get
//      its rank; a class of the high-priority mask with rank < top_n sets hp_hit.
//   3. DIV  (17 cycles): beta = floor(2^32 / S), restoring division, clamped to
//      0xFFFF (beta is unsigned Q0.16).
// The table limits the error of each exp term to about 1%; beta is within
// about 0.01 of the exact value.
//
// Interface: `start` for one cycle with z, n_classes, hp_mask and top_n stable
// until `done`, which pulses once with the results, 2*n + 19 cycles later.
module confidence_unit
  import ahcnn_pkg::*;
#(
  parameter int unsigned NUM_CLASSES = MAX_CLASSES
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  start,
  input  logic signed [Z_W-1:0] z [NUM_CLASSES],
  input  logic [6:0]            n_classes,
  input  logic [NUM_CLASSES-1:0] hp_mask,
  input  logic [6:0]            top_n,
  output logic                  done,
  output logic [6:0]            label,
  output logic [BETA_W-1:0]     beta,
  output logic                  hp_hit
);

  localparam logic [15:0] EXP2_LUT [32] = '{
    16'd65535, 16'd64132, 16'd62757, 16'd61413, 16'd60097, 16'd58809, 16'd57549, 16'd56316,
    16'd55109, 16'd53928, 16'd52773, 16'd51642, 16'd50535, 16'd49452, 16'd48393, 16'd47356,
    16'd46341, 16'd45348, 16'd44376, 16'd43425, 16'd42495, 16'd41584, 16'd40693, 16'd39821,
    16'd38968, 16'd38133, 16'd37316, 16'd36516, 16'd35734, 16'd34968, 16'd34219, 16'd33486};
  localparam logic [8:0] LOG2E_Q8 = 9'd369;   // log2(e) = 1.4427 ~ 369/256

  typedef enum logic [2:0] {C_IDLE, C_MAX, C_SUM, C_DIV, C_DONE} state_e;
  state_e state;

  logic [6:0]            k;
  logic signed [Z_W-1:0] zmax;
  logic [23:0]           s;        // sum of exp terms, Q.16
  logic [40:0]           rem;
  logic [16:0]           q;
  logic [4:0]            bitpos;

  // ---- exp term of class k ---------------------------------------------------
  logic [Z_W:0]   d;
  logic [Z_W+9:0] t;          // Q.11
  logic [Z_W+4:0] tr;         // Q.5, rounded
  logic [16:0]    term;
  always_comb begin
    d  = (Z_W+1)'($signed({zmax[Z_W-1], zmax}) - $signed({z[k][Z_W-1], z[k]}));
    t  = (Z_W+10)'(d) * (Z_W+10)'(LOG2E_Q8);
    tr = (Z_W+5)'((t + (Z_W+10)'(32)) >> 6);
    if (tr[Z_W+4:5] > (Z_W)'(16)) term = '0;
    else if (tr == '0)            term = 17'd65536;   // exp(0) = 1 exactly
    else                          term = 17'(EXP2_LUT[tr[4:0]]) >> tr[Z_W+4:5];
  end

  // ---- rank of class k among the classes in use ----------------------------
  logic [6:0] rank;
  always_comb begin
    rank = '0;
    for (int i = 0; i < NUM_CLASSES; i++) begin
      if (7'(i) < n_classes && 7'(i) != k &&
          (z[i] > z[k] || (z[i] == z[k] && 7'(i) < k)))
        rank = rank + 1'b1;
    end
  end

  logic [40:0] dsh;
  assign dsh = 41'(s) << bitpos;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= C_IDLE;
      k <= '0; zmax <= '0; label <= '0; s <= '0; hp_hit <= 1'b0;
      rem <= '0; q <= '0; bitpos <= '0; beta <= '0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        C_IDLE: if (start) begin
          k      <= '0;
          zmax   <= z[0];
          label  <= '0;
          hp_hit <= 1'b0;
          state  <= C_MAX;
        end
        C_MAX: begin
          if (z[k] > zmax) begin
            zmax  <= z[k];
            label <= k;
          end
          if (k == n_classes - 1) begin
            k     <= '0;
            s     <= '0;
            state <= C_SUM;
          end else k <= k + 1'b1;
        end
        C_SUM: begin
          s <= s + 24'(term);
          if (hp_mask[k] && rank < top_n) hp_hit <= 1'b1;
          if (k == n_classes - 1) begin
            rem    <= 41'(1) << 32;
            q      <= '0;
            bitpos <= 5'd16;
            state  <= C_DIV;
          end else k <= k + 1'b1;
        end
        C_DIV: begin
          if (dsh <= rem) begin
            rem       <= rem - dsh;
            q[bitpos] <= 1'b1;
          end
          if (bitpos == 0) state <= C_DONE;
          else bitpos <= bitpos - 1'b1;
        end
        C_DONE: begin
          beta  <= q[16] ? 16'hFFFF : q[15:0];
          done  <= 1'b1;
          state <= C_IDLE;
        end
        default: state <= C_IDLE;
      endcase
    end
  end

endmodule
