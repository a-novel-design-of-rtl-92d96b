// conv_part -- one reconfigurable convolution part (Part 1, 2 or 3 of the
// network): the hardware that a partial bitstream places in the reconfigurable
// region.
//
// Part 1 = Conv1 (image, 3 -> 16 ch) + Q-Conv2..5 (16 -> 16), 32x32.
// Part 2 = Q-Conv6 (16 -> 32, stride 2, 32x32 -> 16x16) + Q-Conv7..9 (32 -> 32).
// Part 3 = Q-Conv10 (32 -> 64, stride 2, 16x16 -> 8x8) + Q-Conv11..13 (64 -> 64).
// The layer names, channel counts and feature-map sides are those printed in the
// network diagram; placing the down-sampling in the first layer of Parts 2 and 3
// with stride 2 is this design's reading of it (as in ResNet). Residual
// shortcuts are not drawn there and are not built.
//
// How it works: the part first accepts IN_DIM^2 input pixel words (raster
// order, all channels of a pixel in one word) into its input buffer. It then
// runs its layers one after the other on a conv_engine, ping-ponging between two
// feature buffers A and B: layer 0 reads the input buffer and writes A, layer 1
// reads A and writes B, and so on. Finally it streams the last feature map out,
// one pixel word per two cycles, marking the last word. Part 1 has a second,
// small engine with 8-bit weights for Conv1; Parts 2 and 3 feed their narrower
// input into the binary engine with the unused upper channels reading as zero.
//
// The weights and requantisation shifts stand for the contents of the part's
// bitstream: they are written through the configuration port (cfg_addr[19:18]:
// 0 = shift of layer cfg_addr[3:0], 1 = binary weight word cfg_addr[17:8] chunk
// cfg_addr[7:0], 2 = Conv1 weight word, same layout; 32 bits per chunk). Binary
// layer l (counted from the first binary layer) uses weight words 9*l .. 9*l+8,
// one per tap in raster order (ky, kx).
//
// Timing: streams use valid/ready; in_ready is high only while the part waits
// for an image. Compute takes N_LAYERS * (DIM^2 * 9 + ~4) cycles.
module conv_part
  import ahcnn_pkg::*;
#(
  parameter int unsigned N_LAYERS     = 5,   // conv layers in this part
  parameter bit          IMG_IN       = 1'b1,// first layer is Conv1 on RGB pixels
  parameter int unsigned IN_CH        = 3,   // channels of the part's input
  parameter int unsigned CH           = 16,  // channels of all its layers' outputs
  parameter int unsigned IN_DIM       = 32,  // side of the part's input map
  parameter bit          FIRST_STRIDE2= 1'b0 // first layer halves the side
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // input feature map / image stream
  input  logic                 in_valid,
  output logic                 in_ready,
  input  logic [FM_W-1:0]      in_data,
  // output feature map stream
  output logic                 out_valid,
  input  logic                 out_ready,
  output logic [FM_W-1:0]      out_data,
  output logic                 out_last,
  // configuration (bitstream contents)
  input  logic                 cfg_we,
  input  logic [19:0]          cfg_addr,
  input  logic [CFG_DW-1:0]    cfg_wdata,
  output logic                 busy
);

  localparam int unsigned IN_XW  = IMG_IN ? PIX_W : ACT_W;
  localparam int unsigned IN_BW  = IN_CH * IN_XW;
  localparam int unsigned DIM    = FIRST_STRIDE2 ? IN_DIM / 2 : IN_DIM;
  localparam int unsigned IN_N   = IN_DIM * IN_DIM;
  localparam int unsigned N      = DIM * DIM;
  localparam int unsigned AW     = $clog2(IN_N);
  localparam int unsigned NQ     = IMG_IN ? N_LAYERS - 1 : N_LAYERS; // binary layers
  localparam int unsigned WQ_W   = CH * CH;
  localparam int unsigned W1_W   = CH * IN_CH * PIX_W;
  localparam int unsigned WAW    = $clog2(NQ * 9 + 1);
  localparam int unsigned BW     = CH * ACT_W;
  localparam logic [3:0]  IN_LOG2 = 4'($clog2(IN_DIM));
  localparam logic [3:0]  LOG2   = 4'($clog2(DIM));

  // ---- memories ------------------------------------------------------------
  logic [IN_BW-1:0] in_buf [IN_N];
  logic [BW-1:0]    buf_a  [N];
  logic [BW-1:0]    buf_b  [N];
  logic [WQ_W-1:0]  wq_mem [NQ*9];
  logic [4:0]       shift_r [N_LAYERS];

  // ---- sequencer -------------------------------------------------------------
  typedef enum logic [2:0] {S_LOAD, S_START, S_RUN, S_OUT_RD, S_OUT_SHOW} state_e;
  state_e state;
  logic [3:0]    layer;
  logic [AW:0]   cnt;
  logic          eng_done, img_layer;

  assign img_layer = IMG_IN && (layer == 4'd0);
  // layer l writes A when l is even, B when odd; it reads B/A (or the input)
  logic dst_is_a, src_is_in;
  assign dst_is_a  = !layer[0];
  assign src_is_in = (layer == 4'd0);
  localparam bit FINAL_IN_A = ((N_LAYERS - 1) % 2) == 0;

  // ---- buffer ports --------------------------------------------------------------
  logic [IN_BW-1:0] in_rd;
  logic [BW-1:0]    a_rd, b_rd;
  logic             wr_en;
  logic [AW-1:0]    wr_addr;
  logic [BW-1:0]    wr_data;
  logic [AW-1:0]    rd_addr;
  logic             rd_en;

  // ---- binary engine ---------------------------------------------------------
  logic            q_start, q_busy, q_done, q_src_en, q_w_en, q_we;
  logic [AW-1:0]   q_src_addr, q_dst_addr;
  logic [BW-1:0]   q_src_data, q_dst_data;
  logic [WAW-1:0]  q_w_addr, q_w_base;
  logic [WQ_W-1:0] q_w_data;
  logic [3:0]      q_in_log2;
  logic            q_stride2;

  assign q_in_log2 = src_is_in ? IN_LOG2 : LOG2;
  assign q_stride2 = src_is_in && FIRST_STRIDE2;
  assign q_w_base  = WAW'(9 * (IMG_IN ? 32'(layer) - 1 : 32'(layer)));
  assign q_start   = (state == S_START) && !img_layer;

  conv_engine #(.IC(CH), .OC(CH), .XW(ACT_W), .WW(1), .ACC_W(16), .AW(AW), .WAW(WAW)) u_qeng (
    .clk, .rst_n, .start(q_start), .in_dim_log2(q_in_log2), .stride2(q_stride2),
    .shift(shift_r[layer]), .w_base(q_w_base), .busy(q_busy), .done(q_done),
    .src_en(q_src_en), .src_addr(q_src_addr), .src_data(q_src_data),
    .w_en(q_w_en), .w_addr(q_w_addr), .w_data(q_w_data),
    .dst_we(q_we), .dst_addr(q_dst_addr), .dst_data(q_dst_data));

  always_ff @(posedge clk) if (q_w_en) q_w_data <= wq_mem[q_w_addr];

  // ---- Conv1 engine (Part 1 only) ------------------------------------------------
  logic            i_we, i_done;
  logic [AW-1:0]   i_dst_addr;
  logic [BW-1:0]   i_dst_data;
  logic            i_src_en;
  logic [AW-1:0]   i_src_addr;

  if (IMG_IN) begin : g_img
    logic [W1_W-1:0] w1_mem [9];
    logic [W1_W-1:0] w1_data;
    logic            i_w_en, i_busy;
    logic [3:0]      i_w_addr;

    conv_engine #(.IC(IN_CH), .OC(CH), .XW(PIX_W), .WW(PIX_W), .ACC_W(24), .AW(AW), .WAW(4)) u_ieng (
      .clk, .rst_n, .start((state == S_START) && img_layer), .in_dim_log2(IN_LOG2),
      .stride2(1'b0), .shift(shift_r[0]), .w_base(4'd0), .busy(i_busy), .done(i_done),
      .src_en(i_src_en), .src_addr(i_src_addr), .src_data(in_rd),
      .w_en(i_w_en), .w_addr(i_w_addr), .w_data(w1_data),
      .dst_we(i_we), .dst_addr(i_dst_addr), .dst_data(i_dst_data));

    always_ff @(posedge clk) if (i_w_en) w1_data <= w1_mem[i_w_addr];
    always_ff @(posedge clk)
      if (cfg_we && cfg_addr[19:18] == PCFG_W1 && cfg_addr[17:8] < 10'd9)
        w1_mem[cfg_addr[11:8]][cfg_addr[7:0]*CFG_DW +: CFG_DW] <= cfg_wdata;
  end else begin : g_noimg
    assign i_we = 1'b0; assign i_done = 1'b0; assign i_dst_addr = '0;
    assign i_dst_data = '0; assign i_src_en = 1'b0; assign i_src_addr = '0;
  end

  assign eng_done = q_done || i_done;

  assign wr_en   = q_we || i_we;
  assign wr_addr = i_we ? i_dst_addr : q_dst_addr;
  assign wr_data = i_we ? i_dst_data : q_dst_data;
  assign rd_en   = q_src_en || i_src_en || (state == S_OUT_RD);
  assign rd_addr = (state == S_OUT_RD) ? AW'(cnt) : (i_src_en ? i_src_addr : q_src_addr);

  always_ff @(posedge clk) begin
    if (state == S_LOAD && in_valid && in_ready) in_buf[cnt[AW-1:0]] <= in_data[IN_BW-1:0];
    if (rd_en) begin
      in_rd <= in_buf[rd_addr];
      a_rd  <= buf_a[rd_addr[$clog2(N)-1:0]];
      b_rd  <= buf_b[rd_addr[$clog2(N)-1:0]];
    end
    if (wr_en &&  dst_is_a) buf_a[wr_addr[$clog2(N)-1:0]] <= wr_data;
    if (wr_en && !dst_is_a) buf_b[wr_addr[$clog2(N)-1:0]] <= wr_data;
  end

  // source of the binary engine: input buffer (zero-extended) or the other buffer
  always_comb begin
    q_src_data = '0;
    if (src_is_in)     q_src_data[IN_BW-1:0] = in_rd;
    else if (layer[0]) q_src_data = a_rd;
    else               q_src_data = b_rd;
  end

  // ---- configuration writes ------------------------------------------------------
  always_ff @(posedge clk) begin
    if (cfg_we && cfg_addr[19:18] == PCFG_WQ && cfg_addr[17:8] < 10'(NQ*9))
      wq_mem[cfg_addr[17:8]][cfg_addr[7:0]*CFG_DW +: CFG_DW] <= cfg_wdata;
  end
  // shifts are configuration like the weights: not reset, so that they can be
  // written while the region is decoupled and held in reset
  always_ff @(posedge clk) begin
    if (cfg_we && cfg_addr[19:18] == PCFG_SHIFT && cfg_addr[3:0] < 4'(N_LAYERS))
      shift_r[cfg_addr[3:0]] <= cfg_wdata[4:0];
  end

  // ---- sequencer -----------------------------------------------------------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_LOAD;
      layer <= '0;
      cnt   <= '0;
    end else begin
      unique case (state)
        S_LOAD: if (in_valid) begin
          if (cnt == (AW+1)'(IN_N - 1)) begin
            cnt   <= '0;
            layer <= '0;
            state <= S_START;
          end else begin
            cnt <= cnt + 1'b1;
          end
        end
        S_START: state <= S_RUN;
        S_RUN: if (eng_done) begin
          if (layer == 4'(N_LAYERS - 1)) begin
            cnt   <= '0;
            state <= S_OUT_RD;
          end else begin
            layer <= layer + 1'b1;
            state <= S_START;
          end
        end
        S_OUT_RD: state <= S_OUT_SHOW;
        S_OUT_SHOW: if (out_ready) begin
          if (cnt == (AW+1)'(N - 1)) begin
            cnt   <= '0;
            state <= S_LOAD;
          end else begin
            cnt   <= cnt + 1'b1;
            state <= S_OUT_RD;
          end
        end
        default: state <= S_LOAD;
      endcase
    end
  end

  assign in_ready  = (state == S_LOAD);
  assign out_valid = (state == S_OUT_SHOW);
  assign out_last  = (state == S_OUT_SHOW) && (cnt == (AW+1)'(N - 1));
  assign busy      = (state != S_LOAD);
  always_comb begin
    out_data = '0;
    out_data[BW-1:0] = FINAL_IN_A ? a_rd : b_rd;
  end

  // a word offered on the output stays until it is taken
  property p_out_stable;
    @(posedge clk) disable iff (!rst_n) out_valid && !out_ready |=> out_valid && $stable(out_data);
  endproperty
  a_out_stable: assert property (p_out_stable);

endmodule
