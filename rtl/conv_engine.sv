// conv_engine -- one 3x3 convolution layer with zero padding, stride 1 or 2,
// ReLU and requantisation to 5-bit activations.
//
// How it works: the engine walks the output feature map pixel by pixel and, for
// each output pixel, the nine kernel taps. Every cycle it fetches one input
// pixel (all IC channels in one word) and the weight word of the current tap
// (OC x IC weights) and adds IC products to each of the OC accumulators, so one
// output pixel takes 9 cycles and a whole layer DIM_OUT^2 * 9 + 2 cycles. Taps
// that fall outside the image read as zero (padding 1). After the ninth tap the
// accumulator is arithmetically shifted right by `shift`, clamped to [0, 31]
// and written to the destination buffer.
//
// With WW = 1 a weight bit 1 means +1 and 0 means -1 (binary layers, as in the
// paper); with WW > 1 the weight is a signed WW-bit integer (used for the first
// layer, which the paper does not mark as quantised). The tap-serial schedule,
// the shift/clamp requantisation and the memory word layouts are this design's
// choices: the paper gives the layer shapes, not the hardware inside its IP cores.
//
// Interface: `start` (one cycle, while idle) with the layer's runtime settings
// held stable until `done`. Memory read ports have one cycle latency: the data
// for src_addr/w_addr issued in cycle t must be on src_data/w_data in t+1.
// Layouts: channel c of a pixel word at [c*XW +: XW]; weight of (oc, ic) at
// [(oc*IC + ic)*WW +: WW]. Pixel (y, x) of an input of side 2^in_dim_log2 is at
// address (y << in_dim_log2) | x; output pixels are written in raster order.
module conv_engine
  import ahcnn_pkg::*;
#(
  parameter int unsigned IC    = 16,   // input channels
  parameter int unsigned OC    = 16,   // output channels
  parameter int unsigned XW    = 5,    // input activation bits (unsigned)
  parameter int unsigned WW    = 1,    // weight bits (1 = binary +-1)
  parameter int unsigned ACC_W = 24,
  parameter int unsigned AW    = 10,   // address width of the buffers
  parameter int unsigned WAW   = 6     // weight memory address width
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  logic [3:0]           in_dim_log2,  // input side = 2^in_dim_log2
  input  logic                 stride2,      // 1: stride 2, output side halves
  input  logic [4:0]           shift,        // requantisation shift
  input  logic [WAW-1:0]       w_base,       // weight word of tap 0
  output logic                 busy,
  output logic                 done,
  // input feature map read port
  output logic                 src_en,
  output logic [AW-1:0]        src_addr,
  input  logic [IC*XW-1:0]     src_data,
  // weight read port
  output logic                 w_en,
  output logic [WAW-1:0]       w_addr,
  input  logic [OC*IC*WW-1:0]  w_data,
  // output feature map write port
  output logic                 dst_we,
  output logic [AW-1:0]        dst_addr,
  output logic [OC*ACT_W-1:0]  dst_data
);

  localparam int unsigned CW = AW / 2 + 1;   // coordinate width

  // ---- issue stage ---------------------------------------------------------
  logic          run;
  logic [CW-1:0] oy, ox, out_side;
  logic [1:0]    ky, kx;
  logic [3:0]    tap;
  logic [3:0]    out_log2;

  assign out_log2 = in_dim_log2 - {3'd0, stride2};
  assign out_side = CW'(1) << out_log2;

  // input coordinates of the current tap, one extra bit for the sign
  logic signed [CW+1:0] iy, ix, in_side;
  assign in_side = (CW+2)'(1) << in_dim_log2;
  assign iy = $signed({2'b00, stride2 ? (oy << 1) : oy}) + $signed({{CW{1'b0}}, ky}) - 1;
  assign ix = $signed({2'b00, stride2 ? (ox << 1) : ox}) + $signed({{CW{1'b0}}, kx}) - 1;

  logic pad;
  assign pad = (iy < 0) || (ix < 0) || (iy >= in_side) || (ix >= in_side);

  logic last_tap, last_pix;
  assign last_tap = (tap == 4'd8);
  assign last_pix = (ox == out_side - 1) && (oy == out_side - 1);

  assign src_en   = run && !pad;
  assign src_addr = AW'((AW'(iy[CW-1:0]) << in_dim_log2) | AW'(ix[CW-1:0]));
  assign w_en     = run;
  assign w_addr   = w_base + WAW'(tap);

  // pipeline register between issue and accumulate
  logic          p_valid, p_pad, p_first, p_last, p_final;
  logic [AW-1:0] p_oaddr;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run <= 1'b0;
      oy <= '0; ox <= '0; ky <= '0; kx <= '0; tap <= '0;
      p_valid <= 1'b0; p_pad <= 1'b0; p_first <= 1'b0; p_last <= 1'b0;
      p_final <= 1'b0; p_oaddr <= '0;
    end else begin
      p_valid <= run;
      p_pad   <= pad;
      p_first <= (tap == 4'd0);
      p_last  <= last_tap;
      p_final <= last_tap && last_pix;
      p_oaddr <= AW'((AW'(oy) << out_log2) | AW'(ox));
      if (start && !run && !busy) begin
        run <= 1'b1;
        oy <= '0; ox <= '0; ky <= '0; kx <= '0; tap <= '0;
      end else if (run) begin
        if (last_tap) begin
          tap <= '0; ky <= '0; kx <= '0;
          if (ox == out_side - 1) begin
            ox <= '0;
            if (oy == out_side - 1) begin
              oy  <= '0;
              run <= 1'b0;
            end else begin
              oy <= oy + 1'b1;
            end
          end else begin
            ox <= ox + 1'b1;
          end
        end else begin
          tap <= tap + 1'b1;
          if (kx == 2'd2) begin
            kx <= '0;
            ky <= ky + 1'b1;
          end else begin
            kx <= kx + 1'b1;
          end
        end
      end
    end
  end

  // ---- accumulate stage ------------------------------------------------------
  logic signed [ACC_W-1:0] acc     [OC];
  logic signed [ACC_W-1:0] acc_nxt [OC];

  always_comb begin
    logic signed [ACC_W-1:0] sum;
    logic signed [ACC_W-1:0] x;
    sum = '0;
    x   = '0;
    for (int o = 0; o < OC; o++) begin
      sum = p_first ? '0 : acc[o];
      for (int i = 0; i < IC; i++) begin
        x = p_pad ? '0 : $signed(ACC_W'(src_data[i*XW +: XW]));
        if (WW == 1) begin
          sum = w_data[(o*IC + i)*WW] ? sum + x : sum - x;
        end else begin
          sum = sum + x * ACC_W'($signed(w_data[(o*IC + i)*WW +: WW]));
        end
      end
      acc_nxt[o] = sum;
    end
  end

  always_ff @(posedge clk) begin
    if (p_valid) begin
      for (int o = 0; o < OC; o++) acc[o] <= acc_nxt[o];
    end
  end

  // requantise: arithmetic shift, ReLU, clamp to the 5-bit range
  always_comb begin
    logic signed [ACC_W-1:0] y;
    y = '0;
    for (int o = 0; o < OC; o++) begin
      y = acc_nxt[o] >>> shift;
      if (y < 0)                             dst_data[o*ACT_W +: ACT_W] = '0;
      else if (y > ACC_W'((1 << ACT_W) - 1)) dst_data[o*ACT_W +: ACT_W] = '1;
      else                                   dst_data[o*ACT_W +: ACT_W] = y[ACT_W-1:0];
    end
  end

  assign dst_we   = p_valid && p_last;
  assign dst_addr = p_oaddr;
  assign done     = p_valid && p_final;
  assign busy     = run || p_valid;

endmodule
