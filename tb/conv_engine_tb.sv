// conv_engine_tb -- checks conv_engine against the reference convolution on
// small maps: a binary-weight instance (4 -> 4 channels, 5-bit inputs) at
// stride 1 and stride 2, and an 8-bit-weight instance (3 -> 4 channels, 8-bit
// pixels) as used for the first layer. Random data and weights; every output
// pixel and channel is compared, and the layer time must be 9 cycles per
// output pixel plus one.
module conv_engine_tb;
  import ahcnn_pkg::*;
  import ahcnn_ref_pkg::*;

  localparam int IC = 4, OC = 4, AW = 6, WAW = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  // ---- binary instance ----
  logic b_start = 0, b_busy, b_done, b_src_en, b_w_en, b_we;
  logic [3:0] b_log2 = 3; logic b_s2 = 0; logic [4:0] b_shift = 2;
  logic [AW-1:0] b_src_addr, b_dst_addr; logic [WAW-1:0] b_w_addr;
  logic [IC*5-1:0] b_src_data; logic [OC*IC-1:0] b_w_data; logic [OC*5-1:0] b_dst_data;
  logic [IC*5-1:0] b_src [64]; logic [OC*IC-1:0] b_wm [9]; logic [OC*5-1:0] b_dst [64];

  conv_engine #(.IC(IC), .OC(OC), .XW(5), .WW(1), .ACC_W(16), .AW(AW), .WAW(WAW)) dut_b (
    .clk, .rst_n, .start(b_start), .in_dim_log2(b_log2), .stride2(b_s2), .shift(b_shift),
    .w_base('0), .busy(b_busy), .done(b_done), .src_en(b_src_en), .src_addr(b_src_addr),
    .src_data(b_src_data), .w_en(b_w_en), .w_addr(b_w_addr), .w_data(b_w_data),
    .dst_we(b_we), .dst_addr(b_dst_addr), .dst_data(b_dst_data));
  always_ff @(posedge clk) begin
    if (b_src_en) b_src_data <= b_src[b_src_addr];
    if (b_w_en)   b_w_data   <= b_wm[b_w_addr];
    if (b_we)     b_dst[b_dst_addr] <= b_dst_data;
  end

  // ---- 8-bit instance ----
  logic i_start = 0, i_busy, i_done, i_src_en, i_w_en, i_we;
  logic [AW-1:0] i_src_addr, i_dst_addr; logic [WAW-1:0] i_w_addr;
  logic [3*8-1:0] i_src_data; logic [OC*3*8-1:0] i_w_data; logic [OC*5-1:0] i_dst_data;
  logic [3*8-1:0] i_src [64]; logic [OC*3*8-1:0] i_wm [9]; logic [OC*5-1:0] i_dst [64];

  conv_engine #(.IC(3), .OC(OC), .XW(8), .WW(8), .ACC_W(24), .AW(AW), .WAW(WAW)) dut_i (
    .clk, .rst_n, .start(i_start), .in_dim_log2(4'd3), .stride2(1'b0), .shift(5'd10),
    .w_base('0), .busy(i_busy), .done(i_done), .src_en(i_src_en), .src_addr(i_src_addr),
    .src_data(i_src_data), .w_en(i_w_en), .w_addr(i_w_addr), .w_data(i_w_data),
    .dst_we(i_we), .dst_addr(i_dst_addr), .dst_data(i_dst_data));
  always_ff @(posedge clk) begin
    if (i_src_en) i_src_data <= i_src[i_src_addr];
    if (i_w_en)   i_w_data   <= i_wm[i_w_addr];
    if (i_we)     i_dst[i_dst_addr] <= i_dst_data;
  end

  task automatic run_binary(input int stride);
    int dout, cyc;
    for (int p = 0; p < 64; p++)
      for (int c = 0; c < IC; c++) begin
        int v = $urandom_range(0, 31);
        b_src[p][c*5 +: 5] = 5'(v);
        ref_in[c][p / 8][p % 8] = v;
      end
    for (int t = 0; t < 9; t++)
      for (int o = 0; o < OC; o++)
        for (int i = 0; i < IC; i++) begin
          bit w = 1'($urandom);
          b_wm[t][o*IC + i] = w;
          ref_w[o][i][t] = w ? 1 : -1;
        end
    b_s2 = (stride == 2);
    ref_conv(IC, OC, 8, stride, 2);
    dout = 8 / stride;
    @(negedge clk) b_start = 1;
    @(negedge clk) b_start = 0;
    cyc = 1;
    while (!b_done) begin @(negedge clk); cyc++; end
    checks++;
    if (cyc != dout * dout * 9 + 1) begin
      failures++; $display("FAIL binary stride %0d: %0d cycles, expected %0d", stride, cyc, dout*dout*9+1);
    end
    @(negedge clk);
    for (int y = 0; y < dout; y++)
      for (int x = 0; x < dout; x++)
        for (int o = 0; o < OC; o++) begin
          int got = int'(b_dst[y*dout + x][o*5 +: 5]);
          checks++;
          if (got != ref_out[o][y][x]) begin
            failures++;
            if (failures < 10) $display("FAIL binary s%0d (%0d,%0d) oc %0d: %0d exp %0d", stride, y, x, o, got, ref_out[o][y][x]);
          end
        end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    run_binary(1);
    run_binary(2);
    run_binary(1);
    // 8-bit first-layer instance
    for (int p = 0; p < 64; p++)
      for (int c = 0; c < 3; c++) begin
        int v = $urandom_range(0, 255);
        i_src[p][c*8 +: 8] = 8'(v);
        ref_in[c][p / 8][p % 8] = v;
      end
    for (int t = 0; t < 9; t++)
      for (int o = 0; o < OC; o++)
        for (int i = 0; i < 3; i++) begin
          int w = $urandom_range(0, 255) - 128;
          i_wm[t][(o*3 + i)*8 +: 8] = 8'(w);
          ref_w[o][i][t] = w;
        end
    ref_conv(3, OC, 8, 1, 10);
    @(negedge clk) i_start = 1;
    @(negedge clk) i_start = 0;
    while (!i_done) @(negedge clk);
    @(negedge clk);
    for (int p = 0; p < 64; p++)
      for (int o = 0; o < OC; o++) begin
        checks++;
        if (int'(i_dst[p][o*5 +: 5]) != ref_out[o][p/8][p%8]) begin
          failures++;
          if (failures < 10) $display("FAIL 8-bit pixel %0d oc %0d", p, o);
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
