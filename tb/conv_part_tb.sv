// conv_part_tb -- checks conv_part in two small shapes:
//   A: like Part 1 -- an 8-bit-weight first layer on RGB pixels, then two
//      binary layers, 8x8 maps, 8 channels;
//   B: like Parts 2/3 -- a binary first layer with stride 2 whose input has
//      half the channels (4 of 8), then one binary layer, 8x8 -> 4x4.
// Weights and shifts are loaded through the configuration port, an image is
// streamed in, and every word of the streamed output map is compared with the
// reference model. The time from the last input word to the first output word
// must be N_LAYERS * (9 * DIM^2 + 2) + 1 cycles. The output side is throttled
// to exercise back-pressure.
module conv_part_tb;
  import ahcnn_pkg::*;
  import ahcnn_ref_pkg::*;

  localparam int CH = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic              in_valid [2], in_ready [2], out_valid [2], out_ready [2], out_last [2], busy [2];
  logic [FM_W-1:0]   in_data [2], out_data [2];
  logic              cfg_we [2];
  logic [19:0]       cfg_addr;
  logic [31:0]       cfg_wdata;

  conv_part #(.N_LAYERS(3), .IMG_IN(1'b1), .IN_CH(3), .CH(CH), .IN_DIM(8), .FIRST_STRIDE2(1'b0)) dut_a (
    .clk, .rst_n, .in_valid(in_valid[0]), .in_ready(in_ready[0]), .in_data(in_data[0]),
    .out_valid(out_valid[0]), .out_ready(out_ready[0]), .out_data(out_data[0]), .out_last(out_last[0]),
    .cfg_we(cfg_we[0]), .cfg_addr, .cfg_wdata, .busy(busy[0]));
  conv_part #(.N_LAYERS(2), .IMG_IN(1'b0), .IN_CH(4), .CH(CH), .IN_DIM(8), .FIRST_STRIDE2(1'b1)) dut_b (
    .clk, .rst_n, .in_valid(in_valid[1]), .in_ready(in_ready[1]), .in_data(in_data[1]),
    .out_valid(out_valid[1]), .out_ready(out_ready[1]), .out_data(out_data[1]), .out_last(out_last[1]),
    .cfg_we(cfg_we[1]), .cfg_addr, .cfg_wdata, .busy(busy[1]));

  task automatic cfg(input int d, input logic [19:0] a, input logic [31:0] v);
    @(negedge clk);
    cfg_we[d] = 1; cfg_addr = a; cfg_wdata = v;
    @(negedge clk);
    cfg_we[d] = 0;
  endtask

  // random binary weights of layer l (word 9*l + tap), ic inputs used by reference
  task automatic load_binary(input int d, input int l, input int ic);
    for (int t = 0; t < 9; t++) begin
      logic [CH*CH-1:0] word;
      for (int o = 0; o < CH; o++)
        for (int i = 0; i < CH; i++) begin
          word[o*CH + i] = 1'($urandom);
          if (i < ic) ref_w[o][i][t] = word[o*CH + i] ? 1 : -1;
        end
      for (int k = 0; k < CH*CH/32; k++) cfg(d, {2'(PCFG_WQ), 10'(9*l + t), 8'(k)}, word[k*32 +: 32]);
    end
  endtask

  // stream the map in ref_in (ich channels of xw bits, side dim), time the
  // compute, and compare the output with ref_out (side odim)
  task automatic run(input int d, input int ich, input int xw, input int dim, input int odim,
                     input int nl);
    int cyc, n;
    for (int p = 0; p < dim*dim; p++) begin
      @(negedge clk);
      in_valid[d] = 1;
      in_data[d]  = '0;
      for (int c = 0; c < ich; c++) in_data[d][c*xw +: 8] = 8'(ref_in[c][p/dim][p%dim]);
      @(posedge clk);
      while (!in_ready[d]) @(posedge clk);
    end
    @(negedge clk) in_valid[d] = 0;
    cyc = 0;
    while (!out_valid[d]) begin @(negedge clk); cyc++; end
    checks++;
    if (cyc != nl * (9*odim*odim + 2) + 1) begin
      failures++;
      $display("FAIL latency %0d, expected %0d", cyc, nl * (9*odim*odim + 2) + 1);
    end
    n = 0;
    while (n < odim*odim) begin
      @(negedge clk);
      out_ready[d] = 1'($urandom);
      @(posedge clk);
      if (out_valid[d] && out_ready[d]) begin
        for (int c = 0; c < CH; c++) begin
          checks++;
          if (int'(out_data[d][c*5 +: 5]) != ref_out[c][n/odim][n%odim]) begin
            failures++;
            if (failures < 10) $display("FAIL part %0d word %0d ch %0d: %0d exp %0d", d, n, c,
                                        out_data[d][c*5 +: 5], ref_out[c][n/odim][n%odim]);
          end
        end
        checks++;
        if (out_last[d] != (n == odim*odim - 1)) failures++;
        n++;
      end
    end
    @(negedge clk) out_ready[d] = 0;
  endtask

  int img [3][8][8];
  initial begin
    for (int d = 0; d < 2; d++) begin
      in_valid[d] = 0; out_ready[d] = 0; cfg_we[d] = 0; in_data[d] = '0;
    end
    cfg_addr = '0; cfg_wdata = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;

    // ---------------- A: Conv1 + 2 binary layers ----------------
    cfg(0, {2'(PCFG_SHIFT), 14'd0, 4'd0}, 32'd10);
    cfg(0, {2'(PCFG_SHIFT), 14'd0, 4'd1}, 32'd3);
    cfg(0, {2'(PCFG_SHIFT), 14'd0, 4'd2}, 32'd3);
    for (int t = 0; t < 9; t++) begin
      logic [CH*3*8-1:0] word;
      for (int o = 0; o < CH; o++)
        for (int i = 0; i < 3; i++) begin
          int w = $urandom_range(0, 255) - 128;
          word[(o*3 + i)*8 +: 8] = 8'(w);
          ref_w[o][i][t] = w;
        end
      for (int k = 0; k < CH*3*8/32; k++) cfg(0, {2'(PCFG_W1), 10'(t), 8'(k)}, word[k*32 +: 32]);
    end
    for (int c = 0; c < 3; c++)
      for (int y = 0; y < 8; y++)
        for (int x = 0; x < 8; x++) begin img[c][y][x] = $urandom_range(0, 255); ref_in[c][y][x] = img[c][y][x]; end
    ref_conv(3, CH, 8, 1, 10);
    ref_out_to_in(CH, 8);
    load_binary(0, 0, CH); ref_conv(CH, CH, 8, 1, 3); ref_out_to_in(CH, 8);
    load_binary(0, 1, CH); ref_conv(CH, CH, 8, 1, 3);
    for (int c = 0; c < 3; c++)
      for (int y = 0; y < 8; y++)
        for (int x = 0; x < 8; x++) ref_in[c][y][x] = img[c][y][x];
    run(0, 3, 8, 8, 8, 3);

    // ---------------- B: stride-2 binary layer + binary layer ----------------
    cfg(1, {2'(PCFG_SHIFT), 14'd0, 4'd0}, 32'd2);
    cfg(1, {2'(PCFG_SHIFT), 14'd0, 4'd1}, 32'd3);
    for (int c = 0; c < 4; c++)
      for (int y = 0; y < 8; y++)
        for (int x = 0; x < 8; x++) begin img[c%3][y][x] = 0; ref_in[c][y][x] = $urandom_range(0, 31); end
    begin
      int keep [4][8][8];
      for (int c = 0; c < 4; c++) for (int y = 0; y < 8; y++) for (int x = 0; x < 8; x++) keep[c][y][x] = ref_in[c][y][x];
      load_binary(1, 0, 4); ref_conv(4, CH, 8, 2, 2); ref_out_to_in(CH, 4);
      load_binary(1, 1, CH); ref_conv(CH, CH, 4, 1, 3);
      for (int c = 0; c < 4; c++) for (int y = 0; y < 8; y++) for (int x = 0; x < 8; x++) ref_in[c][y][x] = keep[c][y][x];
      run(1, 4, 5, 8, 4, 2);
      // a second image through the same part
      for (int c = 0; c < 4; c++) for (int y = 0; y < 8; y++) for (int x = 0; x < 8; x++) begin
        keep[c][y][x] = $urandom_range(0, 31); ref_in[c][y][x] = keep[c][y][x];
      end
      // new weights too (the reference keeps one layer's weights at a time)
      load_binary(1, 0, 4); ref_conv(4, CH, 8, 2, 2); ref_out_to_in(CH, 4);
      load_binary(1, 1, CH); ref_conv(CH, CH, 4, 1, 3);
      for (int c = 0; c < 4; c++) for (int y = 0; y < 8; y++) for (int x = 0; x < 8; x++) ref_in[c][y][x] = keep[c][y][x];
      run(1, 4, 5, 8, 4, 2);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
