// reconfig_region_tb -- checks the reconfigurable region at full size:
// while decoupled the region shows no handshake; with Part 3 selected an input
// map (16x16x32) gives the reference 8x8x64 output; after switching to Part 2
// (weights written to Part 2 only, while decoupled) a 32x32x16 map gives the
// reference 16x16x32 output, and Part 3's weights were not disturbed by the
// writes meant for Part 2 (Part 3 is run once more on its first input).
module reconfig_region_tb;
  import ahcnn_pkg::*;
  import ahcnn_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [1:0] rm_select = 2; logic rm_decouple = 1;
  logic in_valid = 0, in_ready, out_valid, out_ready = 1, out_last, cfg_we = 0, busy;
  logic [FM_W-1:0] in_data = '0, out_data;
  logic [CFG_AW-1:0] cfg_addr = '0;
  logic [CFG_DW-1:0] cfg_wdata = '0;

  reconfig_region dut (.*);

  bit wq [3][4][64][64][9];
  int in3 [32][16][16];
  int sh = 4;

  task automatic cfg(input logic [23:0] a, input logic [31:0] v);
    @(negedge clk); cfg_we = 1; cfg_addr = a; cfg_wdata = v;
    @(negedge clk); cfg_we = 0;
  endtask

  task automatic load(input int p, input int ch);
    for (int l = 0; l < 4; l++) begin
      cfg({4'(p), 2'(PCFG_SHIFT), 14'd0, 4'(l)}, 32'(sh));
      for (int t = 0; t < 9; t++) begin
        logic [4095:0] word;
        word = '0;
        for (int o = 0; o < ch; o++) for (int i = 0; i < ch; i++) begin
          wq[p][l][o][i][t] = 1'($urandom);
          word[o*ch + i] = wq[p][l][o][i][t];
        end
        for (int k = 0; k < ch*ch/32; k++) cfg({4'(p), 2'(PCFG_WQ), 10'(9*l + t), 8'(k)}, word[k*32 +: 32]);
      end
    end
  endtask

  // reference for a part with ich -> ch channels, input side din (in ref_in)
  task automatic ref_part(input int p, input int ich, input int ch, input int din);
    for (int l = 0; l < 4; l++) begin
      int ic = l == 0 ? ich : ch;
      for (int o = 0; o < ch; o++) for (int i = 0; i < ic; i++) for (int t = 0; t < 9; t++)
        ref_w[o][i][t] = wq[p][l][o][i][t] ? 1 : -1;
      ref_conv(ic, ch, l == 0 ? din : din / 2, l == 0 ? 2 : 1, sh);
      ref_out_to_in(ch, din / 2);
    end
  endtask

  task automatic run(input int ich, input int ch, input int din, input int src [64][32][32]);
    int n = 0, dout = din / 2;
    for (int w = 0; w < din*din; w++) begin
      @(negedge clk);
      in_valid = 1;
      in_data = '0;
      for (int c = 0; c < ich; c++) in_data[c*5 +: 5] = 5'(src[c][w/din][w%din]);
      @(posedge clk);
      while (!in_ready) @(posedge clk);
    end
    @(negedge clk) in_valid = 0;
    while (n < dout*dout) begin
      @(posedge clk);
      if (out_valid && out_ready) begin
        for (int c = 0; c < ch; c++) begin
          checks++;
          if (int'(out_data[c*5 +: 5]) != ref_in[c][n/dout][n%dout]) begin
            failures++;
            if (failures < 10) $display("FAIL word %0d ch %0d", n, c);
          end
        end
        n++;
      end
    end
  endtask

  int src [64][32][32];
  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    repeat (3) @(negedge clk);
    checks += 2;
    if (in_ready) begin failures++; $display("FAIL in_ready while decoupled"); end
    if (out_valid) failures++;
    load(2, 64);
    @(negedge clk) rm_decouple = 0;
    @(negedge clk);
    checks++;
    if (!in_ready) begin failures++; $display("FAIL Part 3 not ready"); end
    for (int c = 0; c < 32; c++) for (int y = 0; y < 16; y++) for (int x = 0; x < 16; x++) begin
      in3[c][y][x] = $urandom_range(0, 31); src[c][y][x] = in3[c][y][x]; ref_in[c][y][x] = in3[c][y][x];
    end
    ref_part(2, 32, 64, 16);
    run(32, 64, 16, src);
    // reconfigure to Part 2
    @(negedge clk) rm_decouple = 1;
    load(1, 32);
    rm_select = 1;
    @(negedge clk) rm_decouple = 0;
    for (int c = 0; c < 16; c++) for (int y = 0; y < 32; y++) for (int x = 0; x < 32; x++) begin
      src[c][y][x] = $urandom_range(0, 31); ref_in[c][y][x] = src[c][y][x];
    end
    ref_part(1, 16, 32, 32);
    run(16, 32, 32, src);
    // back to Part 3 without new weights
    @(negedge clk) rm_decouple = 1;
    rm_select = 2;
    repeat (5) @(negedge clk);
    rm_decouple = 0;
    for (int c = 0; c < 32; c++) for (int y = 0; y < 16; y++) for (int x = 0; x < 16; x++) begin
      src[c][y][x] = in3[c][y][x]; ref_in[c][y][x] = in3[c][y][x];
    end
    ref_part(2, 32, 64, 16);
    run(32, 64, 16, src);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
