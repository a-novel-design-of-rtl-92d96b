// ahcnn_top_tb -- end-to-end test of the accelerator at its full size (no
// parameter overrides): a batch of images goes through the adaptive
// three-branch inference the way the host drives it.
//
//   pass 1: reconfigure the region with Part 1, classify every image, keep the
//           Part 1 output maps streamed back on m_*;
//   pass 2: reconfigure with Part 2, run it on the kept maps of the images the
//           decision layer sent deeper, keep their Part 2 maps;
//   pass 3: reconfigure with Part 3 and finish the remaining images.
// Reconfiguration is modelled as: decouple, wait, rewrite the part's weights
// (the bitstream contents), select the part, release.
//
// The testbench computes the whole network with the reference model first and
// places the trigger points between the reference confidences so that some
// images stop at each branch; it marks the label of one confident image as
// high priority, with Theta just large enough to send it deeper. Checked per
// image: label, confidence (within 0.01), high-priority flag, decision (exactly,
// unless the reference confidence lies within 0.01 of the trigger point), every
// word of the kept maps, and that each part takes at most 200,000 cycles per
// image (2 ms at 100 MHz, the per-part execution time reported for the
// original). Counted mechanisms, each of which must occur: reconfiguration,
// early exit after Part 1 and after Part 2, deep activation from Part 1 and
// from Part 2, a decision changed by the high-priority boost, final results
// from Part 3 with no map kept, and back-pressure on the map stream.
module ahcnn_top_tb;
  import ahcnn_pkg::*;
  import ahcnn_ref_pkg::*;

  localparam int NIMG = 6;
  localparam int NCLS = 10;
  localparam int CFG_DELAY = 200;   // reconfiguration time, scaled down

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic              cfg_we = 0;
  logic [CFG_AW-1:0] cfg_addr = '0;
  logic [CFG_DW-1:0] cfg_wdata = '0;
  logic [1:0]        rm_select = 0;
  logic              rm_decouple = 1;
  logic              s_valid = 0, s_ready;
  logic [FM_W-1:0]   s_data = '0;
  logic              m_valid, m_ready = 0, m_last;
  logic [FM_W-1:0]   m_data;
  logic              res_valid, res_ready = 0, busy;
  result_t           res;

  ahcnn_top dut (.*);

  // ---- network parameters held by the host ----
  int  w1   [16][3][9];
  bit  wq   [3][4][64][64][9];       // [part][binary layer][oc][ic][tap]
  int  fcw  [3][NCLS][64];
  int  shifts [3][5] = '{'{11, 3, 3, 3, 3}, '{3, 4, 4, 4, 0}, '{4, 4, 4, 4, 0}};
  int  fc_sh  [3]    = '{1, 2, 4};
  int  nbin   [3]    = '{4, 4, 4};
  int  pch    [3]    = '{16, 32, 64};
  int  pdim   [3]    = '{32, 16, 8};
  int  pich   [3]    = '{3, 16, 32};
  int  pidim  [3]    = '{32, 32, 16};

  // ---- images, reference results, kept maps ----
  int  img  [NIMG][3][32][32];
  int  fm1  [NIMG][16][32][32];
  int  fm2  [NIMG][32][16][16];
  int  rlabel [NIMG][3];
  real rbeta  [NIMG][3];
  bit  rhp    [NIMG][3];
  logic [FM_W-1:0] dram [NIMG][1024];
  int  gamma [2];
  int  theta;
  bit  [127:0] hpm;
  int  topn = 1;

  int n_reconf = 0, n_exit [3] = '{0, 0, 0}, n_deep [2] = '{0, 0}, n_boost = 0;
  int n_final3 = 0, n_stall = 0, n_m3 = 0;

  always @(posedge clk) if (m_valid && !m_ready) n_stall++;

  task automatic cfg(input logic [23:0] a, input logic [31:0] v);
    @(negedge clk); cfg_we = 1; cfg_addr = a; cfg_wdata = v;
    @(negedge clk); cfg_we = 0;
  endtask

  // the contents of part p's bitstream
  task automatic write_part(input int p);
    int ch = pch[p];
    for (int l = 0; l < (p == 0 ? 5 : 4); l++) cfg({4'(p), 2'(PCFG_SHIFT), 14'd0, 4'(l)}, 32'(shifts[p][l]));
    if (p == 0)
      for (int t = 0; t < 9; t++) begin
        logic [16*3*8-1:0] word;
        for (int o = 0; o < 16; o++) for (int i = 0; i < 3; i++) word[(o*3 + i)*8 +: 8] = 8'(w1[o][i][t]);
        for (int k = 0; k < 12; k++) cfg({4'(p), 2'(PCFG_W1), 10'(t), 8'(k)}, word[k*32 +: 32]);
      end
    for (int l = 0; l < nbin[p]; l++)
      for (int t = 0; t < 9; t++) begin
        logic [4095:0] word;
        word = '0;
        for (int o = 0; o < ch; o++) for (int i = 0; i < ch; i++) word[o*ch + i] = wq[p][l][o][i][t];
        for (int k = 0; k < ch*ch/32; k++) cfg({4'(p), 2'(PCFG_WQ), 10'(9*l + t), 8'(k)}, word[k*32 +: 32]);
      end
  endtask

  task automatic reconfigure(input int p);
    @(negedge clk);
    rm_decouple = 1;
    repeat (CFG_DELAY) @(negedge clk);
    checks++;
    if (s_ready || m_valid) begin failures++; $display("FAIL region not isolated while decoupled"); end
    write_part(p);
    rm_select = 2'(p);
    @(negedge clk) rm_decouple = 0;
    n_reconf++;
  endtask

  // reference for part p of image i (input in ref_in), leaves the output in ref_in
  task automatic ref_part(input int p);
    int ch = pch[p], din = pidim[p];
    if (p == 0) begin
      for (int o = 0; o < 16; o++) for (int i = 0; i < 3; i++) for (int t = 0; t < 9; t++) ref_w[o][i][t] = w1[o][i][t];
      ref_conv(3, 16, 32, 1, shifts[0][0]);
      ref_out_to_in(16, 32);
    end
    for (int l = 0; l < nbin[p]; l++) begin
      int ic = (l == 0 && p != 0) ? pich[p] : ch;
      int s  = (l == 0 && p != 0) ? 2 : 1;
      int d  = (l == 0 && p != 0) ? din : pdim[p];
      for (int o = 0; o < ch; o++) for (int i = 0; i < ic; i++) for (int t = 0; t < 9; t++)
        ref_w[o][i][t] = wq[p][l][o][i][t] ? 1 : -1;
      ref_conv(ic, ch, d, s, shifts[p][p == 0 ? l + 1 : l]);
      ref_out_to_in(ch, pdim[p]);
    end
  endtask

  task automatic ref_head(input int i, input int p);
    int lb; real bt; bit hh;
    for (int j = 0; j < NCLS; j++) for (int c = 0; c < 64; c++) ref_fcw[j][c] = fcw[p][j][c];
    ref_pool_fc(pch[p], pdim[p], fc_sh[p], NCLS);
    ref_softmax(NCLS, hpm, topn, lb, bt, hh);
    rlabel[i][p] = lb; rbeta[i][p] = bt; rhp[i][p] = hh;
  endtask

  task automatic compute_refs();
    for (int i = 0; i < NIMG; i++) begin
      for (int c = 0; c < 3; c++) for (int y = 0; y < 32; y++) for (int x = 0; x < 32; x++) ref_in[c][y][x] = img[i][c][y][x];
      ref_part(0);
      for (int c = 0; c < 16; c++) for (int y = 0; y < 32; y++) for (int x = 0; x < 32; x++) fm1[i][c][y][x] = ref_in[c][y][x];
      ref_head(i, 0);
      ref_part(1);
      for (int c = 0; c < 32; c++) for (int y = 0; y < 16; y++) for (int x = 0; x < 16; x++) fm2[i][c][y][x] = ref_in[c][y][x];
      ref_head(i, 1);
      ref_part(2);
      ref_head(i, 2);
    end
  endtask

  // one image through the configured part p; returns the decision
  task automatic classify(input int i, input int p, output bit deep_o);
    int nin = (p == 1) ? 1024 : (p == 2 ? 256 : 1024);
    int nout = pdim[p] * pdim[p];
    int got = 0, cyc = 0;
    int g; bit expd, sure;
    fork
      begin : drive
        for (int w = 0; w < nin; w++) begin
          @(negedge clk);
          s_valid = 1;
          s_data = '0;
          if (p == 0) for (int c = 0; c < 3; c++) s_data[c*8 +: 8] = 8'(img[i][c][w/32][w%32]);
          else        s_data = dram[i][w];
          @(posedge clk);
          while (!s_ready) @(posedge clk);
        end
        @(negedge clk) s_valid = 0;
      end
      begin : keep
        while (!(res_valid)) begin
          @(negedge clk);
          m_ready = ($urandom_range(0, 3) != 0);
          cyc++;
          @(posedge clk);
          if (m_valid && m_ready) begin
            if (p < 2) begin
              dram[i][got] = m_data;
              // compare with the reference map
              for (int c = 0; c < pch[p]; c++) begin
                int r = (p == 0) ? fm1[i][c][got/32][got%32] : fm2[i][c][got/16][got%16];
                checks++;
                if (int'(m_data[c*5 +: 5]) != r) begin
                  failures++;
                  if (failures < 10) $display("FAIL img %0d part %0d word %0d ch %0d", i, p + 1, got, c);
                end
              end
              checks++;
              if (m_last != (got == nout - 1)) failures++;
            end else n_m3++;
            got++;
          end
        end
      end
    join
    @(negedge clk) m_ready = 0;
    checks++;
    if (p < 2 && got != nout) begin failures++; $display("FAIL %0d map words kept, expected %0d", got, nout); end
    checks++;
    if (cyc > 200000) begin failures++; $display("FAIL part %0d took %0d cycles", p + 1, cyc); end
    $display("image %0d part %0d: %0d cycles, label %0d beta %f (ref %0d %f) hp %0d deep %0d",
             i, p + 1, cyc, res.label, real'(res.beta) / 65536.0, rlabel[i][p], rbeta[i][p], res.hp_hit, res.deep);
    checks += 4;
    if (int'(res.label) != rlabel[i][p]) begin failures++; $display("FAIL label"); end
    if (res.hp_hit != rhp[i][p]) begin failures++; $display("FAIL hp_hit"); end
    if (int'(res.branch) != p) begin failures++; $display("FAIL branch"); end
    if ((real'(res.beta) / 65536.0 - rbeta[i][p]) > 0.01 || (rbeta[i][p] - real'(res.beta) / 65536.0) > 0.01) begin
      failures++; $display("FAIL beta");
    end
    if (p < 2) begin
      g = gamma[p] + (rhp[i][p] ? theta : 0);
      if (g > 65535) g = 65535;
      expd = (rbeta[i][p] * 65536.0 <= real'(g));
      sure = (rbeta[i][p] * 65536.0 - real'(g) > 700.0) || (real'(g) - rbeta[i][p] * 65536.0 > 700.0);
      if (sure) begin
        checks++;
        if (res.deep != expd) begin failures++; $display("FAIL decision"); end
      end
      if (res.deep && rhp[i][p] && rbeta[i][p] * 65536.0 > real'(gamma[p])) n_boost++;
    end else begin
      checks++;
      if (res.deep) begin failures++; $display("FAIL last branch asked for more"); end
    end
    deep_o = res.deep;
    @(negedge clk) res_ready = 1;
    @(negedge clk) res_ready = 0;
  endtask

  // trigger point between the k-th and (k+1)-th smallest of the given betas
  function automatic int split(real b [NIMG], int n, int k);
    real s [NIMG];
    for (int i = 0; i < n; i++) s[i] = b[i];
    for (int i = 0; i < n; i++) for (int j = i + 1; j < n; j++) if (s[j] < s[i]) begin real t = s[i]; s[i] = s[j]; s[j] = t; end
    return int'((s[k-1] + s[k]) / 2.0 * 65536.0);
  endfunction

  int list [NIMG], nlist, next [NIMG], nnext;
  initial begin
    real b0 [NIMG], b1 [NIMG];
    int kb;
    bit d;
    // random network and images
    for (int o = 0; o < 16; o++) for (int i = 0; i < 3; i++) for (int t = 0; t < 9; t++) w1[o][i][t] = $urandom_range(0, 255) - 128;
    for (int p = 0; p < 3; p++) for (int l = 0; l < 4; l++) for (int o = 0; o < 64; o++) for (int i = 0; i < 64; i++)
      for (int t = 0; t < 9; t++) wq[p][l][o][i][t] = 1'($urandom);
    for (int p = 0; p < 3; p++) for (int j = 0; j < NCLS; j++) for (int c = 0; c < 64; c++) fcw[p][j][c] = $urandom_range(0, 1) ? 1 : -1;
    // each image gets its own colour balance and a bright square, so that the
    // pooled features differ between images
    for (int i = 0; i < NIMG; i++) for (int c = 0; c < 3; c++) begin
      int base = (i * 67 + c * 101) % 230, sq = $urandom_range(0, 24);
      for (int y = 0; y < 32; y++) for (int x = 0; x < 32; x++)
        img[i][c][y][x] = (y >= sq && y < sq + 8 && x >= sq && x < sq + 8) ? 255 - base / 2
                                                                             : base + $urandom_range(0, 25);
    end
    hpm = '0;
    compute_refs();
    // trigger points: 4 of 6 go on from Part 1, 2 of those go on from Part 2
    for (int i = 0; i < NIMG; i++) begin b0[i] = rbeta[i][0]; b1[i] = rbeta[i][1]; end
    gamma[0] = split(b0, NIMG, 3);
    // high priority: the label of the least confident image stopping at Part 1;
    // Theta reaches halfway to the next confidence above it
    kb = -1;
    for (int i = 0; i < NIMG; i++)
      if (rbeta[i][0] * 65536.0 > real'(gamma[0]) && (kb < 0 || rbeta[i][0] < rbeta[kb][0])) kb = i;
    hpm[rlabel[kb][0]] = 1'b1;
    begin
      real nb = 1.0;
      for (int i = 0; i < NIMG; i++) if (rbeta[i][0] > rbeta[kb][0] && rbeta[i][0] < nb) nb = rbeta[i][0];
      theta = int'((rbeta[kb][0] + nb) / 2.0 * 65536.0) - gamma[0];
    end
    compute_refs();   // with the high-priority mask
    gamma[1] = split(b1, NIMG, 3);
    for (int i = 0; i < NIMG; i++) $display("ref image %0d: beta %f %f %f", i, rbeta[i][0], rbeta[i][1], rbeta[i][2]);

    repeat (3) @(negedge clk);
    rst_n = 1;
    // Part 4 and decision layer (static region)
    for (int p = 0; p < 3; p++) begin
      cfg({4'(CFG_FC), 2'd1, 16'd0, 2'(p)}, 32'(fc_sh[p]));
      for (int j = 0; j < NCLS; j++) begin
        logic [63:0] w;
        for (int c = 0; c < 64; c++) w[c] = (fcw[p][j][c] > 0);
        cfg({4'(CFG_FC), 2'd0, 2'(p), 8'(j), 7'd0, 1'b0}, w[31:0]);
        cfg({4'(CFG_FC), 2'd0, 2'(p), 8'(j), 7'd0, 1'b1}, w[63:32]);
      end
    end
    cfg({4'(CFG_GATE), 12'd0, 8'h00 | 8'd2}, 32'(gamma[0]));   // branch 0, Lambda 2
    cfg({4'(CFG_GATE), 12'd0, 8'h04 | 8'd2}, 32'(gamma[1]));   // branch 1, Lambda 2
    cfg({4'(CFG_GATE), 12'd0, 8'h08}, 32'(theta));
    cfg({4'(CFG_GATE), 12'd0, 8'h09}, 32'd2);
    cfg({4'(CFG_GATE), 12'd0, 8'h0A}, 32'(topn));
    cfg({4'(CFG_GATE), 12'd0, 8'h0B}, 32'(NCLS));
    for (int k = 0; k < 4; k++) cfg({4'(CFG_GATE), 12'd0, 8'h10 | 8'(k)}, hpm[k*32 +: 32]);

    nlist = NIMG;
    for (int i = 0; i < NIMG; i++) list[i] = i;
    for (int p = 0; p < 3; p++) begin
      reconfigure(p);
      nnext = 0;
      for (int k = 0; k < nlist; k++) begin
        classify(list[k], p, d);
        if (d) begin next[nnext] = list[k]; nnext++; if (p < 2) n_deep[p]++; end
        else n_exit[p]++;
        if (p == 2) n_final3++;
      end
      nlist = nnext;
      list = next;
    end

    $display("mechanisms: reconfigurations %0d, exits %0d/%0d/%0d, deep from part1 %0d part2 %0d, hp boosts %0d, part3 results %0d, stalls %0d",
             n_reconf, n_exit[0], n_exit[1], n_exit[2], n_deep[0], n_deep[1], n_boost, n_final3, n_stall);
    checks++; if (n_reconf < 3) failures++;
    checks++; if (n_exit[0] == 0 || n_exit[1] == 0) begin failures++; $display("FAIL no early exit"); end
    checks++; if (n_deep[0] == 0 || n_deep[1] == 0) begin failures++; $display("FAIL no deep activation"); end
    checks++; if (n_boost == 0) begin failures++; $display("FAIL high-priority boost never decided"); end
    checks++; if (n_final3 == 0) begin failures++; $display("FAIL nothing reached Part 3"); end
    checks++; if (n_m3 != 0) begin failures++; $display("FAIL Part 3 map was streamed out"); end
    checks++; if (n_stall == 0) begin failures++; $display("FAIL no back-pressure"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
