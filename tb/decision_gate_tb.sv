// decision_gate_tb -- programs the trigger-point table, Theta and the
// settings registers, then applies random (branch, Lambda, beta, hp_hit)
// combinations plus the edge cases beta == Gamma, beta == Gamma + Theta and a
// saturating Gamma + Theta. `deep` must equal (branch < 2 && beta <= Gamma),
// with Gamma = table[branch][Lambda] (+ Theta if hp_hit), one cycle after
// `valid`.
module decision_gate_tb;
  import ahcnn_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic valid = 0, hp_hit = 0, out_valid, deep, cfg_we = 0;
  logic [1:0] branch = 0;
  logic [15:0] beta = 0, gamma_used;
  logic [6:0] n_classes, top_n;
  logic [99:0] hp_mask;
  logic [7:0] cfg_addr = 0;
  logic [31:0] cfg_wdata = 0;
  int gtab [2][4];
  int theta;
  int n_boost = 0, n_deep = 0, n_exit = 0;

  decision_gate dut (.clk, .rst_n, .valid, .branch, .beta, .hp_hit, .out_valid, .deep,
                     .gamma_used, .n_classes, .top_n, .hp_mask, .cfg_we, .cfg_addr, .cfg_wdata);

  task automatic cfg(input logic [7:0] a, input logic [31:0] v);
    @(negedge clk); cfg_we = 1; cfg_addr = a; cfg_wdata = v;
    @(negedge clk); cfg_we = 0;
  endtask

  task automatic set_lambda(input int l);
    cfg(8'h09, 32'(l));
  endtask

  task automatic one(input int b, input int l, input int bt, input bit hp);
    int g; bit exp_deep;
    g = gtab[b % 2][l] + (hp ? theta : 0);
    if (g > 65535) g = 65535;
    exp_deep = (b < 2) && (bt <= g);
    @(negedge clk);
    valid = 1; branch = 2'(b); beta = 16'(bt); hp_hit = hp;
    @(negedge clk);
    valid = 0;
    checks += 3;
    if (!out_valid) begin failures++; $display("FAIL no out_valid"); end
    if (deep != exp_deep) begin
      failures++; $display("FAIL b=%0d l=%0d beta=%0d hp=%0d: deep=%0d", b, l, bt, hp, deep);
    end
    if (b < 2 && int'(gamma_used) != g) begin failures++; $display("FAIL gamma %0d exp %0d", gamma_used, g); end
    if (exp_deep) n_deep++; else n_exit++;
    if (hp && exp_deep && bt > gtab[b % 2][l]) n_boost++;
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    // reset values of the settings
    checks += 2;
    if (top_n != 7'd5 || n_classes != 7'd10) failures++;
    if (hp_mask != '0) failures++;
    for (int b = 0; b < 2; b++)
      for (int l = 0; l < 4; l++) begin
        gtab[b][l] = $urandom_range(10000, 60000);
        cfg(8'({b[0], l[1:0]}), 32'(gtab[b][l]));
      end
    theta = 6000;
    cfg(8'h08, 32'(theta));
    cfg(8'h0A, 32'd7);
    cfg(8'h0B, 32'd100);
    cfg(8'h10, 32'hDEADBEEF);
    cfg(8'h13, 32'h0000000F);
    checks += 3;
    if (top_n != 7'd7 || n_classes != 7'd100) failures++;
    if (hp_mask[31:0] != 32'hDEADBEEF) failures++;
    if (hp_mask[99:96] != 4'hF) failures++;
    for (int l = 0; l < 4; l++) begin
      set_lambda(l);
      for (int i = 0; i < 30; i++) one($urandom_range(0, 2), l, $urandom_range(0, 65535), 1'($urandom));
      for (int b = 0; b < 2; b++) begin
        one(b, l, gtab[b][l], 0);               // equal: deep
        one(b, l, gtab[b][l] + 1, 0);           // just above: exit
        one(b, l, gtab[b][l] + theta, 1);       // boosted, equal: deep
        one(b, l, gtab[b][l] + theta + 1, 1);   // boosted, above: exit
      end
      one(2, l, 0, 1);                          // last branch never goes deeper
    end
    cfg(8'h08, 32'd65000);                      // Gamma + Theta saturates
    theta = 65000;
    set_lambda(3);
    one(0, 3, 65535, 1);
    checks++;
    if (n_boost == 0 || n_deep == 0 || n_exit == 0) begin failures++; $display("FAIL coverage"); end
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
