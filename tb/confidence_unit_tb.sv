// confidence_unit_tb -- random logit vectors (10, 37 and 100 classes, narrow
// and wide spreads, ties included) go through the confidence unit; the label
// and the high-priority top-n flag must match the reference exactly, the
// confidence must be within 0.01 of the exact max-softmax, and the result
// must come 2*n + 19 cycles after start.
module confidence_unit_tb;
  import ahcnn_pkg::*;
  import ahcnn_ref_pkg::*;

  localparam int NC = 100;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start = 0, done, hp_hit;
  logic signed [Z_W-1:0] z [NC];
  logic [6:0] n_classes = 10, top_n = 3, label;
  logic [NC-1:0] hp_mask = '0;
  logic [BETA_W-1:0] beta;

  confidence_unit #(.NUM_CLASSES(NC)) dut (
    .clk, .rst_n, .start, .z, .n_classes, .hp_mask, .top_n, .done, .label, .beta, .hp_hit);

  int n_hp = 0, n_low = 0;

  task automatic one(input int n, input int spread);
    int cyc, rl; real rb; bit rh; bit [127:0] hp;
    n_classes = 7'(n);
    top_n = 7'($urandom_range(1, 8));
    hp = '0;
    for (int j = 0; j < NC; j++) begin
      z[j] = Z_W'($urandom_range(0, 2*spread) - spread);
      hp[j] = ($urandom_range(0, 9) == 0);
      ref_z[j] = int'(z[j]);
    end
    hp_mask = hp[NC-1:0];
    ref_softmax(n, hp, int'(top_n), rl, rb, rh);
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    checks += 4;
    if (cyc != 2*n + 19) begin failures++; $display("FAIL latency %0d for n=%0d", cyc, n); end
    if (int'(label) != rl) begin failures++; $display("FAIL label %0d exp %0d", label, rl); end
    if (hp_hit != rh) begin failures++; $display("FAIL hp_hit %0d exp %0d", hp_hit, rh); end
    if ((real'(beta) / 65536.0 - rb) > 0.01 || (rb - real'(beta) / 65536.0) > 0.01) begin
      failures++; $display("FAIL beta %f exp %f", real'(beta) / 65536.0, rb);
    end
    if (rh) n_hp++;
    if (rb < 0.5) n_low++;
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 40; i++) one(10, 24);
    for (int i = 0; i < 20; i++) one(10, 2);
    for (int i = 0; i < 20; i++) one(37, 40);
    for (int i = 0; i < 20; i++) one(100, 30);
    for (int i = 0; i < 5; i++) one(100, 400);
    checks++;
    if (n_hp == 0 || n_low == 0) begin failures++; $display("FAIL coverage hp=%0d low=%0d", n_hp, n_low); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
