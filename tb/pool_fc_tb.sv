// pool_fc_tb -- checks Part 4: for each branch (32x32x16, 16x16x32, 8x8x64
// maps) random feature maps are streamed in and the logits are compared with
// the reference pooling + binary classifier, with 10 classes. Also checks
// that the logits take n_classes + 2 cycles after the last word and that no
// new map is accepted while the logits are held.
module pool_fc_tb;
  import ahcnn_pkg::*;
  import ahcnn_ref_pkg::*;

  localparam int NC = 10;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [1:0] branch = 0;
  logic in_valid = 0, in_ready, in_last = 0, done, release_i = 0, cfg_we = 0;
  logic [FM_W-1:0] in_data = '0;
  logic signed [Z_W-1:0] z [NC];
  logic [19:0] cfg_addr = '0;
  logic [31:0] cfg_wdata = '0;
  int fcw [3][NC][64];

  pool_fc #(.NUM_CLASSES(NC)) dut (
    .clk, .rst_n, .branch, .n_classes(7'(NC)), .in_valid, .in_ready, .in_data, .in_last,
    .done, .z, .release_i, .cfg_we, .cfg_addr, .cfg_wdata);

  task automatic cfg(input logic [19:0] a, input logic [31:0] v);
    @(negedge clk); cfg_we = 1; cfg_addr = a; cfg_wdata = v;
    @(negedge clk); cfg_we = 0;
  endtask

  task automatic run(input int b, input int ch, input int dim, input int fsh);
    int cyc;
    branch = 2'(b);
    for (int c = 0; c < 64; c++)
      for (int y = 0; y < dim; y++)
        for (int x = 0; x < dim; x++) ref_in[c][y][x] = (c < ch) ? $urandom_range(0, 31) : 0;
    for (int j = 0; j < NC; j++) for (int c = 0; c < 64; c++) ref_fcw[j][c] = fcw[b][j][c];
    ref_pool_fc(ch, dim, fsh, NC);
    for (int p = 0; p < dim*dim; p++) begin
      @(negedge clk);
      in_valid = 1; in_last = (p == dim*dim - 1);
      for (int c = 0; c < 64; c++) in_data[c*5 +: 5] = 5'(ref_in[c][p/dim][p%dim]);
      @(posedge clk);
      while (!in_ready) @(posedge clk);
    end
    @(negedge clk) in_valid = 0; in_last = 0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    checks++;
    if (cyc != NC + 2) begin failures++; $display("FAIL latency %0d", cyc); end
    for (int j = 0; j < NC; j++) begin
      checks++;
      if (int'(z[j]) != ref_z[j]) begin
        failures++; $display("FAIL branch %0d class %0d: %0d exp %0d", b, j, z[j], ref_z[j]);
      end
    end
    // held: not ready for a new map until released
    repeat (3) @(negedge clk);
    checks++;
    if (in_ready) begin failures++; $display("FAIL accepts input while holding logits"); end
    release_i = 1;
    @(negedge clk) release_i = 0;
    checks++;
    if (!in_ready) begin failures++; $display("FAIL not ready after release"); end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int b = 0; b < 3; b++) begin
      cfg({2'd1, 16'd0, 2'(b)}, 32'(3 + b));
      for (int j = 0; j < NC; j++) begin
        logic [63:0] w;
        for (int c = 0; c < 64; c++) begin w[c] = 1'($urandom); fcw[b][j][c] = w[c] ? 1 : -1; end
        cfg({2'd0, 2'(b), 8'(j), 7'd0, 1'b0}, w[31:0]);
        cfg({2'd0, 2'(b), 8'(j), 7'd0, 1'b1}, w[63:32]);
      end
    end
    run(2, 64, 8, 5);
    run(0, 16, 32, 3);
    run(1, 32, 16, 4);
    run(2, 64, 8, 5);
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
