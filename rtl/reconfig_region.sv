// reconfig_region -- the reconfigurable partition and its decoupler.
//
// On the device one partition holds exactly one of the three convolution parts
// at a time, and a partial bitstream swaps it. In RTL the three parts are all
// instantiated and `rm_select` says which one is configured; the others are
// held in reset and cut off, so that only the selected part can be seen from
// the static logic (the usual way to model a partition in simulation). While
// `rm_decouple` is high (reconfiguration in progress) the partition's
// handshakes are forced inactive and the part is held in reset, as a
// partial-reconfiguration decoupler does; it leaves decoupling freshly reset.
// That the three parts share one region and only the convolution parts are
// swapped follows the paper; the decoupler is this design's choice.
//
// The configuration port stands for the contents of the bitstreams: writes with
// cfg_addr[23:20] = 0, 1, 2 go to the weights of Part 1, 2, 3.
//
// Rule checked by an assertion: decoupling only starts while no image is in
// the region (between its first input word and its last output word).
module reconfig_region
  import ahcnn_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic [1:0]        rm_select,
  input  logic              rm_decouple,
  input  logic              in_valid,
  output logic              in_ready,
  input  logic [FM_W-1:0]   in_data,
  output logic              out_valid,
  input  logic              out_ready,
  output logic [FM_W-1:0]   out_data,
  output logic              out_last,
  input  logic              cfg_we,
  input  logic [CFG_AW-1:0] cfg_addr,
  input  logic [CFG_DW-1:0] cfg_wdata,
  output logic              busy
);

  logic [NUM_BRANCH-1:0] p_in_ready, p_out_valid, p_out_last, p_busy, p_rst_n, p_cfg_we;
  logic [FM_W-1:0]       p_out_data [NUM_BRANCH];
  logic                  live;

  assign live = !rm_decouple;

  for (genvar p = 0; p < NUM_BRANCH; p++) begin : g_rst
    assign p_rst_n[p]  = rst_n && live && (rm_select == 2'(p));
    assign p_cfg_we[p] = cfg_we && (cfg_addr[23:20] == 4'(p));
  end

  // Part 1: Conv1 + Q-Conv2..5, 32x32x16
  conv_part #(.N_LAYERS(5), .IMG_IN(1'b1), .IN_CH(IMG_CH), .CH(16), .IN_DIM(32),
              .FIRST_STRIDE2(1'b0)) u_part1 (
    .clk, .rst_n(p_rst_n[0]),
    .in_valid(in_valid && live && rm_select == 2'd0), .in_ready(p_in_ready[0]), .in_data,
    .out_valid(p_out_valid[0]), .out_ready(out_ready && live && rm_select == 2'd0),
    .out_data(p_out_data[0]), .out_last(p_out_last[0]),
    .cfg_we(p_cfg_we[0]), .cfg_addr(cfg_addr[19:0]), .cfg_wdata, .busy(p_busy[0]));

  // Part 2: Q-Conv6 (stride 2) + Q-Conv7..9, 16x16x32
  conv_part #(.N_LAYERS(4), .IMG_IN(1'b0), .IN_CH(16), .CH(32), .IN_DIM(32),
              .FIRST_STRIDE2(1'b1)) u_part2 (
    .clk, .rst_n(p_rst_n[1]),
    .in_valid(in_valid && live && rm_select == 2'd1), .in_ready(p_in_ready[1]), .in_data,
    .out_valid(p_out_valid[1]), .out_ready(out_ready && live && rm_select == 2'd1),
    .out_data(p_out_data[1]), .out_last(p_out_last[1]),
    .cfg_we(p_cfg_we[1]), .cfg_addr(cfg_addr[19:0]), .cfg_wdata, .busy(p_busy[1]));

  // Part 3: Q-Conv10 (stride 2) + Q-Conv11..13, 8x8x64
  conv_part #(.N_LAYERS(4), .IMG_IN(1'b0), .IN_CH(32), .CH(64), .IN_DIM(16),
              .FIRST_STRIDE2(1'b1)) u_part3 (
    .clk, .rst_n(p_rst_n[2]),
    .in_valid(in_valid && live && rm_select == 2'd2), .in_ready(p_in_ready[2]), .in_data,
    .out_valid(p_out_valid[2]), .out_ready(out_ready && live && rm_select == 2'd2),
    .out_data(p_out_data[2]), .out_last(p_out_last[2]),
    .cfg_we(p_cfg_we[2]), .cfg_addr(cfg_addr[19:0]), .cfg_wdata, .busy(p_busy[2]));

  always_comb begin
    in_ready  = 1'b0;
    out_valid = 1'b0;
    out_data  = '0;
    out_last  = 1'b0;
    busy      = 1'b0;
    if (live && rm_select < 2'(NUM_BRANCH)) begin
      in_ready  = p_in_ready[rm_select];
      out_valid = p_out_valid[rm_select];
      out_data  = p_out_data[rm_select];
      out_last  = p_out_last[rm_select];
      busy      = p_busy[rm_select];
    end
  end

  // an image is in the region from its first input word to its last output word
  logic in_flight;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                                     in_flight <= 1'b0;
    else if (out_valid && out_ready && out_last)    in_flight <= 1'b0;
    else if (in_valid && in_ready)                  in_flight <= 1'b1;
  end

  a_decouple_idle: assert property (@(posedge clk) disable iff (!rst_n)
                                    $rose(rm_decouple) |-> !in_flight);

endmodule
