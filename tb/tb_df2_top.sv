// tb_df2_top - end-to-end test of the DeepFire2 pipeline at a reduced size.
//
// A four-layer network small enough to simulate quickly, but with every
// mechanism of the design in use: a transduction layer split over two parts
// with re-timing groups of 4 cores, a 2x2 stride-2 pooling convolution, a
// padded 3x3 convolution split into two parts behind 3-stage SLR bridges,
// and a fully-connected output layer with two weight units (2:8 packing).
// Several random images are classified and compared with the reference
// model. The testbench also checks that each mechanism actually happened:
// backpressure stalls, zero padding columns, bytes from secondary parts
// crossing the bridges and being merged, image and result flow control, and
// that the extra latency of the split path stays under ten cycles.
module tb_df2_top;
  import df2_pkg::*;

  localparam int NL = 4;
  localparam layer_cfg_t [NL-1:0] CFG = {
    //          ew    h_in   w_in   c_in    kh    kw    s     p     c_out   omega  parts group bridge
    layer_cfg_t'{8'd1, 16'd3, 16'd3, 16'd32, 8'd3, 8'd3, 8'd1, 8'd0, 16'd16, 8'd2,  8'd1, 8'd8, 8'd2},
    layer_cfg_t'{8'd1, 16'd3, 16'd3, 16'd16, 8'd3, 8'd3, 8'd1, 8'd1, 16'd32, 8'd16, 8'd2, 8'd8, 8'd3},
    layer_cfg_t'{8'd1, 16'd6, 16'd6, 16'd16, 8'd2, 8'd2, 8'd2, 8'd0, 16'd16, 8'd4,  8'd1, 8'd8, 8'd2},
    layer_cfg_t'{8'd8, 16'd6, 16'd6, 16'd2,  8'd3, 8'd3, 8'd1, 8'd1, 16'd16, 8'd8,  8'd2, 8'd4, 8'd2}
  };
  localparam int NIMG = 6;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic rst, img_valid, img_ready, res_valid, res_ready, done;
  logic [7:0] img_data;
  prm_wr_t prm;
  logic [15:0] res_spikes;
  logic [NL-1:0] layer_stall;
  int checks, failures, img_waits, res_waits, results;
  int stalls [NL];

  df2_top #(.NL(NL), .CFG(CFG)) u_dut (
    .clk(clk), .rst(rst), .img_valid(img_valid), .img_ready(img_ready), .img_data(img_data),
    .prm(prm), .res_valid(res_valid), .res_ready(res_ready), .res_spikes(res_spikes),
    .layer_stall(layer_stall));

  df2_top_harness #(.NL(NL), .CFG(CFG), .NIMG(NIMG), .RES_BITS(16), .READY_PCT(40)) u_h (
    .clk(clk), .rst(rst), .img_valid(img_valid), .img_ready(img_ready), .img_data(img_data),
    .prm(prm), .res_valid(res_valid), .res_ready(res_ready), .res_spikes(res_spikes),
    .layer_stall(layer_stall), .checks(checks), .failures(failures), .stalls(stalls),
    .img_waits(img_waits), .res_waits(res_waits), .results(results), .done(done));

  // Mechanism counters.
  int pad_cols, split0_bytes, split1_bytes, l2_part1_bytes, split_lat_max;
  int l0_first_p0, l0_first_p1;
  int cyc;
  initial begin
    pad_cols = 0; split0_bytes = 0; split1_bytes = 0; l2_part1_bytes = 0;
    split_lat_max = 0; cyc = 0; l0_first_p0 = -1; l0_first_p1 = -1;
  end
  always @(posedge clk) begin
    cyc++;
    if (!rst) begin
      if (u_dut.g_l[0].u_layer.shift_en && u_dut.g_l[0].u_layer.shift_zero) pad_cols++;
      if (u_dut.g_l[0].u_layer.g_mg[0].sv[1]) split1_bytes++;
      if (u_dut.g_l[0].u_layer.g_mg[0].sv[0]) split0_bytes++;
      if (u_dut.g_l[2].u_layer.g_mg[0].sv[1]) l2_part1_bytes++;
      // latency of the split path: first byte of each column from part 0
      // versus part 1 in layer 0, row 0
      if (u_dut.g_l[0].u_layer.g_mg[0].sv[0] && l0_first_p0 < 0) l0_first_p0 = cyc;
      if (u_dut.g_l[0].u_layer.g_mg[0].sv[1] && l0_first_p1 < 0) l0_first_p1 = cyc;
      if (u_dut.g_l[0].u_layer.col_done) begin
        if (l0_first_p0 >= 0 && l0_first_p1 >= 0 && l0_first_p1 - l0_first_p0 > split_lat_max)
          split_lat_max = l0_first_p1 - l0_first_p0;
        l0_first_p0 = -1; l0_first_p1 = -1;
      end
    end
  end

  task automatic need(string what, int n);
    checks++;
    if (n == 0) begin
      failures++;
      $display("mechanism never exercised: %s", what);
    end else begin
      $display("mechanism %-28s : %0d", what, n);
    end
  endtask

  initial begin
    @(posedge clk);
    wait (done);
    repeat (5) @(posedge clk);
    need("layer stall (backpressure)", stalls[0] + stalls[1] + stalls[2] + stalls[3]);
    need("zero padding column", pad_cols);
    need("split part 0 bytes", split0_bytes);
    need("split part 1 via bridge", split1_bytes);
    need("split layer 2 part 1", l2_part1_bytes);
    need("image stream held off", img_waits);
    need("result held by sink", res_waits);
    checks++;
    if (split_lat_max >= 10) begin
      failures++;
      $display("split-kernel latency %0d cycles, expected < 10", split_lat_max);
    end
    $display("results %0d, split latency %0d", results, split_lat_max);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    $display("watchdog: timeout, %0d results", results);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
