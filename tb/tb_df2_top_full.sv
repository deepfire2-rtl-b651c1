// tb_df2_top_full - the DeepFire2 top at its default size: the MNIST network
// (28x28 images, eight layers, 140k weights). All weights and thresholds are
// loaded, then NIMG random 28x28 images are classified and each 16-spike
// result (10 class neurons + 6 spare) is compared with the reference model.
// It also reports the cycles per image in steady state.
module tb_df2_top_full;
  import df2_pkg::*;

  localparam int NL   = MNIST_NL;
  localparam int NIMG = 3;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic rst, img_valid, img_ready, res_valid, res_ready, done;
  logic [7:0] img_data;
  prm_wr_t prm;
  logic [15:0] res_spikes;
  logic [NL-1:0] layer_stall;
  int checks, failures, img_waits, res_waits, results;
  int stalls [NL];

  df2_top u_dut (
    .clk(clk), .rst(rst), .img_valid(img_valid), .img_ready(img_ready), .img_data(img_data),
    .prm(prm), .res_valid(res_valid), .res_ready(res_ready), .res_spikes(res_spikes),
    .layer_stall(layer_stall));

  df2_top_harness #(.NL(NL), .CFG(MNIST_CFG), .NIMG(NIMG), .RES_BITS(16), .GAP_PCT(0),
                    .READY_PCT(100)) u_h (
    .clk(clk), .rst(rst), .img_valid(img_valid), .img_ready(img_ready), .img_data(img_data),
    .prm(prm), .res_valid(res_valid), .res_ready(res_ready), .res_spikes(res_spikes),
    .layer_stall(layer_stall), .checks(checks), .failures(failures), .stalls(stalls),
    .img_waits(img_waits), .res_waits(res_waits), .results(results), .done(done));

  int cyc = 0, t_res [$];
  always @(posedge clk) begin
    cyc++;
    if (res_valid && res_ready) t_res.push_back(cyc);
  end

  initial begin
    @(posedge clk);
    wait (done);
    repeat (2) @(posedge clk);
    for (int i = 1; i < t_res.size(); i++)
      $display("image %0d finished %0d cycles after image %0d", i, t_res[i] - t_res[i-1], i - 1);
    checks++;
    if (results != NIMG) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000000) @(posedge clk);
    $display("watchdog: timeout, %0d results", results);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
