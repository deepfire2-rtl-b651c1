// df2_top_harness - stimulus and checking for a df2_top instance.
//
// It resets the design, writes every weight word and threshold of the
// network through the parameter bus, then streams NIMG random images column
// by column (with random gaps on img_valid) while taking results with a
// random res_ready. Each result is compared with df2_ref_pkg's model of the
// same network. It counts backpressure events (layer stalls, image stream
// held off, result held) and reports them through its outputs so that the
// enclosing testbench can print the final TB_RESULT line.
module df2_top_harness import df2_pkg::*; import df2_ref_pkg::*; #(
  parameter int NL    = 4,
  parameter layer_cfg_t [NL-1:0] CFG = '0,
  parameter int NIMG  = 2,
  parameter int RES_BITS = 16,
  parameter int GAP_PCT  = 10,
  parameter int READY_PCT = 70
) (
  input  logic                clk,
  output logic                rst,
  output logic                img_valid,
  input  logic                img_ready,
  output logic [7:0]          img_data,
  output prm_wr_t             prm,
  input  logic                res_valid,
  output logic                res_ready,
  input  logic [RES_BITS-1:0] res_spikes,
  input  logic [NL-1:0]       layer_stall,
  output int                  checks,
  output int                  failures,
  output int                  stalls [NL],
  output int                  img_waits,
  output int                  res_waits,
  output int                  results,
  output logic                done
);
  df2_net net;
  int_q   imgs [$];
  int_q   exp_q [$];

  initial begin
    layer_cfg_t c [];
    c = new[NL];
    for (int l = 0; l < NL; l++) c[l] = CFG[l];
    net = new(c);
    checks = 0; failures = 0; img_waits = 0; res_waits = 0; results = 0; done = 1'b0;
    for (int l = 0; l < NL; l++) stalls[l] = 0;
    rst = 1'b1; img_valid = 1'b0; img_data = '0; prm = '0; res_ready = 1'b0;
    net.randomize_params(16, 24, 400);
    repeat (4) @(posedge clk);
    rst <= 1'b0;

    // Load weights and thresholds.
    for (int l = 0; l < NL; l++) begin
      automatic int beats = beats_per_neuron(int'(CFG[l].kh), int'(CFG[l].kw), int'(CFG[l].c_in));
      for (int n = 0; n < int'(CFG[l].c_out); n++) begin
        int p, j, r;
        net.locate(l, n, p, j, r);
        for (int b = 0; b < beats; b++) begin
          @(posedge clk);
          prm <= '{we: 1'b1, twe: 1'b0, layer: 8'(l), part: 8'(p), unit: 8'(j),
                   addr: 16'(r*beats + b), wdata: net.weight_word(l, n, b), tdata: '0};
        end
        @(posedge clk);
        prm <= '{we: 1'b0, twe: 1'b1, layer: 8'(l), part: 8'(p), unit: 8'(j),
                 addr: 16'(r), wdata: '0, tdata: ACC_W'(net.thr[l][n])};
      end
    end
    @(posedge clk);
    prm <= '0;

    // Images and expected results.
    for (int m = 0; m < NIMG; m++) begin
      int_q im;
      automatic int H = int'(CFG[0].h_in), W = int'(CFG[0].w_in), C = int'(CFG[0].c_in);
      im = {};
      for (int i = 0; i < H*W*C; i++) im.push_back(int'($urandom_range(255)));
      imgs.push_back(im);
      exp_q.push_back(net.run(im));
    end

    fork
      begin : stream
        for (int m = 0; m < NIMG; m++) begin
          automatic int H = int'(CFG[0].h_in), W = int'(CFG[0].w_in), C = int'(CFG[0].c_in);
          for (int c = 0; c < W; c++)
            for (int r = 0; r < H; r++)
              for (int ch = 0; ch < C; ch++) begin
                while (int'($urandom_range(99)) < GAP_PCT) begin
                  img_valid <= 1'b0;
                  @(posedge clk);
                end
                img_valid <= 1'b1;
                img_data  <= 8'(imgs[m][(r*W + c)*C + ch]);
                @(posedge clk);
                while (!img_ready) begin
                  img_waits++;
                  @(posedge clk);
                end
              end
        end
        img_valid <= 1'b0;
      end
      begin : collect
        while (results < NIMG) begin
          res_ready <= (int'($urandom_range(99)) < READY_PCT);
          @(posedge clk);
          if (res_valid && !res_ready) res_waits++;
          if (res_valid && res_ready) begin
            int_q e;
            logic [RES_BITS-1:0] ev;
            e = exp_q.pop_front();
            ev = '0;
            for (int n = 0; n < RES_BITS; n++) ev[n] = e[n][0];
            checks++;
            if (res_spikes !== ev) begin
              failures++;
              $display("image %0d: got %h expected %h", results, res_spikes, ev);
            end
            results++;
          end
        end
        res_ready <= 1'b0;
      end
    join
    done = 1'b1;
  end

  always @(posedge clk) begin
    if (!rst)
      for (int l = 0; l < NL; l++) if (layer_stall[l]) stalls[l]++;
  end
endmodule
