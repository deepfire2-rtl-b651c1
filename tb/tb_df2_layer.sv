// tb_df2_layer - self-checking test of one spiking layer with split-kernel
// mapping.
//
// The layer under test is a padded 3x3 convolution, 5x5x8 spikes in, 16
// output channels, OMEGA = 8 weight units split over two parts (one behind
// a 2-stage bridge), re-timing every 4 cores. The bench loads random weights
// and thresholds over the parameter bus, feeds random spike maps column by
// column into the layer's buffer whenever it is not full, and plays the next
// layer's stage-1 buffer: it gathers each output column and frees it after a
// random delay, so the layer has to wait (stall) for it. Every gathered
// column is compared with the reference model. Three images run back to
// back, which also checks the end-of-image flush.
`timescale 1ns/1ps
module tb_df2_layer;
  import df2_pkg::*;
  import df2_ref_pkg::*;

  localparam int H = 5, W = 5, C = 8, K = 3, S = 1, P = 1, N = 16;
  localparam int OMEGA = 8, PARTS = 2, NIMG = 3;
  localparam int HO = (H + 2*P - K)/S + 1, WO = (W + 2*P - K)/S + 1;
  localparam int NBY = N / 8;
  localparam int CB = C / 8;

  logic    clk = 1'b0, rst = 1'b1;
  fbf_wr_t wr_in [MAXK], wr_out [MAXK];
  logic    in_empty, in_full, next_empty, stall;
  prm_wr_t prm;

  always #5 clk = ~clk;

  df2_layer #(.LAYER_ID(3), .EW(1), .H_IN(H), .W_IN(W), .C_IN(C), .KH(K), .KW(K),
              .S(S), .P(P), .C_OUT(N), .OMEGA(OMEGA), .PARTS(PARTS), .GROUP(4),
              .BRIDGE(2)) dut (
    .clk, .rst, .wr_in, .in_empty, .in_full, .wr_out, .next_empty, .prm, .stall);

  int checks = 0, failures = 0, stalls = 0, cols_seen = 0;
  df2_net net;
  int_q   exp_q [NIMG];
  int_q   img   [NIMG];

  // Sink: the next layer's stage 1.
  byte_t sink [HO][NBY];
  int    sink_cnt = 0, hold = 0;
  assign next_empty = (sink_cnt == 0);

  always @(posedge clk) begin
    if (!rst && stall) stalls++;
    for (int k = 0; k < MAXK; k++)
      if (wr_out[k].en) begin
        if (k >= HO || int'(wr_out[k].addr) >= NBY) begin
          failures++;
          $display("write outside the next buffer: row %0d addr %0d", k, wr_out[k].addr);
        end else begin
          sink[k][wr_out[k].addr] = wr_out[k].data;
          sink_cnt++;
        end
      end
  end

  // Compare and free each gathered column after a random delay.
  always @(negedge clk) begin
    if (sink_cnt == HO*NBY) begin
      if (hold == 0) begin
        automatic int m = cols_seen / WO, c = cols_seen % WO;
        for (int r = 0; r < HO; r++)
          for (int n = 0; n < N; n++) begin
            checks++;
            if (sink[r][n/8][n%8] !== exp_q[m][(r*WO + c)*N + n][0]) begin
              failures++;
              if (failures < 10)
                $display("img %0d col %0d row %0d neuron %0d: got %b", m, c, r, n, sink[r][n/8][n%8]);
            end
          end
        cols_seen++;
        hold = 1 + int'($urandom_range(30));
      end else begin
        hold--;
        if (hold == 0) sink_cnt = 0;
      end
    end else if (sink_cnt > HO*NBY) begin
      failures++;
      $display("next buffer overrun");
      sink_cnt = 0;
    end
  end

  initial begin
    layer_cfg_t cf [];
    cf = new[1];
    cf[0] = '{ew: 8'd1, h_in: 16'(H), w_in: 16'(W), c_in: 16'(C), kh: 8'(K), kw: 8'(K),
              s: 8'(S), p: 8'(P), c_out: 16'(N), omega: 8'(OMEGA), parts: 8'(PARTS),
              group: 8'd4, bridge: 8'd2};
    net = new(cf);
    net.randomize_params(16, 24, 400);
    for (int m = 0; m < NIMG; m++) begin
      img[m] = {};
      for (int i = 0; i < H*W*C; i++) img[m].push_back(int'($urandom_range(1)));
      exp_q[m] = net.run_layer(0, img[m]);
    end
    for (int k = 0; k < MAXK; k++) wr_in[k] = '0;
    prm = '0;
    repeat (4) @(posedge clk);
    rst <= 1'b0;

    for (int n = 0; n < N; n++) begin
      automatic int beats = beats_per_neuron(K, K, C);
      int p, j, r;
      net.locate(0, n, p, j, r);
      for (int b = 0; b < beats; b++) begin
        @(posedge clk);
        prm <= '{we: 1'b1, twe: 1'b0, layer: 8'd3, part: 8'(p), unit: 8'(j),
                 addr: 16'(r*beats + b), wdata: net.weight_word(0, n, b), tdata: '0};
      end
      @(posedge clk);
      prm <= '{we: 1'b0, twe: 1'b1, layer: 8'd3, part: 8'(p), unit: 8'(j),
               addr: 16'(r), wdata: '0, tdata: ACC_W'(net.thr[0][n])};
    end
    // A write for another layer must be ignored.
    @(posedge clk);
    prm <= '{we: 1'b1, twe: 1'b1, layer: 8'd2, part: 8'd0, unit: 8'd0,
             addr: 16'd0, wdata: '1, tdata: '1};
    @(posedge clk);
    prm <= '0;

    // Input columns: one byte per row per cycle, only while stage 1 has room.
    for (int m = 0; m < NIMG; m++)
      for (int c = 0; c < W; c++)
        for (int b = 0; b < CB; b++) begin
          @(negedge clk);
          while (in_full) @(negedge clk);
          for (int r = 0; r < H; r++) begin
            automatic byte_t d = '0;
            for (int i = 0; i < 8; i++) d[i] = img[m][(r*W + c)*C + b*8 + i][0];
            wr_in[r] = '{en: 1'b1, addr: BA_W'(b), data: d};
          end
          @(posedge clk);
          #1;
          for (int r = 0; r < H; r++) wr_in[r] = '0;
        end

    while (cols_seen < NIMG*WO) @(posedge clk);
    repeat (5) @(posedge clk);
    checks++;
    if (stalls == 0) begin
      failures++;
      $display("backpressure never exercised");
    end
    checks++;
    if (!in_empty) begin
      failures++;
      $display("input buffer not empty at the end");
    end
    $display("columns %0d, stall cycles %0d", cols_seen, stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #2_000_000;
    $display("watchdog: columns %0d", cols_seen);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
