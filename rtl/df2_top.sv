// df2_top - DeepFire2 spiking CNN pipeline, configured by default for the
// MNIST network of the design (VGG-style, 140k parameters).
//
// Image columns arrive as a stream of 8-bit pixels (img_*; pixel order in a
// column: row 0 channel 0.., then row 1, ...) and are written into the image
// buffer of layer 0, the transduction layer, which turns pixels into spikes.
// Every following layer is a binary spiking convolution (3x3 'same', 2x2
// stride-2 'pooling', 3x3 'valid') or fully-connected layer, each with its own
// two-stage feature buffer, controller, weight/threshold units and neuron
// cores, and connected to the next by byte writes plus the 'stage 1 empty'
// handshake. The output spikes of the last layer come out on res_*. All
// weights and thresholds are written beforehand through the prm bus.
//
// CFG lists the layers (see df2_pkg::layer_cfg_t), output layer first.
// The default, df2_pkg::MNIST_CFG, is the
// paper's MNIST network: pConv3-1-16, Conv2-2-16, pConv3-1-32, Conv2-2-32,
// pConv3-1-64, Conv3-2-64, Fc-128, Fc-10. The last layer is built with 16
// neurons so that it fills whole bytes; neurons 10..15 are spare (give them
// a threshold they never exceed). The numbers of weight units per layer are
// this design's own choices (the paper lists only memory cascades). MNIST
// fits one SLR, so the default uses no split; a split is set per layer with
// 'parts'. A fully-connected layer is a convolution whose kernel covers the
// whole input map.
module df2_top import df2_pkg::*; #(
  parameter int NL = MNIST_NL,
  parameter layer_cfg_t [NL-1:0] CFG = MNIST_CFG,
  localparam int RES_BITS = int'(CFG[NL-1].c_out)
) (
  input  logic                clk,
  input  logic                rst,
  // image stream (from the AXI DMA)
  input  logic                img_valid,
  output logic                img_ready,
  input  logic [7:0]          img_data,
  // parameter load
  input  prm_wr_t             prm,
  // classification output spikes (to the AXI DMA)
  output logic                res_valid,
  input  logic                res_ready,
  output logic [RES_BITS-1:0] res_spikes,
  // per-layer backpressure indication
  output logic [NL-1:0]       layer_stall
);
  localparam int H0 = int'(CFG[0].h_in);
  localparam int C0 = int'(CFG[0].c_in);

  fbf_wr_t bus   [NL+1][MAXK];
  logic    empty [NL+1];
  logic    full  [NL];

  // --------------------------------------------------------- image loader
  logic [7:0] row_q, ch_q;
  assign img_ready = !full[0];
  always_ff @(posedge clk) begin
    if (rst) begin
      row_q <= '0;
      ch_q  <= '0;
    end else if (img_valid && img_ready) begin
      if (int'(ch_q) == C0 - 1) begin
        ch_q  <= '0;
        row_q <= (int'(row_q) == H0 - 1) ? '0 : row_q + 1'b1;
      end else begin
        ch_q <= ch_q + 1'b1;
      end
    end
  end
  always_comb begin
    for (int r = 0; r < MAXK; r++) begin
      bus[0][r].en   = img_valid && img_ready && (int'(row_q) == r);
      bus[0][r].addr = BA_W'(ch_q);
      bus[0][r].data = img_data;
    end
  end

  // --------------------------------------------------------------- layers
  for (genvar i = 0; i < NL; i++) begin : g_l
    df2_layer #(
      .LAYER_ID(i),
      .EW(int'(CFG[i].ew)), .H_IN(int'(CFG[i].h_in)), .W_IN(int'(CFG[i].w_in)),
      .C_IN(int'(CFG[i].c_in)), .KH(int'(CFG[i].kh)), .KW(int'(CFG[i].kw)),
      .S(int'(CFG[i].s)), .P(int'(CFG[i].p)), .C_OUT(int'(CFG[i].c_out)),
      .OMEGA(int'(CFG[i].omega)), .PARTS(int'(CFG[i].parts)),
      .GROUP(int'(CFG[i].group)), .BRIDGE(int'(CFG[i].bridge))
    ) u_layer (
      .clk(clk), .rst(rst),
      .wr_in(bus[i]), .in_empty(empty[i]), .in_full(full[i]),
      .wr_out(bus[i+1]), .next_empty(empty[i+1]),
      .prm(prm), .stall(layer_stall[i]));
  end

  // --------------------------------------------------------------- output
  result_buf #(.NBYTES(RES_BITS / 8)) u_res (
    .clk(clk), .rst(rst), .wr(bus[NL]), .empty(empty[NL]),
    .res_valid(res_valid), .res_ready(res_ready), .res_spikes(res_spikes));

  logic unused_empty0;
  assign unused_empty0 = empty[0];
endmodule
