// fbf - two-stage feature buffer in front of a layer.
//
// Stage 1 (column storage) gathers one complete column of the previous
// layer's output: H rows x C channels, written a byte at a time through one
// write port per row (row r's port is wr[r]; its addr is the byte number
// within the row). It counts the bytes written and reports s1_full once all
// H*CB bytes are in, and s1_empty when it holds nothing.
// Stage 2 holds the KW most recent columns, the horizontal extent of the
// convolution window, as a shift register: shift_en moves every column one
// place towards dx = 0, drops the oldest and takes either the stage-1 column
// (which empties stage 1) or, with shift_zero, an all-zero padding column.
// The whole window is presented on 'window' for the layer's beat selection;
// the kernel units of the layer read their (overlapping) rows from it.
//
// Layout of 'window': column dx (0 = oldest) at [dx*COL_BITS +: COL_BITS],
// row r of a column at [r*ROW_BITS +: ROW_BITS], channel c at [c*EW +: EW].
// EW = 8 holds pixels (image buffer of the transduction layer), EW = 1
// spikes. The fully-connected layers use KW = width of the map, so that the
// window covers the whole feature map.
// The two stages, column gathering and discarding one column per step follow
// the paper. One shared window register in place of one FIFO per kernel
// window, the per-row write ports and the zero columns used for padding are
// this design's choices.
module fbf import df2_pkg::*; #(
  parameter int EW = 1,
  parameter int H  = 5,
  parameter int C  = 8,
  parameter int KW = 3,
  localparam int ROW_BITS = C * EW,
  localparam int COL_BITS = H * ROW_BITS,
  localparam int WIN_BITS = KW * COL_BITS
) (
  input  logic                clk,
  input  logic                rst,
  input  fbf_wr_t             wr [MAXK],
  input  logic                shift_en,
  input  logic                shift_zero,
  output logic                s1_full,
  output logic                s1_empty,
  output logic [WIN_BITS-1:0] window
);
  localparam int CB    = ROW_BITS / 8;   // bytes per row
  localparam int TOTAL = H * CB;
  localparam int CNT_W = $clog2(TOTAL + 1);

  initial assert (ROW_BITS % 8 == 0 && H <= MAXK && CB <= 2**BA_W)
    else $error("fbf: unsupported geometry");

  byte_t            s1 [H][CB];
  logic [CNT_W-1:0] cnt_q;
  logic [COL_BITS-1:0] s1_col;

  always_comb begin
    for (int r = 0; r < H; r++)
      for (int b = 0; b < CB; b++)
        s1_col[r*ROW_BITS + b*8 +: 8] = s1[r][b];
  end

  // Stage 1: byte writes, one port per row.
  always_ff @(posedge clk) begin
    for (int r = 0; r < H; r++)
      if (wr[r].en) s1[r][wr[r].addr] <= wr[r].data;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      cnt_q <= '0;
    end else begin
      logic [CNT_W-1:0] n;
      n = '0;
      for (int r = 0; r < H; r++) n += CNT_W'(wr[r].en);
      if (shift_en && !shift_zero) cnt_q <= n;   // column handed to stage 2
      else                          cnt_q <= cnt_q + n;
    end
  end

  assign s1_full  = (int'(cnt_q) == TOTAL);
  assign s1_empty = (cnt_q == '0);

  // Stage 2: window of KW columns.
  for (genvar dx = 0; dx < KW; dx++) begin : g_win
    logic [COL_BITS-1:0] nxt;
    if (dx == KW - 1) begin : g_new
      assign nxt = shift_zero ? '0 : s1_col;
    end else begin : g_old
      assign nxt = window[(dx+1)*COL_BITS +: COL_BITS];
    end
    always_ff @(posedge clk) begin
      if (rst)           window[dx*COL_BITS +: COL_BITS] <= '0;
      else if (shift_en) window[dx*COL_BITS +: COL_BITS] <= nxt;
    end
  end

  // Handshake rules of the buffer.
  logic any_wr;
  always_comb begin
    any_wr = 1'b0;
    for (int r = 0; r < H; r++) any_wr |= wr[r].en;
  end
  a_no_write_when_full: assert property (@(posedge clk) disable iff (rst)
    s1_full |-> !any_wr);
  a_shift_needs_full: assert property (@(posedge clk) disable iff (rst)
    (shift_en && !shift_zero) |-> s1_full);
  for (genvar r = 0; r < H; r++) begin : g_chk
    a_addr: assert property (@(posedge clk) disable iff (rst)
      wr[r].en |-> (int'(wr[r].addr) < CB));
  end
endmodule
