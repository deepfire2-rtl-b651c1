// df2_layer - one layer of the DeepFire2 pipeline.
//
// A layer is its input feature buffer (fbf), its controller (layer_ctrl) and
// its neurons. The neurons form a KAPPA x OMEGA array: KAPPA kernel units,
// one per output row of the current column, and OMEGA weight units, each
// holding the weights of every OMEGA-th group of output channels. With
// split-kernel mapping the OMEGA weight units and their cores are divided
// into PARTS equal parts; part 0 sits in the primary SLR with the buffer and
// controller, each further part in a secondary SLR reached through an Rx
// bridge (input beats and read control in) and a Tx bridge (packed spike
// bytes out). Only spikes cross, never weights or partial sums.
//
// Data flow for one output column: the controller issues ROUNDS x BEATS
// beats. For each beat, every kernel unit k gets 8 elements of its window
// (rows k*S-P .. k*S-P+KH-1 of the KW buffered columns; element order is
// dx, then dy, then channel, fastest last), and every weight unit reads the
// matching weight word of its current neuron. Output channel numbering
// follows the split-kernel map: in part p, core j, round r, the spike is
// number s = r*OP + j of that part (OP = OMEGA/PARTS); it lands in part byte
// s/8, which is global byte (s/8)*PARTS + p, bit s%8. So every part fills
// whole bytes, and the parts' bytes interleave. Per kernel unit, a packer
// turns spikes into bytes and a round-robin merge writes the bytes of all
// parts into the next layer's buffer row k.
//
// Interface: wr_in - byte writes into this layer's buffer (one port per
// input row); in_empty - this buffer's stage 1 is empty (for the previous
// layer); wr_out/next_empty - the same towards the next layer; prm - the
// parameter load bus; stall - cycles spent waiting on next_empty. The row
// ports are a fixed MAXK-wide array so that layers of any height connect the
// same way; rows at and above KAPPA of wr_out are constant zero.
// Latency from the first beat of a column to its first output byte is about
// 1 (memory) + CORE_LAT + re-timing stages + 2 (packer, merge), plus
// 2*BRIDGE for the secondary parts.
// The structure follows the paper; widths, ordering of window elements,
// the exact neuron numbering inside a part and the load bus are this
// design's choices, made to be consistent with the split-kernel figure.
module df2_layer import df2_pkg::*; #(
  parameter int LAYER_ID = 0,
  parameter int EW     = 1,
  parameter int H_IN   = 5,
  parameter int W_IN   = 5,
  parameter int C_IN   = 8,
  parameter int KH     = 3,
  parameter int KW     = 3,
  parameter int S      = 1,
  parameter int P      = 0,
  parameter int C_OUT  = 16,
  parameter int OMEGA  = 4,
  parameter int PARTS  = 2,
  parameter int GROUP  = 8,
  parameter int BRIDGE = 2,
  localparam int KAPPA = (H_IN + 2 * P - KH) / S + 1,
  localparam int W_OUT = (W_IN + 2 * P - KW) / S + 1
) (
  input  logic    clk,
  input  logic    rst,
  input  fbf_wr_t wr_in [MAXK],
  output logic    in_empty,
  output logic    in_full,
  output fbf_wr_t wr_out [MAXK],
  input  logic    next_empty,
  input  prm_wr_t prm,
  output logic    stall
);
  localparam int ROW_BITS = C_IN * EW;
  localparam int COL_BITS = H_IN * ROW_BITS;
  localparam int NELEM    = KH * KW * C_IN;
  localparam int BEATS    = beats_per_neuron(KH, KW, C_IN);
  localparam int ROUNDS   = C_OUT / OMEGA;
  localparam int OP       = OMEGA / PARTS;
  localparam int NB       = (OP >= SPB) ? OP / SPB : 1;
  localparam int NBYTES_P = C_OUT / SPB / PARTS;
  localparam int DEPTH    = ROUNDS * BEATS;
  localparam int AD_W     = clog2_min1(DEPTH);
  localparam int TD_W     = clog2_min1(ROUNDS);
  localparam int COLBYTES = KAPPA * C_OUT / SPB;
  localparam int SIW      = SPB * EW;
  localparam int RW       = clog2_min1(ROUNDS);
  localparam int BW       = clog2_min1(BEATS);

  initial begin
    assert (legal_omega(OMEGA) && OMEGA % PARTS == 0 && C_OUT % OMEGA == 0)
      else $error("df2_layer %0d: illegal OMEGA/PARTS/C_OUT", LAYER_ID);
    assert (C_OUT % (SPB * PARTS) == 0 && (ROUNDS * OP) % SPB == 0)
      else $error("df2_layer %0d: parts must produce whole bytes", LAYER_ID);
    assert (KAPPA <= MAXK) else $error("df2_layer %0d: too many rows", LAYER_ID);
  end

  // ---------------------------------------------------------------- buffer
  logic shift_en, shift_zero, s1_full;
  logic [KW*COL_BITS-1:0] window;

  fbf #(.EW(EW), .H(H_IN), .C(C_IN), .KW(KW)) u_fbf (
    .clk(clk), .rst(rst), .wr(wr_in), .shift_en(shift_en), .shift_zero(shift_zero),
    .s1_full(s1_full), .s1_empty(in_empty), .window(window));
  assign in_full = s1_full;

  // ------------------------------------------------------------ controller
  logic          issue, last, col_done, busy;
  logic [RW-1:0] round;
  logic [BW-1:0] beat;

  layer_ctrl #(.W_IN(W_IN), .P(P), .KW(KW), .S(S), .ROUNDS(ROUNDS), .BEATS(BEATS)) u_ctrl (
    .clk(clk), .rst(rst), .s1_full(s1_full), .next_empty(next_empty), .col_done(col_done),
    .shift_en(shift_en), .shift_zero(shift_zero), .issue(issue), .last(last),
    .round(round), .beat(beat), .stall(stall), .busy(busy));

  // -------------------------------------------------------- beat selection
  // beats[k][b] is fixed wiring from the window; only the final choice of b
  // is a multiplexer.
  logic [SIW-1:0] beats [KAPPA][BEATS];
  for (genvar k = 0; k < KAPPA; k++) begin : g_bk
    for (genvar b = 0; b < BEATS; b++) begin : g_bb
      for (genvar l = 0; l < SPB; l++) begin : g_bl
        localparam int I   = b * SPB + l;
        localparam int C   = I % C_IN;
        localparam int DY  = (I / C_IN) % KH;
        localparam int DX  = (I / C_IN) / KH;
        localparam int ROW = k * S - P + DY;
        if (I < NELEM && ROW >= 0 && ROW < H_IN) begin : g_on
          assign beats[k][b][l*EW +: EW] = window[DX*COL_BITS + ROW*ROW_BITS + C*EW +: EW];
        end else begin : g_off
          assign beats[k][b][l*EW +: EW] = '0;
        end
      end
    end
  end

  // Beat bus leaving the controller: {issue, last, weight addr, thr addr, si}.
  localparam int BUSW = 2 + AD_W + TD_W + KAPPA * SIW;
  logic [BUSW-1:0] beat_bus;
  always_comb begin
    logic [KAPPA*SIW-1:0] si_all;
    for (int k = 0; k < KAPPA; k++) si_all[k*SIW +: SIW] = beats[k][beat];
    beat_bus = {issue, last, AD_W'(int'(round) * BEATS + int'(beat)), TD_W'(round), si_all};
  end

  // ---------------------------------------------------------------- parts
  localparam int PK_W = 1 + NB * 8 + BA_W;          // one packer's output
  logic [KAPPA*PK_W-1:0] part_out [PARTS];

  for (genvar p = 0; p < PARTS; p++) begin : g_part
    logic [BUSW-1:0] bus_p;
    if (p == 0) begin : g_local
      assign bus_p = beat_bus;
    end else begin : g_rx
      slr_bridge #(.W(BUSW), .STAGES(BRIDGE)) u_rx (.clk(clk), .rst(rst), .d(beat_bus), .q(bus_p));
    end

    logic              rd_en, lst;
    logic [AD_W-1:0]   waddr;
    logic [TD_W-1:0]   taddr;
    logic [KAPPA*SIW-1:0] si_all;
    assign {rd_en, lst, waddr, taddr, si_all} = bus_p;

    // Beats wait one cycle for the weight memories.
    logic                 en_q, last_q;
    logic [SIW-1:0]       si_q [KAPPA];
    always_ff @(posedge clk) begin
      if (rst) begin
        en_q   <= 1'b0;
        last_q <= 1'b0;
      end else begin
        en_q   <= rd_en;
        last_q <= lst;
      end
      for (int k = 0; k < KAPPA; k++) si_q[k] <= si_all[k*SIW +: SIW];
    end

    logic [BEAT_W-1:0]       w [OP];
    logic signed [ACC_W-1:0] t [OP];
    for (genvar j = 0; j < OP; j++) begin : g_wt
      logic sel;
      assign sel = (int'(prm.layer) == LAYER_ID) && (int'(prm.part) == p) && (int'(prm.unit) == j);
      wt_unit #(.DEPTH(DEPTH), .T_DEPTH(ROUNDS)) u_wt (
        .clk(clk), .rst(rst),
        .w_we(prm.we && sel), .w_waddr(AD_W'(prm.addr)), .w_wdata(prm.wdata),
        .t_we(prm.twe && sel), .t_waddr(TD_W'(prm.addr)), .t_wdata(prm.tdata),
        .rd_en(rd_en), .w_raddr(waddr), .t_raddr(taddr),
        .w_q(w[j]), .t_q(t[j]));
    end

    logic [OP-1:0]    so    [KAPPA];
    logic [KAPPA-1:0] so_en;
    kernel_array #(.KAPPA(KAPPA), .OMEGA(OP), .GROUP(GROUP), .EW(EW)) u_arr (
      .clk(clk), .rst(rst), .pipe_en(en_q), .last(last_q), .si(si_q), .w(w), .t(t),
      .so(so), .so_en(so_en));

    logic [KAPPA*PK_W-1:0] pk_all;
    for (genvar k = 0; k < KAPPA; k++) begin : g_pk
      logic            v;
      byte_t           d [NB];
      logic [BA_W-1:0] idx;
      spike_packer #(.OMEGA(OP), .NBYTES(NBYTES_P)) u_pk (
        .clk(clk), .rst(rst), .so(so[k]), .so_en(so_en[k]),
        .out_valid(v), .out_data(d), .out_idx(idx));
      always_comb begin
        logic [NB*8-1:0] dflat;
        for (int n = 0; n < NB; n++) dflat[n*8 +: 8] = d[n];
        pk_all[k*PK_W +: PK_W] = {v, dflat, idx};
      end
    end

    if (p == 0) begin : g_local_out
      assign part_out[p] = pk_all;
    end else begin : g_tx
      slr_bridge #(.W(KAPPA*PK_W), .STAGES(BRIDGE)) u_tx (.clk(clk), .rst(rst), .d(pk_all), .q(part_out[p]));
    end
  end

  // ----------------------------------------------------------------- merge
  localparam int NSRC = PARTS * NB;
  fbf_wr_t merged [KAPPA];
  for (genvar k = 0; k < KAPPA; k++) begin : g_mg
    logic [NSRC-1:0] sv;
    byte_t           sd [NSRC];
    logic [BA_W-1:0] sa [NSRC];
    always_comb begin
      for (int p = 0; p < PARTS; p++) begin
        logic            v;
        logic [NB*8-1:0] dflat;
        logic [BA_W-1:0] idx;
        {v, dflat, idx} = part_out[p][k*PK_W +: PK_W];
        for (int n = 0; n < NB; n++) begin
          sv[p*NB + n] = v;
          sd[p*NB + n] = dflat[n*8 +: 8];
          sa[p*NB + n] = BA_W'((int'(idx) + n) * PARTS + p);
        end
      end
    end
    rr_merge #(.NSRC(NSRC), .DEPTH(8)) u_mg (
      .clk(clk), .rst(rst), .in_valid(sv), .in_data(sd), .in_addr(sa), .out(merged[k]));
  end

  always_comb begin
    for (int k = 0; k < MAXK; k++) wr_out[k] = '0;
    for (int k = 0; k < KAPPA; k++) wr_out[k] = merged[k];
  end

  // Column completion: every byte of the column has been written out.
  localparam int CCW = $clog2(COLBYTES + 1);
  logic [CCW-1:0] ocnt_q;
  always_ff @(posedge clk) begin
    if (rst) begin
      ocnt_q   <= '0;
      col_done <= 1'b0;
    end else begin
      logic [CCW-1:0] n;
      n = ocnt_q;
      for (int k = 0; k < KAPPA; k++) n += CCW'(merged[k].en);
      col_done <= (int'(n) == COLBYTES);
      ocnt_q   <= (int'(n) == COLBYTES) ? '0 : n;
    end
  end

  // 'busy' is a status output of the controller, unused at this level.
  logic unused_busy;
  assign unused_busy = busy;
endmodule
