// wt_unit - weight & threshold unit ("W & T").
//
// One unit feeds the same 64-bit weight word (eight 8-bit weights, one input
// beat) and threshold to all kappa kernel units of its column of cores. The
// weight memory holds, for every neuron the unit serves, one word per input
// beat: word address = round * BEATS + beat, where 'round' counts the neurons
// of this unit in the order they are computed. The threshold memory holds one
// ACC_W-bit value per neuron (address = round). Both are plain arrays, so a
// synthesis tool maps them onto block RAM or UltraRAM, cascaded as deep as
// DEPTH requires (the paper's b1..b16 / u1..u8 cascades).
//
// Interface: a write port per memory for loading parameters, and one read
// request (rd_en, w_raddr, t_raddr). w_q is registered: it is valid one cycle
// after the request. t_q is delayed a further CORE_T_OFS cycles so that it
// reaches the cores when the beat read with it reaches their fire stage.
// Read latency and the load port are this design's choices; the paper says
// only that weights and thresholds are stored in these units.
module wt_unit import df2_pkg::*; #(
  parameter int DEPTH   = 512,   // weight words
  parameter int T_DEPTH = 16,    // thresholds (neurons served)
  parameter int AW      = ACC_W
) (
  input  logic                       clk,
  input  logic                       rst,
  input  logic                       w_we,
  input  logic [$clog2(DEPTH)-1:0]   w_waddr,
  input  logic [BEAT_W-1:0]          w_wdata,
  input  logic                       t_we,
  input  logic [clog2_min1(T_DEPTH)-1:0] t_waddr,
  input  logic signed [AW-1:0]       t_wdata,
  input  logic                       rd_en,
  input  logic [$clog2(DEPTH)-1:0]   w_raddr,
  input  logic [clog2_min1(T_DEPTH)-1:0] t_raddr,
  output logic [BEAT_W-1:0]          w_q,
  output logic signed [AW-1:0]       t_q
);
  logic [BEAT_W-1:0]    wmem [DEPTH];
  logic signed [AW-1:0] tmem [T_DEPTH];
  logic signed [AW-1:0] t_rd;

  always_ff @(posedge clk) begin
    if (w_we) wmem[w_waddr] <= w_wdata;
    if (rd_en) w_q <= wmem[w_raddr];
  end

  always_ff @(posedge clk) begin
    if (t_we) tmem[t_waddr] <= t_wdata;
    if (rd_en) t_rd <= tmem[t_raddr];
  end

  delay_line #(.W(AW), .D(CORE_T_OFS)) u_tdly (
    .clk(clk), .rst(rst), .d(t_rd), .q(t_q)
  );
endmodule
