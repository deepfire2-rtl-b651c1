// kernel_array - the kappa x omega array of neuron cores of one layer part.
//
// Row k is kernel unit K<k>, which computes the output neuron at output row k
// of the current column; column j holds the cores driven by weight unit W<j>
// (and threshold T<j>). All cores of a column share its weight word and
// threshold, while all cores of a row share that kernel unit's input beat
// k_si. To keep long fan-out nets short, the shared weight/threshold/enable
// bus is re-timed by one register after every GROUP cores, counting cores
// row by row: with OMEGA < GROUP several kernel units share a group
// (Fig. d.1/d.2), with OMEGA >= GROUP a kernel unit spans several groups
// (d.3/d.4). Core (k, j) therefore sits at re-timing stage
// (k*OMEGA + j) / GROUP; its beat is delayed by the same amount, and the
// outputs of the cores of one kernel unit are realigned so that each row
// delivers all OMEGA spikes together with one so_en pulse.
//
// EW selects the core: 1 = neuron_core (spike input), 8 = trans_core (pixel
// input). si carries 8*EW bits per kernel unit.
// Timing: row k's outputs appear CORE_LAT + stage_max(k) cycles after the
// beat, where stage_max(k) = (k*OMEGA + OMEGA - 1) / GROUP.
// The grouping rule follows the paper; realigning each row's outputs is this
// design's choice.
module kernel_array import df2_pkg::*; #(
  parameter int KAPPA = 3,
  parameter int OMEGA = 4,
  parameter int GROUP = 8,
  parameter int EW    = 1,
  parameter int AW    = ACC_W
) (
  input  logic                    clk,
  input  logic                    rst,
  input  logic                    pipe_en,
  input  logic                    last,
  input  logic [SPB*EW-1:0]       si   [KAPPA],
  input  logic [BEAT_W-1:0]       w    [OMEGA],
  input  logic signed [AW-1:0]    t    [OMEGA],
  output logic [OMEGA-1:0]        so   [KAPPA],
  output logic [KAPPA-1:0]        so_en
);
  localparam int NSTAGE = (KAPPA * OMEGA - 1) / GROUP + 1;
  localparam int BUS_W  = 2 + OMEGA * BEAT_W;

  // Re-timed copies of the shared bus (pipe_en, last, weights); the
  // threshold bus is re-timed the same way.
  logic [BUS_W-1:0]     bus [NSTAGE];
  logic signed [AW-1:0] tb  [NSTAGE][OMEGA];

  always_comb begin
    bus[0][BUS_W-1]   = pipe_en;
    bus[0][BUS_W-2]   = last;
    for (int j = 0; j < OMEGA; j++) bus[0][j*BEAT_W +: BEAT_W] = w[j];
    tb[0] = t;
  end

  for (genvar s = 1; s < NSTAGE; s++) begin : g_retime
    always_ff @(posedge clk) begin
      if (rst) bus[s] <= '0;
      else     bus[s] <= bus[s-1];
      tb[s] <= tb[s-1];
    end
  end

  for (genvar k = 0; k < KAPPA; k++) begin : g_k
    localparam int SMAX = (k * OMEGA + OMEGA - 1) / GROUP;
    logic [OMEGA-1:0] so_raw, en_raw, so_al;

    for (genvar j = 0; j < OMEGA; j++) begin : g_j
      localparam int ST = (k * OMEGA + j) / GROUP;
      logic [SPB*EW-1:0] si_d;
      delay_line #(.W(SPB*EW), .D(ST)) u_sid (.clk(clk), .rst(rst), .d(si[k]), .q(si_d));

      if (EW == 1) begin : g_nc
        neuron_core #(.AW(AW)) u_core (
          .clk(clk), .rst(rst),
          .pipe_en(bus[ST][BUS_W-1]), .last(bus[ST][BUS_W-2]),
          .si(si_d), .w(bus[ST][j*BEAT_W +: BEAT_W]), .t(tb[ST][j]),
          .so(so_raw[j]), .so_en(en_raw[j]));
      end else begin : g_tc
        trans_core #(.AW(AW)) u_core (
          .clk(clk), .rst(rst),
          .pipe_en(bus[ST][BUS_W-1]), .last(bus[ST][BUS_W-2]),
          .x(si_d), .w(bus[ST][j*BEAT_W +: BEAT_W]), .t(tb[ST][j]),
          .so(so_raw[j]), .so_en(en_raw[j]));
      end

      // Realign to the latest core of this kernel unit.
      delay_line #(.W(1), .D(SMAX - ST)) u_sod (.clk(clk), .rst(rst), .d(so_raw[j]), .q(so_al[j]));
    end

    // All cores of the row see the same enable stream; the latest one
    // marks when the realigned row is valid.
    assign so[k]    = so_al;
    assign so_en[k] = en_raw[OMEGA-1];
  end
endmodule
