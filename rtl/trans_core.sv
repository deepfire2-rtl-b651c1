// trans_core - transduction neuron of the first layer ("MAC" of the
// transduction layer).
//
// It turns raw 8-bit image data into spikes. It mirrors neuron_core, but
// because the activations are 8-bit values rather than spikes, each lane
// multiplies pixel x weight (a DSP multiplier) instead of gating the weight.
// Eight lanes per beat: x[63:0] carries eight unsigned 8-bit pixels, w[63:0]
// eight signed 8-bit weights. The products go through the same registered
// 4 + 2 + 1 adder tree, are accumulated, and on the beat marked 'last' the
// core fires so = 1 if the potential exceeds t.
//
// Timing is identical to neuron_core (CORE_LAT = 7, t sampled CORE_T_OFS = 6
// cycles after the 'last' beat), so both core types can sit in the same
// kernel array. Multiplier, adder tree, accumulator and comparator follow the
// paper; eight lanes per beat, unsigned pixels and the widths are this
// design's choices.
module trans_core import df2_pkg::*; #(
  parameter int AW = ACC_W
) (
  input  logic                 clk,
  input  logic                 rst,
  input  logic                 pipe_en,
  input  logic                 last,
  input  logic [BEAT_W-1:0]    x,
  input  logic [BEAT_W-1:0]    w,
  input  logic signed [AW-1:0] t,
  output logic                 so,
  output logic                 so_en
);
  // Stage 1: operand registers.
  logic        [7:0] x_q [SPB];
  logic signed [7:0] w_q [SPB];
  always_ff @(posedge clk) begin
    for (int i = 0; i < SPB; i++) begin
      x_q[i] <= x[8*i +: 8];
      w_q[i] <= w[8*i +: 8];
    end
  end

  // Stage 2: multiply (signed weight x unsigned pixel).
  logic signed [16:0] p_q [SPB];
  always_ff @(posedge clk) begin
    for (int i = 0; i < SPB; i++) p_q[i] <= w_q[i] * $signed({1'b0, x_q[i]});
  end

  // Stages 3-5: adder tree.
  logic signed [17:0] s1_q [4];
  logic signed [18:0] s2_q [2];
  logic signed [19:0] s3_q;
  always_ff @(posedge clk) begin
    for (int i = 0; i < 4; i++) s1_q[i] <= p_q[2*i] + p_q[2*i+1];
    for (int i = 0; i < 2; i++) s2_q[i] <= s1_q[2*i] + s1_q[2*i+1];
    s3_q <= s2_q[0] + s2_q[1];
  end

  logic [5:1] en_q, last_q;
  always_ff @(posedge clk) begin
    if (rst) begin
      en_q   <= '0;
      last_q <= '0;
    end else begin
      en_q   <= {en_q[4:1], pipe_en};
      last_q <= {last_q[4:1], last};
    end
  end

  // Stage 6: accumulate.
  logic signed [AW-1:0] acc_q;
  logic                 fresh_q;
  logic                 fire_q;
  logic signed [AW-1:0] acc_base;
  assign acc_base = fresh_q ? '0 : acc_q;
  always_ff @(posedge clk) begin
    if (rst) begin
      acc_q   <= '0;
      fresh_q <= 1'b1;
      fire_q  <= 1'b0;
    end else begin
      fire_q <= en_q[5] & last_q[5];
      if (en_q[5]) begin
        acc_q   <= acc_base + s3_q;
        fresh_q <= last_q[5];
      end
    end
  end

  // Stage 7: fire.
  always_ff @(posedge clk) begin
    if (rst) begin
      so    <= 1'b0;
      so_en <= 1'b0;
    end else begin
      so_en <= fire_q;
      if (fire_q) so <= (acc_q > t);
    end
  end
endmodule
