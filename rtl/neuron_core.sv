// neuron_core - binary-input integrate-and-fire neuron (one "C" of the array).
//
// Each beat brings eight input spikes si[7:0] and their eight signed 8-bit
// weights w[63:0] (lane i in w[8i+7:8i]). The AND of spike and weight is done
// the way the design proposes: the weight goes to the D input of a register
// whose synchronous reset is the inverted spike, so an absent spike clears
// the register. A three-level adder tree (4 + 2 + 1 adders, each registered;
// the first level corresponds to the DSP SIMD stage) sums the eight products.
// The sum is accumulated into the membrane potential; on the beat marked
// 'last' the core fires so = 1 if the potential exceeds the threshold t
// (strictly greater), and the potential starts from zero on the next beat.
//
// Timing: fully pipelined, one beat per cycle. pipe_en/last travel with the
// data; so and so_en appear CORE_LAT = 7 edges after the beat; so_en is a
// one-cycle pulse per neuron. t is sampled CORE_T_OFS = 6 cycles after the
// 'last' beat is presented (it enters at the accumulate & fire stage).
// Register-AND, 3-stage tree, strict '>' and pipe_en/so_en follow the paper;
// the potential width ACC_W, signed weights, reset-to-zero after firing and
// the 'last' input that marks a neuron's final beat are this design's choices.
module neuron_core import df2_pkg::*; #(
  parameter int AW = ACC_W
) (
  input  logic                 clk,
  input  logic                 rst,
  input  logic                 pipe_en,
  input  logic                 last,
  input  logic [SPB-1:0]       si,
  input  logic [BEAT_W-1:0]    w,
  input  logic signed [AW-1:0] t,
  output logic                 so,
  output logic                 so_en
);
  // Stage 1: registers acting as AND gates (reset = ~si).
  logic signed [WBITS-1:0] and_q [SPB];
  always_ff @(posedge clk) begin
    for (int i = 0; i < SPB; i++) begin
      if (!si[i]) and_q[i] <= '0;
      else        and_q[i] <= w[WBITS*i +: WBITS];
    end
  end

  // Stage 2: DSP input registers.
  logic signed [WBITS-1:0] a_q [SPB];
  always_ff @(posedge clk) a_q <= and_q;

  // Stages 3-5: adder tree.
  logic signed [WBITS:0]   s1_q [4];
  logic signed [WBITS+1:0] s2_q [2];
  logic signed [WBITS+2:0] s3_q;
  always_ff @(posedge clk) begin
    for (int i = 0; i < 4; i++) s1_q[i] <= a_q[2*i] + a_q[2*i+1];
    for (int i = 0; i < 2; i++) s2_q[i] <= s1_q[2*i] + s1_q[2*i+1];
    s3_q <= s2_q[0] + s2_q[1];
  end

  // Enable pipeline: pipe_en and last stream with the data.
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
  logic                 fresh_q;  // next beat starts a new neuron
  logic                 fire_q;
  logic signed [AW-1:0] acc_base;
  assign acc_base = fresh_q ? '0 : acc_q;   // pulse: acc_q holds a complete potential
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
