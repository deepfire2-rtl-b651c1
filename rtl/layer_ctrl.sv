// layer_ctrl - the controller of one layer.
//
// It walks the output columns of the layer. The input map is seen as the
// padded column sequence P zero columns, W_IN real columns, P zero columns.
// Output column oc needs padded columns oc*S .. oc*S+KW-1 in the window of
// the layer's feature buffer, so the controller shifts columns into stage 2
// (a zero column without waiting, a real one when stage 1 is full) until
// oc*S + KW columns have entered. Then the window is "loaded", and the
// kernel operation for the column starts only if the next layer's stage-1
// buffer is empty (next_empty) - the two start conditions of the design.
// If it is not, the controller waits: that is the backpressure, and the
// stall output is high for every such cycle.
// A kernel operation issues ROUNDS x BEATS beats, one per cycle: 'round'
// selects the neuron of every weight unit, 'beat' the 8-element slice of the
// window, 'last' marks a neuron's final beat. The controller then waits for
// col_done, the pulse that says every output byte of the column has been
// written downstream, before it moves to the next column. After the last
// output column it shifts in the unused rest of the image and starts over.
//
// Interface timing: issue/last/round/beat are registered outputs; shift_en
// and shift_zero are combinational from the state and s1_full.
// The two start conditions follow the paper; the sequencing, the waiting for
// col_done and the flush at the end of an image are this design's choices.
module layer_ctrl import df2_pkg::*; #(
  parameter int W_IN   = 5,
  parameter int P      = 0,
  parameter int KW     = 3,
  parameter int S      = 1,
  parameter int ROUNDS = 2,
  parameter int BEATS  = 3,
  localparam int W_OUT = (W_IN + 2 * P - KW) / S + 1,
  localparam int RW    = clog2_min1(ROUNDS),
  localparam int BW    = clog2_min1(BEATS)
) (
  input  logic          clk,
  input  logic          rst,
  input  logic          s1_full,
  input  logic          next_empty,
  input  logic          col_done,
  output logic          shift_en,
  output logic          shift_zero,
  output logic          issue,
  output logic          last,
  output logic [RW-1:0] round,
  output logic [BW-1:0] beat,
  output logic          stall,
  output logic          busy
);
  localparam int NPAD = W_IN + 2 * P;     // padded columns per image
  localparam int CW   = $clog2(NPAD + 1);
  localparam int OW   = clog2_min1(W_OUT + 1);

  typedef enum logic [1:0] {S_FILL, S_RUN, S_DRAIN, S_FLUSH} state_t;
  state_t        st_q;
  logic [CW-1:0] shifted_q;    // padded columns shifted in so far
  logic [CW-1:0] need_q;       // columns needed for the current window
  logic [OW-1:0] oc_q;         // current output column

  logic is_pad, can_shift, loaded;
  assign is_pad    = (int'(shifted_q) < P) || (int'(shifted_q) >= P + W_IN);
  assign can_shift = is_pad || s1_full;
  assign loaded    = (shifted_q == need_q);

  always_comb begin
    shift_en   = 1'b0;
    shift_zero = is_pad;
    case (st_q)
      S_FILL:  shift_en = !loaded && can_shift;
      S_FLUSH: shift_en = (int'(shifted_q) < NPAD) && can_shift;
      default: shift_en = 1'b0;
    endcase
  end

  assign stall = (st_q == S_FILL) && loaded && !next_empty;
  assign busy  = (st_q != S_FILL) || (shifted_q != '0);

  always_ff @(posedge clk) begin
    if (rst) begin
      st_q      <= S_FILL;
      shifted_q <= '0;
      need_q    <= CW'(KW);
      oc_q      <= '0;
      issue     <= 1'b0;
      last      <= 1'b0;
      round     <= '0;
      beat      <= '0;
    end else begin
      issue <= 1'b0;
      last  <= 1'b0;
      if (shift_en) shifted_q <= shifted_q + 1'b1;
      case (st_q)
        S_FILL: begin
          if (loaded && next_empty) begin
            st_q  <= S_RUN;
            issue <= 1'b1;
            round <= '0;
            beat  <= '0;
            last  <= (BEATS == 1);
          end
        end
        S_RUN: begin
          if (int'(beat) == BEATS - 1 && int'(round) == ROUNDS - 1) begin
            st_q <= S_DRAIN;
          end else begin
            issue <= 1'b1;
            if (int'(beat) == BEATS - 1) begin
              beat  <= '0;
              round <= round + 1'b1;
              last  <= (BEATS == 1);
            end else begin
              beat <= beat + 1'b1;
              last <= (int'(beat) == BEATS - 2);
            end
          end
        end
        S_DRAIN: begin
          if (col_done) begin
            if (int'(oc_q) == W_OUT - 1) begin
              st_q <= S_FLUSH;
            end else begin
              st_q   <= S_FILL;
              oc_q   <= oc_q + 1'b1;
              need_q <= need_q + CW'(S);
            end
          end
        end
        S_FLUSH: begin
          if (int'(shifted_q) == NPAD) begin
            st_q      <= S_FILL;
            shifted_q <= '0;
            oc_q      <= '0;
            need_q    <= CW'(KW);
          end
        end
        default: st_q <= S_FILL;
      endcase
    end
  end

  a_beats_in_run: assert property (@(posedge clk) disable iff (rst)
    issue |-> (int'(beat) < BEATS && int'(round) < ROUNDS));
endmodule
