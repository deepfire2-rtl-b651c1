// tb_layer_ctrl - self-checking test of the layer controller.
//
// Geometry: 5 input columns, padding 1, 3-wide window, stride 2, so 3 output
// columns per image; 2 rounds of 3 beats per kernel operation. The bench
// plays the feature buffer (a column becomes ready in stage 1 after a random
// delay and is taken by a real shift), the next layer (next_empty drops at
// random) and the output side (col_done some cycles after the last beat).
// It checks, per image: the order of zero and real shifts, that each kernel
// operation starts with exactly oc*S + KW columns shifted in, that it starts
// only when next_empty was high, the round/beat/last sequence of each
// operation, that no new operation starts before col_done, and that the
// stall output is high exactly while a loaded window waits for next_empty.
`timescale 1ns/1ps
module tb_layer_ctrl;
  import df2_pkg::*;

  localparam int W_IN = 5, P = 1, KW = 3, S = 2, ROUNDS = 2, BEATS = 3, NIMG = 4;
  localparam int W_OUT = (W_IN + 2*P - KW)/S + 1, NPAD = W_IN + 2*P;

  logic clk = 1'b0, rst = 1'b1;
  logic s1_full = 1'b0, next_empty = 1'b1, col_done = 1'b0;
  logic shift_en, shift_zero, issue, last, stall, busy;
  logic [0:0] round;
  logic [1:0] beat;

  always #5 clk = ~clk;

  layer_ctrl #(.W_IN(W_IN), .P(P), .KW(KW), .S(S), .ROUNDS(ROUNDS), .BEATS(BEATS)) dut (.*);

  int checks = 0, failures = 0, stalls = 0, ops = 0, images = 0;
  int shifted = 0, oc = 0, exp_i = 0, done_cnt = -1, ready_in = 3;
  int real_in = 0;     // real columns delivered into stage 1 this image
  bit in_op = 0, wait_done = 0, starting = 0;
  logic ne_prev = 1'b1;

  task automatic fail(string s);
    failures++;
    if (failures < 10) $display("%0t: %s", $time, s);
  endtask

  // Inputs change at the negative edge, outputs are checked there too.
  always @(negedge clk) begin
    if (!rst) begin
      // Stage-1 model: a real column is ready after a random delay.
      if (!s1_full && real_in < W_IN && images < NIMG) begin
        if (ready_in == 0) begin
          s1_full = 1'b1;
          real_in++;
        end else ready_in--;
      end
      // Next-layer model.
      if ($urandom_range(99) < 15) next_empty = !next_empty;
      // Output side: col_done 4..12 cycles after the last beat.
      col_done = 1'b0;
      if (done_cnt > 0) done_cnt--;
      else if (done_cnt == 0) begin
        col_done = 1'b1;
        done_cnt = -1;
      end
    end
  end

  always @(posedge clk) begin
    if (!rst) begin
      automatic bit loaded = (shifted == oc*S + KW) && !in_op && !wait_done && !starting;
      // Stall: exactly while a loaded window waits for next_empty.
      checks++;
      if (stall !== (loaded && !next_empty && oc < W_OUT)) fail($sformatf("stall %b", stall));
      if (stall) stalls++;
      // Shifts.
      if (shift_en) begin
        automatic bit pad = (shifted < P) || (shifted >= P + W_IN);
        checks++;
        if (shift_zero !== pad) fail($sformatf("column %0d: zero=%b", shifted, shift_zero));
        if (!shift_zero) begin
          checks++;
          if (!s1_full) fail("real shift without a full stage 1");
          s1_full <= 1'b0;
          ready_in = int'($urandom_range(6));
        end
        if (oc < W_OUT && shifted >= oc*S + KW) fail("shift beyond the window");
        shifted++;
        if (shifted == NPAD && oc == W_OUT) begin
          shifted = 0;
          oc = 0;
          real_in = 0;
          images++;
        end
      end
      // Issue sequence.
      if (issue) begin
        if (!in_op) begin
          checks += 3;
          if (shifted != oc*S + KW) fail($sformatf("op %0d starts with %0d columns", oc, shifted));
          if (!ne_prev) fail("operation started while the next buffer was busy");
          if (wait_done) fail("operation started before col_done");
          in_op = 1;
          starting = 0;
          exp_i = 0;
        end
        checks++;
        if (int'(round) != exp_i / BEATS || int'(beat) != exp_i % BEATS ||
            last !== (exp_i % BEATS == BEATS - 1))
          fail($sformatf("beat %0d: round %0d beat %0d last %b", exp_i, round, beat, last));
        exp_i++;
        if (exp_i == ROUNDS*BEATS) begin
          in_op = 0;
          wait_done = 1;
          ops++;
          done_cnt = 4 + int'($urandom_range(8));
        end
      end else if (in_op) fail("gap inside an operation");
      if (loaded && next_empty && oc < W_OUT) starting = 1;
      if (col_done) begin
        wait_done = 0;
        oc++;
      end
      if (shifted == NPAD && oc == W_OUT && !shift_en) begin
        shifted = 0;
        oc = 0;
        real_in = 0;
        images++;
      end
      ne_prev = next_empty;
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst <= 1'b0;
    while (images < NIMG) @(posedge clk);
    repeat (20) @(posedge clk);
    checks += 3;
    if (ops != NIMG*W_OUT) fail($sformatf("%0d operations", ops));
    if (stalls == 0) fail("backpressure never exercised");
    if (shifted != P || !busy) fail("leading padding of the next image not pre-shifted");
    $display("images %0d, operations %0d, stall cycles %0d", images, ops, stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1_000_000;
    $display("watchdog: images %0d ops %0d", images, ops);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
