// tb_result_buf - self-checking test of the output buffer.
//
// Writes 3-byte result vectors in random byte order with random gaps into
// port 0, takes them with a random res_ready and checks every vector, the
// empty flag and that a held vector stays stable while res_ready is low.
`timescale 1ns/1ps
module tb_result_buf;
  import df2_pkg::*;

  localparam int NB = 3, NV = 60;

  logic clk = 1'b0, rst = 1'b1;
  fbf_wr_t wr [MAXK];
  logic empty, res_valid, res_ready = 1'b0;
  logic [NB*8-1:0] res_spikes;

  always #5 clk = ~clk;

  result_buf #(.NBYTES(NB)) dut (.*);

  int checks = 0, failures = 0, got = 0, held = 0;
  logic [NB*8-1:0] exp_q [$];
  logic [NB*8-1:0] last_v;
  logic            last_wait = 1'b0;

  // Sink side.
  always @(negedge clk) begin
    if (!rst) begin
      if (last_wait) begin
        checks++;
        if (!res_valid || res_spikes !== last_v) begin
          failures++;
          $display("held vector changed");
        end
      end
      res_ready = ($urandom_range(99) < 50);
      last_wait = res_valid && !res_ready;
      last_v    = res_spikes;
      if (res_valid && !res_ready) held++;
      if (res_valid && res_ready) begin
        checks++;
        if (res_spikes !== exp_q[0]) begin
          failures++;
          $display("vector %0d: got %h expected %h", got, res_spikes, exp_q[0]);
        end
        void'(exp_q.pop_front());
        got++;
      end
    end
  end

  initial begin
    for (int k = 0; k < MAXK; k++) wr[k] = '0;
    repeat (3) @(posedge clk);
    rst <= 1'b0;
    for (int v = 0; v < NV; v++) begin
      automatic logic [NB*8-1:0] vec = NB*8'($urandom);
      automatic int order [NB] = '{0, 2, 1};
      if (v % 2) order = '{2, 1, 0};
      exp_q.push_back(vec);
      // Wait until the buffer has room for the next vector.
      @(negedge clk);
      checks++;
      while (!empty) @(negedge clk);
      for (int i = 0; i < NB; i++) begin
        repeat ($urandom_range(2)) @(negedge clk);
        wr[0] = '{en: 1'b1, addr: BA_W'(order[i]), data: vec[order[i]*8 +: 8]};
        @(posedge clk);
        #1;
        wr[0] = '0;
      end
    end
    while (got < NV) @(posedge clk);
    checks++;
    if (held == 0) begin
      failures++;
      $display("res_ready backpressure never exercised");
    end
    $display("vectors %0d, held cycles %0d", got, held);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1_000_000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
