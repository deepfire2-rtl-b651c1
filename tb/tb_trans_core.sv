// tb_trans_core - random test of the transduction core.
// Random neurons of 1..6 beats are fed back to back (with occasional idle
// cycles); the expected spike is computed from the spikes, weights and
// threshold independently: fire when sum(w_i * x_i) > t. Also checks
// that so_en comes exactly CORE_LAT cycles after the last beat, and that a
// threshold exactly equal to the potential does not fire.
module tb_trans_core;
  import df2_pkg::*;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic rst, pipe_en, last, so, so_en;
  logic [BEAT_W-1:0] x;
  logic [BEAT_W-1:0] w;
  logic signed [ACC_W-1:0] t;
  int checks = 0, failures = 0, cyc = 0;

  trans_core u_dut (.clk(clk), .rst(rst), .pipe_en(pipe_en), .last(last), .x(x), .w(w),
                     .t(t), .so(so), .so_en(so_en));

  int exp_q [$];      // expected spike per neuron
  int due_q [$];      // cycle at which so_en is due
  logic signed [ACC_W-1:0] t_q [$];   // thresholds to present later
  int t_due [$];

  always @(posedge clk) cyc++;

  // Present thresholds CORE_T_OFS cycles after the last beat.
  always @(negedge clk) begin
    if (t_due.size() > 0 && t_due[0] == cyc) begin
      t = t_q.pop_front();
      void'(t_due.pop_front());
    end
  end

  always @(negedge clk) begin
    if (!rst && so_en) begin
      checks += 2;
      if (exp_q.size() == 0) begin
        failures += 2;
        $display("unexpected so_en");
      end else begin
        automatic int e = exp_q.pop_front();
        automatic int d = due_q.pop_front();
        if (so !== e[0]) begin failures++; $display("spike %0d expected %0d", so, e); end
        if (cyc != d) begin failures++; $display("so_en at %0d expected %0d", cyc, d); end
      end
    end
  end

  initial begin
    rst = 1'b1; pipe_en = 0; last = 0; x = 0; w = 0; t = 0;
    repeat (3) @(posedge clk);
    rst = 1'b0;
    for (int n = 0; n < 400; n++) begin
      automatic int nb = $urandom_range(1, 6);
      automatic int acc = 0;
      for (int b = 0; b < nb; b++) begin
        @(negedge clk);
        pipe_en = 1; last = (b == nb - 1);
        x = {$urandom, $urandom};
        w  = {$urandom, $urandom};
        for (int i = 0; i < SPB; i++) acc += int'($signed(w[8*i +: 8])) * int'(x[8*i +: 8]);
        if (last) begin
          automatic int tt = (n % 5 == 0) ? acc : acc + int'($urandom_range(4000)) - 2000;
          exp_q.push_back(acc > tt ? 1 : 0);
          due_q.push_back(cyc + CORE_LAT);
          t_q.push_back(ACC_W'(tt));
          t_due.push_back(cyc + CORE_T_OFS);
        end
        if ($urandom_range(9) == 0) begin
          @(negedge clk);
          pipe_en = 0; last = 0; x = {$urandom, $urandom}; w = {$urandom, $urandom};
        end
      end
    end
    @(negedge clk);
    pipe_en = 0; last = 0;
    repeat (20) @(posedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("%0d neurons never fired", exp_q.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    $display("watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
