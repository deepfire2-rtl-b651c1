// tb_kernel_array - two kernel arrays with different groupings:
// A: 5 kernel units x 2 cores, group 4 (several kernel units per re-timing
//    group, like Fig. d.1/d.2 of the design);
// B: 3 kernel units x 16 cores, group 8 (each kernel unit spans two groups,
//    like d.4).
// Random neurons of BEATS beats are issued back to back. For every kernel
// unit k and core j the expected spike is computed from the beat data
// (sum of w_j over the set spikes of k_si, > t_j). Each row must deliver
// its spikes together, at CORE_LAT + (k*OMEGA + OMEGA-1)/GROUP cycles after
// the neuron's last beat.
module tb_kernel_array;
  import df2_pkg::*;
  localparam int BEATS = 3, NNEUR = 60;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, cyc = 0;
  always @(posedge clk) cyc++;
  logic rst;

  // ---- array A
  localparam int KA = 5, OA = 2, GA = 4;
  logic pe_a, la_a;
  logic [7:0] si_a [KA];
  logic [BEAT_W-1:0] w_a [OA];
  logic signed [ACC_W-1:0] t_a [OA];
  logic [OA-1:0] so_a [KA];
  logic [KA-1:0] en_a;
  kernel_array #(.KAPPA(KA), .OMEGA(OA), .GROUP(GA)) u_a (
    .clk(clk), .rst(rst), .pipe_en(pe_a), .last(la_a), .si(si_a), .w(w_a), .t(t_a),
    .so(so_a), .so_en(en_a));

  // ---- array B
  localparam int KB = 3, OB = 16, GB = 8;
  logic [7:0] si_b [KB];
  logic [BEAT_W-1:0] w_b [OB];
  logic signed [ACC_W-1:0] t_b [OB];
  logic [OB-1:0] so_b [KB];
  logic [KB-1:0] en_b;
  kernel_array #(.KAPPA(KB), .OMEGA(OB), .GROUP(GB)) u_b (
    .clk(clk), .rst(rst), .pipe_en(pe_a), .last(la_a), .si(si_b), .w(w_b), .t(t_b),
    .so(so_b), .so_en(en_b));

  // Expected rows: value and due cycle per kernel unit.
  logic [OA-1:0] ea [KA][$];  int da [KA][$];
  logic [OB-1:0] eb [KB][$];  int db [KB][$];
  logic signed [ACC_W-1:0] tqa [$];   // OA thresholds per neuron
  logic signed [ACC_W-1:0] tqb [$];   // OB thresholds per neuron
  int tdue [$];

  always @(negedge clk) begin
    if (tdue.size() > 0 && tdue[0] == cyc) begin
      for (int j = 0; j < OA; j++) t_a[j] = tqa.pop_front();
      for (int j = 0; j < OB; j++) t_b[j] = tqb.pop_front();
      void'(tdue.pop_front());
    end
  end

  always @(negedge clk) begin
    if (!rst) begin
      for (int k = 0; k < KA; k++) if (en_a[k]) begin
        automatic logic [OA-1:0] e = ea[k].pop_front();
        automatic int d = da[k].pop_front();
        checks++;
        if (so_a[k] !== e || cyc != d) begin
          failures++;
          $display("A k%0d: so %b @%0d expected %b @%0d", k, so_a[k], cyc, e, d);
        end
      end
      for (int k = 0; k < KB; k++) if (en_b[k]) begin
        automatic logic [OB-1:0] e = eb[k].pop_front();
        automatic int d = db[k].pop_front();
        checks++;
        if (so_b[k] !== e || cyc != d) begin
          failures++;
          $display("B k%0d: so %b @%0d expected %b @%0d", k, so_b[k], cyc, e, d);
        end
      end
    end
  end

  initial begin
    rst = 1; pe_a = 0; la_a = 0;
    for (int k = 0; k < KA; k++) si_a[k] = 0;
    for (int k = 0; k < KB; k++) si_b[k] = 0;
    for (int j = 0; j < OA; j++) begin w_a[j] = 0; t_a[j] = 0; end
    for (int j = 0; j < OB; j++) begin w_b[j] = 0; t_b[j] = 0; end
    repeat (3) @(negedge clk);
    rst = 0;
    for (int n = 0; n < NNEUR; n++) begin
      int acc_a [KA][OA];
      int acc_b [KB][OB];
      logic signed [ACC_W-1:0] ta [OA];
      logic signed [ACC_W-1:0] tb_ [OB];
      for (int k = 0; k < KA; k++) for (int j = 0; j < OA; j++) acc_a[k][j] = 0;
      for (int k = 0; k < KB; k++) for (int j = 0; j < OB; j++) acc_b[k][j] = 0;
      for (int b = 0; b < BEATS; b++) begin
        pe_a = 1; la_a = (b == BEATS - 1);
        for (int k = 0; k < KA; k++) si_a[k] = 8'($urandom);
        for (int k = 0; k < KB; k++) si_b[k] = 8'($urandom);
        for (int j = 0; j < OA; j++) w_a[j] = {$urandom, $urandom};
        for (int j = 0; j < OB; j++) w_b[j] = {$urandom, $urandom};
        for (int k = 0; k < KA; k++) for (int j = 0; j < OA; j++) for (int i = 0; i < 8; i++)
          if (si_a[k][i]) acc_a[k][j] += int'($signed(w_a[j][8*i +: 8]));
        for (int k = 0; k < KB; k++) for (int j = 0; j < OB; j++) for (int i = 0; i < 8; i++)
          if (si_b[k][i]) acc_b[k][j] += int'($signed(w_b[j][8*i +: 8]));
        if (la_a) begin
          for (int j = 0; j < OA; j++) ta[j] = ACC_W'(int'($urandom_range(100)) - 50);
          for (int j = 0; j < OB; j++) tb_[j] = ACC_W'(int'($urandom_range(100)) - 50);
          for (int j = 0; j < OA; j++) tqa.push_back(ta[j]);
          for (int j = 0; j < OB; j++) tqb.push_back(tb_[j]);
          tdue.push_back(cyc + CORE_T_OFS);
          for (int k = 0; k < KA; k++) begin
            logic [OA-1:0] e;
            for (int j = 0; j < OA; j++) e[j] = (acc_a[k][j] > ta[j]);
            ea[k].push_back(e);
            da[k].push_back(cyc + CORE_LAT + (k*OA + OA - 1) / GA);
          end
          for (int k = 0; k < KB; k++) begin
            logic [OB-1:0] e;
            for (int j = 0; j < OB; j++) e[j] = (acc_b[k][j] > tb_[j]);
            eb[k].push_back(e);
            db[k].push_back(cyc + CORE_LAT + (k*OB + OB - 1) / GB);
          end
        end
        @(negedge clk);
      end
    end
    pe_a = 0; la_a = 0;
    repeat (30) @(negedge clk);
    checks++;
    for (int k = 0; k < KA; k++) if (ea[k].size() != 0) begin failures++; $display("A row %0d missing", k); end
    for (int k = 0; k < KB; k++) if (eb[k].size() != 0) begin failures++; $display("B row %0d missing", k); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    $display("watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
