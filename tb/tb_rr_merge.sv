// tb_rr_merge - three sources push (byte, address) pairs at random times,
// at most one pair per cycle in total on average. Every pair must come out
// exactly once, each source's pairs in order, and whenever several sources
// are waiting the merge must serve them in turn (round robin): no source is
// served twice while another one is waiting.
module tb_rr_merge;
  import df2_pkg::*;
  localparam int N = 3;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst;
  logic [N-1:0] v;
  byte_t d [N];
  logic [BA_W-1:0] a [N];
  fbf_wr_t o;
  int checks = 0, failures = 0, sent = 0, got = 0, turns = 0;
  logic [BA_W+7:0] q [N][$];
  int last_src = -1;

  rr_merge #(.NSRC(N), .DEPTH(8)) u_dut (.clk(clk), .rst(rst), .in_valid(v), .in_data(d),
                                         .in_addr(a), .out(o));

  always @(negedge clk) begin
    if (!rst && o.en) begin
      automatic int src = -1;
      // source id is carried in the address' top bits
      src = int'(o.addr[BA_W-1 -: 2]);
      checks++;
      if (src >= N || q[src].size() == 0 || q[src][0] !== {o.addr, o.data}) begin
        failures++;
        $display("unexpected %h %h", o.addr, o.data);
      end else begin
        void'(q[src].pop_front());
      end
      got++;
    end
  end

  // Fairness: check inside the DUT's decision each cycle.
  always @(negedge clk) begin
    if (!rst && u_dut.pick_v) begin
      automatic int waiting = 0;
      for (int i = 0; i < N; i++) if (u_dut.cnt[i] != 0) waiting++;
      if (waiting > 1) begin
        turns++;
        checks++;
        if (int'(u_dut.pick) == last_src) begin
          failures++;
          $display("source %0d served twice while others wait ptr %0d cnt %0d %0d %0d", last_src, u_dut.ptr_q, u_dut.cnt[0], u_dut.cnt[1], u_dut.cnt[2]);
        end
      end
      last_src = int'(u_dut.pick);
    end
  end

  initial begin
    rst = 1; v = 0;
    for (int i = 0; i < N; i++) begin d[i] = 0; a[i] = 0; end
    repeat (2) @(negedge clk);
    rst = 0;
    for (int c = 0; c < 600; c++) begin
      for (int i = 0; i < N; i++) begin
        v[i] = (c % 6 < 3) ? ($urandom_range(3) == 0) : ($urandom_range(9) == 0);
        d[i] = 8'($urandom);
        a[i] = {2'(i), 6'($urandom)};
        if (v[i]) begin q[i].push_back({a[i], d[i]}); sent++; end
      end
      @(negedge clk);
    end
    v = 0;
    repeat (40) @(negedge clk);
    checks++;
    if (got != sent) begin failures++; $display("sent %0d got %0d", sent, got); end
    checks++;
    if (turns == 0) begin failures++; $display("never had competing sources"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (3000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
