// tb_wt_unit - fills the weight and threshold memories of a W&T unit with
// random values, then reads random addresses back (one request per cycle)
// and checks that each weight word appears one cycle after its request and
// each threshold CORE_T_OFS cycles after that.
module tb_wt_unit;
  import df2_pkg::*;
  localparam int DEPTH = 40, TD = 5;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic rst, w_we, t_we, rd_en;
  logic [$clog2(DEPTH)-1:0] w_waddr, w_raddr;
  logic [2:0] t_waddr, t_raddr;
  logic [BEAT_W-1:0] w_wdata, w_q;
  logic signed [ACC_W-1:0] t_wdata, t_q;
  int checks = 0, failures = 0, cyc = 0;
  logic [BEAT_W-1:0] wref [DEPTH];
  logic signed [ACC_W-1:0] tref [TD];
  logic [BEAT_W-1:0] wexp [int];
  logic signed [ACC_W-1:0] texp [int];

  wt_unit #(.DEPTH(DEPTH), .T_DEPTH(TD)) u_dut (
    .clk(clk), .rst(rst), .w_we(w_we), .w_waddr(w_waddr), .w_wdata(w_wdata),
    .t_we(t_we), .t_waddr(t_waddr), .t_wdata(t_wdata), .rd_en(rd_en),
    .w_raddr(w_raddr), .t_raddr(t_raddr), .w_q(w_q), .t_q(t_q));

  always @(posedge clk) cyc++;

  always @(negedge clk) begin
    if (wexp.exists(cyc)) begin
      checks++;
      if (w_q !== wexp[cyc]) begin failures++; $display("w_q %h expected %h", w_q, wexp[cyc]); end
    end
    if (texp.exists(cyc)) begin
      checks++;
      if (t_q !== texp[cyc]) begin failures++; $display("t_q %0d expected %0d", t_q, texp[cyc]); end
    end
  end

  initial begin
    rst = 1; w_we = 0; t_we = 0; rd_en = 0; w_waddr = 0; w_raddr = 0; t_waddr = 0; t_raddr = 0;
    w_wdata = 0; t_wdata = 0;
    repeat (2) @(negedge clk);
    rst = 0;
    for (int a = 0; a < DEPTH; a++) begin
      wref[a] = {$urandom, $urandom};
      w_we = 1; w_waddr = 6'(a); w_wdata = wref[a];
      t_we = (a < TD);
      if (a < TD) begin
        tref[a] = ACC_W'(int'($urandom_range(20000)) - 10000);
        t_waddr = 3'(a); t_wdata = tref[a];
      end
      @(negedge clk);
    end
    w_we = 0; t_we = 0;
    for (int i = 0; i < 300; i++) begin
      rd_en = ($urandom_range(3) != 0);
      w_raddr = 6'($urandom_range(DEPTH - 1));
      t_raddr = 3'($urandom_range(TD - 1));
      if (rd_en) begin
        wexp[cyc + 1] = wref[w_raddr];
        texp[cyc + 1 + CORE_T_OFS] = tref[t_raddr];
      end
      @(negedge clk);
    end
    rd_en = 0;
    repeat (10) @(negedge clk);
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
