// rr_merge - round-robin merge of split-kernel outputs for one output row.
//
// When a layer is split over several SLRs, every part delivers its own packed
// bytes for the same output row, at different times (the secondary parts sit
// behind bridges). NSRC sources each push (byte, address) into a small FIFO;
// a round-robin pointer picks, every cycle, the first non-empty FIFO at or
// after it and writes that byte into the next feature buffer's row port.
// The pointer then moves past the source that was served.
//
// Interface: per source in_valid/in_data/in_addr (no ready: the controller
// guarantees that a layer never produces bytes faster than one per cycle on
// average per row, and DEPTH absorbs the bursts; an assertion checks that no
// FIFO overflows). Output: a registered fbf_wr_t write.
// The round-robin MUX follows the paper; the FIFOs are this design's choice.
module rr_merge import df2_pkg::*; #(
  parameter int NSRC  = 2,
  parameter int DEPTH = 8
) (
  input  logic             clk,
  input  logic             rst,
  input  logic [NSRC-1:0]  in_valid,
  input  byte_t            in_data [NSRC],
  input  logic [BA_W-1:0]  in_addr [NSRC],
  output fbf_wr_t          out
);
  localparam int PW = clog2_min1(DEPTH);
  localparam int SW = clog2_min1(NSRC);

  logic [BA_W+7:0] fifo [NSRC][DEPTH];
  logic [PW-1:0]   wp [NSRC], rp [NSRC];
  logic [PW:0]     cnt [NSRC];
  logic [SW-1:0]   ptr_q;
  logic            pick_v;
  logic [SW-1:0]   pick;

  always_comb begin
    pick_v = 1'b0;
    pick   = '0;
    for (int i = 0; i < NSRC; i++) begin
      int s;
      s = (int'(ptr_q) + i) % NSRC;
      if (!pick_v && cnt[s] != 0) begin
        pick_v = 1'b1;
        pick   = SW'(s);
      end
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      ptr_q <= '0;
      out   <= '0;
      for (int i = 0; i < NSRC; i++) begin
        wp[i]  <= '0;
        rp[i]  <= '0;
        cnt[i] <= '0;
      end
    end else begin
      out.en <= pick_v;
      if (pick_v) begin
        {out.addr, out.data} <= fifo[pick][rp[pick]];
        ptr_q <= (int'(pick) == NSRC - 1) ? '0 : pick + 1'b1;
      end
      for (int i = 0; i < NSRC; i++) begin
        logic push, pop;
        push = in_valid[i];
        pop  = pick_v && (int'(pick) == i);
        if (push) begin
          fifo[i][wp[i]] <= {in_addr[i], in_data[i]};
          wp[i] <= (int'(wp[i]) == DEPTH - 1) ? '0 : wp[i] + 1'b1;
        end
        if (pop) rp[i] <= (int'(rp[i]) == DEPTH - 1) ? '0 : rp[i] + 1'b1;
        cnt[i] <= cnt[i] + (push ? 1'b1 : 1'b0) - (pop ? 1'b1 : 1'b0);
      end
    end
  end

  for (genvar i = 0; i < NSRC; i++) begin : g_chk
    a_no_overflow: assert property (@(posedge clk) disable iff (rst)
      in_valid[i] |-> (int'(cnt[i]) < DEPTH));
  end
endmodule
