// result_buf - output buffer behind the last layer.
//
// The last (fully-connected) layer writes its NBYTES output bytes, the spikes
// of its output neurons, into row port 0 like into any feature buffer. Once
// all bytes are in, the vector moves to the output register and is offered
// on res_spikes with res_valid until res_ready takes it (a valid/ready
// stream towards the DMA that returns results to memory). Stage 1 is then
// free again, and 'empty' tells the last layer's controller it may start.
//
// Timing: res_valid rises one cycle after the last byte arrives if the output
// register is free. Spike n of the output layer is res_spikes[n].
// The paper only says results are written back by DMA; this buffer and its
// handshake are this design's choices.
module result_buf import df2_pkg::*; #(
  parameter int NBYTES = 2
) (
  input  logic                  clk,
  input  logic                  rst,
  input  fbf_wr_t               wr [MAXK],
  output logic                  empty,
  output logic                  res_valid,
  input  logic                  res_ready,
  output logic [NBYTES*8-1:0]   res_spikes
);
  localparam int CW = $clog2(NBYTES + 1);
  byte_t          buf_q [NBYTES];
  logic [CW-1:0]  cnt_q;
  logic           full, move;

  assign full  = (int'(cnt_q) == NBYTES);
  assign move  = full && (!res_valid || res_ready);
  assign empty = (cnt_q == '0);

  always_ff @(posedge clk) begin
    if (wr[0].en) buf_q[wr[0].addr] <= wr[0].data;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      cnt_q     <= '0;
      res_valid <= 1'b0;
    end else begin
      if (move) cnt_q <= CW'(wr[0].en);
      else      cnt_q <= cnt_q + CW'(wr[0].en);
      if (move) begin
        res_valid <= 1'b1;
        for (int b = 0; b < NBYTES; b++) res_spikes[b*8 +: 8] <= buf_q[b];
      end else if (res_ready) begin
        res_valid <= 1'b0;
      end
    end
  end

  a_no_overrun: assert property (@(posedge clk) disable iff (rst)
    full |-> !wr[0].en);
  a_addr: assert property (@(posedge clk) disable iff (rst)
    wr[0].en |-> (int'(wr[0].addr) < NBYTES));
endmodule
