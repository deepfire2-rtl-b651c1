// spike_packer - the "1:8" / "4:8" width converters behind a kernel unit.
//
// Each time its kernel unit fires (so_en), OMEGA output spikes arrive, one per
// core, for OMEGA consecutive neurons. Feature buffers are written a byte at a
// time, so the packer gathers spikes into bytes: with OMEGA < 8 it collects
// 8/OMEGA rounds into one byte (bit i of the byte = spike of the i-th neuron in
// order), with OMEGA >= 8 each round yields OMEGA/8 bytes at once.
// idx is the byte number within this part's share of the column; it runs from
// 0 to NBYTES-1 and then wraps for the next column.
//
// Timing: out_valid is registered, one cycle after the so_en that completes a
// byte. OMEGA must be 1, 2, 4 or a multiple of 8 (the paper's Eq. (1)).
// The conversion ratios follow the paper; bit order and the byte index are
// this design's choices.
module spike_packer import df2_pkg::*; #(
  parameter int OMEGA  = 4,
  parameter int NBYTES = 8,
  localparam int NB    = (OMEGA >= SPB) ? OMEGA / SPB : 1
) (
  input  logic                     clk,
  input  logic                     rst,
  input  logic [OMEGA-1:0]         so,
  input  logic                     so_en,
  output logic                     out_valid,
  output byte_t                    out_data [NB],
  output logic [BA_W-1:0]          out_idx
);
  localparam int RPB = (OMEGA >= SPB) ? 1 : SPB / OMEGA;  // rounds per byte

  initial assert (legal_omega(OMEGA)) else $error("spike_packer: illegal OMEGA %0d", OMEGA);

  logic [BA_W-1:0] idx_q;

  if (RPB == 1) begin : g_wide
    always_ff @(posedge clk) begin
      if (rst) begin
        out_valid <= 1'b0;
        idx_q     <= '0;
      end else begin
        out_valid <= so_en;
        if (so_en) begin
          for (int b = 0; b < NB; b++) out_data[b] <= so[SPB*b +: SPB];
          out_idx <= idx_q;
          idx_q   <= (int'(idx_q) + NB >= NBYTES) ? '0 : idx_q + BA_W'(NB);
        end
      end
    end
  end else begin : g_narrow
    localparam int CW = $clog2(RPB);
    logic [CW-1:0]    cnt_q;
    logic [SPB-1:0]   acc_q;
    logic [SPB-1:0]   acc_n;
    always_comb begin
      acc_n = acc_q;
      acc_n[int'(cnt_q)*OMEGA +: OMEGA] = so;
    end
    always_ff @(posedge clk) begin
      if (rst) begin
        out_valid <= 1'b0;
        idx_q     <= '0;
        cnt_q     <= '0;
        acc_q     <= '0;
      end else begin
        out_valid <= 1'b0;
        if (so_en) begin
          acc_q <= acc_n;
          if (cnt_q == CW'(RPB - 1)) begin
            cnt_q       <= '0;
            out_valid   <= 1'b1;
            out_data[0] <= acc_n;
            out_idx     <= idx_q;
            idx_q       <= (int'(idx_q) + 1 >= NBYTES) ? '0 : idx_q + 1'b1;
          end else begin
            cnt_q <= cnt_q + 1'b1;
          end
        end
      end
    end
  end
endmodule
