// tb_fbf - self-checking test of the two-stage feature buffer.
//
// A 4-row, 16-channel spike buffer with a 3-column window. The bench writes
// random columns into stage 1 (random rows per cycle, random byte order),
// checks s1_full / s1_empty against its own byte count, shifts real and zero
// columns into stage 2 at random and compares the whole window with a model
// list of the last three columns after every shift.
`timescale 1ns/1ps
module tb_fbf;
  import df2_pkg::*;

  localparam int EW = 1, H = 4, C = 16, KW = 3;
  localparam int CB = C * EW / 8, COLB = H * C * EW;

  logic clk = 1'b0, rst = 1'b1;
  fbf_wr_t wr [MAXK];
  logic shift_en = 1'b0, shift_zero = 1'b0, s1_full, s1_empty;
  logic [KW*COLB-1:0] window;

  always #5 clk = ~clk;

  fbf #(.EW(EW), .H(H), .C(C), .KW(KW)) dut (.*);

  int checks = 0, failures = 0, zero_shifts = 0, real_shifts = 0;
  logic [COLB-1:0] model_win [KW];
  logic [COLB-1:0] col;
  int written;

  task automatic check(string what, logic got, logic exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("%s: got %b expected %b", what, got, exp);
    end
  endtask

  task automatic check_window();
    for (int dx = 0; dx < KW; dx++) begin
      checks++;
      if (window[dx*COLB +: COLB] !== model_win[dx]) begin
        failures++;
        $display("window column %0d: got %h expected %h", dx, window[dx*COLB +: COLB], model_win[dx]);
      end
    end
  endtask

  task automatic do_shift(logic zero);
    @(negedge clk);
    shift_en = 1'b1;
    shift_zero = zero;
    @(posedge clk);
    #1;
    shift_en = 1'b0;
    shift_zero = 1'b0;
    for (int dx = 0; dx < KW - 1; dx++) model_win[dx] = model_win[dx+1];
    model_win[KW-1] = zero ? '0 : col;
    if (zero) zero_shifts++; else real_shifts++;
    @(negedge clk);
    check_window();
  endtask

  initial begin
    for (int k = 0; k < MAXK; k++) wr[k] = '0;
    for (int dx = 0; dx < KW; dx++) model_win[dx] = '0;
    repeat (3) @(posedge clk);
    rst <= 1'b0;
    @(negedge clk);
    check("empty after reset", s1_empty, 1'b1);
    check_window();
    for (int it = 0; it < 40; it++) begin
      // Random column, written byte by byte.
      automatic bit done [H][CB];
      for (int i = 0; i < COLB / 32; i++) col[i*32 +: 32] = $urandom;
      for (int r = 0; r < H; r++) for (int b = 0; b < CB; b++) done[r][b] = 0;
      written = 0;
      // Zero shifts while filling are allowed.
      if ($urandom_range(3) == 0) do_shift(1'b1);
      while (written < H*CB) begin
        @(negedge clk);
        check("not full while filling", s1_full, 1'b0);
        check("empty flag", s1_empty, written == 0);
        for (int r = 0; r < H; r++) begin
          wr[r] = '0;
          if ($urandom_range(1)) begin
            automatic int b = int'($urandom_range(CB - 1));
            if (!done[r][b]) begin
              done[r][b] = 1;
              written++;
              wr[r] = '{en: 1'b1, addr: BA_W'(b), data: col[r*C*EW + b*8 +: 8]};
            end
          end
        end
        @(posedge clk);
        #1;
        for (int r = 0; r < H; r++) wr[r] = '0;
      end
      @(negedge clk);
      check("full after last byte", s1_full, 1'b1);
      check("not empty when full", s1_empty, 1'b0);
      repeat ($urandom_range(3)) @(posedge clk);
      do_shift(1'b0);
      check("empty after shift", s1_empty, 1'b1);
    end
    $display("real shifts %0d, zero shifts %0d", real_shifts, zero_shifts);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1_000_000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
