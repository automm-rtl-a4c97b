// tb_out_accum: feeds FP32 and INT32 accumulators with K0=2 iterations of
// X*Y*Z partial-result TILEs (integer-valued, so FP32 sums are exact),
// reads both banks back through the drain port and compares with sums
// computed here over k.0 and k.1. Includes gaps in the input stream and
// TILEs of one beat (forwarding path).
module tb_out_accum;
  import automm_pkg::*;
  localparam int X = 2, Y = 3, Z = 2;
  localparam int NB = X * Y * Z;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int val(int blk, int k0, int b, int beat, int lane);
    return ((blk * 7 + k0 * 13 + b * 5 + beat * 3 + lane * 11) % 61) - 30;
  endfunction

  // exact single-precision encoding of a small integer
  function automatic logic [31:0] i2f(int v);
    int m, e;
    if (v == 0) return 32'd0;
    m = (v < 0) ? -v : v;
    e = 0;
    while ((m >> e) > 1) e++;
    return {1'(v < 0), 8'(127 + e), 23'((m << (23 - e)) & 32'h7F_FFFF)};
  endfunction

  // run one configuration; fp selects the data format
  task automatic drive(bit fp, int TR, int TCB,
                       ref logic it_start, ref logic first, ref logic bank, ref logic it_done,
                       ref logic in_valid, ref logic in_ready, ref logic [63:0] in_data, ref logic in_last,
                       ref logic dr_en, ref logic dr_bank, ref int dr_addr, ref logic [63:0] dr_data);
    for (int blk = 0; blk < 2; blk++) begin
      for (int k0 = 0; k0 < 2; k0++) begin
        @(negedge clk); it_start = 1; first = (k0 == 0); bank = 1'(blk);
        @(negedge clk); it_start = 0;
        for (int b = 0; b < NB; b++)
          for (int beat = 0; beat < TR * TCB; beat++) begin
            int v0, v1;
            v0 = val(blk, k0, b, beat, 0); v1 = val(blk, k0, b, beat, 1);
            in_data = fp ? {i2f(v1), i2f(v0)} : {32'(v1), 32'(v0)};
            in_last = (beat == TR * TCB - 1);
            in_valid = 1'($urandom_range(0, 3) != 0);
            @(posedge clk);
            while (!in_valid) begin @(negedge clk); in_valid = 1; @(posedge clk); end
            @(negedge clk);
          end
        in_valid = 0;
        @(negedge clk);
      end
      // read back this block from its bank
      for (int slot = 0; slot < X * Z; slot++)
        for (int beat = 0; beat < TR * TCB; beat++) begin
          int s0, s1;
          s0 = 0; s1 = 0;
          for (int k0 = 0; k0 < 2; k0++)
            for (int k1 = 0; k1 < Y; k1++) begin
              s0 += val(blk, k0, slot * Y + k1, beat, 0);
              s1 += val(blk, k0, slot * Y + k1, beat, 1);
            end
          dr_en = 1; dr_bank = 1'(blk); dr_addr = slot * TR * TCB + beat;
          @(negedge clk);
          dr_en = 0;
          checks++;
          if (dr_data != (fp ? {i2f(s1), i2f(s0)} : {32'(s1), 32'(s0)})) begin
            failures++;
            $display("fp=%0d blk %0d slot %0d beat %0d got %h want %0d %0d", fp, blk, slot, beat, dr_data, s1, s0);
          end
        end
    end
  endtask

  // FP32 instance, 2x2-beat TILEs
  logic f_st, f_first, f_bank, f_done, f_busy, f_v, f_r, f_l, f_dre, f_drb;
  logic [63:0] f_d, f_drd;
  int f_dra;
  out_accum #(.DTYPE(DT_FP32), .TR(2), .TCB(2), .X(X), .Y(Y), .Z(Z)) u_fp (
    .clk, .rst_n, .it_start(f_st), .first(f_first), .bank(f_bank), .it_done(f_done), .busy(f_busy),
    .in_valid(f_v), .in_ready(f_r), .in_data(f_d), .in_last(f_l),
    .dr_en(f_dre), .dr_bank(f_drb), .dr_addr(f_dra[3:0]), .dr_data(f_drd));
  // INT instance, one-beat TILEs
  logic i_st, i_first, i_bank, i_done, i_busy, i_v, i_r, i_l, i_dre, i_drb;
  logic [63:0] i_d, i_drd;
  int i_dra;
  out_accum #(.DTYPE(DT_INT8), .TR(1), .TCB(1), .X(X), .Y(Y), .Z(Z)) u_int (
    .clk, .rst_n, .it_start(i_st), .first(i_first), .bank(i_bank), .it_done(i_done), .busy(i_busy),
    .in_valid(i_v), .in_ready(i_r), .in_data(i_d), .in_last(i_l),
    .dr_en(i_dre), .dr_bank(i_drb), .dr_addr(i_dra[1:0]), .dr_data(i_drd));

  int ndone = 0;
  always @(posedge clk) if (f_done || i_done) ndone++;

  initial begin
    {f_st, f_first, f_bank, f_v, f_l, f_dre, f_drb} = '0; f_d = 0; f_dra = 0;
    {i_st, i_first, i_bank, i_v, i_l, i_dre, i_drb} = '0; i_d = 0; i_dra = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    drive(1, 2, 2, f_st, f_first, f_bank, f_done, f_v, f_r, f_d, f_l, f_dre, f_drb, f_dra, f_drd);
    drive(0, 1, 1, i_st, i_first, i_bank, i_done, i_v, i_r, i_d, i_l, i_dre, i_drb, i_dra, i_drd);
    checks++;
    if (ndone != 8) begin failures++; $display("it_done pulses %0d", ndone); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
