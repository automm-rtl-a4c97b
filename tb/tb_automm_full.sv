// tb_automm_full: the accelerator at its default size (FP32, 32x32x32
// TILEs, one column-chain of 4 AIEs per AIE column, 1x4 columns, 2x2x2
// BATCHes per block, each LHS port broadcast to 2 columns) runs one
// complete matrix multiply of 64 x 512 by 512 x 256 (two k.0 iterations,
// so the second block accumulates onto the first). Every result is
// compared with an independently computed product, the run must end with
// done, and no AIE may idle in the middle of a block.
module tb_automm_full;
  localparam int TI = 32, TK = 32, TJ = 32, A = 1, B = 4, C = 4, X = 2, Y = 2, Z = 2;
  localparam int BF_L = 2, BF_R = 1;
  localparam int M0 = 1, N0 = 1, K0 = 2;
  localparam int NLP = A * (C / BF_L), NRP = C * (A / BF_R), NCOL = A * C;
  localparam int COMP_CYC = B * (TI * TK / 2 + 1) + 4;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start, busy, done;
  logic lv, lr, rv, rr, ov, orr, ol;
  logic [63:0] ld, rd, od;
  logic [NLP-1:0] plv, plr, pll; logic [NLP-1:0][63:0] pld;
  logic [NRP-1:0] prv, prr, prl; logic [NRP-1:0][63:0] prd;
  logic [NCOL-1:0] pov, por, pol; logic [NCOL-1:0][63:0] pod;
  int hchecks, hfail, ndone = 0, cycles = 0;
  bit hfin;

  automm_top dut (
    .clk, .rst_n, .start, .cfg_m0(16'(M0)), .cfg_n0(16'(N0)), .cfg_k0(16'(K0)), .busy, .done,
    .lhs_in_valid(lv), .lhs_in_ready(lr), .lhs_in_data(ld),
    .rhs_in_valid(rv), .rhs_in_ready(rr), .rhs_in_data(rd),
    .res_valid(ov), .res_ready(orr), .res_data(od), .res_last(ol),
    .lhs_plio_valid(plv), .lhs_plio_ready(plr), .lhs_plio_data(pld), .lhs_plio_last(pll),
    .rhs_plio_valid(prv), .rhs_plio_ready(prr), .rhs_plio_data(prd), .rhs_plio_last(prl),
    .out_plio_valid(pov), .out_plio_ready(por), .out_plio_data(pod), .out_plio_last(pol));

  aie_array_model #(.DT(0), .TI(TI), .TK(TK), .TJ(TJ), .A(A), .B(B), .C(C), .BF_L(BF_L), .BF_R(BF_R),
                    .NB(X * Y * Z), .COMP_CYC(COMP_CYC)) aie (
    .clk, .rst_n,
    .lhs_valid(plv), .lhs_ready(plr), .lhs_data(pld), .lhs_last(pll),
    .rhs_valid(prv), .rhs_ready(prr), .rhs_data(prd), .rhs_last(prl),
    .out_valid(pov), .out_ready(por), .out_data(pod), .out_last(pol));

  automm_host #(.DT(0), .TI(TI), .TK(TK), .TJ(TJ), .A(A), .B(B), .C(C), .X(X), .Y(Y), .Z(Z),
                .M0(M0), .N0(N0), .K0(K0)) host (
    .clk, .rst_n, .lhs_valid(lv), .lhs_ready(lr), .lhs_data(ld),
    .rhs_valid(rv), .rhs_ready(rr), .rhs_data(rd),
    .res_valid(ov), .res_ready(orr), .res_data(od), .res_last(ol),
    .checks(hchecks), .failures(hfail), .finished(hfin));

  always @(posedge clk) if (rst_n) begin
    if (done) ndone++;
    if (busy) cycles++;
  end

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    start = 0;
    repeat (4) @(negedge clk);
    rst_n = 1;
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    wait (hfin);
    repeat (3) @(negedge clk);
    checks = hchecks + 3;
    failures = hfail + aie.errors;
    if (ndone != 1 || busy) begin failures++; $display("done pulses %0d", ndone); end
    if (aie.bubbles != 0) begin failures++; $display("%0d compute bubble cycles", aie.bubbles); end
    if (aie.computes != M0 * N0 * K0 * X * Y * Z * A * B * C) begin failures++; $display("%0d AIE TILEs", aie.computes); end
    $display("full size: %0d result beats, %0d AIE TILEs, %0d cycles busy, AIE busy %0d%%",
             hchecks, aie.computes, cycles, 100 * aie.computes * COMP_CYC / (A * B * C) / cycles);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
