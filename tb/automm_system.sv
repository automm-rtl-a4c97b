// automm_system: one accelerator (automm_top) with its AIE-array model and
// host model, for the system testbench. Starts one run with M0 x N0 x K0
// outer iterations, checks every result, that the run ends with done, and
// that no AIE ever idles in the middle of a block (the bubble-free claim),
// and counts how often each mechanism of the design was used.
module automm_system #(
  parameter int DT = 0,
  parameter int TI = 2, TK = 8, TJ = 8,
  parameter int A = 1, B = 4, C = 2,
  parameter int X = 2, Y = 2, Z = 1,
  parameter int BF_L = 2, BF_R = 1,
  parameter int M0 = 1, N0 = 1, K0 = 1,
  parameter int GAPS = 0,
  parameter int STALL = 0,
  localparam int EPB = (DT == 0) ? 2 : ((DT == 1) ? 4 : 8),
  localparam int TB_L = TI * TK / EPB, TB_R = TK * TJ / EPB,
  localparam int COMP_CYC = B * ((TB_L > TB_R ? TB_L : TB_R) + 1) + 4
) (
  input  logic clk,
  input  logic rst_n,
  output int   checks,
  output int   failures,
  output bit   finished,
  output int   n_in_overlap,     // cycles loading a block while sending another
  output int   n_out_overlap,    // cycles storing results while the next block runs
  output int   n_acc_add,        // output TILEs of k.0 > 0, added onto partial sums
  output int   n_pkt_switch,     // packets routed to AIE rows above 0
  output int   n_bcast,          // beats delivered to several columns
  output int   n_fork_split,     // PL broadcast beats taken by ports at different times
  output int   n_stall           // PLIO beats held back by full AIE banks
);
  import automm_pkg::*;
  localparam dtype_e DTY = (DT == 0) ? DT_FP32 : ((DT == 1) ? DT_INT16 : DT_INT8);
  localparam int NLP = A * (C / BF_L), NRP = C * (A / BF_R), NCOL = A * C;
  localparam int GL = C / BF_L, GR = A / BF_R;   // PLIO ports per mover

  logic start, busy, done;
  logic lv, lr, rv, rr, ov, orr, ol;
  logic [63:0] ld, rd, od;
  logic [NLP-1:0] plv, plr, pll; logic [NLP-1:0][63:0] pld;
  logic [NRP-1:0] prv, prr, prl; logic [NRP-1:0][63:0] prd;
  logic [NCOL-1:0] pov, por, pol; logic [NCOL-1:0][63:0] pod;
  int hchecks, hfail, ndone;
  int col_tiles [NCOL];
  bit hfin;

  automm_top #(.DTYPE(DTY), .TI(TI), .TK(TK), .TJ(TJ), .A(A), .B(B), .C(C), .X(X), .Y(Y), .Z(Z),
               .BF_L(BF_L), .BF_R(BF_R)) dut (
    .clk, .rst_n, .start, .cfg_m0(16'(M0)), .cfg_n0(16'(N0)), .cfg_k0(16'(K0)), .busy, .done,
    .lhs_in_valid(lv), .lhs_in_ready(lr), .lhs_in_data(ld),
    .rhs_in_valid(rv), .rhs_in_ready(rr), .rhs_in_data(rd),
    .res_valid(ov), .res_ready(orr), .res_data(od), .res_last(ol),
    .lhs_plio_valid(plv), .lhs_plio_ready(plr), .lhs_plio_data(pld), .lhs_plio_last(pll),
    .rhs_plio_valid(prv), .rhs_plio_ready(prr), .rhs_plio_data(prd), .rhs_plio_last(prl),
    .out_plio_valid(pov), .out_plio_ready(por), .out_plio_data(pod), .out_plio_last(pol));

  aie_array_model #(.DT(DT), .TI(TI), .TK(TK), .TJ(TJ), .A(A), .B(B), .C(C), .BF_L(BF_L), .BF_R(BF_R),
                    .NB(X * Y * Z), .COMP_CYC(COMP_CYC), .STALL(STALL)) aie (
    .clk, .rst_n,
    .lhs_valid(plv), .lhs_ready(plr), .lhs_data(pld), .lhs_last(pll),
    .rhs_valid(prv), .rhs_ready(prr), .rhs_data(prd), .rhs_last(prl),
    .out_valid(pov), .out_ready(por), .out_data(pod), .out_last(pol));

  automm_host #(.DT(DT), .TI(TI), .TK(TK), .TJ(TJ), .A(A), .B(B), .C(C), .X(X), .Y(Y), .Z(Z),
                .M0(M0), .N0(N0), .K0(K0), .GAPS(GAPS)) host (
    .clk, .rst_n, .lhs_valid(lv), .lhs_ready(lr), .lhs_data(ld),
    .rhs_valid(rv), .rhs_ready(rr), .rhs_data(rd),
    .res_valid(ov), .res_ready(orr), .res_data(od), .res_last(ol),
    .checks(hchecks), .failures(hfail), .finished(hfin));

  initial begin
    n_in_overlap = 0; n_out_overlap = 0; n_acc_add = 0; n_fork_split = 0; ndone = 0;
    foreach (col_tiles[c]) col_tiles[c] = 0;
    start = 0;
    wait (rst_n);
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
  end

  always @(posedge clk) if (rst_n) begin
    if (((lv && lr) || (rv && rr)) && ((|(plv & plr)) || (|(prv & prr)))) n_in_overlap++;
    if ((ov && orr) && ((|(plv & plr)) || (|(prv & prr)) || (|(pov & por)))) n_out_overlap++;
    for (int c = 0; c < NCOL; c++) if (pov[c] && por[c] && pol[c]) begin
      // output TILEs of k.0 iterations after the first land on partial sums
      if ((col_tiles[c] / (X * Y * Z)) % K0 != 0) n_acc_add++;
      col_tiles[c]++;
    end
    // a fork beat still waits on one port while a sibling port took it
    for (int p = 0; p < NLP; p++)
      if (plv[p] && !plr[p])
        for (int s = (p / GL) * GL; s < (p / GL + 1) * GL; s++) if (!plv[s]) begin n_fork_split++; break; end
    for (int q = 0; q < NRP; q++)
      if (prv[q] && !prr[q])
        for (int s = (q / GR) * GR; s < (q / GR + 1) * GR; s++) if (!prv[s]) begin n_fork_split++; break; end
    if (done) ndone++;
  end

  assign n_pkt_switch = aie.hdr_rows_above0;
  assign n_bcast      = aie.bcast_beats;
  assign n_stall      = aie.stall_cycles;

  initial begin
    finished = 0; checks = 0; failures = 0;
    wait (hfin);
    repeat (3) @(negedge clk);
    checks   = hchecks + 3;
    failures = hfail + aie.errors;
    if (ndone != 1 || busy) begin failures++; $display("system: done pulses %0d busy %0d", ndone, busy); end
    if (STALL == 0 && GAPS == 0 && aie.bubbles != 0) begin failures++; $display("system: %0d compute bubble cycles", aie.bubbles); end
    if (aie.computes != M0 * N0 * K0 * X * Y * Z * A * B * C) begin
      failures++; $display("system: %0d AIE computations", aie.computes);
    end
    $display("system DT=%0d: results %0d, AIE tiles %0d, overlap in/out %0d/%0d, acc adds %0d, pkt %0d, bcast %0d, fork %0d, stall %0d",
             DT, hchecks, aie.computes, n_in_overlap, n_out_overlap, n_acc_add, n_pkt_switch, n_bcast, n_fork_split, n_stall);
    finished = 1;
  end
endmodule
