// tb_automm_workloads: the integer matrix-multiply workloads at the
// accelerator's default array and TILE size (32x32x32 TILEs, 1x4 AIE
// columns of 4 AIEs, 2x2x2 BATCHes per block, LHS broadcast factor 2).
// The full workloads (9K x 9K x 10K INT16 and 16K x 16K x 16K INT8) are far
// beyond simulation; this bench runs a slice of each that still walks the
// outer loops in all three directions: two output blocks (m.0 or n.0) of
// two k.0 iterations each, 64 x 512 x 512 (INT16) and 128 x 512 x 256
// (INT8). The FP32 workload at the same size is the full-size bench.
// Every result is compared with an independently computed product; the
// systems must end with done and without compute bubbles.
module tb_automm_workloads;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  int c [2], f [2];
  bit fin [2];
  int io [2], oo [2], aa [2], ps [2], bc [2], fs [2], st [2];

  automm_system #(.DT(1), .TI(32), .TK(32), .TJ(32), .A(1), .B(4), .C(4), .X(2), .Y(2), .Z(2),
                  .BF_L(2), .BF_R(1), .M0(1), .N0(2), .K0(2)) s_i16 (
    .clk, .rst_n, .checks(c[0]), .failures(f[0]), .finished(fin[0]),
    .n_in_overlap(io[0]), .n_out_overlap(oo[0]), .n_acc_add(aa[0]), .n_pkt_switch(ps[0]),
    .n_bcast(bc[0]), .n_fork_split(fs[0]), .n_stall(st[0]));
  automm_system #(.DT(2), .TI(32), .TK(32), .TJ(32), .A(1), .B(4), .C(4), .X(2), .Y(2), .Z(2),
                  .BF_L(2), .BF_R(1), .M0(2), .N0(1), .K0(2)) s_i8 (
    .clk, .rst_n, .checks(c[1]), .failures(f[1]), .finished(fin[1]),
    .n_in_overlap(io[1]), .n_out_overlap(oo[1]), .n_acc_add(aa[1]), .n_pkt_switch(ps[1]),
    .n_bcast(bc[1]), .n_fork_split(fs[1]), .n_stall(st[1]));

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("watchdog: finished %0d %0d", fin[0], fin[1]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (4) @(negedge clk);
    rst_n = 1;
    wait (fin[0] && fin[1]);
    for (int i = 0; i < 2; i++) begin checks += c[i]; failures += f[i]; end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
