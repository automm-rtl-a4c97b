// tb_automm_top: end-to-end test of the accelerator at reduced sizes, one
// instance per data type (FP32, INT16, INT8), each with the AIE-array and
// host models. Every result word is compared with an independently
// computed product. The runs are sized so that each mechanism of the
// design happens: double-buffered loading and storing, accumulation over
// k.0, packet-switched TILEs to several AIE rows, broadcast to several
// columns (in the AIE switches and in the PL fork), back-pressure from full
// AIE banks and from the host; a mechanism that never happened counts as a
// failure. The bubble-free order is checked inside the systems that run
// without injected stalls: no AIE may idle in the middle of a block.
module tb_automm_top;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  int c [3], f [3];
  bit fin [3];
  int io [3], oo [3], aa [3], ps [3], bc [3], fs [3], st [3];

  // FP32: 2x2 array, LHS broadcast factor 2 (one port per array row), RHS
  // replicated on the PL onto 2 ports
  automm_system #(.DT(0), .TI(2), .TK(4), .TJ(4), .A(2), .B(4), .C(2), .X(2), .Y(2), .Z(1),
                  .BF_L(2), .BF_R(1), .M0(2), .N0(1), .K0(2), .GAPS(0)) s_fp (
    .clk, .rst_n, .checks(c[0]), .failures(f[0]), .finished(fin[0]),
    .n_in_overlap(io[0]), .n_out_overlap(oo[0]), .n_acc_add(aa[0]), .n_pkt_switch(ps[0]),
    .n_bcast(bc[0]), .n_fork_split(fs[0]), .n_stall(st[0]));
  // INT16 with random gaps on the host streams
  automm_system #(.DT(1), .TI(4), .TK(4), .TJ(4), .A(1), .B(4), .C(2), .X(1), .Y(2), .Z(2),
                  .BF_L(1), .BF_R(1), .M0(2), .N0(1), .K0(2), .GAPS(30), .STALL(20)) s_i16 (
    .clk, .rst_n, .checks(c[1]), .failures(f[1]), .finished(fin[1]),
    .n_in_overlap(io[1]), .n_out_overlap(oo[1]), .n_acc_add(aa[1]), .n_pkt_switch(ps[1]),
    .n_bcast(bc[1]), .n_fork_split(fs[1]), .n_stall(st[1]));
  // INT8
  automm_system #(.DT(2), .TI(2), .TK(8), .TJ(8), .A(1), .B(2), .C(2), .X(1), .Y(2), .Z(2),
                  .BF_L(2), .BF_R(1), .M0(1), .N0(2), .K0(2), .GAPS(0)) s_i8 (
    .clk, .rst_n, .checks(c[2]), .failures(f[2]), .finished(fin[2]),
    .n_in_overlap(io[2]), .n_out_overlap(oo[2]), .n_acc_add(aa[2]), .n_pkt_switch(ps[2]),
    .n_bcast(bc[2]), .n_fork_split(fs[2]), .n_stall(st[2]));

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog: finished %0d %0d %0d", fin[0], fin[1], fin[2]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic need(string what, int n);
    checks++;
    if (n == 0) begin failures++; $display("mechanism never happened: %s", what); end
  endtask

  initial begin
    repeat (4) @(negedge clk);
    rst_n = 1;
    wait (fin[0] && fin[1] && fin[2]);
    for (int i = 0; i < 3; i++) begin checks += c[i]; failures += f[i]; end
    need("double-buffered load", io[0] + io[1] + io[2]);
    need("double-buffered store", oo[0] + oo[1] + oo[2]);
    need("accumulation over k.0", aa[0] + aa[1] + aa[2]);
    need("packet switching to several rows", ps[0] + ps[1] + ps[2]);
    need("broadcast to several columns", bc[0] + bc[2]);
    need("PL fork onto several ports", fs[0] + fs[1] + fs[2]);
    need("back-pressure from AIE banks", st[0] + st[1] + st[2]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
