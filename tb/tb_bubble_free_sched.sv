// tb_bubble_free_sched: checks the wavefront order against a reference list
// built independently (all pairs sorted by BATCH+ID, then by ID), for the
// 4x4 example of the paper and for other row/BATCH counts, including random
// back-pressure; also checks the one-pair-per-cycle rate without stalls.
module tb_bubble_free_sched;
  localparam int NB_MAX = 8;
  localparam int NID = 4;
  logic clk = 0, rst_n = 0, start = 0, ready = 0;
  logic [3:0] n_batch;
  logic valid, last, busy;
  logic [2:0] batch;
  logic [1:0] id;
  int checks = 0, failures = 0;

  bubble_free_sched #(.NB_MAX(NB_MAX), .NID(NID)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(int nb, bit stall);
    int eb[$], ei[$];
    int k, cyc;
    // reference: walk diagonals in increasing d, ids ascending
    for (int d = 0; d < nb + NID - 1; d++)
      for (int i = 0; i < NID; i++)
        if (d - i >= 0 && d - i < nb) begin eb.push_back(d - i); ei.push_back(i); end
    @(negedge clk); n_batch = 4'(nb); start = 1;
    @(negedge clk); start = 0;
    k = 0; cyc = 0;
    while (k < eb.size()) begin
      ready = stall ? 1'($urandom_range(0, 1)) : 1'b1;
      #1;
      if (valid && ready) begin
        checks++;
        if (batch != 3'(eb[k]) || id != 2'(ei[k]) || last != (k == eb.size() - 1)) begin
          failures++;
          $display("mismatch nb=%0d k=%0d got (%0d,%0d,last=%0d) want (%0d,%0d)", nb, k, batch, id, last, eb[k], ei[k]);
        end
        k++;
      end
      cyc++;
      @(negedge clk);
    end
    ready = 0;
    checks++;
    if (busy) begin failures++; $display("busy after last"); end
    if (!stall) begin
      checks++;
      if (cyc != eb.size()) begin failures++; $display("rate: %0d cycles for %0d pairs", cyc, eb.size()); end
    end
  endtask

  initial begin
    n_batch = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    run(4, 0);   // the paper's example: 4 BATCHes, IDs 0-3
    run(8, 0);
    run(1, 0);
    run(2, 1);
    run(7, 1);
    run(8, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
