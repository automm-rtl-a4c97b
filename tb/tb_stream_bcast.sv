// tb_stream_bcast: drives a numbered sequence of beats into the fork while
// each of the four outputs applies its own random back-pressure; every
// output must see every beat exactly once and in order. Also checks full
// rate (one beat per cycle) when all outputs are ready.
module tb_stream_bcast;
  localparam int N = 4, W = 16, NBEAT = 300;
  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready;
  logic [W-1:0] in_data;
  logic [N-1:0] out_valid, out_ready;
  logic [N-1:0][W-1:0] out_data;
  int checks = 0, failures = 0;
  int expect_q [N];
  bit randomize_ready = 1;

  stream_bcast #(.N(N), .W(W)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // receivers
  always @(negedge clk) begin
    for (int i = 0; i < N; i++)
      out_ready[i] <= randomize_ready ? 1'($urandom_range(0, 2) != 0) : 1'b1;
  end
  always @(posedge clk) if (rst_n) begin
    for (int i = 0; i < N; i++)
      if (out_valid[i] && out_ready[i]) begin
        checks++;
        if (int'(out_data[i]) != expect_q[i]) begin
          failures++;
          $display("port %0d got %0d want %0d", i, out_data[i], expect_q[i]);
        end
        expect_q[i]++;
      end
  end

  initial begin
    int sent, cyc;
    for (int i = 0; i < N; i++) expect_q[i] = 0;
    out_ready = '0; in_valid = 0; in_data = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    sent = 0;
    while (sent < NBEAT) begin
      in_valid = 1; in_data = W'(sent);
      @(posedge clk);
      if (in_ready) sent++;
      @(negedge clk);
    end
    // full-rate phase
    randomize_ready = 0;
    in_valid = 0;
    repeat (3) @(negedge clk);
    cyc = 0;
    while (sent < NBEAT + 50) begin
      in_valid = 1; in_data = W'(sent);
      @(posedge clk);
      if (in_ready) sent++;
      cyc++;
      @(negedge clk);
    end
    in_valid = 0;
    repeat (3) @(negedge clk);
    checks++;
    if (cyc != 50) begin failures++; $display("rate: %0d cycles for 50 beats", cyc); end
    for (int i = 0; i < N; i++) begin
      checks++;
      if (expect_q[i] != NBEAT + 50) begin failures++; $display("port %0d saw %0d beats", i, expect_q[i]); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
