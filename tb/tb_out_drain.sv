// tb_out_drain: partitions hold words that encode (partition, bank,
// address); the drained block must come out row-major with each beat taken
// from the partition and address given by the block coordinates, under
// random back-pressure, with out_last on the final beat only; at full rate
// one beat per cycle.
module tb_out_drain;
  localparam int A = 2, C = 3, X = 2, Z = 2, TR = 2, TCB = 2;
  localparam int NCOL = A * C, PD = X * Z * TR * TCB;
  localparam int ROWS = X * A * TR, RB = Z * C * TCB;
  logic clk = 0, rst_n = 0, start = 0, bank = 0;
  logic done, busy, dr_en, dr_bank, out_valid, out_ready, out_last;
  logic [$clog2(PD)-1:0] dr_addr;
  logic [NCOL-1:0][63:0] dr_data;
  logic [63:0] out_data;
  int checks = 0, failures = 0;
  bit stall = 1;

  out_drain #(.A(A), .C(C), .X(X), .Z(Z), .TR(TR), .TCB(TCB)) dut (.*);
  always #5 clk = ~clk;

  always @(posedge clk)
    if (dr_en) for (int p = 0; p < NCOL; p++) dr_data[p] <= {16'(p), 16'(dr_bank), 32'(dr_addr)};
  always @(posedge clk) out_ready <= stall ? 1'($urandom_range(0, 1)) : 1'b1;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int n, cyc;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int bk = 0; bk < 2; bk++) begin
      stall = (bk == 0);
      @(negedge clk); start = 1; bank = 1'(bk);
      @(negedge clk); start = 0;
      n = 0; cyc = 0;
      while (n < ROWS * RB) begin
        @(posedge clk);
        cyc++;
        if (out_valid && out_ready) begin
          int r, cb, m1, m2, i, n1, n2, jb;
          r = n / RB; cb = n % RB;
          m1 = r / (A * TR); m2 = (r / TR) % A; i = r % TR;
          n1 = cb / (C * TCB); n2 = (cb / TCB) % C; jb = cb % TCB;
          checks++;
          if (out_data != {16'(m2 * C + n2), 16'(bk), 32'((m1 * Z + n1) * TR * TCB + i * TCB + jb)}
              || out_last != (n == ROWS * RB - 1)) begin
            failures++; $display("beat %0d got %h last %0d", n, out_data, out_last);
          end
          n++;
        end
      end
      @(posedge clk);
      checks++;
      if (!done && busy) begin failures++; $display("no done"); end
      if (!stall) begin
        checks++;
        if (cyc > ROWS * RB + 3) begin failures++; $display("took %0d cycles", cyc); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
