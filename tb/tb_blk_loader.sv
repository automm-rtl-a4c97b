// tb_blk_loader: loads blocks into both banks through a row-partitioned
// loader (LHS style) and a column-partitioned loader (RHS style) and checks
// every write against an address computed from the element's block
// coordinates; stalls on the input stream are included.
module tb_blk_loader;
  localparam int ROWS = 8, RB = 6, NP = 2;
  localparam int GR = 2;   // rows per LHS group
  localparam int GC = 1;   // beats per RHS group
  localparam int PD = ROWS * RB / NP;
  localparam int AW = $clog2(2 * PD);
  logic clk = 0, rst_n = 0;
  logic start, bank, in_valid;
  logic [63:0] in_data;
  logic rdy_l, rdy_r, done_l, done_r, busy_l, busy_r;
  logic [NP-1:0] we_l, we_r;
  logic [AW-1:0] wa_l, wa_r;
  logic [63:0] wd_l, wd_r;
  int checks = 0, failures = 0;
  logic [63:0] mem_l [NP][2*PD];
  logic [63:0] mem_r [NP][2*PD];

  blk_loader #(.ROWS(ROWS), .ROW_BEATS(RB), .NP(NP), .GROUP(GR), .BY_COL(1'b0)) ul (
    .clk, .rst_n, .start, .bank, .in_valid, .in_ready(rdy_l), .in_data,
    .we(we_l), .waddr(wa_l), .wdata(wd_l), .done(done_l), .busy(busy_l));
  blk_loader #(.ROWS(ROWS), .ROW_BEATS(RB), .NP(NP), .GROUP(GC), .BY_COL(1'b1)) ur (
    .clk, .rst_n, .start, .bank, .in_valid, .in_ready(rdy_r), .in_data,
    .we(we_r), .waddr(wa_r), .wdata(wd_r), .done(done_r), .busy(busy_r));

  always #5 clk = ~clk;
  always @(posedge clk) for (int p = 0; p < NP; p++) begin
    if (we_l[p]) mem_l[p][wa_l] <= wd_l;
    if (we_r[p]) mem_r[p][wa_r] <= wd_r;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [63:0] tag(int b, int r, int c);
    return {32'(b), 16'(r), 16'(c)};
  endfunction

  initial begin
    int n, ndone;
    start = 0; bank = 0; in_valid = 0; in_data = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int b = 0; b < 2; b++) begin
      @(negedge clk); start = 1; bank = 1'(b);
      @(negedge clk); start = 0;
      n = 0; ndone = 0;
      while (n < ROWS * RB) begin
        in_valid = 1'($urandom_range(0, 3) != 0);
        in_data = tag(b, n / RB, n % RB);
        @(posedge clk);
        if (in_valid && rdy_l && rdy_r) n++;
        if (done_l) ndone++;
        @(negedge clk);
      end
      in_valid = 0;
      @(posedge clk); if (done_l && done_r) ndone++;
      @(negedge clk);
      checks++;
      if (ndone != 1 || busy_l || busy_r) begin failures++; $display("done/busy wrong bank %0d", b); end
    end
    // check contents
    for (int b = 0; b < 2; b++)
      for (int r = 0; r < ROWS; r++)
        for (int c = 0; c < RB; c++) begin
          int p, la;
          p = (r / GR) % NP; la = ((r / (GR * NP)) * GR + r % GR) * RB + c;
          checks++;
          if (mem_l[p][b * PD + la] !== tag(b, r, c)) begin failures++; $display("L b%0d r%0d c%0d", b, r, c); end
          p = (c / GC) % NP; la = r * (RB / NP) + (c / (GC * NP)) * GC + c % GC;
          checks++;
          if (mem_r[p][b * PD + la] !== tag(b, r, c)) begin failures++; $display("R b%0d r%0d c%0d", b, r, c); end
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
