// tb_tile_ram: writes random words, reads them back with the one-cycle read
// latency, and checks read-during-write of the same address returns the
// old word.
module tb_tile_ram;
  localparam int W = 64, DEPTH = 256;
  logic clk = 0;
  logic we = 0, rd_en = 0;
  logic [7:0] waddr = 0, raddr = 0;
  logic [W-1:0] wdata = 0, rdata;
  logic [W-1:0] model [DEPTH];
  int checks = 0, failures = 0;

  tile_ram #(.W(W), .DEPTH(DEPTH)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    @(negedge clk);
    for (int a = 0; a < DEPTH; a++) begin
      we = 1; waddr = 8'(a); wdata = {$urandom, $urandom}; model[a] = wdata;
      @(negedge clk);
    end
    we = 0;
    for (int n = 0; n < 600; n++) begin
      automatic int a = $urandom_range(0, DEPTH - 1);
      rd_en = 1; raddr = 8'(a);
      // write the same address in the same cycle: old data must come back
      we = (n % 3 == 0); waddr = 8'(a); wdata = {$urandom, $urandom};
      @(negedge clk);
      checks++;
      if (rdata != model[a]) begin failures++; $display("addr %0d got %h want %h", a, rdata, model[a]); end
      if (we) model[a] = wdata;
      rd_en = 0; we = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
