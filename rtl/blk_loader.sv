// blk_loader: off-chip -> PL loader of one LHS or RHS block.
//
// At the off-chip level the accelerator loads one block of LHS (X*A*TI rows
// by Y*B*TK columns) or RHS (Y*B*TK rows by Z*C*TJ columns) per outer-loop
// iteration, while the previous block is being sent to the AIE array: the
// PL buffers are double-buffered (the paper applies "the double buffer
// technique" at this level). The block arrives as a row-major stream of
// 64-bit beats. The buffer is split into NP partitions so that each PL->AIE
// data mover owns one: LHS by groups of GROUP=TI rows (partition = the AIE
// array row index m.2), RHS by groups of GROUP=TJ/EPB beats (partition =
// the AIE array column index n.2). Inside a partition the data stays
// row-major; bank selects the upper or lower half of every partition.
//   row-partitioned:    part = (r/GROUP)%NP,  local = ((r/(GROUP*NP))*GROUP + r%GROUP)*ROW_BEATS + cb
//   column-partitioned: part = (cb/GROUP)%NP, local = r*(ROW_BEATS/NP) + (cb/(GROUP*NP))*GROUP + cb%GROUP
// The stream format and partitioning are this design's choices.
// Interface: pulse start with bank; the loader then accepts ROWS*ROW_BEATS
// beats (one per cycle, in_ready is high while busy) and writes each into
// its partition the same cycle; done pulses with the last write.
// wdata is in_data itself: the loader only adds the partition enable and
// the address, no register stage.
module blk_loader #(
  parameter int unsigned ROWS      = 64,
  parameter int unsigned ROW_BEATS = 128,
  parameter int unsigned NP        = 1,
  parameter int unsigned GROUP     = 32,
  parameter bit          BY_COL    = 1'b0,
  localparam int unsigned PD = ROWS * ROW_BEATS / NP,
  localparam int unsigned AW = $clog2(2 * PD),
  localparam int unsigned RW = (ROWS > 1) ? $clog2(ROWS) : 1,
  localparam int unsigned CW = (ROW_BEATS > 1) ? $clog2(ROW_BEATS) : 1
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,
  input  logic            bank,
  input  logic            in_valid,
  output logic            in_ready,
  input  logic [63:0]     in_data,
  output logic [NP-1:0]   we,
  output logic [AW-1:0]   waddr,
  output logic [63:0]     wdata,
  output logic            done,
  output logic            busy
);
  logic [RW-1:0] r_q;
  logic [CW-1:0] cb_q;
  logic          bank_q, run_q;
  logic [31:0]   part, local_a;
  logic          fire, last;

  assign busy     = run_q;
  assign in_ready = run_q;
  assign fire     = run_q && in_valid;
  assign last     = (int'(r_q) == ROWS - 1) && (int'(cb_q) == ROW_BEATS - 1);

  always_comb begin
    if (BY_COL) begin
      part    = (int'(cb_q) / GROUP) % NP;
      local_a = int'(r_q) * (ROW_BEATS / NP) + (int'(cb_q) / (GROUP * NP)) * GROUP + int'(cb_q) % GROUP;
    end else begin
      part    = (int'(r_q) / GROUP) % NP;
      local_a = ((int'(r_q) / (GROUP * NP)) * GROUP + int'(r_q) % GROUP) * ROW_BEATS + int'(cb_q);
    end
    we    = '0;
    we[part] = fire;
    waddr = AW'(bank_q ? local_a + PD : local_a);
    wdata = in_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run_q  <= 1'b0;
      bank_q <= 1'b0;
      r_q    <= '0;
      cb_q   <= '0;
      done   <= 1'b0;
    end else begin
      done <= 1'b0;
      if (!run_q) begin
        if (start) begin
          run_q  <= 1'b1;
          bank_q <= bank;
          r_q    <= '0;
          cb_q   <= '0;
        end
      end else if (fire) begin
        if (last) begin
          run_q <= 1'b0;
          done  <= 1'b1;
        end else if (int'(cb_q) == ROW_BEATS - 1) begin
          cb_q <= '0;
          r_q  <= r_q + 1'b1;
        end else begin
          cb_q <= cb_q + 1'b1;
        end
      end
    end
  end
endmodule
