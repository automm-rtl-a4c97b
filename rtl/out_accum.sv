// out_accum: PL receiver and accumulator of one AIE column's output.
//
// Each AIE column (fixed m.2, n.2) reduces B TILEs over k inside the array
// and sends one TI x TJ partial-result TILE per BATCH to the PL. The PL
// accumulates these partial results over the PL reuse loop k.1 and the
// off-chip loop k.0 (output-stationary dataflow), so the output buffer
// holds a block until its last k.0 iteration. This module owns the output
// partition of its column: two banks (ping-pong, so that one bank can be
// stored off-chip while the other accumulates), each X*Z TILEs of TR rows
// by TCB beats (2 results per 64-bit beat). BATCH b of an iteration is
// b = (m1*Z + n1)*Y + k1; its TILE goes to tile slot m1*Z + n1. The first
// TILE of a slot in the first k.0 iteration (first=1, k1=0) overwrites,
// every other TILE is added: FP32 with fp32_add, INT16/INT8 designs with
// 32-bit integer adds. The per-column partition and bank scheme are this
// design's choices; the paper says only that partial results are
// accumulated on the PL side.
// Timing: one beat per cycle, no stalls; a beat is read in the cycle it is
// accepted and written back one cycle later (a forwarding path covers a
// write to the address being read). Interface: pulse it_start with first
// and bank, then NB TILEs arrive on in_*; it_done pulses with the last
// write. The drain port reads the other bank (synchronous read).
module out_accum
  import automm_pkg::*;
#(
  parameter dtype_e      DTYPE = DT_FP32,
  parameter int unsigned TR  = 32,   // TILE rows (TI)
  parameter int unsigned TCB = 16,   // TILE beats per row (TJ/2)
  parameter int unsigned X   = 2,
  parameter int unsigned Y   = 2,
  parameter int unsigned Z   = 2,
  localparam int unsigned NB = X * Y * Z,
  localparam int unsigned PD = X * Z * TR * TCB,
  localparam int unsigned AW = (PD > 1) ? $clog2(PD) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          it_start,
  input  logic          first,
  input  logic          bank,
  output logic          it_done,
  output logic          busy,
  input  logic          in_valid,
  output logic          in_ready,
  input  logic [63:0]   in_data,
  input  logic          in_last,
  // drain read port (bank dr_bank)
  input  logic          dr_en,
  input  logic          dr_bank,
  input  logic [AW-1:0] dr_addr,
  output logic [63:0]   dr_data
);
  logic        run_q, bank_q, first_q;
  logic [31:0] tb_q, beat_q;
  logic        fire, tile_end, acc_a;
  logic [AW-1:0] addr_a;
  // stage B
  logic        b_valid_q, b_acc_q, fwd_q;
  logic [AW-1:0] b_addr_q;
  logic [63:0] b_in_q, b_old, b_sum, b_wdata_q;
  logic [63:0] rdata [2];

  assign busy     = run_q;
  assign in_ready = run_q;
  assign fire     = run_q && in_valid;
  assign tile_end = (beat_q == TR * TCB - 1);
  assign acc_a    = !(first_q && (tb_q % Y == 0));
  assign addr_a   = AW'((tb_q / Y) * TR * TCB + beat_q);

  // the beat written last cycle is the one being read now: forward it
  assign b_old = fwd_q ? b_wdata_q : rdata[bank_q];

  for (genvar l = 0; l < 2; l++) begin : g_lane
    logic [31:0] x, y, sum;
    assign x = b_old[32*l +: 32];
    assign y = b_in_q[32*l +: 32];
    if (DTYPE == DT_FP32) begin : g_fp
      fp32_add u_add (.a(x), .b(y), .s(sum));
    end else begin : g_int
      assign sum = x + y;
    end
    assign b_sum[32*l +: 32] = b_acc_q ? sum : y;
  end

  // bank RAMs: the accumulator uses bank_q, the drain the other one
  for (genvar k = 0; k < 2; k++) begin : g_bank
    logic mine;
    assign mine = run_q && (bank_q == 1'(k));
    tile_ram #(.W(64), .DEPTH(PD)) u_ram (
      .clk,
      .we    (b_valid_q && (bank_q == 1'(k))),
      .waddr (b_addr_q),
      .wdata (b_sum),
      .rd_en (mine ? fire : (dr_en && dr_bank == 1'(k))),
      .raddr (mine ? addr_a : dr_addr),
      .rdata (rdata[k]));
  end
  assign dr_data = rdata[dr_bank];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run_q <= 1'b0; bank_q <= 1'b0; first_q <= 1'b0; tb_q <= 0; beat_q <= 0;
      b_valid_q <= 1'b0; b_acc_q <= 1'b0; b_addr_q <= '0; b_in_q <= '0; fwd_q <= 1'b0;
      b_wdata_q <= '0; it_done <= 1'b0;
    end else begin
      it_done   <= 1'b0;
      b_valid_q <= fire;
      b_wdata_q <= b_sum;
      fwd_q     <= fire && b_valid_q && (b_addr_q == addr_a);
      if (fire) begin
        b_acc_q  <= acc_a;
        b_addr_q <= addr_a;
        b_in_q   <= in_data;
      end
      if (!run_q) begin
        if (it_start) begin
          run_q <= 1'b1; bank_q <= bank; first_q <= first; tb_q <= 0; beat_q <= 0;
        end
      end else if (fire) begin
        if (!tile_end) beat_q <= beat_q + 1;
        else begin
          beat_q <= 0;
          if (tb_q == NB - 1) begin
            run_q   <= 1'b0;
            it_done <= 1'b1;   // the last write happens this cycle+1, with it_done
          end else tb_q <= tb_q + 1;
        end
      end
    end
  end

  // TILE boundaries of the stream must match the TILE size
  a_last: assert property (@(posedge clk) disable iff (!rst_n) fire |-> (in_last == tile_end));
  // the drain never reads the bank being accumulated
  a_bank: assert property (@(posedge clk) disable iff (!rst_n) (run_q && dr_en) |-> (dr_bank != bank_q));
endmodule
