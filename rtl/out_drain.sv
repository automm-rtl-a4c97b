// out_drain: PL -> off-chip store of one finished output block.
//
// When the last k.0 iteration of an output block has been accumulated, the
// block (X*A*TI rows by Z*C*TJ columns of 32-bit results) sits spread over
// the A*C per-column partitions of out_accum, in one bank. This module
// reads it back in row-major order and streams it out, two results per
// 64-bit beat, while the other bank already accumulates the next block
// (the paper's double buffering of the off-chip store). For block row r and
// beat column cb:
//   m1 = r/(A*TR), m2 = (r/TR)%A, i = r%TR, n1 = cb/(C*TCB), n2 = (cb/TCB)%C, jb = cb%TCB
//   partition m2*C + n2, address (m1*Z + n1)*TR*TCB + i*TCB + jb
// One shared read address goes to all partitions; the selected
// partition's word is picked one cycle later. A two-entry queue keeps one
// beat per cycle under back-pressure. Interface: pulse start with bank;
// out_last flags the final beat of the block; done pulses once it is taken.
// The stream format is this design's choice.
module out_drain #(
  parameter int unsigned A   = 1,
  parameter int unsigned C   = 4,
  parameter int unsigned X   = 2,
  parameter int unsigned Z   = 2,
  parameter int unsigned TR  = 32,
  parameter int unsigned TCB = 16,
  localparam int unsigned NCOL = A * C,
  localparam int unsigned PD = X * Z * TR * TCB,
  localparam int unsigned AW = (PD > 1) ? $clog2(PD) : 1
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  start,
  input  logic                  bank,
  output logic                  done,
  output logic                  busy,
  output logic                  dr_en,
  output logic                  dr_bank,
  output logic [AW-1:0]         dr_addr,
  input  logic [NCOL-1:0][63:0] dr_data,
  output logic                  out_valid,
  input  logic                  out_ready,
  output logic [63:0]           out_data,
  output logic                  out_last
);
  localparam int unsigned ROWS = X * A * TR;
  localparam int unsigned RB   = Z * C * TCB;

  logic        run_q, bank_q, issued_all_q;
  logic [31:0] r_q, cb_q;
  logic [31:0] col, m1, m2, i, n1, n2, jb;
  logic        issue, last_a, pop;
  logic        p_valid_q, p_last_q;
  logic [31:0] p_col_q;
  logic [63:0] q_data [2];
  logic        q_last [2];
  logic [1:0]  q_cnt;
  logic        wr_ptr, rd_ptr;

  always_comb begin
    m1 = r_q / (A * TR);  m2 = (r_q / TR) % A;  i  = r_q % TR;
    n1 = cb_q / (C * TCB); n2 = (cb_q / TCB) % C; jb = cb_q % TCB;
    col = m2 * C + n2;
  end

  assign pop     = out_valid && out_ready;
  assign issue   = run_q && !issued_all_q && ((int'(q_cnt) + int'(p_valid_q) - int'(pop)) < 2);
  assign last_a  = (r_q == ROWS - 1) && (cb_q == RB - 1);
  assign dr_en   = issue;
  assign dr_bank = bank_q;
  assign dr_addr = AW'((m1 * Z + n1) * TR * TCB + i * TCB + jb);
  assign busy    = run_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run_q <= 1'b0; bank_q <= 1'b0; issued_all_q <= 1'b0; r_q <= 0; cb_q <= 0;
      p_valid_q <= 1'b0; p_last_q <= 1'b0; p_col_q <= 0; done <= 1'b0;
    end else begin
      done      <= 1'b0;
      p_valid_q <= issue;
      if (issue) begin
        p_last_q <= last_a;
        p_col_q  <= col;
      end
      if (!run_q) begin
        if (start) begin
          run_q <= 1'b1; bank_q <= bank; issued_all_q <= 1'b0; r_q <= 0; cb_q <= 0;
        end
      end else begin
        if (issue) begin
          if (last_a) issued_all_q <= 1'b1;
          else if (cb_q == RB - 1) begin cb_q <= 0; r_q <= r_q + 1; end
          else cb_q <= cb_q + 1;
        end
        if (pop && out_last) begin
          run_q <= 1'b0;
          done  <= 1'b1;
        end
      end
    end
  end

  assign out_valid = (q_cnt != 0);
  assign out_data  = q_data[rd_ptr];
  assign out_last  = q_last[rd_ptr];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      q_cnt <= '0; wr_ptr <= 1'b0; rd_ptr <= 1'b0;
      q_data[0] <= '0; q_data[1] <= '0; q_last[0] <= 1'b0; q_last[1] <= 1'b0;
    end else begin
      if (p_valid_q) begin
        q_data[wr_ptr] <= dr_data[p_col_q];
        q_last[wr_ptr] <= p_last_q;
        wr_ptr <= ~wr_ptr;
      end
      if (pop) rd_ptr <= ~rd_ptr;
      q_cnt <= q_cnt + 2'(p_valid_q) - 2'(pop);
    end
  end

  a_stable: assert property (@(posedge clk) disable iff (!rst_n)
    out_valid && !out_ready |=> out_valid && $stable(out_data));
endmodule
