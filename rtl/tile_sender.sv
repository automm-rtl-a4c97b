// tile_sender: PL -> AIE data mover of one packet-switched PLIO stream.
//
// One sender owns one partition of the LHS buffer (one AIE-array row index
// m.2, IS_LHS=1) or of the RHS buffer (one AIE-array column index n.2,
// IS_LHS=0). For every BATCH of the current block it must deliver B TILEs,
// one to each AIE row ID of the column(s) it feeds. The order of the
// (BATCH, ID) pairs comes from bubble_free_sched (the paper's zig-zag
// order). Each TILE is sent as a packet: one header beat that names the
// destination row (the packet-switch ID, so that one port serves all B rows
// of a column in turn, "time-division multiplexed") followed by the TILE in
// row-major 64-bit beats, the last beat flagged with out_last.
// BATCH b of a block stands for the PL reuse loop indices
//   b = (m1*Z + n1)*Y + k1   (m.1 outer, k.1 inner, as in the paper's loop nest)
// and the TILE of row ID starts at
//   LHS: row m1*TR,            beat column (k1*B + ID)*TCB, row stride Y*B*TCB
//   RHS: row (k1*B + ID)*TR,   beat column n1*TCB,          row stride Z*TCB
// inside the partition. The header layout (automm_pkg::pkt_hdr_t) is this
// design's own stand-in for the AIE packet header.
// Timing: buffer reads are synchronous (1 cycle); a two-entry output queue
// keeps the stream at one beat per cycle, so a TILE of TR*TCB beats takes
// TR*TCB+1 cycles. Interface: pulse start with bank while idle; done pulses
// when the last beat of the last TILE has been taken.
module tile_sender
  import automm_pkg::*;
#(
  parameter bit          IS_LHS = 1'b1,
  parameter int unsigned TR  = 32,   // TILE rows
  parameter int unsigned TCB = 16,   // TILE beats per row
  parameter int unsigned B   = 4,    // AIE rows per column (TILE IDs)
  parameter int unsigned X   = 2,
  parameter int unsigned Y   = 2,
  parameter int unsigned Z   = 2,
  localparam int unsigned NB = X * Y * Z,
  localparam int unsigned PD = IS_LHS ? X * TR * Y * B * TCB : Y * B * TR * Z * TCB,
  localparam int unsigned AW = $clog2(2 * PD)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic          bank,
  output logic          done,
  output logic          busy,
  // buffer read port
  output logic          rd_en,
  output logic [AW-1:0] raddr,
  input  logic [63:0]   rdata,
  // PLIO stream
  output logic          out_valid,
  input  logic          out_ready,
  output logic [63:0]   out_data,
  output logic          out_last
);
  localparam int unsigned BW = (NB > 1) ? $clog2(NB) : 1;
  localparam int unsigned IW = (B > 1) ? $clog2(B) : 1;
  localparam int unsigned RS = IS_LHS ? Y * B * TCB : Z * TCB;

  logic          s_valid, s_ready, s_last, s_busy, s_start;
  logic [BW-1:0] s_batch;
  logic [IW-1:0] s_id;

  bubble_free_sched #(.NB_MAX(NB), .NID(B)) u_sched (
    .clk, .rst_n, .start(s_start), .n_batch(($clog2(NB+1))'(NB)),
    .valid(s_valid), .ready(s_ready), .batch(s_batch), .id(s_id),
    .last(s_last), .busy(s_busy));

  // issue stage: header, then TR*TCB data beats per pair
  logic        run_q, bank_q, hdr_q;
  logic [31:0] i_q, jb_q;
  logic        issue, tile_end;
  logic        p_valid_q, p_hdr_q, p_last_q;
  logic [63:0] p_hdrdata_q;
  logic [63:0] q_data [2];
  logic        q_last [2];
  logic [1:0]  q_cnt;
  logic        q_rd;
  logic        pop;
  logic [31:0] row0, col0, k1, t, n1, m1;
  pkt_hdr_t    hdr;

  always_comb begin
    k1 = int'(s_batch) % Y;
    t  = int'(s_batch) / Y;
    n1 = t % Z;
    m1 = t / Z;
    if (IS_LHS) begin
      row0 = m1 * TR;
      col0 = (k1 * B + int'(s_id)) * TCB;
    end else begin
      row0 = (k1 * B + int'(s_id)) * TR;
      col0 = n1 * TCB;
    end
    hdr        = '0;
    hdr.batch  = 8'(s_batch);
    hdr.row_id = 8'(s_id);
  end

  assign pop      = out_valid && out_ready;
  assign issue    = run_q && s_valid && ((int'(q_cnt) + int'(p_valid_q) - int'(pop)) < 2);
  assign tile_end = !hdr_q && (i_q == TR - 1) && (jb_q == TCB - 1);
  assign s_ready  = issue && tile_end;
  assign s_start  = start && !run_q;
  assign rd_en    = issue && !hdr_q;
  assign raddr    = AW'((bank_q ? PD : 0) + (row0 + i_q) * RS + col0 + jb_q);
  assign busy     = run_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run_q <= 1'b0; bank_q <= 1'b0; hdr_q <= 1'b1; i_q <= 0; jb_q <= 0;
      p_valid_q <= 1'b0; p_hdr_q <= 1'b0; p_last_q <= 1'b0; p_hdrdata_q <= '0;
      done <= 1'b0;
    end else begin
      done <= 1'b0;
      p_valid_q <= issue;
      if (issue) begin
        p_hdr_q     <= hdr_q;
        p_last_q    <= tile_end;
        p_hdrdata_q <= hdr;
      end
      if (!run_q) begin
        if (start) begin
          run_q <= 1'b1; bank_q <= bank; hdr_q <= 1'b1; i_q <= 0; jb_q <= 0;
        end
      end else begin
        if (issue) begin
          if (hdr_q) hdr_q <= 1'b0;
          else if (jb_q != TCB - 1) jb_q <= jb_q + 1;
          else if (i_q != TR - 1) begin jb_q <= 0; i_q <= i_q + 1; end
          else begin jb_q <= 0; i_q <= 0; hdr_q <= 1'b1; end
        end
        // finished: scheduler drained, nothing in flight or queued
        if (!s_busy && !p_valid_q && q_cnt == 0) begin
          run_q <= 1'b0;
          done  <= 1'b1;
        end
      end
    end
  end

  // two-entry output queue (circular)
  logic wr_ptr, rd_ptr;
  assign q_rd      = rd_ptr;
  assign out_valid = (q_cnt != 0);
  assign out_data  = q_data[q_rd];
  assign out_last  = q_last[q_rd];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      q_cnt <= '0; wr_ptr <= 1'b0; rd_ptr <= 1'b0;
      q_data[0] <= '0; q_data[1] <= '0; q_last[0] <= 1'b0; q_last[1] <= 1'b0;
    end else begin
      if (p_valid_q) begin
        q_data[wr_ptr] <= p_hdr_q ? p_hdrdata_q : rdata;
        q_last[wr_ptr] <= p_last_q;
        wr_ptr <= ~wr_ptr;
      end
      if (pop) rd_ptr <= ~rd_ptr;
      q_cnt <= q_cnt + 2'(p_valid_q) - 2'(pop);
    end
  end

  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n) q_cnt <= 2);
  a_stable: assert property (@(posedge clk) disable iff (!rst_n)
    out_valid && !out_ready |=> out_valid && $stable(out_data));
endmodule
