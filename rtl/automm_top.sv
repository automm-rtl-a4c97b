// automm_top: programmable-logic side of the AutoMM matrix-multiply
// accelerator for a Versal-class device (PL + AI Engine array).
//
// C[M][N] = A[M][K] * B[K][N] is tiled on four levels (Listing-1 loop nest
// of the paper):
//   off-chip  m.0, n.0, k.0   one LHS block (X*A*TI x Y*B*TK) and one RHS
//                             block (Y*B*TK x Z*C*TJ) per iteration,
//                             streamed in from off-chip memory
//   PL reuse  m.1, n.1, k.1   X*Y*Z BATCHes taken from the PL buffers
//   AIE array m.2, n.2, k.2   A*C columns of B AIEs; the B AIEs of a column
//                             reduce over k.2 in a chain
//   one AIE   TI x TK x TJ    one TILE per AIE per BATCH
// This module holds everything on the PL: the double-buffered LHS and RHS
// buffers with their loaders (blk_loader, tile_ram), one PL->AIE data mover
// per LHS row partition and per RHS column partition (tile_sender, which
// sends TILEs as packets in the bubble-free order of bubble_free_sched),
// the broadcast of each mover onto C/BF_L (LHS) or A/BF_R (RHS) PLIO ports
// (stream_bcast), one accumulator per AIE column (out_accum, double-banked)
// and the store path (out_drain). The AIE array itself, its switches and
// the PL/AIE interface tiles are vendor hardware and sit outside: their
// PLIO streams are ports of this module.
//
// PLIO port map (this design's numbering):
//   LHS port p = m2*(C/BF_L) + g feeds columns (m2, n2) with n2/BF_L == g
//   RHS port q = n2*(A/BF_R) + h feeds columns (m2, n2) with m2/BF_R == h
//   output port c = m2*C + n2 comes from column (m2, n2)
// Every LHS/RHS packet is one header beat (automm_pkg::pkt_hdr_t: TILE ID =
// destination row inside the column, BATCH) and TI*TK/EPB resp.
// TK*TJ/EPB data beats, out_last on the last. Output TILEs are TI*TJ/2
// beats of two 32-bit results, in BATCH order, no header.
//
// Control: pulse start with the outer loop counts cfg_m0/n0/k0 (M =
// cfg_m0*X*A*TI and so on). The host streams LHS and RHS blocks in the
// order of the (m.0, n.0, k.0) loop, k.0 innermost; results come out one
// output block per (m.0, n.0) on res_*, row-major. Loading of iteration i+1
// overlaps sending of iteration i (two input banks); accumulating block
// o+1 overlaps storing block o (two output banks). done pulses after the
// last result beat.
module automm_top
  import automm_pkg::*;
#(
  parameter dtype_e      DTYPE = DT_FP32,
  parameter int unsigned TI = 32,
  parameter int unsigned TK = 32,
  parameter int unsigned TJ = 32,
  parameter int unsigned A  = 1,
  parameter int unsigned B  = 4,
  parameter int unsigned C  = 4,
  parameter int unsigned X  = 2,
  parameter int unsigned Y  = 2,
  parameter int unsigned Z  = 2,
  parameter int unsigned BF_L = 2,
  parameter int unsigned BF_R = 1,
  parameter int unsigned CW = 16,
  localparam int unsigned EPB  = in_epb(DTYPE),
  localparam int unsigned NLP  = A * (C / BF_L),
  localparam int unsigned NRP  = C * (A / BF_R),
  localparam int unsigned NCOL = A * C
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // run control (host)
  input  logic                  start,
  input  logic [CW-1:0]         cfg_m0,
  input  logic [CW-1:0]         cfg_n0,
  input  logic [CW-1:0]         cfg_k0,
  output logic                  busy,
  output logic                  done,
  // off-chip side
  input  logic                  lhs_in_valid,
  output logic                  lhs_in_ready,
  input  logic [63:0]           lhs_in_data,
  input  logic                  rhs_in_valid,
  output logic                  rhs_in_ready,
  input  logic [63:0]           rhs_in_data,
  output logic                  res_valid,
  input  logic                  res_ready,
  output logic [63:0]           res_data,
  output logic                  res_last,
  // PLIO to the AIE array
  output logic [NLP-1:0]        lhs_plio_valid,
  input  logic [NLP-1:0]        lhs_plio_ready,
  output logic [NLP-1:0][63:0]  lhs_plio_data,
  output logic [NLP-1:0]        lhs_plio_last,
  output logic [NRP-1:0]        rhs_plio_valid,
  input  logic [NRP-1:0]        rhs_plio_ready,
  output logic [NRP-1:0][63:0]  rhs_plio_data,
  output logic [NRP-1:0]        rhs_plio_last,
  // PLIO from the AIE array
  input  logic [NCOL-1:0]       out_plio_valid,
  output logic [NCOL-1:0]       out_plio_ready,
  input  logic [NCOL-1:0][63:0] out_plio_data,
  input  logic [NCOL-1:0]       out_plio_last
);
  localparam int unsigned TKB  = TK / EPB;          // LHS TILE beats per row
  localparam int unsigned TJB  = TJ / EPB;          // RHS TILE beats per row
  localparam int unsigned TJO  = TJ / OUT_EPB;      // output TILE beats per row
  localparam int unsigned PD_L = X * TI * Y * B * TKB;
  localparam int unsigned PD_R = Y * B * TK * Z * TJB;
  localparam int unsigned PD_O = X * Z * TI * TJO;
  localparam int unsigned AW_L = $clog2(2 * PD_L);
  localparam int unsigned AW_R = $clog2(2 * PD_R);
  localparam int unsigned AW_O = (PD_O > 1) ? $clog2(PD_O) : 1;
  localparam int unsigned NBC_L = C / BF_L;         // LHS ports per mover
  localparam int unsigned NBC_R = A / BF_R;         // RHS ports per mover

  // ------------------------------------------------------------------
  // outer-loop bookkeeping
  // ------------------------------------------------------------------
  logic [31:0] nit_q, nob_q, k0_q;
  logic        run_q;
  logic [31:0] ld_it_q, ld_done_q, sd_done_q, dr_done_q;
  logic        ld_busy_q, ld_l_f, ld_r_f, sd_busy_q;
  logic        l_start, r_start, l_done, r_done;
  logic        sd_start;
  logic [A-1:0] sl_done;
  logic [C-1:0] sr_done;
  logic [A-1:0] sl_f_q;
  logic [C-1:0] sr_f_q;

  assign busy = run_q;

  // ------------------------------------------------------------------
  // off-chip -> PL loaders and buffers
  // ------------------------------------------------------------------
  logic [A-1:0]      l_we;
  logic [AW_L-1:0]   l_waddr;
  logic [63:0]       l_wdata;
  logic [C-1:0]      r_we;
  logic [AW_R-1:0]   r_waddr;
  logic [63:0]       r_wdata;

  assign l_start = run_q && !ld_busy_q && (ld_it_q < nit_q) && (ld_it_q < sd_done_q + 2);
  assign r_start = l_start;

  blk_loader #(.ROWS(X * A * TI), .ROW_BEATS(Y * B * TKB), .NP(A), .GROUP(TI), .BY_COL(1'b0)) u_ld_l (
    .clk, .rst_n, .start(l_start), .bank(ld_it_q[0]),
    .in_valid(lhs_in_valid), .in_ready(lhs_in_ready), .in_data(lhs_in_data),
    .we(l_we), .waddr(l_waddr), .wdata(l_wdata), .done(l_done), .busy());

  blk_loader #(.ROWS(Y * B * TK), .ROW_BEATS(Z * C * TJB), .NP(C), .GROUP(TJB), .BY_COL(1'b1)) u_ld_r (
    .clk, .rst_n, .start(r_start), .bank(ld_it_q[0]),
    .in_valid(rhs_in_valid), .in_ready(rhs_in_ready), .in_data(rhs_in_data),
    .we(r_we), .waddr(r_waddr), .wdata(r_wdata), .done(r_done), .busy());

  // ------------------------------------------------------------------
  // PL -> AIE movers, one per LHS row partition and per RHS column partition
  // ------------------------------------------------------------------
  assign sd_start = run_q && !sd_busy_q && (sd_done_q < ld_done_q);

  for (genvar m2 = 0; m2 < A; m2++) begin : g_lhs
    logic            rd_en, v, rdy, lst;
    logic [AW_L-1:0] raddr;
    logic [63:0]     rdata, d;
    logic [NBC_L-1:0]        bv, br;
    logic [NBC_L-1:0][64:0]  bd;

    tile_ram #(.W(64), .DEPTH(2 * PD_L)) u_buf (
      .clk, .we(l_we[m2]), .waddr(l_waddr), .wdata(l_wdata),
      .rd_en, .raddr, .rdata);

    tile_sender #(.IS_LHS(1'b1), .TR(TI), .TCB(TKB), .B(B), .X(X), .Y(Y), .Z(Z)) u_send (
      .clk, .rst_n, .start(sd_start), .bank(sd_done_q[0]), .done(sl_done[m2]), .busy(),
      .rd_en, .raddr, .rdata, .out_valid(v), .out_ready(rdy), .out_data(d), .out_last(lst));

    stream_bcast #(.N(NBC_L), .W(65)) u_bc (
      .clk, .rst_n, .in_valid(v), .in_ready(rdy), .in_data({lst, d}),
      .out_valid(bv), .out_ready(br), .out_data(bd));

    for (genvar g = 0; g < NBC_L; g++) begin : g_port
      assign lhs_plio_valid[m2 * NBC_L + g] = bv[g];
      assign br[g]                           = lhs_plio_ready[m2 * NBC_L + g];
      assign lhs_plio_data[m2 * NBC_L + g]  = bd[g][63:0];
      assign lhs_plio_last[m2 * NBC_L + g]  = bd[g][64];
    end
  end

  for (genvar n2 = 0; n2 < C; n2++) begin : g_rhs
    logic            rd_en, v, rdy, lst;
    logic [AW_R-1:0] raddr;
    logic [63:0]     rdata, d;
    logic [NBC_R-1:0]        bv, br;
    logic [NBC_R-1:0][64:0]  bd;

    tile_ram #(.W(64), .DEPTH(2 * PD_R)) u_buf (
      .clk, .we(r_we[n2]), .waddr(r_waddr), .wdata(r_wdata),
      .rd_en, .raddr, .rdata);

    tile_sender #(.IS_LHS(1'b0), .TR(TK), .TCB(TJB), .B(B), .X(X), .Y(Y), .Z(Z)) u_send (
      .clk, .rst_n, .start(sd_start), .bank(sd_done_q[0]), .done(sr_done[n2]), .busy(),
      .rd_en, .raddr, .rdata, .out_valid(v), .out_ready(rdy), .out_data(d), .out_last(lst));

    stream_bcast #(.N(NBC_R), .W(65)) u_bc (
      .clk, .rst_n, .in_valid(v), .in_ready(rdy), .in_data({lst, d}),
      .out_valid(bv), .out_ready(br), .out_data(bd));

    for (genvar h = 0; h < NBC_R; h++) begin : g_port
      assign rhs_plio_valid[n2 * NBC_R + h] = bv[h];
      assign br[h]                           = rhs_plio_ready[n2 * NBC_R + h];
      assign rhs_plio_data[n2 * NBC_R + h]  = bd[h][63:0];
      assign rhs_plio_last[n2 * NBC_R + h]  = bd[h][64];
    end
  end

  // ------------------------------------------------------------------
  // AIE -> PL accumulation, one per AIE column, and the store path
  // ------------------------------------------------------------------
  logic [NCOL-1:0]        a_start, a_done, a_busy, a_first, a_bank;
  logic [NCOL-1:0][63:0]  dr_data;
  logic                   dr_en, dr_bank, dr_start, dr_done, dr_busy_q;
  logic [AW_O-1:0]        dr_addr;
  logic [31:0]            acc_it_q [NCOL];
  logic [31:0]            acc_k0_q [NCOL];
  logic [31:0]            acc_o_q  [NCOL];
  logic                   all_cols_done;

  for (genvar c = 0; c < NCOL; c++) begin : g_col
    assign a_start[c] = run_q && !a_busy[c] && !a_done[c] && (acc_it_q[c] < nit_q) && (acc_o_q[c] < dr_done_q + 2);
    assign a_first[c] = (acc_k0_q[c] == 0);
    assign a_bank[c]  = acc_o_q[c][0];

    out_accum #(.DTYPE(DTYPE), .TR(TI), .TCB(TJO), .X(X), .Y(Y), .Z(Z)) u_acc (
      .clk, .rst_n, .it_start(a_start[c]), .first(a_first[c]), .bank(a_bank[c]),
      .it_done(a_done[c]), .busy(a_busy[c]),
      .in_valid(out_plio_valid[c]), .in_ready(out_plio_ready[c]),
      .in_data(out_plio_data[c]), .in_last(out_plio_last[c]),
      .dr_en, .dr_bank, .dr_addr, .dr_data(dr_data[c]));
  end

  always_comb begin
    all_cols_done = 1'b1;
    for (int c = 0; c < NCOL; c++)
      if (acc_o_q[c] <= dr_done_q) all_cols_done = 1'b0;
  end

  assign dr_start = run_q && !dr_busy_q && (dr_done_q < nob_q) && all_cols_done;

  out_drain #(.A(A), .C(C), .X(X), .Z(Z), .TR(TI), .TCB(TJO)) u_drain (
    .clk, .rst_n, .start(dr_start), .bank(dr_done_q[0]), .done(dr_done), .busy(),
    .dr_en, .dr_bank, .dr_addr, .dr_data,
    .out_valid(res_valid), .out_ready(res_ready), .out_data(res_data), .out_last(res_last));

  // ------------------------------------------------------------------
  // counters
  // ------------------------------------------------------------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run_q <= 1'b0; done <= 1'b0;
      nit_q <= '0; nob_q <= '0; k0_q <= '0;
      ld_it_q <= '0; ld_done_q <= '0; sd_done_q <= '0; dr_done_q <= '0;
      ld_busy_q <= 1'b0; ld_l_f <= 1'b0; ld_r_f <= 1'b0;
      sd_busy_q <= 1'b0; sl_f_q <= '0; sr_f_q <= '0; dr_busy_q <= 1'b0;
      for (int c = 0; c < NCOL; c++) begin
        acc_it_q[c] <= '0; acc_k0_q[c] <= '0; acc_o_q[c] <= '0;
      end
    end else begin
      done <= 1'b0;
      if (!run_q) begin
        if (start && cfg_m0 != 0 && cfg_n0 != 0 && cfg_k0 != 0) begin
          run_q <= 1'b1;
          nob_q <= 32'(cfg_m0) * 32'(cfg_n0);
          nit_q <= 32'(cfg_m0) * 32'(cfg_n0) * 32'(cfg_k0);
          k0_q  <= 32'(cfg_k0);
          ld_it_q <= '0; ld_done_q <= '0; sd_done_q <= '0; dr_done_q <= '0;
          for (int c = 0; c < NCOL; c++) begin
            acc_it_q[c] <= '0; acc_k0_q[c] <= '0; acc_o_q[c] <= '0;
          end
        end
      end else begin
        // loaders: both blocks of an iteration must be in before it counts
        if (l_start) begin
          ld_busy_q <= 1'b1;
          ld_it_q   <= ld_it_q + 1;
        end
        if (ld_busy_q && (ld_l_f || l_done) && (ld_r_f || r_done)) begin
          ld_busy_q <= 1'b0; ld_l_f <= 1'b0; ld_r_f <= 1'b0;
          ld_done_q <= ld_done_q + 1;
        end else begin
          if (l_done) ld_l_f <= 1'b1;
          if (r_done) ld_r_f <= 1'b1;
        end
        // movers: the input bank is free once every mover has sent it
        if (sd_start) sd_busy_q <= 1'b1;
        if (sd_busy_q && (&(sl_f_q | sl_done)) && (&(sr_f_q | sr_done))) begin
          sd_busy_q <= 1'b0; sl_f_q <= '0; sr_f_q <= '0;
          sd_done_q <= sd_done_q + 1;
        end else begin
          sl_f_q <= sl_f_q | sl_done;
          sr_f_q <= sr_f_q | sr_done;
        end
        // accumulators
        for (int c = 0; c < NCOL; c++) begin
          if (a_done[c]) begin
            acc_it_q[c] <= acc_it_q[c] + 1;
            if (acc_k0_q[c] == k0_q - 1) begin
              acc_k0_q[c] <= '0;
              acc_o_q[c]  <= acc_o_q[c] + 1;
            end else acc_k0_q[c] <= acc_k0_q[c] + 1;
          end
        end
        // store
        if (dr_start) dr_busy_q <= 1'b1;
        if (dr_done) begin
          dr_busy_q <= 1'b0;
          dr_done_q <= dr_done_q + 1;
          if (dr_done_q + 1 == nob_q) begin
            run_q <= 1'b0;
            done  <= 1'b1;
          end
        end
      end
    end
  end

  // a mover never reads the bank a loader is filling
  a_bank_sep: assert property (@(posedge clk) disable iff (!rst_n)
    (sd_busy_q && ld_busy_q) |-> (ld_it_q[0] == sd_done_q[0]));
  // tiling must divide the beat width
  initial begin
    assert (TK % EPB == 0 && TJ % EPB == 0 && TJ % OUT_EPB == 0) else $error("TILE width not a multiple of the beat");
    assert (C % BF_L == 0 && A % BF_R == 0) else $error("broadcast factor must divide the array size");
  end
endmodule
