// aie_array_model: behavioural model (not synthesizable) of the AI Engine
// array side of the accelerator, for system testbenches.
//
// Models A*C columns of B AI Engines as seen from the PLIO streams:
// - the AXI-stream switches: every LHS port feeds BF_L columns of one AIE
//   array row m.2 (broadcast) and every RHS port BF_R rows of one column
//   n.2; inside a column the packet header's TILE ID selects the AIE
//   (packet switching). A beat is taken only when every destination AIE
//   can store it (the broadcast stalls as a whole).
// - each AIE: two local-memory banks (ping-pong) for LHS and RHS TILEs;
//   TILE n of an AIE goes to bank n%2 and may only arrive once TILE n-2 has
//   been computed. An AIE computes BATCH n when both TILEs are in, the AIE
//   below has finished BATCH n (the read-after-write chain of the k.2
//   reduction) and the AIE above has consumed BATCH n-2; a computation
//   takes COMP_CYC cycles and adds the AIE below's partial result.
// - the top AIE of every column streams its TI x TJ result out, two 32-bit
//   words per beat.
// Arithmetic is exact integer arithmetic on the decoded elements (tests use
// integer-valued FP32 data, so IEEE rounding never occurs); FP32 results
// are encoded back to single precision. STALL adds random refusals on the
// input ports (interface-tile or switch congestion). It also counts what happened:
// packets to rows above 0, broadcast beats, stalls and compute bubbles
// (an idle AIE in the middle of a block of NB BATCHes).
module aie_array_model #(
  parameter int DT = 0,              // 0 FP32, 1 INT16, 2 INT8
  parameter int TI = 32, TK = 32, TJ = 32,
  parameter int A = 1, B = 4, C = 4,
  parameter int BF_L = 2, BF_R = 1,
  parameter int NB = 8,              // BATCHes per block (X*Y*Z)
  parameter int COMP_CYC = 2100,
  parameter int STALL = 0,           // percent of cycles a PLIO input refuses a beat
  localparam int EPB = (DT == 0) ? 2 : ((DT == 1) ? 4 : 8),
  localparam int EW = 64 / EPB,
  localparam int NLP = A * (C / BF_L),
  localparam int NRP = C * (A / BF_R),
  localparam int NCOL = A * C
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic [NLP-1:0]        lhs_valid,
  output logic [NLP-1:0]        lhs_ready,
  input  logic [NLP-1:0][63:0]  lhs_data,
  input  logic [NLP-1:0]        lhs_last,
  input  logic [NRP-1:0]        rhs_valid,
  output logic [NRP-1:0]        rhs_ready,
  input  logic [NRP-1:0][63:0]  rhs_data,
  input  logic [NRP-1:0]        rhs_last,
  output logic [NCOL-1:0]       out_valid,
  input  logic [NCOL-1:0]       out_ready,
  output logic [NCOL-1:0][63:0] out_data,
  output logic [NCOL-1:0]       out_last
);
  longint Lm [NCOL][B][2][TI*TK];
  longint Rm [NCOL][B][2][TK*TJ];
  longint Ps [NCOL][B][2][TI*TJ];
  int lcnt [NCOL][B], rcnt [NCOL][B], ccnt [NCOL][B], left [NCOL][B];
  int osent [NCOL], obeat [NCOL];
  bit lhdr [NLP], rhdr [NRP];
  int lrow [NLP], rrow [NRP], lbeat [NLP], rbeat [NRP];

  // statistics, read by the testbench
  int errors = 0, hdr_rows_above0 = 0, bcast_beats = 0, stall_cycles = 0;
  int bubbles = 0, computes = 0;

  function automatic longint dec(logic [63:0] w, int e);
    logic [31:0] f;
    case (DT)
      0: begin
        f = w[32*e +: 32];
        if (f[30:23] == 0) return 0;
        return longint'($rtoi($bitstoreal({f[31], 11'(int'(f[30:23]) - 127 + 1023), f[22:0], 29'd0})));
      end
      1: return longint'($signed(w[16*e +: 16]));
      default: return longint'($signed(w[8*e +: 8]));
    endcase
  endfunction

  function automatic logic [31:0] enc(longint v);
    longint m;
    int e;
    if (DT != 0) return 32'(v);
    if (v == 0) return 32'd0;
    m = (v < 0) ? -v : v;
    e = 0;
    while ((m >> e) > 1) e++;
    return {1'(v < 0), 8'(127 + e), 23'(((m << 23) >> e) & 64'h7F_FFFF)};
  endfunction

  // columns fed by a port
  function automatic int lcol(int p, int k);   // k < BF_L
    return (p / (C / BF_L)) * C + (p % (C / BF_L)) * BF_L + k;
  endfunction
  function automatic int rcol(int q, int k);   // k < BF_R
    return ((q % (A / BF_R)) * BF_R + k) * C + q / (A / BF_R);
  endfunction

  function automatic bit l_can(int p);
    if (lhdr[p]) return 1;
    for (int k = 0; k < BF_L; k++) begin
      automatic int c = lcol(p, k);
      if (lcnt[c][lrow[p]] >= ccnt[c][lrow[p]] + 2) return 0;
    end
    return 1;
  endfunction
  function automatic bit r_can(int q);
    if (rhdr[q]) return 1;
    for (int k = 0; k < BF_R; k++) begin
      automatic int c = rcol(q, k);
      if (rcnt[c][rrow[q]] >= ccnt[c][rrow[q]] + 2) return 0;
    end
    return 1;
  endfunction

  task automatic finish_tile(int c, int r);
    int n = ccnt[c][r];
    for (int i = 0; i < TI; i++)
      for (int j = 0; j < TJ; j++) begin
        longint s = (r == 0) ? 0 : Ps[c][r-1][n%2][i*TJ + j];
        for (int k = 0; k < TK; k++) s += Lm[c][r][n%2][i*TK + k] * Rm[c][r][n%2][k*TJ + j];
        Ps[c][r][n%2][i*TJ + j] = s;
      end
    ccnt[c][r]++;
    computes++;
  endtask

  function automatic bit can_start(int c, int r);
    int n = ccnt[c][r];
    if (lcnt[c][r] <= n || rcnt[c][r] <= n) return 0;
    if (r > 0 && ccnt[c][r-1] <= n) return 0;
    if (r < B - 1 && n >= ccnt[c][r+1] + 2) return 0;
    if (r == B - 1 && n >= osent[c] + 2) return 0;
    return 1;
  endfunction

  always @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int c = 0; c < NCOL; c++) begin
        for (int r = 0; r < B; r++) begin lcnt[c][r] = 0; rcnt[c][r] = 0; ccnt[c][r] = 0; left[c][r] = 0; end
        osent[c] = 0; obeat[c] = 0;
      end
      for (int p = 0; p < NLP; p++) begin lhdr[p] = 1; lrow[p] = 0; lbeat[p] = 0; end
      for (int q = 0; q < NRP; q++) begin rhdr[q] = 1; rrow[q] = 0; rbeat[q] = 0; end
      lhs_ready <= '0; rhs_ready <= '0; out_valid <= '0; out_data <= '0; out_last <= '0;
    end else begin
      // ---- input ports (ready was computed at the previous edge)
      for (int p = 0; p < NLP; p++) begin
        if (lhs_valid[p] && !lhs_ready[p]) stall_cycles++;
        if (lhs_valid[p] && lhs_ready[p]) begin
          if (lhdr[p]) begin
            lrow[p] = int'(lhs_data[p][7:0]);
            if (lrow[p] >= B || int'(lhs_data[p][15:8]) % NB != lcnt[lcol(p, 0)][lrow[p]] % NB) begin
              errors++; $display("model: LHS port %0d bad header %h", p, lhs_data[p]);
            end
            if (lrow[p] > 0) hdr_rows_above0++;
            lhdr[p] = 0; lbeat[p] = 0;
          end else begin
            if (BF_L > 1) bcast_beats++;
            for (int k = 0; k < BF_L; k++) begin
              automatic int c = lcol(p, k);
              for (int e = 0; e < EPB; e++)
                Lm[c][lrow[p]][lcnt[c][lrow[p]] % 2][lbeat[p] * EPB + e] = dec(lhs_data[p], e);
            end
            lbeat[p]++;
            if (lhs_last[p] != (lbeat[p] == TI * TK / EPB)) begin errors++; $display("model: LHS last misplaced"); end
            if (lhs_last[p]) begin
              for (int k = 0; k < BF_L; k++) lcnt[lcol(p, k)][lrow[p]]++;
              lhdr[p] = 1;
            end
          end
        end
      end
      for (int q = 0; q < NRP; q++) begin
        if (rhs_valid[q] && !rhs_ready[q]) stall_cycles++;
        if (rhs_valid[q] && rhs_ready[q]) begin
          if (rhdr[q]) begin
            rrow[q] = int'(rhs_data[q][7:0]);
            if (rrow[q] >= B || int'(rhs_data[q][15:8]) % NB != rcnt[rcol(q, 0)][rrow[q]] % NB) begin
              errors++; $display("model: RHS port %0d bad header %h", q, rhs_data[q]);
            end
            if (rrow[q] > 0) hdr_rows_above0++;
            rhdr[q] = 0; rbeat[q] = 0;
          end else begin
            if (BF_R > 1) bcast_beats++;
            for (int k = 0; k < BF_R; k++) begin
              automatic int c = rcol(q, k);
              for (int e = 0; e < EPB; e++)
                Rm[c][rrow[q]][rcnt[c][rrow[q]] % 2][rbeat[q] * EPB + e] = dec(rhs_data[q], e);
            end
            rbeat[q]++;
            if (rhs_last[q] != (rbeat[q] == TK * TJ / EPB)) begin errors++; $display("model: RHS last misplaced"); end
            if (rhs_last[q]) begin
              for (int k = 0; k < BF_R; k++) rcnt[rcol(q, k)][rrow[q]]++;
              rhdr[q] = 1;
            end
          end
        end
      end
      // ---- output ports
      for (int c = 0; c < NCOL; c++)
        if (out_valid[c] && out_ready[c]) begin
          obeat[c]++;
          if (obeat[c] == TI * TJ / 2) begin obeat[c] = 0; osent[c]++; end
        end
      // ---- compute: all AIEs that finish this cycle first, then all starts,
      // so that a dependency resolved this cycle lets the next AIE start now
      for (int c = 0; c < NCOL; c++)
        for (int r = 0; r < B; r++)
          if (left[c][r] > 0) begin
            left[c][r]--;
            if (left[c][r] == 0) finish_tile(c, r);
          end
      for (int c = 0; c < NCOL; c++)
        for (int r = 0; r < B; r++)
          if (left[c][r] == 0) begin
            if (can_start(c, r)) left[c][r] = COMP_CYC;
            else if (ccnt[c][r] % NB != 0) bubbles++;
          end
      // ---- drive outputs for the next cycle
      // (non-blocking: the accelerator samples these at the same edge)
      for (int p = 0; p < NLP; p++) lhs_ready[p] <= l_can(p) && (int'($urandom_range(0, 99)) >= STALL);
      for (int q = 0; q < NRP; q++) rhs_ready[q] <= r_can(q) && (int'($urandom_range(0, 99)) >= STALL);
      for (int c = 0; c < NCOL; c++) begin
        out_valid[c] <= (ccnt[c][B-1] > osent[c]);
        out_data[c]  <= {enc(Ps[c][B-1][osent[c] % 2][obeat[c] * 2 + 1]), enc(Ps[c][B-1][osent[c] % 2][obeat[c] * 2])};
        out_last[c]  <= (obeat[c] == TI * TJ / 2 - 1);
      end
    end
  end
endmodule
