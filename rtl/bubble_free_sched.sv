// bubble_free_sched: order generator of the bubble-free PL->AIE transfer.
//
// One AIE column holds NID AIEs (rows, "TILE ID" 0..NID-1) that reduce over
// k in a read-after-write chain: row i can only compute BATCH b after row
// i-1 has finished BATCH b. Every AIE has two local-memory banks (ping-pong).
// Sending tiles in lexicographic (BATCH, ID) order stalls the column; the
// paper instead sends, in each compute period, only the tiles needed in the
// next period. That is an anti-diagonal (wavefront) order over the
// (BATCH, ID) plane: wavefront d holds all pairs with BATCH + ID = d, and
// inside a wavefront the ID rises (BATCH falls). For 4 rows and 4 BATCHes:
//   (0,0) | (1,0) (0,1) | (2,0) (1,1) (0,2) | (3,0) (2,1) (1,2) (0,3) |
//   (3,1) (2,2) (1,3) | (3,2) (2,3) | (3,3)          written as (BATCH,ID)
// The order is the paper's (order graph of its bubble-free figure and the
// text "(1,0) and (0,1)" / "three tiles ... for AIE 0, 1, and 2"). Producing
// it with a counter pair (d, id) is this design's implementation.
//
// Interface: pulse start with n_batch (1..NB_MAX) while idle; then the
// pairs appear on batch/id with a valid/ready handshake, last marks the
// final pair. One pair per cycle at most; busy is high from start until
// the last pair is taken.
module bubble_free_sched #(
  parameter int unsigned NB_MAX = 8,
  parameter int unsigned NID    = 4,
  localparam int unsigned BW = (NB_MAX > 1) ? $clog2(NB_MAX) : 1,
  localparam int unsigned IW = (NID > 1) ? $clog2(NID) : 1,
  localparam int unsigned DW = $clog2(NB_MAX + NID)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    start,
  input  logic [$clog2(NB_MAX+1)-1:0] n_batch,
  output logic                    valid,
  input  logic                    ready,
  output logic [BW-1:0]           batch,
  output logic [IW-1:0]           id,
  output logic                    last,
  output logic                    busy
);
  logic [DW-1:0] d_q, nbm1_q, dnext;
  logic [IW:0]   id_q, id_lo_next, id_hi;
  logic          run_q;

  // highest ID on wavefront d_q
  always_comb begin
    id_hi = (d_q >= DW'(NID - 1)) ? (IW+1)'(NID - 1) : (IW+1)'(d_q);
    dnext = d_q + DW'(1);
    // lowest ID on the next wavefront: max(0, dnext - (n_batch-1))
    id_lo_next = (dnext > nbm1_q) ? (IW+1)'(dnext - nbm1_q) : '0;
  end

  assign valid = run_q;
  assign busy  = run_q;
  assign id    = id_q[IW-1:0];
  assign batch = BW'(d_q - DW'(id_q));
  assign last  = run_q && (d_q == nbm1_q + DW'(NID - 1)) && (id_q == (IW+1)'(NID - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run_q  <= 1'b0;
      d_q    <= '0;
      id_q   <= '0;
      nbm1_q <= '0;
    end else if (!run_q) begin
      if (start && n_batch != 0) begin
        run_q  <= 1'b1;
        d_q    <= '0;
        id_q   <= '0;
        nbm1_q <= DW'(n_batch) - DW'(1);
      end
    end else if (ready) begin
      if (last) begin
        run_q <= 1'b0;
      end else if (id_q == id_hi) begin
        d_q  <= dnext;
        id_q <= id_lo_next;
      end else begin
        id_q <= id_q + 1'b1;
      end
    end
  end

  // the pair on the port must be inside the (BATCH, ID) plane
  a_in_plane: assert property (@(posedge clk) disable iff (!rst_n)
    valid |-> (DW'(batch) <= nbm1_q && int'(id) < NID));
endmodule
