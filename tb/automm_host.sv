// automm_host: behavioural host and off-chip memory for system testbenches.
//
// Builds LHS (M x K) and RHS (K x N) matrices of small integers, streams
// the LHS and RHS blocks of every outer iteration (m.0, n.0, k.0; k.0
// innermost) into the accelerator in row-major 64-bit beats of EPB
// elements (lowest lane = lowest column), takes the result blocks, and
// compares every result word with the product computed here in integer
// arithmetic (FP32 results are compared bit-exactly with the single
// precision encoding of the exact integer). Random gaps can be put into
// every stream to exercise back-pressure.
module automm_host #(
  parameter int DT = 0,
  parameter int TI = 32, TK = 32, TJ = 32,
  parameter int A = 1, B = 4, C = 4,
  parameter int X = 2, Y = 2, Z = 2,
  parameter int M0 = 1, N0 = 1, K0 = 1,
  parameter int GAPS = 0,            // percent of cycles a stream idles
  parameter int SEED = 1,
  localparam int EPB = (DT == 0) ? 2 : ((DT == 1) ? 4 : 8),
  localparam int EW = 64 / EPB,
  localparam int BM = X * A * TI, BK = Y * B * TK, BN = Z * C * TJ,
  localparam int M = M0 * BM, K = K0 * BK, N = N0 * BN
) (
  input  logic        clk,
  input  logic        rst_n,
  output logic        lhs_valid,
  input  logic        lhs_ready,
  output logic [63:0] lhs_data,
  output logic        rhs_valid,
  input  logic        rhs_ready,
  output logic [63:0] rhs_data,
  input  logic        res_valid,
  output logic        res_ready,
  input  logic [63:0] res_data,
  input  logic        res_last,
  output int          checks,
  output int          failures,
  output bit          finished
);
  int La [M][K];
  int Rb [K][N];

  function automatic int val(int i, int j, int salt);
    return ((i * 7 + j * 3 + salt * 5 + (i * j) % 11) % 7) - 3;
  endfunction

  function automatic logic [EW-1:0] enc_in(int v);
    int m, e;
    if (DT != 0) return EW'(v);
    if (v == 0) return '0;
    m = (v < 0) ? -v : v;
    e = 0;
    while ((m >> e) > 1) e++;
    return EW'({1'(v < 0), 8'(127 + e), 23'((m << (23 - e)) & 32'h7F_FFFF)});
  endfunction

  function automatic logic [31:0] enc_out(longint v);
    longint m;
    int e;
    if (DT != 0) return 32'(v);
    if (v == 0) return 32'd0;
    m = (v < 0) ? -v : v;
    e = 0;
    while ((m >> e) > 1) e++;
    return {1'(v < 0), 8'(127 + e), 23'(((m << 23) >> e) & 64'h7F_FFFF)};
  endfunction

  initial begin
    for (int i = 0; i < M; i++) for (int k = 0; k < K; k++) La[i][k] = val(i, k, SEED);
    for (int k = 0; k < K; k++) for (int j = 0; j < N; j++) Rb[k][j] = val(k, j, SEED + 1);
  end

  // LHS stream
  initial begin
    lhs_valid = 0; lhs_data = 0;
    wait (rst_n);
    for (int m0 = 0; m0 < M0; m0++) for (int n0 = 0; n0 < N0; n0++) for (int k0 = 0; k0 < K0; k0++)
      for (int r = 0; r < BM; r++) for (int cb = 0; cb < BK / EPB; cb++) begin
        for (int e = 0; e < EPB; e++) lhs_data[EW*e +: EW] = enc_in(La[m0*BM + r][k0*BK + cb*EPB + e]);
        lhs_valid = 1;
        do begin
          if (GAPS > 0 && $urandom_range(0, 99) < GAPS) begin lhs_valid = 0; @(negedge clk); lhs_valid = 1; end
          @(posedge clk);
        end while (!lhs_ready);
        @(negedge clk);
        lhs_valid = 0;
      end
  end

  // RHS stream
  initial begin
    rhs_valid = 0; rhs_data = 0;
    wait (rst_n);
    for (int m0 = 0; m0 < M0; m0++) for (int n0 = 0; n0 < N0; n0++) for (int k0 = 0; k0 < K0; k0++)
      for (int r = 0; r < BK; r++) for (int cb = 0; cb < BN / EPB; cb++) begin
        for (int e = 0; e < EPB; e++) rhs_data[EW*e +: EW] = enc_in(Rb[k0*BK + r][n0*BN + cb*EPB + e]);
        rhs_valid = 1;
        do begin
          if (GAPS > 0 && $urandom_range(0, 99) < GAPS) begin rhs_valid = 0; @(negedge clk); rhs_valid = 1; end
          @(posedge clk);
        end while (!rhs_ready);
        @(negedge clk);
        rhs_valid = 0;
      end
  end

  // results
  initial begin
    int nbad;
    checks = 0; failures = 0; finished = 0; res_ready = 0; nbad = 0;
    wait (rst_n);
    for (int m0 = 0; m0 < M0; m0++) for (int n0 = 0; n0 < N0; n0++) begin
      for (int r = 0; r < BM; r++) for (int cb = 0; cb < BN / 2; cb++) begin
        logic [63:0] want;
        for (int e = 0; e < 2; e++) begin
          automatic longint s = 0;
          for (int k = 0; k < K; k++) s += longint'(La[m0*BM + r][k]) * longint'(Rb[k][n0*BN + cb*2 + e]);
          want[32*e +: 32] = enc_out(s);
        end
        @(negedge clk);
        res_ready = (GAPS > 0) ? 1'($urandom_range(0, 99) >= GAPS) : 1'b1;
        @(posedge clk);
        while (!(res_valid && res_ready)) begin
          @(negedge clk);
          res_ready = (GAPS > 0) ? 1'($urandom_range(0, 99) >= GAPS) : 1'b1;
          @(posedge clk);
        end
        checks++;
        if (res_data != want || res_last != (r == BM - 1 && cb == BN / 2 - 1)) begin
          failures++;
          if (nbad++ < 10) $display("host: block (%0d,%0d) row %0d beat %0d got %h want %h", m0, n0, r, cb, res_data, want);
        end
      end
    end
    @(negedge clk);
    res_ready = 0;
    finished = 1;
  end
endmodule
