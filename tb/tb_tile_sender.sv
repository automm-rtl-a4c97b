// tb_tile_sender: an LHS sender and an RHS sender read from memories filled
// with address tags; every packet must carry the next (BATCH, ID) of the
// wavefront order in its header and exactly the TILE's beats, worked out
// from the BATCH -> (m1, n1, k1) mapping. Random back-pressure on the LHS
// stream, full rate on the RHS stream with a cycle-count check.
module tb_tile_sender;
  import automm_pkg::*;
  localparam int TR = 3, TCB = 2, B = 4, X = 2, Y = 2, Z = 2;
  localparam int NB = X * Y * Z;
  localparam int PDL = X * TR * Y * B * TCB;
  localparam int PDR = Y * B * TR * Z * TCB;
  logic clk = 0, rst_n = 0, start = 0, bank = 0;
  logic done_l, done_r, busy_l, busy_r;
  logic rd_l, rd_r;
  logic [$clog2(2*PDL)-1:0] ra_l;
  logic [$clog2(2*PDR)-1:0] ra_r;
  logic [63:0] rdat_l, rdat_r;
  logic ov_l, or_l, ol_l, ov_r, or_r, ol_r;
  logic [63:0] od_l, od_r;
  int checks = 0, failures = 0;

  tile_sender #(.IS_LHS(1), .TR(TR), .TCB(TCB), .B(B), .X(X), .Y(Y), .Z(Z)) ul (
    .clk, .rst_n, .start, .bank, .done(done_l), .busy(busy_l), .rd_en(rd_l), .raddr(ra_l),
    .rdata(rdat_l), .out_valid(ov_l), .out_ready(or_l), .out_data(od_l), .out_last(ol_l));
  tile_sender #(.IS_LHS(0), .TR(TR), .TCB(TCB), .B(B), .X(X), .Y(Y), .Z(Z)) ur (
    .clk, .rst_n, .start, .bank, .done(done_r), .busy(busy_r), .rd_en(rd_r), .raddr(ra_r),
    .rdata(rdat_r), .out_valid(ov_r), .out_ready(or_r), .out_data(od_r), .out_last(ol_r));

  // memories hold their own address
  always @(posedge clk) begin
    if (rd_l) rdat_l <= 64'(ra_l) | 64'h1000_0000;
    if (rd_r) rdat_r <= 64'(ra_r) | 64'h2000_0000;
  end
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // expected stream of one sender for one bank
  task automatic build(bit lhs, bit bk, ref logic [64:0] q[$]);
    for (int d = 0; d < NB + B - 1; d++)
      for (int id = 0; id < B; id++) begin
        int b, k1, n1, m1, r0, c0, rs;
        b = d - id;
        if (b < 0 || b >= NB) continue;
        k1 = b % Y; n1 = (b / Y) % Z; m1 = b / Y / Z;
        q.push_back({1'b0, 48'd0, 8'(b), 8'(id)});
        if (lhs) begin r0 = m1 * TR; c0 = (k1 * B + id) * TCB; rs = Y * B * TCB; end
        else     begin r0 = (k1 * B + id) * TR; c0 = n1 * TCB; rs = Z * TCB; end
        for (int i = 0; i < TR; i++)
          for (int j = 0; j < TCB; j++)
            q.push_back({1'(i == TR - 1 && j == TCB - 1),
                         64'((bk ? (lhs ? PDL : PDR) : 0) + (r0 + i) * rs + c0 + j) | (lhs ? 64'h1000_0000 : 64'h2000_0000)});
      end
  endtask

  logic [64:0] ql[$], qr[$];
  int cyc_r, ndone;

  always @(posedge clk) if (rst_n) begin
    or_l <= 1'($urandom_range(0, 2) != 0);
  end
  assign or_r = 1'b1;

  always @(posedge clk) if (rst_n) begin
    if (ov_l && or_l) begin
      logic [64:0] e;
      checks++;
      if (ql.size() == 0) begin failures++; $display("LHS extra beat"); end
      else begin
        e = ql.pop_front();
        if ({ol_l, od_l} != e) begin failures++; $display("LHS got %b %h want %h", ol_l, od_l, e); end
      end
    end
    if (ov_r && or_r) begin
      logic [64:0] e;
      checks++;
      if (qr.size() == 0) begin failures++; $display("RHS extra beat"); end
      else begin
        e = qr.pop_front();
        if ({ol_r, od_r} != e) begin failures++; $display("RHS got %b %h want %h", ol_r, od_r, e); end
      end
    end
    if (busy_r) cyc_r++;
    if (done_l) ndone++;
    if (done_r) ndone++;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int bk = 0; bk < 2; bk++) begin
      build(1, 1'(bk), ql); build(0, 1'(bk), qr);
      cyc_r = 0; ndone = 0;
      @(negedge clk); start = 1; bank = 1'(bk);
      @(negedge clk); start = 0;
      wait (!busy_l && !busy_r);
      repeat (2) @(negedge clk);
      checks++;
      if (ql.size() != 0 || qr.size() != 0 || ndone != 2) begin
        failures++; $display("left %0d %0d beats, done %0d", ql.size(), qr.size(), ndone);
      end
      // rate: NB*B packets of TR*TCB+1 beats at one per cycle plus a short pipeline fill
      checks++;
      if (cyc_r > NB * B * (TR * TCB + 1) + 4) begin failures++; $display("RHS took %0d cycles", cyc_r); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
