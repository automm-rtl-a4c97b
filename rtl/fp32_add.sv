// fp32_add: combinational IEEE-754 single-precision adder.
//
// Used by the PL accumulator of the FP32 design, which adds the partial
// results returned by the AIE columns into the output buffer (the paper
// states that partial results are accumulated on the PL side; how that
// adder is built is not described, so this is a plain textbook adder).
// Algorithm: unpack, swap so that |a| >= |b|, align b with a sticky bit,
// add or subtract the 27-bit significands (hidden, 23 fraction, guard,
// round, sticky), normalise, round to nearest even.
// Simplifications (this design's choice): subnormal inputs are read as
// zero and subnormal results flush to zero; an infinite or NaN input gives
// the canonical quiet NaN or the infinity; overflow gives infinity.
// Interface: a, b in, s out, no clock; one adder delay.
module fp32_add (
  input  logic [31:0] a,
  input  logic [31:0] b,
  output logic [31:0] s
);
  logic        sa, sb, sx, sy;
  logic [7:0]  ea, eb, ex, ey;
  logic [23:0] ma, mb, mx, my;
  logic [7:0]  d;
  logic [26:0] ax, ay, sh;
  logic [27:0] sum;
  logic [4:0]  lz;
  logic [26:0] nrm;
  logic [9:0]  e_n;
  logic [24:0] rnd;
  logic        rup;
  logic        swap;

  always_comb begin
    sa = a[31]; ea = a[30:23]; ma = (ea == 8'd0) ? 24'd0 : {1'b1, a[22:0]};
    sb = b[31]; eb = b[30:23]; mb = (eb == 8'd0) ? 24'd0 : {1'b1, b[22:0]};
    swap = ({eb, mb} > {ea, ma});
    sx = swap ? sb : sa;  ex = swap ? eb : ea;  mx = swap ? mb : ma;
    sy = swap ? sa : sb;  ey = swap ? ea : eb;  my = swap ? ma : mb;
    d  = ex - ey;
    ax = {mx, 3'b000};
    ay = {my, 3'b000};
    if (d >= 8'd27) sh = {26'd0, |my};
    else begin
      sh = ay >> d;
      // sticky: any bit shifted out
      if ((ay & ((27'd1 << d) - 27'd1)) != 27'd0) sh[0] = 1'b1;
    end
    sum = (sx == sy) ? ({1'b0, ax} + {1'b0, sh}) : ({1'b0, ax} - {1'b0, sh});
    // normalise
    lz  = 5'd0;
    nrm = 27'd0;
    e_n = 10'd0;
    if (sum[27]) begin
      nrm = {sum[27:2], sum[1] | sum[0]};
      e_n = {2'b00, ex} + 10'd1;
    end else begin
      for (int i = 26; i >= 0; i--) begin
        if (sum[i] && lz == 5'd0 && nrm == 27'd0) begin
          lz  = 5'(26 - i);
          nrm = sum[26:0] << (26 - i);
        end
      end
      e_n = {2'b00, ex} - {5'd0, lz};
    end
    // round to nearest even on guard/round/sticky
    rup = nrm[2] & (nrm[1] | nrm[0] | nrm[3]);
    rnd = {1'b0, nrm[26:3]} + {24'd0, rup};
    if (rnd[24]) e_n = e_n + 10'd1;
    // result
    if (ea == 8'hFF || eb == 8'hFF) begin
      if (ea == 8'hFF && a[22:0] != 0) s = 32'h7FC0_0000;
      else if (eb == 8'hFF && b[22:0] != 0) s = 32'h7FC0_0000;
      else if (ea == 8'hFF && eb == 8'hFF && sa != sb) s = 32'h7FC0_0000;
      else s = (ea == 8'hFF) ? a : b;
    end else if (sum == 28'd0) begin
      s = {sa & sb, 31'd0};
    end else if (e_n[9] || e_n == 10'd0) begin
      s = {sx, 31'd0};                       // underflow: flush to zero
    end else if (e_n >= 10'd255) begin
      s = {sx, 8'hFF, 23'd0};                // overflow: infinity
    end else begin
      s = {sx, e_n[7:0], rnd[24] ? rnd[23:1] : rnd[22:0]};
    end
  end
endmodule
