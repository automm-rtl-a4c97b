// stream_bcast: broadcast of one PL stream onto N PLIO ports.
//
// With a broadcast factor BF, an LHS TILE that is needed by all C columns of
// the AIE array is sent on C/BF ports, each port feeding BF columns through
// the AIE switches; the ports carry identical data. This module duplicates
// one valid/ready stream onto N ports. It is an eager fork: every output
// may take the current beat in a different cycle, a per-output "taken" bit
// stops a port from seeing the beat twice, and the input beat is consumed
// once all outputs have taken it. No storage, no added latency.
// The data outputs are plain wired copies of in_data; only the valid and
// ready signals carry logic.
// The broadcast factor is the paper's; the fork circuit is this design's.
module stream_bcast #(
  parameter int unsigned N = 4,
  parameter int unsigned W = 65
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  output logic                 in_ready,
  input  logic [W-1:0]         in_data,
  output logic [N-1:0]         out_valid,
  input  logic [N-1:0]         out_ready,
  output logic [N-1:0][W-1:0]  out_data
);
  logic [N-1:0] taken_q;
  logic [N-1:0] done;

  always_comb begin
    for (int i = 0; i < N; i++) begin
      out_valid[i] = in_valid & ~taken_q[i];
      out_data[i]  = in_data;
    end
    done     = taken_q | (out_valid & out_ready);
    in_ready = &done;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                    taken_q <= '0;
    else if (in_valid && in_ready) taken_q <= '0;
    else if (in_valid)             taken_q <= done;
  end
endmodule
