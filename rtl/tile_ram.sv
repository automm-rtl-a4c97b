// tile_ram: one bank group of the PL on-chip buffer (BRAM/URAM style).
//
// The accelerator spends most of the PL's block and Ultra RAM on these
// buffers so that many BATCHes of LHS, RHS and output data are reused on
// chip. Each instance is a simple dual-port memory: one synchronous write
// port and one synchronous read port (read data one cycle after rd_en),
// which is what BRAM and URAM primitives offer. Reading and writing the
// same address in one cycle returns the old word. Width and depth are
// parameters; the paper gives the buffer type but not its organisation.
module tile_ram #(
  parameter int unsigned W     = 64,
  parameter int unsigned DEPTH = 1024,
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [W-1:0]  wdata,
  input  logic          rd_en,
  input  logic [AW-1:0] raddr,
  output logic [W-1:0]  rdata
);
  logic [W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (rd_en) rdata <= mem[raddr];
  end
endmodule
