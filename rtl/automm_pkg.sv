// automm_pkg: types and constants shared by the PL side of the AutoMM
// matrix-multiply accelerator.
//
// The accelerator computes C = A * B with output-stationary tiling on four
// levels (off-chip block, PL BATCH reuse, AIE array, single AIE TILE). The
// PL buffers and the PL<->AIE streams move raw 64-bit beats, the width of
// one PL-side PLIO channel of the Versal interface tile. Inputs are packed
// 2 (FP32), 4 (INT16) or 8 (INT8) elements per beat. Outputs are always
// 32-bit words, 2 per beat: FP32 for the FP32 design and INT32 for the two
// integer designs (the output width of the integer designs is this RTL's
// choice).
package automm_pkg;

  // Data type of one design instance (the paper builds one design per type).
  typedef enum logic [1:0] {
    DT_FP32  = 2'd0,
    DT_INT16 = 2'd1,
    DT_INT8  = 2'd2
  } dtype_e;

  // Width of one PL-side PLIO channel.
  localparam int unsigned BEAT_W = 64;
  // Width of one output (accumulated) element.
  localparam int unsigned OUT_W  = 32;
  // Output elements per beat.
  localparam int unsigned OUT_EPB = BEAT_W / OUT_W;

  // Bits of one input element for a data type.
  function automatic int unsigned elem_bits(dtype_e dt);
    case (dt)
      DT_FP32:  return 32;
      DT_INT16: return 16;
      default:  return 8;
    endcase
  endfunction

  // Input elements per 64-bit beat.
  function automatic int unsigned in_epb(dtype_e dt);
    return BEAT_W / elem_bits(dt);
  endfunction

  // Packet header beat that precedes every TILE on a packet-switched PLIO
  // stream. Only the destination row (the TILE ID inside its AIE column)
  // and the BATCH index are carried; the layout is this design's own.
  typedef struct packed {
    logic [BEAT_W-1-16:0] rsvd;
    logic [7:0]           batch;
    logic [7:0]           row_id;
  } pkt_hdr_t;

endpackage
