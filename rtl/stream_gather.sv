// stream_gather: assembles stencil input sets from the memory stream of the
// external-memory mode.
//
// The host lays out, for consecutive stencils, the full stencil input
// (centre spinor, 8 neighbour spinors, 8 link matrices: the stencil_in_t
// layout, REC_W bits) back to back with no padding, and the memory system
// delivers BEAT_W = 2048 bits (256 bytes) per cycle. This block keeps a bit
// buffer of REC_W + BEAT_W bits: beats are appended above the bits already
// held and, whenever at least REC_W bits are present, the lowest REC_W bits
// leave as one record and the rest moves down. A stencil therefore starts on
// average every REC_W / BEAT_W cycles (11.25 cycles with full double
// precision matrices); that ratio is the initiation interval the memory link
// allows the kernel.
//
// The reduced 10-number form of the link matrices would shorten a record to
// 296 numbers (initiation interval about 9); it is not implemented because
// the parametrisation is not specified here, so records carry all 18 numbers
// of each matrix.
//
// Interface: valid/ready stream in (ready also requires enable), record out
// as a one-cycle rec_valid pulse with rec_data, one cycle after the beat that
// completed it. No back-pressure on the output (the kernel never stalls).
module stream_gather
  import dirac_pkg::*;
#(
  parameter int unsigned BEAT_W = 2048,
  localparam int unsigned REC_W = $bits(stencil_in_t),
  localparam int unsigned CAP   = REC_W + BEAT_W,
  localparam int unsigned CW    = $clog2(CAP + 1)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              enable,
  input  logic              s_valid,
  input  logic [BEAT_W-1:0] s_data,
  output logic              s_ready,
  output logic              rec_valid,
  output stencil_in_t       rec_data
);
  logic [CAP-1:0] buffer, shifted, nbuf;
  logic [CW-1:0]  count, rem, ncount;
  logic           emit, accept;

  always_comb begin
    emit    = (count >= CW'(REC_W));
    rem     = emit ? count - CW'(REC_W) : count;
    shifted = emit ? (buffer >> REC_W) : buffer;
    s_ready = enable && (int'(rem) + int'(BEAT_W) <= int'(CAP));
    accept  = s_valid && s_ready;
    nbuf    = shifted | (accept ? ({{REC_W{1'b0}}, s_data} << rem) : '0);
    ncount  = rem + (accept ? CW'(BEAT_W) : '0);
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      buffer    <= '0;
      count     <= '0;
      rec_valid <= 1'b0;
    end else begin
      buffer    <= nbuf;
      count     <= ncount;
      rec_valid <= emit;
    end
    rec_data <= stencil_in_t'(buffer[REC_W-1:0]);
  end
endmodule
