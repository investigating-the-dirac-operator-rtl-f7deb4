// dirac_top: Wilson-Dirac operator accelerator, D psi evaluated for one
// lattice site per kernel slot.
//
// One fully pipelined stencil kernel (dslash_kernel, initiation interval 1,
// latency 142) is fed from one of two sources, chosen by `mode`:
//   mode 0, on-chip lattice: the host first loads spinors and links into
//     lattice_store through the write ports; a start pulse makes site_sweep
//     visit every site, one per cycle, the store returns each site's complete
//     stencil input one cycle later, and the kernel delivers one result per
//     cycle. The result tag is the site index. `done` pulses when the last
//     result of the sweep has left; `busy` is high from start until then.
//   mode 1, streamed: stencil inputs arrive as a packed stream of 256-byte
//     beats (s_valid/s_data/s_ready, from external memory), stream_gather cuts
//     them into records, and each record enters the kernel as soon as it is
//     complete. The tag counts records from reset.
// `mode` may change only while busy is low (asserted below). The stream input
// is not ready in mode 0. Results (res_valid/res_tag/res_data) carry no
// back-pressure: the consumer must take one per cycle.
// The mass input is m_q + 4 in floating point.
module dirac_top
  import dirac_pkg::*;
#(
  parameter int unsigned L0     = 12,
  parameter int unsigned L1     = 8,
  parameter int unsigned L2     = 8,
  parameter int unsigned L3     = 8,
  parameter int unsigned BEAT_W = 2048,
  localparam int unsigned V     = L0 * L1 * L2 * L3,
  localparam int unsigned AW    = $clog2(V),
  localparam int unsigned TAG_W = 32
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              mode,
  input  fp_t               mass,
  // host writes into the on-chip lattice
  input  logic              psi_we,
  input  logic [AW-1:0]     psi_waddr,
  input  spinor_t           psi_wdata,
  input  logic              u_we,
  input  logic [2:0]        u_wbank,
  input  logic [AW-1:0]     u_waddr,
  input  su3_t              u_wdata,
  // on-chip sweep control
  input  logic              start,
  output logic              busy,
  output logic              done,
  // stream from external memory
  input  logic              s_valid,
  input  logic [BEAT_W-1:0] s_data,
  output logic              s_ready,
  // results
  output logic              res_valid,
  output logic [TAG_W-1:0]  res_tag,
  output spinor_t           res_data
);
  // ---- on-chip path
  logic                    iss_valid, iss_last;
  logic [AW-1:0]           iss_site;
  logic [NHOP-1:0][AW-1:0] iss_nbr;
  logic [NDIR-1:0]         iss_wrap;
  stencil_in_t             mem_data;
  logic                    mem_valid;
  logic [AW-1:0]           mem_site;

  site_sweep #(.L0(L0), .L1(L1), .L2(L2), .L3(L3)) u_sweep (
    .clk(clk), .rst_n(rst_n), .start(start && !busy && !mode),
    .issue_valid(iss_valid), .issue_last(iss_last), .issue_site(iss_site),
    .issue_nbr(iss_nbr), .issue_wrap(iss_wrap));

  lattice_store #(.L0(L0), .L1(L1), .L2(L2), .L3(L3)) u_store (
    .clk(clk),
    .psi_we(psi_we), .psi_waddr(psi_waddr), .psi_wdata(psi_wdata),
    .u_we(u_we), .u_wbank(u_wbank), .u_waddr(u_waddr), .u_wdata(u_wdata),
    .rd_en(iss_valid), .rd_site(iss_site), .rd_nbr(iss_nbr), .rd_data(mem_data));

  always_ff @(posedge clk) begin
    if (!rst_n) mem_valid <= 1'b0;
    else        mem_valid <= iss_valid;
    mem_site <= iss_site;
  end

  // ---- streamed path
  logic        rec_valid;
  stencil_in_t rec_data;
  logic [TAG_W-1:0] rec_count;

  stream_gather #(.BEAT_W(BEAT_W)) u_gather (
    .clk(clk), .rst_n(rst_n), .enable(mode), .s_valid(s_valid), .s_data(s_data),
    .s_ready(s_ready), .rec_valid(rec_valid), .rec_data(rec_data));

  always_ff @(posedge clk) begin
    if (!rst_n)         rec_count <= '0;
    else if (rec_valid) rec_count <= rec_count + 1'b1;
  end

  // ---- kernel input select
  logic             k_valid, k_out_valid;
  logic [TAG_W-1:0] k_tag, k_out_tag;
  stencil_in_t      k_data;

  always_comb begin
    if (mode) begin
      k_valid = rec_valid;
      k_tag   = rec_count;
      k_data  = rec_data;
    end else begin
      k_valid = mem_valid;
      k_tag   = TAG_W'(mem_site);
      k_data  = mem_data;
    end
  end

  dslash_kernel #(.TAG_W(TAG_W)) u_kernel (
    .clk(clk), .rst_n(rst_n), .in_valid(k_valid), .in_tag(k_tag), .in_data(k_data),
    .mass(mass), .out_valid(k_out_valid), .out_tag(k_out_tag), .out_data(res_data));

  assign res_valid = k_out_valid;
  assign res_tag   = k_out_tag;

  // ---- sweep bookkeeping: busy from start until the last result is out
  logic sweep_on;
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      sweep_on <= 1'b0;
      done     <= 1'b0;
    end else begin
      done <= 1'b0;
      if (!sweep_on && start && !mode) begin
        sweep_on <= 1'b1;
      end else if (sweep_on && !mode && k_out_valid && int'(k_out_tag) == int'(V) - 1) begin
        sweep_on <= 1'b0;
        done     <= 1'b1;
      end
    end
  end
  assign busy = sweep_on;

  a_mode_stable: assert property (@(posedge clk) disable iff (!rst_n) busy |-> !mode);

endmodule
