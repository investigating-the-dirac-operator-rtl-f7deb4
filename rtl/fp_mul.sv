// fp_mul: pipelined IEEE-754 floating point multiplier, y = a * b.
//
// The full (MAN_W+1)x(MAN_W+1) significand product is normalised by at most
// one place and rounded to nearest even in one combinational block, then
// delayed by LAT register stages (default 14 cycles, one layer of the
// operation cascade). One product per cycle.
//
// Own choices, as in fp_add: subnormals read and flushed as zero, overflow to
// infinity, NaN or inf*0 give the quiet NaN.
module fp_mul #(
  parameter int unsigned EXP_W = dirac_pkg::EXP_W,
  parameter int unsigned MAN_W = dirac_pkg::MAN_W,
  parameter int unsigned LAT   = dirac_pkg::MUL_LAT
) (
  input  logic                   clk,
  input  logic [EXP_W+MAN_W:0]   a,
  input  logic [EXP_W+MAN_W:0]   b,
  output logic [EXP_W+MAN_W:0]   y
);
  localparam int unsigned W    = 1 + EXP_W + MAN_W;
  localparam int unsigned P    = 2 * (MAN_W + 1);
  localparam int          EMAX = (1 << EXP_W) - 1;
  localparam int          BIAS = (1 << (EXP_W - 1)) - 1;

  logic [W-1:0] r;

  always_comb begin
    logic             sa, sb, s, g, st, up;
    logic [EXP_W-1:0] ea, eb;
    logic [MAN_W-1:0] fa, fb;
    logic [P-1:0]     prod, pn;
    logic [MAN_W:0]   mr;
    int               e;

    {sa, ea, fa} = a;
    {sb, eb, fb} = b;
    s    = sa ^ sb;
    prod = '0; pn = '0; mr = '0; g = 1'b0; st = 1'b0; up = 1'b0; e = 0;
    if ((int'(ea) == EMAX && fa != '0) || (int'(eb) == EMAX && fb != '0) ||
        (int'(ea) == EMAX && eb == '0) || (int'(eb) == EMAX && ea == '0)) begin
      r = {1'b0, {EXP_W{1'b1}}, 1'b1, {(MAN_W-1){1'b0}}};
    end else if (int'(ea) == EMAX || int'(eb) == EMAX) begin
      r = {s, {EXP_W{1'b1}}, {MAN_W{1'b0}}};
    end else if (ea == '0 || eb == '0) begin
      r = {s, {(W-1){1'b0}}};
    end else begin
      prod = {{(MAN_W+1){1'b0}}, 1'b1, fa} * {{(MAN_W+1){1'b0}}, 1'b1, fb};
      e    = int'(ea) + int'(eb) - BIAS;
      if (prod[P-1]) begin
        pn = prod;
        e  = e + 1;
      end else begin
        pn = prod << 1;
      end
      g  = pn[P-2-MAN_W];
      st = |pn[P-3-MAN_W:0];
      up = g & (st | pn[P-1-MAN_W]);
      mr = {1'b0, pn[P-2 -: MAN_W]} + {{MAN_W{1'b0}}, up};
      if (mr[MAN_W]) e = e + 1;                   // fraction rounded up to 1.0 * 2
      if (e <= 0)         r = {s, {(W-1){1'b0}}};
      else if (e >= EMAX) r = {s, {EXP_W{1'b1}}, {MAN_W{1'b0}}};
      else                r = {s, e[EXP_W-1:0], mr[MAN_W-1:0]};
    end
  end

  delay_line #(.W(W), .N(LAT)) u_pipe (.clk(clk), .rst_n(1'b1), .d(r), .q(y));

endmodule
