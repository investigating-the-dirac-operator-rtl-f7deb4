// fp_add: pipelined IEEE-754 floating point adder, y = a + b.
//
// The sum is formed in one combinational block (alignment with guard, round
// and sticky bits, add or subtract, leading-zero normalisation, round to
// nearest even) and then passes through LAT register stages, so the result of
// operands presented at clock edge t appears at y after edge t+LAT. A new pair
// may be presented every cycle. LAT defaults to 14 cycles, the double
// precision addition latency the stencil pipeline is built around; the
// register chain is meant to be retimed into the logic by synthesis.
//
// Own choices: subnormal inputs are read as zero and results below the normal
// range are flushed to a signed zero; overflow gives infinity; any NaN, or
// inf - inf, gives the quiet NaN 0x7ff8... . Exact cancellation gives +0.
module fp_add #(
  parameter int unsigned EXP_W = dirac_pkg::EXP_W,
  parameter int unsigned MAN_W = dirac_pkg::MAN_W,
  parameter int unsigned LAT   = dirac_pkg::ADD_LAT
) (
  input  logic                   clk,
  input  logic [EXP_W+MAN_W:0]   a,
  input  logic [EXP_W+MAN_W:0]   b,
  output logic [EXP_W+MAN_W:0]   y
);
  localparam int unsigned W    = 1 + EXP_W + MAN_W;
  localparam int unsigned MX   = MAN_W + 4;              // hidden, fraction, G, R, S
  localparam int          EMAX = (1 << EXP_W) - 1;

  logic [W-1:0] r;

  always_comb begin
    logic             sa, sb, sbig, ssml;
    logic [EXP_W-1:0] ea, eb, ebig, esml;
    logic [MAN_W-1:0] fa, fb, fbig, fsml;
    logic [MX-1:0]    mbig, msml, mal, m;
    logic [MX:0]      sum;
    logic [MAN_W+1:0] mr;
    logic             sticky, up;
    int               d, e, lz;

    {sa, ea, fa} = a;
    {sb, eb, fb} = b;
    r = '0;
    mbig = '0; msml = '0; m = '0; sum = '0; mr = '0; mal = '0; sticky = 1'b0; up = 1'b0; lz = 0; e = 0; d = 0;
    {sbig, ebig, fbig} = a;
    {ssml, esml, fsml} = b;

    if ((int'(ea) == EMAX && fa != '0) || (int'(eb) == EMAX && fb != '0) ||
        (int'(ea) == EMAX && int'(eb) == EMAX && sa != sb)) begin
      r = {1'b0, {EXP_W{1'b1}}, 1'b1, {(MAN_W-1){1'b0}}};
    end else if (int'(ea) == EMAX) begin
      r = a;
    end else if (int'(eb) == EMAX) begin
      r = b;
    end else if (ea == '0 && eb == '0) begin
      r = {sa & sb, {(W-1){1'b0}}};
    end else if (ea == '0) begin
      r = b;
    end else if (eb == '0) begin
      r = a;
    end else begin
      if ({eb, fb} > {ea, fa}) begin
        {sbig, ebig, fbig} = b;
        {ssml, esml, fsml} = a;
      end
      d    = int'(ebig) - int'(esml);
      mbig = {1'b1, fbig, 3'b000};
      msml = {1'b1, fsml, 3'b000};
      if (d >= int'(MX)) begin
        mal = {{(MX-1){1'b0}}, 1'b1};
      end else begin
        sticky = 1'b0;
        for (int i = 0; i < int'(MX); i++)
          if (i < d && msml[i]) sticky = 1'b1;
        mal = (msml >> d) | {{(MX-1){1'b0}}, sticky};
      end
      e = int'(ebig);
      if (sbig == ssml) begin
        sum = {1'b0, mbig} + {1'b0, mal};
        if (sum[MX]) begin
          m = sum[MX:1] | {{(MX-1){1'b0}}, sum[0]};
          e = e + 1;
        end else begin
          m = sum[MX-1:0];
        end
      end else begin
        m  = mbig - mal;
        lz = 0;
        for (int i = int'(MX) - 1; i >= 0; i--) begin
          if (m[i]) break;
          lz++;
        end
        m = m << lz;
        e = e - lz;
      end
      up = m[2] & (m[3] | m[1] | m[0]);
      mr = {1'b0, m[MX-1:3]} + {{(MAN_W+1){1'b0}}, up};
      if (mr[MAN_W+1]) e = e + 1;                 // rounding carried to 10.000...
      if (m == '0 || e <= 0) r = {sbig & (m != '0), {(W-1){1'b0}}};
      else if (e >= EMAX)    r = {sbig, {EXP_W{1'b1}}, {MAN_W{1'b0}}};
      else                   r = {sbig, e[EXP_W-1:0], mr[MAN_W+1] ? mr[MAN_W:1] : mr[MAN_W-1:0]};
    end
  end

  delay_line #(.W(W), .N(LAT)) u_pipe (.clk(clk), .rst_n(1'b1), .d(r), .q(y));

endmodule
