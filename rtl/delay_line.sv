// delay_line: W-bit shift register of N stages (N = 0 gives a plain wire).
// Used to keep operands that skip an arithmetic layer aligned with the
// layer's output, and to carry valid bits and tags along the pipeline.
// Data lines need no reset; with HAS_RST set the stages clear to zero while
// rst_n is low (used for valid bits). Latency is exactly N cycles.
module delay_line #(
  parameter int unsigned W       = 1,
  parameter int unsigned N       = 1,
  parameter bit          HAS_RST = 1'b0
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [W-1:0] d,
  output logic [W-1:0] q
);
  if (N == 0) begin : g_wire
    assign q = d;
  end else begin : g_pipe
    logic [W-1:0] sr [N];
    if (HAS_RST) begin : g_rst
      always_ff @(posedge clk) begin
        if (!rst_n) begin
          sr <= '{default: '0};
        end else begin
          sr[0] <= d;
          for (int i = 1; i < int'(N); i++) sr[i] <= sr[i-1];
        end
      end
    end else begin : g_nrst
      always_ff @(posedge clk) begin
        sr[0] <= d;
        for (int i = 1; i < int'(N); i++) sr[i] <= sr[i-1];
      end
    end
    assign q = sr[N-1];
  end
endmodule
