// tb_stream_gather: builds 24 random stencil records, concatenates them into
// one bit stream and feeds it as 2048-bit beats. Phase 1 sends the first 12
// records' beats back to back and checks that record i appears exactly two
// cycles after the beat holding its last bit was accepted, i.e. a record every
// 11.25 cycles on average. Phase 2 sends the rest with random gaps in
// s_valid, and with `enable` dropped for a while (s_ready must then be low).
// Every record is compared bit for bit.
module tb_stream_gather;
  import dirac_pkg::*;
  import dirac_ref_pkg::*;

  localparam int BEAT_W = 2048;
  localparam int REC_W = $bits(stencil_in_t);
  localparam int NREC = 24;
  localparam int NBITS = NREC * REC_W;
  localparam int NBEAT = (NBITS + BEAT_W - 1) / BEAT_W;
  localparam int NREC1 = 12;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic enable = 1'b1, s_valid = 1'b0, s_ready, rec_valid;
  logic [BEAT_W-1:0] s_data;
  stencil_in_t rec_data;

  stream_gather #(.BEAT_W(BEAT_W)) dut (.*);

  stencil_in_t recs [NREC];
  logic [NBEAT*BEAT_W-1:0] stream;
  int checks = 0, failures = 0, n_rec = 0, beats = 0;
  longint cycle = 0, t_acc [NBEAT];

  always @(posedge clk) begin
    cycle <= cycle + 1;
    if (s_valid && s_ready) begin t_acc[beats] = cycle; beats++; end
    if (!enable) begin
      checks++;
      if (s_ready) begin failures++; $display("ready while disabled"); end
    end
    if (rst_n && rec_valid) begin
      checks++;
      if (n_rec >= NREC || rec_data !== recs[n_rec]) begin failures++; $display("record %0d wrong", n_rec); end
      if (n_rec < NREC1) begin
        int last_beat;
        last_beat = ((n_rec + 1) * REC_W + BEAT_W - 1) / BEAT_W - 1;
        checks++;
        if (cycle != t_acc[last_beat] + 2) begin
          failures++; $display("record %0d at %0d, last beat at %0d", n_rec, cycle, t_acc[last_beat]);
        end
      end
      n_rec++;
    end
  end

  initial begin
    stream = '0;
    for (int i = 0; i < NREC; i++) begin
      recs[i] = rand_stencil();
      stream[i*REC_W +: REC_W] = recs[i];
    end
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    for (int j = 0; j < NBEAT; j++) begin
      if (j > (NREC1 * REC_W) / BEAT_W + 1) begin
        s_valid <= 1'b0;
        if (j % 7 == 3) begin
          enable <= 1'b0;
          repeat (4) @(posedge clk);
          enable <= 1'b1;
        end
        repeat ($urandom % 3) @(posedge clk);
      end
      s_valid <= 1'b1;
      s_data  <= stream[j*BEAT_W +: BEAT_W];
      do @(posedge clk); while (!s_ready);
    end
    s_valid <= 1'b0;
    repeat (10) @(posedge clk);
    checks++;
    if (n_rec != NREC) begin failures++; $display("%0d records out of %0d", n_rec, NREC); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
