// tb_input_buffer: self-checking test of the double-buffered I/Q frame store.
// A writer streams 10 frames of 6 I/Q samples with random gaps; a reader
// waits for `full`, holds each frame for a random time, checks all 12
// interleaved words (I0,Q0,I1,Q1,...) against the frame written, and
// releases it. Every cycle s_ready and full are compared with a count of
// frames written but not yet released (s_ready low only when both banks are
// full). The test requires that the source was stalled and that writing
// overlapped with reading.
module tb_input_buffer;
  localparam int IQ = 6, NW = 2 * IQ, FR = 10;
  logic clk = 0, rst_n = 0, s_valid = 0, release_buf = 0;
  logic s_ready, full;
  logic signed [15:0] s_i, s_q, rd_data;
  logic [3:0] rd_addr = 0;
  logic signed [15:0] frames [FR][NW];
  int checks = 0, failures = 0, stalls = 0, overlaps = 0;
  int written = 0, released = 0, beat = 0, fr_rd = 0;

  input_buffer #(.IQ_SAMPLES(IQ)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // per-cycle state check and frame bookkeeping, just before the edge
  always @(negedge clk) begin
    if (rst_n) begin
      checks++;
      if (s_ready != (written - released < 2) || full != (written - released > 0)) begin
        failures++;
        $display("s_ready=%0b full=%0b with %0d frames pending", s_ready, full, written - released);
      end
    end
  end

  always @(posedge clk) begin
    if (rst_n && s_valid && !s_ready) stalls++;
    if (rst_n && s_valid && s_ready && full) overlaps++;
    if (rst_n && s_valid && s_ready) begin
      beat++;
      if (beat == IQ) begin beat = 0; written++; end
    end
    if (rst_n && release_buf) released++;
  end

  // writer
  initial begin
    s_i = 0; s_q = 0;
    for (int f = 0; f < FR; f++)
      for (int a = 0; a < NW; a++) frames[f][a] = 16'($urandom);
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int f = 0; f < FR; f++) begin
      for (int k = 0; k < IQ; k++) begin
        @(negedge clk);
        while ($urandom_range(0, 3) == 0) begin s_valid = 0; @(negedge clk); end
        s_valid = 1;
        s_i = frames[f][2*k];
        s_q = frames[f][2*k+1];
        #2;
        while (!s_ready) begin @(negedge clk); #2; end
      end
    end
    @(negedge clk);
    s_valid = 0;
  end

  // reader
  initial begin
    repeat (3) @(negedge clk);
    while (fr_rd < FR) begin
      @(negedge clk);
      if (full) begin
        repeat ($urandom_range(0, 40)) @(negedge clk);
        for (int a = 0; a < NW; a++) begin
          rd_addr = 4'(a);
          #1 checks++;
          if (rd_data != frames[fr_rd][a]) begin
            failures++;
            $display("frame %0d word %0d: %0d != %0d", fr_rd, a, rd_data, frames[fr_rd][a]);
          end
        end
        #1 release_buf = 1;
        @(negedge clk);
        release_buf = 0;
        fr_rd++;
      end
    end
    repeat (3) @(negedge clk);
    checks += 2;
    if (stalls == 0)   begin failures++; $display("no stall seen"); end
    if (overlaps == 0) begin failures++; $display("no overlapped write seen"); end
    $display("stalls=%0d overlaps=%0d", stalls, overlaps);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
