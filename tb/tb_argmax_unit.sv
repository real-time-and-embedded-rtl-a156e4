// tb_argmax_unit: self-checking test of the label decision.
// Presents random score vectors of 7 entries (many with ties and negative
// values), pulses start, and checks label and the one-cycle valid pulse
// against the index of the first maximum; the label must hold afterwards.
module tb_argmax_unit;
  localparam int M = 7;
  logic clk = 0, rst_n = 0, start = 0;
  logic signed [15:0] scores [M];
  logic [2:0] label;
  logic valid;
  int checks = 0, failures = 0;

  argmax_unit #(.M(M)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int best;
    for (int j = 0; j < M; j++) scores[j] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 300; t++) begin
      @(negedge clk);
      for (int j = 0; j < M; j++)
        scores[j] = (t % 2) ? 16'($signed($urandom_range(0, 6)) - 3) : 16'($urandom);
      best = 0;
      for (int j = 1; j < M; j++) if (scores[j] > scores[best]) best = j;
      start = 1;
      @(negedge clk);
      start = 0;
      for (int j = 0; j < M; j++) scores[j] = 16'($urandom);
      checks += 2;
      if (!valid) begin failures++; $display("no valid"); end
      if (label != 3'(best)) begin failures++; $display("t=%0d label %0d exp %0d", t, label, best); end
      @(negedge clk);
      checks += 2;
      if (valid) begin failures++; $display("valid longer than one cycle"); end
      if (label != 3'(best)) begin failures++; $display("label not held"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
