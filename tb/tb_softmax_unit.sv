// tb_softmax_unit: self-checking test of the output softmax.
// Feeds score vectors (random in several ranges, all equal, one dominant,
// full-scale extremes) and compares each probability with a real-valued
// softmax computed here, allowing 1 % of full scale; also checks that the
// probabilities sum to 1 within 1 %, that valid comes 2 + M*P_W cycles after
// start, and that busy covers the computation.
module tb_softmax_unit;
  localparam int M = 7, P_W = 16, LAT = 2 + M * P_W;
  logic clk = 0, rst_n = 0, start = 0;
  logic signed [15:0] scores [M];
  logic [P_W-1:0] prob [M];
  logic valid, busy;
  int checks = 0, failures = 0;

  softmax_unit dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real pref [M];
    real s, mx, tot;
    int cyc;
    for (int j = 0; j < M; j++) scores[j] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 200; t++) begin
      @(negedge clk);
      for (int j = 0; j < M; j++) begin
        case (t % 5)
          0: scores[j] = 16'($signed($urandom_range(0, 1024)) - 512);    // +-2.0
          1: scores[j] = 16'($signed($urandom_range(0, 4096)) - 2048);   // +-8.0
          2: scores[j] = 16'($urandom);                                  // full range
          3: scores[j] = 16'sd300;                                       // all equal
          default: scores[j] = (j == t % M) ? 16'sd5000 : -16'sd20000;   // one dominant
        endcase
      end
      mx = -1.0e9;
      for (int j = 0; j < M; j++) if (real'(scores[j]) / 256.0 > mx) mx = real'(scores[j]) / 256.0;
      s = 0.0;
      for (int j = 0; j < M; j++) begin pref[j] = $exp(real'(scores[j]) / 256.0 - mx); s += pref[j]; end
      for (int j = 0; j < M; j++) pref[j] = pref[j] / s;
      start = 1;
      @(negedge clk);
      start = 0;
      cyc = 1;
      while (!valid && cyc < 1000) begin
        if (!busy) begin failures++; $display("busy low during computation"); end
        @(negedge clk);
        cyc++;
      end
      checks++;
      if (cyc != LAT) begin failures++; $display("latency %0d, expected %0d", cyc, LAT); end
      tot = 0.0;
      for (int j = 0; j < M; j++) begin
        real p;
        p = real'(prob[j]) / 65536.0;
        tot += p;
        checks++;
        if (p - pref[j] > 0.01 || pref[j] - p > 0.01) begin
          failures++;
          $display("t=%0d p[%0d]=%f pref %f", t, j, p, pref[j]);
        end
      end
      checks++;
      if (tot > 1.01 || tot < 0.99) begin failures++; $display("t=%0d sum %f", t, tot); end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
