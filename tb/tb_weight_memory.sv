// tb_weight_memory: self-checking test of the per-layer weight memory.
// Writes random rows (one weight per neuron) and biases into an 8 x 4
// memory, then reads every row back by address and checks all columns and
// the bias registers against a copy kept in the testbench.
module tb_weight_memory;
  localparam int N = 8, M = 4;
  logic clk = 0, wr_en = 0, bias_wr = 0;
  logic [2:0] wr_addr = 0, rd_addr = 0;
  logic signed [15:0] wr_row [M];
  logic signed [15:0] rd_row [M];
  logic signed [15:0] bias [M];
  logic signed [15:0] model [N][M];
  logic signed [15:0] mbias [M];
  int checks = 0, failures = 0;

  weight_memory #(.N(N), .M(M)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int pass = 0; pass < 3; pass++) begin
      for (int r = 0; r < N; r++) begin
        @(negedge clk);
        wr_en = 1; wr_addr = 3'(r);
        for (int j = 0; j < M; j++) begin wr_row[j] = 16'($urandom); model[r][j] = wr_row[j]; end
      end
      @(negedge clk);
      wr_en = 0; bias_wr = 1;
      for (int j = 0; j < M; j++) begin wr_row[j] = 16'($urandom); mbias[j] = wr_row[j]; end
      @(negedge clk);
      bias_wr = 0;
      for (int r = N - 1; r >= 0; r--) begin
        rd_addr = 3'(r);
        #1;
        for (int j = 0; j < M; j++) begin
          checks++;
          if (rd_row[j] != model[r][j]) begin failures++; $display("row %0d col %0d", r, j); end
        end
      end
      for (int j = 0; j < M; j++) begin
        checks++;
        if (bias[j] != mbias[j]) begin failures++; $display("bias %0d", j); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
