// tb_mac_unit: self-checking test of the multiply-accumulate unit.
// Runs random dot products (random length, inputs, weights, bias, and gaps
// in `en`) and compares the accumulator with a 64-bit sum in the testbench,
// including full-scale operands.
module tb_mac_unit;
  localparam int ACC_W = fnn_pkg::acc_width(1800);
  logic clk = 0, rst_n = 0, clear = 0, en = 0;
  logic signed [15:0] bias, x, w;
  logic signed [ACC_W-1:0] acc;
  int checks = 0, failures = 0;

  mac_unit dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint model;
    bias = 0; x = 0; w = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int run = 0; run < 40; run++) begin
      @(negedge clk);
      bias  = 16'($urandom);
      clear = 1;
      model = longint'(bias) * 256;
      @(negedge clk);
      clear = 0;
      checks++;
      if (acc != ACC_W'(model)) begin failures++; $display("bias load %0d != %0d", acc, model); end
      for (int k = 0; k < 200; k++) begin
        en = ($urandom_range(0, 4) != 0);
        if (run < 2) begin x = (run == 0) ? -16'sd32768 : 16'sd32767; w = -16'sd32768; end
        else begin x = 16'($urandom); w = 16'($urandom); end
        if (en) model += longint'(x) * longint'(w);
        @(negedge clk);
      end
      en = 0;
      checks++;
      if (acc != ACC_W'(model)) begin failures++; $display("run %0d acc %0d != %0d", run, acc, model); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
