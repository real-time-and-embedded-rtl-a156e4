// tb_address_gen: self-checking test of the synapse index counter.
// Drives random clear/enable patterns into a 5-word counter and compares
// addr and last every cycle with a counter model kept in the testbench.
module tb_address_gen;
  localparam int unsigned N = 5;
  logic clk = 0, rst_n = 0, clr = 0, en = 0;
  logic [2:0] addr;
  logic last;
  int checks = 0, failures = 0;
  int model = 0, wraps = 0;

  address_gen #(.N(N)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 400; t++) begin
      @(negedge clk);
      checks++;
      if (addr != 3'(model) || last != (model == N - 1)) begin
        failures++;
        $display("t=%0d addr=%0d last=%0b expected %0d", t, addr, last, model);
      end
      clr = ($urandom_range(0, 19) == 0);
      en  = ($urandom_range(0, 3) != 0);
      if (clr)     model = 0;
      else if (en) begin
        if (model == N - 1) begin model = 0; wraps++; end
        else model++;
      end
    end
    checks++;
    if (wraps == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
