// tb_neuron_out_reg: self-checking test of the neuron output register.
// Loads random vectors (and holds them when `load` is low), then checks the
// parallel output and every word of the addressed read port.
module tb_neuron_out_reg;
  localparam int M = 5;
  logic clk = 0, rst_n = 0, load = 0;
  logic signed [15:0] din [M];
  logic signed [15:0] q [M];
  logic [2:0] rd_addr = 0;
  logic signed [15:0] rd_data;
  logic signed [15:0] model [M];
  int checks = 0, failures = 0;

  neuron_out_reg #(.M(M)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int j = 0; j < M; j++) begin din[j] = 0; model[j] = 0; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 50; t++) begin
      @(negedge clk);
      load = ($urandom_range(0, 1) == 1);
      for (int j = 0; j < M; j++) din[j] = 16'($urandom);
      @(negedge clk);
      if (load) model = din;
      load = 0;
      for (int j = 0; j < M; j++) din[j] = 16'($urandom);
      @(negedge clk);
      for (int j = 0; j < M; j++) begin
        rd_addr = 3'(j);
        #1;
        checks += 2;
        if (q[j] != model[j])     begin failures++; $display("q[%0d]", j); end
        if (rd_data != model[j]) begin failures++; $display("rd[%0d]", j); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
