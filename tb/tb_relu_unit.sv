// tb_relu_unit: self-checking test of the neuron output stage.
// Two instances, with and without ReLU, see the same accumulator values
// (random, around the saturation limits, and exact edge values); outputs and
// flags are compared with a model that rescales, saturates and rectifies.
module tb_relu_unit;
  localparam int ACC_W = fnn_pkg::acc_width(1800);
  logic signed [ACC_W-1:0] acc;
  logic signed [15:0] y_r, y_n;
  logic sat_r, clip_r, sat_n, clip_n;
  int checks = 0, failures = 0;

  relu_unit #(.RELU(1'b1)) dut_r (.acc, .y(y_r), .sat(sat_r), .clipped(clip_r));
  relu_unit #(.RELU(1'b0)) dut_n (.acc, .y(y_n), .sat(sat_n), .clipped(clip_n));

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint a, s, c;
    logic es;
    longint edges[8] = '{0, 255, -1, -256, 32767*256, 32768*256, -32768*256, -32769*256};
    for (int k = 0; k < 2000; k++) begin
      if (k < 8) a = edges[k];
      else if (k % 3 == 0) a = longint'($signed($urandom)) * 8;
      else a = longint'($signed($urandom_range(0, 20000000))) - 10000000;
      acc = ACC_W'(a);
      #1;
      s  = a >>> 8;
      es = 0;
      if (s > 32767)  begin c = 32767;  es = 1; end
      else if (s < -32768) begin c = -32768; es = 1; end
      else c = s;
      checks++;
      if (y_n != 16'(c) || sat_n != es || clip_n) begin
        failures++; $display("noRELU acc=%0d y=%0d exp %0d", a, y_n, c);
      end
      checks++;
      if (y_r != 16'((c < 0) ? 0 : c) || sat_r != es || clip_r != (c < 0)) begin
        failures++; $display("RELU acc=%0d y=%0d exp %0d", a, y_r, c);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
