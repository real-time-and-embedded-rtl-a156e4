// tb_fnn_layer: self-checking test of one layer engine.
// A 12-input, 5-neuron layer (one ReLU instance and one linear instance
// sharing inputs and weights) is loaded with random weights and biases and
// run on random input vectors served from a testbench array through the
// x_addr / x_data port. Outputs are compared with a fixed-point model
// (bias<<8 + sum x*w, >>8, saturate, ReLU). Also checked: done after N + 2
// cycles, the write-back stall while out_ready is low, the addressed output
// read, and that saturation and ReLU zeroing both occurred.
module tb_fnn_layer;
  localparam int N = 12, M = 5;
  logic clk = 0, rst_n = 0, start = 0, out_ready = 1;
  logic busy_r, load_r, done_r, busy_n, load_n, done_n;
  logic [3:0] xa_r, xa_n;
  logic signed [15:0] xd_r, xd_n;
  logic signed [15:0] y_r [M];
  logic signed [15:0] y_n [M];
  logic [2:0] y_rd_addr = 0;
  logic signed [15:0] y_rd_r, y_rd_n;
  logic wl_we = 0, wl_bias_we = 0;
  logic [3:0] wl_addr = 0;
  logic signed [15:0] wl_row [M];
  logic sat_r, clip_r, sat_n, clip_n;
  logic signed [15:0] xv [N];
  logic signed [15:0] W [N][M];
  logic signed [15:0] B [M];
  int checks = 0, failures = 0, n_sat = 0, n_clip = 0, n_stall = 0;

  fnn_layer #(.N(N), .M(M), .RELU(1'b1)) dut_r (
    .clk, .rst_n, .start, .out_ready, .busy(busy_r), .out_load(load_r), .done(done_r),
    .x_addr(xa_r), .x_data(xd_r), .y(y_r), .y_rd_addr, .y_rd_data(y_rd_r),
    .wl_we, .wl_bias_we, .wl_addr, .wl_row, .sat_any(sat_r), .clip_any(clip_r));
  fnn_layer #(.N(N), .M(M), .RELU(1'b0)) dut_n (
    .clk, .rst_n, .start, .out_ready, .busy(busy_n), .out_load(load_n), .done(done_n),
    .x_addr(xa_n), .x_data(xd_n), .y(y_n), .y_rd_addr, .y_rd_data(y_rd_n),
    .wl_we, .wl_bias_we, .wl_addr, .wl_row, .sat_any(sat_n), .clip_any(clip_n));

  assign xd_r = (xa_r < N) ? xv[xa_r] : '0;
  assign xd_n = (xa_n < N) ? xv[xa_n] : '0;

  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic signed [15:0] model(int j, bit relu);
    longint a = longint'(B[j]) * 256;
    for (int i = 0; i < N; i++) a += longint'(xv[i]) * longint'(W[i][j]);
    a = a >>> 8;
    if (a > 32767) a = 32767;
    if (a < -32768) a = -32768;
    if (relu && a < 0) a = 0;
    return 16'(a);
  endfunction

  initial begin
    int cyc, stall;
    bit big;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int run = 0; run < 12; run++) begin
      big = (run % 3 == 2);
      // load weights
      for (int i = 0; i < N; i++) begin
        @(negedge clk);
        wl_we = 1; wl_addr = 4'(i);
        for (int j = 0; j < M; j++) begin
          W[i][j] = big ? 16'($urandom) : 16'($signed($urandom_range(0, 511)) - 256);
          wl_row[j] = W[i][j];
        end
      end
      @(negedge clk);
      wl_we = 0; wl_bias_we = 1;
      for (int j = 0; j < M; j++) begin
        B[j] = 16'($signed($urandom_range(0, 2047)) - 1024); wl_row[j] = B[j];
      end
      for (int i = 0; i < N; i++) xv[i] = big ? 16'($urandom) : 16'($signed($urandom_range(0, 4095)) - 2048);
      @(negedge clk);
      wl_bias_we = 0;
      stall = (run % 4 == 1) ? 3 : 0;
      out_ready = (stall == 0);
      start = 1;
      @(negedge clk);
      start = 0;
      cyc = 1;
      while (!done_r && cyc < 200) begin
        if (sat_r) n_sat++;
        if (clip_r) n_clip++;
        if (cyc > N) begin
          if (stall > 0) begin stall--; n_stall++; out_ready = 0; end
          else out_ready = 1;
        end
        #1;
        if (!out_ready && load_r) begin failures++; $display("write-back not held"); end
        @(negedge clk);
        cyc++;
      end
      out_ready = 1;
      checks++;
      if (cyc != N + 2 + ((run % 4 == 1) ? 3 : 0)) begin
        failures++; $display("run %0d latency %0d", run, cyc);
      end
      for (int j = 0; j < M; j++) begin
        y_rd_addr = 3'(j);
        #1;
        checks += 3;
        if (y_r[j] != model(j, 1)) begin failures++; $display("run %0d relu y[%0d]=%0d exp %0d", run, j, y_r[j], model(j, 1)); end
        if (y_n[j] != model(j, 0)) begin failures++; $display("run %0d lin y[%0d]=%0d exp %0d", run, j, y_n[j], model(j, 0)); end
        if (y_rd_r != y_r[j]) begin failures++; $display("read port %0d", j); end
      end
    end
    checks += 3;
    if (n_sat == 0)   begin failures++; $display("saturation never seen"); end
    if (n_clip == 0)  begin failures++; $display("ReLU zeroing never seen"); end
    if (n_stall == 0) begin failures++; $display("write-back stall never seen"); end
    $display("sat=%0d relu=%0d stall=%0d", n_sat, n_clip, n_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
