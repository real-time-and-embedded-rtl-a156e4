// tb_rf_classifier_top: end-to-end test of the classifier at full size.
//
// The top is instantiated with its default parameters (900 I/Q samples,
// 1800-100-20-7 network). The testbench
//   1. writes random weights and biases into all three layers through the
//      load port (one neuron of layer 1 gets full-scale weights so that its
//      output saturates),
//   2. streams the first PACED data samples back to back with s_valid held
//      high, so the source is stalled and frames wait for layer 1 while the
//      next frame fills the other input bank; the remaining frames arrive
//      at a steady 15/32 samples per clock and must never be refused (this
//      is 37.5 Msample/s, above the published 37, at 80 MHz, the clock at
//      which the 1928-cycle latency equals the published 24 us),
//   3. checks every output score, label and softmax probability against a fixed-point model of
//      the network computed here (bias<<8 + sum x*w, >>8, saturate, ReLU on
//      hidden layers, argmax with ties to the lower index, real-valued
//      softmax within 1 %), the latency of 1927 cycles from layer 1's start
//      to label_valid, and 1928 cycles from the last I/Q beat for the first
//      frame, which finds layer 1 idle.
// It counts the input stall, filling while the layers compute, frames that
// wait for layer 1, ReLU zeroing and saturation, and fails if any of them
// never happened.
module tb_rf_classifier_top;
  import fnn_pkg::*;

  localparam int FRAMES  = 8;
  // frames from PACED onwards arrive at 15/32 samples per clock
  localparam int PACED   = 4;
  // clocks from layer 1's start to label_valid, and from the last I/Q beat
  // of a frame to label_valid when layer 1 is idle
  localparam int RUN_LAT = (N_IN + 2) + (N_H1 + 2) + (N_H2 + 2) + 1;
  localparam int LATENCY = RUN_LAT + 1;

  logic clk = 0, rst_n = 0;
  logic s_valid = 0, s_ready;
  iq_t  s_data;
  logic [1:0] wl_layer = 0;
  logic wl_we = 0, wl_bias_we = 0;
  localparam int WL_AW = $clog2((N_IN > N_H1) ? N_IN : N_H1);
  logic [WL_AW-1:0] wl_addr = 0;
  data_t wl_row [N_H1];
  logic label_valid, busy, sat_event, relu_event;
  logic [2:0] label;
  data_t scores [N_OUT];
  logic [15:0] probs [N_OUT];
  logic probs_valid;
  int prob_results = 0;

  rf_classifier_top dut (.*);

  always #5 clk = ~clk;

  // network model
  data_t W1 [N_IN][N_H1];
  data_t W2 [N_H1][N_H2];
  data_t W3 [N_H2][N_OUT];
  data_t B1 [N_H1];
  data_t B2 [N_H2];
  data_t B3 [N_OUT];
  data_t X  [FRAMES][N_IN];
  data_t exp_scores [FRAMES][N_OUT];
  int    exp_label  [FRAMES];
  data_t exp_h1 [FRAMES][N_H1];
  int    l1_results = 0;

  int checks = 0, failures = 0;
  int n_stall = 0, n_overlap = 0, n_relu = 0, n_sat = 0;
  int cycle = 0, last_beat_cycle [FRAMES], l1_start_cycle [FRAMES], results = 0, l1_starts = 0;
  int n_wait = 0, n_stall_paced = 0;
  bit paced = 0;

  function automatic data_t neuron(longint acc, bit relu);
    acc = acc >>> FRAC_BITS;
    if (acc > 32767) acc = 32767;
    if (acc < -32768) acc = -32768;
    if (relu && acc < 0) acc = 0;
    return data_t'(acc);
  endfunction

  task automatic run_model(int f);
    data_t h1 [N_H1];
    data_t h2 [N_H2];
    longint a;
    for (int j = 0; j < N_H1; j++) begin
      a = longint'(B1[j]) <<< FRAC_BITS;
      for (int i = 0; i < N_IN; i++) a += longint'(X[f][i]) * longint'(W1[i][j]);
      h1[j] = neuron(a, 1);
      exp_h1[f][j] = h1[j];
    end
    for (int j = 0; j < N_H2; j++) begin
      a = longint'(B2[j]) <<< FRAC_BITS;
      for (int i = 0; i < N_H1; i++) a += longint'(h1[i]) * longint'(W2[i][j]);
      h2[j] = neuron(a, 1);
    end
    exp_label[f] = 0;
    for (int j = 0; j < N_OUT; j++) begin
      a = longint'(B3[j]) <<< FRAC_BITS;
      for (int i = 0; i < N_H2; i++) a += longint'(h2[i]) * longint'(W3[i][j]);
      exp_scores[f][j] = neuron(a, 0);
      if (exp_scores[f][j] > exp_scores[f][exp_label[f]]) exp_label[f] = j;
    end
  endtask

  function automatic data_t rnd(int mag);
    return data_t'($signed($urandom_range(0, 2 * mag)) - mag);
  endfunction

  // watchdog
  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // cycle counter and mechanism monitors (sampled just before each edge)
  always @(negedge clk) begin
    cycle++;
    if (rst_n) begin
      if (s_valid && !s_ready) n_stall++;
      if (s_valid && !s_ready && paced) n_stall_paced++;
      if (s_valid && s_ready && (dut.u_l1.busy || dut.u_l2.busy || dut.u_l3.busy)) n_overlap++;
      if (dut.u_l1.u_ctrl.clear && l1_starts < FRAMES) begin
        l1_start_cycle[l1_starts] = cycle;
        if (cycle - last_beat_cycle[l1_starts] > 1) n_wait++;
        l1_starts++;
      end
      if (relu_event) n_relu++;
      if (sat_event)  n_sat++;
    end
  end

  // first hidden layer checker: its outputs are compared as soon as they are written
  always @(negedge clk) begin
    if (rst_n && dut.u_l1.done && l1_results < FRAMES) begin
      for (int j = 0; j < N_H1; j++) begin
        checks++;
        if (dut.u_l1.y[j] != exp_h1[l1_results][j]) begin
          failures++;
          if (failures < 10) $display("frame %0d h1[%0d] = %0d, expected %0d", l1_results, j,
                                      dut.u_l1.y[j], exp_h1[l1_results][j]);
        end
      end
      l1_results++;
    end
  end

  // softmax checker: probabilities against a real-valued softmax of the
  // expected scores, within 1 % of full scale
  always @(negedge clk) begin
    if (rst_n && probs_valid && prob_results < FRAMES) begin
      real e [N_OUT];
      real tot, mx;
      mx = -1.0e9;
      for (int j = 0; j < N_OUT; j++)
        if (real'(exp_scores[prob_results][j]) / 256.0 > mx) mx = real'(exp_scores[prob_results][j]) / 256.0;
      tot = 0.0;
      for (int j = 0; j < N_OUT; j++) begin
        e[j] = $exp(real'(exp_scores[prob_results][j]) / 256.0 - mx);
        tot += e[j];
      end
      for (int j = 0; j < N_OUT; j++) begin
        real p;
        p = real'(probs[j]) / 65536.0 - e[j] / tot;
        checks++;
        if (p > 0.01 || p < -0.01) begin
          failures++;
          $display("frame %0d prob %0d = %0d, expected %f", prob_results, j, probs[j], e[j] / tot);
        end
      end
      prob_results++;
    end
  end

  // result checker
  always @(negedge clk) begin
    if (rst_n && label_valid) begin
      if (results >= FRAMES) begin
        failures++;
        $display("unexpected result");
      end else begin
        checks++;
        if (cycle - l1_start_cycle[results] != RUN_LAT) begin
          failures++;
          $display("frame %0d run latency %0d, expected %0d", results,
                   cycle - l1_start_cycle[results], RUN_LAT);
        end
        if (results == 0) begin
          checks++;
          if (cycle - last_beat_cycle[0] != LATENCY) begin
            failures++;
            $display("frame 0 latency %0d, expected %0d", cycle - last_beat_cycle[0], LATENCY);
          end
        end
        for (int j = 0; j < N_OUT; j++) begin
          checks++;
          if (scores[j] != exp_scores[results][j]) begin
            failures++;
            $display("frame %0d score %0d = %0d, expected %0d", results, j, scores[j],
                     exp_scores[results][j]);
          end
        end
        checks++;
        if (int'(label) != exp_label[results]) begin
          failures++;
          $display("frame %0d label %0d, expected %0d", results, label, exp_label[results]);
        end
        $display("frame %0d: label %0d (%s)", results, label, label_e'(label));
      end
      results++;
    end
  end

  initial begin
    // weights and inputs
    for (int i = 0; i < N_IN; i++)
      for (int j = 0; j < N_H1; j++) W1[i][j] = (j == 0) ? rnd(2047) : rnd(64);
    for (int i = 0; i < N_H1; i++)
      for (int j = 0; j < N_H2; j++) W2[i][j] = rnd(48);
    for (int i = 0; i < N_H2; i++)
      for (int j = 0; j < N_OUT; j++) W3[i][j] = rnd(256);
    foreach (B1[j]) B1[j] = rnd(1024);
    foreach (B2[j]) B2[j] = rnd(1024);
    foreach (B3[j]) B3[j] = rnd(1024);
    for (int f = 0; f < FRAMES; f++) begin
      for (int i = 0; i < N_IN; i++) X[f][i] = rnd(2048);
      run_model(f);
    end
    foreach (wl_row[j]) wl_row[j] = '0;
    s_data = '0;

    repeat (3) @(negedge clk);
    rst_n = 1;

    // load layer 1..3
    for (int l = 1; l <= 3; l++) begin
      int rows;
      rows = (l == 1) ? N_IN : (l == 2) ? N_H1 : N_H2;
      for (int i = 0; i < rows; i++) begin
        @(negedge clk);
        wl_layer = 2'(l); wl_we = 1; wl_addr = $bits(wl_addr)'(i);
        foreach (wl_row[j]) begin
          if (l == 1)                  wl_row[j] = W1[i][j];
          else if (l == 2 && j < N_H2) wl_row[j] = W2[i][j];
          else if (l == 3 && j < N_OUT) wl_row[j] = W3[i][j];
          else                         wl_row[j] = '0;
        end
      end
      @(negedge clk);
      wl_we = 0; wl_bias_we = 1;
      foreach (wl_row[j]) begin
        if (l == 1)                  wl_row[j] = B1[j];
        else if (l == 2 && j < N_H2) wl_row[j] = B2[j];
        else if (l == 3 && j < N_OUT) wl_row[j] = B3[j];
        else                         wl_row[j] = '0;
      end
    end
    @(negedge clk);
    wl_bias_we = 0;

    // stream the first frames back to back, then the rest at a steady rate
    for (int f = 0; f < FRAMES; f++) begin
      int ph;
      if (f == PACED) begin
        s_valid = 0;
        while (busy) @(negedge clk);
        paced = 1;
        ph = 0;
      end
      for (int k = 0; k < IQ_SAMPLES; k++) begin
        if (paced) begin
          ph += 15;
          while (ph < 32) begin
            s_valid = 0;
            @(negedge clk);
            ph += 15;
          end
          ph -= 32;
        end
        s_valid  = 1;
        s_data.i = X[f][2*k];
        s_data.q = X[f][2*k+1];
        #1;
        while (!s_ready) begin
          @(negedge clk);
          #1;
        end
        if (k == IQ_SAMPLES - 1) last_beat_cycle[f] = cycle;
        @(negedge clk);
      end
    end
    s_valid = 0;
    wait (results == FRAMES && prob_results == FRAMES);
    repeat (5) @(negedge clk);

    checks += 7;
    if (n_stall_paced != 0) begin failures++; $display("%0d samples refused at the steady rate", n_stall_paced); end
    if (n_wait == 0)    begin failures++; $display("no frame waited for layer 1"); end
    if (busy)          begin failures++; $display("still busy"); end
    if (n_stall == 0)   begin failures++; $display("input stall never happened"); end
    if (n_overlap == 0) begin failures++; $display("overlapped fill never happened"); end
    if (n_relu == 0)    begin failures++; $display("ReLU zeroing never happened"); end
    if (n_sat == 0)     begin failures++; $display("saturation never happened"); end
    $display("stall=%0d overlap=%0d wait=%0d relu=%0d sat=%0d", n_stall, n_overlap, n_wait, n_relu, n_sat);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
