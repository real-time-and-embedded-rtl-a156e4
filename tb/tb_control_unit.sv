// tb_control_unit: self-checking test of the layer sequencer.
// A counter in the testbench stands in for the address generator (N = 6).
// Each run checks: `clear` only in the start cycle, exactly N cycles of
// mac_en, a write-back held while out_ready is low, and `done` N + 2 cycles
// after start when not stalled (plus the stall length when stalled).
module tb_control_unit;
  localparam int N = 6;
  logic clk = 0, rst_n = 0, start = 0, out_ready = 1;
  logic addr_last, clear, mac_en, out_load, done, busy;
  int checks = 0, failures = 0;
  int idx = 0;

  control_unit dut (.*);

  always #5 clk = ~clk;
  assign addr_last = (idx == N - 1);
  always_ff @(posedge clk) begin
    if (clear)       idx <= 0;
    else if (mac_en) idx <= (idx == N - 1) ? 0 : idx + 1;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s at %0t", what, $time);
    end
  endtask

  initial begin
    int cyc, macs, loads, stall;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int run = 0; run < 6; run++) begin
      stall = (run % 2) ? run : 0;
      @(negedge clk);
      check(!busy && !clear, "idle before start");
      start = 1;
      #1 check(clear, "clear in start cycle");
      @(negedge clk);
      start = 0;
      cyc = 1; macs = 0; loads = 0;
      out_ready = (stall == 0);
      while (!done && cyc < 100) begin
        // in write-back: hold out_ready low for `stall` cycles, then raise it
        if (busy && !mac_en && cyc > 1) begin
          if (stall > 0) begin stall--; out_ready = 0; end
          else out_ready = 1;
        end
        #1;
        check(!clear, "no clear after start");
        check(busy, "busy while running");
        if (mac_en) macs++;
        if (out_load) loads++;
        if (!out_ready) check(!out_load, "write-back held while out_ready low");
        @(negedge clk);
        cyc++;
      end
      out_ready = 1;
      check(macs == N, $sformatf("mac_en cycles %0d", macs));
      check(loads == 1, "one write-back");
      check(cyc == N + 2 + ((run % 2) ? run : 0), $sformatf("latency %0d run %0d", cyc, run));
      @(negedge clk);
      check(!done && !busy, "done is one pulse");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
