// control_unit: sequencer of one FNN layer.
//
// A layer computes all of its M neuron dot products in parallel, one synapse
// per clock. This controller runs that sequence:
//   IDLE : waits for `start`. In the start cycle it raises `clear`, which loads
//          every accumulator with its bias and resets the synapse index to 0.
//   RUN  : raises `mac_en` for N cycles, one multiply-accumulate per cycle,
//          until the address generator reports the last synapse (`addr_last`).
//   WB   : raises `out_load` to write the ReLU outputs into the neuron output
//          register, but only when `out_ready` says the next layer no longer
//          reads that register; otherwise it stalls here.
// `done` is a one-cycle pulse in the cycle after `out_load`, when the new
// outputs are visible. With `out_ready` high the latency from `start` to
// `done` is N + 2 cycles. `busy` is high outside IDLE.
// The published block diagram names a control unit without giving its
// insides; the three states and the write-back stall are this design's own.
module control_unit (
  input  logic clk,
  input  logic rst_n,
  input  logic start,
  input  logic addr_last,
  input  logic out_ready,
  output logic clear,
  output logic mac_en,
  output logic out_load,
  output logic done,
  output logic busy
);

  typedef enum logic [1:0] {S_IDLE, S_RUN, S_WB} state_e;
  state_e state, state_nx;

  always_comb begin
    state_nx = state;
    clear    = 1'b0;
    mac_en   = 1'b0;
    out_load = 1'b0;
    unique case (state)
      S_IDLE: if (start) begin
                clear    = 1'b1;
                state_nx = S_RUN;
              end
      S_RUN:  begin
                mac_en = 1'b1;
                if (addr_last) state_nx = S_WB;
              end
      S_WB:   if (out_ready) begin
                out_load = 1'b1;
                state_nx = S_IDLE;
              end
      default: state_nx = S_IDLE;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      done  <= 1'b0;
    end else begin
      state <= state_nx;
      done  <= out_load;
    end
  end

  assign busy = (state != S_IDLE);

  // A write-back is always preceded by a run.
  a_load_after_run: assert property (@(posedge clk) disable iff (!rst_n)
                                     out_load |-> state == S_WB);

endmodule
