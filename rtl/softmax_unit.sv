// softmax_unit: output-layer softmax, p_i = exp(z_i) / sum_j exp(z_j).
//
// The network's output layer is a softmax over the M raw scores z_i (Q7.8).
// This unit computes the M probabilities as unsigned P_W-bit fractions
// (Q0.16 by default, 1.0 shown as all ones). It works in three steps:
//   1. (start cycle) find max_j z_j and store d_i = max - z_i >= 0. Subtracting
//      the maximum does not change the softmax and keeps every exponential
//      in (0, 1].
//   2. (1 cycle) e_i = exp(-d_i) = 2^(-d_i * log2 e). The exponent is split
//      into an integer part k and an 8-bit fraction f; 2^(-f/256) comes from a
//      256-entry table and is shifted right by k. The table is built at
//      elaboration from 2^(-j/256) = (2^(-1/256))^j in integer arithmetic.
//      The sum S = sum_i e_i is formed at the same time.
//   3. (M * P_W cycles) p_i = e_i / S, one restoring divider producing one
//      quotient bit per cycle, the M outputs one after another.
// `valid` pulses when all M probabilities are updated, 2 + M*P_W cycles after
// `start` (114 cycles for M = 7). `start` must not come while `busy`.
// Accuracy: the 8-bit table fraction limits the relative error of each e_i
// to about 0.3 %; the probabilities are within about 1 % of full scale.
// The softmax itself is the paper's output activation; how it is evaluated
// (base-2 exponent, table, serial divider, output format) is this design's
// own choice, as the paper does not describe it.
module softmax_unit #(
  parameter int unsigned M         = fnn_pkg::N_OUT,
  parameter int unsigned DATA_W    = fnn_pkg::DATA_W,
  parameter int unsigned FRAC_BITS = fnn_pkg::FRAC_BITS,
  parameter int unsigned P_W       = 16
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     start,
  input  logic signed [DATA_W-1:0] scores [M],
  output logic [P_W-1:0]           prob   [M],
  output logic                     valid,
  output logic                     busy
);

  localparam int unsigned IW     = (M > 1) ? $clog2(M) : 1;
  localparam int unsigned ONE_W  = P_W + 1;                 // e_i in [0, 2^P_W]
  localparam int unsigned SUM_W  = ONE_W + $clog2(M + 1);
  localparam int unsigned D_W    = DATA_W + 1;              // max - z_i
  localparam int unsigned L2E_FR = 16;                      // log2(e) in Q1.16
  localparam logic [17:0] LOG2E  = 18'd94548;
  localparam int unsigned U_W    = D_W + 18;
  localparam int unsigned U_FR   = FRAC_BITS + L2E_FR;      // fraction bits of d*log2e
  localparam int unsigned BW     = (P_W > 1) ? $clog2(P_W) : 1;

  typedef logic [ONE_W-1:0] tab_t [256];

  // 2^(-j/256) in Q(P_W), j = 0..255, by repeated multiplication in Q30.
  function automatic tab_t make_tab();
    tab_t   t;
    longint v    = 64'sd1 <<< 30;
    longint step = 64'sd1070838486;       // round(2^30 * 2^(-1/256))
    for (int j = 0; j < 256; j++) begin
      t[j] = ONE_W'((v + (64'sd1 <<< (30 - P_W - 1))) >>> (30 - P_W));
      v    = (v * step + (64'sd1 <<< 29)) >>> 30;
    end
    return t;
  endfunction

  localparam tab_t EXP_TAB = make_tab();

  typedef enum logic [1:0] {S_IDLE, S_EXP, S_DIV} state_e;
  state_e state;

  logic [D_W-1:0]   dneg [M];
  logic [ONE_W-1:0] e    [M];
  logic [SUM_W-1:0] sum;
  logic [IW-1:0]    idx;
  logic [BW-1:0]    bitn;
  logic [SUM_W:0]   rem;
  logic [P_W-1:0]   quo;

  // step 1: maximum
  logic signed [DATA_W-1:0] zmax;
  always_comb begin
    zmax = scores[0];
    for (int unsigned k = 1; k < M; k++)
      if (scores[k] > zmax) zmax = scores[k];
  end

  // step 2: exponentials and their sum
  logic [ONE_W-1:0] e_nx [M];
  logic [SUM_W-1:0] sum_nx;
  always_comb begin
    logic [U_W-1:0] u;
    logic [U_W-1:0] kint;
    sum_nx = '0;
    for (int unsigned k = 0; k < M; k++) begin
      u    = U_W'(dneg[k]) * U_W'(LOG2E);
      kint = u >> U_FR;
      if (kint >= U_W'(ONE_W)) e_nx[k] = '0;
      else                     e_nx[k] = EXP_TAB[u[U_FR-1 -: 8]] >> kint;
      sum_nx = sum_nx + SUM_W'(e_nx[k]);
    end
  end

  // step 3: serial restoring division, next remainder and quotient bit
  logic [SUM_W:0] rem_sh;
  logic           qbit;
  always_comb begin
    rem_sh = rem << 1;
    qbit   = (rem_sh >= (SUM_W + 1)'(sum));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      valid <= 1'b0;
      idx   <= '0;
      bitn  <= '0;
      rem   <= '0;
      quo   <= '0;
      sum   <= '0;
      for (int unsigned k = 0; k < M; k++) begin
        dneg[k] <= '0;
        e[k]    <= '0;
        prob[k] <= '0;
      end
    end else begin
      valid <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          for (int unsigned k = 0; k < M; k++)
            dneg[k] <= D_W'(zmax) - D_W'(scores[k]);
          state <= S_EXP;
        end
        S_EXP: begin
          e     <= e_nx;
          sum   <= sum_nx;
          idx   <= '0;
          bitn  <= '0;
          rem   <= (SUM_W + 1)'(e_nx[0]);
          quo   <= '0;
          state <= S_DIV;
        end
        S_DIV: begin
          if (bitn == BW'(P_W - 1)) begin
            // e_i = S only when every other e_j is 0: probability 1.0
            prob[idx] <= (SUM_W'(e[idx]) == sum) ? '1 : {quo[P_W-2:0], qbit};
            bitn      <= '0;
            quo       <= '0;
            if (idx == IW'(M - 1)) begin
              state <= S_IDLE;
              valid <= 1'b1;
            end else begin
              idx <= idx + 1'b1;
              rem <= (SUM_W + 1)'(e[idx + 1'b1]);
            end
          end else begin
            bitn <= bitn + 1'b1;
            quo  <= {quo[P_W-2:0], qbit};
            rem  <= qbit ? rem_sh - (SUM_W + 1)'(sum) : rem_sh;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy = (state != S_IDLE);

  a_no_start_busy: assert property (@(posedge clk) disable iff (!rst_n) start |-> !busy);

endmodule
