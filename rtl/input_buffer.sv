// input_buffer: double-buffered I/Q frame store for the first layer.
//
// The classifier input is 900 I/Q samples, i.e. 1800 real words. Samples
// arrive as a valid/ready stream, one complex sample (I and Q) per beat, and
// are stored as x_{2k} = I_k, x_{2k+1} = Q_k. There are two banks (ping-pong):
// while layer 1 reads one complete frame, the next frame is written into the
// other bank, so sample collection and computation overlap and the input
// keeps up with a continuous stream as long as a frame takes at least as
// long to arrive as layer 1 takes to read one.
//   write side: beats go to the write bank; after IQ_SAMPLES beats that bank
//               is marked full and writing moves to the other bank. If that
//               bank is still full, `s_ready` is low (the source stalls).
//   read side:  `full` says the read bank holds a complete frame; layer 1
//               reads word `rd_addr` on `rd_data` (combinational).
//               `release_buf` (layer 1's write-back, when it has read all
//               words) frees the read bank and moves to the other bank.
// The buffer and its addressed read follow the layer block diagram; the
// stream handshake, the I/Q interleaving and the double buffering (chosen
// so that the published 24 us latency also sets the sustainable rate) are
// this design's choices.
module input_buffer #(
  parameter int unsigned IQ_SAMPLES = fnn_pkg::IQ_SAMPLES,
  parameter int unsigned DATA_W     = fnn_pkg::DATA_W,
  localparam int unsigned NW        = 2 * IQ_SAMPLES,
  localparam int unsigned AW        = $clog2(NW),
  localparam int unsigned CW        = $clog2(IQ_SAMPLES + 1)
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // sample stream
  input  logic                     s_valid,
  output logic                     s_ready,
  input  logic signed [DATA_W-1:0] s_i,
  input  logic signed [DATA_W-1:0] s_q,
  // frame side
  output logic                     full,
  input  logic                     release_buf,
  input  logic [AW-1:0]            rd_addr,
  output logic signed [DATA_W-1:0] rd_data
);

  // bank b occupies words b*NW .. b*NW+NW-1
  logic signed [DATA_W-1:0] mem [2*NW];
  logic [AW:0]              wr_base, rd_base;
  logic [1:0]               bank_full;
  logic                     wr_bank, rd_bank;
  logic [CW-1:0]            count;
  logic                     wr_fire, wr_last;

  assign s_ready = !bank_full[wr_bank];
  assign full    = bank_full[rd_bank];
  assign wr_fire = s_valid && s_ready;
  assign wr_last = (count == CW'(IQ_SAMPLES - 1));

  always_ff @(posedge clk) begin
    if (wr_fire) begin
      mem[wr_base + {(AW-1)'(count), 1'b0}] <= s_i;
      mem[wr_base + {(AW-1)'(count), 1'b1}] <= s_q;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      bank_full <= '0;
      wr_bank   <= 1'b0;
      rd_bank   <= 1'b0;
      count     <= '0;
    end else begin
      if (wr_fire) count <= wr_last ? '0 : count + 1'b1;
      if (wr_fire && wr_last) wr_bank <= !wr_bank;
      if (release_buf) rd_bank <= !rd_bank;
      for (int b = 0; b < 2; b++) begin
        if (wr_fire && wr_last && wr_bank == 1'(b))   bank_full[b] <= 1'b1;
        else if (release_buf && rd_bank == 1'(b))     bank_full[b] <= 1'b0;
      end
    end
  end

  assign wr_base = wr_bank ? (AW+1)'(NW) : '0;
  assign rd_base = rd_bank ? (AW+1)'(NW) : '0;
  assign rd_data = mem[rd_base + (AW+1)'(rd_addr)];

  // A frame is only released once it is complete.
  a_release_full: assert property (@(posedge clk) disable iff (!rst_n)
                                   release_buf |-> full);

endmodule
