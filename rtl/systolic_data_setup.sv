// systolic_data_setup: turns one Unified Buffer row into a diagonal wavefront.
//
// The Unified Buffer delivers all N bytes of an input vector in one cycle; the
// systolic array needs element i one cycle later than element i-1. Row i of
// the output is therefore the input delayed by i cycles (row 0 is not
// delayed), each byte keeping its row tag. The accumulator control word that
// belongs to the vector is delayed by N+1 cycles, so that it reaches
// accumulator column 0 in the cycle the array's column 0 delivers that
// vector's sum; from there the accumulators pass it one column per cycle.
// This is the "Systolic Data Setup" block of the paper's block diagram and
// the staircase of queues at the left edge of its systolic figure, with the
// control passing down beside them; the register-chain form is this design's
// choice.
//
// Interface: in_valid/in_data/in_tag/in_ctrl at cycle t; a_out[i]/a_tag[i]
// at cycle t+i; ctrl_out at cycle t+N+1.
module systolic_data_setup
  import tpu_pkg::*;
#(
  parameter int unsigned N = ARRAY_N
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic [7:0] in_data [N],
  input  row_tag_t   in_tag,
  input  acc_ctrl_t  in_ctrl,
  output logic [7:0] a_out   [N],
  output row_tag_t   a_tag   [N],
  output acc_ctrl_t  ctrl_out
);

  // stage k of row i holds the row delayed by k+1 cycles; only k < i is used
  logic [7:0] sk_data_q [N][N];
  row_tag_t   sk_tag_q  [N][N];
  acc_ctrl_t  ctrl_q    [N+1];

  always_ff @(posedge clk) begin
    for (int i = 0; i < N; i++) begin
      sk_data_q[i][0] <= in_data[i];
      for (int k = 1; k < N; k++) sk_data_q[i][k] <= sk_data_q[i][k-1];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < N; i++)
        for (int k = 0; k < N; k++) sk_tag_q[i][k] <= '0;
      for (int k = 0; k <= N; k++) ctrl_q[k] <= '0;
    end else begin
      for (int i = 0; i < N; i++) begin
        sk_tag_q[i][0] <= in_tag;
        for (int k = 1; k < N; k++) sk_tag_q[i][k] <= sk_tag_q[i][k-1];
      end
      ctrl_q[0] <= in_ctrl;
      for (int k = 1; k <= N; k++) ctrl_q[k] <= ctrl_q[k-1];
    end
  end

  for (genvar i = 0; i < N; i++) begin : g_row
    if (i == 0) begin : g_direct
      assign a_out[i] = in_data[i];
      assign a_tag[i] = in_tag;
    end else begin : g_delayed
      assign a_out[i] = sk_data_q[i][i-1];
      assign a_tag[i] = sk_tag_q[i][i-1];
    end
  end

  assign ctrl_out = ctrl_q[N];

endmodule
