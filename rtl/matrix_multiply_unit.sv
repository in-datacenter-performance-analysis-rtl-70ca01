// matrix_multiply_unit: the N x N weight-stationary systolic MAC array.
//
// Each cell holds two weight bytes (a tile in use and one being loaded, the
// double buffering the paper describes), passes its data byte to the right
// and adds its product to the partial sum coming from above, passing the sum
// down. Data enter from the left, weights are shifted in from the top one row
// per cycle (N cycles per tile) and partial sums leave at the bottom, as in
// the paper's systolic figure.
//
// Interface and timing:
//   a_in[i], a_tag[i]  row i of the input, already skewed: element i of the
//                      vector that enters at cycle t must be presented at t+i.
//                      The tag says which weight buffer (bank) the row uses,
//                      so a new tile takes effect with the wavefront of the
//                      first row that names it.
//   w_shift, w_bank    shift w_in into buffer w_bank of every column: after N
//                      shifts, array row r holds the (N-1-r)-th row shifted in.
//   psum_out[j]        column j's sum for the vector entered at cycle t is
//                      valid at cycle t+N+j+1 (one cycle per row down, one per
//                      column across).
// The 8-bit operands are signed or unsigned per row (tag), as the paper
// allows; the 17-bit product is sign-extended to the 32-bit partial sum. The
// partial-sum width inside the array and the tag mechanism are this design's
// choices; the paper gives the 32-bit accumulators and 16-bit products.
// The array is written as register arrays updated by loops rather than N*N
// cell instances; each cell's arithmetic is tpu_pkg::mac_mul.
module matrix_multiply_unit
  import tpu_pkg::*;
#(
  parameter int unsigned N = ARRAY_N
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [7:0]           a_in   [N],
  input  row_tag_t             a_tag  [N],
  input  logic [7:0]           w_in   [N],
  input  logic                 w_shift,
  input  logic                 w_bank,
  output logic [ACC_W-1:0]     psum_out [N]
);

  logic [7:0]       data_q [N][N];
  row_tag_t         tag_q  [N][N];
  logic [ACC_W-1:0] psum_q [N][N];
  logic [7:0]       w0_q   [N][N];
  logic [7:0]       w1_q   [N][N];

  logic [7:0]       data_d [N][N];
  row_tag_t         tag_d  [N][N];
  logic [ACC_W-1:0] psum_d [N][N];
  logic [7:0]       w0_d   [N][N];
  logic [7:0]       w1_d   [N][N];

  always_comb begin
    for (int i = 0; i < N; i++) begin
      for (int j = 0; j < N; j++) begin
        logic [7:0]       a;
        row_tag_t         t;
        logic [7:0]       w;
        logic [ACC_W-1:0] above;
        // data move one column right per cycle
        a = (j == 0) ? a_in[i]  : data_q[i][j-1];
        t = (j == 0) ? a_tag[i] : tag_q[i][j-1];
        data_d[i][j] = a;
        tag_d[i][j]  = t;
        // multiply by the weight of the bank the current row names
        w     = tag_q[i][j].bank ? w1_q[i][j] : w0_q[i][j];
        above = (i == 0) ? '0 : psum_q[i-1][j];
        psum_d[i][j] = tag_q[i][j].valid
                     ? above + mac_mul(data_q[i][j], w, tag_q[i][j].dsigned, tag_q[i][j].wsigned)
                     : above;
        // weights shift one row down per cycle into the selected buffer
        w0_d[i][j] = w0_q[i][j];
        w1_d[i][j] = w1_q[i][j];
        if (w_shift) begin
          if (w_bank) w1_d[i][j] = (i == 0) ? w_in[j] : w1_q[i-1][j];
          else        w0_d[i][j] = (i == 0) ? w_in[j] : w0_q[i-1][j];
        end
      end
    end
  end

  // Only the tags need a reset; data, sums and weights are qualified by them.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < N; i++)
        for (int j = 0; j < N; j++)
          tag_q[i][j] <= '0;
    end else begin
      tag_q <= tag_d;
    end
  end

  always_ff @(posedge clk) begin
    data_q <= data_d;
    psum_q <= psum_d;
    w0_q   <= w0_d;
    w1_q   <= w1_d;
  end

  for (genvar j = 0; j < N; j++) begin : g_out
    assign psum_out[j] = psum_q[N-1][j];
  end

endmodule
