// normalize_pool: the pooling hardware behind the activation function.
//
// Combines 2^log2_size consecutive activated rows element by element into one
// output row: either their maximum or their average (sum shifted right by
// log2_size, rounding toward minus infinity). With log2_size = 0 a row
// passes unchanged. Bytes are compared and summed as signed, except for
// sigmoid results, which are unsigned (is_unsigned). A group is marked by
// in_first on its first row and in_last on its last; the result appears on
// out_* one cycle after the last row, with the address that came with it.
// The paper says Activate can perform the pooling needed for convolutions on
// dedicated hardware next to the nonlinear logic; pooling over consecutive
// rows and the max/average choice are this design's reading of that.
module normalize_pool
  import tpu_pkg::*;
#(
  parameter int unsigned N = ARRAY_N
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  input  logic [7:0]  in_data [N],
  input  logic        in_first,
  input  logic        in_last,
  input  logic [23:0] in_addr,
  input  logic        avg,
  input  logic [1:0]  log2_size,
  input  logic        is_unsigned,
  output logic        out_valid,
  output logic [7:0]  out_data [N],
  output logic [23:0] out_addr
);

  logic signed [11:0] acc_q [N];   // running max or sum, 9-bit value + 3 bits growth

  function automatic logic signed [11:0] ext(input logic [7:0] b, input logic u);
    return u ? $signed({4'b0, b}) : $signed({{4{b[7]}}, b});
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_addr  <= '0;
    end else begin
      out_valid <= in_valid && in_last;
      if (in_valid && in_last) out_addr <= in_addr;
    end
  end

  always_ff @(posedge clk) begin
    if (in_valid) begin
      for (int i = 0; i < N; i++) begin
        logic signed [11:0] v, a;
        v = ext(in_data[i], is_unsigned);
        if (in_first)  a = v;
        else if (avg)  a = acc_q[i] + v;
        else           a = (v > acc_q[i]) ? v : acc_q[i];
        acc_q[i] <= a;
        if (in_last) out_data[i] <= avg ? 8'(a >>> log2_size) : a[7:0];
      end
    end
  end

endmodule
