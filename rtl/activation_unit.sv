// activation_unit: the nonlinear function of the artificial neuron.
//
// Takes one accumulator row (N x 32 bit) per cycle and returns N bytes one
// cycle later. Each value is first scaled by an arithmetic right shift
// (0..31, from the instruction) and then:
//   FN_NONE    saturated to a signed byte
//   FN_RELU    max(0, x), saturated to a signed byte (0..127)
//   FN_SIGMOID x read as a fixed-point number with 4 fraction bits; result is
//              sigmoid(x) as an unsigned byte with 8 fraction bits (255 = ~1)
//   FN_TANH    same input format; result is tanh(x) as a signed byte with
//              7 fraction bits
// Sigmoid uses the four-segment piecewise-linear approximation
//   y(|x|) = 1                   for |x| >= 5
//            |x|/32  + 0.84375   for 2.375 <= |x| < 5
//            |x|/8   + 0.625     for 1 <= |x| < 2.375
//            |x|/4   + 0.5       for |x| < 1,      y(-x) = 1 - y(x)
// (maximum error about 0.02), and tanh(x) = 2*sigmoid(2x) - 1, so the unit
// needs only shifts and adds. The paper names ReLU, sigmoid and tanh and says
// the unit reads the accumulators and writes the Unified Buffer; the number
// formats and the approximation are this design's choices.
// A tag (first/last row of a pooling group, destination row) is carried
// through with the same latency.
module activation_unit
  import tpu_pkg::*;
#(
  parameter int unsigned N = ARRAY_N
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  logic [ACC_W-1:0] in_data [N],
  input  logic             in_first,
  input  logic             in_last,
  input  logic [23:0]      in_addr,
  input  act_fn_e          fn,
  input  logic [4:0]       shift,
  output logic             out_valid,
  output logic [7:0]       out_data [N],
  output logic             out_first,
  output logic             out_last,
  output logic [23:0]      out_addr
);

  function automatic logic [7:0] sat_s8(input logic signed [ACC_W:0] v);
    if (v > 127)       return 8'sd127;
    else if (v < -128) return 8'h80;
    else               return v[7:0];
  endfunction

  // sigmoid(v / 16) * 256, for v with 4 fraction bits; result 0..256
  function automatic logic [9:0] sigmoid256(input logic signed [ACC_W:0] v);
    logic [ACC_W:0] m;
    logic [ACC_W:0] y;
    m = v[ACC_W] ? -v : v;
    if (m >= 80)      y = 256;
    else if (m >= 38) y = (m >> 1) + 216;
    else if (m >= 16) y = (m << 1) + 160;
    else              y = (m << 2) + 128;
    if (v[ACC_W]) y = 256 - y;
    return y[9:0];
  endfunction

  function automatic logic [7:0] activate(input logic [ACC_W-1:0] acc, input act_fn_e f,
                                           input logic [4:0] sh);
    logic signed [ACC_W:0] x;
    logic [9:0]            s;
    x = $signed({acc[ACC_W-1], acc}) >>> sh;
    case (f)
      FN_RELU:    return x[ACC_W] ? 8'd0 : sat_s8(x);
      FN_SIGMOID: begin
        s = sigmoid256(x);
        return (s > 10'd255) ? 8'd255 : s[7:0];
      end
      FN_TANH:    begin
        // |x| >= 2^30 saturates anyway; doubling is done on the clamped value
        if (x > 1024)       s = 10'd256;
        else if (x < -1024) s = 10'd0;
        else                s = sigmoid256(x <<< 1);
        // 2*sigmoid - 1 in units of 1/128 is s - 128, clamped to a signed byte
        return (s >= 10'd255) ? 8'd127 : 8'(s - 10'd128);
      end
      default:    return sat_s8(x);
    endcase
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_first <= 1'b0;
      out_last  <= 1'b0;
      out_addr  <= '0;
    end else begin
      out_valid <= in_valid;
      out_first <= in_first;
      out_last  <= in_last;
      out_addr  <= in_addr;
    end
  end

  always_ff @(posedge clk) begin
    if (in_valid)
      for (int i = 0; i < N; i++) out_data[i] <= activate(in_data[i], fn, shift);
  end

endmodule
