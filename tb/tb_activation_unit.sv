// tb_activation_unit: N = 8 random accumulator values per row, 400 rows,
// every function and random shifts. ReLU and identity are compared exactly
// with a saturating reference; sigmoid and tanh with the true functions
// (computed here with $exp), within 6 LSB, the approximation's error bound
// plus rounding. Latency must be one cycle and the tag must follow the data.
module tb_activation_unit;
  import tpu_pkg::*;

  localparam int N = 8;

  logic             clk = 0, rst_n = 0;
  logic             in_valid, in_first, in_last, out_valid, out_first, out_last;
  logic [ACC_W-1:0] in_data [N];
  logic [23:0]      in_addr, out_addr;
  act_fn_e          fn;
  logic [4:0]       shift;
  logic [7:0]       out_data [N];

  activation_unit #(.N(N)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int fn_seen [4];

  function automatic int ref_val(longint acc, act_fn_e f, int sh, output int tol);
    longint x;
    real    u, y;
    x = acc >>> sh;
    tol = 0;
    case (f)
      FN_RELU:    return (x < 0) ? 0 : (x > 127 ? 127 : int'(x));
      FN_SIGMOID: begin
        u = real'(x) / 16.0;
        y = 256.0 / (1.0 + $exp(-u));
        tol = 6;
        return (y > 255.0) ? 255 : int'(y);
      end
      FN_TANH: begin
        u = real'(x) / 16.0;
        if (u > 20.0) u = 20.0;
        if (u < -20.0) u = -20.0;
        y = 128.0 * ($exp(u) - $exp(-u)) / ($exp(u) + $exp(-u));
        tol = 6;
        return (y > 127.0) ? 127 : int'(y);
      end
      default:    return (x > 127) ? 127 : (x < -128 ? -128 : int'(x));
    endcase
  endfunction

  initial begin
    in_valid = 0; in_first = 0; in_last = 0; in_addr = 0; fn = FN_NONE; shift = 0;
    for (int i = 0; i < N; i++) in_data[i] = 0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    for (int k = 0; k < 400; k++) begin
      longint acc [N];
      act_fn_e f;
      int sh;
      @(negedge clk);
      f  = act_fn_e'(k % 4);
      sh = (k % 7 == 0) ? 0 : $urandom % 12;
      fn = f; shift = 5'(sh);
      in_valid = 1; in_first = 1'($urandom); in_last = 1'($urandom); in_addr = 24'($urandom);
      for (int i = 0; i < N; i++) begin
        if (k % 5 == 0) acc[i] = longint'($signed($urandom));          // full range, saturates
        else            acc[i] = (longint'($urandom % 400) - 200) <<< sh;
        if (i == 0 && k % 9 == 0) acc[i] = 0;
        in_data[i] = 32'(acc[i]);
      end
      @(negedge clk);
      in_valid = 0;
      checks++;
      if (!out_valid || out_first !== in_first || out_last !== in_last || out_addr !== in_addr) begin
        failures++; $display("FAIL tag/latency at row %0d", k);
      end
      for (int i = 0; i < N; i++) begin
        int e, tol, got;
        e = ref_val(longint'($signed(32'(acc[i]))), f, sh, tol);
        got = (f == FN_SIGMOID) ? int'(out_data[i]) : int'($signed(out_data[i]));
        checks++;
        if (got > e + tol || got < e - tol) begin
          failures++;
          $display("FAIL fn %0d sh %0d acc %0d: got %0d exp %0d", f, sh, acc[i], got, e);
        end
      end
      fn_seen[f]++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
