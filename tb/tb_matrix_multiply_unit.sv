// tb_matrix_multiply_unit: self-checking test of the systolic array (N = 8).
//
// Shifts weight tile A into bank 0, streams vectors through it while tile B
// is shifted into bank 1, then streams vectors alternating between the two
// banks, with random signed/unsigned operand modes. Inputs are skewed by the
// testbench (row i delayed i cycles). Each column's result is compared with
// sum_i a[i]*W[i][j] computed here, at exactly the cycle the design
// documents: column j of the vector entered at cycle t appears after the
// clock edge t+N+j.
module tb_matrix_multiply_unit;
  import tpu_pkg::*;

  localparam int N     = 8;
  localparam int STEPS = 4 * N + 40;

  logic             clk = 0, rst_n = 0;
  logic [7:0]       a_in [N];
  row_tag_t         a_tag [N];
  logic [7:0]       w_in [N];
  logic             w_shift, w_bank;
  logic [ACC_W-1:0] psum_out [N];

  matrix_multiply_unit #(.N(N)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  // weight tiles, W[bank][row][col]
  logic [7:0] W [2][N][N];
  // per-step stimulus: vector entering row 0 at step t
  logic       v_valid [STEPS];
  logic [7:0] v_data  [STEPS][N];
  logic       v_bank  [STEPS], v_ds [STEPS], v_ws [STEPS];
  logic       s_en    [STEPS], s_bank [STEPS];
  int         s_row   [STEPS];

  function automatic longint ref_dot(int t, int j);
    longint s = 0;
    for (int i = 0; i < N; i++) begin
      longint a, w;
      a = v_ds[t] ? longint'($signed(v_data[t][i])) : longint'(v_data[t][i]);
      w = v_ws[t] ? longint'($signed(W[v_bank[t]][i][j])) : longint'(W[v_bank[t]][i][j]);
      s += a * w;
    end
    return s;
  endfunction

  initial begin
    for (int b = 0; b < 2; b++)
      for (int i = 0; i < N; i++)
        for (int j = 0; j < N; j++) W[b][i][j] = 8'($urandom);
    for (int t = 0; t < STEPS; t++) begin
      v_valid[t] = 0; s_en[t] = 0; v_bank[t] = 0; s_bank[t] = 0; s_row[t] = 0;
      v_ds[t] = $urandom % 2; v_ws[t] = $urandom % 2;
      for (int i = 0; i < N; i++) v_data[t][i] = 8'($urandom);
    end
    // tile A into bank 0 at steps 0..N-1 (last row first)
    for (int k = 0; k < N; k++) begin s_en[k] = 1; s_bank[k] = 0; s_row[k] = N - 1 - k; end
    // 10 vectors on bank 0
    for (int t = N; t < N + 10; t++) begin v_valid[t] = 1; v_bank[t] = 0; end
    // tile B into bank 1 while those run
    for (int k = 0; k < N; k++) begin
      s_en[N + 2 + k] = 1; s_bank[N + 2 + k] = 1; s_row[N + 2 + k] = N - 1 - k;
    end
    // vectors alternating between banks
    for (int t = 2 * N + 4; t < 2 * N + 20; t++) begin v_valid[t] = 1; v_bank[t] = t[0]; end
  end

  int step = 0;

  // drive stimulus for the coming edge
  always @(negedge clk) if (rst_n) begin
    for (int i = 0; i < N; i++) begin
      int t;
      t = step - i;
      if (t >= 0 && t < STEPS && v_valid[t]) begin
        a_in[i]  = v_data[t][i];
        a_tag[i] = '{valid: 1'b1, bank: v_bank[t], dsigned: v_ds[t], wsigned: v_ws[t]};
      end else begin
        a_in[i]  = 8'($urandom);
        a_tag[i] = '{valid: 1'b0, bank: 1'($urandom), dsigned: 1'b0, wsigned: 1'b0};
      end
    end
    w_shift = (step < STEPS) ? s_en[step] : 1'b0;
    w_bank  = (step < STEPS) ? s_bank[step] : 1'b0;
    for (int j = 0; j < N; j++) w_in[j] = (step < STEPS && s_en[step]) ? W[s_bank[step]][s_row[step]][j] : 8'($urandom);
  end

  // check after each edge: edge number e = step-1 just happened
  always @(posedge clk) if (rst_n) begin
    #1;
    for (int j = 0; j < N; j++) begin
      int t;
      t = step - N - j;
      if (t >= 0 && t < STEPS && v_valid[t]) begin
        longint exp_v;
        exp_v = ref_dot(t, j);
        checks++;
        if (psum_out[j] !== 32'(exp_v)) begin
          failures++;
          $display("FAIL vector@%0d col %0d: got %0d exp %0d", t, j, $signed(psum_out[j]), exp_v);
        end
      end
    end
    step++;
  end

  initial begin
    for (int i = 0; i < N; i++) begin a_in[i] = 0; a_tag[i] = '0; w_in[i] = 0; end
    w_shift = 0; w_bank = 0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    repeat (STEPS + 2 * N + 4) @(posedge clk);
    if (checks != 26 * N) begin
      failures++;
      $display("FAIL expected %0d checks, made %0d", 26 * N, checks);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
