// tb_systolic_data_setup: checks the skew (N = 8). A random row with random
// tag and control enters every cycle; row i of the output must equal input
// element i from i cycles earlier, and the control word must leave N+1
// cycles after it entered.
module tb_systolic_data_setup;
  import tpu_pkg::*;

  localparam int N = 8;
  localparam int STEPS = 60;

  logic       clk = 0, rst_n = 0;
  logic [7:0] in_data [N];
  row_tag_t   in_tag;
  acc_ctrl_t  in_ctrl;
  logic [7:0] a_out [N];
  row_tag_t   a_tag [N];
  acc_ctrl_t  ctrl_out;

  systolic_data_setup #(.N(N)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  logic [7:0] hd [STEPS][N];
  row_tag_t   ht [STEPS];
  acc_ctrl_t  hc [STEPS];
  int step = 0;

  initial begin
    for (int t = 0; t < STEPS; t++) begin
      for (int i = 0; i < N; i++) hd[t][i] = 8'($urandom);
      ht[t] = row_tag_t'($urandom);
      hc[t] = acc_ctrl_t'($urandom);
    end
  end

  // inputs for cycle `step`, checked combinationally before the edge
  always @(negedge clk) if (rst_n) begin
    if (step < STEPS) begin
      in_data = hd[step]; in_tag = ht[step]; in_ctrl = hc[step];
    end
    #1;
    for (int i = 0; i < N; i++) begin
      if (step - i >= 0 && step - i < STEPS) begin
        checks++;
        if (a_out[i] !== hd[step - i][i] || a_tag[i] !== ht[step - i]) begin
          failures++;
          $display("FAIL step %0d row %0d: %h/%h exp %h/%h", step, i, a_out[i], a_tag[i],
                   hd[step - i][i], ht[step - i]);
        end
      end
    end
    if (step - (N + 1) >= 0 && step - (N + 1) < STEPS) begin
      checks++;
      if (ctrl_out !== hc[step - (N + 1)]) begin
        failures++;
        $display("FAIL step %0d ctrl %h exp %h", step, ctrl_out, hc[step - (N + 1)]);
      end
    end
    step++;
  end

  initial begin
    for (int i = 0; i < N; i++) in_data[i] = 0;
    in_tag = '0; in_ctrl = '0;
    repeat (2) @(posedge clk);
    @(posedge clk) rst_n = 1;
    repeat (STEPS + N + 4) @(posedge clk);
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
