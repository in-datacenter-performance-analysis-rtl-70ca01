// tb_accumulators: checks the accumulator RAMs (N = 4, 16 rows).
// Random overwrite and accumulate writes, with shifts 0/8/16, are sent the
// way the matrix unit delivers them (control at column 0, column j's sum j
// cycles later), sometimes back to back to the same row. A model in the
// testbench tracks the expected contents; every row is then read back
// through the read port (one-cycle latency) and compared. The done output
// must follow each control word by N cycles.
module tb_accumulators;
  import tpu_pkg::*;

  localparam int N = 4;
  localparam int ROWS = 16;
  localparam int NW = 60;            // writes
  localparam int STEPS = NW + N + 4;

  logic             clk = 0, rst_n = 0;
  logic [ACC_W-1:0] psum_in [N];
  acc_ctrl_t        ctrl_in;
  logic             rd_en;
  logic [3:0]       rd_addr;
  logic [ACC_W-1:0] rd_data [N];
  logic             done_valid;
  logic [15:0]      done_addr;

  accumulators #(.N(N), .ROWS(ROWS)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  acc_ctrl_t   wc [STEPS];
  logic [31:0] wv [STEPS][N];
  logic [31:0] model [ROWS][N];
  int step = 0;
  logic phase_write = 0;

  initial begin
    for (int t = 0; t < STEPS; t++) begin
      wc[t] = '0;
      if (t < NW) begin
        wc[t].valid = ($urandom % 4) != 0;
        wc[t].addr = 16'($urandom % 4);      // few rows: many read-modify-writes
        wc[t].accumulate = (t < 4) ? 1'b0 : 1'($urandom);
        wc[t].shift = 2'($urandom % 3);
        if (t < 4) begin wc[t].valid = 1; wc[t].addr = 16'(t); end
      end
      for (int j = 0; j < N; j++) wv[t][j] = $urandom % 100000 - 50000;
    end
    for (int r = 0; r < ROWS; r++) for (int j = 0; j < N; j++) model[r][j] = 'x;
    // the model applies each write in order, per column
    for (int t = 0; t < NW; t++)
      if (wc[t].valid)
        for (int j = 0; j < N; j++)
          model[wc[t].addr][j] = (wc[t].accumulate ? model[wc[t].addr][j] : 32'd0)
                                 + (wv[t][j] << (8 * wc[t].shift));
  end

  always @(negedge clk) if (rst_n && phase_write) begin
    ctrl_in = (step < STEPS) ? wc[step] : '0;
    for (int j = 0; j < N; j++) psum_in[j] = (step - j >= 0 && step - j < STEPS) ? wv[step - j][j] : 32'($urandom);
    #1;
    if (step - N >= 0 && step - N < STEPS && wc[step - N].valid) begin
      checks++;
      if (!done_valid || done_addr !== wc[step - N].addr) begin
        failures++;
        $display("FAIL done at step %0d", step);
      end
    end
    step++;
  end

  initial begin
    ctrl_in = '0; rd_en = 0; rd_addr = 0;
    for (int j = 0; j < N; j++) psum_in[j] = 0;
    repeat (2) @(posedge clk);
    @(posedge clk) rst_n = 1;
    phase_write = 1;
    repeat (STEPS + 2) @(posedge clk);
    phase_write = 0;
    @(negedge clk) ctrl_in = '0;
    for (int r = 0; r < 4; r++) begin
      @(negedge clk) begin rd_en = 1; rd_addr = 4'(r); end
      @(negedge clk) begin
        rd_en = 0;
        for (int j = 0; j < N; j++) begin
          checks++;
          if (rd_data[j] !== model[r][j]) begin
            failures++;
            $display("FAIL row %0d col %0d: %h exp %h", r, j, rd_data[j], model[r][j]);
          end
        end
      end
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
