// tb_perf_counters: random event vectors for 300 cycles, a clear in the
// middle, then every counter is read through sel and compared with counts
// kept here.
module tb_perf_counters;
  import tpu_pkg::*;

  logic        clk = 0, rst_n = 0, clear;
  perf_ev_t    ev;
  logic [2:0]  sel;
  logic [63:0] value;

  perf_counters dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  longint exp_c [8];

  initial begin
    clear = 0; ev = '0; sel = 0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    for (int k = 0; k < 300; k++) begin
      @(negedge clk);
      ev = perf_ev_t'($urandom);
      clear = (k == 120);
      if (clear) for (int c = 0; c < 8; c++) exp_c[c] = 0;
      else begin
        exp_c[0]++;
        exp_c[1] += ev.array_active;
        exp_c[2] += ev.weight_stall;
        exp_c[3] += ev.weight_shift;
        exp_c[4] += ev.raw_stall;
        exp_c[5] += ev.input_stall;
        exp_c[6] += ev.instr_issued;
        exp_c[7] += !ev.array_active;
      end
    end
    @(negedge clk) begin ev = '0; clear = 0; end
    // the edge before the first read counts one idle cycle
    exp_c[0]++; exp_c[7]++;
    for (int c = 0; c < 8; c++) begin
      @(negedge clk);
      sel = 3'(c);
      #1;
      checks++;
      if (value !== 64'(exp_c[c])) begin failures++; $display("FAIL counter %0d: %0d exp %0d", c, value, exp_c[c]); end
      // the next edge counts one more idle cycle
      exp_c[0]++; exp_c[7]++;
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
