// tb_instruction_buffer: DEPTH = 4. Random pushes and pops against a queue
// model: order and contents must be kept, in_ready must drop exactly when 4
// instructions are held and out_valid exactly when none are.
module tb_instruction_buffer;
  import tpu_pkg::*;

  localparam int DEPTH = 4;

  logic   clk = 0, rst_n = 0;
  logic   in_valid, in_ready, out_valid, out_ready;
  instr_t in_instr, out_instr;

  instruction_buffer #(.DEPTH(DEPTH)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0, fulls = 0;
  instr_t q [$];

  initial begin
    in_valid = 0; out_ready = 0; in_instr = '0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    for (int k = 0; k < 500; k++) begin
      @(negedge clk);
      checks++;
      if (in_ready !== (q.size() < DEPTH) || out_valid !== (q.size() != 0)) begin
        failures++; $display("FAIL flags at %0d: size %0d", k, q.size());
      end
      if (q.size() == DEPTH) fulls++;
      if (out_valid && q.size() != 0) begin
        checks++;
        if (out_instr !== q[0]) begin failures++; $display("FAIL head at %0d", k); end
      end
      in_valid  = ($urandom % 100) < ((k / 100) % 2 ? 70 : 40);
      out_ready = ($urandom % 100) < ((k / 100) % 2 ? 40 : 70);
      in_instr  = instr_t'({$urandom, $urandom, $urandom});
      @(posedge clk);
      if (out_valid && out_ready) void'(q.pop_front());
      if (in_valid && in_ready) q.push_back(in_instr);
    end
    if (fulls == 0) begin failures++; $display("FAIL never full"); end
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
