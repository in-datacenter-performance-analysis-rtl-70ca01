// tb_normalize_pool: N = 4. Sends 200 groups of 1, 2, 4 or 8 rows with
// random max/average and signed/unsigned mode, sometimes with idle cycles
// inside a group, and compares each output row with the element-wise max or
// floor(sum / size) computed here. The output must come one cycle after the
// group's last row, carrying that row's address, and nowhere else.
module tb_normalize_pool;
  localparam int N = 4;

  logic        clk = 0, rst_n = 0;
  logic        in_valid, in_first, in_last, avg, is_unsigned, out_valid;
  logic [7:0]  in_data [N], out_data [N];
  logic [23:0] in_addr, out_addr;
  logic [1:0]  log2_size;

  normalize_pool #(.N(N)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  initial begin
    in_valid = 0; in_first = 0; in_last = 0; avg = 0; is_unsigned = 0; in_addr = 0; log2_size = 0;
    for (int i = 0; i < N; i++) in_data[i] = 0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    for (int g = 0; g < 200; g++) begin
      int sz, lg, acc [N];
      logic a, u;
      lg = $urandom % 4; sz = 1 << lg;
      a = 1'($urandom); u = 1'($urandom);
      for (int r = 0; r < sz; r++) begin
        @(negedge clk);
        if (out_valid) begin checks++; failures++; $display("FAIL early output"); end
        avg = a; is_unsigned = u; log2_size = 2'(lg);
        in_valid = 1; in_first = (r == 0); in_last = (r == sz - 1); in_addr = 24'(g);
        for (int i = 0; i < N; i++) begin
          int v;
          in_data[i] = 8'($urandom);
          v = u ? int'(in_data[i]) : int'($signed(in_data[i]));
          if (r == 0) acc[i] = v;
          else acc[i] = a ? acc[i] + v : (v > acc[i] ? v : acc[i]);
        end
        if ($urandom % 4 == 0 && r != sz - 1) begin @(negedge clk) in_valid = 0; end
      end
      @(negedge clk);
      in_valid = 0;
      checks++;
      if (!out_valid || out_addr !== 24'(g)) begin failures++; $display("FAIL no output for group %0d", g); end
      for (int i = 0; i < N; i++) begin
        int e;
        e = a ? (acc[i] >>> lg) : acc[i];
        checks++;
        if (out_data[i] !== 8'(e)) begin
          failures++;
          $display("FAIL group %0d el %0d avg %0d uns %0d size %0d: %h exp %h", g, i, a, u, sz, out_data[i], 8'(e));
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
