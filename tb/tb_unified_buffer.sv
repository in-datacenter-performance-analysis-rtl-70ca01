// tb_unified_buffer: random traffic on all four ports of a small Unified
// Buffer (N = 4 bytes, 32 rows) against a model. Read data must appear one
// cycle after the request; when both write ports hit the same row, port A's
// data must win.
module tb_unified_buffer;
  localparam int N = 4, ROWS = 32;

  logic       clk = 0;
  logic       rda_en, rdb_en, wra_en, wrb_en;
  logic [4:0] rda_addr, rdb_addr, wra_addr, wrb_addr;
  logic [7:0] rda_data [N], rdb_data [N], wra_data [N], wrb_data [N];

  unified_buffer #(.N(N), .ROWS(ROWS)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0, collisions = 0;
  logic [7:0] model [ROWS][N];
  logic [7:0] exp_a [N], exp_b [N];
  logic       chk_a, chk_b;

  initial begin
    rda_en = 0; rdb_en = 0; wra_en = 0; wrb_en = 0;
    rda_addr = 0; rdb_addr = 0; wra_addr = 0; wrb_addr = 0;
    for (int i = 0; i < N; i++) begin wra_data[i] = 0; wrb_data[i] = 0; end
    // initialise every row through port B
    for (int r = 0; r < ROWS; r++) begin
      @(negedge clk);
      wrb_en = 1; wrb_addr = 5'(r);
      for (int i = 0; i < N; i++) begin wrb_data[i] = 8'($urandom); model[r][i] = wrb_data[i]; end
    end
    @(negedge clk) wrb_en = 0;
    chk_a = 0; chk_b = 0;
    for (int k = 0; k < 400; k++) begin
      @(negedge clk);
      // check reads issued at the previous edge
      if (chk_a) begin checks++; if (rda_data !== exp_a) begin failures++; $display("FAIL read A"); end end
      if (chk_b) begin checks++; if (rdb_data !== exp_b) begin failures++; $display("FAIL read B"); end end
      rda_en = 1'($urandom); rdb_en = 1'($urandom);
      wra_en = 1'($urandom); wrb_en = 1'($urandom);
      rda_addr = 5'($urandom); rdb_addr = 5'($urandom);
      wra_addr = 5'($urandom % 8); wrb_addr = 5'($urandom % 8);
      for (int i = 0; i < N; i++) begin wra_data[i] = 8'($urandom); wrb_data[i] = 8'($urandom); end
      // reads see the old contents
      chk_a = rda_en; chk_b = rdb_en;
      exp_a = model[rda_addr]; exp_b = model[rdb_addr];
      if (wra_en && wrb_en && wra_addr == wrb_addr) collisions++;
      if (wrb_en) model[wrb_addr] = wrb_data;
      if (wra_en) model[wra_addr] = wra_data;
    end
    @(negedge clk);
    rda_en = 0; rdb_en = 0; wra_en = 0; wrb_en = 0;
    // final sweep
    for (int r = 0; r < ROWS; r++) begin
      @(negedge clk) begin rda_en = 1; rda_addr = 5'(r); end
      @(negedge clk) begin
        rda_en = 0; checks++;
        if (rda_data !== model[r]) begin failures++; $display("FAIL row %0d", r); end
      end
    end
    if (collisions == 0) begin failures++; $display("FAIL no write collision exercised"); end
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
