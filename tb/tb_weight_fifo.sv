// tb_weight_fifo: weight fetcher and FIFO (N = 4, 2 tiles deep) against the
// Weight Memory model (latency 6, stalls every 5th cycle). Three Read_Weights
// requests for 5 tiles in all are queued at once; the consumer pops rows at
// random after first letting the FIFO fill up. Every popped row must be the expected one (tiles in order, each
// tile last row first) and the FIFO must fill to exactly its depth, never beyond.
module tb_weight_fifo;
  import tpu_pkg::*;

  localparam int N = 4, TILES = 2, AW = 25;

  logic          clk = 0, rst_n = 0;
  logic          req_valid, req_ready;
  logic [23:0]   req_tile;
  logic [31:0]   req_ntiles;
  logic          mem_req_valid, mem_req_ready, mem_rsp_valid;
  logic [AW-1:0] mem_req_addr;
  logic [7:0]    mem_rsp_data [N];
  logic          pop, empty, idle;
  logic [7:0]    row_out [N];

  weight_fifo #(.N(N), .TILES(TILES), .MEM_AW(AW)) dut (.*);
  weight_memory_model #(.N(N), .AW(AW), .LATENCY(6), .STALL_EVERY(5)) u_wm (
    .clk, .rst_n, .req_valid(mem_req_valid), .req_ready(mem_req_ready), .req_addr(mem_req_addr),
    .rsp_valid(mem_rsp_valid), .rsp_data(mem_rsp_data));

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int exp_tiles [$];
  int popped = 0, max_count = 0;

  function automatic logic [7:0] wbyte(longint unsigned a, int unsigned i);
    return 8'((a * 37 + i * 11 + (a >> 3) * 5 + 3) % 256);
  endfunction

  always @(posedge clk) if (rst_n) begin
    if (int'(dut.count) > max_count) max_count = int'(dut.count);
  end

  initial begin
    req_valid = 0; req_tile = 0; req_ntiles = 0; pop = 0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    // tiles 7,8 ; 100 ; 3,4
    foreach (exp_tiles[k]) ;
    exp_tiles = '{7, 8, 100, 3, 4};
    @(negedge clk) begin req_valid = 1; req_tile = 7; req_ntiles = 2; end
    @(negedge clk) begin req_tile = 100; req_ntiles = 1; end
    @(negedge clk) begin req_tile = 3; req_ntiles = 2; end
    @(negedge clk) req_valid = 0;
    // without a consumer the FIFO must fill to exactly its depth and stop
    repeat (100) @(negedge clk);
    checks++;
    if (int'(dut.count) != TILES * N) begin failures++; $display("FAIL fill level %0d", dut.count); end
    while (popped < 5 * N) begin
      @(negedge clk);
      pop = 0;
      if (!empty && ($urandom % 3 != 0)) begin
        int tile, r;
        longint unsigned a;
        tile = exp_tiles[popped / N];
        r    = N - 1 - (popped % N);
        a    = longint'(tile) * N + r;
        checks++;
        for (int i = 0; i < N; i++)
          if (row_out[i] !== wbyte(a, i)) begin
            failures++;
            $display("FAIL pop %0d byte %0d: %h exp %h", popped, i, row_out[i], wbyte(a, i));
            break;
          end
        pop = 1;
        popped++;
      end
    end
    @(negedge clk) pop = 0;
    repeat (20) @(negedge clk);
    checks++;
    if (!empty || !idle) begin failures++; $display("FAIL not drained"); end
    checks++;
    if (max_count != TILES * N) begin failures++; $display("FAIL occupancy %0d", max_count); end
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
