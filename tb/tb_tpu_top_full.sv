// tb_tpu_top_full: one complete layer on the TPU at its full default size
// (256x256 array, 24 MiB Unified Buffer, 4096 accumulator rows, four-tile
// Weight FIFO), with no parameter overridden.
//
// Program: Read_Host_Memory (4 input rows of 256 signed bytes), Read_Weights
// (one 64 KiB tile), MatrixMultiply (switch to the tile, 4 rows), Activate
// (ReLU, shift 10), Sync, Write_Host_Memory, Halt. The 4 x 256 results are
// compared with 256-term dot products computed here. The test also checks
// the matrix took one row per cycle and that the tile shift took 256 cycles.
module tb_tpu_top_full;
  import tpu_pkg::*;

  localparam int N = ARRAY_N, B = 4, SH = 10;

  logic             clk = 0, rst_n = 0;
  logic             instr_valid, instr_ready;
  instr_t           instr;
  logic             hreq_valid, hreq_ready, hreq_write, hrsp_valid;
  logic [31:0]      hreq_addr;
  logic [7:0]       hreq_wdata [N], hrsp_data [N];
  logic             wm_req_valid, wm_req_ready, wm_rsp_valid;
  logic [WMEM_ROW_AW-1:0] wm_req_addr;
  logic [7:0]       wm_rsp_data [N];
  logic             halted, irq, acc_done, perf_clear;
  logic [2:0]       perf_sel;
  logic [63:0]      perf_value;

  tpu_top dut (.*);

  host_memory_model #(.N(N), .ROWS(16), .LATENCY(5), .STALL_EVERY(0)) u_host (
    .clk, .rst_n, .req_valid(hreq_valid), .req_ready(hreq_ready), .req_write(hreq_write),
    .req_addr(hreq_addr), .req_wdata(hreq_wdata), .rsp_valid(hrsp_valid), .rsp_data(hrsp_data));

  weight_memory_model #(.N(N), .AW(WMEM_ROW_AW), .LATENCY(30), .STALL_EVERY(0)) u_wm (
    .clk, .rst_n, .req_valid(wm_req_valid), .req_ready(wm_req_ready), .req_addr(wm_req_addr),
    .rsp_valid(wm_rsp_valid), .rsp_data(wm_rsp_data));

  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  function automatic logic [7:0] wbyte(longint unsigned a, int unsigned i);
    return 8'((a * 37 + i * 11 + (a >> 3) * 5 + 3) % 256);
  endfunction

  function automatic instr_t mk(opcode_e op, int flags, int ub, int acc, int len);
    instr_t i;
    i.opcode = op; i.flags = 16'(flags); i.ub_addr = 24'(ub); i.acc_addr = 16'(acc); i.length = 32'(len);
    return i;
  endfunction

  task automatic send(instr_t i);
    @(negedge clk);
    instr_valid = 1; instr = i;
    @(posedge clk);
    while (!instr_ready) @(posedge clk);
    @(negedge clk) instr_valid = 0;
  endtask

  logic [7:0] X [B][N];
  int shift_cycles = 0, stream_cycles = 0;
  always @(posedge clk) if (rst_n) begin
    if (dut.w_shift) shift_cycles++;
    if (dut.mm_ub_rd_en) stream_cycles++;
  end

  localparam int TILE = 3;
  localparam int UB_IN = 1000, UB_OUT = 90000, ACC = 4000;

  initial begin
    instr_valid = 0; instr = '0; perf_clear = 0; perf_sel = 0;
    for (int b = 0; b < B; b++)
      for (int i = 0; i < N; i++) begin
        X[b][i] = 8'($urandom);
        u_host.mem[b][i] = X[b][i];
      end
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    send(mk(OP_READ_HOST_MEMORY, 0, UB_IN, 0, B));
    send(mk(OP_READ_WEIGHTS, 0, TILE, 0, 1));
    send(mk(OP_MATRIX_MULTIPLY, (1 << MMF_SWITCH) | (1 << MMF_DSIGNED) | (1 << MMF_WSIGNED), UB_IN, ACC, B));
    send(mk(OP_ACTIVATE, int'(FN_RELU) | (SH << AF_SHIFT_LO), UB_OUT, ACC, B));
    send(mk(OP_SYNC, 0, 0, 0, 0));
    send(mk(OP_WRITE_HOST_MEMORY, 0, UB_OUT, 8, B));   // to host rows 8..11
    send(mk(OP_SYNC, 0, 0, 0, 0));
    send(mk(OP_HALT, 0, 0, 0, 0));
    while (!halted) @(posedge clk);
    repeat (5) @(posedge clk);
    for (int b = 0; b < B; b++)
      for (int j = 0; j < N; j++) begin
        longint s, x;
        int e;
        s = 0;
        for (int i = 0; i < N; i++)
          s += longint'($signed(X[b][i])) * longint'($signed(wbyte(longint'(TILE) * N + i, j)));
        x = longint'($signed(32'(s))) >>> SH;
        e = x < 0 ? 0 : (x > 127 ? 127 : int'(x));
        checks++;
        if (int'(u_host.mem[8 + b][j]) != e) begin
          failures++;
          if (failures < 10) $display("FAIL out[%0d][%0d] = %0d exp %0d", b, j, u_host.mem[8 + b][j], e);
        end
      end
    checks++;
    if (shift_cycles != N) begin failures++; $display("FAIL shift cycles %0d", shift_cycles); end
    checks++;
    if (stream_cycles != B) begin failures++; $display("FAIL stream cycles %0d", stream_cycles); end
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
