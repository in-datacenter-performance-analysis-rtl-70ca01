// tb_tpu_top: end-to-end test of the whole TPU at a reduced size (8x8 array,
// 64-row Unified Buffer, 32 accumulator rows) with the host-memory and
// Weight Memory models.
//
// The program runs two layers: inputs are copied from the host, two weight
// tiles are fetched, layer 1 multiplies and applies ReLU, layer 2 switches to
// the second tile (loaded in the background), multiplies the ReLU output,
// accumulates a second product shifted left by 8 bits, applies sigmoid with
// 2-row max pooling; layer 1's sums are also sent through tanh and through
// identity with 2-row average pooling. After a Sync the four results are
// copied back to the host, then Sync, Interrupt_Host and Halt. All results are
// compared byte for byte with a reference computed here. The test also
// counts, and requires at least once: RAW-hazard stalls, weight stalls,
// weight-shift cycles, weight bank switches, a Sync that had to wait, host
// input stalls, accumulate and overwrite writes, every activation function,
// max and average pooling, both DMA directions, the interrupt and halt.
module tb_tpu_top;
  import tpu_pkg::*;

  localparam int N = 8, UBD = 64, ACCD = 32, B = 6;
  localparam int S1 = 9, S2 = 18, S3 = 11, S4 = 9;

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

  tpu_top #(.N(N), .UB_DEPTH(UBD), .ACC_DEPTH(ACCD), .WF_TILES(4), .IB_DEPTH(8)) dut (.*);

  host_memory_model #(.N(N), .ROWS(64), .LATENCY(5), .STALL_EVERY(4)) u_host (
    .clk, .rst_n, .req_valid(hreq_valid), .req_ready(hreq_ready), .req_write(hreq_write),
    .req_addr(hreq_addr), .req_wdata(hreq_wdata), .rsp_valid(hrsp_valid), .rsp_data(hrsp_data));

  weight_memory_model #(.N(N), .AW(WMEM_ROW_AW), .LATENCY(60), .STALL_EVERY(3)) u_wm (
    .clk, .rst_n, .req_valid(wm_req_valid), .req_ready(wm_req_ready), .req_addr(wm_req_addr),
    .rsp_valid(wm_rsp_valid), .rsp_data(wm_rsp_data));

  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  // ---------------- reference model ----------------
  function automatic logic [7:0] wbyte(longint unsigned a, int unsigned i);
    return 8'((a * 37 + i * 11 + (a >> 3) * 5 + 3) % 256);
  endfunction
  // weight of tile t at array row r, column j (Weight Memory row t*N+r)
  function automatic longint wt(int t, int r, int j);
    return longint'($signed(wbyte(longint'(t) * N + r, j)));
  endfunction
  function automatic int sat8(longint v);
    return v > 127 ? 127 : (v < -128 ? -128 : int'(v));
  endfunction
  function automatic int sig256(longint v);   // piecewise-linear sigmoid * 256
    longint m, y;
    m = v < 0 ? -v : v;
    if (m >= 80)      y = 256;
    else if (m >= 38) y = (m >> 1) + 216;
    else if (m >= 16) y = (m << 1) + 160;
    else              y = (m << 2) + 128;
    if (v < 0) y = 256 - y;
    return int'(y);
  endfunction
  function automatic longint to32(longint v);  // 32-bit accumulator wrap
    return longint'($signed(32'(v)));
  endfunction

  logic [7:0] X [B][N];
  longint acc0 [B][N], acc8 [B][N];
  int y1 [B][N], y2 [B/2][N], y3 [B][N], y4 [B/2][N];

  task automatic build_reference();
    for (int b = 0; b < B; b++)
      for (int j = 0; j < N; j++) begin
        longint s = 0;
        for (int i = 0; i < N; i++) s += longint'($signed(X[b][i])) * wt(5, i, j);
        acc0[b][j] = to32(s);
        y1[b][j] = (acc0[b][j] >>> S1) < 0 ? 0 : sat8(acc0[b][j] >>> S1);
      end
    for (int b = 0; b < B; b++)
      for (int j = 0; j < N; j++) begin
        longint s = 0, s2 = 0;
        for (int i = 0; i < N; i++) begin
          s  += longint'(y1[b][i]) * wt(6, i, j);
          s2 += longint'($signed(X[b][i])) * wt(6, i, j);
        end
        acc8[b][j] = to32(s + (s2 <<< 8));
        begin
          longint x3; int sgm;
          x3 = acc0[b][j] >>> S3;
          if (x3 > 1024) sgm = 256; else if (x3 < -1024) sgm = 0; else sgm = sig256(2 * x3);
          y3[b][j] = sgm >= 255 ? 127 : sgm - 128;
        end
      end
    for (int p = 0; p < B / 2; p++)
      for (int j = 0; j < N; j++) begin
        int a, c;
        a = sig256(acc8[2*p][j] >>> S2);   a = a > 255 ? 255 : a;
        c = sig256(acc8[2*p+1][j] >>> S2); c = c > 255 ? 255 : c;
        y2[p][j] = a > c ? a : c;
        y4[p][j] = (sat8(acc0[2*p][j] >>> S4) + sat8(acc0[2*p+1][j] >>> S4)) >>> 1;
      end
  endtask

  // ---------------- program ----------------
  function automatic instr_t mk(opcode_e op, int flags, int ub, int acc, int len);
    instr_t i;
    i.opcode = op; i.flags = 16'(flags); i.ub_addr = 24'(ub); i.acc_addr = 16'(acc); i.length = 32'(len);
    return i;
  endfunction
  function automatic int mmf(bit acc, bit sw, bit ds, bit ws, int sh);
    return (int'(acc) << MMF_ACCUMULATE) | (int'(sw) << MMF_SWITCH) | (int'(ds) << MMF_DSIGNED) |
           (int'(ws) << MMF_WSIGNED) | (sh << MMF_SHIFT_LO);
  endfunction
  function automatic int af(act_fn_e f, bit avg, int lg, int sh);
    return int'(f) | (int'(avg) << AF_POOL_AVG) | (lg << AF_POOL_LO) | (sh << AF_SHIFT_LO);
  endfunction

  instr_t prog [$];

  task automatic send(instr_t i);
    @(negedge clk);
    instr_valid = 1; instr = i;
    @(posedge clk);
    while (!instr_ready) @(posedge clk);
    @(negedge clk) instr_valid = 0;
  endtask

  // ---------------- mechanism counters ----------------
  int n_raw, n_wstall, n_wshift, n_switch, n_sync_wait, n_in_stall, n_accum, n_overwrite;
  int n_fn [4], n_pool_max, n_pool_avg, n_dma_in, n_dma_out, n_irq;
  always @(posedge clk) if (rst_n) begin
    if (dut.u_ctrl.perf_ev.raw_stall)    n_raw++;
    if (dut.u_ctrl.perf_ev.weight_stall) n_wstall++;
    if (dut.u_ctrl.perf_ev.weight_shift) n_wshift++;
    if (dut.u_ctrl.perf_ev.input_stall)  n_in_stall++;
    if (dut.u_ctrl.stream && dut.u_ctrl.mm_need_switch) n_switch++;
    if (dut.ib_valid && dut.ib_instr.opcode == OP_SYNC && !dut.ib_ready) n_sync_wait++;
    if (dut.acc_ctrl.valid && dut.acc_ctrl.accumulate) n_accum++;
    if (dut.acc_ctrl.valid && !dut.acc_ctrl.accumulate) n_overwrite++;
    if (dut.act_valid) n_fn[dut.act_fn]++;
    if (dut.pool_valid && dut.u_ctrl.pool_log2 != 0) begin
      if (dut.u_ctrl.pool_avg) n_pool_avg++; else n_pool_max++;
    end
    if (dut.ubb_wr_en) n_dma_in++;
    if (hreq_valid && hreq_ready && hreq_write) n_dma_out++;
    if (irq) n_irq++;
  end

  task automatic expect_count(string what, int n);
    checks++;
    if (n == 0) begin failures++; $display("FAIL mechanism never happened: %s", what); end
    else $display("  %-28s %0d", what, n);
  endtask


  initial begin
    instr_valid = 0; instr = '0; perf_clear = 0; perf_sel = 0;
    for (int b = 0; b < B; b++)
      for (int i = 0; i < N; i++) begin
        X[b][i] = 8'($urandom);
        u_host.mem[b][i] = X[b][i];
      end
    for (int r = 8; r < 64; r++) for (int i = 0; i < N; i++) u_host.mem[r][i] = 8'h5A;
    build_reference();

    prog.push_back(mk(OP_READ_HOST_MEMORY, 0, 0, 0, B));
    prog.push_back(mk(OP_READ_WEIGHTS, 0, 5, 0, 2));
    prog.push_back(mk(OP_MATRIX_MULTIPLY, mmf(0, 1, 1, 1, 0), 0, 0, B));
    prog.push_back(mk(OP_ACTIVATE, af(FN_RELU, 0, 0, S1), 16, 0, B));
    prog.push_back(mk(OP_MATRIX_MULTIPLY, mmf(0, 1, 0, 1, 0), 16, 8, B));
    prog.push_back(mk(OP_MATRIX_MULTIPLY, mmf(1, 0, 1, 1, 1), 0, 8, B));
    prog.push_back(mk(OP_ACTIVATE, af(FN_SIGMOID, 0, 1, S2), 24, 8, B / 2));
    prog.push_back(mk(OP_ACTIVATE, af(FN_TANH, 0, 0, S3), 32, 0, B));
    prog.push_back(mk(OP_ACTIVATE, af(FN_NONE, 1, 1, S4), 40, 0, B / 2));
    prog.push_back(mk(OP_SYNC, 0, 0, 0, 0));
    prog.push_back(mk(OP_WRITE_HOST_MEMORY, 0, 16, 16, B));
    prog.push_back(mk(OP_WRITE_HOST_MEMORY, 0, 24, 24, B / 2));
    prog.push_back(mk(OP_WRITE_HOST_MEMORY, 0, 32, 32, B));
    prog.push_back(mk(OP_WRITE_HOST_MEMORY, 0, 40, 40, B / 2));
    prog.push_back(mk(OP_SYNC, 0, 0, 0, 0));
    prog.push_back(mk(OP_INTERRUPT_HOST, 0, 0, 0, 0));
    prog.push_back(mk(OP_HALT, 0, 0, 0, 0));
    prog.push_back(mk(OP_NOP, 0, 0, 0, 0));   // never issued: the TPU has halted

    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    foreach (prog[k]) send(prog[k]);
    while (!halted) @(posedge clk);
    repeat (5) @(posedge clk);

    // results
    for (int b = 0; b < B; b++)
      for (int j = 0; j < N; j++) begin
        checks += 2;
        if (int'(u_host.mem[16 + b][j]) != y1[b][j]) begin
          failures++; $display("FAIL relu [%0d][%0d] %0d exp %0d", b, j, u_host.mem[16 + b][j], y1[b][j]);
        end
        if (int'($signed(u_host.mem[32 + b][j])) != y3[b][j]) begin
          failures++; $display("FAIL tanh [%0d][%0d] %0d exp %0d", b, j, $signed(u_host.mem[32 + b][j]), y3[b][j]);
        end
      end
    for (int p = 0; p < B / 2; p++)
      for (int j = 0; j < N; j++) begin
        checks += 2;
        if (int'(u_host.mem[24 + p][j]) != y2[p][j]) begin
          failures++; $display("FAIL sigmoid/max [%0d][%0d] %0d exp %0d", p, j, u_host.mem[24 + p][j], y2[p][j]);
        end
        if (int'($signed(u_host.mem[40 + p][j])) != y4[p][j]) begin
          failures++; $display("FAIL avg [%0d][%0d] %0d exp %0d", p, j, $signed(u_host.mem[40 + p][j]), y4[p][j]);
        end
      end
    checks++;
    if (dut.ib_valid !== 1'b1 || dut.ib_instr.opcode != OP_NOP) begin
      failures++; $display("FAIL instruction after Halt was consumed");
    end
    // performance counters must agree with the events seen
    perf_sel = 3'd4; #1;
    checks++;
    if (perf_value != 64'(n_raw)) begin failures++; $display("FAIL RAW counter %0d vs %0d", perf_value, n_raw); end
    perf_sel = 3'd2; #1;
    checks++;
    if (perf_value != 64'(n_wstall)) begin failures++; $display("FAIL weight stall counter"); end
    perf_sel = 3'd1; #1;
    checks++;
    if (perf_value != 64'(3 * B)) begin failures++; $display("FAIL array active %0d, exp %0d", perf_value, 3 * B); end

    $display("mechanisms:");
    expect_count("RAW stall cycles", n_raw);
    expect_count("weight stall cycles", n_wstall);
    expect_count("weight shift cycles", n_wshift);
    expect_count("weight bank switches", n_switch);
    expect_count("Sync wait cycles", n_sync_wait);
    expect_count("host input stall cycles", n_in_stall);
    expect_count("accumulate writes", n_accum);
    expect_count("overwrite writes", n_overwrite);
    expect_count("ReLU rows", n_fn[FN_RELU]);
    expect_count("sigmoid rows", n_fn[FN_SIGMOID]);
    expect_count("tanh rows", n_fn[FN_TANH]);
    expect_count("identity rows", n_fn[FN_NONE]);
    expect_count("max-pooled rows", n_pool_max);
    expect_count("average-pooled rows", n_pool_avg);
    expect_count("DMA rows in", n_dma_in);
    expect_count("DMA rows out", n_dma_out);
    expect_count("host interrupts", n_irq);
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
