// tb_controller: the instruction controller on its own (N = 4), with a DMA
// stub (busy 25 cycles per command) and a Weight FIFO stub that receives one
// row every 3 cycles after a Read_Weights. It checks, cycle by cycle where
// the design fixes the timing:
//   - Read_Weights reaches the fetcher with its fields and completes at once;
//   - a switching MatrixMultiply waits for N shifted rows into the shadow
//     bank, then streams B consecutive UB rows with the new bank, the right
//     accumulator addresses and flags, tags one cycle after the read;
//   - a MatrixMultiply whose UB rows are still being written by
//     Read_Host_Memory waits for the DMA (RAW), one with other rows does not;
//   - an Activate on accumulator rows still being written waits until the
//     matrix has drained (2N+4 cycles after its last row), then reads
//     len*2^pool rows with correct first/last/address tags;
//   - Sync waits for idle, Interrupt_Host pulses irq, Halt stops issue.
module tb_controller;
  import tpu_pkg::*;

  localparam int N = 4, UB_AW = 6, ACC_AW = 5;

  logic              clk = 0, rst_n = 0;
  logic              ib_valid, ib_ready;
  instr_t            ib_instr;
  logic              dma_cmd_valid, dma_cmd_ready, dma_to_host, dma_input_stall;
  logic [UB_AW-1:0]  dma_ub_addr;
  logic [31:0]       dma_host_addr, dma_len;
  logic              wreq_valid, wreq_ready;
  logic [23:0]       wreq_tile;
  logic [31:0]       wreq_ntiles;
  logic              mm_ub_rd_en;
  logic [UB_AW-1:0]  mm_ub_rd_addr;
  row_tag_t          su_tag;
  acc_ctrl_t         su_ctrl;
  logic              wf_empty, wf_pop, w_shift, w_bank;
  logic              acc_rd_en;
  logic [ACC_AW-1:0] acc_rd_addr;
  logic              act_valid, act_first, act_last;
  logic [23:0]       act_addr;
  act_fn_e           act_fn;
  logic [4:0]        act_shift;
  logic              pool_avg, pool_unsigned;
  logic [1:0]        pool_log2;
  logic              halted, irq;
  perf_ev_t          perf_ev;

  controller #(.N(N), .UB_AW(UB_AW), .ACC_AW(ACC_AW)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc++;

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0d: %s", cyc, msg); end
  endtask

  // ---- DMA stub ----
  int dma_busy_left = 0;
  assign dma_cmd_ready = (dma_busy_left == 0);
  assign dma_input_stall = 1'b0;
  always @(posedge clk) begin
    if (dma_cmd_valid && dma_cmd_ready) dma_busy_left <= 25;
    else if (dma_busy_left > 0) dma_busy_left <= dma_busy_left - 1;
  end

  // ---- Weight FIFO stub ----
  int rows_avail = 0, rows_to_come = 0, row_timer = 0, shifts = 0;
  assign wreq_ready = 1'b1;
  assign wf_empty = (rows_avail == 0);
  always @(posedge clk) begin
    if (wreq_valid && wreq_ready) rows_to_come <= rows_to_come + int'(wreq_ntiles) * N;
    row_timer <= (row_timer + 1) % 3;
    if (wf_pop) shifts++;
    rows_avail <= rows_avail - int'(wf_pop) + int'(rows_to_come > 0 && row_timer == 0);
    if (rows_to_come > 0 && row_timer == 0 && !(wreq_valid && wreq_ready)) rows_to_come <= rows_to_come - 1;
  end

  // ---- monitor of matrix stream and activate reads ----
  int stream_cyc [$], stream_addr [$], act_rd_cyc [$], act_rd_addr [$];
  always @(posedge clk) if (rst_n) begin
    if (mm_ub_rd_en) begin stream_cyc.push_back(cyc); stream_addr.push_back(int'(mm_ub_rd_addr)); end
    if (acc_rd_en)   begin act_rd_cyc.push_back(cyc); act_rd_addr.push_back(int'(acc_rd_addr)); end
  end

  function automatic instr_t mk(opcode_e op, int flags, int ub, int acc, int len);
    instr_t i;
    i.opcode = op; i.flags = 16'(flags); i.ub_addr = 24'(ub); i.acc_addr = 16'(acc); i.length = 32'(len);
    return i;
  endfunction

  // issue one instruction; returns the cycle it was taken
  task automatic issue(instr_t i, output int at);
    @(negedge clk);
    ib_valid = 1; ib_instr = i;
    @(posedge clk);
    while (!ib_ready) @(posedge clk);
    at = cyc;
    #1 ib_valid = 0;
  endtask

  initial begin
    int t0, t1, t2, t3, t4;
    ib_valid = 0; ib_instr = '0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;

    // 1. Read_Weights: one tile
    @(negedge clk) begin ib_valid = 1; ib_instr = mk(OP_READ_WEIGHTS, 0, 9, 0, 1); #1; end
    check(wreq_valid && wreq_tile == 24'd9 && wreq_ntiles == 32'd1, "weight request fields");
    check(ib_ready, "Read_Weights completes at once");
    @(posedge clk); #1;
    ib_valid = 0;

    // 2. switching MatrixMultiply, 3 rows from UB 5 into acc 2, signed data
    issue(mk(OP_MATRIX_MULTIPLY, (1 << MMF_SWITCH) | (1 << MMF_DSIGNED), 5, 2, 3), t0);
    @(negedge clk);
    while (!mm_ub_rd_en) @(negedge clk);
    check(shifts == N, $sformatf("shifted %0d rows before streaming", shifts));
    @(negedge clk);
    check(su_tag.valid && su_tag.bank == 1'b1 && su_tag.dsigned && !su_tag.wsigned, "row tag");
    check(su_ctrl.valid && su_ctrl.addr == 16'd2 && !su_ctrl.accumulate, $sformatf("accumulator control %p", su_ctrl));
    repeat (4) @(negedge clk);
    check(stream_cyc.size() == 3, "three rows streamed");
    check(stream_addr[0] == 5 && stream_addr[1] == 6 && stream_addr[2] == 7, "UB addresses");
    check(stream_cyc[1] == stream_cyc[0] + 1 && stream_cyc[2] == stream_cyc[0] + 2, "one row per cycle");

    // 3. RAW on the Unified Buffer: DMA writes rows 20..27
    issue(mk(OP_READ_HOST_MEMORY, 0, 20, 0, 8), t1);
    stream_cyc.delete(); stream_addr.delete();
    issue(mk(OP_MATRIX_MULTIPLY, 1 << MMF_ACCUMULATE, 40, 10, 2), t2);   // other rows: no wait
    check(t2 - t1 <= 2, "independent MatrixMultiply issues at once");
    issue(mk(OP_MATRIX_MULTIPLY, 0, 26, 12, 2), t3);                    // overlaps 20..27
    check(dma_busy_left == 0 || t3 - t1 >= 25, $sformatf("RAW wait on DMA: issued %0d after", t3 - t1));
    check(t3 - t1 >= 25, "MatrixMultiply waited for Read_Host_Memory");

    // 4. RAW on the accumulators: Activate of rows 12..15 (2 rows, pool 2)
    issue(mk(OP_ACTIVATE, int'(FN_RELU) | (1 << AF_POOL_LO), 50, 12, 2), t4);
    while (stream_cyc.size() < 4) @(posedge clk);
    check(act_rd_cyc.size() == 0 || act_rd_cyc[0] > stream_cyc[3] + 2 * N + 3,
          "Activate waited for the matrix to drain");
    while (act_rd_cyc.size() < 4) @(posedge clk);
    check(act_rd_cyc[0] >= stream_cyc[3] + 2 * N + 4, $sformatf("drain wait: read at %0d, last row %0d", act_rd_cyc[0], stream_cyc[3]));
    check(act_rd_addr[0] == 12 && act_rd_addr[3] == 15, "accumulator read addresses");
    check(act_fn == FN_RELU && pool_log2 == 2'd1, "activation configuration");

    // 5. Sync, Interrupt, Halt
    issue(mk(OP_READ_HOST_MEMORY, 0, 0, 0, 1), t1);
    issue(mk(OP_SYNC, 0, 0, 0, 0), t2);
    check(t2 - t1 >= 25, "Sync waited for the DMA");
    issue(mk(OP_INTERRUPT_HOST, 0, 0, 0, 0), t3);
    @(negedge clk);
    check(irq, "interrupt pulse");
    issue(mk(OP_HALT, 0, 0, 0, 0), t4);
    @(negedge clk);
    check(halted, "halted");
    ib_valid = 1; ib_instr = mk(OP_NOP, 0, 0, 0, 0);
    repeat (3) @(negedge clk) check(!ib_ready, "no issue after Halt");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
