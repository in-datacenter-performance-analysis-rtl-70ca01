// controller: decodes the CISC instructions and runs them on four stations.
//
// Instructions leave the instruction buffer in order. Each of the key
// instructions executes in its own station, and a station can hold one
// instruction for thousands of cycles while the next instruction starts in
// another, which is how the paper's 4-stage CISC pipeline overlaps
// Read_Weights, Read/Write_Host_Memory and Activate with MatrixMultiply:
//   DMA station      Read_Host_Memory, Write_Host_Memory (host_interface)
//   weight station   Read_Weights: completes once the request is queued in
//                    the weight fetcher (decoupled access/execute)
//   matrix station   MatrixMultiply: streams B Unified Buffer rows into the
//                    systolic data setup, one per cycle, tagging each with
//                    its weight bank and accumulator address
//   activate station Activate: reads accumulator rows one per cycle into the
//                    activation and pooling pipeline, which writes the UB
// The head instruction issues when its station is free and it has no
// read-after-write hazard: MatrixMultiply and Write_Host_Memory wait while an
// Activate or Read_Host_Memory still writes an overlapping Unified Buffer
// range, and Activate waits while a MatrixMultiply (including the cycles its
// sums need to drain through the array) writes an overlapping accumulator
// range. Sync waits until all stations are idle; Halt stops issue for good;
// Interrupt_Host pulses irq; Nop does nothing.
//
// Weight double buffering: each array cell has two weight registers (banks).
// The bank not in use is the shadow bank. Whenever it is empty and no data
// still in the array use it, the controller shifts the next tile from the
// Weight FIFO into it, one row per cycle (N cycles per tile), pausing while
// the FIFO is empty. A MatrixMultiply with the switch flag waits until the
// shadow bank is full (counted as weight stall while rows are missing, as
// weight shift while they are being shifted), then tags its rows with that
// bank, which makes it the active one; the tile takes effect with the
// wavefront of its first row. The first MatrixMultiply after reset must set
// the switch flag.
//
// Timing: one instruction issues per cycle at most. Stream rows leave the
// UB read port one per cycle; their tags are registered so they meet the
// UB's one-cycle read data. Accumulator reads likewise. All of this
// sequencing is this design's own: the paper gives the instruction set, the
// overlap, the stalls (weights not ready, RAW) and synchronisation, not the
// control logic.
// The DMA command and the weight-fetch request are offered straight from the
// head instruction's fields (valid only while that instruction can issue), so
// their address and length outputs are wires from the instruction input.
module controller
  import tpu_pkg::*;
#(
  parameter int unsigned N      = ARRAY_N,
  parameter int unsigned UB_AW  = $clog2(UB_ROWS),
  parameter int unsigned ACC_AW = $clog2(ACC_ROWS)
) (
  input  logic              clk,
  input  logic              rst_n,
  // instruction buffer head
  input  logic              ib_valid,
  output logic              ib_ready,
  input  instr_t            ib_instr,
  // DMA station
  output logic              dma_cmd_valid,
  input  logic              dma_cmd_ready,
  output logic              dma_to_host,
  output logic [UB_AW-1:0]  dma_ub_addr,
  output logic [31:0]       dma_host_addr,
  output logic [31:0]       dma_len,
  input  logic              dma_input_stall,
  // weight fetcher
  output logic              wreq_valid,
  input  logic              wreq_ready,
  output logic [23:0]       wreq_tile,
  output logic [31:0]       wreq_ntiles,
  // matrix station: UB read and data setup inputs
  output logic              mm_ub_rd_en,
  output logic [UB_AW-1:0]  mm_ub_rd_addr,
  output row_tag_t          su_tag,
  output acc_ctrl_t         su_ctrl,
  // weight shifting
  input  logic              wf_empty,
  output logic              wf_pop,
  output logic              w_shift,
  output logic              w_bank,
  // activate station
  output logic              acc_rd_en,
  output logic [ACC_AW-1:0] acc_rd_addr,
  output logic              act_valid,
  output logic              act_first,
  output logic              act_last,
  output logic [23:0]       act_addr,
  output act_fn_e           act_fn,
  output logic [4:0]        act_shift,
  output logic              pool_avg,
  output logic [1:0]        pool_log2,
  output logic              pool_unsigned,
  // status
  output logic              halted,
  output logic              irq,
  output perf_ev_t          perf_ev
);

  localparam int unsigned DRAIN = 2 * N + 4;   // cycles for a row's sums to reach the accumulators
  localparam int unsigned DW    = $clog2(DRAIN + 1);
  localparam int unsigned RW    = $clog2(N);

  function automatic logic overlap(input logic [39:0] a_lo, input logic [39:0] a_hi,
                                   input logic [39:0] b_lo, input logic [39:0] b_hi);
    return (a_lo < b_hi) && (b_lo < a_hi);
  endfunction

  // ---------------- station state ----------------
  logic              halted_q;
  // matrix
  logic              mm_active, mm_need_switch;
  logic [UB_AW-1:0]  mm_ub;
  logic [15:0]       mm_acc;
  logic [31:0]       mm_left;
  logic              mm_accum, mm_dsg, mm_wsg;
  logic [1:0]        mm_sh;
  logic [DW-1:0]     mm_drain;
  logic [39:0]       mm_acc_lo, mm_acc_hi;
  // weight banks
  logic              active_bank, shadow_loaded;
  logic [DW-1:0]     bank_drain [2];
  logic [RW-1:0]     shift_cnt;
  // activate
  logic              act_active;
  logic [31:0]       act_k, act_total;
  logic [15:0]       act_acc_base;
  logic [23:0]       act_ub_base;
  logic [2:0]        act_drain;
  logic [39:0]       act_ub_lo, act_ub_hi;
  // DMA range (only Read_Host_Memory writes the UB)
  logic              dma_wr_ub;
  logic [39:0]       dma_ub_lo, dma_ub_hi;

  logic mm_busy, act_busy, dma_busy;
  assign mm_busy  = mm_active || mm_drain != 0;
  assign act_busy = act_active || act_drain != 0;
  assign dma_busy = !dma_cmd_ready;

  // ---------------- decode and issue ----------------
  instr_t      h;
  logic [39:0] h_ub_lo, h_ub_hi, h_acc_lo, h_acc_hi, h_act_rows;
  logic        raw, can_issue, issue;

  assign h          = ib_instr;
  assign h_act_rows = 40'(h.length) << h.flags[AF_POOL_LO +: 2];
  assign h_ub_lo    = 40'(h.ub_addr);
  assign h_ub_hi    = 40'(h.ub_addr) + 40'(h.length);
  assign h_acc_lo   = 40'(h.acc_addr);
  assign h_acc_hi   = 40'(h.acc_addr) + ((h.opcode == OP_ACTIVATE) ? h_act_rows : 40'(h.length));

  always_comb begin
    raw = 1'b0;
    unique case (h.opcode)
      OP_MATRIX_MULTIPLY, OP_WRITE_HOST_MEMORY:
        raw = (act_busy && overlap(h_ub_lo, h_ub_hi, act_ub_lo, act_ub_hi)) ||
              (dma_busy && dma_wr_ub && overlap(h_ub_lo, h_ub_hi, dma_ub_lo, dma_ub_hi));
      OP_ACTIVATE:
        raw = mm_busy && overlap(h_acc_lo, h_acc_hi, mm_acc_lo, mm_acc_hi);
      default: raw = 1'b0;
    endcase
  end

  always_comb begin
    unique case (h.opcode)
      OP_SYNC:              can_issue = !mm_busy && !act_busy && !dma_busy;
      OP_READ_WEIGHTS:      can_issue = wreq_ready;
      OP_MATRIX_MULTIPLY:   can_issue = !mm_active && !raw;
      OP_ACTIVATE:          can_issue = !act_busy && !raw;
      OP_READ_HOST_MEMORY:  can_issue = dma_cmd_ready;
      OP_WRITE_HOST_MEMORY: can_issue = dma_cmd_ready && !raw;
      default:              can_issue = 1'b1;   // NOP, INTERRUPT_HOST, HALT, unknown
    endcase
  end

  assign issue    = ib_valid && !halted_q && can_issue;
  assign ib_ready = issue;

  assign dma_cmd_valid = ib_valid && !halted_q && !raw &&
                         (h.opcode == OP_READ_HOST_MEMORY || h.opcode == OP_WRITE_HOST_MEMORY);
  assign dma_to_host   = (h.opcode == OP_WRITE_HOST_MEMORY);
  assign dma_ub_addr   = h.ub_addr[UB_AW-1:0];
  assign dma_host_addr = {h.flags, h.acc_addr};
  assign dma_len       = h.length;

  assign wreq_valid  = ib_valid && !halted_q && h.opcode == OP_READ_WEIGHTS;
  assign wreq_tile   = h.ub_addr;
  assign wreq_ntiles = h.length;

  // ---------------- matrix station ----------------
  logic     stream, cur_bank, shifting;
  row_tag_t tag_n;
  acc_ctrl_t ctrl_n;

  assign cur_bank = mm_need_switch ? !active_bank : active_bank;
  assign stream   = mm_active && (!mm_need_switch || shadow_loaded);
  assign shifting = !shadow_loaded && bank_drain[!active_bank] == 0 && !wf_empty;

  assign mm_ub_rd_en   = stream;
  assign mm_ub_rd_addr = mm_ub;
  assign tag_n  = '{valid: stream, bank: cur_bank, dsigned: mm_dsg, wsigned: mm_wsg};
  assign ctrl_n = '{valid: stream, addr: mm_acc, accumulate: mm_accum, shift: mm_sh};

  assign wf_pop  = shifting;
  assign w_shift = shifting;
  assign w_bank  = !active_bank;

  // ---------------- activate station ----------------
  logic [31:0] pmask;
  assign pmask       = (32'd1 << pool_log2) - 32'd1;
  assign acc_rd_en   = act_active;
  assign acc_rd_addr = ACC_AW'(act_acc_base + act_k[15:0]);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      halted_q       <= 1'b0;
      irq            <= 1'b0;
      mm_active      <= 1'b0;
      mm_need_switch <= 1'b0;
      mm_ub          <= '0;
      mm_acc         <= '0;
      mm_left        <= '0;
      {mm_accum, mm_dsg, mm_wsg, mm_sh} <= '0;
      mm_drain       <= '0;
      mm_acc_lo      <= '0;
      mm_acc_hi      <= '0;
      active_bank    <= 1'b0;
      shadow_loaded  <= 1'b0;
      bank_drain[0]  <= '0;
      bank_drain[1]  <= '0;
      shift_cnt      <= '0;
      act_active     <= 1'b0;
      act_k          <= '0;
      act_total      <= '0;
      act_acc_base   <= '0;
      act_ub_base    <= '0;
      act_drain      <= '0;
      act_ub_lo      <= '0;
      act_ub_hi      <= '0;
      act_fn         <= FN_NONE;
      act_shift      <= '0;
      pool_avg       <= 1'b0;
      pool_log2      <= '0;
      pool_unsigned  <= 1'b0;
      dma_wr_ub      <= 1'b0;
      dma_ub_lo      <= '0;
      dma_ub_hi      <= '0;
      su_tag         <= '0;
      su_ctrl        <= '0;
      act_valid      <= 1'b0;
      act_first      <= 1'b0;
      act_last       <= 1'b0;
      act_addr       <= '0;
    end else begin
      irq <= 1'b0;
      // ---- issue ----
      if (issue) begin
        unique case (h.opcode)
          OP_HALT:           halted_q <= 1'b1;
          OP_INTERRUPT_HOST: irq <= 1'b1;
          OP_MATRIX_MULTIPLY: if (h.length != 0) begin
            mm_active      <= 1'b1;
            mm_need_switch <= h.flags[MMF_SWITCH];
            mm_ub          <= h.ub_addr[UB_AW-1:0];
            mm_acc         <= h.acc_addr;
            mm_left        <= h.length;
            mm_accum       <= h.flags[MMF_ACCUMULATE];
            mm_dsg         <= h.flags[MMF_DSIGNED];
            mm_wsg         <= h.flags[MMF_WSIGNED];
            mm_sh          <= h.flags[MMF_SHIFT_LO +: 2];
            mm_acc_lo      <= (mm_busy && mm_acc_lo < h_acc_lo) ? mm_acc_lo : h_acc_lo;
            mm_acc_hi      <= (mm_busy && mm_acc_hi > h_acc_hi) ? mm_acc_hi : h_acc_hi;
          end
          OP_ACTIVATE: if (h.length != 0) begin
            act_active    <= 1'b1;
            act_k         <= '0;
            act_total     <= h_act_rows[31:0];
            act_acc_base  <= h.acc_addr;
            act_ub_base   <= h.ub_addr;
            act_ub_lo     <= h_ub_lo;
            act_ub_hi     <= h_ub_hi;
            act_fn        <= act_fn_e'(h.flags[2:0]);
            act_shift     <= h.flags[AF_SHIFT_LO +: 5];
            pool_avg      <= h.flags[AF_POOL_AVG];
            pool_log2     <= h.flags[AF_POOL_LO +: 2];
            pool_unsigned <= (h.flags[2:0] == FN_SIGMOID);
          end
          OP_READ_HOST_MEMORY, OP_WRITE_HOST_MEMORY: begin
            dma_wr_ub <= (h.opcode == OP_READ_HOST_MEMORY);
            dma_ub_lo <= h_ub_lo;
            dma_ub_hi <= h_ub_hi;
          end
          default: ;
        endcase
      end

      // ---- matrix station ----
      su_tag  <= tag_n;
      su_ctrl <= ctrl_n;
      if (stream) begin
        mm_ub    <= mm_ub + 1'b1;
        mm_acc   <= mm_acc + 1'b1;
        mm_left  <= mm_left - 1'b1;
        mm_drain <= DW'(DRAIN);
        if (mm_left == 32'd1) mm_active <= 1'b0;
        if (mm_need_switch) begin
          active_bank    <= !active_bank;
          shadow_loaded  <= 1'b0;
          mm_need_switch <= 1'b0;
        end
      end else if (mm_drain != 0) begin
        mm_drain <= mm_drain - 1'b1;
      end
      for (int b = 0; b < 2; b++) begin
        if (stream && cur_bank == b[0]) bank_drain[b] <= DW'(DRAIN);
        else if (bank_drain[b] != 0)    bank_drain[b] <= bank_drain[b] - 1'b1;
      end

      // ---- weight shifting into the shadow bank ----
      if (shifting) begin
        if (shift_cnt == RW'(N - 1)) begin
          shift_cnt     <= '0;
          shadow_loaded <= 1'b1;
        end else begin
          shift_cnt <= shift_cnt + 1'b1;
        end
      end

      // ---- activate station ----
      act_valid <= act_active;
      act_first <= (act_k & pmask) == 32'd0;
      act_last  <= (act_k & pmask) == pmask;
      act_addr  <= act_ub_base + 24'(act_k >> pool_log2);
      if (act_active) begin
        act_k <= act_k + 1'b1;
        if (act_k == act_total - 1'b1) begin
          act_active <= 1'b0;
          act_drain  <= 3'd4;
        end
      end else if (act_drain != 0) begin
        act_drain <= act_drain - 1'b1;
      end
    end
  end

  assign halted = halted_q;

  // ---------------- performance events ----------------
  always_comb begin
    perf_ev              = '0;
    perf_ev.array_active = stream;
    perf_ev.weight_stall = mm_active && mm_need_switch && !shadow_loaded && !shifting;
    perf_ev.weight_shift = mm_active && mm_need_switch && !shadow_loaded && shifting;
    perf_ev.raw_stall    = ib_valid && !halted_q && raw;
    perf_ev.input_stall  = dma_input_stall;
    perf_ev.instr_issued = issue;
  end

  // A weight row is only taken from a non-empty FIFO.
  a_pop_nonempty: assert property (@(posedge clk) disable iff (!rst_n) wf_pop |-> !wf_empty);

endmodule
