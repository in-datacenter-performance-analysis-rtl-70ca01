// tpu_top: the TPU die.
//
// Wires the blocks of the paper's block diagram together. The host sends
// 12-byte instructions into the instruction buffer; the controller runs them
// on its stations. Data path for one layer:
//   host memory --DMA--> Unified Buffer --> systolic data setup -->
//   matrix multiply unit (weights from the Weight FIFO) --> accumulators -->
//   activation --> normalize/pool --> Unified Buffer --DMA--> host memory
// All internal paths are N bytes (256 by default) wide, as in the paper.
// The PCIe endpoint and the DDR3 controllers/PHYs are not part of this RTL:
// their places are taken by three plain ports, an instruction port
// (valid/ready), a host-memory bus (request valid/ready, in-order read
// responses; addresses count N-byte rows) and a Weight Memory read port
// (request valid/ready, in-order responses of one N-byte row; addresses count
// rows). Performance counters are read through perf_sel/perf_value.
//
// Signals left unread on purpose: the weight fetcher's idle flag (Read_Weights
// retires once its request is queued, so nothing waits for the fetch itself),
// the accumulator done-address (only the done pulse is brought out), and the
// top bits of the pooling destination address beyond the Unified Buffer's
// row count. Lint also reports rst_n as used both asynchronously (the
// registers) and synchronously; the synchronous use is only the disable
// condition of the handshake assertions, not logic.
module tpu_top
  import tpu_pkg::*;
#(
  parameter int unsigned N        = ARRAY_N,
  parameter int unsigned UB_DEPTH = UB_ROWS,
  parameter int unsigned ACC_DEPTH = ACC_ROWS,
  parameter int unsigned WF_TILES = WFIFO_TILES,
  parameter int unsigned IB_DEPTH = 32,
  localparam int unsigned UB_AW   = $clog2(UB_DEPTH),
  localparam int unsigned ACC_AW  = $clog2(ACC_DEPTH)
) (
  input  logic                   clk,
  input  logic                   rst_n,
  // instructions from the host
  input  logic                   instr_valid,
  output logic                   instr_ready,
  input  instr_t                 instr,
  // host memory (DMA)
  output logic                   hreq_valid,
  input  logic                   hreq_ready,
  output logic                   hreq_write,
  output logic [31:0]            hreq_addr,
  output logic [7:0]             hreq_wdata [N],
  input  logic                   hrsp_valid,
  input  logic [7:0]             hrsp_data [N],
  // Weight Memory
  output logic                   wm_req_valid,
  input  logic                   wm_req_ready,
  output logic [WMEM_ROW_AW-1:0] wm_req_addr,
  input  logic                   wm_rsp_valid,
  input  logic [7:0]             wm_rsp_data [N],
  // status
  output logic                   halted,
  output logic                   irq,
  output logic                   acc_done,
  input  logic                   perf_clear,
  input  logic [2:0]             perf_sel,
  output logic [63:0]            perf_value
);

  // instruction buffer -> controller
  logic   ib_valid, ib_ready;
  instr_t ib_instr;

  instruction_buffer #(.DEPTH(IB_DEPTH)) u_ibuf (
    .clk, .rst_n,
    .in_valid(instr_valid), .in_ready(instr_ready), .in_instr(instr),
    .out_valid(ib_valid), .out_ready(ib_ready), .out_instr(ib_instr)
  );

  // controller signals
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
  perf_ev_t          perf_ev;

  controller #(.N(N), .UB_AW(UB_AW), .ACC_AW(ACC_AW)) u_ctrl (
    .clk, .rst_n,
    .ib_valid, .ib_ready, .ib_instr,
    .dma_cmd_valid, .dma_cmd_ready, .dma_to_host, .dma_ub_addr, .dma_host_addr, .dma_len,
    .dma_input_stall,
    .wreq_valid, .wreq_ready, .wreq_tile, .wreq_ntiles,
    .mm_ub_rd_en, .mm_ub_rd_addr, .su_tag, .su_ctrl,
    .wf_empty, .wf_pop, .w_shift, .w_bank,
    .acc_rd_en, .acc_rd_addr, .act_valid, .act_first, .act_last, .act_addr,
    .act_fn, .act_shift, .pool_avg, .pool_log2, .pool_unsigned,
    .halted, .irq, .perf_ev
  );

  // host interface (DMA)
  logic             ubb_rd_en, ubb_wr_en;
  logic [UB_AW-1:0] ubb_rd_addr, ubb_wr_addr;
  logic [7:0]       ubb_rd_data [N];
  logic [7:0]       ubb_wr_data [N];

  host_interface #(.N(N), .UB_AW(UB_AW)) u_host (
    .clk, .rst_n,
    .cmd_valid(dma_cmd_valid), .cmd_ready(dma_cmd_ready), .cmd_to_host(dma_to_host),
    .cmd_ub_addr(dma_ub_addr), .cmd_host_addr(dma_host_addr), .cmd_len(dma_len),
    .hreq_valid, .hreq_ready, .hreq_write, .hreq_addr, .hreq_wdata,
    .hrsp_valid, .hrsp_data,
    .ub_rd_en(ubb_rd_en), .ub_rd_addr(ubb_rd_addr), .ub_rd_data(ubb_rd_data),
    .ub_wr_en(ubb_wr_en), .ub_wr_addr(ubb_wr_addr), .ub_wr_data(ubb_wr_data),
    .input_stall(dma_input_stall)
  );

  // Unified Buffer
  logic [7:0]  uba_rd_data [N];
  logic        pool_valid;
  logic [7:0]  pool_data [N];
  logic [23:0] pool_addr;

  unified_buffer #(.N(N), .ROWS(UB_DEPTH)) u_ub (
    .clk,
    .rda_en(mm_ub_rd_en), .rda_addr(mm_ub_rd_addr), .rda_data(uba_rd_data),
    .rdb_en(ubb_rd_en),   .rdb_addr(ubb_rd_addr),   .rdb_data(ubb_rd_data),
    .wra_en(pool_valid),  .wra_addr(pool_addr[UB_AW-1:0]), .wra_data(pool_data),
    .wrb_en(ubb_wr_en),   .wrb_addr(ubb_wr_addr),   .wrb_data(ubb_wr_data)
  );

  // systolic data setup
  logic [7:0] a_skew [N];
  row_tag_t   a_tag  [N];
  acc_ctrl_t  acc_ctrl;

  systolic_data_setup #(.N(N)) u_setup (
    .clk, .rst_n,
    .in_data(uba_rd_data), .in_tag(su_tag), .in_ctrl(su_ctrl),
    .a_out(a_skew), .a_tag(a_tag), .ctrl_out(acc_ctrl)
  );

  // Weight FIFO
  logic [7:0] w_row [N];
  logic       wf_idle;

  weight_fifo #(.N(N), .TILES(WF_TILES), .MEM_AW(WMEM_ROW_AW)) u_wfifo (
    .clk, .rst_n,
    .req_valid(wreq_valid), .req_ready(wreq_ready), .req_tile(wreq_tile), .req_ntiles(wreq_ntiles),
    .mem_req_valid(wm_req_valid), .mem_req_ready(wm_req_ready), .mem_req_addr(wm_req_addr),
    .mem_rsp_valid(wm_rsp_valid), .mem_rsp_data(wm_rsp_data),
    .pop(wf_pop), .empty(wf_empty), .row_out(w_row), .idle(wf_idle)
  );

  // matrix multiply unit
  logic [ACC_W-1:0] psum [N];

  matrix_multiply_unit #(.N(N)) u_mxu (
    .clk, .rst_n,
    .a_in(a_skew), .a_tag(a_tag),
    .w_in(w_row), .w_shift(w_shift), .w_bank(w_bank),
    .psum_out(psum)
  );

  // accumulators
  logic [ACC_W-1:0] acc_rd_data [N];
  logic [15:0]      acc_done_addr;

  accumulators #(.N(N), .ROWS(ACC_DEPTH)) u_acc (
    .clk, .rst_n,
    .psum_in(psum), .ctrl_in(acc_ctrl),
    .rd_en(acc_rd_en), .rd_addr(acc_rd_addr), .rd_data(acc_rd_data),
    .done_valid(acc_done), .done_addr(acc_done_addr)
  );

  // activation pipeline
  logic        av_valid, av_first, av_last;
  logic [7:0]  av_data [N];
  logic [23:0] av_addr;

  activation_unit #(.N(N)) u_act (
    .clk, .rst_n,
    .in_valid(act_valid), .in_data(acc_rd_data), .in_first(act_first), .in_last(act_last),
    .in_addr(act_addr), .fn(act_fn), .shift(act_shift),
    .out_valid(av_valid), .out_data(av_data), .out_first(av_first), .out_last(av_last),
    .out_addr(av_addr)
  );

  normalize_pool #(.N(N)) u_pool (
    .clk, .rst_n,
    .in_valid(av_valid), .in_data(av_data), .in_first(av_first), .in_last(av_last),
    .in_addr(av_addr), .avg(pool_avg), .log2_size(pool_log2), .is_unsigned(pool_unsigned),
    .out_valid(pool_valid), .out_data(pool_data), .out_addr(pool_addr)
  );

  // performance counters
  perf_counters u_perf (
    .clk, .rst_n, .clear(perf_clear), .ev(perf_ev), .sel(perf_sel), .value(perf_value)
  );

endmodule
