// weight_fifo: the Weight FIFO and its weight fetcher.
//
// Read_Weights requests (first tile number, tile count) queue here and the
// instruction completes as soon as its request is queued: the fetch itself
// runs decoupled, as the paper describes. The fetcher reads each tile from
// Weight Memory one N-byte row per request and stores the rows in a FIFO
// TILES tiles deep (default 4 x 64 KiB, the paper's depth). It requests a row
// only when the FIFO has room for it counting the requests still in flight,
// so the memory port never has to be stalled on the response side.
// Within a tile rows are fetched last row first (row N-1 at address
// tile*N + N-1 first), because the matrix unit's columns are shift registers
// filled from the top: the first row shifted in ends at the bottom.
// Weight Memory is read at row granularity: address = tile*N + row.
//
// Interface: req_* valid/ready; mem_req_* valid/ready; mem_rsp_valid with
// data, responses in request order, any latency; pop takes row_out, which is
// valid whenever !empty. The request queue depth (REQ_DEPTH) is this
// design's choice; the paper does not give one.
module weight_fifo
  import tpu_pkg::*;
#(
  parameter int unsigned N         = ARRAY_N,
  parameter int unsigned TILES     = WFIFO_TILES,
  parameter int unsigned MEM_AW    = WMEM_ROW_AW,
  parameter int unsigned REQ_DEPTH = 4
) (
  input  logic              clk,
  input  logic              rst_n,
  // Read_Weights requests
  input  logic              req_valid,
  output logic              req_ready,
  input  logic [23:0]       req_tile,
  input  logic [31:0]       req_ntiles,
  // Weight Memory port
  output logic              mem_req_valid,
  input  logic              mem_req_ready,
  output logic [MEM_AW-1:0] mem_req_addr,
  input  logic              mem_rsp_valid,
  input  logic [7:0]        mem_rsp_data [N],
  // to the matrix unit
  input  logic              pop,
  output logic              empty,
  output logic [7:0]        row_out [N],
  output logic              idle
);

  localparam int unsigned DEPTH = TILES * N;
  localparam int unsigned PW    = $clog2(DEPTH);
  localparam int unsigned CW    = $clog2(DEPTH + 1);
  localparam int unsigned QW    = $clog2(REQ_DEPTH);
  localparam int unsigned RW    = $clog2(N);

  // ---- request queue ----
  logic [23:0] q_tile   [REQ_DEPTH];
  logic [31:0] q_ntiles [REQ_DEPTH];
  logic [QW-1:0] q_wr, q_rd;
  logic [QW:0]   q_cnt;
  logic          q_pop;

  assign req_ready = (q_cnt < (QW+1)'(REQ_DEPTH));

  // ---- fetch state ----
  logic          active;
  logic [23:0]   cur_tile;
  logic [31:0]   tiles_left;     // including the current one
  logic [RW-1:0] cur_row;        // rows fetched of the current tile
  logic [CW-1:0] count;          // rows held
  logic [CW-1:0] inflight;       // rows requested, not yet returned
  logic          issue;

  assign mem_req_valid = active && ((count + inflight) < CW'(DEPTH));
  assign mem_req_addr  = MEM_AW'({cur_tile, RW'(N - 1) - cur_row});
  assign issue         = mem_req_valid && mem_req_ready;
  assign q_pop         = !active && q_cnt != 0;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      q_wr <= '0; q_rd <= '0; q_cnt <= '0;
      active <= 1'b0; cur_tile <= '0; tiles_left <= '0; cur_row <= '0;
    end else begin
      if (req_valid && req_ready && req_ntiles != 0) begin
        q_tile[q_wr]   <= req_tile;
        q_ntiles[q_wr] <= req_ntiles;
        q_wr <= q_wr + 1'b1;
      end
      if (q_pop) begin
        active     <= 1'b1;
        cur_tile   <= q_tile[q_rd];
        tiles_left <= q_ntiles[q_rd];
        cur_row    <= '0;
        q_rd       <= q_rd + 1'b1;
      end
      q_cnt <= q_cnt + (QW+1)'(req_valid && req_ready && req_ntiles != 0) - (QW+1)'(q_pop);
      if (issue) begin
        if (cur_row == RW'(N - 1)) begin
          cur_row  <= '0;
          cur_tile <= cur_tile + 1'b1;
          tiles_left <= tiles_left - 1'b1;
          if (tiles_left == 32'd1) active <= 1'b0;
        end else begin
          cur_row <= cur_row + 1'b1;
        end
      end
    end
  end

  // ---- row storage ----
  logic [N*8-1:0] mem [DEPTH];
  logic [PW-1:0]  wr_ptr, rd_ptr;
  logic           do_pop;

  assign empty  = (count == 0);
  assign do_pop = pop && !empty;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_ptr <= '0; rd_ptr <= '0; count <= '0; inflight <= '0;
    end else begin
      if (mem_rsp_valid) wr_ptr <= (wr_ptr == PW'(DEPTH - 1)) ? '0 : wr_ptr + 1'b1;
      if (do_pop)        rd_ptr <= (rd_ptr == PW'(DEPTH - 1)) ? '0 : rd_ptr + 1'b1;
      count    <= count + CW'(mem_rsp_valid) - CW'(do_pop);
      inflight <= inflight + CW'(issue) - CW'(mem_rsp_valid);
    end
  end

  always_ff @(posedge clk) begin
    if (mem_rsp_valid)
      for (int i = 0; i < N; i++) mem[wr_ptr][i*8 +: 8] <= mem_rsp_data[i];
  end

  always_comb begin
    for (int i = 0; i < N; i++) row_out[i] = mem[rd_ptr][i*8 +: 8];
  end

  assign idle = !active && q_cnt == 0 && inflight == 0;

  // A response may only arrive for a row that was requested.
  a_rsp_requested: assert property (@(posedge clk) disable iff (!rst_n)
                                    mem_rsp_valid |-> inflight != 0);

endmodule
