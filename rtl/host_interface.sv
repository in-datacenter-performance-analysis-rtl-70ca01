// host_interface: the DMA engine between host memory and the Unified Buffer.
//
// Executes Read_Host_Memory (host rows -> Unified Buffer) and
// Write_Host_Memory (Unified Buffer -> host rows) one N-byte row at a time.
// The host side is a simple request/response bus standing in for the PCIe
// endpoint: a request (row address, write flag, write data) is held until
// accepted (hreq_ready); a read returns its row on hrsp_valid, in order.
// Read: request row, wait for the response, write it into the Unified Buffer.
// Write: read the Unified Buffer row (two cycles), send it, wait for
// acceptance. Cycles spent waiting on the host are reported as input_stall.
// cmd_ready is high when the engine is idle. Host addresses count N-byte rows.
// The paper says a programmable DMA controller moves data between host
// memory and the Unified Buffer; the bus, the one-row-at-a-time sequencing
// and the row addressing are this design's choices.
// Row data is not buffered here: a returned host row goes straight to the
// Unified Buffer write port, and a Unified Buffer row straight onto the host
// write data, so those outputs are wires from inputs.
module host_interface
  import tpu_pkg::*;
#(
  parameter int unsigned N     = ARRAY_N,
  parameter int unsigned UB_AW = $clog2(UB_ROWS)
) (
  input  logic             clk,
  input  logic             rst_n,
  // command from the controller
  input  logic             cmd_valid,
  output logic             cmd_ready,
  input  logic             cmd_to_host,   // 1: Write_Host_Memory, 0: Read_Host_Memory
  input  logic [UB_AW-1:0] cmd_ub_addr,
  input  logic [31:0]      cmd_host_addr,
  input  logic [31:0]      cmd_len,
  // host bus
  output logic             hreq_valid,
  input  logic             hreq_ready,
  output logic             hreq_write,
  output logic [31:0]      hreq_addr,
  output logic [7:0]       hreq_wdata [N],
  input  logic             hrsp_valid,
  input  logic [7:0]       hrsp_data [N],
  // Unified Buffer ports
  output logic             ub_rd_en,
  output logic [UB_AW-1:0] ub_rd_addr,
  input  logic [7:0]       ub_rd_data [N],
  output logic             ub_wr_en,
  output logic [UB_AW-1:0] ub_wr_addr,
  output logic [7:0]       ub_wr_data [N],
  output logic             input_stall
);

  typedef enum logic [2:0] {S_IDLE, S_RD_REQ, S_RD_WAIT, S_WR_UB, S_WR_LOAD, S_WR_REQ} state_e;

  state_e           state;
  logic [UB_AW-1:0] ub_addr;
  logic [31:0]      host_addr;
  logic [31:0]      left;
  logic [7:0]       wbuf [N];

  assign cmd_ready  = (state == S_IDLE);
  assign hreq_valid = (state == S_RD_REQ) || (state == S_WR_REQ);
  assign hreq_write = (state == S_WR_REQ);
  assign hreq_addr  = host_addr;
  assign hreq_wdata = wbuf;

  assign ub_rd_en   = (state == S_WR_UB);
  assign ub_rd_addr = ub_addr;
  assign ub_wr_en   = (state == S_RD_WAIT) && hrsp_valid;
  assign ub_wr_addr = ub_addr;
  assign ub_wr_data = hrsp_data;

  assign input_stall = (state == S_RD_WAIT && !hrsp_valid) ||
                       (hreq_valid && !hreq_ready);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      ub_addr    <= '0;
      host_addr  <= '0;
      left       <= '0;
    end else begin
      case (state)
        S_IDLE: if (cmd_valid && cmd_len != 0) begin
          ub_addr   <= cmd_ub_addr;
          host_addr <= cmd_host_addr;
          left      <= cmd_len;
          state     <= cmd_to_host ? S_WR_UB : S_RD_REQ;
        end
        S_RD_REQ:  if (hreq_ready) state <= S_RD_WAIT;
        S_RD_WAIT: if (hrsp_valid) begin
          ub_addr   <= ub_addr + 1'b1;
          host_addr <= host_addr + 1'b1;
          left      <= left - 1'b1;
          state     <= (left == 32'd1) ? S_IDLE : S_RD_REQ;
        end
        S_WR_UB:   state <= S_WR_LOAD;
        S_WR_LOAD: state <= S_WR_REQ;
        S_WR_REQ:  if (hreq_ready) begin
          ub_addr   <= ub_addr + 1'b1;
          host_addr <= host_addr + 1'b1;
          left      <= left - 1'b1;
          state     <= (left == 32'd1) ? S_IDLE : S_WR_UB;
        end
        default:   state <= S_IDLE;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (state == S_WR_LOAD) wbuf <= ub_rd_data;
  end

  a_rsp_expected: assert property (@(posedge clk) disable iff (!rst_n)
                                   hrsp_valid |-> state == S_RD_WAIT);

endmodule
