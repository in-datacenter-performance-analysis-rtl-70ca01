// host_memory_model: behavioural model of host memory as seen over PCIe, for
// simulation only. ROWS rows of N bytes; a read request is answered LATENCY
// cycles after acceptance, one request in flight at a time (which is all the
// DMA engine issues); writes are taken on acceptance. The request port is not
// ready on every STALL_EVERY-th cycle, if nonzero. The testbench fills and
// inspects the array `mem` directly.
module host_memory_model #(
  parameter int unsigned N           = 8,
  parameter int unsigned ROWS        = 64,
  parameter int unsigned LATENCY     = 4,
  parameter int unsigned STALL_EVERY = 0
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        req_valid,
  output logic        req_ready,
  input  logic        req_write,
  input  logic [31:0] req_addr,
  input  logic [7:0]  req_wdata [N],
  output logic        rsp_valid,
  output logic [7:0]  rsp_data [N]
);

  logic [7:0]  mem [ROWS][N];
  int unsigned cyc, wait_cnt;
  logic        pending;
  logic [31:0] p_addr;

  assign req_ready = !pending && ((STALL_EVERY == 0) || (cyc % STALL_EVERY != 0));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cyc <= 0; pending <= 1'b0; wait_cnt <= 0; rsp_valid <= 1'b0; p_addr <= '0;
    end else begin
      cyc <= cyc + 1;
      rsp_valid <= 1'b0;
      if (req_valid && req_ready) begin
        if (req_write) begin
          mem[req_addr % ROWS] <= req_wdata;
        end else begin
          pending  <= 1'b1;
          p_addr   <= req_addr;
          wait_cnt <= LATENCY;
        end
      end
      if (pending) begin
        if (wait_cnt <= 1) begin
          pending   <= 1'b0;
          rsp_valid <= 1'b1;
          rsp_data  <= mem[p_addr % ROWS];
        end else begin
          wait_cnt <= wait_cnt - 1;
        end
      end
    end
  end

endmodule
