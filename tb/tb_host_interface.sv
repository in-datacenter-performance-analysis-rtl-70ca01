// tb_host_interface: the DMA engine (N = 4) between the host memory model
// (latency 4, not ready every 3rd cycle) and a Unified Buffer model kept
// here (one-cycle read). Copies 6 host rows into the buffer, checks them,
// copies 5 buffer rows back to another host region, checks those, and
// checks that input stalls were reported and cmd_ready was low while busy.
module tb_host_interface;
  localparam int N = 4, UB_AW = 5;

  logic             clk = 0, rst_n = 0;
  logic             cmd_valid, cmd_ready, cmd_to_host;
  logic [UB_AW-1:0] cmd_ub_addr;
  logic [31:0]      cmd_host_addr, cmd_len;
  logic             hreq_valid, hreq_ready, hreq_write, hrsp_valid;
  logic [31:0]      hreq_addr;
  logic [7:0]       hreq_wdata [N], hrsp_data [N];
  logic             ub_rd_en, ub_wr_en, input_stall;
  logic [UB_AW-1:0] ub_rd_addr, ub_wr_addr;
  logic [7:0]       ub_rd_data [N], ub_wr_data [N];

  host_interface #(.N(N), .UB_AW(UB_AW)) dut (.*);
  host_memory_model #(.N(N), .ROWS(64), .LATENCY(4), .STALL_EVERY(3)) u_host (
    .clk, .rst_n, .req_valid(hreq_valid), .req_ready(hreq_ready), .req_write(hreq_write),
    .req_addr(hreq_addr), .req_wdata(hreq_wdata), .rsp_valid(hrsp_valid), .rsp_data(hrsp_data));

  // Unified Buffer model
  logic [7:0] ub [32][N];
  always_ff @(posedge clk) begin
    if (ub_wr_en) ub[ub_wr_addr] <= ub_wr_data;
    if (ub_rd_en) ub_rd_data <= ub[ub_rd_addr];
  end

  always #5 clk = ~clk;

  int checks = 0, failures = 0, stalls = 0, busy_cycles = 0;
  logic [7:0] host_init [64][N];

  always @(posedge clk) if (rst_n) begin
    if (input_stall) stalls++;
    if (!cmd_ready) busy_cycles++;
  end

  task automatic run(input logic to_host, input int ub_a, input int host_a, input int len);
    @(negedge clk);
    cmd_valid = 1; cmd_to_host = to_host; cmd_ub_addr = UB_AW'(ub_a);
    cmd_host_addr = 32'(host_a); cmd_len = 32'(len);
    @(negedge clk);
    cmd_valid = 0;
    checks++;
    if (cmd_ready) begin failures++; $display("FAIL not busy after command"); end
    while (!cmd_ready) @(negedge clk);
  endtask

  initial begin
    cmd_valid = 0; cmd_to_host = 0; cmd_ub_addr = 0; cmd_host_addr = 0; cmd_len = 0;
    for (int r = 0; r < 64; r++)
      for (int i = 0; i < N; i++) begin
        host_init[r][i] = 8'($urandom);
        u_host.mem[r][i] = host_init[r][i];
      end
    for (int r = 0; r < 32; r++) for (int i = 0; i < N; i++) ub[r][i] = 8'hEE;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    run(0, 3, 10, 6);                   // Read_Host_Memory
    for (int k = 0; k < 6; k++) begin
      checks++;
      if (ub[3 + k] !== host_init[10 + k]) begin failures++; $display("FAIL ub row %0d", 3 + k); end
    end
    checks++;
    if (ub[2] !== '{default: 8'hEE} || ub[9] !== '{default: 8'hEE}) begin
      failures++; $display("FAIL rows outside the copy changed");
    end
    run(1, 4, 40, 5);                   // Write_Host_Memory
    repeat (2) @(negedge clk);
    for (int k = 0; k < 5; k++) begin
      checks++;
      if (u_host.mem[40 + k] !== host_init[11 + k]) begin failures++; $display("FAIL host row %0d", 40 + k); end
    end
    checks++;
    if (u_host.mem[45] !== host_init[45] || u_host.mem[39] !== host_init[39]) begin
      failures++; $display("FAIL host rows outside the copy changed");
    end
    checks++;
    if (stalls == 0 || busy_cycles < 11) begin failures++; $display("FAIL stalls %0d busy %0d", stalls, busy_cycles); end
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
