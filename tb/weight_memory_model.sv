// weight_memory_model: behavioural model of the off-chip Weight Memory (DRAM
// behind the DDR3 interfaces), for simulation only.
//
// Every row address returns N bytes given by a fixed formula, so no file is
// needed: byte i of row a is (a*37 + i*11 + (a>>3)*5 + SEED) mod 256.
// Requests are accepted when ready (ready is low on every STALL_EVERY-th
// cycle, if nonzero) and answered in order LATENCY cycles later.
module weight_memory_model #(
  parameter int unsigned N           = 8,
  parameter int unsigned AW          = 25,
  parameter int unsigned LATENCY     = 6,
  parameter int unsigned STALL_EVERY = 0,
  parameter int unsigned SEED        = 3
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          req_valid,
  output logic          req_ready,
  input  logic [AW-1:0] req_addr,
  output logic          rsp_valid,
  output logic [7:0]    rsp_data [N]
);

  function automatic logic [7:0] wbyte(input longint unsigned a, input int unsigned i);
    return 8'((a * 37 + i * 11 + (a >> 3) * 5 + SEED) % 256);
  endfunction

  logic          v_pipe [LATENCY];
  logic [AW-1:0] a_pipe [LATENCY];
  int unsigned   cyc;

  assign req_ready = (STALL_EVERY == 0) || (cyc % STALL_EVERY != 0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cyc <= 0;
      for (int k = 0; k < LATENCY; k++) v_pipe[k] <= 1'b0;
    end else begin
      cyc <= cyc + 1;
      v_pipe[0] <= req_valid && req_ready;
      a_pipe[0] <= req_addr;
      for (int k = 1; k < LATENCY; k++) begin
        v_pipe[k] <= v_pipe[k-1];
        a_pipe[k] <= a_pipe[k-1];
      end
    end
  end

  assign rsp_valid = v_pipe[LATENCY-1];
  always_comb
    for (int i = 0; i < N; i++) rsp_data[i] = wbyte(longint'(a_pipe[LATENCY-1]), i);

endmodule
