// perf_counters: hardware performance counters.
//
// One 64-bit counter per event of tpu_pkg::perf_ev_t plus a cycle counter
// and a count of cycles in which the matrix unit took no data (the
// "non-matrix" cycles are then cycles - active - weight stall - weight shift).
// These are the counters behind the paper's breakdown of where the cycles
// go: array active, weight stall, weight shift, RAW stalls and input stalls.
// The paper's chip has 106 counters; only these are built. Counters clear on
// reset or on clear, and are read through sel/value (combinational).
//   sel: 0 cycles, 1 array active, 2 weight stall, 3 weight shift,
//        4 RAW stall, 5 input stall, 6 instructions issued, 7 matrix idle
module perf_counters
  import tpu_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        clear,
  input  perf_ev_t    ev,
  input  logic [2:0]  sel,
  output logic [63:0] value
);

  logic [63:0] cnt [8];
  logic [7:0]  inc;

  assign inc = {!ev.array_active, ev.instr_issued, ev.input_stall, ev.raw_stall,
                ev.weight_shift, ev.weight_stall, ev.array_active, 1'b1};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < 8; k++) cnt[k] <= '0;
    end else if (clear) begin
      for (int k = 0; k < 8; k++) cnt[k] <= '0;
    end else begin
      for (int k = 0; k < 8; k++) cnt[k] <= cnt[k] + 64'(inc[k]);
    end
  end

  assign value = cnt[sel];

endmodule
