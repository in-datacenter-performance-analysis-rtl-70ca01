// instruction_buffer: FIFO for the CISC instructions the host sends.
//
// The host pushes 12-byte instructions (tpu_pkg::instr_t) over PCIe; the
// controller takes them in order from the head. Standard valid/ready on both
// sides; the head is visible combinationally whenever out_valid is high and
// is removed on out_valid && out_ready. The paper names the buffer; its depth
// (DEPTH, default 32 instructions) is this design's choice.
module instruction_buffer
  import tpu_pkg::*;
#(
  parameter int unsigned DEPTH = 32
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   in_valid,
  output logic   in_ready,
  input  instr_t in_instr,
  output logic   out_valid,
  input  logic   out_ready,
  output instr_t out_instr
);

  localparam int unsigned PW = $clog2(DEPTH);

  instr_t        mem [DEPTH];
  logic [PW-1:0] wr_ptr, rd_ptr;
  logic [PW:0]   count;
  logic          push, pop;

  assign in_ready  = count < (PW+1)'(DEPTH);
  assign out_valid = count != 0;
  assign out_instr = mem[rd_ptr];
  assign push      = in_valid && in_ready;
  assign pop       = out_valid && out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_ptr <= '0;
      rd_ptr <= '0;
      count  <= '0;
    end else begin
      if (push) wr_ptr <= (wr_ptr == PW'(DEPTH - 1)) ? '0 : wr_ptr + 1'b1;
      if (pop)  rd_ptr <= (rd_ptr == PW'(DEPTH - 1)) ? '0 : rd_ptr + 1'b1;
      count <= count + (PW+1)'(push) - (PW+1)'(pop);
    end
  end

  always_ff @(posedge clk) begin
    if (push) mem[wr_ptr] <= in_instr;
  end

  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
                                  count <= (PW+1)'(DEPTH));

endmodule
