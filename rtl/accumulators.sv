// accumulators: N accumulator RAMs of ROWS x 32 bit, one per array column.
//
// The matrix unit's column j delivers its partial sum one cycle after column
// j-1, so the write control (address, accumulate-or-overwrite, shift) enters
// at column 0 and moves one column to the right per cycle, meeting each
// column's sum; after the last column it leaves as the "done" signal, as in
// the paper's systolic figure. Software therefore sees one 256-element row
// updated at once. Each column adds the incoming sum, shifted left by 0, 8 or
// 16 bits (used to build 16-bit operands from 8-bit passes), to the stored
// value, or overwrites it.
// A read port returns one whole row (all N columns at one address) one cycle
// after rd_en; Activate uses it. The paper gives the sizes (4096 x 256 x
// 32 b = 4 MiB) and the adder-per-RAM structure; the single-cycle
// read-modify-write, the separate read port and the shift field are this
// design's choices. Addresses wrap modulo ROWS.
module accumulators
  import tpu_pkg::*;
#(
  parameter int unsigned N    = ARRAY_N,
  parameter int unsigned ROWS = ACC_ROWS,
  localparam int unsigned AW  = $clog2(ROWS)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [ACC_W-1:0] psum_in [N],
  input  acc_ctrl_t        ctrl_in,
  input  logic             rd_en,
  input  logic [AW-1:0]    rd_addr,
  output logic [ACC_W-1:0] rd_data [N],
  output logic             done_valid,
  output logic [15:0]      done_addr
);

  acc_ctrl_t ctrl_q [N];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int j = 0; j < N; j++) ctrl_q[j] <= '0;
    end else begin
      ctrl_q[0] <= ctrl_in;
      for (int j = 1; j < N; j++) ctrl_q[j] <= ctrl_q[j-1];
    end
  end

  for (genvar j = 0; j < N; j++) begin : g_col
    logic [ACC_W-1:0] mem [ROWS];
    acc_ctrl_t        c;
    logic [AW-1:0]    wa;
    assign c  = (j == 0) ? ctrl_in : ctrl_q[j-1];
    assign wa = c.addr[AW-1:0];

    always_ff @(posedge clk) begin
      if (c.valid)
        mem[wa] <= (c.accumulate ? mem[wa] : '0) + (psum_in[j] << (8 * c.shift));
      if (rd_en)
        rd_data[j] <= mem[rd_addr];
    end
  end

  assign done_valid = ctrl_q[N-1].valid;
  assign done_addr  = ctrl_q[N-1].addr;

endmodule
