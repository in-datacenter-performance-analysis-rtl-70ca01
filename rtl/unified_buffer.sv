// unified_buffer: the software-managed on-chip activation memory.
//
// ROWS rows of N bytes (default 96K x 256 B = 24 MiB, as in the paper). It
// has two read ports and two write ports, each N bytes wide: read port A
// feeds the matrix unit's data setup, read port B the host DMA; write port A
// takes Activate results, write port B host DMA data. Reads return data one
// cycle after the request. If both write ports name the same row in one
// cycle, port A (Activate) wins. The paper gives the size and that the buffer
// reads and writes 256 values per cycle; the port count, latency and priority
// are this design's choices. Addresses wrap modulo ROWS.
module unified_buffer
  import tpu_pkg::*;
#(
  parameter int unsigned N    = ARRAY_N,
  parameter int unsigned ROWS = UB_ROWS,
  localparam int unsigned AW  = $clog2(ROWS)
) (
  input  logic          clk,
  input  logic          rda_en,
  input  logic [AW-1:0] rda_addr,
  output logic [7:0]    rda_data [N],
  input  logic          rdb_en,
  input  logic [AW-1:0] rdb_addr,
  output logic [7:0]    rdb_data [N],
  input  logic          wra_en,
  input  logic [AW-1:0] wra_addr,
  input  logic [7:0]    wra_data [N],
  input  logic          wrb_en,
  input  logic [AW-1:0] wrb_addr,
  input  logic [7:0]    wrb_data [N]
);

  logic [N*8-1:0] mem [ROWS];

  function automatic logic [N*8-1:0] pack_row(input logic [7:0] r [N]);
    logic [N*8-1:0] v;
    for (int i = 0; i < N; i++) v[i*8 +: 8] = r[i];
    return v;
  endfunction

  logic [N*8-1:0] qa, qb;

  always_ff @(posedge clk) begin
    if (wrb_en && !(wra_en && wra_addr == wrb_addr)) mem[wrb_addr] <= pack_row(wrb_data);
    if (wra_en) mem[wra_addr] <= pack_row(wra_data);
    if (rda_en) qa <= mem[rda_addr];
    if (rdb_en) qb <= mem[rdb_addr];
  end

  always_comb begin
    for (int i = 0; i < N; i++) begin
      rda_data[i] = qa[i*8 +: 8];
      rdb_data[i] = qb[i*8 +: 8];
    end
  end

endmodule
