// address_mapper: address decoding and generation of the control unit
// (Address Mapper of Fig. 3).
//
// Host side: splits a 16-bit word address from the host bus into a region
// (bits [15:14]: 0 control/status registers, 1 IF bank, 2 WT bank, 3 OF bank)
// and, inside a bank, a row and a column (offset = row * N + col, N a power
// of two). Register index is offset[3:0].
// Engine side: turns the stream step k and output row i into bank row
// addresses: IF row = if_base + k, WT row = wt_base + k, OF row = of_base + i.
// The paper only names the Address Mapper; the map is this design's choice.
// Combinational.
module address_mapper
  import spade_pkg::*;
#(
  parameter int unsigned N     = 4,
  parameter int unsigned DEPTH = 64,
  localparam int unsigned AW  = $clog2(DEPTH),
  localparam int unsigned CWI = (N > 1) ? $clog2(N) : 1
) (
  input  logic [15:0]    host_addr,
  output logic [1:0]     region,
  output logic [3:0]     reg_idx,
  output logic [AW-1:0]  row,
  output logic [CWI-1:0] col,
  input  logic [AW-1:0]  if_base,
  input  logic [AW-1:0]  wt_base,
  input  logic [AW-1:0]  of_base,
  input  logic [15:0]    k,
  input  logic [15:0]    i,
  output logic [AW-1:0]  if_addr,
  output logic [AW-1:0]  wt_addr,
  output logic [AW-1:0]  of_addr
);

  localparam int unsigned SH = (N > 1) ? $clog2(N) : 0;

  logic [13:0] offset;

  always_comb begin
    region  = host_addr[15:14];
    offset  = host_addr[13:0];
    reg_idx = offset[3:0];
    row     = AW'(offset >> SH);
    col     = (N > 1) ? CWI'(offset) : '0;
    if_addr = if_base + AW'(k);
    wt_addr = wt_base + AW'(k);
    of_addr = of_base + AW'(i);
  end

endmodule
