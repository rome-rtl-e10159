// rome_addr_map: physical address to RoMe channel / stack ID / VBA / row.
//
// Every request is one 4 KB virtual-bank row, so the low 12 address bits only
// have to be zero. The 4 KB chunk number is spread first over the channels
// (chunk mod NUM_CH), then over the 8 VBAs of a stack ID, then over the 4
// stack IDs, and the rest is the row. Consecutive 4 KB chunks of a tensor so
// land on different channels, and chunks NUM_CH apart on different VBAs of the
// same channel, which is what the VBA-interleaving scheduler wants. The paper
// does not give its mapping (it sweeps mappings and keeps the best); this order
// is this design's choice. NUM_CH = 36 (nine channels on each of four dies) is
// not a power of two, so the channel is a true remainder.
//
// Purely combinational. aligned_o is low for an address that is not 4 KB
// aligned, and in_range_o low for one beyond the cube's capacity.
module rome_addr_map
  import rome_pkg::*;
#(
  parameter int NUM_CH = 36,
  parameter int ADDR_W = 36
) (
  input  logic [ADDR_W-1:0]         addr_i,
  output logic [$clog2(NUM_CH)-1:0] ch_o,
  output logic [SID_W-1:0]          sid_o,
  output logic [VBA_W-1:0]          vba_o,
  output logic [ROW_W-1:0]          row_o,
  output logic                      aligned_o,
  output logic                      in_range_o
);

  localparam int CW = ADDR_W - 12;
  localparam int QW = SID_W + VBA_W + ROW_W;

  logic [CW-1:0] chunk, quot;

  always_comb begin
    chunk      = addr_i[ADDR_W-1:12];
    ch_o       = $clog2(NUM_CH)'(chunk % CW'(NUM_CH));
    quot       = chunk / CW'(NUM_CH);
    vba_o      = quot[VBA_W-1:0];
    sid_o      = quot[VBA_W +: SID_W];
    row_o      = quot[VBA_W + SID_W +: ROW_W];
    aligned_o  = (addr_i[11:0] == '0);
    in_range_o = (quot >> QW) == '0;
  end

endmodule
