// umdam_addr_map -- UMDAM physical-to-DRAM address translation.
//
// The physical address is read as the bit fields, from MSB to LSB,
//     Row | Col_M | Bank | Rank | Channel | Col_L | Offset
// and the DRAM column is {Col_M, Col_L}. Placing the channel (and above it
// the rank and bank) just above a small Col_L field keeps consecutive
// addresses interleaved over the channels every 2^(OFF_BITS+Col_L) bytes,
// which the NPU needs for bandwidth, while a weight column that the layout
// keeps inside one Col_L/Offset run stays in a single bank for its PIM unit.
//
// The number of column bits given to Col_L is a run-time input
// (col_l_bits, 0 .. COL_BITS), so the same logic serves any interleaving
// granularity. col_l_bits = 0 gives Row|Col|Bank|Rank|Channel|Offset, the
// conventional NPU mapping; col_l_bits = 3 is the 256 B granularity of the
// paper's LPDDR5 example. The field order and the configurable split follow
// the paper; treating col = {Col_M, Col_L} and making the split a run-time
// input are this design's choices.
//
// Interface: purely combinational, pa -> row/col/bank/rank/ch/off plus the
// two column halves for observation. With RANK_BITS = 0 the rank output is
// one bit wide and always 0.
module umdam_addr_map
  import umdam_pkg::*;
#(
  parameter int unsigned ROW_BITS  = ROW_BITS_D,
  parameter int unsigned COL_BITS  = COL_BITS_D,
  parameter int unsigned BANK_BITS = BANK_BITS_D,
  parameter int unsigned RANK_BITS = RANK_BITS_D,
  parameter int unsigned CH_BITS   = CH_BITS_D,
  parameter int unsigned OFF_BITS  = OFF_BITS_D,
  localparam int unsigned PA_BITS  = ROW_BITS + COL_BITS + BANK_BITS + RANK_BITS + CH_BITS + OFF_BITS,
  localparam int unsigned CFG_W    = cfgw(COL_BITS)
) (
  input  logic [PA_BITS-1:0]         pa,
  input  logic [CFG_W-1:0]           col_l_bits,
  output logic [ROW_BITS-1:0]        row,
  output logic [COL_BITS-1:0]        col,
  output logic [COL_BITS-1:0]        col_m,   // Col_M, right-aligned
  output logic [COL_BITS-1:0]        col_l,   // Col_L, right-aligned
  output logic [fw(BANK_BITS)-1:0]   bank,
  output logic [fw(RANK_BITS)-1:0]   rank,
  output logic [fw(CH_BITS)-1:0]     ch,
  output logic [fw(OFF_BITS)-1:0]    off
);

  // Low-bit mask of n bits, n <= PA_BITS.
  function automatic logic [PA_BITS-1:0] mask(input int unsigned n);
    logic [PA_BITS:0] one_n;
    one_n = ({{PA_BITS{1'b0}}, 1'b1} << n);
    return PA_BITS'(one_n - 1'b1);
  endfunction

  int unsigned nl, nm;   // widths of Col_L and Col_M for this configuration

  always_comb begin
    logic [PA_BITS-1:0] t;
    nl = (int'(col_l_bits) > int'(COL_BITS)) ? COL_BITS : int'(col_l_bits);
    nm = COL_BITS - nl;
    t  = pa;
    off   = fw(OFF_BITS)'(t & mask(OFF_BITS));   t = t >> OFF_BITS;
    col_l = COL_BITS'(t & mask(nl));              t = t >> nl;
    ch    = fw(CH_BITS)'(t & mask(CH_BITS));     t = t >> CH_BITS;
    rank  = fw(RANK_BITS)'(t & mask(RANK_BITS)); t = t >> RANK_BITS;
    bank  = fw(BANK_BITS)'(t & mask(BANK_BITS)); t = t >> BANK_BITS;
    col_m = COL_BITS'(t & mask(nm));              t = t >> nm;
    row   = ROW_BITS'(t);
    col   = (col_m << nl) | col_l;
  end

  // A Col_L wider than the column field is a configuration error; the
  // logic above clamps it to COL_BITS.
  always_comb
    assert (int'(col_l_bits) <= int'(COL_BITS))
      else $error("umdam_addr_map: col_l_bits %0d exceeds COL_BITS %0d", col_l_bits, COL_BITS);

endmodule
