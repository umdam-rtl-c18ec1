// umdam_pkg -- shared constants of the UMDAM address mapping.
//
// The defaults describe the LPDDR5-PIM memory the mapping is built for:
// 4 channels, 1 rank, 16 banks per channel, 2 KB rows and 32 B bursts, so a
// row holds 2 KB / 32 B = 64 bursts (6 column bits) and a burst 32 bytes (5
// offset bits). With a 256 B interleaving granularity the column bits split
// into 3 low bits (Col_L) and 3 high bits (Col_M). Weights are FP16 (2 bytes).
// Those numbers follow the paper. The number of row bits is not given there;
// 16 is this design's choice (a 16 Gb x16 LPDDR5 channel: 16 banks x 64 Ki
// rows x 2 KB), which makes the physical address 33 bits (8 GiB).
package umdam_pkg;

  localparam int unsigned ROW_BITS_D   = 16;  // assumed
  localparam int unsigned COL_BITS_D   = 6;   // log2(2 KB / 32 B)
  localparam int unsigned BANK_BITS_D  = 4;   // 16 banks per channel
  localparam int unsigned RANK_BITS_D  = 0;   // 1 rank
  localparam int unsigned CH_BITS_D    = 2;   // 4 channels
  localparam int unsigned OFF_BITS_D   = 5;   // log2(32 B burst)
  localparam int unsigned COL_L_BITS_D = 3;   // log2(256 B / 32 B)
  localparam int unsigned ELEM_BYTES_D = 2;   // FP16

  // Width of a field that may have zero bits (a port cannot).
  function automatic int unsigned fw(input int unsigned bits);
    return (bits == 0) ? 1 : bits;
  endfunction

  // Width of the Col_L-size configuration value (0 .. col_bits).
  function automatic int unsigned cfgw(input int unsigned col_bits);
    return $clog2(col_bits + 1);
  endfunction

  // Who issued a request at the controller front end.
  typedef enum logic {
    SRC_NPU    = 1'b0,
    SRC_LOADER = 1'b1
  } req_src_e;

endpackage
