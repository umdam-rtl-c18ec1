// umdam_layout_agen -- weight-placement address generator (UMDAM layout).
//
// Produces, one element per cycle, the physical address at which each
// element of a weight matrix is stored in the UMDAM layout:
//   * the matrix is cut into tiles TILE_H elements high and TILE_W columns
//     wide, where TILE_H * ELEM_BYTES = 2^(OFF_BITS + Col_L) bytes (the
//     interleaving granularity) and TILE_W = 2^(BANK+RANK+CH bits), the
//     number of banks in the system (64 by default);
//   * inside a tile the elements are column-major: the local row gives the
//     Col_L and Offset bits, the local column the Bank, Rank and Channel
//     bits, so each tile column fills one interleaving unit of one bank;
//   * the tiles themselves are numbered column-major,
//     seq = base_tile + tile_col * num_tile_row + tile_row,
//     and seq gives the {Row, Col_M} bits. All tiles of one tile column
//     therefore keep each matrix column in the same bank.
// The address is Row|Col_M|Bank|Rank|Channel|Col_L|Offset, so the result
// read through umdam_addr_map with the same col_l_bits is the DRAM address
// of Algorithm 1 in the paper. The tiling rule, the bit assignment and the
// column-major tile numbering follow the paper; the walk order (tile column,
// tile row, local column, local row: ascending addresses), the base_tile
// input that lets several matrices share the memory, the scaling of the
// local row by ELEM_BYTES and the handshake are this design's choices.
// Matrix sizes are given in whole tiles; a matrix must be padded to them.
//
// Interface: a start pulse (while idle) latches the configuration; then
// out_valid stays high while elements remain and advances on
// out_valid & out_ready, one element per cycle, with out_last on the final
// element. done pulses for one cycle after the last element (or right after
// start when the matrix is empty). Reset is synchronous-active-low rst_n.
module umdam_layout_agen
  import umdam_pkg::*;
#(
  parameter int unsigned ROW_BITS   = ROW_BITS_D,
  parameter int unsigned COL_BITS   = COL_BITS_D,
  parameter int unsigned BANK_BITS  = BANK_BITS_D,
  parameter int unsigned RANK_BITS  = RANK_BITS_D,
  parameter int unsigned CH_BITS    = CH_BITS_D,
  parameter int unsigned OFF_BITS   = OFF_BITS_D,
  parameter int unsigned ELEM_BYTES = ELEM_BYTES_D,
  parameter int unsigned TCNT_W     = 16,   // width of the tile counts
  localparam int unsigned PA_BITS   = ROW_BITS + COL_BITS + BANK_BITS + RANK_BITS + CH_BITS + OFF_BITS,
  localparam int unsigned LC_BITS   = BANK_BITS + RANK_BITS + CH_BITS,
  localparam int unsigned LR_W      = OFF_BITS + COL_BITS + 1,
  localparam int unsigned SEQ_W     = ROW_BITS + COL_BITS,
  localparam int unsigned MAT_W     = TCNT_W + LR_W,
  localparam int unsigned CFG_W     = cfgw(COL_BITS)
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  logic [CFG_W-1:0]   col_l_bits,
  input  logic [TCNT_W-1:0]  num_tile_row,   // tiles along the matrix height
  input  logic [TCNT_W-1:0]  num_tile_col,   // tiles along the matrix width
  input  logic [SEQ_W-1:0]   base_tile,      // first tile number of the matrix
  output logic               busy,
  output logic               out_valid,
  input  logic               out_ready,
  output logic [PA_BITS-1:0] out_pa,
  output logic [MAT_W-1:0]   out_row,        // matrix row of the element
  output logic [MAT_W-1:0]   out_col,        // matrix column of the element
  output logic               out_last,
  output logic               done
);

  localparam int unsigned LC_W  = fw(LC_BITS);
  localparam int unsigned ESH   = $clog2(ELEM_BYTES);

  // Latched configuration.
  logic [CFG_W-1:0]  cl_q;
  logic [TCNT_W-1:0] ntr_q, ntc_q;
  logic [SEQ_W-1:0]  base_q;
  // Walk counters.
  logic [TCNT_W-1:0] tc_q, tr_q;
  logic [LC_W-1:0]   lc_q;
  logic [LR_W-1:0]   lr_q;

  int unsigned       nl;
  logic [LR_W-1:0]   tile_h_m1;      // TILE_H - 1 in elements
  logic [LC_W-1:0]   tile_w_m1;      // TILE_W - 1
  logic [SEQ_W-1:0]  seq;
  logic              lr_wrap, lc_wrap, tr_wrap, tc_wrap;

  always_comb begin
    nl        = (int'(cl_q) > int'(COL_BITS)) ? COL_BITS : int'(cl_q);
    tile_h_m1 = LR_W'(((1 << (OFF_BITS + nl)) >> ESH) - 1);
    tile_w_m1 = LC_W'((1 << LC_BITS) - 1);
    lr_wrap   = (lr_q == tile_h_m1);
    lc_wrap   = (lc_q == tile_w_m1);
    tr_wrap   = (tr_q == ntr_q - 1'b1);
    tc_wrap   = (tc_q == ntc_q - 1'b1);
    // Algorithm 1: (row, col_M) <- bits(tile_col_idx * num_tile_row + tile_row_idx)
    seq       = base_q + SEQ_W'(tc_q) * SEQ_W'(ntr_q) + SEQ_W'(tr_q);
  end

  always_comb begin
    logic [PA_BITS-1:0] a;
    a = PA_BITS'(seq) << (OFF_BITS + nl + LC_BITS);          // {Row, Col_M}
    a = a | (PA_BITS'(lc_q) << (OFF_BITS + nl));             // {Bank, Rank, Channel}
    a = a | (PA_BITS'(lr_q) << ESH);                         // {Col_L, Offset}
    out_pa  = a;
    out_row = MAT_W'(tr_q) * MAT_W'(tile_h_m1 + 1'b1) + MAT_W'(lr_q);
    out_col = (MAT_W'(tc_q) << LC_BITS) + MAT_W'(lc_q);
  end

  assign out_valid = busy;
  assign out_last  = busy && lr_wrap && lc_wrap && tr_wrap && tc_wrap;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      busy   <= 1'b0;
      done   <= 1'b0;
      cl_q   <= '0;
      ntr_q  <= '0;
      ntc_q  <= '0;
      base_q <= '0;
      tc_q   <= '0;
      tr_q   <= '0;
      lc_q   <= '0;
      lr_q   <= '0;
    end else begin
      done <= 1'b0;
      if (!busy && start) begin
        cl_q   <= col_l_bits;
        ntr_q  <= num_tile_row;
        ntc_q  <= num_tile_col;
        base_q <= base_tile;
        tc_q   <= '0;
        tr_q   <= '0;
        lc_q   <= '0;
        lr_q   <= '0;
        if (num_tile_row == '0 || num_tile_col == '0) done <= 1'b1;
        else                                          busy <= 1'b1;
      end else if (busy && out_ready) begin
        lr_q <= lr_wrap ? '0 : lr_q + 1'b1;
        if (lr_wrap) begin
          lc_q <= lc_wrap ? '0 : lc_q + 1'b1;
          if (lc_wrap) begin
            tr_q <= tr_wrap ? '0 : tr_q + 1'b1;
            if (tr_wrap) begin
              tc_q <= tc_q + 1'b1;
              if (tc_wrap) begin
                busy <= 1'b0;
                done <= 1'b1;
              end
            end
          end
        end
      end
    end
  end

  // The element size must be a power of two no larger than a burst.
  initial assert (ELEM_BYTES == (1 << ESH) && ESH <= OFF_BITS)
    else $error("umdam_layout_agen: ELEM_BYTES must be a power of two <= 2^OFF_BITS");

endmodule
