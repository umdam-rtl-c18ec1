// umdam_mc_frontend -- UMDAM address-translation front end of the memory
// controller (top level).
//
// Requests reach the DRAM from two sources that share one physical address
// space: the NPU (already translated from virtual to physical addresses by
// the page table) and the weight loader, an umdam_layout_agen that walks a
// weight matrix at model initialisation and writes every element to its
// UMDAM address. The selected request's physical address goes through
// umdam_addr_map, and the resulting DRAM address is held in a one-entry
// output register and presented to the channel named by its Channel field.
// Because NPU and PIM see the same layout, one copy of the weights serves
// both: NPU streams are spread over the channels, while every weight column
// sits in one bank next to that bank's PIM unit.
//
// Configuration: col_l_bits, the width of the Col_L field, is a register
// reset to 3 (256 B interleaving, the paper's LPDDR5 example) and written
// through cfg_we/cfg_col_l_bits; a write is taken only when the front end is
// idle (cfg_ready), so a mapping never changes under a request in flight.
// Writing 0 selects the conventional Row|Col|Bank|Rank|Channel|Offset
// mapping.
//
// Arbitration: while the loader is busy it owns the path and the NPU port
// is stalled (npu_ready low). Each request carries one element
// (ELEM_BYTES of data) and a write flag; read data return from the DRAM
// side directly and are not handled here.
//
// Timing: a request accepted in cycle t is presented on the DRAM side from
// cycle t+1 until its channel's dram_ready is high; a new request is taken
// in the cycle the previous one leaves, so the path sustains one request per
// cycle. The translation rule and the mapping register come from the paper;
// the arbitration, the handshakes, the idle-only configuration write and
// the element-wide data path are this design's choices.
module umdam_mc_frontend
  import umdam_pkg::*;
#(
  parameter int unsigned ROW_BITS   = ROW_BITS_D,
  parameter int unsigned COL_BITS   = COL_BITS_D,
  parameter int unsigned BANK_BITS  = BANK_BITS_D,
  parameter int unsigned RANK_BITS  = RANK_BITS_D,
  parameter int unsigned CH_BITS    = CH_BITS_D,
  parameter int unsigned OFF_BITS   = OFF_BITS_D,
  parameter int unsigned COL_L_RST  = COL_L_BITS_D,
  parameter int unsigned ELEM_BYTES = ELEM_BYTES_D,
  parameter int unsigned TCNT_W     = 16,
  localparam int unsigned PA_BITS   = ROW_BITS + COL_BITS + BANK_BITS + RANK_BITS + CH_BITS + OFF_BITS,
  localparam int unsigned NCH       = 1 << CH_BITS,
  localparam int unsigned DATA_W    = 8 * ELEM_BYTES,
  localparam int unsigned SEQ_W     = ROW_BITS + COL_BITS,
  localparam int unsigned MAT_W     = TCNT_W + OFF_BITS + COL_BITS + 1,
  localparam int unsigned CFG_W     = cfgw(COL_BITS)
) (
  input  logic                      clk,
  input  logic                      rst_n,
  // mapping configuration
  input  logic                      cfg_we,
  input  logic [CFG_W-1:0]          cfg_col_l_bits,
  output logic                      cfg_ready,
  output logic [CFG_W-1:0]          col_l_bits,
  // weight loader control
  input  logic                      ld_start,
  input  logic [TCNT_W-1:0]         ld_num_tile_row,
  input  logic [TCNT_W-1:0]         ld_num_tile_col,
  input  logic [SEQ_W-1:0]          ld_base_tile,
  output logic                      ld_busy,
  output logic                      ld_done,
  // weight source: element (ld_elem_row, ld_elem_col) is wanted this cycle
  output logic [MAT_W-1:0]          ld_elem_row,
  output logic [MAT_W-1:0]          ld_elem_col,
  input  logic [DATA_W-1:0]         ld_elem_data,
  // NPU request port (physical addresses)
  input  logic                      npu_valid,
  output logic                      npu_ready,
  input  logic                      npu_we,
  input  logic [PA_BITS-1:0]        npu_pa,
  input  logic [DATA_W-1:0]         npu_wdata,
  // DRAM side: one valid/ready pair per channel, shared command fields
  output logic [NCH-1:0]            dram_valid,
  input  logic [NCH-1:0]            dram_ready,
  output logic [ROW_BITS-1:0]       dram_row,
  output logic [COL_BITS-1:0]       dram_col,
  output logic [fw(BANK_BITS)-1:0]  dram_bank,
  output logic [fw(RANK_BITS)-1:0]  dram_rank,
  output logic [fw(CH_BITS)-1:0]    dram_ch,
  output logic [fw(OFF_BITS)-1:0]   dram_off,
  output logic                      dram_we,
  output logic [DATA_W-1:0]         dram_wdata,
  output req_src_e                  dram_src
);

  // ---------------------------------------------------------------- config
  logic [CFG_W-1:0] col_l_q;
  logic             out_v_q;

  assign cfg_ready  = !ld_busy && !out_v_q;
  assign col_l_bits = col_l_q;

  always_ff @(posedge clk) begin
    if (!rst_n)                    col_l_q <= CFG_W'(COL_L_RST);
    else if (cfg_we && cfg_ready)  col_l_q <= cfg_col_l_bits;
  end

  // ---------------------------------------------------------------- loader
  logic               ag_valid, ag_ready, ag_last;
  logic [PA_BITS-1:0] ag_pa;

  umdam_layout_agen #(
    .ROW_BITS  (ROW_BITS),
    .COL_BITS  (COL_BITS),
    .BANK_BITS (BANK_BITS),
    .RANK_BITS (RANK_BITS),
    .CH_BITS   (CH_BITS),
    .OFF_BITS  (OFF_BITS),
    .ELEM_BYTES(ELEM_BYTES),
    .TCNT_W    (TCNT_W)
  ) u_agen (
    .clk         (clk),
    .rst_n       (rst_n),
    .start       (ld_start && !out_v_q),
    .col_l_bits  (col_l_q),
    .num_tile_row(ld_num_tile_row),
    .num_tile_col(ld_num_tile_col),
    .base_tile   (ld_base_tile),
    .busy        (ld_busy),
    .out_valid   (ag_valid),
    .out_ready   (ag_ready),
    .out_pa      (ag_pa),
    .out_row     (ld_elem_row),
    .out_col     (ld_elem_col),
    .out_last    (ag_last),
    .done        (ld_done)
  );

  // ------------------------------------------------------------ arbitration
  logic               out_fire, take;
  logic               in_valid, in_we;
  logic [PA_BITS-1:0] in_pa;
  logic [DATA_W-1:0]  in_data;
  req_src_e           in_src;

  always_comb begin
    if (ld_busy) begin
      in_valid = ag_valid;
      in_we    = 1'b1;
      in_pa    = ag_pa;
      in_data  = ld_elem_data;
      in_src   = SRC_LOADER;
    end else begin
      in_valid = npu_valid;
      in_we    = npu_we;
      in_pa    = npu_pa;
      in_data  = npu_wdata;
      in_src   = SRC_NPU;
    end
  end

  assign out_fire  = out_v_q && dram_ready[dram_ch];
  assign take      = in_valid && (!out_v_q || out_fire);
  assign ag_ready  = ld_busy && (!out_v_q || out_fire);
  assign npu_ready = !ld_busy && (!out_v_q || out_fire);

  // ------------------------------------------------------------ translation
  logic [ROW_BITS-1:0]      m_row;
  logic [COL_BITS-1:0]      m_col;
  logic [fw(BANK_BITS)-1:0] m_bank;
  logic [fw(RANK_BITS)-1:0] m_rank;
  logic [fw(CH_BITS)-1:0]   m_ch;
  logic [fw(OFF_BITS)-1:0]  m_off;

  umdam_addr_map #(
    .ROW_BITS (ROW_BITS),
    .COL_BITS (COL_BITS),
    .BANK_BITS(BANK_BITS),
    .RANK_BITS(RANK_BITS),
    .CH_BITS  (CH_BITS),
    .OFF_BITS (OFF_BITS)
  ) u_map (
    .pa        (in_pa),
    .col_l_bits(col_l_q),
    .row       (m_row),
    .col       (m_col),
    .col_m     (),
    .col_l     (),
    .bank      (m_bank),
    .rank      (m_rank),
    .ch        (m_ch),
    .off       (m_off)
  );

  // ---------------------------------------------------------- output stage
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out_v_q    <= 1'b0;
      dram_row   <= '0;
      dram_col   <= '0;
      dram_bank  <= '0;
      dram_rank  <= '0;
      dram_ch    <= '0;
      dram_off   <= '0;
      dram_we    <= 1'b0;
      dram_wdata <= '0;
      dram_src   <= SRC_NPU;
    end else begin
      if (take) begin
        out_v_q    <= 1'b1;
        dram_row   <= m_row;
        dram_col   <= m_col;
        dram_bank  <= m_bank;
        dram_rank  <= m_rank;
        dram_ch    <= m_ch;
        dram_off   <= m_off;
        dram_we    <= in_we;
        dram_wdata <= in_data;
        dram_src   <= in_src;
      end else if (out_fire) begin
        out_v_q <= 1'b0;
      end
    end
  end

  always_comb
    for (int c = 0; c < NCH; c++)
      dram_valid[c] = out_v_q && (dram_ch == fw(CH_BITS)'(c));

  // ------------------------------------------------------------ assertions
  // A request on a channel stays unchanged until that channel takes it.
  property p_hold;
    @(posedge clk) disable iff (!rst_n)
      (out_v_q && !dram_ready[dram_ch]) |=> (out_v_q && $stable(dram_ch) && $stable(dram_row)
                                             && $stable(dram_col) && $stable(dram_bank)
                                             && $stable(dram_off) && $stable(dram_wdata));
  endproperty
  a_hold: assert property (p_hold);

  // The NPU is never granted while the loader owns the path.
  a_stall: assert property (@(posedge clk) disable iff (!rst_n) ld_busy |-> !npu_ready);

  // Only one channel is addressed at a time.
  a_onehot: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(dram_valid));

  // The loader's last element is its final write.
  a_last: assert property (@(posedge clk) disable iff (!rst_n)
                           (ag_last && ag_ready) |=> !ld_busy);

endmodule
