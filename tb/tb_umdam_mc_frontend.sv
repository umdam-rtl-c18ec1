// tb_umdam_mc_frontend -- end-to-end test of the UMDAM front end at its
// default parameters (4 channels x 16 banks, 2 KB rows, 32 B bursts, FP16).
//
// The testbench plays the parts around the front end:
//   * a DRAM with a PIM unit per bank: an associative array indexed by
//     (channel, bank, row, column, byte offset), per-channel ready signals
//     that drop at random, and a per-bank GEMV that walks only its own bank;
//   * the weight source, which answers the loader's (row, column) query with
//     W(r,c), a fixed hash of r and c;
//   * the NPU, which issues physical-address reads and writes.
// The run: (1) load a 256 x 128 FP16 matrix (2 x 2 tiles of 128 x 64) at
// tile 10 while the NPU tries to issue, which must stall it; (2) the NPU
// streams one 16 KiB tile sequentially and checks every element against
// the NN tile order (column-major inside the tile) and the channel
// interleaving; (3) every bank's PIM unit computes its share of y = W^T x
// from its own bank and the result is compared with a direct product;
// (4) the mapping is switched to Col_L = 0 (conventional) and back, a
// switch requested while busy must be refused, and NPU writes/reads go
// through the new mapping. Every DRAM request is also checked against an
// independent slicing of its physical address. Mechanisms counted, each
// must occur: NPU stall, DRAM back-pressure, channel switch in a stream,
// refused configuration write, mapping switch, PIM column result.
module tb_umdam_mc_frontend;
  import umdam_pkg::*;

  localparam int TH = 128, TW = 64, TR = 2, TC = 2, BASE = 10;
  localparam int K = TH * TR, N = TW * TC;

  logic        clk = 0, rst_n = 0;
  logic        cfg_we = 0, cfg_ready;
  logic [2:0]  cfg_cl = 3, col_l_bits;
  logic        ld_start = 0, ld_busy, ld_done;
  logic [15:0] ld_ntr = TR, ld_ntc = TC;
  logic [21:0] ld_base = BASE;
  logic [27:0] ld_row, ld_col;
  logic [15:0] ld_data;
  logic        npu_valid = 0, npu_ready, npu_we = 0;
  logic [32:0] npu_pa = 0;
  logic [15:0] npu_wdata = 0;
  logic [3:0]  dram_valid, dram_ready = '1;
  logic [15:0] dram_row;
  logic [5:0]  dram_col;
  logic [3:0]  dram_bank;
  logic [0:0]  dram_rank;
  logic [1:0]  dram_ch;
  logic [4:0]  dram_off;
  logic        dram_we;
  logic [15:0] dram_wdata;
  req_src_e    dram_src;

  umdam_mc_frontend dut (
    .clk(clk), .rst_n(rst_n),
    .cfg_we(cfg_we), .cfg_col_l_bits(cfg_cl), .cfg_ready(cfg_ready), .col_l_bits(col_l_bits),
    .ld_start(ld_start), .ld_num_tile_row(ld_ntr), .ld_num_tile_col(ld_ntc),
    .ld_base_tile(ld_base), .ld_busy(ld_busy), .ld_done(ld_done),
    .ld_elem_row(ld_row), .ld_elem_col(ld_col), .ld_elem_data(ld_data),
    .npu_valid(npu_valid), .npu_ready(npu_ready), .npu_we(npu_we), .npu_pa(npu_pa),
    .npu_wdata(npu_wdata),
    .dram_valid(dram_valid), .dram_ready(dram_ready), .dram_row(dram_row),
    .dram_col(dram_col), .dram_bank(dram_bank), .dram_rank(dram_rank), .dram_ch(dram_ch),
    .dram_off(dram_off), .dram_we(dram_we), .dram_wdata(dram_wdata), .dram_src(dram_src)
  );

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int n_stall = 0, n_backpressure = 0, n_ch_switch = 0, n_cfg_refused = 0;
  int n_mode_switch = 0, n_pim_cols = 0, n_writes = 0, n_reads = 0;

  task automatic check(input string what, input longint got, input longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %0d exp %0d", what, got, exp);
    end
  endtask

  function automatic logic [15:0] w_of(input int r, input int c);
    return 16'((r * 131 + c * 7 + (r ^ c) * 3) & 16'hffff);
  endfunction
  assign ld_data = w_of(int'(ld_row), int'(ld_col));

  // ------------------------------------------------ DRAM + PIM model
  logic [7:0] mem [longint];
  function automatic longint key(input int ch, input int ba, input int row, input int col,
                                 input int off);
    return (longint'(ch) << 40) | (longint'(ba) << 32) | (longint'(row) << 12)
         | (longint'(col) << 5) | longint'(off);
  endfunction

  longint unsigned pend_pa[$];    // NPU requests, in issue order
  bit              pend_we[$];
  logic [15:0]     pend_data[$];
  int              last_ch = -1;
  bit              stream_on = 0;
  int              cur_cl = 3;

  // Independent reference slicing of a physical address.
  task automatic ref_fields(input longint unsigned a, input int n, output int row,
                            output int col, output int ba, output int ch, output int off);
    off = int'(a % 32);
    ch  = int'((a >> (5 + n)) % 4);
    ba  = int'((a >> (7 + n)) % 16);
    col = int'(((a >> (11 + n)) % (1 << (6 - n))) * (1 << n) + (a >> 5) % (1 << n));
    row = int'(a >> 17);
  endtask

  always @(negedge clk) begin
    dram_ready <= 4'($urandom);
  end

  always @(negedge clk) begin
    #4;   // just before the rising edge
    if (dram_valid != 0 && (dram_valid & dram_ready) == 0) n_backpressure++;
    if ((dram_valid & dram_ready) != 0) begin
      longint k;
      k = key(dram_ch, dram_bank, dram_row, dram_col, dram_off);
      if (dram_src == SRC_NPU) begin
        longint unsigned a;
        int r, c, b, h, o;
        a = pend_pa.pop_front();
        ref_fields(a, cur_cl, r, c, b, h, o);
        check("npu_map", key(h, b, r, c, o), k);
        void'(pend_we.pop_front());
        void'(pend_data.pop_front());
        if (stream_on && last_ch >= 0 && last_ch != int'(dram_ch)) n_ch_switch++;
        last_ch = int'(dram_ch);
      end
      if (dram_we) begin
        mem[k]     = dram_wdata[7:0];
        mem[k + 1] = dram_wdata[15:8];
        n_writes++;
      end else begin
        n_reads++;
        rd_data = {mem.exists(k + 1) ? mem[k + 1] : 8'h0, mem.exists(k) ? mem[k] : 8'h0};
        rd_key  = k;
        -> rd_ev;
      end
    end
  end
  logic [15:0] rd_data;
  longint      rd_key;
  event        rd_ev;

  // ------------------------------------------------ NPU driver
  task automatic npu_issue(input longint unsigned a, input bit we, input logic [15:0] d);
    bit fire;
    npu_valid = 1; npu_we = we; npu_pa = 33'(a); npu_wdata = d;
    pend_pa.push_back(a); pend_we.push_back(we); pend_data.push_back(d);
    fire = 0;
    while (!fire) begin
      #4;
      fire = npu_ready;
      if (!npu_ready && ld_busy) n_stall++;
      @(negedge clk);
    end
    npu_valid = 0;
  endtask

  task automatic wait_idle();
    while (!(cfg_ready && pend_pa.size() == 0)) @(negedge clk);
  endtask

  task automatic cfg_write(input int n);
    @(negedge clk);
    cfg_we = 1; cfg_cl = 3'(n);
    #4;
    if (!cfg_ready) n_cfg_refused++;
    @(negedge clk);
    cfg_we = 0;
  endtask

  // ------------------------------------------------ expected NPU read data
  longint unsigned exp_q[$];   // expected element per read, in order
  always @(rd_ev) begin
    longint unsigned e;
    e = exp_q.pop_front();
    check("npu_rd", rd_data, e);
  end

  // ------------------------------------------------ watchdog
  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ------------------------------------------------ test sequence
  initial begin
    int cyc;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    check("reset_cl", col_l_bits, 3);

    // (1) weight placement, with the NPU trying to get in
    ld_start = 1;
    @(negedge clk);
    ld_start = 0;
    cyc = 0;
    fork
      begin
        while (!ld_done) begin @(negedge clk); cyc++; end
      end
      begin
        repeat (5) @(negedge clk);
        cfg_write(0);                       // refused: loader busy
        npu_issue(0, 1'b1, 16'h1234);       // stalled until the load ends
      end
    join
    wait_idle();
    check("cl_kept", col_l_bits, 3);
    check("loaded", n_writes, K * N + 1);
    // about 1 element per cycle divided by the fraction of cycles a channel is ready
    if (cyc > 4 * K * N) check("load_rate", cyc, 4 * K * N);

    // (2) NPU streams tile (tile_row 1, tile_col 1) = sequence BASE + 1*TR + 1
    begin
      longint unsigned tbase;
      int seq;
      seq   = BASE + 1 * TR + 1;
      tbase = longint'(seq) * (TH * TW * 2);
      stream_on = 1; last_ch = -1;
      for (int i = 0; i < TH * TW; i++) begin
        int lr, lc;
        lr = i % TH; lc = i / TH;           // column-major inside the tile
        exp_q.push_back(w_of(1 * TH + lr, 1 * TW + lc));
        npu_issue(tbase + longint'(i) * 2, 1'b0, 16'h0);
      end
      wait_idle();
      stream_on = 0;
      check("tile_switches", n_ch_switch, TH * TW / 128 - 1);   // a new channel every 256 B
    end

    // (3) PIM: each bank's unit walks its own bank and forms y[j] = sum_k W[k][j] x[k]
    begin
      longint acc [int];
      longint refy;
      for (int ch = 0; ch < 4; ch++)
        for (int ba = 0; ba < 16; ba++)
          foreach (mem[k]) begin
            if (int'(k >> 40) == ch && int'((k >> 32) % 256) == ba && k % 2 == 0) begin
              int row, col, off, seq, lrow, tr, tc, j, kk;
              row  = int'((k >> 12) % (1 << 20));
              col  = int'((k >> 5) % 64);
              off  = int'(k % 32);
              seq  = row * 8 + col / 8 - BASE;      // {Row, Col_M} = tile number
              if (seq < 0 || seq >= TR * TC) continue;
              lrow = ((col % 8) * 32 + off) / 2;
              tr   = seq % TR;
              tc   = seq / TR;
              j    = tc * TW + ba * 4 + ch;          // bank/rank/channel = local column
              kk   = tr * TH + lrow;
              if (!acc.exists(j)) acc[j] = 0;
              acc[j] += longint'({mem[k + 1], mem[k]}) * longint'(kk % 5 + 1);
            end
          end
      check("pim_columns", acc.num(), N);
      for (int j = 0; j < N; j++) begin
        refy = 0;
        for (int kk = 0; kk < K; kk++) refy += longint'(w_of(kk, j)) * longint'(kk % 5 + 1);
        check("pim_y", acc.exists(j) ? acc[j] : -1, refy);
        n_pim_cols++;
      end
    end

    // (4) switch to the conventional mapping and back
    cfg_write(0);
    check("mode0", col_l_bits, 0);
    if (col_l_bits == 0) n_mode_switch++;
    cur_cl = 0;
    stream_on = 1; last_ch = -1;
    begin
      int sw0;
      sw0 = n_ch_switch;
      for (int i = 0; i < 64; i++) npu_issue(33'h1_0000_0000 + i * 2, 1'b1, 16'(i * 77 + 5));
      for (int i = 0; i < 64; i++) begin
        exp_q.push_back(16'(i * 77 + 5));
        npu_issue(33'h1_0000_0000 + i * 2, 1'b0, 16'h0);
      end
      wait_idle();
      check("conv_switches", n_ch_switch - sw0, 2 * 3 + 1);  // a new channel every 32 B
    end
    stream_on = 0;
    cfg_write(3);
    check("mode3", col_l_bits, 3);
    if (col_l_bits == 3) n_mode_switch++;
    cur_cl = 3;

    check("stall_seen", n_stall > 0, 1);
    check("backpressure_seen", n_backpressure > 0, 1);
    check("ch_switch_seen", n_ch_switch > 0, 1);
    check("cfg_refused_seen", n_cfg_refused > 0, 1);
    check("mode_switch_seen", n_mode_switch, 2);
    check("pim_seen", n_pim_cols > 0, 1);
    check("reads_checked", exp_q.size(), 0);
    $display("stalls=%0d backpressure=%0d ch_switches=%0d cfg_refused=%0d mode_switches=%0d pim_cols=%0d writes=%0d reads=%0d",
             n_stall, n_backpressure, n_ch_switch, n_cfg_refused, n_mode_switch, n_pim_cols,
             n_writes, n_reads);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
