// tb_umdam_opt_block -- workload test: the weights of one OPT decoder block
// placed through the UMDAM front end at its default parameters.
//
// OPT-125M has embedding dimension 768; its decoder block holds four
// 768 x 768 attention projections (Q, K, V, output) and two feed-forward
// matrices, 768 x 3072 and 3072 x 768 (feed-forward width 4 x 768), about
// 7.1 million FP16 weights. Each matrix is a right-hand operand (K input
// rows, N output columns) and is placed with the loader, one after the
// other in consecutive tile numbers. The DRAM side is always ready, so the
// load must run at one weight per cycle.
//
// On every write the DRAM model acts as the PIM unit of the addressed
// bank: from the DRAM address alone (tile number from {Row, Col_M}, local
// row from {Col_L, Offset}, column from the bank/channel) it works out the
// matrix, row k and column j, checks the data against the weight W_m(k, j)
// and accumulates y_m[j] += W_m(k, j) * x[k]. At the end every y_m is
// compared with a direct matrix-vector product: the decode-phase GEMV done
// by the banks on the single stored copy. The last tile of every matrix is
// also kept, and the NPU then streams those six 16 KiB tiles through the
// front end and checks each element in NN tile order: the prefill-phase
// access to the same copy, with channel interleaving counted.
module tb_umdam_opt_block;
  import umdam_pkg::*;

  localparam int D   = 768;         // embedding dimension of OPT-125M
  localparam int FF  = 4 * D;       // feed-forward width
  localparam int NM  = 6;
  localparam int TH  = 128, TW = 64, TBYTES = TH * TW * 2;

  int mk [NM], mn [NM], mbase [NM];

  logic        clk = 0, rst_n = 0;
  logic        cfg_ready;
  logic [2:0]  col_l_bits;
  logic        ld_start = 0, ld_busy, ld_done;
  logic [15:0] ld_ntr = 0, ld_ntc = 0;
  logic [21:0] ld_base = 0;
  logic [27:0] ld_row, ld_col;
  logic [15:0] ld_data;
  logic        npu_valid = 0, npu_ready;
  logic [32:0] npu_pa = 0;
  logic [3:0]  dram_valid;
  logic [15:0] dram_row;
  logic [5:0]  dram_col;
  logic [3:0]  dram_bank;
  logic [0:0]  dram_rank;
  logic [1:0]  dram_ch;
  logic [4:0]  dram_off;
  logic        dram_we;
  logic [15:0] dram_wdata;
  req_src_e    dram_src;
  int          cur_m = 0;

  umdam_mc_frontend dut (
    .clk(clk), .rst_n(rst_n),
    .cfg_we(1'b0), .cfg_col_l_bits(3'd3), .cfg_ready(cfg_ready), .col_l_bits(col_l_bits),
    .ld_start(ld_start), .ld_num_tile_row(ld_ntr), .ld_num_tile_col(ld_ntc),
    .ld_base_tile(ld_base), .ld_busy(ld_busy), .ld_done(ld_done),
    .ld_elem_row(ld_row), .ld_elem_col(ld_col), .ld_elem_data(ld_data),
    .npu_valid(npu_valid), .npu_ready(npu_ready), .npu_we(1'b0), .npu_pa(npu_pa),
    .npu_wdata(16'h0),
    .dram_valid(dram_valid), .dram_ready(4'hf), .dram_row(dram_row),
    .dram_col(dram_col), .dram_bank(dram_bank), .dram_rank(dram_rank), .dram_ch(dram_ch),
    .dram_off(dram_off), .dram_we(dram_we), .dram_wdata(dram_wdata), .dram_src(dram_src)
  );

  always #5 clk = ~clk;

  int checks = 0, failures = 0, n_ch_switch = 0, n_pim_cols = 0;

  task automatic check(input string what, input longint got, input longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %0d exp %0d", what, got, exp);
    end
  endtask

  function automatic logic [15:0] w_of(input int m, input int r, input int c);
    return 16'((r * 37 + c * 11 + m * 1009 + (r & c)) & 16'hffff);
  endfunction
  function automatic int x_of(input int k);
    return k % 9 + 1;
  endfunction
  assign ld_data = w_of(cur_m, int'(ld_row), int'(ld_col));

  longint      y [NM][FF];           // PIM results
  logic [15:0] kept [longint];       // last tile of each matrix, by element address
  int          n_bad_write = 0, n_writes = 0;
  int          last_ch = -1;
  longint unsigned exp_q[$];

  // DRAM + per-bank PIM unit
  always @(negedge clk) begin
    #4;
    if (dram_valid != 0) begin
      int seq, lrow, j, k, m, ls, ntr;
      seq  = int'(dram_row) * 8 + int'(dram_col) / 8;
      lrow = ((int'(dram_col) % 8) * 32 + int'(dram_off)) / 2;
      if (dram_we) begin
        n_writes++;
        m = -1;
        for (int q = 0; q < NM; q++)
          if (seq >= mbase[q] && seq < mbase[q] + (mk[q] / TH) * (mn[q] / TW)) m = q;
        if (m < 0) n_bad_write++;
        else begin
          ntr = mk[m] / TH;
          ls  = seq - mbase[m];
          k   = (ls % ntr) * TH + lrow;
          j   = (ls / ntr) * TW + int'(dram_bank) * 4 + int'(dram_ch);
          if (dram_wdata != w_of(m, k, j)) n_bad_write++;
          y[m][j] += longint'(dram_wdata) * longint'(x_of(k));
          if (ls == ntr * (mn[m] / TW) - 1)
            kept[(longint'(seq) << 20) | (longint'(dram_bank) << 12)
                 | (longint'(dram_ch) << 10) | lrow] = dram_wdata;
        end
      end else begin
        logic [15:0] got;
        longint      key;
        key = (longint'(seq) << 20) | (longint'(dram_bank) << 12)
            | (longint'(dram_ch) << 10) | lrow;
        got = kept.exists(key) ? kept[key] : 16'hdead;
        check("npu_rd", got, exp_q.pop_front());
        if (last_ch >= 0 && last_ch != int'(dram_ch)) n_ch_switch++;
        last_ch = int'(dram_ch);
      end
    end
  end

  initial begin
    repeat (16 * D * D + 1000000) @(posedge clk);   // 12 D^2 weights + reads
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int base, cyc, total;
    mk = '{D, D, D, D, D, FF};
    mn = '{D, D, D, D, FF, D};
    base = 0;
    for (int m = 0; m < NM; m++) begin
      mbase[m] = base;
      base += (mk[m] / TH) * (mn[m] / TW);
    end
    foreach (y[m, j]) y[m][j] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    // placement, one matrix after the other
    total = 0;
    for (int m = 0; m < NM; m++) begin
      cur_m = m;
      ld_ntr = 16'(mk[m] / TH); ld_ntc = 16'(mn[m] / TW); ld_base = 22'(mbase[m]);
      ld_start = 1;
      @(negedge clk);
      ld_start = 0;
      cyc = 0;
      while (!ld_done) begin @(negedge clk); cyc++; end
      check("load_cycles", cyc, mk[m] * mn[m]);     // one weight per cycle
      total += mk[m] * mn[m];
      @(negedge clk);
    end
    @(negedge clk);
    check("writes", n_writes, total);
    check("bad_writes", n_bad_write, 0);
    // decode-phase GEMV by the bank-local PIM units
    for (int m = 0; m < NM; m++)
      for (int j = 0; j < mn[m]; j++) begin
        longint r;
        r = 0;
        for (int k = 0; k < mk[m]; k++) r += longint'(w_of(m, k, j)) * longint'(x_of(k));
        check("pim_y", y[m][j], r);
        n_pim_cols++;
      end
    // prefill-phase NPU stream over the last tile of each matrix
    for (int m = 0; m < NM; m++) begin
      int seq, tr, tc;
      seq = mbase[m] + (mk[m] / TH) * (mn[m] / TW) - 1;
      tr  = mk[m] / TH - 1;
      tc  = mn[m] / TW - 1;
      for (int i = 0; i < TH * TW; i++) begin
        exp_q.push_back(w_of(m, tr * TH + i % TH, tc * TW + i / TH));
        npu_valid = 1;
        npu_pa    = 33'(longint'(seq) * TBYTES + longint'(i) * 2);
        #4;
        while (!npu_ready) begin @(negedge clk); #4; end
        @(negedge clk);
      end
      npu_valid = 0;
    end
    repeat (4) @(negedge clk);
    check("reads_done", exp_q.size(), 0);
    check("ch_switches", n_ch_switch, NM * (TH * TW / 128) - 1);
    check("pim_seen", n_pim_cols, 4 * D + FF + D);
    $display("weights=%0d tiles=%0d pim_cols=%0d ch_switches=%0d", total, base, n_pim_cols,
             n_ch_switch);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
