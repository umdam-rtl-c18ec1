// tb_umdam_layout_agen -- self-checking test of the UMDAM weight-placement
// address generator at its default sizes (64 banks in total, FP16).
//
// For several matrices (given in tiles) and Col_L widths it counts the
// k-th accepted element, works out from k alone which tile and which local
// row/column that element is in, builds the expected address by packing
// the fields Row|Col_M|Bank|Rank|Channel|Col_L|Offset at their fixed
// positions, and compares address, matrix row/column and the last flag.
// It then checks the layout's two promises on the produced addresses:
// every matrix column stays in one (channel, bank), and the addresses
// form a gap-free range. Rate: with out_ready held high, N elements take
// N cycles; with random back-pressure nothing is lost or repeated. An
// empty matrix finishes with a done pulse and no element.
module tb_umdam_layout_agen;
  import umdam_pkg::*;

  logic         clk = 0, rst_n = 0, start = 0, ready = 1;
  logic [2:0]   cl;
  logic [15:0]  ntr, ntc;
  logic [21:0]  base;
  logic         busy, valid, last, done;
  logic [32:0]  pa;
  logic [27:0]  orow, ocol;

  int checks = 0, failures = 0;

  umdam_layout_agen dut (
    .clk(clk), .rst_n(rst_n), .start(start), .col_l_bits(cl),
    .num_tile_row(ntr), .num_tile_col(ntc), .base_tile(base),
    .busy(busy), .out_valid(valid), .out_ready(ready), .out_pa(pa),
    .out_row(orow), .out_col(ocol), .out_last(last), .done(done)
  );

  always #5 clk = ~clk;

  task automatic check(input string what, input longint got, input longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %0d exp %0d", what, got, exp);
    end
  endtask

  // Expected address of element k of the walk.
  function automatic longint unsigned exp_pa(input int k, input int n, input int r_tiles,
                                             input int b);
    int th, lr, lc, tr, tc, seq;
    longint unsigned row, colm, ba, ch, coll, off;
    th   = (32 << n) / 2;
    lr   = k % th;
    lc   = (k / th) % 64;
    tr   = (k / (th * 64)) % r_tiles;
    tc   = k / (th * 64 * r_tiles);
    seq  = b + tc * r_tiles + tr;
    off  = (lr * 2) % 32;
    coll = (lr * 2) / 32;
    ch   = lc % 4;
    ba   = lc / 4;
    colm = seq % (1 << (6 - n));
    row  = seq / (1 << (6 - n));
    return (row << 17) | (colm << (11 + n)) | (ba << (7 + n)) | (ch << (5 + n))
         | (coll << 5) | off;
  endfunction

  task automatic run(input int n, input int r_tiles, input int c_tiles, input int b,
                     input bit random_ready);
    int total, k, cycles, th, sbank[int];
    longint unsigned e, lo, hi;
    bit done_seen;
    th    = (32 << n) / 2;
    total = th * 64 * r_tiles * c_tiles;
    @(negedge clk);
    cl = 3'(n); ntr = 16'(r_tiles); ntc = 16'(c_tiles); base = 22'(b);
    start = 1;
    @(negedge clk);
    start = 0;
    k = 0; cycles = 0; done_seen = 0;
    lo = '1; hi = 0;
    while (!done_seen && cycles < total * 4 + 20) begin
      ready = random_ready ? 1'($urandom % 3 != 0) : 1'b1;
      #1;
      if (valid && ready) begin
        e = exp_pa(k, n, r_tiles, b);
        if (k < 3000 || k % 97 == 0) begin
          check("pa", pa, e);
          check("row", orow, (k / (th * 64)) % r_tiles * th + k % th);
          check("col", ocol, (k / (th * 64 * r_tiles)) * 64 + (k / th) % 64);
        end else if (pa != e) begin
          check("pa", pa, e);
        end
        // column -> (channel, bank) must never change (fixed slicing)
        begin
          int key, cb;
          key = int'(ocol);
          cb  = int'((pa >> (5 + n)) % 64);
          if (sbank.exists(key)) begin
            if (sbank[key] != cb) check("col_in_one_bank", cb, sbank[key]);
          end else sbank[key] = cb;
        end
        if (pa < lo) lo = pa;
        if (pa > hi) hi = pa;
        check("last", last, k == total - 1);
        k++;
      end
      @(negedge clk);
      cycles++;
      if (done) done_seen = 1;
    end
    check("count", k, total);
    check("done", done_seen, 1);
    check("span", hi - lo + 2, longint'(total) * 2);
    check("columns", sbank.num(), 64 * c_tiles);
    if (!random_ready) check("cycles", cycles, total);   // one element per cycle
  endtask

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    cl = 3; ntr = 0; ntc = 0; base = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    run(3, 2, 3, 0, 0);          // 256 B tiles: 128 x 64, 2 x 3 tiles
    run(3, 3, 2, 1000, 1);       // with back-pressure and a base tile
    run(1, 2, 2, 5, 0);          // 64 B tiles
    run(0, 1, 3, 77, 1);         // conventional granularity
    run(6, 1, 1, 3, 0);          // whole-row tiles
    // empty matrix
    @(negedge clk);
    ntr = 0; ntc = 4; start = 1;
    @(negedge clk);
    start = 0;
    check("empty_no_valid", valid, 0);
    check("empty_done", done, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
