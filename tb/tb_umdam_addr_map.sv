// tb_umdam_addr_map -- self-checking test of the UMDAM address translation.
//
// Drives random physical addresses and every Col_L width 0..6 through the
// mapper at its default sizes (33-bit address, 16 row, 6 column, 4 bank,
// 0 rank, 2 channel, 5 offset bits) and compares each field with a
// reference that slices the address field by field from the LSB, written
// independently with fixed positions. Also checks the paper's worked
// example: 256 B granularity gives Col_L = 3, so the channel changes every
// 256 bytes and the bank every 1 KiB of a sequential stream.
module tb_umdam_addr_map;
  import umdam_pkg::*;

  localparam int unsigned PA_BITS = 33;

  logic [PA_BITS-1:0] pa;
  logic [2:0]         cl;
  logic [15:0]        row;
  logic [5:0]         col, col_m, col_l;
  logic [3:0]         bank;
  logic [0:0]         rank;
  logic [1:0]         ch;
  logic [4:0]         off;

  int checks = 0, failures = 0;

  umdam_addr_map dut (
    .pa(pa), .col_l_bits(cl), .row(row), .col(col), .col_m(col_m), .col_l(col_l),
    .bank(bank), .rank(rank), .ch(ch), .off(off)
  );

  task automatic check(input string what, input longint got, input longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20)
        $display("FAIL %s: pa=%h cl=%0d got %0d exp %0d", what, pa, cl, got, exp);
    end
  endtask

  // Reference: positions written out for the default field sizes.
  task automatic ref_check();
    longint unsigned a;
    int unsigned     n;
    longint unsigned e_off, e_cl, e_ch, e_bank, e_cm, e_row;
    a = longint'(pa);
    n = cl;
    e_off  = a % 32;                         // bits 4:0
    e_cl   = (a / 32) % (64'd1 << n);
    e_ch   = (a / (64'd32 << n)) % 4;
    e_bank = (a / (64'd128 << n)) % 16;
    e_cm   = (a / (64'd2048 << n)) % (64'd1 << (6 - n));
    e_row  = a / (64'd2048 << 6);            // always bits 32:17
    check("off", off, e_off);
    check("col_l", col_l, e_cl);
    check("ch", ch, e_ch);
    check("rank", rank, 0);
    check("bank", bank, e_bank);
    check("col_m", col_m, e_cm);
    check("row", row, e_row);
    check("col", col, e_cm * (64'd1 << n) + e_cl);
  endtask

  initial begin
    #1ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // random addresses, all widths
    for (int k = 0; k < 4000; k++) begin
      pa = {$urandom, $urandom};
      cl = 3'(k % 7);
      #1;
      ref_check();
    end
    // the worked example: 256 B interleaving, sequential stream
    cl = 3;
    for (int b = 0; b < 8192; b += 32) begin
      pa = PA_BITS'(b);
      #1;
      check("ex_ch", ch, (b / 256) % 4);
      check("ex_bank", bank, (b / 1024) % 16);
      check("ex_col", col, (b % 256) / 32);
    end
    // a fixed address: row 5, col_m 6, bank 9, ch 2, col_l 1, off 7
    pa = {16'd5, 3'd6, 4'd9, 2'd2, 3'd1, 5'd7};
    #1;
    check("fix_row", row, 5);  check("fix_col", col, 6 * 8 + 1);
    check("fix_bank", bank, 9); check("fix_ch", ch, 2); check("fix_off", off, 7);
    // conventional mapping (Col_L = 0): channel every 32 B
    cl = 0;
    pa = 33'd32 * 5;
    #1;
    check("conv_ch", ch, 1); check("conv_bank", bank, 1); check("conv_col", col, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
