// tb_page_color_mapper: checks the page-coloring address split
// Row[31:17] | Bank[16:13] | Channel[12] | Column[11:3] | Byte[2:0],
// the color {bank, channel}, its owning SM (color / 4) and the local flag,
// on directed and random addresses, against shifts and masks written here.
module tb_page_color_mapper;
  import temp_pkg::*;
  logic [31:0] addr;
  logic [2:0]  req_sm;
  logic        ch;
  logic [3:0]  bank;
  logic [14:0] row;
  logic [8:0]  col;
  logic [4:0]  color;
  logic [2:0]  home;
  logic        loc;
  int checks = 0, failures = 0;

  page_color_mapper dut (.addr, .req_sm, .channel(ch), .bank, .row, .col, .color,
                         .home_sm(home), .local_access(loc));

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  task automatic one(logic [31:0] a, logic [2:0] s);
    int e_col, e_ch, e_bank, e_row, e_color, e_home;
    addr = a; req_sm = s; #1;
    e_col = (a >> 3) & 32'h1FF;
    e_ch = (a >> 12) & 1;
    e_bank = (a >> 13) & 32'hF;
    e_row = (a >> 17) & 32'h7FFF;
    e_color = e_bank * 2 + e_ch;
    e_home = e_color / 4;
    check(int'(col) == e_col && int'(ch) == e_ch && int'(bank) == e_bank && int'(row) == e_row,
          $sformatf("fields of %h", a));
    check(int'(color) == e_color && int'(home) == e_home, $sformatf("color/home of %h", a));
    check(loc == (e_home == int'(s)), $sformatf("local flag of %h from SM %0d", a, s));
  endtask

  initial begin
    one(32'h0000_0000, 0);
    one(32'h0000_1000, 0);       // channel 1, bank 0: color 1, SM 0
    one(32'h0000_2000, 0);       // bank 1: color 2, SM 0
    one(32'h0000_8000, 1);       // bank 4: color 8, SM 2 -> remote
    one(32'h0000_8000, 2);       // local
    one(32'h0001_FFF8, 7);       // bank 15, ch 1: color 31, SM 7
    one(32'hFFFE_0000, 0);       // top row
    repeat (500) one($urandom, 3'($urandom_range(0, 7)));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
