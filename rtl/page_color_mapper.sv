// page_color_mapper: DRAM address mapping used for page coloring.
//
// A physical address is split, from the most significant bit down, into
//   Row | Bank | Channel | Column | Byte offset
// The column and byte-offset fields together span exactly the 4 KB page offset,
// so the bank and channel bits sit in the page frame number: the operating
// system picks a page's bank and channel (its "color") just by picking the
// frame. The color {bank, channel} therefore names one of NUM_BANKS*NUM_CH banks
// that a page lives in. Each SM owns an equal, contiguous group of colors
// (SM s owns colors s*CPS .. s*CPS+CPS-1, CPS = colors per SM = 4 here); the
// mapper reports the owning SM and whether the requesting SM is that owner
// (a local access) or not (remote).
//
// Purely combinational. The field order follows the paper's page-coloring
// mapping; the field widths and the color-to-SM assignment are this design's.
module page_color_mapper
  import temp_pkg::*;
#(
  parameter int N_SM  = NUM_SM,
  localparam int SMW  = (N_SM > 1) ? $clog2(N_SM) : 1,
  localparam int NCOL = NUM_CH * NUM_BANKS,
  localparam int CPS  = NCOL / N_SM
) (
  input  logic [PA_W-1:0]    addr,
  input  logic [SMW-1:0]     req_sm,
  output logic [CH_W-1:0]    channel,
  output logic [BANK_W-1:0]  bank,
  output logic [ROW_W-1:0]   row,
  output logic [COL_W-1:0]   col,
  output logic [COLOR_W-1:0] color,
  output logic [SMW-1:0]     home_sm,
  output logic               local_access
);

  localparam int COL_LSB  = BYTE_OFF_W;
  localparam int CH_LSB   = COL_LSB + COL_W;
  localparam int BANK_LSB = CH_LSB + CH_W;
  localparam int ROW_LSB  = BANK_LSB + BANK_W;

  assign col     = addr[CH_LSB-1:COL_LSB];
  assign channel = addr[BANK_LSB-1:CH_LSB];
  assign bank    = addr[ROW_LSB-1:BANK_LSB];
  assign row     = addr[PA_W-1:ROW_LSB];
  assign color   = {bank, channel};
  assign home_sm = SMW'(int'(color) / CPS);
  assign local_access = (home_sm == req_sm);

endmodule
