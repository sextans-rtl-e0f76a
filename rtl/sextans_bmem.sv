// sextans_bmem: the on-chip B window memory of one PE ("B Mem.").
//
// Holds one window B_ji: K0 rows of N0 FP32 values (K0 = 4096, N0 = 8 in the
// paper). The paper streams a window in at 2*F_B = 8 rows per cycle (BRAM
// partitioned by F_B = 4, two ports each) and reads one row of N0 values per
// cycle by a_col. Here the rows are spread over WR_ROWS = 8 banks by
// row mod 8 so that all 8 rows of one write word land in different banks;
// a read selects the bank by the low bits of the column index.
// Write: wr_en, wr_addr (index of the 8-row group), wr_data (8 rows, row
// 8*wr_addr+r in slice r). Read: rd_en, rd_addr (row); rd_data one cycle later.
// The paper shares one BRAM between two PEs; here each PE has its own copy.
module sextans_bmem
  import sextans_pkg::*;
#(
  parameter int unsigned K0      = 4096,
  parameter int unsigned N0      = 8,
  parameter int unsigned WR_ROWS = 8
) (
  input  logic                                 clk,
  input  logic                                 wr_en,
  input  logic [$clog2(K0/WR_ROWS)-1:0]         wr_addr,
  input  logic [WR_ROWS-1:0][N0-1:0][FP_W-1:0]  wr_data,
  input  logic                                 rd_en,
  input  logic [$clog2(K0)-1:0]                 rd_addr,
  output logic [N0-1:0][FP_W-1:0]               rd_data
);
  localparam int unsigned BW = $clog2(WR_ROWS);
  localparam int unsigned GW = $clog2(K0/WR_ROWS);

  logic [N0-1:0][FP_W-1:0] bank [WR_ROWS][K0/WR_ROWS];

  always_ff @(posedge clk) begin
    if (wr_en)
      for (int r = 0; r < int'(WR_ROWS); r++) bank[r][wr_addr] <= wr_data[r];
    if (rd_en)
      rd_data <= bank[rd_addr[BW-1:0]][rd_addr[BW +: GW]];
  end
endmodule
