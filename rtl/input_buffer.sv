// input_buffer: on-chip buffer holding the activations of one pass, i.e. one
// TR x TC activation tile for each of the A = TN x TZ PE arrays.
//
// In 3D mode array a = n*TZ + z holds depth slice z of input channel n; in 2D
// mode every array holds its own input channel. The memory controller writes
// one activation per cycle; clr zeroes the whole buffer in one cycle so that
// positions outside the input map, which are never fetched, read as zero. The
// computation engine reads one column at a time: rd_col selects column c and
// rd_act returns the TR activations of that column for every array (the paper
// connects every PE directly to the input buffer). Reads are combinational.
// The paper names the buffer and its role; the organisation is this design's.
module input_buffer
  import dcnn_pkg::*;
#(
  parameter int unsigned TN = 16,
  parameter int unsigned TZ = 4,
  parameter int unsigned TR = 4,
  parameter int unsigned TC = 4,
  localparam int unsigned A = TN * TZ
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  clr,
  input  logic                  wr_en,
  input  logic [cw(A)-1:0]  wr_arr,
  input  logic [cw(TR)-1:0] wr_r,
  input  logic [cw(TC)-1:0] wr_c,
  input  data_t                 wr_data,
  input  logic [cw(TC)-1:0] rd_col,
  output data_t                 rd_act [A][TR]
);
  data_t mem [A][TR][TC];

  always_ff @(posedge clk) begin
    if (!rst_n || clr) begin
      for (int a = 0; a < A; a++)
        for (int r = 0; r < TR; r++)
          for (int c = 0; c < TC; c++) mem[a][r][c] <= '0;
    end else if (wr_en) begin
      mem[wr_arr][wr_r][wr_c] <= wr_data;
    end
  end

  always_comb begin
    for (int a = 0; a < A; a++)
      for (int r = 0; r < TR; r++) rd_act[a][r] = mem[a][r][rd_col];
  end

endmodule
