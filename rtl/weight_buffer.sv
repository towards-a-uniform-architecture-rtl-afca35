// weight_buffer: on-chip buffer holding the kernels used in one pass: for each
// of the TM output channels and each of the A = TN x TZ PE arrays, the KV
// weights (KV = K*K in 2D, K*K*K in 3D) of kernel W(.,.,., ic, oc).
//
// The memory controller writes one weight per cycle. In 3D mode the TZ arrays
// of one input channel use the same kernel, so a write with bcast set stores
// the word for all TZ arrays of channel n at once. clr zeroes the buffer so
// that channels beyond the layer's channel count contribute nothing. During
// computation rd_k selects kernel element k and rd_w returns it for every
// (output channel, array) pair; the engine feeds rd_w[m][a] to the leftmost
// column of array a in group m. Reads are combinational. The paper names the
// buffer and its role; the organisation is this design's.
module weight_buffer
  import dcnn_pkg::*;
#(
  parameter int unsigned TM = 2,
  parameter int unsigned TN = 16,
  parameter int unsigned TZ = 4,
  parameter int unsigned K  = 3,
  localparam int unsigned A  = TN * TZ,
  localparam int unsigned KV = K * K * K
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  clr,
  input  logic                  wr_en,
  input  logic                  wr_bcast,
  input  logic [cw(TM)-1:0] wr_m,
  input  logic [cw(A)-1:0]  wr_arr,
  input  logic [cw(KV)-1:0] wr_k,
  input  data_t                 wr_data,
  input  logic [cw(KV)-1:0] rd_k,
  output data_t                 rd_w [TM][A]
);
  data_t mem [TM][A][KV];

  always_ff @(posedge clk) begin
    if (!rst_n || clr) begin
      for (int m = 0; m < TM; m++)
        for (int a = 0; a < A; a++)
          for (int k = 0; k < KV; k++) mem[m][a][k] <= '0;
    end else if (wr_en) begin
      for (int a = 0; a < A; a++)
        if (a == int'(wr_arr) || (wr_bcast && (a / TZ) == (int'(wr_arr) / TZ)))
          mem[wr_m][a][wr_k] <= wr_data;
    end
  end

  always_comb begin
    for (int m = 0; m < TM; m++)
      for (int a = 0; a < A; a++) rd_w[m][a] = mem[m][a][rd_k];
  end

endmodule
