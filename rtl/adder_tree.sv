// adder_tree: pipelined binary adder tree that sums N partial results which
// belong to the same output location (the same output element computed from N
// different input feature maps).
//
// The N inputs arrive in the same cycle with a common valid bit and output-block
// tag; the tree adds them pairwise over ceil(log2 N) registered levels, so the
// sum appears LAT = ceil(log2 N) cycles later (zero cycles for N = 1), with the
// valid bit and tag of input 0 delayed alongside. An odd element at any level
// is passed on unchanged. The tree uses N-1 adders, i.e. TM x TC x TZ x log2 TN
// adders over the whole engine when N = TN and the tree has TN/2 + ... + 1
// adders per lane. The paper gives the function and the adder count; the
// pipelining with one register per level is this design's choice.
module adder_tree
  import dcnn_pkg::*;
#(
  parameter int unsigned N = 16
) (
  input  logic clk,
  input  logic rst_n,
  input  logic in_vld,
  input  tag_t in_tag,
  input  acc_t in_val [N],
  output logic out_vld,
  output tag_t out_tag,
  output acc_t out_val
);
  localparam int unsigned LAT = (N > 1) ? $clog2(N) : 0;

  // width of each level: level l holds ceil(N / 2^l) values
  function automatic int unsigned lw(input int unsigned l);
    int unsigned w = N;
    for (int unsigned i = 0; i < l; i++) w = (w + 1) / 2;
    return w;
  endfunction

  if (LAT == 0) begin : g_pass
    assign out_vld = in_vld;
    assign out_tag = in_tag;
    assign out_val = in_val[0];
  end else begin : g_tree
    // lvl[l] holds level l+1 of the tree; unused slots stay zero
    acc_t lvl [LAT][N];
    logic vld [LAT];
    tag_t tg  [LAT];

    always_ff @(posedge clk) begin
      for (int unsigned l = 0; l < LAT; l++) begin
        for (int unsigned i = 0; i < N; i++) begin
          acc_t a, b;
          a = (l == 0) ? ((2 * i < N)     ? in_val[2*i]   : '0)
                       : ((2 * i < N)     ? lvl[l-1][2*i] : '0);
          b = (l == 0) ? ((2 * i + 1 < N) ? in_val[2*i+1] : '0)
                       : ((2 * i + 1 < N) ? lvl[l-1][2*i+1] : '0);
          lvl[l][i] <= (i < lw(l + 1)) ? a + b : '0;
        end
        tg[l] <= (l == 0) ? in_tag : tg[l-1];
      end
    end

    always_ff @(posedge clk) begin
      for (int unsigned l = 0; l < LAT; l++) begin
        if (!rst_n) vld[l] <= 1'b0;
        else        vld[l] <= (l == 0) ? in_vld : vld[l-1];
      end
    end

    assign out_vld = vld[LAT-1];
    assign out_tag = tg[LAT-1];
    assign out_val = lvl[LAT-1][0];
  end

endmodule
