// tb_compute_engine: a small engine (TM=2, TN=2, TZ=2, TR=2, TC=3) with the
// input and weight buffers modelled by testbench arrays. It runs 3D passes
// (two channels, each two depth slices deep, joined by FIFO-D) and 2D passes
// (four independent channels summed by both tree levels), with stride 2 and 3,
// adds the results leaving the engine into an output block per output channel,
// and compares with the deconvolution of the tile computed here. Also checks
// the compute window (mac_active exactly KV + TC cycles per pass) and that
// done arrives.
module tb_compute_engine;
  import dcnn_pkg::*;
  localparam int unsigned TM = 2, TN = 2, TZ = 2, TR = 2, TC = 3, K = 3;
  localparam int unsigned A = TN * TZ, L = TR * TZ, KV = K * K * K;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic mode3d = 1'b1;
  logic [1:0] stride = 2'd2;
  logic start = 1'b0, done, busy, mac_active;
  logic [cw(TC)-1:0] ib_col;
  logic [cw(KV)-1:0] wb_k;
  data_t ib_act [A][TR];
  data_t wb_w [TM][A];
  logic out_vld [TM][L];
  tag_t out_tag [TM][L];
  acc_t out_val [TM][L];

  compute_engine #(.TM(TM), .TN(TN), .TZ(TZ), .TR(TR), .TC(TC), .K(K)) u_dut (.*);

  int act [A][TR][TC];
  int wt  [TM][A][KV];
  int got [TM][16][16][16];
  int checks = 0, failures = 0, n_mac = 0;

  always_comb begin
    for (int a = 0; a < A; a++)
      for (int r = 0; r < TR; r++) ib_act[a][r] = data_t'(act[a][r][ib_col]);
    for (int m = 0; m < TM; m++)
      for (int a = 0; a < A; a++) wb_w[m][a] = data_t'(wt[m][a][wb_k]);
  end

  always @(posedge clk) if (rst_n) begin
    if (mac_active) n_mac++;
    for (int m = 0; m < TM; m++)
      for (int l = 0; l < L; l++)
        if (out_vld[m][l]) got[m][out_tag[m][l].od][out_tag[m][l].oh][out_tag[m][l].ow] += out_val[m][l];
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic pass(input bit m3d, input int s);
    int ref_o [TM][16][16][16];
    int kd_n, kv, eh, ew, ed, t;
    kd_n = m3d ? K : 1;
    kv = kd_n * K * K;
    foreach (act[a, r, c]) act[a][r][c] = int'($urandom_range(0, 40)) - 20;
    foreach (wt[m, a, k]) wt[m][a][k] = int'($urandom_range(0, 40)) - 20;
    // in 3D the planes of one channel share its kernel
    if (m3d) foreach (wt[m, a, k]) wt[m][a][k] = wt[m][(a / TZ) * TZ][k];
    foreach (ref_o[m, i, j, k]) ref_o[m][i][j][k] = 0;
    foreach (got[m, i, j, k]) got[m][i][j][k] = 0;
    for (int m = 0; m < TM; m++)
      for (int a = 0; a < A; a++)
        for (int r = 0; r < TR; r++)
          for (int c = 0; c < TC; c++)
            for (int kd = 0; kd < kd_n; kd++)
              for (int kh = 0; kh < K; kh++)
                for (int kw = 0; kw < K; kw++) begin
                  int z;
                  z = m3d ? a % TZ : 0;
                  ref_o[m][m3d ? z * s + kd : 0][r * s + kh][c * s + kw] +=
                    act[a][r][c] * wt[m][a][(kd * K + kh) * K + kw];
                end
    mode3d = m3d; stride = 2'(s); n_mac = 0;
    @(negedge clk) start = 1'b1;
    @(negedge clk) start = 1'b0;
    t = 0;
    while (!done && t < 2000) begin @(negedge clk); t++; end
    checks++;
    if (!done) begin failures++; $display("no done"); end
    checks++;
    if (n_mac != kv + TC) begin failures++; $display("compute window %0d, expected %0d", n_mac, kv + TC); end
    eh = (TR - 1) * s + K; ew = (TC - 1) * s + K; ed = m3d ? (TZ - 1) * s + K : 1;
    for (int m = 0; m < TM; m++)
      for (int d = 0; d < ed; d++)
        for (int h = 0; h < eh; h++)
          for (int w = 0; w < ew; w++) begin
            checks++;
            if (got[m][d][h][w] != ref_o[m][d][h][w]) begin
              failures++;
              $display("%s S=%0d m%0d (%0d,%0d,%0d): got %0d expected %0d", m3d ? "3D" : "2D", s,
                       m, d, h, w, got[m][d][h][w], ref_o[m][d][h][w]);
            end
          end
  endtask

  initial begin
    foreach (act[a, r, c]) act[a][r][c] = 0;
    foreach (wt[m, a, k]) wt[m][a][k] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    repeat (2) @(posedge clk);
    pass(1'b1, 2);
    pass(1'b0, 2);
    pass(1'b1, 2);
    pass(1'b1, 3);
    pass(1'b0, 3);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
