// tb_pe_array: one 3 x 3 PE plane in 2D mode. For several random tiles and
// kernels (stride 2, with overlaps, and stride 3, without) it loads the
// activations column by column, streams the K*K weights into the leftmost
// column, collects the results leaving the rows and adds them up by their
// output-block coordinates. Checks: every output-block position is emitted by
// exactly one PE (overlaps were merged inside the plane), its value equals the
// scatter-add deconvolution of the tile, and the plane is idle again within
// the expected number of cycles.
module tb_pe_array;
  import dcnn_pkg::*;
  localparam int unsigned K = 3, TR = 3, TC = 3, TZ = 1;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic          mode3d = 1'b0;
  logic [1:0]    stride = 2'd2;
  logic [TC-1:0] act_load = '0;
  data_t         act_in [TR];
  logic          w_vld = 1'b0;
  data_t         w_in = '0;
  logic          dvi [TR][TC], dvo [TR][TC];
  acc_t          di [TR][TC], dout [TR][TC];
  logic          res_vld [TR];
  res_t          res [TR];
  logic          busy;

  pe_array #(.K(K), .TR(TR), .TC(TC), .TZ(TZ), .Z(0)) u_dut (
    .clk, .rst_n, .mode3d, .stride, .act_load, .act_in, .w_vld, .w_in,
    .ov_d_in_vld(dvi), .ov_d_in(di), .ov_d_out_vld(dvo), .ov_d_out(dout),
    .res_vld, .res, .busy);

  int checks = 0, failures = 0;
  int got [16][16];
  int cnt [16][16];
  int n_out;

  initial begin
    for (int x = 0; x < TR; x++) for (int y = 0; y < TC; y++) begin dvi[x][y] = 1'b0; di[x][y] = '0; end
    for (int x = 0; x < TR; x++) act_in[x] = '0;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n) begin
    for (int x = 0; x < TR; x++)
      if (res_vld[x]) begin
        got[res[x].tag.oh][res[x].tag.ow] += res[x].val;
        cnt[res[x].tag.oh][res[x].tag.ow] += 1;
        n_out++;
      end
  end

  task automatic run(input int s);
    int a [TR][TC];
    int w [K][K];
    int ref_o [16][16];
    int ext, t_end;
    ext = (TR - 1) * s + K;
    foreach (a[i, j]) a[i][j] = int'($urandom_range(0, 40)) - 20;
    foreach (w[i, j]) w[i][j] = int'($urandom_range(0, 40)) - 20;
    foreach (ref_o[i, j]) ref_o[i][j] = 0;
    foreach (got[i, j]) begin got[i][j] = 0; cnt[i][j] = 0; end
    n_out = 0;
    for (int h = 0; h < TR; h++) for (int c = 0; c < TC; c++)
      for (int kh = 0; kh < K; kh++) for (int kw = 0; kw < K; kw++)
        ref_o[h * s + kh][c * s + kw] += a[h][c] * w[kh][kw];
    stride = 2'(s);
    // cycle t: column t loads, weight t enters column 0
    for (int t = 0; t < K * K; t++) begin
      @(negedge clk);
      act_load = '0;
      if (t < TC) begin
        act_load[t] = 1'b1;
        for (int x = 0; x < TR; x++) act_in[x] = data_t'(a[x][t]);
      end
      w_vld = 1'b1;
      w_in  = data_t'(w[t / K][t % K]);
    end
    @(negedge clk);
    w_vld = 1'b0; act_load = '0;
    t_end = 0;
    while (busy && t_end < 200) begin @(negedge clk); t_end++; end
    repeat (2) @(negedge clk);
    checks++;
    // own work ends at K*K + TC; the longest row then drains its results
    if (t_end > TC + 3 * K * K * TC) begin failures++; $display("drain took %0d cycles", t_end); end
    for (int i = 0; i < ext; i++)
      for (int j = 0; j < ext; j++) begin
        checks++;
        if (cnt[i][j] != 1 || got[i][j] != ref_o[i][j]) begin
          failures++;
          $display("S=%0d pos (%0d,%0d): got %0d x%0d expected %0d", s, i, j, got[i][j], cnt[i][j], ref_o[i][j]);
        end
      end
    checks++;
    if (n_out != ext * ext) begin failures++; $display("%0d results, expected %0d", n_out, ext * ext); end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    repeat (2) @(posedge clk);
    for (int r = 0; r < 4; r++) run(2);
    run(3);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
