// tb_weight_buffer: random single and broadcast writes (a broadcast stores
// the word for every depth plane of the addressed channel) into a small
// weight buffer, checked after each write by reading every kernel element of
// every (output channel, array) pair against a model; then a clear.
module tb_weight_buffer;
  import dcnn_pkg::*;
  localparam int unsigned TM = 2, TN = 2, TZ = 2, K = 3, A = TN * TZ, KV = K * K * K;
  logic clk = 1'b0, rst_n = 1'b0, clr = 1'b0, wr_en = 1'b0, wr_bcast = 1'b0;
  always #5 clk = ~clk;
  logic [cw(TM)-1:0] wr_m = '0;
  logic [cw(A)-1:0] wr_arr = '0;
  logic [cw(KV)-1:0] wr_k = '0, rd_k = '0;
  data_t wr_data = '0;
  data_t rd_w [TM][A];

  weight_buffer #(.TM(TM), .TN(TN), .TZ(TZ), .K(K)) u_dut (.*);

  int model [TM][A][KV];
  int checks = 0, failures = 0, n_bc = 0;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic compare();
    for (int k = 0; k < KV; k++) begin
      rd_k = cw(KV)'(k);
      #1;
      for (int m = 0; m < TM; m++)
        for (int a = 0; a < A; a++) begin
          checks++;
          if (rd_w[m][a] != data_t'(model[m][a][k])) begin
            failures++; $display("m%0d a%0d k%0d: %0d expected %0d", m, a, k, rd_w[m][a], model[m][a][k]);
          end
        end
    end
  endtask

  initial begin
    foreach (model[m, a, k]) model[m][a][k] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < 120; i++) begin
      @(negedge clk);
      wr_en = 1'b1;
      wr_bcast = ($urandom_range(0, 1) == 1);
      wr_m = cw(TM)'($urandom_range(0, TM - 1));
      wr_arr = cw(A)'($urandom_range(0, A - 1));
      wr_k = cw(KV)'($urandom_range(0, KV - 1));
      wr_data = data_t'($urandom);
      @(negedge clk);
      wr_en = 1'b0;
      if (wr_bcast) begin
        n_bc++;
        for (int z = 0; z < TZ; z++) model[wr_m][(wr_arr / TZ) * TZ + z][wr_k] = int'(wr_data);
      end else model[wr_m][wr_arr][wr_k] = int'(wr_data);
      compare();
    end
    @(negedge clk) clr = 1'b1;
    @(negedge clk) clr = 1'b0;
    foreach (model[m, a, k]) model[m][a][k] = 0;
    compare();
    checks++;
    if (n_bc == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
