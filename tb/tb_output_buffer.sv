// tb_output_buffer: a small output buffer (TM=2, TZ=2, TR=2, TC=2, SMAX=3).
// Waits for the self-clear after reset, then for many cycles sends up to TR x
// TZ results per output channel with distinct random coordinates, keeping a
// model of the accumulated sums; finally reads every entry through the
// read-and-clear port, compares it, and reads again to check it was cleared.
module tb_output_buffer;
  import dcnn_pkg::*;
  localparam int unsigned TM = 2, TZ = 2, TR = 2, TC = 2, K = 3, SMAX = 3;
  localparam int unsigned L = TR * TZ;
  localparam int unsigned OBH = (TR - 1) * SMAX + K, OBW = (TC - 1) * SMAX + K, OBD = (TZ - 1) * SMAX + K;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic acc_vld [TM][L];
  tag_t acc_tag [TM][L];
  acc_t acc_val [TM][L];
  logic rd_en = 1'b0;
  logic [cw(TM)-1:0] rd_m = '0;
  tag_t rd_tag = '0;
  acc_t rd_data;
  logic init_busy;

  output_buffer #(.TM(TM), .TZ(TZ), .TR(TR), .TC(TC), .K(K), .SMAX(SMAX)) u_dut (.*);

  int model [TM][OBD][OBH][OBW];
  int checks = 0, failures = 0;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    foreach (model[m, d, h, w]) model[m][d][h][w] = 0;
    for (int m = 0; m < TM; m++) for (int l = 0; l < L; l++) begin
      acc_vld[m][l] = 1'b0; acc_tag[m][l] = '0; acc_val[m][l] = '0;
    end
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    while (init_busy) @(negedge clk);
    for (int i = 0; i < 400; i++) begin
      for (int m = 0; m < TM; m++) begin
        int used [$];
        used.delete();
        for (int l = 0; l < L; l++) begin
          int h, w, d, key;
          do begin
            h = $urandom_range(0, OBH - 1); w = $urandom_range(0, OBW - 1); d = $urandom_range(0, OBD - 1);
            key = (d * OBH + h) * OBW + w;
          end while (key inside {used});
          used.push_back(key);
          acc_vld[m][l] = ($urandom_range(0, 2) != 0);
          acc_tag[m][l] = '{oh: TAG_W'(h), ow: TAG_W'(w), od: TAG_W'(d)};
          acc_val[m][l] = acc_t'(int'($urandom_range(0, 2000)) - 1000);
          if (acc_vld[m][l]) model[m][d][h][w] += acc_val[m][l];
        end
      end
      @(negedge clk);
    end
    for (int m = 0; m < TM; m++) for (int l = 0; l < L; l++) acc_vld[m][l] = 1'b0;
    for (int pass = 0; pass < 2; pass++)
      for (int m = 0; m < TM; m++)
        for (int d = 0; d < OBD; d++)
          for (int h = 0; h < OBH; h++)
            for (int w = 0; w < OBW; w++) begin
              rd_en = 1'b1; rd_m = cw(TM)'(m);
              rd_tag = '{oh: TAG_W'(h), ow: TAG_W'(w), od: TAG_W'(d)};
              #1;
              checks++;
              if (rd_data != (pass == 0 ? model[m][d][h][w] : 0)) begin
                failures++;
                $display("pass %0d m%0d (%0d,%0d,%0d): %0d expected %0d", pass, m, d, h, w, rd_data,
                         pass == 0 ? model[m][d][h][w] : 0);
              end
              @(negedge clk);
            end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
