// tb_input_buffer: writes random activations to random positions of a small
// buffer (4 arrays of 2 x 3), keeps a model, and after every write reads all
// columns and compares; also checks that clear zeroes every entry.
module tb_input_buffer;
  import dcnn_pkg::*;
  localparam int unsigned TN = 2, TZ = 2, TR = 2, TC = 3, A = TN * TZ;
  logic clk = 1'b0, rst_n = 1'b0, clr = 1'b0, wr_en = 1'b0;
  always #5 clk = ~clk;
  logic [cw(A)-1:0] wr_arr = '0;
  logic [cw(TR)-1:0] wr_r = '0;
  logic [cw(TC)-1:0] wr_c = '0, rd_col = '0;
  data_t wr_data = '0;
  data_t rd_act [A][TR];

  input_buffer #(.TN(TN), .TZ(TZ), .TR(TR), .TC(TC)) u_dut (.*);

  int model [A][TR][TC];
  int checks = 0, failures = 0;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic compare();
    for (int c = 0; c < TC; c++) begin
      rd_col = cw(TC)'(c);
      #1;
      for (int a = 0; a < A; a++)
        for (int r = 0; r < TR; r++) begin
          checks++;
          if (rd_act[a][r] != data_t'(model[a][r][c])) begin
            failures++; $display("a%0d r%0d c%0d: %0d expected %0d", a, r, c, rd_act[a][r], model[a][r][c]);
          end
        end
    end
  endtask

  initial begin
    foreach (model[a, r, c]) model[a][r][c] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < 200; i++) begin
      @(negedge clk);
      wr_en = 1'b1;
      wr_arr = cw(A)'($urandom_range(0, A - 1));
      wr_r = cw(TR)'($urandom_range(0, TR - 1));
      wr_c = cw(TC)'($urandom_range(0, TC - 1));
      wr_data = data_t'($urandom);
      @(negedge clk);
      wr_en = 1'b0;
      model[wr_arr][wr_r][wr_c] = int'(wr_data);
      compare();
    end
    @(negedge clk) clr = 1'b1;
    @(negedge clk) clr = 1'b0;
    foreach (model[a, r, c]) model[a][r][c] = 0;
    compare();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
