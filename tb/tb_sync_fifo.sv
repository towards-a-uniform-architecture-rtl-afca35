// tb_sync_fifo: random push/pop traffic against a queue model. Checks the head
// word, empty and full after every cycle, including runs that fill the FIFO
// completely and drain it, and a synchronous flush.
module tb_sync_fifo;
  localparam int unsigned W = 12, DEPTH = 5;
  logic clk = 1'b0, rst_n = 1'b0, clr = 1'b0, wr_en = 1'b0, rd_en = 1'b0;
  logic [W-1:0] wr_data = '0, rd_data;
  logic empty, full;
  always #5 clk = ~clk;

  sync_fifo #(.W(W), .DEPTH(DEPTH)) u_dut (.*);

  int checks = 0, failures = 0, n_full = 0;
  logic [W-1:0] q[$];

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int cyc = 0; cyc < 3000; cyc++) begin
      int bias;
      @(negedge clk);
      checks++;
      if (empty != (q.size() == 0) || full != (q.size() == DEPTH)) begin
        failures++; $display("flags wrong at %0d: size %0d empty %0b full %0b", cyc, q.size(), empty, full);
      end
      if (q.size() > 0) begin
        checks++;
        if (rd_data != q[0]) begin failures++; $display("head %h expected %h", rd_data, q[0]); end
      end
      if (full) n_full++;
      bias  = ((cyc / 200) % 2 == 0) ? 3 : 1;     // alternate filling and draining phases
      wr_en = !full && ($urandom_range(0, 3) < bias);
      rd_en = !empty && ($urandom_range(0, 3) >= bias);
      wr_data = W'($urandom);
      clr = (cyc == 2500);
      @(posedge clk);
      #1;
      if (clr) q.delete();
      else begin
        if (rd_en) void'(q.pop_front());
        if (wr_en) q.push_back(wr_data);
      end
    end
    checks++;
    if (n_full == 0) begin failures++; $display("never full"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
