// tb_adder_tree: feeds random vectors, one per cycle with gaps, into trees of
// 5 (odd, uneven levels), 16 and 1 inputs and checks every sum, its tag and
// that it appears exactly ceil(log2 N) cycles after its inputs.
module tb_adder_tree;
  import dcnn_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic in_vld = 1'b0;
  tag_t in_tag = '0;
  acc_t v5 [5], v16 [16], v1 [1];
  logic o5_vld, o16_vld, o1_vld;
  tag_t o5_tag, o16_tag, o1_tag;
  acc_t o5, o16, o1;

  adder_tree #(.N(5))  u_t5  (.clk, .rst_n, .in_vld, .in_tag, .in_val(v5),  .out_vld(o5_vld),  .out_tag(o5_tag),  .out_val(o5));
  adder_tree #(.N(16)) u_t16 (.clk, .rst_n, .in_vld, .in_tag, .in_val(v16), .out_vld(o16_vld), .out_tag(o16_tag), .out_val(o16));
  adder_tree #(.N(1))  u_t1  (.clk, .rst_n, .in_vld, .in_tag, .in_val(v1),  .out_vld(o1_vld),  .out_tag(o1_tag),  .out_val(o1));

  int checks = 0, failures = 0;
  int cyc = 0;
  typedef struct { int t; acc_t s5; acc_t s16; acc_t s1; tag_t tag; } exp_t;
  exp_t e5[$], e16[$];

  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // checker
  always @(negedge clk) if (rst_n) begin
    if (o5_vld) begin
      automatic exp_t e = e5.pop_front();
      checks++;
      if (o5 != e.s5 || o5_tag != e.tag || cyc - e.t != 3) begin
        failures++; $display("N=5: got %0d exp %0d, latency %0d", o5, e.s5, cyc - e.t);
      end
    end
    if (o16_vld) begin
      automatic exp_t e = e16.pop_front();
      checks++;
      if (o16 != e.s16 || o16_tag != e.tag || cyc - e.t != 4) begin
        failures++; $display("N=16: got %0d exp %0d, latency %0d", o16, e.s16, cyc - e.t);
      end
    end
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < 300; i++) begin
      exp_t e;
      @(negedge clk);
      #1;
      in_vld = ($urandom_range(0, 3) != 0);
      in_tag = tag_t'($urandom);
      e.s5 = 0; e.s16 = 0;
      foreach (v5[j])  begin v5[j]  = acc_t'($urandom) >>> 8; e.s5  += v5[j];  end
      foreach (v16[j]) begin v16[j] = acc_t'($urandom) >>> 8; e.s16 += v16[j]; end
      v1[0] = acc_t'($urandom); e.s1 = v1[0];
      e.t = cyc; e.tag = in_tag;
      if (in_vld) begin e5.push_back(e); e16.push_back(e); end
      #3;
      if (in_vld) begin
        // the one-input tree is combinational: check it right away
        checks++;
        if (!o1_vld || o1 != v1[0] || o1_tag != in_tag) begin failures++; $display("N=1 mismatch"); end
      end
    end
    @(negedge clk) in_vld = 1'b0;
    repeat (8) @(posedge clk);
    checks++;
    if (e5.size() != 0 || e16.size() != 0) begin failures++; $display("missing outputs"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
