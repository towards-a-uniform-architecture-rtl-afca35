// tb_pe: two processing elements of a 2-row column in 2D mode, stride 2.
// The top PE (X=0) gets three overlap values in FIFO-V, as its lower
// neighbour would send them, and must add them to its kh = 2 elements; the
// bottom PE (X=1) must send its kh = 0 products upward and keep the rest.
// Checks: every product and sum, the output-block tag of each result, the
// one-cycle weight forwarding to the next column, that results only leave
// after the PE's own K*K products are done, and that results pushed in from
// the right are passed on after the PE's own ones.
module tb_pe;
  import dcnn_pkg::*;
  localparam int unsigned K = 3;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic  act_load = 1'b0, w_vld = 1'b0;
  data_t act0 = '0, act1 = '0, w_in = '0;
  logic  wv0, wv1;
  data_t wo0, wo1;
  logic  v_in_vld = 1'b0;
  acc_t  v_in = '0;
  logic  vo_vld [2], ho_vld [2], do_vld [2];
  acc_t  vo [2], ho [2], dov [2];
  logic  rin_vld = 1'b0, rin_rdy0, rin_rdy1;
  res_t  rin = '0;
  logic  rv [2];
  res_t  ro [2];
  logic  rrdy = 1'b0;
  logic  busy0, busy1;

  pe #(.K(K), .X(0), .Y(0), .Z(0), .TR(2), .TC(1), .TZ(1)) u_top (
    .clk, .rst_n, .mode3d(1'b0), .stride(2'd2), .act_load, .act_in(act0),
    .w_vld_in(w_vld), .w_in, .w_vld_out(wv0), .w_out(wo0),
    .ov_v_in_vld(v_in_vld), .ov_v_in(v_in), .ov_h_in_vld(1'b0), .ov_h_in('0),
    .ov_d_in_vld(1'b0), .ov_d_in('0),
    .ov_v_out_vld(vo_vld[0]), .ov_v_out(vo[0]), .ov_h_out_vld(ho_vld[0]), .ov_h_out(ho[0]),
    .ov_d_out_vld(do_vld[0]), .ov_d_out(dov[0]),
    .res_in_vld(rin_vld), .res_in(rin), .res_in_rdy(rin_rdy0),
    .res_out_vld(rv[0]), .res_out(ro[0]), .res_out_rdy(rrdy), .busy(busy0));

  pe #(.K(K), .X(1), .Y(0), .Z(0), .TR(2), .TC(1), .TZ(1)) u_bot (
    .clk, .rst_n, .mode3d(1'b0), .stride(2'd2), .act_load, .act_in(act1),
    .w_vld_in(w_vld), .w_in, .w_vld_out(wv1), .w_out(wo1),
    .ov_v_in_vld(1'b0), .ov_v_in('0), .ov_h_in_vld(1'b0), .ov_h_in('0),
    .ov_d_in_vld(1'b0), .ov_d_in('0),
    .ov_v_out_vld(vo_vld[1]), .ov_v_out(vo[1]), .ov_h_out_vld(ho_vld[1]), .ov_h_out(ho[1]),
    .ov_d_out_vld(do_vld[1]), .ov_d_out(dov[1]),
    .res_in_vld(1'b0), .res_in('0), .res_in_rdy(rin_rdy1),
    .res_out_vld(rv[1]), .res_out(ro[1]), .res_out_rdy(rrdy), .busy(busy1));

  int checks = 0, failures = 0;
  int a0, a1, w [9], v [3];
  int n_vo = 0;
  data_t w_prev;
  logic  wv_prev;

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // weight forwarding and upward overlaps of the bottom PE
  always @(posedge clk) if (rst_n) begin
    chk(wv0 == wv_prev && (!wv_prev || wo0 == w_prev), "weight forwarded one cycle later");
    wv_prev <= w_vld;
    w_prev  <= w_in;
    if (vo_vld[1]) begin
      chk(vo[1] == a1 * w[n_vo], $sformatf("bottom overlap %0d", n_vo));
      n_vo++;
    end
    chk(!ho_vld[0] && !ho_vld[1] && !do_vld[0] && !do_vld[1] && !vo_vld[0], "no H/D/upward traffic from the top");
  end

  initial begin
    wv_prev = 1'b0; w_prev = '0;
    a0 = int'($urandom_range(0, 200)) - 100;
    a1 = int'($urandom_range(0, 200)) - 100;
    foreach (w[i]) w[i] = int'($urandom_range(0, 200)) - 100;
    foreach (v[i]) v[i] = int'($urandom_range(0, 2000)) - 1000;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    // the lower neighbour's overlaps, queued ahead
    for (int i = 0; i < 3; i++) begin
      @(negedge clk); v_in_vld = 1'b1; v_in = v[i];
    end
    @(negedge clk); v_in_vld = 1'b0;
    act_load = 1'b1; act0 = data_t'(a0); act1 = data_t'(a1);
    @(negedge clk); act_load = 1'b0;
    for (int k = 0; k < 9; k++) begin
      w_vld = 1'b1; w_in = data_t'(w[k]);
      @(negedge clk);
      chk(!rv[0] && !rv[1], "no result leaves before the PE is done");
    end
    w_vld = 1'b0;
    @(negedge clk);
    chk(n_vo == 3, "bottom PE sent three overlaps");
    // the top PE keeps all nine, the last row with the overlaps added
    rrdy = 1'b1;
    for (int k = 0; k < 9; k++) begin
      int e;
      e = a0 * w[k] + ((k / 3 == 2) ? v[k % 3] : 0);
      chk(rv[0] && ro[0].val == e && ro[0].tag.oh == 5'(k / 3) && ro[0].tag.ow == 5'(k % 3),
          $sformatf("top result %0d: %0d expected %0d", k, ro[0].val, e));
      if (k < 6) begin
        // the bottom PE keeps elements 3..8 (kh = 1, 2) and emits them in order
        e = a1 * w[k + 3];
        chk(rv[1] && ro[1].val == e && ro[1].tag.oh == 5'(2 + (k + 3) / 3) && ro[1].tag.ow == 5'(k % 3),
            $sformatf("bottom result %0d", k + 3));
      end
      @(negedge clk);
    end
    chk(!rv[0] && !rv[1] && !busy0 && !busy1, "both PEs idle");
    // result chain: a word from the right is taken and passed on
    chk(rin_rdy0, "ready for the right neighbour");
    rin_vld = 1'b1; rin.val = 32'sd12345; rin.tag = '{oh: 5'd3, ow: 5'd4, od: 5'd0};
    @(negedge clk); rin_vld = 1'b0;
    chk(rv[0] && ro[0].val == 32'sd12345 && ro[0].tag.ow == 5'd4, "forwarded result");
    @(negedge clk);
    chk(!rv[0], "chain empty");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
