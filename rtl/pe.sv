// pe: one processing element of the deconvolution engine, PE(X,Y) of plane Z.
//
// Input-oriented mapping: the PE holds one input activation in register Ra and
// multiplies it, one weight per cycle, by the whole KxK (2D) or KxKxK (3D)
// kernel that streams through register Rw. Each product is one element of the
// activation's KxK(xK) output block. The block of this PE overlaps the blocks
// of the PEs below (X+1), to the right (Y+1) and behind (Z+1) by K-S elements.
// The overlap FIFOs (FIFO-V from X+1, FIFO-H from Y+1, FIFO-D from plane Z+1)
// receive those neighbours' overlapping elements; when this PE reaches the
// matching element it adds the queued values to its product. An element that
// is itself an overlap is sent on to the neighbour above (X-1), to the left
// (Y-1) or in front (Z-1); every other element is final for this input
// channel and goes, with its output-block coordinates, into the result FIFO.
// After the PE has produced all its own elements, the result FIFO drains to
// the PE on the left and takes over what the PE on the right sends it.
//
// Timing: Rw, Ra and the weight-valid bit are registered; product, overlap
// addition, routing and FIFO writes happen in the cycle an element sits in Rw.
// Rw and its valid bit are forwarded to the next column (w_out), which
// therefore works one cycle behind. Weights arrive ordered kw fastest, then
// kh, then kd, as in the paper's dataflow example. With that order and the
// one-cycle column skew a neighbour's overlap is always queued before it is
// needed provided S >= 2 (checked by assertion).
//
// Follows the paper: Ra/Rw, one multiplier, three overlap FIFOs fed from the
// X+1, Y+1 and Z+1 neighbours, overlap/result switch, result FIFO chained to
// the left PE after local completion, FIFO-D disabled in 2D mode. Choices of
// this design: the PE's counter also provides the element's coordinates; an
// element that needs two or three overlap contributions (block corners) adds
// them all in one cycle (the paper's figure shows one adder behind a switch);
// a value that overlaps in several dimensions is routed D first, then V, then
// H; the route and expected inputs are decoded from the element coordinates.
//
// The overlap outputs towards a missing neighbour are constant zero: PE(0,0)
// of plane 0 (the default position) never sends up, left or forward.
module pe
  import dcnn_pkg::*;
#(
  parameter int unsigned K       = 3,
  parameter int unsigned X       = 0,
  parameter int unsigned Y       = 0,
  parameter int unsigned Z       = 0,
  parameter int unsigned TR      = 4,
  parameter int unsigned TC      = 4,
  parameter int unsigned TZ      = 4,
  parameter int unsigned D_DEPTH = (K > 2) ? K * K * (K - 2) : 1,
  parameter int unsigned V_DEPTH = (K > 2) ? K * (K - 2) : 1,
  parameter int unsigned H_DEPTH = 2,
  parameter int unsigned R_DEPTH = K * K * K
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       mode3d,
  input  logic [1:0] stride,
  // activation load (also starts a new round)
  input  logic       act_load,
  input  data_t      act_in,
  // weight stream, in from the left / column input, out to the right
  input  logic       w_vld_in,
  input  data_t      w_in,
  output logic       w_vld_out,
  output data_t      w_out,
  // overlaps arriving from X+1 (V), Y+1 (H), plane Z+1 (D)
  input  logic       ov_v_in_vld, input acc_t ov_v_in,
  input  logic       ov_h_in_vld, input acc_t ov_h_in,
  input  logic       ov_d_in_vld, input acc_t ov_d_in,
  // overlaps leaving to X-1 (V), Y-1 (H), plane Z-1 (D)
  output logic       ov_v_out_vld, output acc_t ov_v_out,
  output logic       ov_h_out_vld, output acc_t ov_h_out,
  output logic       ov_d_out_vld, output acc_t ov_d_out,
  // result chain: from the PE on the right, to the PE on the left
  input  logic       res_in_vld,
  input  res_t       res_in,
  output logic       res_in_rdy,
  output logic       res_out_vld,
  output res_t       res_out,
  input  logic       res_out_rdy,
  output logic       busy
);
  localparam int unsigned KW = $clog2(K) + 1;

  data_t         ra, rw;
  logic          wv;
  logic [KW-1:0] kw_c, kh_c, kd_c;
  logic          done;

  // ---------------- registers: activation, weight, element counter ----------
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      ra <= '0;
      rw <= '0;
      wv <= 1'b0;
    end else begin
      if (act_load) ra <= act_in;
      rw <= w_in;
      wv <= w_vld_in;
    end
  end

  assign w_out     = rw;
  assign w_vld_out = wv;

  logic last_elem;
  assign last_elem = (kw_c == KW'(K - 1)) && (kh_c == KW'(K - 1)) &&
                     (!mode3d || kd_c == KW'(K - 1));

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      kw_c <= '0; kh_c <= '0; kd_c <= '0;
      done <= 1'b1;
    end else if (act_load) begin
      kw_c <= '0; kh_c <= '0; kd_c <= '0;
      done <= 1'b0;
    end else if (wv) begin
      if (kw_c == KW'(K - 1)) begin
        kw_c <= '0;
        if (kh_c == KW'(K - 1)) begin
          kh_c <= '0;
          kd_c <= kd_c + 1'b1;
        end else kh_c <= kh_c + 1'b1;
      end else kw_c <= kw_c + 1'b1;
      if (last_elem) done <= 1'b1;
    end
  end

  // ---------------- routing decode ------------------------------------------
  logic [KW-1:0] s, olen;
  assign s    = KW'(stride);
  assign olen = (s < KW'(K)) ? KW'(K) - s : '0;   // overlap length K-S

  logic d_front, d_back;
  assign d_front = mode3d && (Z > 0);
  assign d_back  = mode3d && (Z + 1 < TZ);

  logic rt_d, rt_v, rt_h, rt_res;    // where this element goes
  logic ex_d, ex_v, ex_h;            // which overlap FIFOs it consumes
  always_comb begin
    rt_d   = d_front && (kd_c < olen);
    rt_v   = !rt_d && (X > 0) && (kh_c < olen);
    rt_h   = !rt_d && !rt_v && (Y > 0) && (kw_c < olen);
    rt_res = !(rt_d || rt_v || rt_h);
    ex_d   = d_back && (kd_c >= s);
    ex_v   = (X + 1 < TR) && (kh_c >= s) && !(d_front && kd_c < olen);
    ex_h   = (Y + 1 < TC) && (kw_c >= s) && !(d_front && kd_c < olen) &&
             !((X > 0) && (kh_c < olen));
  end

  // ---------------- overlap FIFOs -------------------------------------------
  acc_t fv_q, fh_q, fd_q;
  logic fv_e, fh_e, fd_e, fv_f, fh_f, fd_f;
  logic pop_v, pop_h, pop_d;

  assign pop_v = wv && ex_v;
  assign pop_h = wv && ex_h;
  assign pop_d = wv && ex_d;

  sync_fifo #(.W(ACC_W), .DEPTH(V_DEPTH)) u_fifo_v (
    .clk, .rst_n, .clr(1'b0), .wr_en(ov_v_in_vld), .wr_data(ov_v_in),
    .rd_en(pop_v), .rd_data(fv_q), .empty(fv_e), .full(fv_f));
  sync_fifo #(.W(ACC_W), .DEPTH(H_DEPTH)) u_fifo_h (
    .clk, .rst_n, .clr(1'b0), .wr_en(ov_h_in_vld), .wr_data(ov_h_in),
    .rd_en(pop_h), .rd_data(fh_q), .empty(fh_e), .full(fh_f));
  sync_fifo #(.W(ACC_W), .DEPTH(D_DEPTH)) u_fifo_d (
    .clk, .rst_n, .clr(1'b0), .wr_en(ov_d_in_vld), .wr_data(ov_d_in),
    .rd_en(pop_d), .rd_data(fd_q), .empty(fd_e), .full(fd_f));

  // ---------------- multiply and overlap add --------------------------------
  acc_t prod, sum;
  always_comb begin
    prod = acc_t'(ra) * acc_t'(rw);
    sum  = prod + (ex_v ? fv_q : '0) + (ex_h ? fh_q : '0) + (ex_d ? fd_q : '0);
  end

  assign ov_v_out_vld = wv && rt_v;
  assign ov_h_out_vld = wv && rt_h;
  assign ov_d_out_vld = wv && rt_d;
  assign ov_v_out     = sum;
  assign ov_h_out     = sum;
  assign ov_d_out     = sum;

  // ---------------- result FIFO ---------------------------------------------
  res_t own;
  always_comb begin
    own.val    = sum;
    own.tag.oh = TAG_W'(X * s + kh_c);
    own.tag.ow = TAG_W'(Y * s + kw_c);
    own.tag.od = mode3d ? TAG_W'(Z * s + kd_c) : '0;
  end

  logic own_push, r_wr, r_rd, r_e, r_f;
  res_t r_wdata, r_q;
  assign own_push   = wv && rt_res;
  assign res_in_rdy = done && !r_f;
  assign r_wr       = own_push || (res_in_vld && res_in_rdy);
  assign r_wdata    = own_push ? own : res_in;
  assign res_out_vld = done && !r_e;
  assign res_out    = r_q;
  assign r_rd       = res_out_vld && res_out_rdy;

  sync_fifo #(.W($bits(res_t)), .DEPTH(R_DEPTH)) u_fifo_res (
    .clk, .rst_n, .clr(1'b0), .wr_en(r_wr), .wr_data(r_wdata),
    .rd_en(r_rd), .rd_data(r_q), .empty(r_e), .full(r_f));

  assign busy = !done || !r_e;

  // ---------------- protocol checks -----------------------------------------
  a_stride:   assert property (@(posedge clk) disable iff (!rst_n) wv |-> stride >= 2);
  a_v_ready:  assert property (@(posedge clk) disable iff (!rst_n) pop_v |-> !fv_e);
  a_h_ready:  assert property (@(posedge clk) disable iff (!rst_n) pop_h |-> !fh_e);
  a_d_ready:  assert property (@(posedge clk) disable iff (!rst_n) pop_d |-> !fd_e);
  a_res_room: assert property (@(posedge clk) disable iff (!rst_n) own_push |-> !r_f);
  a_ovl_room: assert property (@(posedge clk) disable iff (!rst_n)
                               !(ov_v_in_vld && fv_f) && !(ov_h_in_vld && fh_f) &&
                               !(ov_d_in_vld && fd_f));

endmodule
