// pe_array: one TR x TC plane of processing elements (the PE array of one
// input feature map, or of one depth slice of it in 3D mode).
//
// Activations: every PE is wired to the input buffer; column y latches its TR
// activations when act_load[y] is high (the engine pulses the columns one after
// another, as a wave moving right). Weights enter the leftmost PE of every row,
// all rows receiving the same weight, and move one column to the right per
// cycle, so column y uses a weight one cycle after column y-1. Overlap links
// run upward (FIFO-V of PE(x-1,y) fed by PE(x,y)) and leftward (FIFO-H of
// PE(x,y-1) fed by PE(x,y)) inside the plane; the depth links (FIFO-D) leave
// the plane as arrays so that the engine can join neighbouring planes. Each
// row's result FIFOs form a chain ending at the leftmost PE, whose output is
// the plane's output for that row (one result per row per cycle at most).
//
// Structure and link directions follow the paper's architecture figure and
// dataflow example; the port bundling is this design's own.
//
// In plane 0 (the front plane) no PE sends depth overlaps, so ov_d_out_vld is
// constant zero there; the port is kept so that every plane has one interface.
module pe_array
  import dcnn_pkg::*;
#(
  parameter int unsigned K  = 3,
  parameter int unsigned TR = 4,
  parameter int unsigned TC = 4,
  parameter int unsigned TZ = 4,
  parameter int unsigned Z  = 0
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       mode3d,
  input  logic [1:0] stride,
  input  logic [TC-1:0] act_load,
  input  data_t      act_in [TR],
  input  logic       w_vld,
  input  data_t      w_in,
  // depth overlaps: in from plane Z+1, out to plane Z-1
  input  logic       ov_d_in_vld  [TR][TC],
  input  acc_t       ov_d_in      [TR][TC],
  output logic       ov_d_out_vld [TR][TC],
  output acc_t       ov_d_out     [TR][TC],
  // one result stream per row
  output logic       res_vld [TR],
  output res_t       res     [TR],
  output logic       busy
);
  logic  wv_o  [TR][TC];
  data_t w_o   [TR][TC];
  logic  vv_o  [TR][TC];
  acc_t  v_o   [TR][TC];
  logic  hv_o  [TR][TC];
  acc_t  h_o   [TR][TC];
  logic  rv_o  [TR][TC];
  res_t  r_o   [TR][TC];
  logic  rrdy  [TR][TC];   // ready of PE(x,y) towards its right neighbour
  logic [TR*TC-1:0] busy_v;

  for (genvar x = 0; x < TR; x++) begin : g_row
    for (genvar y = 0; y < TC; y++) begin : g_col
      logic  wvi;
      data_t wi;
      logic  vvi, hvi, rvi, rordy;
      acc_t  vi, hi;
      res_t  ri;

      if (y == 0) begin : g_left
        assign wvi   = w_vld;
        assign wi    = w_in;
        assign rordy = 1'b1;
      end else begin : g_inner
        assign wvi   = wv_o[x][y-1];
        assign wi    = w_o[x][y-1];
        assign rordy = rrdy[x][y-1];
      end
      if (x + 1 < TR) begin : g_below
        assign vvi = vv_o[x+1][y];
        assign vi  = v_o[x+1][y];
      end else begin : g_bottom
        assign vvi = 1'b0;
        assign vi  = '0;
      end
      if (y + 1 < TC) begin : g_right
        assign hvi = hv_o[x][y+1];
        assign hi  = h_o[x][y+1];
        assign rvi = rv_o[x][y+1];
        assign ri  = r_o[x][y+1];
      end else begin : g_edge
        assign hvi = 1'b0;
        assign hi  = '0;
        assign rvi = 1'b0;
        assign ri  = '0;
      end

      pe #(.K(K), .X(x), .Y(y), .Z(Z), .TR(TR), .TC(TC), .TZ(TZ)) u_pe (
        .clk, .rst_n, .mode3d, .stride,
        .act_load(act_load[y]), .act_in(act_in[x]),
        .w_vld_in(wvi), .w_in(wi), .w_vld_out(wv_o[x][y]), .w_out(w_o[x][y]),
        .ov_v_in_vld(vvi), .ov_v_in(vi),
        .ov_h_in_vld(hvi), .ov_h_in(hi),
        .ov_d_in_vld(ov_d_in_vld[x][y]), .ov_d_in(ov_d_in[x][y]),
        .ov_v_out_vld(vv_o[x][y]), .ov_v_out(v_o[x][y]),
        .ov_h_out_vld(hv_o[x][y]), .ov_h_out(h_o[x][y]),
        .ov_d_out_vld(ov_d_out_vld[x][y]), .ov_d_out(ov_d_out[x][y]),
        .res_in_vld(rvi), .res_in(ri), .res_in_rdy(rrdy[x][y]),
        .res_out_vld(rv_o[x][y]), .res_out(r_o[x][y]), .res_out_rdy(rordy),
        .busy(busy_v[x*TC+y]));
    end
    assign res_vld[x] = rv_o[x][0];
    assign res[x]     = r_o[x][0];
  end

  assign busy = |busy_v;

endmodule
