// compute_engine: the computation engine plus the adder trees. TM groups, one
// per output channel computed in parallel; each group is TN x TZ planes of
// TR x TC processing elements (pe_array), i.e. a 3D mesh of PEs per group.
//
// One pass, started by `start`, runs the input-oriented mapping on the tile
// held in the input buffer:
//   cycle t < TC : column t of every plane latches its activations (ib_col = t)
//   cycle t < KV : weight t of every kernel (wb_k = t) enters column 0 of its
//                  plane; KV = K*K in 2D mode and K*K*K in 3D mode
// The weights then ripple right one column per cycle. Every PE finishes its
// KV elements by cycle KV + TC, its results leave the rows through the leftmost
// PEs, and `done` pulses once every PE FIFO is empty and the adder trees have
// emptied. All planes run the same schedule, so the results of the TN planes
// that work on the same positions (different input channels) leave them in
// the same cycle with the same tag.
//
// Mode switch. 3D: the TZ planes of input channel n hold TZ neighbouring depth
// slices and pass depth overlaps to each other through FIFO-D; the adder tree
// of depth lane z and row x adds the TN channels. 2D: all TN x TZ planes hold
// different input channels, FIFO-D is off, and a second tree adds the TZ lanes
// so that all TN x TZ channels are summed; only lane z = 0 is then valid. The
// first tree level count (TM x TR x TZ trees of TN inputs) follows the paper's
// adder count, with one tree per row where the paper counts TC (TR = TC in every
// configuration it gives). The second tree for 2D mode and the fixed drain
// wait are this design's choices.
module compute_engine
  import dcnn_pkg::*;
#(
  parameter int unsigned TM = 2,
  parameter int unsigned TN = 16,
  parameter int unsigned TZ = 4,
  parameter int unsigned TR = 4,
  parameter int unsigned TC = 4,
  parameter int unsigned K  = 3,
  localparam int unsigned A  = TN * TZ,
  localparam int unsigned L  = TR * TZ,
  localparam int unsigned KV = K * K * K
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               mode3d,
  input  logic [1:0]         stride,
  input  logic               start,
  output logic               done,
  output logic               busy,
  output logic               mac_active,   // weights streaming (PEs computing)
  // input and weight buffer read ports
  output logic [cw(TC)-1:0]  ib_col,
  input  data_t              ib_act [A][TR],
  output logic [cw(KV)-1:0]  wb_k,
  input  data_t              wb_w [TM][A],
  // results towards the output buffer
  output logic               out_vld [TM][L],
  output tag_t               out_tag [TM][L],
  output acc_t               out_val [TM][L]
);
  localparam int unsigned TAIL = cw(TN) + cw(TZ) + 2;   // adder-tree drain
  localparam int unsigned TW   = cw(KV + TC + TAIL + 4) + 1;

  // ---------------- pass sequencer ------------------------------------------
  typedef enum logic [1:0] {IDLE, RUN, DRAIN, TAILW} state_e;
  state_e        st;
  logic [TW-1:0] t;
  logic [TW-1:0] kv;
  logic          arr_busy;

  assign kv = mode3d ? TW'(K * K * K) : TW'(K * K);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      st   <= IDLE;
      t    <= '0;
      done <= 1'b0;
    end else begin
      done <= 1'b0;
      case (st)
        IDLE:  if (start) begin st <= RUN; t <= '0; end
        RUN: begin
          t <= t + 1'b1;
          if (t == kv + TW'(TC) + TW'(1)) st <= DRAIN;
        end
        DRAIN: if (!arr_busy) begin st <= TAILW; t <= '0; end
        TAILW: begin
          t <= t + 1'b1;
          if (t == TW'(TAIL)) begin st <= IDLE; done <= 1'b1; end
        end
        default: st <= IDLE;
      endcase
    end
  end

  assign busy       = (st != IDLE);
  assign mac_active = (st == RUN) && (t < kv + TW'(TC));

  logic          w_vld;
  logic [TC-1:0] act_load;
  assign w_vld  = (st == RUN) && (t < kv);
  assign wb_k   = cw(KV)'(t);
  assign ib_col = cw(TC)'(t);
  always_comb begin
    for (int y = 0; y < TC; y++) act_load[y] = (st == RUN) && (t == TW'(y));
  end

  // ---------------- planes --------------------------------------------------
  logic  dv_o  [TM][A][TR][TC];
  acc_t  d_o   [TM][A][TR][TC];
  logic  rv    [TM][A][TR];
  res_t  rr    [TM][A][TR];
  logic  ab    [TM][A];

  for (genvar m = 0; m < TM; m++) begin : g_m
    for (genvar n = 0; n < TN; n++) begin : g_n
      for (genvar z = 0; z < TZ; z++) begin : g_z
        localparam int unsigned a = n * TZ + z;
        logic dvi [TR][TC];
        acc_t di  [TR][TC];
        if (z + 1 < TZ) begin : g_back
          assign dvi = dv_o[m][a+1];
          assign di  = d_o[m][a+1];
        end else begin : g_last
          always_comb begin
            for (int x = 0; x < TR; x++)
              for (int y = 0; y < TC; y++) begin
                dvi[x][y] = 1'b0;
                di[x][y]  = '0;
              end
          end
        end
        pe_array #(.K(K), .TR(TR), .TC(TC), .TZ(TZ), .Z(z)) u_arr (
          .clk, .rst_n, .mode3d, .stride,
          .act_load, .act_in(ib_act[a]),
          .w_vld, .w_in(wb_w[m][a]),
          .ov_d_in_vld(dvi), .ov_d_in(di),
          .ov_d_out_vld(dv_o[m][a]), .ov_d_out(d_o[m][a]),
          .res_vld(rv[m][a]), .res(rr[m][a]),
          .busy(ab[m][a]));
      end
    end
  end

  always_comb begin
    arr_busy = 1'b0;
    for (int m = 0; m < TM; m++)
      for (int a = 0; a < A; a++) arr_busy |= ab[m][a];
  end

  // ---------------- adder trees ---------------------------------------------
  for (genvar m = 0; m < TM; m++) begin : g_tm
    for (genvar x = 0; x < TR; x++) begin : g_tx
      logic s1_vld [TZ];
      tag_t s1_tag [TZ];
      acc_t s1_val [TZ];
      for (genvar z = 0; z < TZ; z++) begin : g_tz
        acc_t vals [TN];
        for (genvar n = 0; n < TN; n++) begin : g_in
          assign vals[n] = rr[m][n*TZ+z][x].val;
        end
        adder_tree #(.N(TN)) u_tree (
          .clk, .rst_n,
          .in_vld(rv[m][z][x]), .in_tag(rr[m][z][x].tag), .in_val(vals),
          .out_vld(s1_vld[z]), .out_tag(s1_tag[z]), .out_val(s1_val[z]));

        // every channel plane of one lane runs in lock step
        for (genvar n = 1; n < TN; n++) begin : g_lock
          a_lockstep: assert property (@(posedge clk) disable iff (!rst_n)
            rv[m][n*TZ+z][x] == rv[m][z][x]);
        end
      end

      // second level for 2D mode: add the TZ lanes
      logic s2_vld;
      tag_t s2_tag;
      acc_t s2_val;
      adder_tree #(.N(TZ)) u_tree2d (
        .clk, .rst_n,
        .in_vld(s1_vld[0] && !mode3d), .in_tag(s1_tag[0]), .in_val(s1_val),
        .out_vld(s2_vld), .out_tag(s2_tag), .out_val(s2_val));

      for (genvar z = 0; z < TZ; z++) begin : g_out
        if (z == 0) begin : g_l0
          assign out_vld[m][x] = mode3d ? s1_vld[0] : s2_vld;
          assign out_tag[m][x] = mode3d ? s1_tag[0] : s2_tag;
          assign out_val[m][x] = mode3d ? s1_val[0] : s2_val;
        end else begin : g_ln
          assign out_vld[m][z*TR+x] = mode3d && s1_vld[z];
          assign out_tag[m][z*TR+x] = s1_tag[z];
          assign out_val[m][z*TR+x] = s1_val[z];
        end
      end
    end
  end

endmodule
