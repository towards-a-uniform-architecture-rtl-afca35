// dcnn_accel: top level of the 2D/3D deconvolution accelerator.
//
// The accelerator computes one deconvolution layer per start pulse. The layer
// is cut into blocks (blocking): an input block of TR x TC positions (x TZ
// depth slices in 3D) and TM output channels is computed at a time, running
// through the input channels in passes of TN (3D) or TN x TZ (2D) channels.
// Per pass the memory controller fills the input and weight buffers, then the
// computation engine runs the input-oriented mapping and its adder trees add
// the channels of the pass into the output buffer. When all input channels of
// a block are done, the memory controller adds the output block into DRAM
// (which merges the K-S wide rims shared by neighbouring blocks) and the next
// block follows. Loop order, outermost first: output-channel group, depth
// block, row block, column block, input-channel pass.
//
// Interface: cfg describes the layer and must stay stable from start to done;
// start is a one-cycle pulse accepted while busy is low; done pulses at the
// end. The external memory is a one-word request/response port, responses in
// order. Counters report total cycles and the cycles in which the PEs were
// computing (the paper's PE-utilisation numerator) of the last layer.
//
// Follows the paper: memory controller, input/weight/output buffers,
// computation engine of TM groups of TN x TZ PE arrays of TR x TC PEs, adder
// trees, DDR for source data and results, blocking over input channels,
// 16-bit fixed-point data. This design's own: the loop order and layer
// controller, the sequential (not overlapped) load/compute/store phases, the
// read-add-write merge of block rims, and the memory port.
module dcnn_accel
  import dcnn_pkg::*;
#(
  parameter int unsigned TM   = 2,
  parameter int unsigned TN   = 16,
  parameter int unsigned TZ   = 4,
  parameter int unsigned TR   = 4,
  parameter int unsigned TC   = 4,
  parameter int unsigned K    = 3,
  parameter int unsigned SMAX = 3,
  localparam int unsigned A  = TN * TZ,
  localparam int unsigned L  = TR * TZ,
  localparam int unsigned KV = K * K * K
) (
  input  logic        clk,
  input  logic        rst_n,
  input  layer_cfg_t  cfg,
  input  logic        start,
  output logic        done,
  output logic        busy,
  // external memory (DDR)
  output logic        mem_req_vld,
  output mem_req_t    mem_req,
  input  logic        mem_req_rdy,
  input  logic        mem_rsp_vld,
  input  acc_t        mem_rsp_data,
  // statistics of the last layer
  output logic [31:0] stat_cycles,
  output logic [31:0] stat_mac_cycles,
  output logic [31:0] stat_passes
);
  // ---------------- buffers, engine, memory controller ----------------------
  logic              ib_clr, ib_we;
  logic [cw(A)-1:0]  ib_arr;
  logic [cw(TR)-1:0] ib_r;
  logic [cw(TC)-1:0] ib_c, ib_col;
  data_t             ib_data;
  data_t             ib_act [A][TR];

  logic              wb_clr, wb_we, wb_bcast;
  logic [cw(TM)-1:0] wb_m;
  logic [cw(A)-1:0]  wb_arr;
  logic [cw(KV)-1:0] wb_k, wb_rk;
  data_t             wb_data;
  data_t             wb_w [TM][A];

  logic              ob_rd, ob_init;
  logic [cw(TM)-1:0] ob_m;
  tag_t              ob_tag;
  acc_t              ob_data;

  logic              eng_start, eng_done, eng_busy, mac_active;
  logic              res_vld [TM][L];
  tag_t              res_tag [TM][L];
  acc_t              res_val [TM][L];

  logic              job_start, job_done, mc_busy;
  logic [1:0]        job_kind;
  logic [DIM_W-1:0]  oc0, ic0, h0, w0, d0;

  input_buffer #(.TN(TN), .TZ(TZ), .TR(TR), .TC(TC)) u_ibuf (
    .clk, .rst_n, .clr(ib_clr), .wr_en(ib_we), .wr_arr(ib_arr), .wr_r(ib_r),
    .wr_c(ib_c), .wr_data(ib_data), .rd_col(ib_col), .rd_act(ib_act));

  weight_buffer #(.TM(TM), .TN(TN), .TZ(TZ), .K(K)) u_wbuf (
    .clk, .rst_n, .clr(wb_clr), .wr_en(wb_we), .wr_bcast(wb_bcast), .wr_m(wb_m),
    .wr_arr(wb_arr), .wr_k(wb_k), .wr_data(wb_data), .rd_k(wb_rk), .rd_w(wb_w));

  output_buffer #(.TM(TM), .TZ(TZ), .TR(TR), .TC(TC), .K(K), .SMAX(SMAX)) u_obuf (
    .clk, .rst_n, .acc_vld(res_vld), .acc_tag(res_tag), .acc_val(res_val),
    .rd_en(ob_rd), .rd_m(ob_m), .rd_tag(ob_tag), .rd_data(ob_data), .init_busy(ob_init));

  compute_engine #(.TM(TM), .TN(TN), .TZ(TZ), .TR(TR), .TC(TC), .K(K)) u_engine (
    .clk, .rst_n, .mode3d(cfg.mode3d), .stride(cfg.stride),
    .start(eng_start), .done(eng_done), .busy(eng_busy), .mac_active,
    .ib_col, .ib_act, .wb_k(wb_rk), .wb_w,
    .out_vld(res_vld), .out_tag(res_tag), .out_val(res_val));

  mem_ctrl #(.TM(TM), .TN(TN), .TZ(TZ), .TR(TR), .TC(TC), .K(K)) u_memctrl (
    .clk, .rst_n, .cfg,
    .job_start, .job_kind, .job_oc0(oc0), .job_ic0(ic0), .job_h0(h0), .job_w0(w0),
    .job_d0(d0), .job_done,
    .ib_clr, .ib_we, .ib_arr, .ib_r, .ib_c, .ib_data,
    .wb_clr, .wb_we, .wb_bcast, .wb_m, .wb_arr, .wb_k, .wb_data,
    .ob_rd, .ob_m, .ob_tag, .ob_data,
    .mem_req_vld, .mem_req, .mem_req_rdy, .mem_rsp_vld, .mem_rsp_data,
    .busy(mc_busy));

  // ---------------- layer controller ----------------------------------------
  typedef enum logic [3:0] {
    C_IDLE, C_LDIN, C_LDIN_W, C_LDW, C_LDW_W, C_COMP, C_COMP_W, C_STORE, C_STORE_W, C_FIN
  } cstate_e;
  cstate_e cs;

  logic [DIM_W-1:0] ch_step, d_step, d_lim;
  assign ch_step = cfg.mode3d ? DIM_W'(TN) : DIM_W'(A);
  assign d_step  = cfg.mode3d ? DIM_W'(TZ) : DIM_W'(1);
  assign d_lim   = cfg.mode3d ? cfg.id : DIM_W'(1);

  assign job_start = (cs == C_LDIN) || (cs == C_LDW) || (cs == C_STORE);
  assign job_kind  = (cs == C_LDIN) ? 2'd0 : (cs == C_LDW) ? 2'd1 : 2'd2;
  assign eng_start = (cs == C_COMP);
  assign busy      = (cs != C_IDLE) || ob_init;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      cs   <= C_IDLE;
      done <= 1'b0;
      {oc0, ic0, h0, w0, d0} <= '0;
      stat_cycles     <= '0;
      stat_mac_cycles <= '0;
      stat_passes     <= '0;
    end else begin
      done <= 1'b0;
      if (cs != C_IDLE) stat_cycles <= stat_cycles + 1;
      if (mac_active)   stat_mac_cycles <= stat_mac_cycles + 1;
      case (cs)
        C_IDLE: if (start && !ob_init) begin
          {oc0, ic0, h0, w0, d0} <= '0;
          stat_cycles     <= '0;
          stat_mac_cycles <= '0;
          stat_passes     <= '0;
          cs <= C_LDIN;
        end
        C_LDIN:   cs <= C_LDIN_W;
        C_LDIN_W: if (job_done) cs <= C_LDW;
        C_LDW:    cs <= C_LDW_W;
        C_LDW_W:  if (job_done) cs <= C_COMP;
        C_COMP:   cs <= C_COMP_W;
        C_COMP_W: if (eng_done) begin
          stat_passes <= stat_passes + 1;
          if (ic0 + ch_step < cfg.nc) begin
            ic0 <= ic0 + ch_step;
            cs  <= C_LDIN;
          end else cs <= C_STORE;
        end
        C_STORE:   cs <= C_STORE_W;
        C_STORE_W: if (job_done) begin
          ic0 <= '0;
          cs  <= C_LDIN;
          if (w0 + DIM_W'(TC) < cfg.iw) w0 <= w0 + DIM_W'(TC);
          else begin
            w0 <= '0;
            if (h0 + DIM_W'(TR) < cfg.ih) h0 <= h0 + DIM_W'(TR);
            else begin
              h0 <= '0;
              if (d0 + d_step < d_lim) d0 <= d0 + d_step;
              else begin
                d0 <= '0;
                if (oc0 + DIM_W'(TM) < cfg.mc) oc0 <= oc0 + DIM_W'(TM);
                else cs <= C_FIN;
              end
            end
          end
        end
        C_FIN: begin done <= 1'b1; cs <= C_IDLE; end
        default: cs <= C_IDLE;
      endcase
    end
  end

  a_stride_legal: assert property (@(posedge clk) disable iff (!rst_n)
    (cs != C_IDLE) |-> (cfg.stride >= 2 && cfg.stride <= SMAX));
  a_phases: assert property (@(posedge clk) disable iff (!rst_n) !(eng_busy && mc_busy));

endmodule
