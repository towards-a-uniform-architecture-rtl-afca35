// mem_ctrl: memory controller between the external DRAM and the three
// on-chip buffers. It runs one job at a time for the layer controller:
//
//   J_LOAD_IN  fetch the activations of one pass into the input buffer: for
//              every PE array a, row r and column c the word at input position
//              (h0+r, w0+c, d0+z) of channel ic0+n (3D, a = n*TZ+z) or of
//              channel ic0+a at depth 0 (2D). Positions outside the map or
//              beyond the channel count are not fetched; the buffer is
//              cleared first, so they read as zero.
//   J_LOAD_W   fetch the kernels W(.,.,., ic, oc) of the pass into the weight
//              buffer, oc = oc0+m; in 3D one fetch feeds all TZ planes of a
//              channel (broadcast write).
//   J_STORE    write the finished output block back: every entry of the output
//              buffer is read (and cleared); if its position, shifted by the
//              low-edge padding, lies inside the kept output map, the word in
//              DRAM is read, the block's value added, and the sum written back.
//              Adding, rather than overwriting, merges the K-S wide rims that
//              neighbouring input blocks share; the output area must hold zeros
//              before the layer starts.
//
// DRAM layouts, all one word per element, innermost index last:
//   input  [ic][d][h][w]          weights [oc][ic][kd][kh][kw]
//   output [oc][d][h][w]          (d has size 1 in 2D mode)
// Memory port: valid/ready requests of one word, read data returned in order
// (rsp_vld). Loads are pipelined with up to OUTST reads in flight, whose buffer
// destinations wait in a small queue; the write-back is one word at a time.
// The paper gives this block's role only; its jobs, layouts, port and the
// read-add-write merge of the rims are choices of this design.
//
// The buffer write data are the DRAM read data as they arrive, and the weight
// broadcast flag is the layer's 3D mode bit, so these outputs follow inputs.
module mem_ctrl
  import dcnn_pkg::*;
#(
  parameter int unsigned TM    = 2,
  parameter int unsigned TN    = 16,
  parameter int unsigned TZ    = 4,
  parameter int unsigned TR    = 4,
  parameter int unsigned TC    = 4,
  parameter int unsigned K     = 3,
  parameter int unsigned OUTST = 8,
  localparam int unsigned A  = TN * TZ,
  localparam int unsigned KV = K * K * K
) (
  input  logic               clk,
  input  logic               rst_n,
  input  layer_cfg_t         cfg,
  // job interface
  input  logic               job_start,
  input  logic [1:0]         job_kind,     // 0 load input, 1 load weights, 2 store
  input  logic [DIM_W-1:0]   job_oc0,
  input  logic [DIM_W-1:0]   job_ic0,
  input  logic [DIM_W-1:0]   job_h0,
  input  logic [DIM_W-1:0]   job_w0,
  input  logic [DIM_W-1:0]   job_d0,
  output logic               job_done,
  // input buffer write port
  output logic               ib_clr,
  output logic               ib_we,
  output logic [cw(A)-1:0]   ib_arr,
  output logic [cw(TR)-1:0]  ib_r,
  output logic [cw(TC)-1:0]  ib_c,
  output data_t              ib_data,
  // weight buffer write port
  output logic               wb_clr,
  output logic               wb_we,
  output logic               wb_bcast,
  output logic [cw(TM)-1:0]  wb_m,
  output logic [cw(A)-1:0]   wb_arr,
  output logic [cw(KV)-1:0]  wb_k,
  output data_t              wb_data,
  // output buffer read-and-clear port
  output logic               ob_rd,
  output logic [cw(TM)-1:0]  ob_m,
  output tag_t               ob_tag,
  input  acc_t               ob_data,
  // external memory
  output logic               mem_req_vld,
  output mem_req_t           mem_req,
  input  logic               mem_req_rdy,
  input  logic               mem_rsp_vld,
  input  acc_t               mem_rsp_data,
  output logic               busy
);
  localparam logic [1:0] J_LOAD_IN = 2'd0, J_LOAD_W = 2'd1;   // 2'd2: store

  typedef enum logic [2:0] {S_IDLE, S_ISSUE, S_FLUSH, S_PICK, S_RD, S_WAIT, S_WR, S_DONE} state_e;
  state_e st;

  logic [1:0]       kind;
  logic [DIM_W-1:0] oc0, ic0, h0, w0, d0;
  // loop counters: i0 outermost (array or out-channel), i1, i2, i3 innermost
  logic [DIM_W-1:0] i0, i1, i2, i3;
  logic [DIM_W-1:0] n0, n1, n2, n3;       // loop bounds of the current job
  logic             last;

  logic [DIM_W-1:0] s, kvr, olh, olw, old_;
  assign s    = DIM_W'(cfg.stride);
  assign kvr  = cfg.mode3d ? DIM_W'(K * K * K) : DIM_W'(K * K);
  assign olh  = DIM_W'(TR - 1) * s + DIM_W'(K);    // output block extent
  assign olw  = DIM_W'(TC - 1) * s + DIM_W'(K);
  assign old_ = cfg.mode3d ? DIM_W'(TZ - 1) * s + DIM_W'(K) : DIM_W'(1);

  // ---------------- address and validity of the current element ------------
  logic [DIM_W-1:0]  ic, oc, ih, iw, idp, gh, gw, gd;
  logic              in_ok, w_ok, out_ok;
  logic [ADDR_W-1:0] in_addr, w_addr, out_addr;

  always_comb begin
    // load input: i0 = array, i1 = row, i2 = column
    ic  = cfg.mode3d ? ic0 + i0 / DIM_W'(TZ) : ic0 + i0;
    idp = cfg.mode3d ? d0 + i0 % DIM_W'(TZ) : '0;
    ih  = h0 + i1;
    iw  = w0 + i2;
    in_ok   = (ic < cfg.nc) && (ih < cfg.ih) && (iw < cfg.iw) && (idp < cfg.id);
    in_addr = cfg.in_base +
              ((ADDR_W'(ic) * cfg.id + idp) * cfg.ih + ih) * cfg.iw + iw;
    // load weights: i0 = out channel m, i1 = array, i2 = kernel element
    oc   = oc0 + i0;
    w_ok = (oc < cfg.mc) &&
           ((cfg.mode3d ? ic0 + i1 / DIM_W'(TZ) : ic0 + i1) < cfg.nc);
    w_addr = cfg.w_base +
             (ADDR_W'(oc) * cfg.nc + (cfg.mode3d ? ic0 + i1 / DIM_W'(TZ) : ic0 + i1)) * kvr +
             i2;
    // store: i0 = m, i1 = depth, i2 = row, i3 = column of the output block
    gh = h0 * s + i2;
    gw = w0 * s + i3;
    gd = cfg.mode3d ? d0 * s + i1 : cfg.pad;
    out_ok = (oc < cfg.mc) &&
             (gh >= cfg.pad) && (gh - cfg.pad < cfg.oh) &&
             (gw >= cfg.pad) && (gw - cfg.pad < cfg.ow) &&
             (gd >= cfg.pad) && (gd - cfg.pad < cfg.od);
    out_addr = cfg.out_base +
               ((ADDR_W'(oc) * cfg.od + (gd - cfg.pad)) * cfg.oh + (gh - cfg.pad)) * cfg.ow +
               (gw - cfg.pad);
  end

  assign last = (i3 + 1'b1 >= n3) && (i2 + 1'b1 >= n2) && (i1 + 1'b1 >= n1) && (i0 + 1'b1 >= n0);

  // ---------------- read destination queue ----------------------------------
  localparam int unsigned DW = cw(A) + cw(TR) + cw(TC) + cw(TM) + cw(KV) + 1;
  logic [DW-1:0] dq_in, dq_out;
  logic          dq_push, dq_empty, dq_full;
  logic [cw(OUTST+1)-1:0] outst;

  assign dq_in = (kind == J_LOAD_IN)
               ? {1'b0, cw(A)'(i0), cw(TR)'(i1), cw(TC)'(i2), cw(TM)'(0), cw(KV)'(0)}
               : {1'b1, cw(A)'(i1), cw(TR)'(0), cw(TC)'(0), cw(TM)'(i0), cw(KV)'(i2)};

  sync_fifo #(.W(DW), .DEPTH(OUTST)) u_dq (
    .clk, .rst_n, .clr(1'b0), .wr_en(dq_push), .wr_data(dq_in),
    .rd_en(mem_rsp_vld && !dq_empty), .rd_data(dq_out), .empty(dq_empty), .full(dq_full));

  // retire a read: write the returned word to its buffer
  always_comb begin
    {wb_arr, ib_r, ib_c, wb_m, wb_k} = '0;
    ib_arr   = dq_out[DW-2 -: cw(A)];
    ib_r     = dq_out[cw(TC) + cw(TM) + cw(KV) +: cw(TR)];
    ib_c     = dq_out[cw(TM) + cw(KV) +: cw(TC)];
    wb_arr   = dq_out[DW-2 -: cw(A)];
    wb_m     = dq_out[cw(KV) +: cw(TM)];
    wb_k     = dq_out[0 +: cw(KV)];
    ib_data  = data_t'(mem_rsp_data);
    wb_data  = data_t'(mem_rsp_data);
    ib_we    = mem_rsp_vld && !dq_empty && !dq_out[DW-1];
    wb_we    = mem_rsp_vld && !dq_empty &&  dq_out[DW-1];
    wb_bcast = cfg.mode3d;
  end

  // ---------------- job sequencer -------------------------------------------
  logic elem_ok;
  acc_t held;
  assign elem_ok = (kind == J_LOAD_IN) ? in_ok : w_ok;

  logic issue_fire;
  assign issue_fire = (st == S_ISSUE) && elem_ok && !dq_full && mem_req_rdy;
  assign dq_push    = issue_fire;

  always_comb begin
    mem_req_vld   = 1'b0;
    mem_req.we    = 1'b0;
    mem_req.addr  = '0;
    mem_req.wdata = '0;
    case (st)
      S_ISSUE: begin
        mem_req_vld  = elem_ok && !dq_full;
        mem_req.addr = (kind == J_LOAD_IN) ? in_addr : w_addr;
      end
      S_RD: begin
        mem_req_vld  = 1'b1;
        mem_req.addr = out_addr;
      end
      S_WR: begin
        mem_req_vld   = 1'b1;
        mem_req.we    = 1'b1;
        mem_req.addr  = out_addr;
        mem_req.wdata = held;
      end
      default: ;
    endcase
  end

  assign ob_rd  = (st == S_PICK);
  assign ob_m   = cw(TM)'(i0);
  assign ob_tag = '{oh: TAG_W'(i2), ow: TAG_W'(i3), od: TAG_W'(i1)};
  assign ib_clr = job_start && (job_kind == J_LOAD_IN) && (st == S_IDLE);
  assign wb_clr = job_start && (job_kind == J_LOAD_W)  && (st == S_IDLE);
  assign busy   = (st != S_IDLE);

  always_ff @(posedge clk) begin
    if (!rst_n) outst <= '0;
    else outst <= outst + cw(OUTST+1)'(dq_push) - cw(OUTST+1)'(mem_rsp_vld && !dq_empty);
  end

  // the loop nest advanced by one element
  logic [DIM_W-1:0] x0, x1, x2, x3;
  always_comb begin
    {x0, x1, x2, x3} = {i0, i1, i2, i3};
    if (i3 + 1'b1 < n3) x3 = i3 + 1'b1;
    else begin
      x3 = '0;
      if (i2 + 1'b1 < n2) x2 = i2 + 1'b1;
      else begin
        x2 = '0;
        if (i1 + 1'b1 < n1) x1 = i1 + 1'b1;
        else begin
          x1 = '0;
          x0 = i0 + 1'b1;
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      st       <= S_IDLE;
      job_done <= 1'b0;
      kind     <= '0;
      {oc0, ic0, h0, w0, d0} <= '0;
      {i0, i1, i2, i3, n0, n1, n2, n3} <= '0;
      held     <= '0;
    end else begin
      job_done <= 1'b0;
      case (st)
        S_IDLE: if (job_start) begin
          kind <= job_kind;
          oc0 <= job_oc0; ic0 <= job_ic0; h0 <= job_h0; w0 <= job_w0; d0 <= job_d0;
          {i0, i1, i2, i3} <= '0;
          case (job_kind)
            J_LOAD_IN: begin
              n0 <= DIM_W'(A); n1 <= DIM_W'(TR); n2 <= DIM_W'(TC); n3 <= 1;
              st <= S_ISSUE;
            end
            J_LOAD_W: begin
              // in 3D one fetch per channel (array index steps by TZ below)
              n0 <= DIM_W'(TM); n1 <= DIM_W'(A); n2 <= kvr; n3 <= 1;
              st <= S_ISSUE;
            end
            default: begin
              n0 <= DIM_W'(TM); n1 <= old_; n2 <= olh; n3 <= olw;
              st <= S_PICK;
            end
          endcase
        end
        S_ISSUE: if (!elem_ok || issue_fire) begin
          if (last) st <= S_FLUSH;
          else if (kind == J_LOAD_W && cfg.mode3d && i2 + 1'b1 >= n2) begin
            // next channel: skip the other depth planes, the write broadcasts
            i2 <= '0;
            if (i1 + DIM_W'(TZ) < n1) i1 <= i1 + DIM_W'(TZ);
            else begin i1 <= '0; i0 <= i0 + 1'b1; end
            if (i1 + DIM_W'(TZ) >= n1 && i0 + 1'b1 >= n0) st <= S_FLUSH;
          end else {i0, i1, i2, i3} <= {x0, x1, x2, x3};
        end
        S_FLUSH: if (outst == '0) st <= S_DONE;
        S_PICK: begin
          held <= ob_data;
          if (out_ok) st <= S_RD;
          else if (last) st <= S_DONE;
          else {i0, i1, i2, i3} <= {x0, x1, x2, x3};
        end
        S_RD:   if (mem_req_rdy) st <= S_WAIT;
        S_WAIT: if (mem_rsp_vld) begin held <= held + mem_rsp_data; st <= S_WR; end
        S_WR:   if (mem_req_rdy) begin
          if (last) st <= S_DONE;
          else begin st <= S_PICK; {i0, i1, i2, i3} <= {x0, x1, x2, x3}; end
        end
        S_DONE: begin job_done <= 1'b1; st <= S_IDLE; end
        default: st <= S_IDLE;
      endcase
    end
  end

endmodule
