// tb_mem_ctrl: the memory controller (TM=2, TN=2, TZ=2, TR=2, TC=3) against
// the DRAM model, which stalls requests now and then and answers after a fixed
// latency. The testbench stands in for the three buffers: it records every
// input- and weight-buffer write (including clears and 3D broadcast writes)
// and serves the output-buffer read port from its own array. For random 3D
// and 2D layers with strides 2 and 3 it runs, at block origins that include
// the map edges: a load-input job, a load-weights job and a store job, and
// compares the buffer contents and the DRAM afterwards with values computed
// here from the layouts: input [ic][d][h][w], weights [oc][ic][kd][kh][kw],
// output [oc][d][h][w]. The store must add each kept block value (shifted by
// the padding) to the word already in DRAM and leave every other word alone.
module tb_mem_ctrl;
  import dcnn_pkg::*;
  localparam int unsigned TM = 2, TN = 2, TZ = 2, TR = 2, TC = 3, K = 3;
  localparam int unsigned A = TN * TZ, KV = K * K * K, OB = 16, DEPTH = 8192;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  layer_cfg_t cfg;
  logic job_start = 1'b0, job_done, busy;
  logic [1:0] job_kind = '0;
  logic [DIM_W-1:0] oc0 = '0, ic0 = '0, h0 = '0, w0 = '0, d0 = '0;
  logic ib_clr, ib_we, wb_clr, wb_we, wb_bcast, ob_rd;
  logic [cw(A)-1:0] ib_arr, wb_arr;
  logic [cw(TR)-1:0] ib_r;
  logic [cw(TC)-1:0] ib_c;
  logic [cw(TM)-1:0] wb_m, ob_m;
  logic [cw(KV)-1:0] wb_k;
  data_t ib_data, wb_data;
  tag_t ob_tag;
  acc_t ob_data;
  logic mem_req_vld, mem_req_rdy, mem_rsp_vld;
  mem_req_t mem_req;
  acc_t mem_rsp_data;
  logic bd_we = 1'b0;
  logic [31:0] bd_addr = '0;
  acc_t bd_wdata = '0, bd_rdata;

  mem_ctrl #(.TM(TM), .TN(TN), .TZ(TZ), .TR(TR), .TC(TC), .K(K)) u_dut (
    .clk, .rst_n, .cfg, .job_start, .job_kind, .job_oc0(oc0), .job_ic0(ic0),
    .job_h0(h0), .job_w0(w0), .job_d0(d0), .job_done,
    .ib_clr, .ib_we, .ib_arr, .ib_r, .ib_c, .ib_data,
    .wb_clr, .wb_we, .wb_bcast, .wb_m, .wb_arr, .wb_k, .wb_data,
    .ob_rd, .ob_m, .ob_tag, .ob_data,
    .mem_req_vld, .mem_req, .mem_req_rdy, .mem_rsp_vld, .mem_rsp_data, .busy);

  ddr_model #(.DEPTH(DEPTH), .LAT(4), .STALL(1'b1)) u_ddr (
    .clk, .rst_n, .req_vld(mem_req_vld), .req(mem_req), .req_rdy(mem_req_rdy),
    .rsp_vld(mem_rsp_vld), .rsp_data(mem_rsp_data),
    .bd_we, .bd_addr, .bd_wdata, .bd_rdata);

  // buffer stand-ins
  int ibm [A][TR][TC];
  int wbm [TM][A][KV];
  int obm [TM][OB][OB][OB];
  int n_bcast = 0, n_stall = 0;

  assign ob_data = obm[ob_m][ob_tag.od][ob_tag.oh][ob_tag.ow];

  always @(posedge clk) if (rst_n) begin
    if (ib_clr) foreach (ibm[a, r, c]) ibm[a][r][c] = 0;
    if (wb_clr) foreach (wbm[m, a, k]) wbm[m][a][k] = 0;
    if (ib_we) ibm[ib_arr][ib_r][ib_c] = int'(ib_data);
    if (wb_we) begin
      if (wb_bcast) begin
        n_bcast++;
        for (int z = 0; z < TZ; z++) wbm[wb_m][(wb_arr / TZ) * TZ + z][wb_k] = int'(wb_data);
      end else wbm[wb_m][wb_arr][wb_k] = int'(wb_data);
    end
    if (ob_rd) obm[ob_m][ob_tag.od][ob_tag.oh][ob_tag.ow] = 0;
    if (mem_req_vld && !mem_req_rdy) n_stall++;
  end

  int checks = 0, failures = 0;
  int dram [DEPTH];

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("  mismatch: %s", what);
    end
  endtask

  task automatic run_job(input int kind);
    @(negedge clk);
    job_kind = 2'(kind); job_start = 1'b1;
    @(negedge clk);
    job_start = 1'b0;
    while (!job_done) @(negedge clk);
  endtask

  task automatic one_layer(input bit m3d, input int s, input int ih, input int iw, input int id,
                           input int nc, input int mc, input int pad,
                           input int oh, input int ow, input int od,
                           input int bo, input int bi, input int bh, input int bw, input int bd);
    int kv, n_in, n_w, n_out, in_base, w_base, out_base, olh, olw, old_;
    kv = m3d ? KV : K * K;
    n_in = nc * id * ih * iw; n_w = mc * nc * kv; n_out = mc * od * oh * ow;
    in_base = 5; w_base = in_base + n_in; out_base = w_base + n_w + 3;
    rst_n = 1'b0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < out_base + n_out + 8; i++) begin
      dram[i] = int'($urandom_range(0, 2000)) - 1000;
      @(negedge clk);
      bd_we = 1'b1; bd_addr = i; bd_wdata = dram[i];
    end
    @(negedge clk) bd_we = 1'b0;
    cfg = '0;
    cfg.mode3d = m3d; cfg.stride = 2'(s);
    cfg.ih = DIM_W'(ih); cfg.iw = DIM_W'(iw); cfg.id = DIM_W'(id);
    cfg.nc = DIM_W'(nc); cfg.mc = DIM_W'(mc); cfg.pad = DIM_W'(pad);
    cfg.oh = DIM_W'(oh); cfg.ow = DIM_W'(ow); cfg.od = DIM_W'(od);
    cfg.in_base = ADDR_W'(in_base); cfg.w_base = ADDR_W'(w_base); cfg.out_base = ADDR_W'(out_base);
    oc0 = DIM_W'(bo); ic0 = DIM_W'(bi); h0 = DIM_W'(bh); w0 = DIM_W'(bw); d0 = DIM_W'(bd);

    // stale buffer contents must be cleared by the jobs
    foreach (ibm[a, r, c]) ibm[a][r][c] = 12345;
    foreach (wbm[m, a, k]) wbm[m][a][k] = 12345;

    run_job(0);
    for (int a = 0; a < A; a++)
      for (int r = 0; r < TR; r++)
        for (int c = 0; c < TC; c++) begin
          int ch, dd, hh, ww, e;
          ch = m3d ? bi + a / TZ : bi + a;
          dd = m3d ? bd + a % TZ : 0;
          hh = bh + r; ww = bw + c;
          e = (ch < nc && dd < id && hh < ih && ww < iw)
            ? int'(data_t'(dram[in_base + ((ch * id + dd) * ih + hh) * iw + ww])) : 0;
          check(ibm[a][r][c] == e, $sformatf("input a%0d r%0d c%0d: %0d expected %0d", a, r, c, ibm[a][r][c], e));
        end

    run_job(1);
    for (int m = 0; m < TM; m++)
      for (int a = 0; a < A; a++)
        for (int k = 0; k < KV; k++) begin
          int ch, oc, e;
          ch = m3d ? bi + a / TZ : bi + a;
          oc = bo + m;
          e = (k < kv && ch < nc && oc < mc)
            ? int'(data_t'(dram[w_base + (oc * nc + ch) * kv + k])) : 0;
          check(wbm[m][a][k] == e, $sformatf("weight m%0d a%0d k%0d: %0d expected %0d", m, a, k, wbm[m][a][k], e));
        end

    // store: fill the output-buffer stand-in and predict the DRAM
    olh = (TR - 1) * s + K; olw = (TC - 1) * s + K; old_ = m3d ? (TZ - 1) * s + K : 1;
    foreach (obm[m, d, h, w]) obm[m][d][h][w] = 0;
    for (int m = 0; m < TM; m++)
      for (int d = 0; d < old_; d++)
        for (int h = 0; h < olh; h++)
          for (int w = 0; w < olw; w++) begin
            int gh, gw, gd;
            obm[m][d][h][w] = int'($urandom_range(0, 2000)) - 1000;
            gh = bh * s + h - pad; gw = bw * s + w - pad; gd = m3d ? bd * s + d - pad : 0;
            if (bo + m < mc && gh >= 0 && gh < oh && gw >= 0 && gw < ow && gd >= 0 && gd < od)
              dram[out_base + (((bo + m) * od + gd) * oh + gh) * ow + gw] += obm[m][d][h][w];
          end
    run_job(2);
    for (int i = 0; i < out_base + n_out + 8; i++) begin
      bd_addr = i;
      #1;
      check(bd_rdata == dram[i], $sformatf("dram[%0d]: %0d expected %0d", i, bd_rdata, dram[i]));
    end
    for (int m = 0; m < TM; m++)
      for (int d = 0; d < old_; d++)
        for (int h = 0; h < olh; h++)
          for (int w = 0; w < olw; w++)
            check(obm[m][d][h][w] == 0, "output buffer entry not read");
  endtask

  initial begin
    // 3D, interior block, then a block at the far edges with padding
    one_layer(1'b1, 2, 4, 5, 4, 3, 3, 0, 9, 11, 9, 0, 0, 0, 0, 0);
    one_layer(1'b1, 2, 3, 5, 3, 3, 3, 1, 6, 10, 6, 2, 2, 2, 3, 2);
    one_layer(1'b1, 3, 3, 4, 3, 2, 2, 0, 9, 12, 9, 0, 0, 2, 3, 2);
    // 2D, channels beyond the count, and an edge block with cropping
    one_layer(1'b0, 2, 4, 4, 1, 5, 2, 0, 9, 9, 1, 0, 4, 2, 3, 0);
    one_layer(1'b0, 3, 5, 4, 1, 3, 3, 2, 10, 8, 1, 2, 0, 4, 3, 0);
    checks++; if (n_bcast == 0) begin failures++; $display("no broadcast weight write"); end
    checks++; if (n_stall == 0) begin failures++; $display("no memory stall"); end
    $display("broadcast writes %0d, stalls %0d", n_bcast, n_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
