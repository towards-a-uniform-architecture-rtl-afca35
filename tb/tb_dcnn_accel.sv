// tb_dcnn_accel: end-to-end test of the accelerator at reduced size
// (TM=2, TN=2, TZ=2, TR=2, TC=3) against a DRAM model.
//
// Three layers run one after the other, each after a reset: a 3D layer with
// stride 2, low-edge cropping and several blocks and channel passes; a 2D layer
// whose channels need two passes through the TN x TZ planes; and a 3D layer
// with stride 3 (no overlaps at all). For each layer the testbench writes
// random activations and weights into the DRAM model, starts the accelerator,
// and compares every output word with a deconvolution computed here by
// scattering each input-activation x kernel product to its output position.
// It also checks the compute time: each pass keeps the PEs busy for exactly
// KV + TC cycles (KV kernel elements per PE plus the column skew). Mechanisms
// counted (a failure if one never happens): vertical, horizontal and depth
// overlap transfers, result-chain forwarding, 2D and 3D mode, multi-pass
// channel accumulation, rim merging across blocks, cropping, and memory stalls.
module tb_dcnn_accel;
  import dcnn_pkg::*;

  localparam int unsigned TM = 2, TN = 2, TZ = 2, TR = 2, TC = 3, K = 3, SMAX = 3;
  localparam int unsigned DDR_WORDS = 4096;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  layer_cfg_t cfg;
  logic       start = 1'b0, done, busy;
  logic       mem_req_vld, mem_req_rdy, mem_rsp_vld;
  mem_req_t   mem_req;
  acc_t       mem_rsp_data;
  logic [31:0] st_cyc, st_mac, st_pass;
  logic       bd_we = 1'b0;
  logic [31:0] bd_addr = '0;
  acc_t       bd_wdata = '0, bd_rdata;

  dcnn_accel #(.TM(TM), .TN(TN), .TZ(TZ), .TR(TR), .TC(TC), .K(K), .SMAX(SMAX)) u_dut (
    .clk, .rst_n, .cfg, .start, .done, .busy,
    .mem_req_vld, .mem_req, .mem_req_rdy, .mem_rsp_vld, .mem_rsp_data,
    .stat_cycles(st_cyc), .stat_mac_cycles(st_mac), .stat_passes(st_pass));

  ddr_model #(.DEPTH(DDR_WORDS), .LAT(5), .STALL(1'b1)) u_ddr (
    .clk, .rst_n, .req_vld(mem_req_vld), .req(mem_req), .req_rdy(mem_req_rdy),
    .rsp_vld(mem_rsp_vld), .rsp_data(mem_rsp_data),
    .bd_we, .bd_addr, .bd_wdata, .bd_rdata);

  int checks = 0, failures = 0;
  int n_v = 0, n_h = 0, n_d = 0, n_fwd = 0;
  int n_2d = 0, n_3d = 0, n_multipass = 0, n_rim = 0, n_crop = 0, n_stall = 0, n_noovl = 0;

  // mechanism probes inside the engine (group 0, channel 0)
  always @(posedge clk) if (rst_n) begin
    if (u_dut.u_engine.g_m[0].g_n[0].g_z[0].u_arr.g_row[1].g_col[0].u_pe.ov_v_out_vld) n_v++;
    if (u_dut.u_engine.g_m[0].g_n[0].g_z[0].u_arr.g_row[0].g_col[1].u_pe.ov_h_out_vld) n_h++;
    if (u_dut.u_engine.g_m[0].g_n[0].g_z[1].u_arr.g_row[0].g_col[0].u_pe.ov_d_out_vld) n_d++;
    if (u_dut.u_engine.g_m[0].g_n[0].g_z[0].u_arr.g_row[0].g_col[0].u_pe.res_in_vld &&
        u_dut.u_engine.g_m[0].g_n[0].g_z[0].u_arr.g_row[0].g_col[0].u_pe.res_in_rdy) n_fwd++;
    if (mem_req_vld && !mem_req_rdy) n_stall++;
  end

  task automatic bd_write(input int addr, input int val);
    @(negedge clk);
    bd_we = 1'b1; bd_addr = addr; bd_wdata = val;
    @(negedge clk);
    bd_we = 1'b0;
  endtask

  function automatic int cdiv(input int a, input int b);
    return (a + b - 1) / b;
  endfunction

  task automatic run_layer(input bit m3d, input int s, input int ih, input int iw, input int id,
                           input int nc, input int mc, input int pad,
                           input int oh, input int ow, input int od);
    int kv, n_in, n_w, n_out, in_base, w_base, out_base;
    int act[], wt[], ref_o[];
    int blocks, passes, errs;
    kv = m3d ? K * K * K : K * K;
    n_in = nc * id * ih * iw;
    n_w  = mc * nc * kv;
    n_out = mc * od * oh * ow;
    in_base = 0; w_base = n_in; out_base = n_in + n_w;
    act = new[n_in]; wt = new[n_w]; ref_o = new[n_out];
    foreach (act[i]) act[i] = int'($urandom_range(0, 30)) - 15;
    foreach (wt[i])  wt[i]  = int'($urandom_range(0, 30)) - 15;
    foreach (ref_o[i]) ref_o[i] = 0;
    // reference: scatter every product to its (cropped) output position
    for (int oc = 0; oc < mc; oc++)
      for (int ic = 0; ic < nc; ic++)
        for (int d = 0; d < id; d++)
          for (int h = 0; h < ih; h++)
            for (int w = 0; w < iw; w++)
              for (int kd = 0; kd < (m3d ? K : 1); kd++)
                for (int kh = 0; kh < K; kh++)
                  for (int kw = 0; kw < K; kw++) begin
                    int ph, pw, pd;
                    ph = h * s + kh - pad;
                    pw = w * s + kw - pad;
                    pd = m3d ? d * s + kd - pad : 0;
                    if (ph >= 0 && ph < oh && pw >= 0 && pw < ow && pd >= 0 && pd < od)
                      ref_o[((oc * od + pd) * oh + ph) * ow + pw] +=
                        act[((ic * id + d) * ih + h) * iw + w] *
                        wt[((oc * nc + ic) * kv + (kd * K + kh) * K + kw)];
                  end

    rst_n = 1'b0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    foreach (act[i]) bd_write(in_base + i, act[i]);
    foreach (wt[i])  bd_write(w_base + i, wt[i]);

    cfg = '0;
    cfg.mode3d = m3d; cfg.stride = 2'(s);
    cfg.ih = DIM_W'(ih); cfg.iw = DIM_W'(iw); cfg.id = DIM_W'(id);
    cfg.nc = DIM_W'(nc); cfg.mc = DIM_W'(mc); cfg.pad = DIM_W'(pad);
    cfg.oh = DIM_W'(oh); cfg.ow = DIM_W'(ow); cfg.od = DIM_W'(od);
    cfg.in_base = ADDR_W'(in_base); cfg.w_base = ADDR_W'(w_base); cfg.out_base = ADDR_W'(out_base);
    wait (!busy);
    @(negedge clk) start = 1'b1;
    @(negedge clk) start = 1'b0;
    wait (done);
    @(negedge clk);

    errs = 0;
    for (int i = 0; i < n_out; i++) begin
      bd_addr = out_base + i;
      #1;
      checks++;
      if (bd_rdata !== ref_o[i]) begin
        failures++; errs++;
        if (errs < 8) $display("  mismatch out[%0d]: got %0d expected %0d", i, bd_rdata, ref_o[i]);
      end
    end

    blocks = cdiv(mc, TM) * cdiv(ih, TR) * cdiv(iw, TC) * (m3d ? cdiv(id, TZ) : 1);
    passes = blocks * cdiv(nc, m3d ? TN : TN * TZ);
    checks++;
    if (st_pass != 32'(passes)) begin
      failures++; $display("  passes %0d expected %0d", st_pass, passes);
    end
    checks++;
    if (st_mac != 32'(passes * (kv + TC))) begin
      failures++; $display("  compute cycles %0d expected %0d", st_mac, passes * (kv + TC));
    end
    if (m3d) n_3d++; else n_2d++;
    if (passes > blocks) n_multipass++;
    if (blocks > cdiv(mc, TM) && s < K) n_rim++;
    if (pad > 0) n_crop++;
    if (s >= K) n_noovl++;
    $display("layer %s S=%0d: %0d outputs, %0d errors, %0d cycles, PE utilisation %0d%%",
             m3d ? "3D" : "2D", s, n_out, errs, st_cyc, st_mac * 100 / st_cyc);
  endtask

  initial begin
    repeat (2_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    run_layer(1'b1, 2, 3, 5, 3, 3, 3, 1, 6, 10, 6);
    run_layer(1'b0, 2, 4, 4, 1, 5, 2, 0, 9, 9, 1);
    run_layer(1'b1, 3, 2, 3, 2, 2, 1, 0, 6, 9, 6);
    $display("mechanisms: V=%0d H=%0d D=%0d fwd=%0d 2D=%0d 3D=%0d multipass=%0d rim=%0d crop=%0d nooverlap=%0d stall=%0d",
             n_v, n_h, n_d, n_fwd, n_2d, n_3d, n_multipass, n_rim, n_crop, n_noovl, n_stall);
    checks++; if (n_v == 0) begin failures++; $display("no vertical overlap seen"); end
    checks++; if (n_h == 0) begin failures++; $display("no horizontal overlap seen"); end
    checks++; if (n_d == 0) begin failures++; $display("no depth overlap seen"); end
    checks++; if (n_fwd == 0) begin failures++; $display("no result forwarding seen"); end
    checks++; if (n_2d == 0 || n_3d == 0) begin failures++; $display("a mode never ran"); end
    checks++; if (n_multipass == 0) begin failures++; $display("no multi-pass layer"); end
    checks++; if (n_rim == 0) begin failures++; $display("no rim merge"); end
    checks++; if (n_crop == 0) begin failures++; $display("no cropping"); end
    checks++; if (n_noovl == 0) begin failures++; $display("no stride >= K layer"); end
    checks++; if (n_stall == 0) begin failures++; $display("no memory stall"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
