// ddr_model: behavioural model of the external DRAM, for simulation only (it
// is not part of the accelerator, which uses the board's DDR3 through its
// memory controller). A word-addressed array of DEPTH words with a one-word
// request port (valid/ready, ready held high except on a pseudo-random stall
// cycle when STALL is set) and read data returned in request order exactly LAT
// cycles after the request was accepted. Writes take effect at acceptance.
// The array is cleared during reset; a testbench fills and inspects it through
// the back-door port (bd_*), which takes precedence over a request write.
module ddr_model
  import dcnn_pkg::*;
#(
  parameter int unsigned DEPTH = 65536,
  parameter int unsigned LAT   = 4,
  parameter bit          STALL = 1'b1
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     req_vld,
  input  mem_req_t req,
  output logic     req_rdy,
  output logic     rsp_vld,
  output acc_t     rsp_data,
  // back door for the testbench
  input  logic     bd_we,
  input  logic [31:0] bd_addr,
  input  acc_t     bd_wdata,
  output acc_t     bd_rdata
);
  acc_t mem [DEPTH];
  logic pv [LAT];
  acc_t pd [LAT];
  logic [15:0] lfsr;
  int unsigned n_stall;

  assign bd_rdata = mem[bd_addr % DEPTH];

  assign req_rdy  = !STALL || (lfsr[2:0] != 3'd0);
  assign rsp_vld  = pv[LAT-1];
  assign rsp_data = pd[LAT-1];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      lfsr    <= 16'hACE1;
      n_stall <= 0;
      for (int i = 0; i < LAT; i++) begin pv[i] <= 1'b0; pd[i] <= '0; end
      for (int i = 0; i < DEPTH; i++) mem[i] <= '0;
    end else begin
      lfsr <= {lfsr[14:0], lfsr[15] ^ lfsr[13] ^ lfsr[12] ^ lfsr[10]};
      if (req_vld && !req_rdy) n_stall <= n_stall + 1;
      pv[0] <= req_vld && req_rdy && !req.we;
      pd[0] <= mem[req.addr % DEPTH];
      for (int i = 1; i < LAT; i++) begin pv[i] <= pv[i-1]; pd[i] <= pd[i-1]; end
      if (bd_we) mem[bd_addr % DEPTH] <= bd_wdata;
      else if (req_vld && req_rdy && req.we) mem[req.addr % DEPTH] <= req.wdata;
    end
  end

endmodule
