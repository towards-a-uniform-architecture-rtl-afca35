// output_buffer: on-chip accumulation buffer for the output block produced by
// one spatial input block, for the TM output channels computed together.
//
// The output block of a TR x TC (x TZ) input block spans OBH x OBW (x OBD)
// output positions, OBH = (TR-1)*SMAX + K and so on. Every cycle up to TR x TZ
// results per output channel arrive from the adder trees, each with its
// coordinates (tag) inside the block; the buffer adds each one to the stored
// partial sum (read-modify-write in one cycle). Results arriving in the same
// cycle always have distinct coordinates, because the PE array never emits one
// position from two rows or planes at once. Partial sums stay in the buffer
// while the input-channel passes of the block run ("results are accumulated
// until the input channels are complete"). The memory controller then reads
// each entry with rd_en, which also clears it, ready for the next block.
// After reset the buffer clears itself, one entry per cycle; init_busy is
// high meanwhile. Accumulation, the clear-on-read port and the self-clear are
// choices of this design; the paper gives the buffer's role only.
module output_buffer
  import dcnn_pkg::*;
#(
  parameter int unsigned TM   = 2,
  parameter int unsigned TZ   = 4,
  parameter int unsigned TR   = 4,
  parameter int unsigned TC   = 4,
  parameter int unsigned K    = 3,
  parameter int unsigned SMAX = 3,
  localparam int unsigned L   = TR * TZ,
  localparam int unsigned OBH = (TR - 1) * SMAX + K,
  localparam int unsigned OBW = (TC - 1) * SMAX + K,
  localparam int unsigned OBD = (TZ - 1) * SMAX + K,
  localparam int unsigned N   = TM * OBD * OBH * OBW
) (
  input  logic               clk,
  input  logic               rst_n,
  // accumulate ports: lane l of output channel m
  input  logic               acc_vld [TM][L],
  input  tag_t               acc_tag [TM][L],
  input  acc_t               acc_val [TM][L],
  // read-and-clear port
  input  logic               rd_en,
  input  logic [cw(TM)-1:0]  rd_m,
  input  tag_t               rd_tag,
  output acc_t               rd_data,
  output logic               init_busy
);
  acc_t mem [N];
  logic [cw(N)-1:0] init_ptr;

  function automatic int unsigned addr(input int unsigned m, input tag_t t);
    return ((m * OBD + t.od) * OBH + t.oh) * OBW + t.ow;
  endfunction

  assign rd_data = mem[addr(rd_m, rd_tag)];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      init_busy <= 1'b1;
      init_ptr  <= '0;
    end else if (init_busy) begin
      mem[init_ptr] <= '0;
      init_ptr      <= init_ptr + 1'b1;
      if (init_ptr == cw(N)'(N - 1)) init_busy <= 1'b0;
    end else begin
      for (int m = 0; m < TM; m++)
        for (int l = 0; l < L; l++)
          if (acc_vld[m][l])
            mem[addr(m, acc_tag[m][l])] <= mem[addr(m, acc_tag[m][l])] + acc_val[m][l];
      if (rd_en) mem[addr(rd_m, rd_tag)] <= '0;
    end
  end

  a_tag_range: assert property (@(posedge clk) disable iff (!rst_n)
    rd_en |-> (rd_tag.oh < OBH && rd_tag.ow < OBW && rd_tag.od < OBD));

endmodule
