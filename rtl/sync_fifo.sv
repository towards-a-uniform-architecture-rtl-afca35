// sync_fifo: single-clock first-in first-out queue used for the overlap FIFOs
// (FIFO-V, FIFO-H, FIFO-D) and the result FIFO of every processing element.
//
// A circular buffer of DEPTH words of W bits with read and write pointers one
// bit wider than the index, so full and empty are told apart without a count
// register. The head word is shown on rd_data while empty is low (first-word
// fall-through); rd_en pops it at the clock edge. A write and a read may happen
// in the same cycle. Writing when full or reading when empty is a protocol
// error, caught by the assertions below; the queue discipline itself is the
// paper's, the depth and the fall-through read are choices of this design.
module sync_fifo #(
  parameter int unsigned W     = 32,
  parameter int unsigned DEPTH = 4
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         clr,       // synchronous flush
  input  logic         wr_en,
  input  logic [W-1:0] wr_data,
  input  logic         rd_en,
  output logic [W-1:0] rd_data,
  output logic         empty,
  output logic         full
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [W-1:0] mem [DEPTH];
  logic [AW:0]  wp, rp;

  function automatic logic [AW:0] inc(input logic [AW:0] p);
    logic [AW:0] n;
    if (p[AW-1:0] == AW'(DEPTH - 1)) n = {~p[AW], {AW{1'b0}}};
    else                             n = p + 1'b1;
    return n;
  endfunction

  assign empty   = (wp == rp);
  assign full    = (wp[AW-1:0] == rp[AW-1:0]) && (wp[AW] != rp[AW]);
  assign rd_data = mem[rp[AW-1:0]];

  always_ff @(posedge clk) begin
    if (!rst_n || clr) begin
      wp <= '0;
      rp <= '0;
    end else begin
      if (wr_en) wp <= inc(wp);
      if (rd_en) rp <= inc(rp);
    end
  end

  always_ff @(posedge clk) begin
    if (wr_en) mem[wp[AW-1:0]] <= wr_data;
  end

  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n || clr) !(wr_en && full));
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n || clr) !(rd_en && empty));

endmodule
