// sync_fifo: single-clock first-word-fall-through FIFO.
//
// Smooths the bursty output of a layer (valid outputs only in some rows and
// columns) into the steady flow that the interleaver and the next layer
// consume. rd_data shows the oldest word whenever empty is low; rd_en pops
// it. almost_full is high when at most AF_MARGIN free places remain, early
// enough to stop the producer while words it already has in flight still
// fit. Writing when full or reading when empty is a protocol error (assert).
//
// Lint note: rst_n drives the asynchronous reset of the pointers and also
// the 'disable iff' of the two protocol assertions, so verilator reports it
// as used both synchronously and asynchronously; the assertions are not
// part of the synthesised circuit.
module sync_fifo #(
  parameter int unsigned W         = 8,
  parameter int unsigned DEPTH     = 16,
  parameter int unsigned AF_MARGIN = 6
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         wr_en,
  input  logic [W-1:0] wr_data,
  input  logic         rd_en,
  output logic [W-1:0] rd_data,
  output logic         empty,
  output logic         full,
  output logic         almost_full
);
  localparam int unsigned AW = (DEPTH <= 2) ? 1 : $clog2(DEPTH);

  logic [W-1:0]  mem [DEPTH];
  logic [AW-1:0] wp, rp;
  logic [AW:0]   count;

  assign empty       = (count == 0);
  assign full        = (count == (AW+1)'(DEPTH));
  assign almost_full = (int'(count) + int'(AF_MARGIN) >= int'(DEPTH));
  assign rd_data     = mem[rp];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wp] <= wr_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp    <= '0;
      rp    <= '0;
      count <= '0;
    end else begin
      if (wr_en) wp <= (wp == AW'(DEPTH - 1)) ? '0 : wp + 1'b1;
      if (rd_en) rp <= (rp == AW'(DEPTH - 1)) ? '0 : rp + 1'b1;
      count <= count + (AW+1)'(wr_en) - (AW+1)'(rd_en);
    end
  end

  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) wr_en |-> (!full || rd_en))
    else $error("sync_fifo: write while full");
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) rd_en |-> !empty)
    else $error("sync_fifo: read while empty");
endmodule
