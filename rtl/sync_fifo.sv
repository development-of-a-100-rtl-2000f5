// sync_fifo: small single-clock FIFO with first-word fall-through.
// Interface: push when wr_en && !full; rd_data is the oldest entry while
// !empty, and rd_en removes it. DEPTH must be a power of two. Writing when full
// or reading when empty is ignored (and flagged by an assertion).
module sync_fifo #(
  parameter int unsigned W     = 8,
  parameter int unsigned DEPTH = 8
) (
  input  logic         clk,
  input  logic         rst,
  input  logic         wr_en,
  input  logic [W-1:0] wr_data,
  output logic         full,
  input  logic         rd_en,
  output logic [W-1:0] rd_data,
  output logic         empty
);
  localparam int unsigned AW = $clog2(DEPTH);

  logic [W-1:0] mem [DEPTH];
  logic [AW:0]  wp, rp;

  assign full    = (wp[AW] != rp[AW]) && (wp[AW-1:0] == rp[AW-1:0]);
  assign empty   = (wp == rp);
  assign rd_data = mem[rp[AW-1:0]];

  always_ff @(posedge clk) begin
    if (wr_en && !full) mem[wp[AW-1:0]] <= wr_data;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      wp <= '0;
      rp <= '0;
    end else begin
      if (wr_en && !full) wp <= wp + 1'b1;
      if (rd_en && !empty) rp <= rp + 1'b1;
    end
  end

  a_no_underflow: assert property (@(posedge clk) disable iff (rst) rd_en |-> !empty)
    else $error("sync_fifo: read while empty");

  initial assert (DEPTH == (1 << AW) && DEPTH >= 2) else $error("DEPTH must be a power of two");
endmodule
