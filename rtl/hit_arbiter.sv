// hit_arbiter: merges the hits of N TDC channels into one readout stream.
//
// Each channel hit (a one-cycle strobe) is written into that channel's FIFO.
// A round-robin arbiter picks the next non-empty FIFO at or after the channel
// served last, and offers its hit, tagged with the channel number, on a
// valid/ready output register. A hit that meets a full FIFO is dropped and
// counted in `lost`. The paper shows only a "readout" block; the FIFOs, the
// round-robin rule and the depth are this design's choices.
// Timing: a hit reaches out_valid two cycles after its strobe when the output
// is free; the output accepts one hit per cycle while out_ready is high.
module hit_arbiter
  import tdc_pkg::hit_t;
  import tdc_pkg::CHID_W;
#(
  parameter int unsigned N     = 12,
  parameter int unsigned DEPTH = 8
) (
  input  logic           clk,
  input  logic           rst,
  input  logic [N-1:0]   in_valid,
  input  hit_t           in_data [N],
  output logic           out_valid,
  input  logic           out_ready,
  output hit_t           out_data,
  output logic [31:0]    lost
);
  localparam int unsigned NW = (N > 1) ? $clog2(N) : 1;

  logic [N-1:0] empty, full, pop;
  hit_t         head [N];
  hit_t         wdata [N];
  logic [NW-1:0] last;     // channel served last
  logic          found;
  logic [NW-1:0] pick;

  for (genvar i = 0; i < N; i++) begin : g_fifo
    always_comb begin
      wdata[i]    = in_data[i];
      wdata[i].ch = CHID_W'(i);
    end
    sync_fifo #(.W($bits(hit_t)), .DEPTH(DEPTH)) u_fifo (
      .clk(clk), .rst(rst),
      .wr_en(in_valid[i]), .wr_data(wdata[i]), .full(full[i]),
      .rd_en(pop[i]), .rd_data(head[i]), .empty(empty[i]));
  end

  // round robin: first non-empty FIFO after `last`, wrapping around
  always_comb begin
    found = 1'b0;
    pick  = '0;
    for (int k = 1; k <= N; k++) begin
      int unsigned c;
      c = (int'(last) + k) % N;
      if (!found && !empty[c]) begin
        found = 1'b1;
        pick  = NW'(c);
      end
    end
  end

  logic take;
  assign take = found && (!out_valid || out_ready);

  always_comb begin
    pop = '0;
    if (take) pop[pick] = 1'b1;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      out_valid <= 1'b0;
      last      <= NW'(N - 1);
      lost      <= '0;
    end else begin
      if (take) begin
        out_valid <= 1'b1;
        out_data  <= head[pick];
        last      <= pick;
      end else if (out_ready) begin
        out_valid <= 1'b0;
      end
      if (|(in_valid & full)) lost <= lost + 32'($countones(in_valid & full));
    end
  end

  // The output word must hold still until it is accepted.
  a_stable: assert property (@(posedge clk) disable iff (rst)
    out_valid && !out_ready |=> out_valid && $stable(out_data))
    else $error("hit_arbiter: output changed before it was accepted");
endmodule
