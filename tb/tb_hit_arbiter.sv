// tb_hit_arbiter: random hits on 12 channels with random back-pressure.
// Every hit carries a per-channel sequence number in its time field; the
// checker requires that each channel's hits come out in order, tagged with the
// right channel, none duplicated; that hits offered to a full FIFO are the
// ones missing and are counted in `lost`; that with all channels busy the
// grant rotates (each channel served within 12 outputs); and that the output
// holds steady while not accepted (assertion in the block, and checked here).
module tb_hit_arbiter;
  import tdc_pkg::*;
  localparam int N = 12;
  logic clk = 0, rst = 1;
  logic [N-1:0] in_valid = '0;
  hit_t in_data [N];
  logic out_valid, out_ready = 0;
  hit_t out_data;
  logic [31:0] lost;
  int checks = 0, failures = 0;
  int sent [N], recv [N], dropped_exp = 0;
  int occ [N];                   // model FIFO occupancy
  int last_out_ch = -1;
  int since [N];

  hit_arbiter #(.N(N), .DEPTH(8)) dut (.clk(clk), .rst(rst), .in_valid(in_valid), .in_data(in_data),
    .out_valid(out_valid), .out_ready(out_ready), .out_data(out_data), .lost(lost));

  always #1.6 clk = ~clk;

  task automatic chk(bit cond, string msg);
    checks++;
    if (!cond) begin failures++; if (failures < 10) $display("FAIL: %s", msg); end
  endtask

  initial for (int i = 0; i < N; i++) begin sent[i] = 0; recv[i] = 0; in_data[i] = '0; since[i] = 0; end

  // expected sequence per channel: numbers accepted in order
  int q [N][$];

  always @(posedge clk) if (!rst) begin
    if (out_valid && out_ready) begin
      int c;
      c = int'(out_data.ch);
      checks++;
      if (c >= N || q[c].size() == 0) begin failures++; $display("FAIL: hit from channel %0d not expected", c); end
      else begin
        int e; e = q[c].pop_front();
        if (int'(out_data.t_lead) != e) begin failures++; if (failures < 10) $display("FAIL: ch %0d got seq %0d exp %0d", c, out_data.t_lead, e); end
      end
    end
  end

  initial begin
    hit_t held;
    bit   was_stalled, can_take;
    bit   all_busy;
    repeat (3) @(negedge clk);
    rst = 0;
    for (int i = 0; i < N; i++) occ[i] = 0;
    was_stalled = 0; can_take = 0; all_busy = 0;
    for (int t = 0; t < 4000; t++) begin
      @(negedge clk);
      // a FIFO was popped at the edge just past if the output register could
      // take a word and now holds one
      if (can_take && out_valid) begin
        int c; c = int'(out_data.ch);
        if (c < N) occ[c]--;
        if (all_busy && last_out_ch >= 0) chk(c == (last_out_ch + 1) % N, $sformatf("round robin: %0d after %0d", c, last_out_ch));
        last_out_ch = c;
      end
      if (was_stalled) chk(out_valid && out_data == held, "output held while stalled");
      // phase A (t < 1500): heavy load, little back-pressure -> overflow
      // phase B: light load, to drain and check order
      out_ready = (t < 1500) ? ($urandom % 4 == 0) : ($urandom % 4 != 0);
      all_busy = 1;
      for (int i = 0; i < N; i++) if (occ[i] == 0) all_busy = 0;
      for (int i = 0; i < N; i++) begin
        in_valid[i] = (t < 3500) && ($urandom % ((t < 1500) ? 3 : 40) == 0);
        if (in_valid[i]) begin
          in_data[i].t_lead = (COARSE_W+5)'(sent[i]);
          in_data[i].tot = 16'(t);
          in_data[i].ch = 4'($urandom);   // must be overwritten by the arbiter
          if (occ[i] < 8) begin q[i].push_back(sent[i]); occ[i]++; end
          else dropped_exp++;
          sent[i]++;
        end
      end
      held = out_data;
      was_stalled = out_valid && !out_ready;
      can_take = !out_valid || out_ready;
    end
    repeat (100) @(negedge clk);
    for (int i = 0; i < N; i++) chk(q[i].size() == 0, $sformatf("channel %0d: %0d hits not delivered", i, q[i].size()));
    chk(lost == 32'(dropped_exp), $sformatf("lost=%0d expected %0d", lost, dropped_exp));
    chk(dropped_exp > 0, "overflow exercised");
    $display("lost=%0d", lost);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
