// Traffic-pattern testbench of the CCQ-RR switch core (ccq_switch), reduced
// size N=8, B=10.
//
// Runs, one after the other and each followed by a drain, the three kinds of
// load the switch is meant for:
//   uniform   : on/off bursts, destination uniform per burst, load about 0.7;
//   hot spot  : as uniform, but a burst of input i goes to output i with
//               probability 1/2 (non-uniform traffic), load about 0.9;
//   bursty    : mean burst length four times longer, load about 0.7.
// A burst is a run of cells of one flow in consecutive slots with a
// geometric length; the gaps between bursts are geometric too, sized to set
// the load. For every phase the bench checks per-flow order without loss or
// duplication, work conservation of every output, and the drain, and prints
// the cell drop rate. The drop rates are reported, not judged: they depend on
// the random sequence and the short run.
module tb_ccq_switch_traffic;
  localparam int N = 8, B = 10, DW = 32, WC_W = 16;
  localparam int NW = $clog2(N);
  localparam int SLOTS = 6000, DRAIN = 1200;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [N-1:0]    in_valid, in_accept, in_drop, out_valid;
  logic [NW-1:0]   in_dest [N];
  logic [DW-1:0]   in_data [N];
  logic [DW-1:0]   out_data [N];
  logic [NW-1:0]   lb_slot;

  ccq_switch #(.N(N), .B(B), .DATA_W(DW), .WC_W(WC_W)) dut (.*);

  int checks = 0, failures = 0, cyc = 0;
  int expq [N*N][$];
  int seq [N*N];
  bit on [N];
  int dst [N];
  int buffered [N];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL slot %0d: %s", cyc, what);
    end
  endtask

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // One phase: mean burst length 'lb', probability of starting a burst in an
  // idle slot 'p_on' (per mille), hot-spot probability 'hot' (per mille).
  task automatic run_phase(input string name, input int lb, input int p_on, input int hot);
    int offered = 0, dropped = 0;
    for (int s = 0; s < SLOTS + DRAIN; s++) begin
      int acc_j [N];
      for (int i = 0; i < N; i++) begin
        if (s >= SLOTS) on[i] = 0;
        else if (on[i]) on[i] = ($urandom_range(0, lb - 1) != 0);
        else if ($urandom_range(0, 999) < p_on) begin
          on[i] = 1'b1;
          dst[i] = ($urandom_range(0, 999) < hot) ? i : $urandom_range(0, N - 1);
        end
        in_valid[i] = on[i];
        in_dest[i]  = NW'(dst[i]);
        in_data[i]  = {8'(i), 8'(dst[i]), 16'(seq[i*N + dst[i]])};
      end
      #4;
      for (int j = 0; j < N; j++) acc_j[j] = 0;
      for (int i = 0; i < N; i++) begin
        int f;
        f = i * N + dst[i];
        check((in_accept[i] || in_drop[i]) == in_valid[i], "accept/drop reported once");
        if (in_accept[i]) begin expq[f].push_back(seq[f]); acc_j[dst[i]]++; end
        if (in_valid[i]) begin seq[f]++; offered++; end
        if (in_drop[i]) dropped++;
      end
      for (int j = 0; j < N; j++) begin
        buffered[j] += acc_j[j];
        check(out_valid[j] == (buffered[j] > 0), "work conservation");
        if (out_valid[j]) begin
          int sr, d, q, f;
          sr = int'(out_data[j][31:24]);
          d  = int'(out_data[j][23:16]);
          q  = int'(out_data[j][15:0]);
          f  = sr * N + d;
          check(d == j, "cell on its own output");
          if (sr < N && d < N && expq[f].size() > 0) begin
            check(q == expq[f][0], "per-flow order");
            void'(expq[f].pop_front());
          end else check(0, "unexpected cell");
          buffered[j]--;
        end
      end
      cyc++;
      @(negedge clk);
    end
    for (int f = 0; f < N*N; f++) check(expq[f].size() == 0, "drained");
    check(offered > 0, "traffic offered");
    $display("%-9s offered=%0d dropped=%0d load=%0.2f drop_rate=%0.2e", name, offered, dropped,
             real'(offered) / real'(SLOTS * N), real'(dropped) / real'(offered));
  endtask

  initial begin
    for (int f = 0; f < N*N; f++) seq[f] = 0;
    for (int i = 0; i < N; i++) begin on[i] = 0; dst[i] = 0; buffered[i] = 0; end
    in_valid = '0;
    for (int i = 0; i < N; i++) begin in_dest[i] = '0; in_data[i] = '0; end
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    // load = lb / (lb + 1000/p_on) approximately
    run_phase("uniform", 16, 143, 0);
    run_phase("hot spot", 16, 360, 500);
    run_phase("bursty", 64, 36, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
