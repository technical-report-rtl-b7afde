// Full-size testbench of the CCQ-RR switch core: ccq_switch at its default
// parameters (32 x 32 ports, 40-cell crosspoint buffers, 512-bit cells,
// 16-bit wait-counters), no overrides.
//
// Traffic has two phases followed by a drain:
//   1. hot spot: for 120 slots every input sends to output 0, so column 0
//      receives 32 cells per slot while it can send one; its crosspoints fill,
//      deflect toward their predecessors and finally drop;
//   2. on/off bursts to random outputs at moderate load, as in the
//      reduced-size end-to-end test.
// A cell carries {input, output, flow sequence number} in its low 32 bits and
// a copy of its sequence number in the top 16 bits, so a cell whose bits are
// mixed between memory slots is caught. Checks: per-flow order without loss
// or duplication, cell on its own output, output busy in every slot its
// column holds a cell, accept/drop reported exactly once per offered cell,
// everything drained at the end; tail drop, deflection and notification
// relay must each be seen.
module tb_ccq_switch_full;
  localparam int N  = ccq_pkg::N_PORTS;
  localparam int DW = ccq_pkg::CELL_BITS;
  localparam int NW = $clog2(N);
  localparam int HOT = 120, SLOTS = 900, DRAIN = 2000;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [N-1:0]    in_valid, in_accept, in_drop, out_valid;
  logic [NW-1:0]   in_dest [N];
  logic [DW-1:0]   in_data [N];
  logic [DW-1:0]   out_data [N];
  logic [NW-1:0]   lb_slot;

  ccq_switch dut (.*);

  int checks = 0, failures = 0, cyc = 0;
  int expq [N*N][$];
  int seq [N*N];
  bit on [N];
  int dst [N];
  int buffered [N];
  int n_drop = 0, n_defl = 0, n_upd = 0, accepted = 0, delivered = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL slot %0d: %s", cyc, what);
    end
  endtask

  for (genvar j = 0; j < N; j++) begin : g_mon
    always @(posedge clk) if (rst_n) begin
      n_defl += $countones(dut.g_col[j].u_chain.defl);
      n_upd  += $countones(dut.g_col[j].u_chain.ntf_update);
    end
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int f = 0; f < N*N; f++) seq[f] = 0;
    for (int i = 0; i < N; i++) begin on[i] = 0; dst[i] = 0; buffered[i] = 0; end
    in_valid = '0;
    for (int i = 0; i < N; i++) begin in_dest[i] = '0; in_data[i] = '0; end
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    for (cyc = 0; cyc < SLOTS + DRAIN; cyc++) begin
      int acc_j [N];
      for (int i = 0; i < N; i++) begin
        if (cyc < HOT) begin
          on[i] = 1'b1; dst[i] = 0;
        end else if (cyc >= SLOTS) on[i] = 0;
        else if (on[i]) on[i] = ($urandom_range(0, 15) != 0);
        else if ($urandom_range(0, 15) == 0) begin
          on[i] = 1'b1;
          dst[i] = $urandom_range(0, N - 1);
        end
        in_valid[i] = on[i];
        in_dest[i]  = NW'(dst[i]);
        in_data[i]  = '0;
        in_data[i][31:0] = {8'(i), 8'(dst[i]), 16'(seq[i*N + dst[i]])};
        in_data[i][DW-1 -: 16] = 16'(seq[i*N + dst[i]]);
      end
      #4;
      check(int'(lb_slot) == cyc % N, "load balancer slot");
      for (int j = 0; j < N; j++) acc_j[j] = 0;
      for (int i = 0; i < N; i++) begin
        int f;
        f = i * N + dst[i];
        check((in_accept[i] || in_drop[i]) == in_valid[i] && !(in_accept[i] && in_drop[i]),
              "accept/drop reported once");
        if (in_accept[i]) begin
          expq[f].push_back(seq[f]);
          acc_j[dst[i]]++;
          accepted++;
        end
        if (in_drop[i]) n_drop++;
        if (in_valid[i]) seq[f]++;
      end
      for (int j = 0; j < N; j++) begin
        buffered[j] += acc_j[j];
        check(out_valid[j] == (buffered[j] > 0), $sformatf("work conservation out %0d", j));
        if (out_valid[j]) begin
          int s, d, q, f;
          s = int'(out_data[j][31:24]);
          d = int'(out_data[j][23:16]);
          q = int'(out_data[j][15:0]);
          f = s * N + d;
          check(d == j, "cell on its own output");
          check(out_data[j][DW-1 -: 16] == 16'(q), "cell bits intact");
          if (s < N && d < N && expq[f].size() > 0) begin
            check(q == expq[f][0], $sformatf("flow %0d->%0d order: got %0d want %0d", s, d, q, expq[f][0]));
            void'(expq[f].pop_front());
          end else check(0, "unexpected cell");
          buffered[j]--;
          delivered++;
        end
      end
      @(negedge clk);
    end
    for (int f = 0; f < N*N; f++) check(expq[f].size() == 0, "all accepted cells delivered");
    $display("full size: accepted=%0d delivered=%0d drops=%0d deflections=%0d notif_relayed=%0d",
             accepted, delivered, n_drop, n_defl, n_upd);
    check(n_drop > 0, "tail drop");
    check(n_defl > 0, "deflection");
    check(n_upd > 0, "notification relayed");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
