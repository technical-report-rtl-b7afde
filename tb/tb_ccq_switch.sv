// End-to-end testbench of the CCQ-RR switch core (ccq_switch) at reduced size.
//
// Every input is an on/off source: a burst sends one cell per slot to a single
// output chosen at random for the burst, the way bursts of one flow are
// generated in the evaluation; the average load per output is about 0.45, with
// bursts long enough to overflow the small crosspoint buffers. A cell carries
// {input, output, sequence number of its flow}. Checks, against the bench's
// own per-flow bookkeeping:
//   - each delivered cell appears on its own output and is the oldest
//     accepted, undelivered cell of its flow (order kept end to end, nothing
//     lost or duplicated);
//   - each output sends a cell in every slot in which its column holds any
//     (work conservation), and everything drains at the end;
//   - the load balancer's connection pattern: the cell of input i in slot t
//     lands in crosspoint row (i + t) mod N.
// Every mechanism of the design must occur: load-balancer wrap, tail drop,
// deflection, notification relay and discard, insert behind an equal
// counter, batch service, same-slot departure, RR-cycle advance.
module tb_ccq_switch;
  localparam int N = 8, B = 4, DW = 32, WC_W = 16;
  localparam int NW = $clog2(N);
  localparam int SLOTS = 8000, DRAIN = 600;

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
  int n_drop = 0, n_lbwrap = 0, n_cut = 0, n_batch = 0, n_rows = 0;
  int n_defl [N], n_upd [N], n_disc [N], n_tie [N], n_rr [N], n_miss [N];
  int accepted = 0, delivered = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL slot %0d: %s", cyc, what);
    end
  endtask

  // Per-column mechanism counters (constant generate indices into the DUT).
  for (genvar j = 0; j < N; j++) begin : g_mon
    logic [WC_W-1:0] rr_prev;
    logic [NW-1:0]   pos_prev;
    logic            srv_prev;
    initial begin n_defl[j] = 0; n_upd[j] = 0; n_disc[j] = 0; n_tie[j] = 0; n_rr[j] = 0; n_miss[j] = 0; srv_prev = 0; end
    always @(posedge clk) if (rst_n) begin
      n_defl[j] += $countones(dut.g_col[j].u_chain.defl);
      n_upd[j]  += $countones(dut.g_col[j].u_chain.ntf_update);
      n_disc[j] += $countones(dut.g_col[j].u_chain.ntf_discard);
      n_tie[j]  += $countones(dut.g_col[j].u_chain.ins_tie);
      if (dut.g_col[j].u_chain.arb_miss) n_miss[j]++;
      if (dut.g_col[j].u_chain.arb_rr != rr_prev) n_rr[j]++;
      if (out_valid[j] && srv_prev && dut.g_col[j].u_chain.u_arb.a_new == pos_prev) n_batch++;
      for (int k = 0; k < N; k++)
        if (dut.g_col[j].u_chain.arr_accept[k] && dut.g_col[j].u_chain.occupancy[k] == 0 &&
            dut.g_col[j].u_chain.grant[k]) n_cut++;
      rr_prev  <= dut.g_col[j].u_chain.arb_rr;
      pos_prev <= dut.g_col[j].u_chain.u_arb.a_new;
      srv_prev <= out_valid[j];
    end
  end

  initial begin
    repeat (400000) @(posedge clk);
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
      // ---- drive: bursts of mean length 12, load about 0.8
      for (int i = 0; i < N; i++) begin
        if (cyc >= SLOTS) on[i] = 0;
        else if (on[i]) on[i] = ($urandom_range(0, 11) != 0);
        else if ($urandom_range(0, 14) < 4) begin
          on[i] = ($urandom_range(0, 3) == 0) ? 1'b1 : 1'b0;
          dst[i] = $urandom_range(0, N - 1);
        end
        in_valid[i] = on[i];
        in_dest[i]  = NW'(dst[i]);
        in_data[i]  = {8'(i), 8'(dst[i]), 16'(seq[i*N + dst[i]])};
      end
      #4;
      check(int'(lb_slot) == cyc % N, "load balancer slot");
      if (lb_slot == NW'(N - 1)) n_lbwrap++;
      // row check: input i's cell is offered to row (i + t) mod N of its column
      for (int i = 0; i < N; i++) if (in_valid[i]) begin
        check(dut.u_lb.src_of[(i + cyc) % N] == NW'(i), "LB connection");
        n_rows++;
      end
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
    begin
      int sd = 0, su = 0, sc = 0, st = 0, sr = 0, sm = 0;
      for (int j = 0; j < N; j++) begin
        sd += n_defl[j]; su += n_upd[j]; sc += n_disc[j]; st += n_tie[j]; sr += n_rr[j]; sm += n_miss[j];
      end
      $display("mechanisms: lb_wraps=%0d drops=%0d deflections=%0d notif_relayed=%0d notif_discarded=%0d tie_inserts=%0d batch_serves=%0d cut_through=%0d rr_cycles=%0d arbiter_misses=%0d accepted=%0d delivered=%0d",
               n_lbwrap, n_drop, sd, su, sc, st, n_batch, n_cut, sr, sm, accepted, delivered);
      check(n_lbwrap > 0, "load balancer cycled");
      check(n_drop > 0, "tail drop");
      check(sd > 0, "deflection");
      check(su > 0, "notification relayed");
      check(sc > 0, "notification discarded");
      check(st > 0, "insert behind equal counter");
      check(n_batch > 0, "batch service");
      check(n_cut > 0, "same-slot departure");
      check(sr > 0, "RR cycle advanced");
      check(sm == 0, "arbiter never misses");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
