// Self-checking testbench of one daisy chain (ccq_chain) with its arbiter.
//
// The bench plays the load balancer itself: input f's cell in slot t is
// offered to crosspoint (f + t) mod N. Each input is an on/off source whose
// bursts overload the output for a while, so buffers fill, cells are dropped,
// deflected and inserted behind equal counters, and notifications are relayed
// and discarded. A cell carries {input, sequence number}. Checks, all against
// the bench's own bookkeeping:
//   - every departing cell is the oldest accepted, undelivered cell of its
//     input (per-flow order, nothing lost, nothing duplicated);
//   - a cell is dropped exactly when its crosspoint holds B cells;
//   - the output sends a cell in every slot in which any cell is buffered
//     (work conservation);
//   - buffered cells = accepted - delivered, and all drain at the end.
// Each mechanism must occur at least once.
module tb_ccq_chain;
  localparam int N = 4, B = 4, DW = 32, WC_W = 16;
  localparam int NW = $clog2(N), CW = $clog2(B + 1);
  localparam int SLOTS = 6000, DRAIN = 400;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [N-1:0]    arr_valid, arr_accept, arr_drop, defl, ntf_update, ntf_discard, ins_tie;
  logic [DW-1:0]   arr_data [N];
  logic            out_valid, arb_miss;
  logic [DW-1:0]   out_data;
  logic [CW-1:0]   occupancy [N];
  logic [WC_W-1:0] w_ant [N];
  logic [NW-1:0]   arb_pos;
  logic [WC_W-1:0] arb_rr;

  ccq_chain #(.N(N), .B(B), .DATA_W(DW), .WC_W(WC_W)) dut (.*);

  int checks = 0, failures = 0;
  int cyc = 0;
  int expq [N][$];
  int seq [N];
  bit on [N];
  int n_defl = 0, n_upd = 0, n_disc = 0, n_tie = 0, n_drop = 0, n_batch = 0, n_wrap = 0,
      n_cut = 0, n_miss = 0;
  int accepted = 0, delivered = 0;
  logic [NW-1:0] last_srv;
  bit last_srv_v = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL slot %0d: %s", cyc, what);
    end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int f = 0; f < N; f++) begin seq[f] = 0; on[f] = 0; end
    arr_valid = '0;
    for (int k = 0; k < N; k++) arr_data[k] = '0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    for (cyc = 0; cyc < SLOTS + DRAIN; cyc++) begin
      int occ_sum, acc_now;
      logic [WC_W-1:0] rr_before;
      // --- drive the slot
      arr_valid = '0;
      for (int f = 0; f < N; f++) begin
        int k;
        if (cyc < SLOTS) begin
          if (on[f]) on[f] = ($urandom_range(0, 9) != 0);
          else       on[f] = ($urandom_range(0, 39) == 0);
        end else on[f] = 0;
        k = (f + cyc) % N;
        if (on[f]) begin
          arr_valid[k] = 1'b1;
          arr_data[k]  = {8'(f), 24'(seq[f])};
        end
      end
      #4;
      // --- check the slot (combinational outputs settle before the edge)
      occ_sum = 0;
      acc_now = 0;
      for (int k = 0; k < N; k++) begin
        occ_sum += int'(occupancy[k]);
        check(arr_drop[k] == (arr_valid[k] && occupancy[k] == CW'(B)), "drop rule");
        if (arr_accept[k]) begin
          int f;
          f = int'(arr_data[k][31:24]);
          expq[f].push_back(seq[f]);
          acc_now++;
          if (occupancy[k] == 0 && out_valid && dut.grant[k]) n_cut++;
        end
        if (arr_valid[k]) seq[int'(arr_data[k][31:24])]++;
        if (arr_drop[k]) n_drop++;
      end
      accepted += acc_now;
      check(out_valid == ((occ_sum + acc_now) > 0), "work conservation");
      if (out_valid) begin
        int f, s;
        f = int'(out_data[31:24]);
        s = int'(out_data[23:0]);
        if (f < N && expq[f].size() > 0) begin
          check(s == expq[f][0], $sformatf("order: flow %0d got %0d want %0d", f, s, expq[f][0]));
          void'(expq[f].pop_front());
        end else check(0, "cell from unknown flow");
        delivered++;
        if (last_srv_v && dut.u_arb.a_new == last_srv) n_batch++;
        last_srv = dut.u_arb.a_new;
        last_srv_v = 1;
      end else last_srv_v = 0;
      n_defl += $countones(defl);
      n_upd  += $countones(ntf_update);
      n_disc += $countones(ntf_discard);
      n_tie  += $countones(ins_tie);
      if (arb_miss) n_miss++;
      rr_before = arb_rr;
      @(posedge clk);
      #1;
      if (arb_rr != rr_before) n_wrap++;
      begin
        int occ_after;
        occ_after = 0;
        for (int k = 0; k < N; k++) occ_after += int'(occupancy[k]);
        check(occ_after == accepted - delivered, "occupancy = accepted - delivered");
      end
      @(negedge clk);
    end
    for (int f = 0; f < N; f++) check(expq[f].size() == 0, "drained");
    check(n_miss == 0, "arbiter never misses");
    $display("mechanisms: deflections=%0d notif_relayed=%0d notif_discarded=%0d tie_inserts=%0d drops=%0d batch_serves=%0d rr_cycles=%0d cut_through=%0d accepted=%0d delivered=%0d",
             n_defl, n_upd, n_disc, n_tie, n_drop, n_batch, n_wrap, n_cut, accepted, delivered);
    check(n_defl > 0, "deflection happened");
    check(n_upd > 0, "notification relayed");
    check(n_disc > 0, "notification discarded");
    check(n_tie > 0, "deflected cell inserted behind equal counter");
    check(n_drop > 0, "tail drop happened");
    check(n_batch > 0, "batch service happened");
    check(n_wrap > 0, "RR cycle advanced");
    check(n_cut > 0, "same-slot departure of an arriving cell");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
