// Testbench of the output arbiter (ccq_rr_arbiter).
// The reference is the sequential polling process: starting at the current
// position A with counter R, visit crosspoints A, A+1, ... (the counter grows
// by one on every move onto crosspoint 0) for at most 2N polls; serve the
// first non-empty crosspoint whose head counter equals the counter of its
// poll; raise each empty crosspoint passed on the way to (poll counter + 1);
// stay put when every crosspoint is empty. The bench feeds random occupancy
// and head counters near R, so that eligible crosspoints are found in the
// first pass, the second pass, or not at all, and compares grant, new
// position, new counter and floors, and that the registered state follows.
module tb_ccq_rr_arbiter;
  localparam int N = 5, WC_W = 8, NW = $clog2(N);
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic [N-1:0]    ne, grant, floor_en;
  logic [WC_W-1:0] hol_wc [N];
  logic [WC_W-1:0] floor_wc [N];
  logic [NW-1:0]   a_cur, a_new;
  logic [WC_W-1:0] r_cur, r_new;
  logic            grant_valid, miss;
  int checks = 0, failures = 0, n_pass1 = 0, n_pass2 = 0, n_miss = 0, n_idle = 0, n_floor = 0;

  ccq_rr_arbiter #(.N(N), .WC_W(WC_W)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int A, R;
    A = 0; R = 0;
    ne = '0;
    for (int i = 0; i < N; i++) hol_wc[i] = '0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    for (int t = 0; t < 4000; t++) begin
      int rnd, pos, ea, er, p;
      bit found, any;
      int fl [N];
      for (int i = 0; i < N; i++) begin
        ne[i]     = ($urandom_range(0, 2) == 0);
        hol_wc[i] = WC_W'(R + $urandom_range(0, 3));
      end
      if ($urandom_range(0, 9) == 0) ne = '0;
      // sequential reference
      rnd = R; found = 0; any = (ne != '0); pos = A;
      for (int i = 0; i < N; i++) fl[i] = -1;
      for (p = 0; p < 2 * N; p++) begin
        pos = (A + p) % N;
        if (p > 0 && pos == 0) rnd++;
        if (ne[pos] && int'(hol_wc[pos]) == (rnd & 8'hff)) begin found = 1; break; end
        if (!ne[pos]) fl[pos] = rnd + 1;
      end
      if (found) begin ea = pos; er = rnd; end
      else if (any) begin ea = (A + 2 * N - 1) % N; er = rnd; end
      else begin ea = A; er = R; for (int i = 0; i < N; i++) fl[i] = -1; end
      #4;
      check(int'(a_cur) == A && int'(r_cur) == (R & 8'hff), "registered position/counter");
      check(grant_valid == found, $sformatf("t=%0d grant_valid", t));
      check(miss == (!found && any), "miss flag");
      if (found) begin
        check(grant == N'(1) << ea, $sformatf("t=%0d grant %b want %0d", t, grant, ea));
        if (p < N) n_pass1++; else n_pass2++;
      end else check(grant == '0, "no grant");
      if (!found && any) n_miss++;
      if (!any) n_idle++;
      check(int'(a_new) == ea, $sformatf("t=%0d new position %0d want %0d", t, a_new, ea));
      check(int'(r_new) == (er & 8'hff), $sformatf("t=%0d new counter", t));
      for (int i = 0; i < N; i++) begin
        check(floor_en[i] == (fl[i] >= 0), $sformatf("t=%0d floor_en[%0d]", t, i));
        if (fl[i] >= 0) begin
          check(int'(floor_wc[i]) == (fl[i] & 8'hff), $sformatf("t=%0d floor_wc[%0d]", t, i));
          n_floor++;
        end
      end
      A = ea; R = er;
      @(negedge clk);
    end
    $display("first_pass=%0d second_pass=%0d miss=%0d idle=%0d floors=%0d", n_pass1, n_pass2, n_miss, n_idle, n_floor);
    check(n_pass1 > 0 && n_pass2 > 0 && n_miss > 0 && n_idle > 0 && n_floor > 0, "all cases covered");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
