// Testbench of the wait-counter ordered tag queue (xp_wc_queue).
// The bench keeps a reference list of tags and applies, each slot, a random
// legal append (counter not below the tail), 0..2 head pops and a sorted
// insert of a tag with a random counter. Counters are 8 bits and the base
// RR-counter climbs so that counters wrap many times. Checks: the head entries
// and count after the append, the insert-behind-equal flag, and the complete
// registered contents against the reference list, in which a tag is placed
// behind every tag whose counter (as offset from the base) is <= its own.
module tb_xp_wc_queue;
  localparam int B = 6, WC_W = 8, PW = $clog2(B), CW = $clog2(B + 1);
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic [WC_W-1:0] r_base, app_wc, e0_wc, e1_wc, ins_wc;
  logic            app_valid, ins_valid, ins_tie;
  logic [PW-1:0]   app_ptr, e0_ptr, e1_ptr, ins_ptr;
  logic [CW-1:0]   cnt_a, cnt;
  logic [1:0]      pop;
  int checks = 0, failures = 0, n_tie = 0, n_mid = 0, n_full = 0, n_wrapped = 0;
  typedef struct { int wc; int ptr; } tag_t;
  tag_t m [$];

  xp_wc_queue #(.B(B), .WC_W(WC_W)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  function automatic int off(input int wc);
    return (wc - int'(r_base)) & ((1 << WC_W) - 1);
  endfunction

  initial begin
    repeat (30000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int base;
    base = 200;
    r_base = WC_W'(base); app_valid = 0; ins_valid = 0; pop = 0;
    app_wc = '0; app_ptr = '0; ins_wc = '0; ins_ptr = '0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    for (int t = 0; t < 5000; t++) begin
      int tailoff, na, np, pos, maxoff;
      bit tie;
      // base may advance up to the smallest live counter
      maxoff = (m.size() > 0) ? off(m[0].wc) : 3;
      if ($urandom_range(0, 3) == 0 && maxoff > 0) base = base + 1;
      r_base = WC_W'(base);
      if (base % 256 == 0) n_wrapped++;
      tailoff = (m.size() > 0) ? off(m[m.size() - 1].wc) : 0;
      app_valid = (m.size() < B) && ($urandom_range(0, 1) == 1);
      app_wc    = WC_W'(base + tailoff + $urandom_range(0, 2));
      app_ptr   = PW'($urandom_range(0, B - 1));
      na  = m.size() + int'(app_valid);
      pop = 2'($urandom_range(0, (na < 2) ? na : 2));
      np  = na - int'(pop);
      ins_valid = (np < B) && ($urandom_range(0, 1) == 1);
      ins_wc    = WC_W'(base + $urandom_range(0, tailoff + 2));
      ins_ptr   = PW'($urandom_range(0, B - 1));
      #4;
      if (app_valid) m.push_back('{wc: int'(app_wc), ptr: int'(app_ptr)});
      check(int'(cnt_a) == m.size(), "count after append");
      if (m.size() > 0) check(int'(e0_wc) == m[0].wc && int'(e0_ptr) == m[0].ptr, "head after append");
      if (m.size() > 1) check(int'(e1_wc) == m[1].wc && int'(e1_ptr) == m[1].ptr, "second after append");
      for (int k = 0; k < int'(pop); k++) void'(m.pop_front());
      tie = 0; pos = 0;
      for (int k = 0; k < m.size(); k++) begin
        if (off(m[k].wc) <= off(int'(ins_wc))) pos = k + 1;
        if (m[k].wc == int'(ins_wc)) tie = 1;
      end
      if (ins_valid) begin
        check(ins_tie == tie, "insert-behind-equal flag");
        if (tie) n_tie++;
        if (pos > 0 && pos < m.size()) n_mid++;
        m.insert(pos, '{wc: int'(ins_wc), ptr: int'(ins_ptr)});
      end
      if (m.size() == B) n_full++;
      @(posedge clk);
      #1;
      check(int'(cnt) == m.size(), "registered count");
      for (int k = 0; k < m.size(); k++)
        check(int'(dut.q[k].wc) == m[k].wc && int'(dut.q[k].ptr) == m[k].ptr,
              $sformatf("t=%0d entry %0d", t, k));
      @(negedge clk);
    end
    $display("ties=%0d mid_inserts=%0d full=%0d wraps=%0d", n_tie, n_mid, n_full, n_wrapped);
    check(n_tie > 0 && n_mid > 0 && n_full > 0 && n_wrapped > 0, "all cases covered");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
