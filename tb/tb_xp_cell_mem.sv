// Testbench of the crosspoint cell memory (xp_cell_mem).
// A model of the slot map and contents is kept in the bench. Each slot does a
// random legal mix of: arrival write, up to two releases of occupied slots,
// and a deflected-in write; both reads address random occupied slots (or the
// arriving cell). Checks: the arrival takes the lowest slot free at the start,
// the deflected cell the lowest slot free or released (not the arrival's),
// reads return the stored word (or the arriving word when they address its
// slot), and the slot map matches the model. Full and reuse cases occur.
module tb_xp_cell_mem;
  localparam int B = 6, DW = 16, PW = $clog2(B);
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic arr_we, dfl_we, rel0, rel1;
  logic [DW-1:0] arr_data, dfl_data, rd0_data, rd1_data;
  logic [PW-1:0] arr_ptr, dfl_ptr, rel0_ptr, rel1_ptr, rd0_ptr, rd1_ptr;
  logic [B-1:0]  used;
  int checks = 0, failures = 0, n_full = 0, n_reuse = 0, n_bypass = 0;
  bit            m_used [B];
  logic [DW-1:0] m_mem [B];

  xp_cell_mem #(.B(B), .DATA_W(DW)) dut (.*);

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
    arr_we = 0; dfl_we = 0; rel0 = 0; rel1 = 0;
    arr_data = '0; dfl_data = '0; rel0_ptr = '0; rel1_ptr = '0; rd0_ptr = '0; rd1_ptr = '0;
    for (int s = 0; s < B; s++) begin m_used[s] = 0; m_mem[s] = '0; end
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    for (int t = 0; t < 3000; t++) begin
      int nfree, lowa, lowd, cnt;
      bit fd [B];
      nfree = 0; lowa = -1; cnt = 0;
      for (int s = 0; s < B; s++) if (!m_used[s]) begin nfree++; if (lowa < 0) lowa = s; end
      cnt = B - nfree;
      if (cnt == B) n_full++;
      arr_we   = (nfree > 0) && ($urandom_range(0, 2) != 0);
      arr_data = DW'($urandom);
      // releases: pick occupied slots (the arriving cell's slot may be released too)
      rel0 = 0; rel1 = 0;
      if ($urandom_range(0, 2) != 0) begin
        int s0;
        s0 = $urandom_range(0, B - 1);
        if (m_used[s0] || (arr_we && s0 == lowa)) begin rel0 = 1; rel0_ptr = PW'(s0); end
      end
      if ($urandom_range(0, 3) == 0) begin
        int s1;
        s1 = $urandom_range(0, B - 1);
        if (m_used[s1] && !(rel0 && int'(rel0_ptr) == s1)) begin rel1 = 1; rel1_ptr = PW'(s1); end
      end
      for (int s = 0; s < B; s++) fd[s] = !m_used[s];
      if (rel0) fd[rel0_ptr] = 1;
      if (rel1) fd[rel1_ptr] = 1;
      if (arr_we) fd[lowa] = 0;
      lowd = -1;
      for (int s = B - 1; s >= 0; s--) if (fd[s]) lowd = s;
      dfl_we   = (lowd >= 0) && ($urandom_range(0, 1) == 1);
      dfl_data = DW'($urandom);
      rd0_ptr  = PW'($urandom_range(0, B - 1));
      rd1_ptr  = arr_we ? PW'(lowa) : PW'($urandom_range(0, B - 1));
      #4;
      if (arr_we) check(int'(arr_ptr) == lowa, $sformatf("t=%0d arrival slot %0d want %0d", t, arr_ptr, lowa));
      if (dfl_we) begin
        check(int'(dfl_ptr) == lowd, $sformatf("t=%0d deflect slot %0d want %0d", t, dfl_ptr, lowd));
        if (m_used[lowd]) n_reuse++;
      end
      if (arr_we && int'(rd1_ptr) == lowa) begin
        check(rd1_data == arr_data, "bypass of arriving cell");
        n_bypass++;
      end
      if (m_used[rd0_ptr] && !(arr_we && int'(rd0_ptr) == lowa)) check(rd0_data == m_mem[rd0_ptr], "read port 0");
      for (int s = 0; s < B; s++) check(used[s] == m_used[s], "slot map");
      // model update, same order as the hardware
      if (arr_we) begin m_used[lowa] = 1; m_mem[lowa] = arr_data; end
      if (rel0) m_used[rel0_ptr] = 0;
      if (rel1) m_used[rel1_ptr] = 0;
      if (dfl_we) begin m_used[lowd] = 1; m_mem[lowd] = dfl_data; end
      @(negedge clk);
    end
    check(n_full > 0, "memory became full");
    check(n_reuse > 0, "released slot reused in the same slot");
    check(n_bypass > 0, "arriving cell read in its own slot");
    $display("full=%0d reuse=%0d bypass=%0d", n_full, n_reuse, n_bypass);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
