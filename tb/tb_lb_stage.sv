// Testbench of the load-balancing stage (lb_stage).
// Drives a different random word on every input in every slot and checks,
// from the bench's own slot count t, that intermediate port k carries input
// (k - t) mod N, that src_of names that input, and that the slot counter wraps
// after N slots (one full cycle of configurations).
module tb_lb_stage;
  localparam int N = 8, W = 12, NW = $clog2(N);
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic [W-1:0]  in_cell [N];
  logic [W-1:0]  mid_cell [N];
  logic [NW-1:0] src_of [N];
  logic [NW-1:0] slot;
  int checks = 0, failures = 0, wraps = 0;

  lb_stage #(.N(N), .W(W)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < N; i++) in_cell[i] = '0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    for (int t = 0; t < 5 * N + 3; t++) begin
      for (int i = 0; i < N; i++) in_cell[i] = W'($urandom);
      #1;
      check(int'(slot) == t % N, $sformatf("slot %0d vs %0d", slot, t % N));
      for (int k = 0; k < N; k++) begin
        int src;
        src = (k - t % N + N) % N;
        check(mid_cell[k] == in_cell[src], $sformatf("t=%0d port %0d data", t, k));
        check(int'(src_of[k]) == src, $sformatf("t=%0d port %0d src", t, k));
      end
      if (slot == NW'(N - 1)) wraps++;
      @(negedge clk);
    end
    check(wraps == 5, "configuration cycle repeats every N slots");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
