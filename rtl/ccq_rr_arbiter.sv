// Output scheduler of one daisy chain: exhaustive batch round-robin polling
// with an RR-counter.
//
// The arbiter keeps its position A (the crosspoint it polled last) and its
// RR-counter R, the number of polling cycles it has made; R is incremented
// whenever the polling moves onto crosspoint 0. A crosspoint whose head cell
// carries wait-counter W is eligible when W equals the RR-counter of the poll.
// In each slot the arbiter polls up to POLLS crosspoints starting at A itself
// (so that all cells of a batch with the same counter are served one after the
// other), and serves the first eligible crosspoint; it ends there (A_new,
// R_new). Every empty crosspoint it passes on the way is told to raise its
// anticipatory counter to (counter of that poll) + 1 (floor_en/floor_wc), so a
// cell that arrives there later waits for the next cycle. If every crosspoint
// is empty the arbiter stays where it is. If cells are buffered but none is
// eligible within POLLS polls it moves on by the whole poll budget (miss=1);
// with POLLS = N + K + 1 the paper shows this cannot happen while at most K
// deflections hit one cell.
// Polling is done in parallel, as a priority encoder over the 2N possible
// (crosspoint, pass) pairs, rotated to start at A. Poll p visits crosspoint
// (A + p) mod N with counter R + (number of moves onto crosspoint 0).
// Interface: ne/hol_wc per crosspoint (after this slot's arrivals) in;
// a_cur/r_cur are the registered values broadcast at the start of the slot,
// a_new/r_new/grant the result of this slot's polling (combinational).
// POLLS is limited to 2N here (each crosspoint is polled at most twice), the
// value N + K + 1 with K = N - 1 that the paper reports from its simulations.
// Lint note: rst_n is the asynchronous reset of the flops and also the
// 'disable iff' condition of the assertions below; a linter that sees both
// uses reports the net as synchronous and asynchronous (SYNCASYNCNET). The
// assertions are not logic, so the reset stays purely asynchronous.
module ccq_rr_arbiter #(
  parameter int unsigned N    = ccq_pkg::N_PORTS,
  parameter int unsigned WC_W = ccq_pkg::WC_BITS,
  localparam int unsigned NW  = (N > 1) ? $clog2(N) : 1
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic [N-1:0]    ne,
  input  logic [WC_W-1:0] hol_wc [N],
  output logic [NW-1:0]   a_cur,
  output logic [WC_W-1:0] r_cur,
  output logic [NW-1:0]   a_new,
  output logic [WC_W-1:0] r_new,
  output logic            grant_valid,
  output logic [N-1:0]    grant,
  output logic [N-1:0]    floor_en,
  output logic [WC_W-1:0] floor_wc [N],
  output logic            miss
);
  localparam int unsigned POLLS = 2 * N;

  logic [NW-1:0]   a_q;
  logic [WC_W-1:0] r_q;
  logic [POLLS-1:0] cand;
  int unsigned     pstar;
  logic            found;
  int unsigned     p1 [N];     // poll index of each crosspoint's first visit
  logic [WC_W-1:0] r1 [N];     // RR-counter at that visit

  assign a_cur = a_q;
  assign r_cur = r_q;

  // Poll index and round of each crosspoint's first visit.
  function automatic int unsigned first_poll(input int unsigned i, input int unsigned a);
    return (i >= a) ? i - a : i + N - a;
  endfunction

  always_comb begin
    cand = '0;
    for (int unsigned i = 0; i < N; i++) begin
      p1[i] = first_poll(i, int'(a_q));
      r1[i] = r_q + WC_W'(i < int'(a_q));
      if (ne[i] && hol_wc[i] == r1[i])        cand[p1[i]]     = 1'b1;
      if (ne[i] && hol_wc[i] == r1[i] + 1'b1) cand[p1[i] + N] = 1'b1;
    end
    found = 1'b0;
    pstar = POLLS;
    for (int p = POLLS - 1; p >= 0; p--)
      if (cand[p]) begin pstar = p; found = 1'b1; end
  end

  always_comb begin
    int unsigned last, pos;
    last        = 0;
    pos         = 0;
    grant       = '0;
    grant_valid = 1'b0;
    miss        = 1'b0;
    a_new       = a_q;
    r_new       = r_q;
    floor_en    = '0;
    for (int unsigned i = 0; i < N; i++) floor_wc[i] = '0;
    if (found || ne != '0) begin
      last = found ? pstar : POLLS - 1;
      pos  = (int'(a_q) + last) % N;
      a_new = NW'(pos);
      r_new = r_q + WC_W'(pos < int'(a_q)) + WC_W'(last >= N);
      grant_valid = found;
      miss        = !found;
      if (found) grant[pos] = 1'b1;
      for (int unsigned i = 0; i < N; i++) begin
        if (!ne[i] && p1[i] + N < last + (found ? 0 : 1)) begin
          floor_en[i] = 1'b1; floor_wc[i] = r1[i] + WC_W'(2);
        end else if (!ne[i] && p1[i] < last + (found ? 0 : 1)) begin
          floor_en[i] = 1'b1; floor_wc[i] = r1[i] + 1'b1;
        end
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      a_q <= '0;
      r_q <= '0;
    end else begin
      a_q <= a_new;
      r_q <= r_new;
    end
  end

  a_grant_onehot: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(grant));
  a_grant_eligible: assert property (@(posedge clk) disable iff (!rst_n)
                      grant_valid |-> (ne[a_new] && hol_wc[a_new] == r_new));
endmodule
