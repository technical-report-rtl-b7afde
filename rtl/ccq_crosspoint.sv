// One crosspoint (i,j) of a CCQ-RR switch.
//
// A crosspoint buffers the cells that intermediate port i sends to output j
// and takes part in the four phases of every time slot (one clock):
//   Arrival      : a cell is accepted if fewer than B cells are buffered, and
//                  is tagged with the anticipatory wait-counter W(b+1); the
//                  anticipatory counter then becomes the new cell's counter + 1.
//                  A cell that finds the buffer full is dropped (tail drop).
//   Notification : accepting a cell sends a counter-alignment message
//                  {CA = counter of the new cell, SN = i} to the successor
//                  (i+1). A received message with SN != i and CA >= the
//                  receiver's anticipatory counter raises that counter to CA
//                  and is relayed one slot later, unless the receiver accepts a
//                  cell of its own in that slot (its own message supersedes);
//                  otherwise it is discarded. Crosspoint N-1 (the last of the
//                  chain) adds 1 to CA on every message it sends, because the
//                  receiver, crosspoint 0, is polled in the next RR cycle.
//   Departure    : the output arbiter reads 'ne' and the head wait-counter
//                  'hol_wc' (after the arrival) and may grant the head cell
//                  (dep_grant -> dep_data). An empty crosspoint that the arbiter
//                  polls raises its anticipatory counter to at least the RR
//                  counter of that poll + 1 (floor_en/floor_wc).
//   Deflection   : the occupancy after arrival and departure is reported to the
//                  successor (cnt_d). If it exceeds the predecessor's (pred_cnt),
//                  the head cell is sent to the predecessor with its counter
//                  (decremented when i = 0, whose predecessor N-1 belongs to the
//                  previous RR cycle), unless this crosspoint is the arbiter's
//                  position and its head is already eligible. A cell deflected in
//                  from the successor is inserted behind every cell with a
//                  smaller or equal counter, and raises the anticipatory counter
//                  to its counter + 1 if it reaches it.
// Counters wrap; the queue orders them as offsets from the slot's RR-counter
// r_cur, and the anticipatory counter is compared by the sign of a difference,
// which needs the span of live counters to stay below half the counter range.
// All four phases are combinational within the slot, in the paper's order;
// state changes at the clock edge. Buffer memory: xp_cell_mem; order: xp_wc_queue.
// Own choices: reset values (counters 0, empty), one-clock-per-slot timing, and
// that a polled empty crosspoint takes max(own counter, R+1) so that a
// notification received earlier is never undone.
// Lint note: rst_n is the asynchronous reset of the flops and also the
// 'disable iff' condition of the assertions below; a linter that sees both
// uses reports the net as synchronous and asynchronous (SYNCASYNCNET). The
// assertions are not logic, so the reset stays purely asynchronous.
module ccq_crosspoint #(
  parameter int unsigned N      = ccq_pkg::N_PORTS,
  parameter int unsigned B      = ccq_pkg::BUF_CELLS,
  parameter int unsigned DATA_W = ccq_pkg::CELL_BITS,
  parameter int unsigned WC_W   = ccq_pkg::WC_BITS,
  localparam int unsigned NW    = (N > 1) ? $clog2(N) : 1,
  localparam int unsigned PW    = (B > 1) ? $clog2(B) : 1,
  localparam int unsigned CW    = $clog2(B + 1)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [NW-1:0]     idx,        // position i in the daisy chain
  // arrival phase
  input  logic              arr_valid,
  input  logic [DATA_W-1:0] arr_data,
  output logic              arr_accept,
  output logic              arr_drop,
  // notification phase
  input  logic              nin_valid,
  input  logic [WC_W-1:0]   nin_ca,
  input  logic [NW-1:0]     nin_sn,
  output logic              nout_valid,
  output logic [WC_W-1:0]   nout_ca,
  output logic [NW-1:0]     nout_sn,
  // departure phase (output arbiter)
  input  logic [WC_W-1:0]   r_cur,      // RR-counter at the start of the slot
  input  logic [NW-1:0]     a_new,      // arbiter position after this slot's polling
  input  logic [WC_W-1:0]   r_new,      // RR-counter after this slot's polling
  output logic              ne,
  output logic [WC_W-1:0]   hol_wc,
  input  logic              dep_grant,
  output logic [DATA_W-1:0] dep_data,
  input  logic              floor_en,
  input  logic [WC_W-1:0]   floor_wc,
  // deflection phase
  output logic [CW-1:0]     cnt_d,
  input  logic [CW-1:0]     pred_cnt,
  output logic              dout_valid,
  output logic [WC_W-1:0]   dout_wc,
  output logic [DATA_W-1:0] dout_data,
  input  logic              din_valid,
  input  logic [WC_W-1:0]   din_wc,
  input  logic [DATA_W-1:0] din_data,
  // status
  output logic [CW-1:0]     occupancy,
  output logic [WC_W-1:0]   w_ant,
  output logic              ntf_update,
  output logic              ntf_discard,
  output logic              ins_tie
);
  typedef struct packed {
    logic            valid;
    logic [WC_W-1:0] ca;
    logic [NW-1:0]   sn;
  } ntf_t;

  logic [WC_W-1:0] w_q, w_a, w_n, w_p, w_d;
  ntf_t            pend_q, pend_d;

  logic [CW-1:0]   cnt, cnt_a;
  logic [WC_W-1:0] e0_wc, e1_wc, hd_wc;
  logic [PW-1:0]   e0_ptr, e1_ptr, hd_ptr, arr_ptr, dfl_ptr;
  logic [1:0]      pop;
  logic            is_last, is_first, defl;
  logic [B-1:0]    mem_used;   // slot map of the cell memory, checked against cnt

  assign is_last  = (idx == NW'(N - 1));
  assign is_first = (idx == '0);

  // a >= b for wrapping counters: the sign of the difference. A relayed
  // notification may carry a counter that the RR-counter has already passed,
  // so an offset from R is not enough here.
  function automatic logic wc_ge(input logic [WC_W-1:0] a, input logic [WC_W-1:0] b);
    logic [WC_W-1:0] d;
    d = a - b;
    return !d[WC_W-1];
  endfunction

  // ---- arrival -------------------------------------------------------------
  assign arr_accept = arr_valid && (cnt < CW'(B));
  assign arr_drop   = arr_valid && !arr_accept;
  assign w_a        = arr_accept ? w_q + 1'b1 : w_q;

  // ---- notification --------------------------------------------------------
  always_comb begin
    nout_valid = 1'b0;
    nout_ca    = '0;
    nout_sn    = idx;
    if (arr_accept) begin
      nout_valid = 1'b1;
      nout_ca    = w_q + WC_W'(is_last);
      nout_sn    = idx;
    end else if (pend_q.valid) begin
      nout_valid = 1'b1;
      nout_ca    = pend_q.ca + WC_W'(is_last);
      nout_sn    = pend_q.sn;
    end

    ntf_update  = 1'b0;
    ntf_discard = 1'b0;
    pend_d      = '0;
    w_n         = w_a;
    if (nin_valid) begin
      if (nin_sn != idx && wc_ge(nin_ca, w_a)) begin
        ntf_update = 1'b1;
        w_n        = nin_ca;
        pend_d     = '{valid: 1'b1, ca: nin_ca, sn: nin_sn};
      end else begin
        ntf_discard = 1'b1;
      end
    end
  end

  // ---- departure -----------------------------------------------------------
  assign ne     = (cnt_a != '0);
  assign hol_wc = e0_wc;
  assign w_p    = (floor_en && !ne && !wc_ge(w_n, floor_wc)) ? floor_wc : w_n;

  // ---- deflection ----------------------------------------------------------
  assign cnt_d  = cnt_a - CW'(dep_grant);
  assign hd_wc  = dep_grant ? e1_wc  : e0_wc;
  assign hd_ptr = dep_grant ? e1_ptr : e0_ptr;
  assign defl   = (cnt_d > pred_cnt) && !((a_new == idx) && (hd_wc == r_new));
  assign dout_valid = defl;
  assign dout_wc    = hd_wc - WC_W'(is_first);
  assign pop        = 2'(dep_grant) + 2'(defl);
  assign w_d = (din_valid && wc_ge(din_wc, w_p)) ? din_wc + 1'b1 : w_p;

  // ---- state ---------------------------------------------------------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      w_q    <= '0;
      pend_q <= '0;
    end else begin
      w_q    <= w_d;
      pend_q <= pend_d;
    end
  end

  assign occupancy = cnt;
  assign w_ant     = w_q;

  xp_wc_queue #(.B(B), .WC_W(WC_W)) u_queue (
    .clk, .rst_n, .r_base(r_cur),
    .app_valid(arr_accept), .app_wc(w_q), .app_ptr(arr_ptr),
    .cnt_a, .e0_wc, .e0_ptr, .e1_wc, .e1_ptr,
    .pop,
    .ins_valid(din_valid), .ins_wc(din_wc), .ins_ptr(dfl_ptr), .ins_tie,
    .cnt
  );

  xp_cell_mem #(.B(B), .DATA_W(DATA_W)) u_mem (
    .clk, .rst_n,
    .arr_we(arr_accept), .arr_data, .arr_ptr,
    .dfl_we(din_valid), .dfl_data(din_data), .dfl_ptr,
    .rel0(dep_grant), .rel0_ptr(e0_ptr),
    .rel1(defl), .rel1_ptr(hd_ptr),
    .rd0_ptr(e0_ptr), .rd0_data(dep_data),
    .rd1_ptr(hd_ptr), .rd1_data(dout_data),
    .used(mem_used)
  );

  a_grant_nonempty: assert property (@(posedge clk) disable iff (!rst_n) dep_grant |-> ne);
  a_defl_room: assert property (@(posedge clk) disable iff (!rst_n)
                 din_valid |-> (cnt_d - CW'(defl)) < CW'(B));
  a_slots_match: assert property (@(posedge clk) disable iff (!rst_n)
                   $countones(mem_used) == int'(cnt));
endmodule
