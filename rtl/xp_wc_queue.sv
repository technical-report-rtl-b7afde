// Wait-counter ordered tag queue of one crosspoint.
//
// Each buffered cell is represented by a tag {wait-counter, slot pointer}.
// The tags are kept in non-decreasing order of wait-counter, head (HOL) at
// entry 0. Within one time slot the queue applies, in this order:
//   1. append   : the arriving cell goes to the tail. Its wait-counter is the
//                 anticipatory counter, never smaller than any buffered one,
//                 so no comparison is needed.
//   2. pop      : 0, 1 or 2 tags leave from the head (departure to the output
//                 and/or deflection to the predecessor crosspoint).
//   3. insert   : a cell deflected in from the successor is placed behind all
//                 tags whose wait-counter is smaller than or equal to its own
//                 (equal counters keep their order of departure).
// Wait-counters wrap; they are compared as offsets from the output's current
// RR-counter r_base, which never exceeds any live counter. The paper keeps the
// order with a self-balancing search tree; this design uses a shift register
// with a parallel position search, which does the same work in one slot.
// Outputs cnt_a/e0/e1 describe the queue after the append (step 1), which the
// arbiter and the deflection logic read in the same slot; cnt is the
// registered occupancy at the start of the slot.
// Lint note: rst_n is the asynchronous reset of the flops and also the
// 'disable iff' condition of the assertions below; a linter that sees both
// uses reports the net as synchronous and asynchronous (SYNCASYNCNET). The
// assertions are not logic, so the reset stays purely asynchronous.
module xp_wc_queue #(
  parameter int unsigned B    = ccq_pkg::BUF_CELLS,
  parameter int unsigned WC_W = ccq_pkg::WC_BITS,
  localparam int unsigned PW  = (B > 1) ? $clog2(B) : 1,
  localparam int unsigned CW  = $clog2(B + 1)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic [WC_W-1:0] r_base,
  // 1. append
  input  logic            app_valid,
  input  logic [WC_W-1:0] app_wc,
  input  logic [PW-1:0]   app_ptr,
  output logic [CW-1:0]   cnt_a,
  output logic [WC_W-1:0] e0_wc,
  output logic [PW-1:0]   e0_ptr,
  output logic [WC_W-1:0] e1_wc,
  output logic [PW-1:0]   e1_ptr,
  // 2. pop
  input  logic [1:0]      pop,
  // 3. insert
  input  logic            ins_valid,
  input  logic [WC_W-1:0] ins_wc,
  input  logic [PW-1:0]   ins_ptr,
  output logic            ins_tie,   // inserted behind a cell with equal counter
  output logic [CW-1:0]   cnt
);
  typedef struct packed {
    logic [WC_W-1:0] wc;
    logic [PW-1:0]   ptr;
  } tag_t;

  tag_t          q [B];
  logic [CW-1:0] n_q;
  tag_t          qa [B];
  tag_t          qp [B];
  tag_t          qn [B];
  logic [CW-1:0] na, np, nn;
  int unsigned   pos;

  always_comb begin
    // 1. append
    qa = q;
    na = n_q;
    if (app_valid && n_q < CW'(B)) begin
      qa[n_q] = '{wc: app_wc, ptr: app_ptr};
      na = n_q + 1'b1;
    end
  end

  always_comb begin
    // 2. pop from head
    for (int k = 0; k < B; k++) begin
      if (k + int'(pop) < B) qp[k] = qa[k + int'(pop)];
      else                   qp[k] = qa[B - 1];
    end
    np = (na >= CW'(pop)) ? na - CW'(pop) : '0;
    // 3. sorted insert behind equals
    pos     = 0;
    ins_tie = 1'b0;
    for (int k = 0; k < B; k++) begin
      if (k < int'(np)) begin
        if (WC_W'(qp[k].wc - r_base) <= WC_W'(ins_wc - r_base)) pos = k + 1;
        if (qp[k].wc == ins_wc) ins_tie = ins_valid;
      end
    end
    qn = qp;
    nn = np;
    if (ins_valid && np < CW'(B)) begin
      for (int k = 0; k < B; k++) begin
        if (k == int'(pos))    qn[k] = '{wc: ins_wc, ptr: ins_ptr};
        else if (k > int'(pos)) qn[k] = qp[k - 1];
      end
      nn = np + 1'b1;
    end
  end

  assign cnt_a  = na;
  assign e0_wc  = qa[0].wc;
  assign e0_ptr = qa[0].ptr;
  assign e1_wc  = qa[(B > 1) ? 1 : 0].wc;
  assign e1_ptr = qa[(B > 1) ? 1 : 0].ptr;
  assign cnt    = n_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      n_q <= '0;
      for (int k = 0; k < B; k++) q[k] <= '0;
    end else begin
      n_q <= nn;
      q   <= qn;
    end
  end

  // The caller never over-fills, over-pops, or appends out of order.
  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
                   !(app_valid && n_q >= CW'(B)) && !(ins_valid && np >= CW'(B)));
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) na >= CW'(pop));
  a_tail_order: assert property (@(posedge clk) disable iff (!rst_n)
                   (app_valid && n_q != 0) |->
                   WC_W'(app_wc - r_base) >= WC_W'(q[n_q - 1'b1].wc - r_base));
endmodule
