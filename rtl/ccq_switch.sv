// N x N chained crosspoint-queued switch core with CCQ-RR scheduling.
//
// Cells (fixed length, DATA_W bits, already fragmented and headed by the line
// cards) enter on the N inputs, at most one per input per time slot, each with
// its destination output. The core has two stages on one chip:
//   1. lb_stage, a load balancer that in slot t connects input i to
//      intermediate port (i + t) mod N;
//   2. an N x N array of crosspoint buffers of B cells. Intermediate port k
//      delivers its cell to crosspoint (k, dest). The crosspoints of each output
//      form a daisy chain (ccq_chain) with a round-robin output arbiter; chains
//      share nothing, so output j depends only on column j.
// Per-flow cell order, which load balancing and deflection would otherwise
// break, is kept by wait-counters, counter-alignment notifications and the
// RR-counter of each arbiter (see ccq_crosspoint and ccq_rr_arbiter).
// Timing: one clock is one time slot. A cell offered in a slot is accepted or
// dropped in the same slot (in_accept/in_drop, indexed by input) and may leave
// in that same slot at the earliest; out_valid/out_data give at most one cell
// per output per slot.
// Lint note: rst_n is the asynchronous reset of the flops and also the
// 'disable iff' condition of the submodules' assertions; a linter that sees both
// uses reports the net as synchronous and asynchronous (SYNCASYNCNET). The
// assertions are not logic, so the reset stays purely asynchronous.
// Lint note: the per-column status outputs of ccq_chain (occupancy,
// mechanism flags, arbiter state) are left open on purpose (PINCONNECTEMPTY);
// they serve observation and testing, not the switch datapath.
module ccq_switch #(
  parameter int unsigned N      = ccq_pkg::N_PORTS,
  parameter int unsigned B      = ccq_pkg::BUF_CELLS,
  parameter int unsigned DATA_W = ccq_pkg::CELL_BITS,
  parameter int unsigned WC_W   = ccq_pkg::WC_BITS,
  localparam int unsigned NW    = (N > 1) ? $clog2(N) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [N-1:0]      in_valid,
  input  logic [NW-1:0]     in_dest [N],
  input  logic [DATA_W-1:0] in_data [N],
  output logic [N-1:0]      in_accept,
  output logic [N-1:0]      in_drop,
  output logic [N-1:0]      out_valid,
  output logic [DATA_W-1:0] out_data [N],
  output logic [NW-1:0]     lb_slot
);
  localparam int unsigned LW = 1 + NW + DATA_W;

  logic [LW-1:0]     in_cell  [N];
  logic [LW-1:0]     mid_cell [N];
  logic [NW-1:0]     src_of   [N];
  logic [N-1:0]      mid_valid;
  logic [NW-1:0]     mid_dest [N];
  logic [DATA_W-1:0] mid_data [N];
  logic [N-1:0]      mid_accept, mid_drop;

  always_comb
    for (int i = 0; i < N; i++) in_cell[i] = {in_valid[i], in_dest[i], in_data[i]};

  lb_stage #(.N(N), .W(LW)) u_lb (
    .clk, .rst_n, .in_cell, .mid_cell, .src_of, .slot(lb_slot)
  );

  always_comb
    for (int k = 0; k < N; k++) {mid_valid[k], mid_dest[k], mid_data[k]} = mid_cell[k];

  // Second stage: column j receives intermediate port k's cell when it is
  // addressed to output j.
  logic [N-1:0] col_valid  [N];
  logic [N-1:0] col_accept [N];
  logic [N-1:0] col_drop   [N];

  for (genvar j = 0; j < N; j++) begin : g_col
    always_comb
      for (int k = 0; k < N; k++)
        col_valid[j][k] = mid_valid[k] && (mid_dest[k] == NW'(j));

    ccq_chain #(.N(N), .B(B), .DATA_W(DATA_W), .WC_W(WC_W)) u_chain (
      .clk, .rst_n,
      .arr_valid(col_valid[j]), .arr_data(mid_data),
      .arr_accept(col_accept[j]), .arr_drop(col_drop[j]),
      .out_valid(out_valid[j]), .out_data(out_data[j]),
      .occupancy(), .defl(), .ntf_update(), .ntf_discard(), .ins_tie(),
      .arb_miss(), .w_ant(), .arb_pos(), .arb_rr()
    );
  end

  // Return accept/drop to the input that is connected to each intermediate port.
  always_comb begin
    logic [N-1:0] acc_mid, drp_mid;
    acc_mid = '0;
    drp_mid = '0;
    for (int j = 0; j < N; j++) begin
      acc_mid |= col_accept[j];
      drp_mid |= col_drop[j];
    end
    mid_accept = acc_mid;
    mid_drop   = drp_mid;
    in_accept  = '0;
    in_drop    = '0;
    for (int k = 0; k < N; k++) begin
      in_accept[src_of[k]] = mid_accept[k];
      in_drop[src_of[k]]   = mid_drop[k];
    end
  end
endmodule
