// Daisy chain of one output j: the N crosspoints (0..N-1, j) and the output's
// round-robin arbiter.
//
// Crosspoint i is linked to its successor i+1 and predecessor i-1 (mod N), in
// the order of the input indices. The forward links carry counter-alignment
// notifications and occupancy reports; the backward links carry deflected
// cells with their wait-counters. The arbiter's RR-counter and position are
// broadcast to all crosspoints, which use them to compare wrapped counters and
// to decide the one deflection exception (the arbiter's own crosspoint keeps an
// eligible head cell). The granted crosspoint's head cell is the output cell
// of the slot (out_valid/out_data, same clock as the polling).
// Interface: arr_valid/arr_data per crosspoint come from the intermediate
// ports of the load balancer; arr_accept/arr_drop are returned in the same
// slot. Status outputs count the mechanisms at work in the slot.
// Lint note: rst_n is the asynchronous reset of the flops and also the
// 'disable iff' condition of the submodules' assertions; a linter that sees both
// uses reports the net as synchronous and asynchronous (SYNCASYNCNET). The
// assertions are not logic, so the reset stays purely asynchronous.
module ccq_chain #(
  parameter int unsigned N      = ccq_pkg::N_PORTS,
  parameter int unsigned B      = ccq_pkg::BUF_CELLS,
  parameter int unsigned DATA_W = ccq_pkg::CELL_BITS,
  parameter int unsigned WC_W   = ccq_pkg::WC_BITS,
  localparam int unsigned NW    = (N > 1) ? $clog2(N) : 1,
  localparam int unsigned CW    = $clog2(B + 1)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [N-1:0]      arr_valid,
  input  logic [DATA_W-1:0] arr_data [N],
  output logic [N-1:0]      arr_accept,
  output logic [N-1:0]      arr_drop,
  output logic              out_valid,
  output logic [DATA_W-1:0] out_data,
  // status
  output logic [CW-1:0]     occupancy [N],
  output logic [N-1:0]      defl,        // crosspoint i deflected its head to i-1
  output logic [N-1:0]      ntf_update,  // notification accepted and relayed
  output logic [N-1:0]      ntf_discard, // notification dropped
  output logic [N-1:0]      ins_tie,     // deflected cell placed behind an equal counter
  output logic              arb_miss,
  output logic [WC_W-1:0]   w_ant [N],   // anticipatory wait-counters
  output logic [NW-1:0]     arb_pos,
  output logic [WC_W-1:0]   arb_rr
);
  logic [NW-1:0]     a_cur, a_new;
  logic [WC_W-1:0]   r_cur, r_new;
  logic [N-1:0]      ne, grant, floor_en, nout_valid, dout_valid;
  logic              grant_valid;
  logic [WC_W-1:0]   hol_wc [N];
  logic [WC_W-1:0]   floor_wc [N];
  logic [WC_W-1:0]   nout_ca [N];
  logic [NW-1:0]     nout_sn [N];
  logic [WC_W-1:0]   dout_wc [N];
  logic [DATA_W-1:0] dout_data [N];
  logic [DATA_W-1:0] dep_data [N];
  logic [CW-1:0]     cnt_d [N];

  ccq_rr_arbiter #(.N(N), .WC_W(WC_W)) u_arb (
    .clk, .rst_n, .ne, .hol_wc,
    .a_cur, .r_cur, .a_new, .r_new,
    .grant_valid, .grant, .floor_en, .floor_wc, .miss(arb_miss)
  );

  for (genvar i = 0; i < N; i++) begin : g_xp
    localparam int unsigned PRED = (i + N - 1) % N;
    localparam int unsigned SUCC = (i + 1) % N;
    ccq_crosspoint #(.N(N), .B(B), .DATA_W(DATA_W), .WC_W(WC_W)) u_xp (
      .clk, .rst_n, .idx(NW'(i)),
      .arr_valid(arr_valid[i]), .arr_data(arr_data[i]),
      .arr_accept(arr_accept[i]), .arr_drop(arr_drop[i]),
      .nin_valid(nout_valid[PRED]), .nin_ca(nout_ca[PRED]), .nin_sn(nout_sn[PRED]),
      .nout_valid(nout_valid[i]), .nout_ca(nout_ca[i]), .nout_sn(nout_sn[i]),
      .r_cur, .a_new, .r_new,
      .ne(ne[i]), .hol_wc(hol_wc[i]),
      .dep_grant(grant[i]), .dep_data(dep_data[i]),
      .floor_en(floor_en[i]), .floor_wc(floor_wc[i]),
      .cnt_d(cnt_d[i]), .pred_cnt(cnt_d[PRED]),
      .dout_valid(dout_valid[i]), .dout_wc(dout_wc[i]), .dout_data(dout_data[i]),
      .din_valid(dout_valid[SUCC]), .din_wc(dout_wc[SUCC]), .din_data(dout_data[SUCC]),
      .occupancy(occupancy[i]), .w_ant(w_ant[i]),
      .ntf_update(ntf_update[i]), .ntf_discard(ntf_discard[i]), .ins_tie(ins_tie[i])
    );
  end

  always_comb begin
    out_data = '0;
    for (int i = 0; i < N; i++)
      if (grant[i]) out_data = dep_data[i];
  end

  assign out_valid = grant_valid;
  assign defl      = dout_valid;
  assign arb_pos   = a_cur;
  assign arb_rr    = r_cur;
endmodule
