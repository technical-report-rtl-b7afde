// Load-balancing first stage of the two-stage CCQ switch.
//
// The stage walks through a fixed cyclic sequence of N configurations: in time
// slot t it connects input i to intermediate port (i + t) mod N, so that every
// input visits every intermediate port (second-stage input row) once per N
// slots and the traffic of a flow is spread evenly over the crosspoints of its
// output's daisy chain. This cyclic order is the one the switch uses; the
// order is what makes counter-alignment notifications work, because a flow's
// next cell always lands on the successor of the crosspoint that took its
// previous cell.
//
// Interface: in_cell[i] is the cell word on input i (any bundle of W bits);
// mid_cell[k] is what leaves on intermediate port k in the same slot
// (combinational path). slot is the configuration index t, a counter that
// advances by one every clock (one clock = one time slot) and wraps at N.
// src_of[k] tells which input is connected to intermediate port k, so that
// per-cell results (accepted or dropped) can be returned to the inputs.
module lb_stage #(
  parameter int unsigned N = ccq_pkg::N_PORTS,
  parameter int unsigned W = 8,
  localparam int unsigned NW = (N > 1) ? $clog2(N) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [W-1:0]      in_cell  [N],
  output logic [W-1:0]      mid_cell [N],
  output logic [NW-1:0]     src_of   [N],
  output logic [NW-1:0]     slot
);
  logic [NW-1:0] t_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                  t_q <= '0;
    else if (t_q == NW'(N - 1))  t_q <= '0;
    else                         t_q <= t_q + 1'b1;
  end

  assign slot = t_q;

  // Intermediate port k is fed by input (k - t) mod N.
  always_comb begin
    for (int k = 0; k < N; k++) begin
      logic [NW-1:0] src;
      src = NW'((k - int'(t_q) + N) % N);
      src_of[k]   = src;
      mid_cell[k] = in_cell[src];
    end
  end
endmodule
