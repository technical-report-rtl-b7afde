// Cell memory of one crosspoint buffer.
//
// Holds up to B cells of DATA_W bits. The crosspoint keeps the order of its
// cells in a separate list of (wait-counter, slot pointer) tags, so cells never
// move here: a cell is written once into a free slot and read from it when it
// departs or is deflected. Because deflection adds a second cell stream in each
// direction, the memory has a write speedup and a read speedup of two:
//   write port A : the newly arriving cell, placed in the lowest slot free at
//                  the start of the slot (the arrival phase comes first).
//   write port D : the cell deflected in from the successor crosspoint,
//                  placed in the lowest slot that is free at the start or is
//                  released in this slot, other than the one port A takes.
//   read ports 0/1 : departure and deflection reads, combinational. A read of
//                  the slot that the arriving cell is being written to returns
//                  the arriving cell (same-slot cut-through).
// Slot release (rel0/rel1) and both writes take effect at the clock edge that
// ends the slot. The caller guarantees that a free slot exists for every write
// (the occupancy rules of the crosspoint ensure it); assertions check this.
// The slot-pointer layout and the allocation rule are choices of this design;
// the paper only states the buffer size and the two-fold memory speedup.
// Lint note: rst_n is the asynchronous reset of the flops and also the
// 'disable iff' condition of the assertions below; a linter that sees both
// uses reports the net as synchronous and asynchronous (SYNCASYNCNET). The
// assertions are not logic, so the reset stays purely asynchronous.
module xp_cell_mem #(
  parameter int unsigned B      = ccq_pkg::BUF_CELLS,
  parameter int unsigned DATA_W = ccq_pkg::CELL_BITS,
  localparam int unsigned PW    = (B > 1) ? $clog2(B) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  // arrival write
  input  logic              arr_we,
  input  logic [DATA_W-1:0] arr_data,
  output logic [PW-1:0]     arr_ptr,
  // deflected-in write
  input  logic              dfl_we,
  input  logic [DATA_W-1:0] dfl_data,
  output logic [PW-1:0]     dfl_ptr,
  // slot release
  input  logic              rel0,
  input  logic [PW-1:0]     rel0_ptr,
  input  logic              rel1,
  input  logic [PW-1:0]     rel1_ptr,
  // reads
  input  logic [PW-1:0]     rd0_ptr,
  output logic [DATA_W-1:0] rd0_data,
  input  logic [PW-1:0]     rd1_ptr,
  output logic [DATA_W-1:0] rd1_data,
  output logic [B-1:0]      used
);
  logic [DATA_W-1:0] mem [B];
  logic [B-1:0]      used_q, free_a, free_d;
  logic              arr_ok, dfl_ok;

  always_comb begin
    free_a  = ~used_q;
    arr_ptr = '0;
    arr_ok  = 1'b0;
    for (int s = B - 1; s >= 0; s--)
      if (free_a[s]) begin arr_ptr = PW'(s); arr_ok = 1'b1; end
  end

  always_comb begin
    free_d = ~used_q;
    if (rel0) free_d[rel0_ptr] = 1'b1;
    if (rel1) free_d[rel1_ptr] = 1'b1;
    if (arr_we) free_d[arr_ptr] = 1'b0;
    dfl_ptr = '0;
    dfl_ok  = 1'b0;
    for (int s = B - 1; s >= 0; s--)
      if (free_d[s]) begin dfl_ptr = PW'(s); dfl_ok = 1'b1; end
  end

  assign rd0_data = (arr_we && rd0_ptr == arr_ptr) ? arr_data : mem[rd0_ptr];
  assign rd1_data = (arr_we && rd1_ptr == arr_ptr) ? arr_data : mem[rd1_ptr];
  assign used     = used_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) used_q <= '0;
    else begin
      logic [B-1:0] u;
      // The arriving cell may leave in its own slot, so its slot is taken
      // before releases apply; the deflected-in cell may reuse a released slot.
      u = used_q;
      if (arr_we) u[arr_ptr]  = 1'b1;
      if (rel0)   u[rel0_ptr] = 1'b0;
      if (rel1)   u[rel1_ptr] = 1'b0;
      if (dfl_we) u[dfl_ptr]  = 1'b1;
      used_q <= u;
    end
  end

  always_ff @(posedge clk) begin
    if (arr_we) mem[arr_ptr] <= arr_data;
    if (dfl_we) mem[dfl_ptr] <= dfl_data;
  end

  a_arr_room: assert property (@(posedge clk) disable iff (!rst_n) arr_we |-> arr_ok);
  a_dfl_room: assert property (@(posedge clk) disable iff (!rst_n) dfl_we |-> dfl_ok);
endmodule
