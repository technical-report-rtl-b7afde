// Directed testbench of one crosspoint (ccq_crosspoint).
// Two crosspoints are tested side by side: X3 is the last of a 4-crosspoint
// chain (its notifications add 1 to CA) and X0 the first (its deflected cells
// carry counter - 1). Each step sets the inputs of one slot, checks the
// combinational outputs against values worked out by hand from the rules of
// the CCQ-RR scheme, clocks, and checks the registered state. Covered:
// acceptance and counter assignment, notification send, update, relay one
// slot later, supersede by an own arrival, discard (own origin, smaller CA),
// tail drop when full, departure data, deflection and its exception at the
// arbiter's position, insertion of a deflected cell behind an equal counter,
// anticipatory-counter raise by a deflected cell and by polling while empty.
module tb_ccq_crosspoint;
  localparam int N = 4, B = 3, DW = 16, WC_W = 8, NW = 2, CW = 2;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  typedef struct {
    logic            arr_valid;
    logic [DW-1:0]   arr_data;
    logic            nin_valid;
    logic [WC_W-1:0] nin_ca;
    logic [NW-1:0]   nin_sn;
    logic [WC_W-1:0] r_cur, r_new;
    logic [NW-1:0]   a_new;
    logic            dep_grant, floor_en, din_valid;
    logic [WC_W-1:0] floor_wc, din_wc;
    logic [CW-1:0]   pred_cnt;
    logic [DW-1:0]   din_data;
  } in_t;
  typedef struct {
    logic            arr_accept, arr_drop, nout_valid, ne, dout_valid, ntf_update, ntf_discard, ins_tie;
    logic [WC_W-1:0] nout_ca, hol_wc, dout_wc, w_ant;
    logic [NW-1:0]   nout_sn;
    logic [DW-1:0]   dep_data, dout_data;
    logic [CW-1:0]   cnt_d, occupancy;
  } out_t;

  in_t  in3, in0;
  out_t o3, o0;

  ccq_crosspoint #(.N(N), .B(B), .DATA_W(DW), .WC_W(WC_W)) x3 (
    .clk, .rst_n, .idx(2'd3),
    .arr_valid(in3.arr_valid), .arr_data(in3.arr_data), .arr_accept(o3.arr_accept), .arr_drop(o3.arr_drop),
    .nin_valid(in3.nin_valid), .nin_ca(in3.nin_ca), .nin_sn(in3.nin_sn),
    .nout_valid(o3.nout_valid), .nout_ca(o3.nout_ca), .nout_sn(o3.nout_sn),
    .r_cur(in3.r_cur), .a_new(in3.a_new), .r_new(in3.r_new), .ne(o3.ne), .hol_wc(o3.hol_wc),
    .dep_grant(in3.dep_grant), .dep_data(o3.dep_data), .floor_en(in3.floor_en), .floor_wc(in3.floor_wc),
    .cnt_d(o3.cnt_d), .pred_cnt(in3.pred_cnt), .dout_valid(o3.dout_valid), .dout_wc(o3.dout_wc),
    .dout_data(o3.dout_data), .din_valid(in3.din_valid), .din_wc(in3.din_wc), .din_data(in3.din_data),
    .occupancy(o3.occupancy), .w_ant(o3.w_ant), .ntf_update(o3.ntf_update), .ntf_discard(o3.ntf_discard),
    .ins_tie(o3.ins_tie));

  ccq_crosspoint #(.N(N), .B(B), .DATA_W(DW), .WC_W(WC_W)) x0 (
    .clk, .rst_n, .idx(2'd0),
    .arr_valid(in0.arr_valid), .arr_data(in0.arr_data), .arr_accept(o0.arr_accept), .arr_drop(o0.arr_drop),
    .nin_valid(in0.nin_valid), .nin_ca(in0.nin_ca), .nin_sn(in0.nin_sn),
    .nout_valid(o0.nout_valid), .nout_ca(o0.nout_ca), .nout_sn(o0.nout_sn),
    .r_cur(in0.r_cur), .a_new(in0.a_new), .r_new(in0.r_new), .ne(o0.ne), .hol_wc(o0.hol_wc),
    .dep_grant(in0.dep_grant), .dep_data(o0.dep_data), .floor_en(in0.floor_en), .floor_wc(in0.floor_wc),
    .cnt_d(o0.cnt_d), .pred_cnt(in0.pred_cnt), .dout_valid(o0.dout_valid), .dout_wc(o0.dout_wc),
    .dout_data(o0.dout_data), .din_valid(in0.din_valid), .din_wc(in0.din_wc), .din_data(in0.din_data),
    .occupancy(o0.occupancy), .w_ant(o0.w_ant), .ntf_update(o0.ntf_update), .ntf_discard(o0.ntf_discard),
    .ins_tie(o0.ins_tie));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic in_t idle();
    in_t v;
    v = '{arr_valid: 0, arr_data: '0, nin_valid: 0, nin_ca: '0, nin_sn: '0, r_cur: '0, r_new: '0,
          a_new: 2'd1, dep_grant: 0, floor_en: 0, din_valid: 0, floor_wc: '0, din_wc: '0,
          pred_cnt: 2'd3, din_data: '0};
    return v;
  endfunction

  task automatic settle(); #4; endtask
  task automatic tick(); @(posedge clk); #1; endtask
  task automatic next(); @(negedge clk); endtask

  initial begin
    repeat (500) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in3 = idle(); in0 = idle();
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;

    // ---- X3 slot 1: arrival of cell A into an empty crosspoint, W_ant = 0
    in3 = idle(); in3.arr_valid = 1; in3.arr_data = 16'hA001;
    settle();
    check(o3.arr_accept && !o3.arr_drop, "accept A");
    check(o3.nout_valid && o3.nout_ca == 8'd1 && o3.nout_sn == 2'd3, "last crosspoint sends CA = W + 1");
    check(o3.ne && o3.hol_wc == 8'd0, "A at head with counter 0");
    check(!o3.dout_valid, "no deflection when predecessor is fuller");
    tick();
    check(o3.w_ant == 8'd1 && o3.occupancy == 2'd1, "W_ant = 1 after A");
    next();

    // ---- slot 2: notification CA=5 from crosspoint 1: update and relay later
    in3 = idle(); in3.nin_valid = 1; in3.nin_ca = 8'd5; in3.nin_sn = 2'd1;
    settle();
    check(o3.ntf_update && !o3.ntf_discard, "notification accepted");
    check(!o3.nout_valid, "relay waits one slot");
    tick();
    check(o3.w_ant == 8'd5, "W_ant raised to CA");
    next();

    // ---- slot 3: relay (CA + 1 at the last crosspoint, SN kept)
    in3 = idle();
    settle();
    check(o3.nout_valid && o3.nout_ca == 8'd6 && o3.nout_sn == 2'd1, "relay of CA=5 as 6, SN=1");
    tick(); next();

    // ---- slot 4: no more relay; notification from own origin is discarded
    in3 = idle(); in3.nin_valid = 1; in3.nin_ca = 8'd9; in3.nin_sn = 2'd3;
    settle();
    check(!o3.nout_valid, "relay sent only once");
    check(o3.ntf_discard && !o3.ntf_update, "own notification discarded");
    tick();
    check(o3.w_ant == 8'd5, "W_ant unchanged by discarded message");
    next();

    // ---- slot 5: notification CA=7 accepted, next slot an own arrival supersedes it
    in3 = idle(); in3.nin_valid = 1; in3.nin_ca = 8'd7; in3.nin_sn = 2'd2;
    settle(); check(o3.ntf_update, "CA=7 accepted"); tick(); next();
    in3 = idle(); in3.arr_valid = 1; in3.arr_data = 16'hB002;
    settle();
    check(o3.arr_accept, "accept B");
    check(o3.nout_valid && o3.nout_ca == 8'd8 && o3.nout_sn == 2'd3, "own message (W=7, +1) replaces relay");
    tick();
    check(o3.w_ant == 8'd8 && o3.occupancy == 2'd2, "B got counter 7");
    next();
    in3 = idle(); settle(); check(!o3.nout_valid, "superseded relay dropped"); tick(); next();

    // ---- smaller CA is discarded
    in3 = idle(); in3.nin_valid = 1; in3.nin_ca = 8'd3; in3.nin_sn = 2'd2;
    settle(); check(o3.ntf_discard, "CA < W_ant discarded"); tick(); next();

    // ---- fill: C accepted (3rd), D dropped
    in3 = idle(); in3.arr_valid = 1; in3.arr_data = 16'hC003;
    settle(); check(o3.arr_accept, "accept C"); tick(); next();
    in3 = idle(); in3.arr_valid = 1; in3.arr_data = 16'hD004;
    settle(); check(o3.arr_drop && !o3.arr_accept && !o3.nout_valid, "D dropped when full"); tick();
    check(o3.w_ant == 8'd9 && o3.occupancy == 2'd3, "state after drop");
    next();

    // ---- departure of A (counter 0 = R); deflection exception: X3 is the
    //      arbiter's position and its new head (B, 7) is not eligible at R=0,
    //      so with an empty predecessor B is deflected with counter 7.
    in3 = idle(); in3.dep_grant = 1; in3.a_new = 2'd3; in3.r_new = 8'd0; in3.pred_cnt = 2'd0;
    settle();
    check(o3.dep_data == 16'hA001, "A departs");
    check(o3.cnt_d == 2'd2, "occupancy after departure reported");
    check(o3.dout_valid && o3.dout_wc == 8'd7 && o3.dout_data == 16'hB002, "B deflected with its counter");
    tick();
    check(o3.occupancy == 2'd1, "C left alone");
    next();

    // ---- exception: head C (counter 8) eligible at the arbiter's position: no deflection
    in3 = idle(); in3.a_new = 2'd3; in3.r_cur = 8'd8; in3.r_new = 8'd8; in3.pred_cnt = 2'd0;
    settle(); check(!o3.dout_valid, "eligible head at arbiter position kept"); tick(); next();

    // ---- deflected-in cell E with counter 8 (= C's): inserted behind C
    in3 = idle(); in3.r_cur = 8'd8; in3.r_new = 8'd8; in3.din_valid = 1; in3.din_wc = 8'd8;
    in3.din_data = 16'hE005;
    settle(); check(o3.ins_tie, "insert behind equal counter"); tick();
    check(o3.occupancy == 2'd2 && o3.w_ant == 8'd9, "E inserted, W_ant stays 9");
    next();
    // ---- deflected-in cell F with counter 9 >= W_ant: W_ant becomes 10
    in3 = idle(); in3.r_cur = 8'd8; in3.r_new = 8'd8; in3.din_valid = 1; in3.din_wc = 8'd9;
    in3.din_data = 16'hF006;
    settle(); check(!o3.ins_tie, "no tie for F"); tick();
    check(o3.w_ant == 8'd10 && o3.occupancy == 2'd3, "W_ant raised by deflected cell");
    next();
    // ---- serve out: order C, E, F
    in3 = idle(); in3.r_cur = 8'd8; in3.r_new = 8'd8; in3.a_new = 2'd3; in3.dep_grant = 1;
    settle(); check(o3.dep_data == 16'hC003 && o3.hol_wc == 8'd8, "C first"); tick(); next();
    in3 = idle(); in3.r_cur = 8'd8; in3.r_new = 8'd8; in3.a_new = 2'd3; in3.dep_grant = 1;
    settle(); check(o3.dep_data == 16'hE005, "E behind C"); tick(); next();
    in3 = idle(); in3.r_cur = 8'd9; in3.r_new = 8'd9; in3.a_new = 2'd3; in3.dep_grant = 1;
    settle(); check(o3.dep_data == 16'hF006 && o3.hol_wc == 8'd9, "F last"); tick();
    check(o3.occupancy == 2'd0, "empty"); next();
    // ---- polled while empty: floor 12 raises W_ant, floor 4 does not lower it
    in3 = idle(); in3.r_cur = 8'd11; in3.r_new = 8'd11; in3.floor_en = 1; in3.floor_wc = 8'd12;
    settle(); tick(); check(o3.w_ant == 8'd12, "floor raises W_ant"); next();
    in3 = idle(); in3.r_cur = 8'd11; in3.r_new = 8'd11; in3.floor_en = 1; in3.floor_wc = 8'd4;
    settle(); tick(); check(o3.w_ant == 8'd12, "floor never lowers W_ant"); next();
    // ---- same-slot departure of an arriving cell
    in3 = idle(); in3.r_cur = 8'd12; in3.r_new = 8'd12; in3.a_new = 2'd3; in3.arr_valid = 1;
    in3.arr_data = 16'h6007; in3.dep_grant = 1;
    settle(); check(o3.ne && o3.hol_wc == 8'd12 && o3.dep_data == 16'h6007, "cut-through");
    tick(); check(o3.occupancy == 2'd0 && o3.w_ant == 8'd13, "cut-through leaves buffer empty"); next();

    // ---- X0: deflection from the first crosspoint decrements the counter
    in3 = idle();
    in0 = idle(); in0.arr_valid = 1; in0.arr_data = 16'h1111;
    settle();
    check(o0.nout_valid && o0.nout_ca == 8'd0 && o0.nout_sn == 2'd0, "first crosspoint sends CA = W");
    tick(); next();
    in0 = idle(); in0.r_cur = 8'd0; in0.r_new = 8'd0; in0.a_new = 2'd1; in0.pred_cnt = 2'd0;
    in0.floor_en = 0;
    settle();
    // counter 0 at crosspoint 0 is eligible only at the arbiter's position; here A=1
    check(o0.dout_valid && o0.dout_wc == 8'hFF && o0.dout_data == 16'h1111, "DW = W - 1 at crosspoint 0");
    tick(); check(o0.occupancy == 2'd0, "X0 empty after deflection"); next();

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
