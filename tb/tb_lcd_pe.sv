// tb_lcd_pe -- self-checking test of one LCD processing element (D = 9, so
// the PE holds 4 vertices).
//
// Checks: the records loaded by init; that a stage start walks exactly the
// in-cluster vertices (defect or an accessible edge), lowest index first,
// one per cycle, with done_o seen n+3 clock edges after the testbench
// drives start for n such vertices (start is sampled on the next edge, one
// cycle per vertex, one cycle for done): the cycle count is checked;
// the growing kernel (active vertices with radius <= 2 grow by one, radius
// stops at 3); the picking kernel (active <= parity); the serial write-back
// path through the part and the outgoing flip request; incoming parity flips.
module tb_lcd_pe;
  import lcd_pkg::*;

  localparam int D  = 9;
  localparam int NV = (D - 1) / 2;
  localparam int PE_ID = 5;

  logic clk = 0, rst_n = 1;

  initial #1 rst_n = 0;   // a falling edge, so the asynchronous reset acts before the first clock
  logic init = 0, start = 0;
  logic [NV-1:0] syn = '0, en = '1, flip = '0;
  stage_e stage = ST_IDLE;
  logic [NSLOT-1:0] acc [NV];
  vertex_t nbr [NV][NSLOT_NBR];
  vertex_t st [NV];
  logic cur_valid;
  vertex_t cur_u;
  vertex_t cur_nbr [NSLOT_NBR];
  logic [NSLOT-1:0] cur_acc;
  vertex_t wr_state;
  logic wr_flip = 0;
  logic [3:0] wr_slot = '0;
  logic flip_req;
  logic [1:0] flip_vtx;
  logic [3:0] flip_slot;
  logic done, busy_any, active_any;

  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  lcd_pe #(.D(D), .PE_ID(PE_ID)) dut (
    .clk, .rst_n, .init_i(init), .syndrome_i(syn), .vertex_en_i(en),
    .start_i(start), .stage_i(stage), .acc_i(acc), .nbr_i(nbr), .flip_i(flip),
    .state_o(st), .cur_valid_o(cur_valid), .cur_u_o(cur_u), .cur_nbr_o(cur_nbr),
    .cur_acc_o(cur_acc), .wr_state_i(wr_state), .wr_flip_i(wr_flip),
    .wr_flip_slot_i(wr_slot), .flip_req_o(flip_req), .flip_vtx_o(flip_vtx),
    .flip_slot_o(flip_slot), .done_o(done), .busy_any_o(busy_any),
    .active_any_o(active_any)
  );

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // Start a stage and return the cycles from start to done.
  task automatic run_stage(input stage_e s, output int cyc);
    @(posedge clk);
    stage <= s;
    start <= 1;
    @(posedge clk);
    start <= 0;
    cyc = 1;
    while (!done) begin @(posedge clk); cyc++; end
  endtask

  int cyc;
  int order [$];

  // Emulated shared kernel: set busy and flip towards slot 7.
  always_comb begin
    wr_state = cur_u;
    wr_state.busy = 1'b1;
    wr_state.cindex = cur_u.cindex - 1;
  end

  always @(posedge clk) if (cur_valid) order.push_back(int'(flip_vtx));

  initial begin
    for (int j = 0; j < NV; j++) begin
      acc[j] = '0;
      for (int k = 0; k < NSLOT_NBR; k++) nbr[j][k] = '0;
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    syn <= 4'b0101; en <= 4'b1111; init <= 1;
    @(posedge clk);
    init <= 0;
    @(posedge clk);
    for (int j = 0; j < NV; j++) begin
      check(st[j].cindex == {1'b1, 12'(PE_ID * NV + j)}, $sformatf("init cindex v%0d", j));
      check(st[j].parent == SLOT_SELF && st[j].radius == 0 && !st[j].busy, "init parent/radius/busy");
      check(st[j].defect == syn[j] && st[j].parity == syn[j] && st[j].active == syn[j], "init defect/parity/active");
    end
    check(active_any && !busy_any, "status after init");

    // in-cluster: defects 0, 2 plus vertex 3 through an accessible edge
    acc[3] = 13'b1 << 4;
    run_stage(ST_GROWING, cyc);
    check(cyc == 3 + 3, $sformatf("growing walks 3 vertices: %0d cycles", cyc));
    check(st[0].radius == 1 && st[2].radius == 1 && st[1].radius == 0 && st[3].radius == 0,
          "growing: active vertices grow");
    run_stage(ST_GROWING, cyc);
    run_stage(ST_GROWING, cyc);
    run_stage(ST_GROWING, cyc);
    check(st[0].radius == 3 && st[2].radius == 3, "growing: radius stops at w_max + 1");

    // picking: active <= parity
    flip <= 4'b0001;            // vertex 0 parity 1 -> 0 (from a neighbour)
    @(posedge clk);
    flip <= '0;
    @(posedge clk);
    check(!st[0].parity && st[2].parity, "incoming flip toggles the parity");
    run_stage(ST_PICKING, cyc);
    check(!st[0].active && st[2].active && !st[3].active, "picking: active <= parity");

    // serial stage: writes come from the part, in index order
    order.delete();
    wr_flip <= 1; wr_slot <= 4'd7;
    fork
      run_stage(ST_MERGING, cyc);
      begin
        @(posedge cur_valid);
        #1 check(flip_req && flip_slot == 4'd7, "flip request carries the slot");
      end
    join
    wr_flip <= 0;
    check(order.size() == 3 && order[0] == 0 && order[1] == 2 && order[2] == 3,
          "serial walk order 0, 2, 3");
    check(st[0].busy && st[2].busy && st[3].busy && !st[1].busy, "write-back lands on walked vertices");
    check(st[1].cindex == {1'b1, 12'(PE_ID * NV + 1)} &&
          st[3].cindex == {1'b1, 12'(PE_ID * NV + 3)} - 1, "write-back record contents");
    check(cyc == 3 + 3, "serial walk cycle count");

    // disabled vertex: defect masked at init
    en <= 4'b1110; syn <= 4'b0001; init <= 1;
    @(posedge clk);
    init <= 0;
    @(posedge clk);
    check(!st[0].defect && !st[0].active, "disabled vertex drops its defect");
    acc[3] = '0;
    run_stage(ST_GROWING, cyc);
    check(cyc == 3, "empty walk: start, one idle step, done");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
