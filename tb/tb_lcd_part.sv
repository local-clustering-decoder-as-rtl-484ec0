// tb_lcd_part -- self-checking test of an LCD part (D = 7, part 2, whose
// block runs past the edge of the 8 x 8 PE array so slots 2, 5 and 8 are
// empty). The PEs are played by the testbench.
//
// Checks: a growing/picking go starts every present PE at once and done
// follows the last PE's done; a merging/syncing go starts only the PE of the
// slot and an empty slot reports done at once; the shared merging kernel
// (adopt the lowest accessible cluster index, boundary lowest of all, point
// the parent at it, push odd parity to a non-self parent, busy on change) and
// syncing kernel (inactive vertex with an active accessible neighbour turns
// active and busy) against a model written here, on random vertex views.
module tb_lcd_part;
  import lcd_pkg::*;

  localparam int D = 7;
  localparam int PART = 2;

  logic clk = 0, rst_n = 1;

  initial #1 rst_n = 0;   // a falling edge, so the asynchronous reset acts before the first clock
  logic go = 0;
  stage_e stage = ST_IDLE;
  logic [3:0] slot = '0;
  logic [8:0] pe_start, pe_done = '0;
  logic cv [9];
  vertex_t cu [9];
  vertex_t cn [9][NSLOT_NBR];
  logic [NSLOT-1:0] ca [9];
  vertex_t wr;
  logic wf;
  logic [3:0] ws;
  logic done;

  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  lcd_part #(.D(D), .PART_ID(PART)) dut (
    .clk, .rst_n, .go_i(go), .stage_i(stage), .slot_i(slot),
    .pe_start_o(pe_start), .pe_done_i(pe_done), .pe_cur_valid_i(cv),
    .pe_cur_u_i(cu), .pe_cur_nbr_i(cn), .pe_cur_acc_i(ca),
    .wr_state_o(wr), .wr_flip_o(wf), .wr_flip_slot_o(ws), .done_o(done)
  );

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  task automatic issue(input stage_e s, input int sl);
    @(posedge clk);
    go <= 1; stage <= s; slot <= 4'(sl);
    @(posedge clk);
    go <= 0;
  endtask

  int done_seen;
  always @(posedge clk) if (done) done_seen++;

  initial begin
    for (int s = 0; s < 9; s++) begin
      cv[s] = 0; cu[s] = '0; ca[s] = '0;
      for (int k = 0; k < NSLOT_NBR; k++) cn[s][k] = '0;
    end
    repeat (3) @(posedge clk);
    rst_n = 1;

    // parallel stage
    done_seen = 0;
    issue(ST_GROWING, 0);
    #1 check(pe_start == 9'b011011011, $sformatf("growing starts present PEs: %b", pe_start));
    @(posedge clk);
    #1 check(pe_start == '0, "start is one pulse");
    pe_done = 9'b000011011;
    @(posedge clk);
    #1 pe_done = '0;
    repeat (3) @(posedge clk);
    check(done_seen == 0, "no done before every PE is done");
    pe_done = 9'b011000000;
    @(posedge clk);
    #1 pe_done = '0;
    repeat (2) @(posedge clk);
    check(done_seen == 1, "done after the last PE");

    // serial: present slot and empty slot
    done_seen = 0;
    issue(ST_MERGING, 4);
    #1 check(pe_start == 9'b000010000, "merging starts only the slot's PE");
    pe_done = 9'b000010000;
    @(posedge clk);
    #1 pe_done = '0;
    repeat (2) @(posedge clk);
    check(done_seen == 1, "serial slot done");
    done_seen = 0;
    issue(ST_SYNCING, 5);
    #1 check(pe_start == '0, "empty slot starts nothing");
    repeat (2) @(posedge clk);
    check(done_seen == 1, "empty slot reports done");

    // kernels on random views
    for (int t = 0; t < 400; t++) begin
      stage_e s;
      int sl;
      vertex_t u, ex;
      logic [CIW-1:0] best;
      int bk;
      bit exf, anyact;
      s  = (t % 2) ? ST_SYNCING : ST_MERGING;
      sl = (t % 3 == 0) ? 0 : ((t % 3 == 1) ? 3 : 7);
      issue(s, sl);
      u = vertex_t'({$urandom, $urandom});
      if (t % 5 == 0) u.parent = SLOT_SELF;
      u.cindex = CIW'($urandom % 64);
      cu[sl] = u;
      ca[sl] = NSLOT'($urandom);
      for (int k = 0; k < NSLOT_NBR; k++) begin
        cn[sl][k] = vertex_t'({$urandom, $urandom});
        cn[sl][k].cindex = CIW'($urandom % 64);
      end
      // model
      ex = u;
      exf = 0;
      if (s == ST_MERGING) begin
        best = u.cindex;
        bk = -1;
        if (ca[sl][12]) best = 0;
        for (int k = 0; k < NSLOT_NBR; k++) if (ca[sl][k] && cn[sl][k].cindex < best) best = cn[sl][k].cindex;
        if (best < u.cindex) begin
          if (ca[sl][12]) bk = 12;
          else for (int k = NSLOT_NBR - 1; k >= 0; k--) if (ca[sl][k] && cn[sl][k].cindex == best) bk = k;
        end
        ex.cindex = best;
        if (bk >= 0) ex.parent = 4'(bk);
        ex.busy = (bk >= 0);
        if (u.parity && ex.parent != SLOT_SELF) begin
          exf = 1; ex.parity = 0; ex.busy = 1;
        end
      end else begin
        anyact = 0;
        for (int k = 0; k < NSLOT_NBR; k++) if (ca[sl][k] && cn[sl][k].active) anyact = 1;
        ex.busy = anyact && !u.active;
        ex.active = u.active || anyact;
      end
      #1;
      check(wr == ex, $sformatf("kernel %s t%0d: got %h expected %h", s.name(), t, wr, ex));
      check(wf == exf && (!exf || ws == ex.parent), $sformatf("kernel flip t%0d", t));
      pe_done[sl] = 1;
      @(posedge clk);
      #1 pe_done = '0;
      @(posedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
