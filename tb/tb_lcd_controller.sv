// tb_lcd_controller -- self-checking test of the LCD central controller.
//
// The parts are played by the testbench: each answers a go with a done after
// a random delay. At the start of every stage pass the testbench chooses what
// the busy and active flags will read at its end, and predicts the next stage
// with its own copy of the paper's AdvanceController rule: re-run while busy;
// initing -> merging if pre-grown edges exist, else growing; syncing ->
// exiting if no vertex is active, else growing; otherwise the next stage.
// It also checks that merging and syncing step slots 0..8 in order, that a
// slot is not issued before all parts are done, the pass counters, and that
// done pulses once per decode.
module tb_lcd_controller;
  import lcd_pkg::*;

  localparam int NPART = 4;

  logic clk = 0, rst_n = 1;

  initial #1 rst_n = 0;   // a falling edge, so the asynchronous reset acts before the first clock
  logic start = 0, pg_any = 0, busy_any = 0, active_any = 0;
  logic init, go, busy, done, pre;
  stage_e stage;
  logic [3:0] slot;
  logic [NPART-1:0] part_done = '0;
  logic [31:0] cycles;
  logic [15:0] gcnt, mcnt, mrr, srr;

  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  lcd_controller #(.NPART(NPART)) dut (
    .clk, .rst_n, .start_i(start), .pg_any_i(pg_any), .busy_any_i(busy_any),
    .active_any_i(active_any), .init_o(init), .go_o(go), .stage_o(stage),
    .slot_o(slot), .part_done_i(part_done), .busy_o(busy), .done_o(done),
    .cycles_o(cycles), .grow_cnt_o(gcnt), .merge_cnt_o(mcnt),
    .merge_rerun_cnt_o(mrr), .sync_rerun_cnt_o(srr), .preclustered_o(pre)
  );

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  // emulated parts
  int delay [NPART];
  bit pending [NPART];
  always @(posedge clk) begin
    part_done <= '0;
    for (int p = 0; p < NPART; p++) begin
      if (go) begin pending[p] = 1; delay[p] = 1 + $urandom % 5; end
      else if (pending[p]) begin
        delay[p]--;
        if (delay[p] == 0) begin pending[p] = 0; part_done[p] <= 1; end
      end
    end
  end

  function automatic stage_e next_stage(stage_e s, bit b, bit a, bit pg);
    if (b) return s;
    case (s)
      ST_INITING: return pg ? ST_MERGING : ST_GROWING;
      ST_GROWING: return ST_MERGING;
      ST_MERGING: return ST_PICKING;
      ST_PICKING: return ST_SYNCING;
      ST_SYNCING: return a ? ST_GROWING : ST_EXITING;
      default:    return ST_EXITING;
    endcase
  endfunction

  stage_e expect_stage;
  int     exp_slot, passes, grow_passes, merge_passes, merge_reruns, sync_reruns, dones;
  bit     early_go;
  int     total_reruns = 0;
  bit     all_done_since_go;

  always @(posedge clk) begin
    if (done) dones++;
    if (go) begin
      if (!all_done_since_go && passes > 0 && !(stage == ST_GROWING || stage == ST_PICKING) && slot != 0)
        early_go = 1;
      all_done_since_go = 0;
      if (slot == 0) begin
        bit b, a;
        check(stage == expect_stage, $sformatf("pass %0d: stage %s, expected %s", passes,
                                               stage.name(), expect_stage.name()));
        b = (stage == ST_MERGING || stage == ST_SYNCING) ? (($urandom % 3) == 0) : 0;
        a = (passes < 40) ? (($urandom % 4) != 0) : 0;
        if (stage == ST_GROWING && !b) grow_passes++;
        if (stage == ST_MERGING && !b) merge_passes++;
        if (stage == ST_MERGING && b) merge_reruns++;
        if (stage == ST_SYNCING && b) sync_reruns++;
        busy_any   <= b;
        active_any <= a;
        expect_stage = next_stage(stage, b, a, 0);
        passes++;
        exp_slot = 1;
      end else begin
        check(int'(slot) == exp_slot, $sformatf("slot %0d expected %0d", slot, exp_slot));
        check(stage == ST_MERGING || stage == ST_SYNCING, "slots only in serial stages");
        exp_slot++;
      end
    end
    if (part_done != 0) all_done_since_go = 1;
  end

  initial begin
    early_go = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int run = 0; run < 6; run++) begin
      passes = 0; grow_passes = 0; merge_passes = 0; merge_reruns = 0; sync_reruns = 0; dones = 0;
      pg_any = run % 2;
      busy_any = 0;
      expect_stage = next_stage(ST_INITING, 0, 1, pg_any);
      @(posedge clk);
      start <= 1;
      @(posedge clk);
      start <= 0;
      #1 check(init, "init pulses after start");
      while (!done) @(posedge clk);
      @(posedge clk);
      check(expect_stage == ST_EXITING, "decode ends in exiting");
      check(dones == 1, "one done per decode");
      check(!busy && stage == ST_IDLE, "idle after done");
      check(pre == pg_any, "pre-clustering flag");
      check(int'(gcnt) == grow_passes && int'(mcnt) == merge_passes &&
            int'(mrr) == merge_reruns && int'(srr) == sync_reruns,
            $sformatf("pass counters %0d/%0d %0d/%0d %0d/%0d %0d/%0d", gcnt, grow_passes,
                      mcnt, merge_passes, mrr, merge_reruns, srr, sync_reruns));
      check(cycles > 32'(passes), "cycle count covers the passes");
      total_reruns += merge_reruns + sync_reruns;
    end
    check(total_reruns > 0, "re-runs exercised");
    check(!early_go, "no slot issued before the previous slot finished");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
