// tb_lcd_decoding_engine -- self-checking test of the LCD decoding engine at
// distance 5 (36 PEs in 4 parts of 9, 72 vertices).
//
// 1. The worked example of the paper's FSM walk-through: pre-grown edge
//    (0,2), defects 2, 4 and 5. After the second picking stage vertices 0,
//    2, 4, 5 must share cluster index 0, 2 must point at 0 and 4, 5 at 2,
//    only vertex 0 may be active and only vertex 0 may hold odd parity.
// 2. Random windows: errors placed on random edges with a fixed probability
//    (their endpoints form the syndrome), sometimes with random pre-grown
//    edges and switched-off vertices. Every final record is compared with
//    lcd_ref_pkg (cluster index, radius, number of growth rounds); every
//    parity must be even at the end, and each non-root vertex's parent must
//    be in the same cluster. The mean decoding time per round is checked
//    against the 1 us per round budget at the paper's 400 MHz for d = 5.
module tb_lcd_decoding_engine;
  import lcd_pkg::*;
  import lcd_ref_pkg::*;

  localparam int D  = 5;
  localparam int NV = (D - 1) / 2;
  localparam int N  = (D + 1) * (D + 1) * NV;
  localparam int EW = $clog2(N) + 3;
  localparam int NTRIALS = 300;

  logic          clk = 0;
  logic          rst_n = 1;
  initial #1 rst_n = 0;   // a falling edge, so the asynchronous reset acts before the first clock
  logic          start = 0;
  logic [N-1:0]  syndrome = '0;
  logic [N-1:0]  vertex_en = '1;
  logic          pg_clear = 0, pg_valid = 0;
  logic [EW-1:0] pg_edge = '0;
  logic          busy, done, pre;
  vertex_t       state [N];
  stage_e        stage;
  logic [31:0]   cycles;
  logic [15:0]   grow_cnt, merge_cnt, merge_rerun, sync_rerun;

  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  lcd_decoding_engine #(.D(D)) dut (
    .clk, .rst_n,
    .start_i (start), .syndrome_i (syndrome), .vertex_en_i (vertex_en),
    .pg_clear_i (pg_clear), .pg_valid_i (pg_valid), .pg_edge_i (pg_edge),
    .busy_o (busy), .done_o (done), .state_o (state), .stage_o (stage),
    .cycles_o (cycles), .grow_cnt_o (grow_cnt), .merge_cnt_o (merge_cnt),
    .merge_rerun_cnt_o (merge_rerun), .sync_rerun_cnt_o (sync_rerun),
    .preclustered_o (pre)
  );

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  task automatic send_pg(input int g, input int f);
    @(posedge clk);
    pg_valid <= 1;
    pg_edge  <= EW'({g, 3'(f)});
    @(posedge clk);
    pg_valid <= 0;
  endtask

  task automatic clear_pg();
    @(posedge clk);
    pg_clear <= 1;
    @(posedge clk);
    pg_clear <= 0;
  endtask

  task automatic run_decode();
    @(posedge clk);
    start <= 1;
    @(posedge clk);
    start <= 0;
    while (!done) @(posedge clk);
  endtask

  // Slot through which vertex a sees vertex b.
  function automatic int slot_to(int a, int b);
    for (int k = 0; k < NSLOT_NBR; k++) if (nbr_of(D, a, k) == b) return k;
    return -1;
  endfunction

  // ---------------------------------------------------------- figure example
  int picks_seen = 0;
  bit fig_checked = 0;
  stage_e prev_stage = ST_IDLE;
  always @(posedge clk) begin
    prev_stage <= stage;
    if (fig_checked == 0 && stage == ST_SYNCING && prev_stage == ST_PICKING) begin
      picks_seen++;
      if (picks_seen == 2) begin
        fig_checked = 1;
        check(state[0].cindex == {1'b1, 12'd0} && state[2].cindex == {1'b1, 12'd0} &&
              state[4].cindex == {1'b1, 12'd0} && state[5].cindex == {1'b1, 12'd0},
              "figure: cluster indices of 0,2,4,5");
        check(state[0].parent == SLOT_SELF, "figure: vertex 0 is the root");
        check(int'(state[2].parent) == slot_to(2, 0), "figure: 2 points at 0");
        check(int'(state[4].parent) == slot_to(4, 2), "figure: 4 points at 2");
        check(int'(state[5].parent) == slot_to(5, 2), "figure: 5 points at 2");
        check(state[0].active && !state[2].active && !state[4].active && !state[5].active,
              "figure: only the root is active after picking");
        check(state[0].parity && !state[2].parity && !state[4].parity && !state[5].parity,
              "figure: only the root holds the odd parity");
        check(state[0].radius == 1 && state[2].radius == 1 && state[4].radius == 1 &&
              state[5].radius == 1, "figure: radii after one growth");
      end
    end
  end

  // ---------------------------------------------------------- random windows
  bit syn_b [];
  bit en_b  [];
  bit pg_b  [][];
  ref_result_t rr;
  longint total_cycles = 0;
  int     counted = 0;
  int     n_pre = 0, n_merge_rerun = 0, n_sync_rerun = 0, n_bnd = 0, n_off = 0;

  task automatic compare(input string tag);
    int exp_rounds;
    rr = ref_cluster(D, syn_b, en_b, pg_b);
    // Without pre-grown edges the first growing stage always runs, even when
    // nothing is left to grow.
    exp_rounds = (!pre && rr.rounds == 0) ? 1 : rr.rounds;
    check(int'(grow_cnt) == exp_rounds,
          $sformatf("%s: growth rounds %0d, expected %0d", tag, grow_cnt, exp_rounds));
    for (int g = 0; g < N; g++) begin
      check(state[g].cindex == rr.cindex[g],
            $sformatf("%s: v%0d cindex %h expected %h", tag, g, state[g].cindex, rr.cindex[g]));
      check(int'(state[g].radius) == rr.radius[g],
            $sformatf("%s: v%0d radius %0d expected %0d", tag, g, state[g].radius, rr.radius[g]));
      check(!state[g].parity, $sformatf("%s: v%0d parity left odd", tag, g));
      if (state[g].parent != SLOT_SELF && state[g].parent != SLOT_BND) begin
        int h;
        h = nbr_of(D, g, int'(state[g].parent));
        check(h >= 0 && state[h].cindex == state[g].cindex,
              $sformatf("%s: v%0d parent outside its cluster", tag, g));
      end
      if (state[g].cindex == '0) n_bnd++;
    end
  endtask

  initial begin
    syn_b = new[N];
    en_b  = new[N];
    pg_b  = new[N];
    foreach (pg_b[g]) pg_b[g] = new[NFWD];
    repeat (4) @(posedge clk);
    rst_n = 1;

    // figure example
    foreach (syn_b[g]) begin syn_b[g] = 0; en_b[g] = 1; foreach (pg_b[g][f]) pg_b[g][f] = 0; end
    syn_b[2] = 1; syn_b[4] = 1; syn_b[5] = 1;
    pg_b[0][1] = 1;                           // edge 0 -(slot 1)- 2
    check(nbr_of(D, 0, 1) == 2, "graph: slot 1 of vertex 0 is vertex 2");
    clear_pg();
    send_pg(0, 1);
    for (int g = 0; g < N; g++) syndrome[g] = syn_b[g];
    vertex_en = '1;
    run_decode();
    check(fig_checked, "figure example reached its second picking stage");
    check(pre, "figure example began with pre-clustering");
    compare("figure");

    // random windows
    for (int t = 0; t < NTRIALS; t++) begin
      int mode;
      mode = t % 4;               // 0,1: plain; 2: pre-grown; 3: vertices off
      foreach (syn_b[g]) begin syn_b[g] = 0; en_b[g] = 1; foreach (pg_b[g][f]) pg_b[g][f] = 0; end
      for (int g = 0; g < N; g++) begin
        for (int k = 0; k < NSLOT_NBR; k++) begin
          int h;
          h = nbr_of(D, g, k);
          if (is_fwd(k) && h >= 0 && ($urandom % 1000) < 15) begin
            syn_b[g] ^= 1;
            syn_b[h] ^= 1;
          end
        end
        if (has_boundary(D, g) && ($urandom % 1000) < 15) syn_b[g] ^= 1;
      end
      clear_pg();
      if (mode == 2) begin
        repeat (1 + $urandom % 6) begin
          int g, f;
          g = $urandom % N;
          f = $urandom % NFWD;
          pg_b[g][f] = 1;
          send_pg(g, f);
        end
      end
      if (mode == 3) begin
        repeat (1 + $urandom % 4) en_b[$urandom % N] = 0;
      end
      for (int g = 0; g < N; g++) begin
        syndrome[g]  = syn_b[g];
        vertex_en[g] = en_b[g];
      end
      run_decode();
      compare($sformatf("trial %0d", t));
      if (pre) n_pre++;
      if (merge_rerun != 0) n_merge_rerun++;
      if (sync_rerun != 0) n_sync_rerun++;
      if (mode == 3) n_off++;
      if (mode < 2) begin
        total_cycles += cycles;
        counted++;
      end
    end
    $display("random windows: %0d, pre-clustered %0d, merge re-runs in %0d, sync re-runs in %0d, boundary-cluster vertices %0d",
             NTRIALS, n_pre, n_merge_rerun, n_sync_rerun, n_bnd);
    $display("mean decode: %0d cycles = %0d ns per round at 400 MHz",
             total_cycles / counted, (total_cycles * 10) / (counted * 4 * D));
    check(n_pre > 0 && n_merge_rerun > 0 && n_sync_rerun > 0 && n_bnd > 0 && n_off > 0,
          "every mechanism exercised");
    // 1 us per round at 400 MHz = 400 cycles per round
    check(total_cycles / counted < 400 * D, "mean decoding time within 1 us per round");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
