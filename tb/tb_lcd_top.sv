// tb_lcd_top -- end-to-end test of the Local Clustering Decoder at D = 5.
//
// Every window goes through the whole flow: clear the pre-grown set, send
// heralded-leakage triggers to the adaptivity engine, wait until it has
// streamed its edges into the decoding engine, start the decode and compare
// every final vertex record with lcd_ref_pkg run on the same syndrome and on
// the union of the triggers' map entries.
//
// The leakage map used here is synthetic (the real one comes from an offline
// error-model analysis of the circuit): trigger (round r, qubit q) maps to the
// edges around vertex (q * 7 + r * 13) mod N of the graph. Errors are placed
// on random edges, and more densely on the edges of the heralded triggers, as
// a leaked qubit would cause. Windows cycle through four modes: no herald,
// heralds, heralds with some vertices switched off, and a dense window.
// Every mechanism must occur at least once: pre-clustering, growth, merging
// re-runs, syncing re-runs, a cluster reaching the boundary, switched-off
// vertices, a trigger with an empty map entry.
module tb_lcd_top;
  import lcd_pkg::*;
  import lcd_ref_pkg::*;

  localparam int D     = 5;
  localparam int MAXE  = 16;
  localparam int NWIN  = 120;
  localparam int NV    = (D - 1) / 2;
  localparam int N     = (D + 1) * (D + 1) * NV;
  localparam int NQ    = 2 * D * D - 1;
  localparam int NTRIG = NQ * (D + 1);
  localparam int EW    = $clog2(N) + 3;
  localparam int TW    = $clog2(NTRIG);
  localparam int AW    = $clog2(NTRIG * MAXE);
  localparam int PERMILLE = 10;   // per-edge error probability, per mille

  logic clk = 0, rst_n = 1;

  initial #1 rst_n = 0;   // a falling edge, so the asynchronous reset acts before the first clock
  logic cfg_we = 0, cfg_sel = 0;
  logic [AW-1:0] cfg_addr = '0;
  logic [EW-1:0] cfg_data = '0;
  logic trig_valid = 0, trig_ready, adapt_idle;
  logic [TW-1:0] trig_id = '0;
  logic pg_clear = 0, start = 0;
  logic [N-1:0] syndrome = '0, vertex_en = '1;
  logic busy, done, pre;
  vertex_t state [N];
  stage_e stage;
  logic [31:0] cycles, edges_sent;
  logic [15:0] gcnt, mcnt, mrr, srr;

  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  lcd_top #(.D(D), .MAXE(MAXE)) dut (
    .clk, .rst_n, .cfg_we_i(cfg_we), .cfg_sel_i(cfg_sel), .cfg_addr_i(cfg_addr),
    .cfg_data_i(cfg_data), .trig_valid_i(trig_valid), .trig_id_i(trig_id),
    .trig_ready_o(trig_ready), .adapt_idle_o(adapt_idle), .pg_clear_i(pg_clear),
    .start_i(start), .syndrome_i(syndrome), .vertex_en_i(vertex_en), .busy_o(busy),
    .done_o(done), .state_o(state), .stage_o(stage), .cycles_o(cycles),
    .grow_cnt_o(gcnt), .merge_cnt_o(mcnt), .merge_rerun_cnt_o(mrr),
    .sync_rerun_cnt_o(srr), .preclustered_o(pre), .edges_sent_o(edges_sent)
  );

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  // synthetic leakage map
  int            mcount [NTRIG];
  int            medge  [NTRIG][MAXE];
  bit            mapped [NTRIG];

  function automatic void build_entry(int t);
    int g, n;
    g = ((t % NQ) * 7 + (t / NQ) * 13) % N;
    n = 0;
    if ((t % 11) != 5) begin          // some triggers have no entry
      for (int k = 0; k < NSLOT_NBR; k++) begin
        if (nbr_of(D, g, k) >= 0 && n < MAXE) begin
          medge[t][n] = edge_owner(D, g, k) * 8 + edge_fidx(k);
          n++;
        end
      end
      if (has_boundary(D, g) && n < MAXE) begin medge[t][n] = g * 8 + 6; n++; end
    end
    mcount[t] = n;
  endfunction

  task automatic cfg_write(input bit sel, input int addr, input int data);
    @(posedge clk);
    cfg_we <= 1; cfg_sel <= sel; cfg_addr <= AW'(addr); cfg_data <= EW'(data);
    @(posedge clk);
    cfg_we <= 0;
  endtask

  task automatic program_trigger(input int t);
    if (mapped[t]) return;
    build_entry(t);
    cfg_write(1, t, mcount[t]);
    for (int i = 0; i < mcount[t]; i++) cfg_write(0, t * MAXE + i, medge[t][i]);
    mapped[t] = 1;
  endtask

  bit syn_b [];
  bit en_b  [];
  bit pg_b  [][];
  ref_result_t rr;
  int n_pre = 0, n_grow = 0, n_mrr = 0, n_srr = 0, n_bnd = 0, n_off = 0, n_empty = 0;
  longint cyc_total = 0;
  int cyc_max = 0;

  task automatic flip_edge(int g, int f);
    int h;
    if (f == NFWD - 1) begin
      if (has_boundary(D, g)) syn_b[g] ^= 1;
      return;
    end
    case (f)
      0: h = nbr_of(D, g, 0);  1: h = nbr_of(D, g, 1);  2: h = nbr_of(D, g, 4);
      3: h = nbr_of(D, g, 6);  4: h = nbr_of(D, g, 7);  default: h = nbr_of(D, g, 8);
    endcase
    if (h < 0) return;
    syn_b[g] ^= 1;
    syn_b[h] ^= 1;
  endtask

  task automatic run_window(input int w);
    int mode, nh, permille;
    int trig [$];
    mode = w % 4;
    permille = (mode == 3) ? 4 * PERMILLE : PERMILLE;
    foreach (syn_b[g]) begin syn_b[g] = 0; en_b[g] = 1; foreach (pg_b[g][f]) pg_b[g][f] = 0; end
    // background errors
    for (int g = 0; g < N; g++)
      for (int f = 0; f < NFWD; f++)
        if (($urandom % 1000) < permille) flip_edge(g, f);
    // heralds
    nh = (mode == 0) ? 0 : 1 + $urandom % 3;
    repeat (nh) trig.push_back($urandom % NTRIG);
    foreach (trig[i]) begin
      program_trigger(trig[i]);
      if (mcount[trig[i]] == 0) n_empty++;
      for (int e = 0; e < mcount[trig[i]]; e++) begin
        pg_b[medge[trig[i]][e] / 8][medge[trig[i]][e] % 8] = 1;
        if (($urandom % 100) < 30) flip_edge(medge[trig[i]][e] / 8, medge[trig[i]][e] % 8);
      end
    end
    if (mode == 2) begin
      repeat (1 + $urandom % 4) en_b[$urandom % N] = 0;
      n_off++;
    end
    // run the flow
    @(posedge clk);
    pg_clear <= 1;
    @(posedge clk);
    pg_clear <= 0;
    foreach (trig[i]) begin
      trig_valid <= 1; trig_id <= TW'(trig[i]);
      @(posedge clk);
      while (!trig_ready) @(posedge clk);
      trig_valid <= 0;
      @(posedge clk);
    end
    while (!adapt_idle) @(posedge clk);
    @(posedge clk);
    #1;
    for (int g = 0; g < N; g++) begin syndrome[g] = syn_b[g]; vertex_en[g] = en_b[g]; end
    @(posedge clk);
    start <= 1;
    @(posedge clk);
    start <= 0;
    @(posedge clk);
    while (!done) @(posedge clk);
    // compare
    rr = ref_cluster(D, syn_b, en_b, pg_b);
    check(pre == (rr.rounds >= 0 && pg_any_ref()), "pre-clustering iff heralded edges exist");
    check(int'(gcnt) == ((!pre && rr.rounds == 0) ? 1 : rr.rounds),
          $sformatf("window %0d: growth rounds %0d expected %0d", w, gcnt, rr.rounds));
    for (int g = 0; g < N; g++) begin
      check(state[g].cindex == rr.cindex[g], $sformatf("window %0d v%0d cindex", w, g));
      check(int'(state[g].radius) == rr.radius[g], $sformatf("window %0d v%0d radius", w, g));
      check(!state[g].parity, $sformatf("window %0d v%0d odd parity left", w, g));
      if (state[g].cindex == '0) n_bnd++;
    end
    if (pre) n_pre++;
    if (gcnt != 0) n_grow++;
    if (mrr != 0) n_mrr++;
    if (srr != 0) n_srr++;
    cyc_total += longint'(cycles);
    if (int'(cycles) > cyc_max) cyc_max = int'(cycles);
  endtask

  function automatic bit pg_any_ref();
    foreach (pg_b[g]) foreach (pg_b[g][f]) if (pg_b[g][f]) return 1;
    return 0;
  endfunction

  initial begin
    syn_b = new[N];
    en_b  = new[N];
    pg_b  = new[N];
    foreach (pg_b[g]) pg_b[g] = new[NFWD];
    foreach (mapped[t]) mapped[t] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int w = 0; w < NWIN; w++) run_window(w);
    $display("windows %0d: pre-clustered %0d, grew %0d, merge re-runs %0d, sync re-runs %0d, boundary vertices %0d, switched-off %0d, empty map entries %0d",
             NWIN, n_pre, n_grow, n_mrr, n_srr, n_bnd, n_off, n_empty);
    $display("decode cycles: mean %0d, max %0d (%0d per round)", cyc_total / longint'(NWIN), cyc_max,
             cyc_total / longint'(NWIN * D));
    check(n_pre > 0, "pre-clustering happened");
    check(n_grow > 0, "growth happened");
    check(n_mrr > 0, "merging re-run happened");
    check(n_srr > 0, "syncing re-run happened");
    check(n_bnd > 0, "a cluster reached the boundary");
    check(n_off > 0, "switched-off vertices used");
    check(n_empty > 0, "a trigger with an empty map entry");
    check(int'(edges_sent) > 0, "adaptivity engine sent edges");
    // paper: under 1 us per round at 400 MHz for d = 5 -> 400 cycles per round
    check(cyc_total / longint'(NWIN * D) < 400, "mean decoding time within 1 us per round at 400 MHz");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
