// tb_lcd_adaptivity_engine -- self-checking test of the LCD adaptivity
// engine at D = 5 (49 qubits x 6 layers = 294 triggers, 16 edges each).
//
// A random map is written through the configuration port and kept in the
// testbench. Triggers are then sent with random gaps; the stream of edges
// must be exactly the map entries of each trigger, in order, one per cycle,
// valid from the third clock edge after the trigger is taken, and the engine must not
// take a new trigger until its edges are out. Triggers with no edges and
// counts above the 16-entry limit (clamped) are included.
module tb_lcd_adaptivity_engine;

  localparam int D = 5;
  localparam int MAXE = 16;
  localparam int NQ = 2 * D * D - 1;
  localparam int NTRIG = NQ * (D + 1);
  localparam int EW = $clog2((D+1)*(D+1)*((D-1)/2)) + 3;
  localparam int TW = $clog2(NTRIG);
  localparam int AW = $clog2(NTRIG * MAXE);

  logic clk = 0, rst_n = 1;

  initial #1 rst_n = 0;   // a falling edge, so the asynchronous reset acts before the first clock
  logic cfg_we = 0, cfg_sel = 0;
  logic [AW-1:0] cfg_addr = '0;
  logic [EW-1:0] cfg_data = '0;
  logic trig_valid = 0, trig_ready;
  logic [TW-1:0] trig_id = '0;
  logic pg_valid;
  logic [EW-1:0] pg_edge;
  logic [31:0] sent;

  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  lcd_adaptivity_engine #(.D(D), .MAXE(MAXE)) dut (
    .clk, .rst_n, .cfg_we_i(cfg_we), .cfg_sel_i(cfg_sel), .cfg_addr_i(cfg_addr),
    .cfg_data_i(cfg_data), .trig_valid_i(trig_valid), .trig_id_i(trig_id),
    .trig_ready_o(trig_ready), .pg_valid_o(pg_valid), .pg_edge_o(pg_edge),
    .edges_sent_o(sent)
  );

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  int cnt [NTRIG];
  logic [EW-1:0] map [NTRIG][MAXE];
  logic [EW-1:0] expq [$];
  longint take_cycle [$];
  longint cyc = 0;
  int got = 0, expected_total = 0, n_empty = 0, n_clamped = 0;

  always @(posedge clk) begin
    cyc++;
    if (rst_n && pg_valid) begin
      got++;
      if (expq.size() == 0) check(0, "edge with none expected");
      else begin
        check(pg_edge == expq.pop_front(), "edge value and order");
      end
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    // program the map
    for (int t = 0; t < NTRIG; t++) begin
      cnt[t] = $urandom % (MAXE + 4);      // some above the limit, some zero
      @(posedge clk);
      cfg_we <= 1; cfg_sel <= 1; cfg_addr <= AW'(t); cfg_data <= EW'(cnt[t]);
      for (int i = 0; i < MAXE; i++) begin
        map[t][i] = EW'($urandom);
        @(posedge clk);
        cfg_we <= 1; cfg_sel <= 0; cfg_addr <= AW'(t * MAXE + i); cfg_data <= map[t][i];
      end
    end
    @(posedge clk);
    cfg_we <= 0;

    // triggers
    repeat (300) begin
      int t, n;
      longint t0, t1;
      t = $urandom % NTRIG;
      n = (cnt[t] > MAXE) ? MAXE : cnt[t];
      if (cnt[t] == 0) n_empty++;
      if (cnt[t] > MAXE) n_clamped++;
      repeat ($urandom % 3) @(posedge clk);
      trig_valid <= 1; trig_id <= TW'(t);
      @(posedge clk);
      while (!trig_ready) @(posedge clk);
      t0 = cyc;
      for (int i = 0; i < n; i++) expq.push_back(map[t][i]);
      expected_total += n;
      trig_valid <= 0;
      // wait for the edges and check the timing of the first one
      if (n > 0) begin
        @(posedge pg_valid);
        t1 = cyc;
        check(t1 - t0 == 3, $sformatf("first edge %0d cycles after the trigger", t1 - t0));
        repeat (n - 1) begin
          @(posedge clk);
          #1 check(pg_valid, "one edge per cycle");
        end
      end
      @(posedge clk);
      while (!trig_ready) @(posedge clk);
    end
    repeat (4) @(posedge clk);
    check(got == expected_total && expq.size() == 0, $sformatf("edges %0d of %0d", got, expected_total));
    check(int'(sent) == expected_total, "edge counter");
    check(n_empty > 0 && n_clamped > 0, "empty and clamped triggers exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
