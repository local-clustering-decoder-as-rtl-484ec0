// tb_lcd_noc -- self-checking test of the LCD inter-PE network at D = 5.
//
// Checks: the fifteen spatial edges of one layer of the d = 5 graph as
// drawn in the paper's PE-array figure (vertex pairs listed below), the
// maximum degree of 12, and that the hook links of PE 5 reach PEs 10 and 9
// in both directions of wiggling (layers 0-1 and 1-2); neighbour records
// passed through; accessibility from random radii (sum >= 2), from pre-grown
// edges seen from both ends, through the boundary (radius >= 2) and with
// switched-off vertices; pre-grown bits cleared by pg_clear; parity flips
// delivered to exactly the neighbour named by (PE, vertex, slot).
module tb_lcd_noc;
  import lcd_pkg::*;

  localparam int D  = 5;
  localparam int NV = (D - 1) / 2;
  localparam int NPE = (D + 1) * (D + 1);
  localparam int N  = NPE * NV;
  localparam int EW = $clog2(N) + 3;

  logic clk = 0, rst_n = 1;

  initial #1 rst_n = 0;   // a falling edge, so the asynchronous reset acts before the first clock
  vertex_t state [N];
  logic [N-1:0] en = '1;
  logic freq [NPE];
  logic [0:0] fvtx [NPE];
  logic [3:0] fslot [NPE];
  logic pg_clear = 0, pg_valid = 0, pg_any;
  logic [EW-1:0] pg_edge = '0;
  vertex_t nbr [N][NSLOT_NBR];
  logic [NSLOT-1:0] acc [N];
  logic [N-1:0] flip;

  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  lcd_noc #(.D(D)) dut (
    .clk, .rst_n, .state_i(state), .vertex_en_i(en), .flip_req_i(freq),
    .flip_vtx_i(fvtx), .flip_slot_i(fslot), .pg_clear_i(pg_clear),
    .pg_valid_i(pg_valid), .pg_edge_i(pg_edge), .pg_any_o(pg_any),
    .nbr_o(nbr), .acc_o(acc), .flip_o(flip)
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

  function automatic bit adjacent(int a, int b);
    for (int k = 0; k < 4; k++) if (nbr_of(D, a, k) == b) return 1;
    return 0;
  endfunction

  int fig_edges [15][2] = '{'{11,9}, '{10,9}, '{10,8}, '{9,7}, '{9,6}, '{8,6}, '{7,5},
                            '{6,5}, '{6,4}, '{5,3}, '{5,2}, '{4,2}, '{3,1}, '{2,1}, '{2,0}};

  bit pgm [N][NFWD];

  task automatic check_acc(input string tag);
    #1;
    for (int g = 0; g < N; g++) begin
      for (int k = 0; k < NSLOT_NBR; k++) begin
        int h;
        bit e;
        h = nbr_of(D, g, k);
        e = 0;
        if (h >= 0) begin
          e = en[g] && en[h] &&
              ((int'(state[g].radius) + int'(state[h].radius) >= 2) ||
               pgm[edge_owner(D, g, k)][edge_fidx(k)]);
          check(nbr[g][k] == state[h], $sformatf("%s: neighbour record v%0d k%0d", tag, g, k));
        end
        check(acc[g][k] == e, $sformatf("%s: acc v%0d k%0d = %0b", tag, g, k, acc[g][k]));
      end
      check(acc[g][12] == (has_boundary(D, g) && en[g] &&
                           (state[g].radius >= 2 || pgm[g][6])),
            $sformatf("%s: boundary acc v%0d", tag, g));
    end
  endtask

  initial begin
    int cnt, maxdeg;
    for (int p = 0; p < NPE; p++) begin freq[p] = 0; fvtx[p] = '0; fslot[p] = '0; end
    for (int g = 0; g < N; g++) begin state[g] = '0; for (int f = 0; f < NFWD; f++) pgm[g][f] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1;

    // graph structure against the figure
    cnt = 0;
    for (int a = 0; a < 12; a++) for (int b = a + 1; b < 12; b++) if (adjacent(a, b)) cnt++;
    check(cnt == 15, $sformatf("layer 0 has %0d spatial edges, figure shows 15", cnt));
    foreach (fig_edges[i]) check(adjacent(fig_edges[i][0], fig_edges[i][1]),
                                 $sformatf("figure edge %0d-%0d", fig_edges[i][0], fig_edges[i][1]));
    maxdeg = 0;
    for (int g = 0; g < N; g++) begin
      int dg;
      dg = 0;
      for (int k = 0; k < NSLOT_NBR; k++) if (nbr_of(D, g, k) >= 0) dg++;
      if (dg > maxdeg) maxdeg = dg;
    end
    check(maxdeg == 12, "maximum degree 12");
    begin
      bit to10, to9, from17to10, from17to9;
      to10 = 0; to9 = 0; from17to10 = 0; from17to9 = 0;
      for (int j = 0; j < NV; j++) for (int k = 6; k <= 8; k++) begin
        int h;
        h = nbr_of(D, 5 * NV + j, k);
        if (h >= 0 && h / NV == 10) to10 = 1;
        if (h >= 0 && h / NV == 9)  to9 = 1;
        h = nbr_of(D, 17 * NV + j, k + 3);
        if (h >= 0 && h / NV == 10) from17to10 = 1;
        if (h >= 0 && h / NV == 9)  from17to9 = 1;
      end
      check(to10 && to9, "hook links PE5 -> PE10, PE9");
      check(from17to10 && from17to9, "reversed hook links PE17 -> PE10, PE9");
    end

    // random radii
    repeat (20) begin
      for (int g = 0; g < N; g++) begin
        state[g] = vertex_t'({$urandom, $urandom});
        state[g].radius = 2'($urandom % 3);
        en[g] = ($urandom % 10) != 0;
      end
      check_acc("random radii");
    end

    // pre-grown edges
    for (int g = 0; g < N; g++) begin state[g].radius = 0; en[g] = 1; end
    repeat (30) begin
      int g, f;
      g = $urandom % N;
      f = $urandom % NFWD;
      pgm[g][f] = 1;
      @(posedge clk);
      pg_valid <= 1; pg_edge <= EW'({g, 3'(f)});
      @(posedge clk);
      pg_valid <= 0;
    end
    @(posedge clk);
    check(pg_any, "pg_any after loading");
    check_acc("pre-grown");
    @(posedge clk);
    pg_clear <= 1;
    @(posedge clk);
    pg_clear <= 0;
    @(posedge clk);
    for (int g = 0; g < N; g++) for (int f = 0; f < NFWD; f++) pgm[g][f] = 0;
    check(!pg_any, "pg_clear empties the set");
    check_acc("cleared");

    // flips
    repeat (200) begin
      int p, j, k, h;
      p = $urandom % NPE;
      j = $urandom % NV;
      k = $urandom % NSLOT;
      h = (k < NSLOT_NBR) ? nbr_of(D, p * NV + j, k) : -1;
      freq[p] = 1; fvtx[p] = 1'(j); fslot[p] = 4'(k);
      #1;
      for (int g = 0; g < N; g++) check(flip[g] == (g == h), $sformatf("flip from PE%0d v%0d k%0d at v%0d", p, j, k, g));
      freq[p] = 0;
      #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
