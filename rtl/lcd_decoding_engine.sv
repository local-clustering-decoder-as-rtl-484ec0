// lcd_decoding_engine -- the LCD decoding engine: PE array, parts, network
// and central controller.
//
// The engine clusters the defects of one decoding window, D rounds of a
// distance-D surface code (D+1 layers of the decoding graph), with a
// distributed union-find style algorithm. The (D+1) x (D+1) PEs each hold one
// column of one layer, (D-1)/2 vertices. PEs are grouped in parts of 3 x 3;
// parts are coordinated by the controller, and the network joins the PEs as
// the decoding graph dictates.
//
// Operation: load the pre-grown edge set first (pg_clear_i, then one
// pg_valid_i pulse per edge), present syndrome_i and vertex_en_i, and pulse
// start_i. The engine then runs initing, optional pre-clustering, and the
// grow/merge/pick/sync cycle until every cluster is even or touches the
// boundary; done_o pulses at the end and state_o holds the final vertex
// records: cindex names the cluster (zero for a cluster that reached the
// boundary, otherwise {1, lowest vertex index}), parent the tree edge by
// neighbour slot, radius the growth. These records are what a later peeling
// step needs to form the correction. syndrome_i and vertex_en_i are sampled
// at start_i; pg_* must not change during a decode.
module lcd_decoding_engine
  import lcd_pkg::*;
#(
  parameter int unsigned D = 17
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start_i,
  input  logic [(D+1)*(D+1)*((D-1)/2)-1:0] syndrome_i,
  input  logic [(D+1)*(D+1)*((D-1)/2)-1:0] vertex_en_i,
  input  logic          pg_clear_i,
  input  logic          pg_valid_i,
  input  logic [$clog2((D+1)*(D+1)*((D-1)/2))+2:0] pg_edge_i,
  output logic          busy_o,
  output logic          done_o,
  output vertex_t       state_o [(D+1)*(D+1)*((D-1)/2)],
  output stage_e        stage_o,
  output logic [31:0]   cycles_o,
  output logic [15:0]   grow_cnt_o,
  output logic [15:0]   merge_cnt_o,
  output logic [15:0]   merge_rerun_cnt_o,
  output logic [15:0]   sync_rerun_cnt_o,
  output logic          preclustered_o
);

  localparam int unsigned NV    = (D - 1) / 2;
  localparam int unsigned NC    = D + 1;
  localparam int unsigned NPE   = NC * NC;
  localparam int unsigned N     = NPE * NV;
  localparam int unsigned NBLK  = (NC + 2) / 3;
  localparam int unsigned NPART = NBLK * NBLK;
  localparam int unsigned JW    = $clog2(NV > 1 ? NV : 2);

  // controller
  logic              init, go;
  stage_e            stage;
  logic [3:0]        slot;
  logic [NPART-1:0]  part_done;
  logic              busy_any, active_any, pg_any;

  // PE side
  vertex_t           pe_state     [NPE][NV];
  logic [NPE-1:0]    pe_busy, pe_active, pe_start, pe_done;
  logic              pe_cur_valid [NPE];
  vertex_t           pe_cur_u     [NPE];
  vertex_t           pe_cur_nbr   [NPE][NSLOT_NBR];
  logic [NSLOT-1:0]  pe_cur_acc   [NPE];
  logic              pe_flip_req  [NPE];
  logic [JW-1:0]     pe_flip_vtx  [NPE];
  logic [3:0]        pe_flip_slot [NPE];
  vertex_t           pe_wr_state  [NPE];
  logic              pe_wr_flip   [NPE];
  logic [3:0]        pe_wr_slot   [NPE];

  // network side
  vertex_t           vstate [N];
  vertex_t           vnbr   [N][NSLOT_NBR];
  logic [NSLOT-1:0]  vacc   [N];
  logic [N-1:0]      vflip;

  // syndrome and enables are sampled at start
  logic [N-1:0]      syn_q, en_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      syn_q <= '0;
      en_q  <= '0;
    end else if (start_i && !busy_o) begin
      syn_q <= syndrome_i;
      en_q  <= vertex_en_i;
    end
  end

  lcd_controller #(.NPART(NPART)) u_ctrl (
    .clk, .rst_n,
    .start_i,
    .pg_any_i          (pg_any),
    .busy_any_i        (busy_any),
    .active_any_i      (active_any),
    .init_o            (init),
    .go_o              (go),
    .stage_o           (stage),
    .slot_o            (slot),
    .part_done_i       (part_done),
    .busy_o,
    .done_o,
    .cycles_o,
    .grow_cnt_o,
    .merge_cnt_o,
    .merge_rerun_cnt_o,
    .sync_rerun_cnt_o,
    .preclustered_o
  );

  assign stage_o    = stage;
  assign busy_any   = |pe_busy;
  assign active_any = |pe_active;

  for (genvar p = 0; p < NPE; p++) begin : g_pe
    lcd_pe #(.D(D), .PE_ID(p)) u_pe (
      .clk, .rst_n,
      .init_i         (init),
      .syndrome_i     (syn_q[p*NV +: NV]),
      .vertex_en_i    (en_q[p*NV +: NV]),
      .start_i        (pe_start[p]),
      .stage_i        (stage),
      .acc_i          (vacc[p*NV +: NV]),
      .nbr_i          (vnbr[p*NV +: NV]),
      .flip_i         (vflip[p*NV +: NV]),
      .state_o        (pe_state[p]),
      .cur_valid_o    (pe_cur_valid[p]),
      .cur_u_o        (pe_cur_u[p]),
      .cur_nbr_o      (pe_cur_nbr[p]),
      .cur_acc_o      (pe_cur_acc[p]),
      .wr_state_i     (pe_wr_state[p]),
      .wr_flip_i      (pe_wr_flip[p]),
      .wr_flip_slot_i (pe_wr_slot[p]),
      .flip_req_o     (pe_flip_req[p]),
      .flip_vtx_o     (pe_flip_vtx[p]),
      .flip_slot_o    (pe_flip_slot[p]),
      .done_o         (pe_done[p]),
      .busy_any_o     (pe_busy[p]),
      .active_any_o   (pe_active[p])
    );
    for (genvar j = 0; j < NV; j++) begin : g_v
      assign vstate[p*NV + j] = pe_state[p][j];
    end
  end

  for (genvar q = 0; q < NPART; q++) begin : g_part
    logic [SLOTS_PER_PART-1:0] st, dn;
    logic                      cv  [SLOTS_PER_PART];
    vertex_t                   cu  [SLOTS_PER_PART];
    vertex_t                   cn  [SLOTS_PER_PART][NSLOT_NBR];
    logic [NSLOT-1:0]          ca  [SLOTS_PER_PART];
    vertex_t                   wr;
    logic                      wf;
    logic [3:0]                ws;
    for (genvar s = 0; s < SLOTS_PER_PART; s++) begin : g_slot
      localparam int PE = pe_of_slot(D, q, s);
      if (PE >= 0) begin : g_on
        assign pe_start[PE]    = st[s];
        assign dn[s]           = pe_done[PE];
        assign cv[s]           = pe_cur_valid[PE];
        assign cu[s]           = pe_cur_u[PE];
        assign cn[s]           = pe_cur_nbr[PE];
        assign ca[s]           = pe_cur_acc[PE];
        assign pe_wr_state[PE] = wr;
        assign pe_wr_flip[PE]  = wf;
        assign pe_wr_slot[PE]  = ws;
      end else begin : g_off
        assign dn[s] = 1'b0;
        assign cv[s] = 1'b0;
        assign cu[s] = '0;
        assign cn[s] = '{default: '0};
        assign ca[s] = '0;
      end
    end
    lcd_part #(.D(D), .PART_ID(q)) u_part (
      .clk, .rst_n,
      .go_i           (go),
      .stage_i        (stage),
      .slot_i         (slot),
      .pe_start_o     (st),
      .pe_done_i      (dn),
      .pe_cur_valid_i (cv),
      .pe_cur_u_i     (cu),
      .pe_cur_nbr_i   (cn),
      .pe_cur_acc_i   (ca),
      .wr_state_o     (wr),
      .wr_flip_o      (wf),
      .wr_flip_slot_o (ws),
      .done_o         (part_done[q])
    );
  end

  lcd_noc #(.D(D)) u_noc (
    .clk, .rst_n,
    .state_i     (vstate),
    .vertex_en_i (en_q),
    .flip_req_i  (pe_flip_req),
    .flip_vtx_i  (pe_flip_vtx),
    .flip_slot_i (pe_flip_slot),
    .pg_clear_i,
    .pg_valid_i,
    .pg_edge_i,
    .pg_any_o    (pg_any),
    .nbr_o       (vnbr),
    .acc_o       (vacc),
    .flip_o      (vflip)
  );

  assign state_o = vstate;

endmodule
