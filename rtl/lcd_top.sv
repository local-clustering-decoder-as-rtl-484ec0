// lcd_top -- Local Clustering Decoder: adaptivity engine plus decoding engine.
//
// The adaptivity engine turns trigger events (heralded leakage of a qubit in
// a given round) into a set of pre-grown edges, which it streams into the
// decoding engine while the syndrome of the window is being gathered. The
// decoding engine then clusters the syndrome on the decoding graph of a
// distance-D surface code over D rounds, starting from pre-clusters along the
// pre-grown edges if there are any.
//
// Use per window: pulse pg_clear_i; send the window's triggers on trig_*;
// wait until adapt_idle_o; present syndrome_i and vertex_en_i and pulse
// start_i; wait for done_o and read state_o (one record per vertex, see
// lcd_decoding_engine). The map of the adaptivity engine is loaded once
// through cfg_*. Forming the correction from the final clusters (peeling)
// lies outside this design; state_o carries what it needs.
module lcd_top
  import lcd_pkg::*;
#(
  parameter int unsigned D    = 17,
  parameter int unsigned MAXE = 16
) (
  input  logic          clk,
  input  logic          rst_n,
  // adaptivity map configuration
  input  logic          cfg_we_i,
  input  logic          cfg_sel_i,
  input  logic [$clog2((2*D*D-1)*(D+1)*MAXE)-1:0] cfg_addr_i,
  input  logic [$clog2((D+1)*(D+1)*((D-1)/2))+2:0] cfg_data_i,
  // trigger events
  input  logic          trig_valid_i,
  input  logic [$clog2((2*D*D-1)*(D+1))-1:0] trig_id_i,
  output logic          trig_ready_o,
  output logic          adapt_idle_o,
  // decoding
  input  logic          pg_clear_i,
  input  logic          start_i,
  input  logic [(D+1)*(D+1)*((D-1)/2)-1:0] syndrome_i,
  input  logic [(D+1)*(D+1)*((D-1)/2)-1:0] vertex_en_i,
  output logic          busy_o,
  output logic          done_o,
  output vertex_t       state_o [(D+1)*(D+1)*((D-1)/2)],
  output stage_e        stage_o,
  output logic [31:0]   cycles_o,
  output logic [15:0]   grow_cnt_o,
  output logic [15:0]   merge_cnt_o,
  output logic [15:0]   merge_rerun_cnt_o,
  output logic [15:0]   sync_rerun_cnt_o,
  output logic          preclustered_o,
  output logic [31:0]   edges_sent_o
);

  localparam int unsigned EW = $clog2((D+1)*(D+1)*((D-1)/2)) + 3;

  logic          pg_valid;
  logic [EW-1:0] pg_edge;

  lcd_adaptivity_engine #(.D(D), .MAXE(MAXE)) u_adapt (
    .clk, .rst_n,
    .cfg_we_i, .cfg_sel_i, .cfg_addr_i, .cfg_data_i,
    .trig_valid_i, .trig_id_i, .trig_ready_o,
    .pg_valid_o   (pg_valid),
    .pg_edge_o    (pg_edge),
    .edges_sent_o
  );

  assign adapt_idle_o = trig_ready_o && !pg_valid;

  lcd_decoding_engine #(.D(D)) u_dec (
    .clk, .rst_n,
    .start_i,
    .syndrome_i,
    .vertex_en_i,
    .pg_clear_i,
    .pg_valid_i (pg_valid),
    .pg_edge_i  (pg_edge),
    .busy_o,
    .done_o,
    .state_o,
    .stage_o,
    .cycles_o,
    .grow_cnt_o,
    .merge_cnt_o,
    .merge_rerun_cnt_o,
    .sync_rerun_cnt_o,
    .preclustered_o
  );

endmodule
