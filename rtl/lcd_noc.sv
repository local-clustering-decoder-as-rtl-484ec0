// lcd_noc -- inter-PE network of the LCD decoding engine.
//
// The network is the decoding graph laid onto the PE array. It is elaborated
// from the graph functions of lcd_pkg: for every vertex and each of its up to
// twelve neighbour slots it wires the neighbour's record from the PE that
// holds it, so every link is a fixed bundle of wires between two PEs
// (spatial links inside a row of the array, timelike links inside a column,
// short and long hook links between columns one and two apart, reversing
// direction every layer).
//
// On these links it computes, for every vertex and slot, whether the edge is
// accessible: both endpoints enabled and either the radii of the endpoints
// sum to at least w_uv = 2 or the edge is pre-grown. The virtual boundary
// has radius 0, so a boundary edge is fully grown once the vertex radius
// reaches 2. It also routes parity flips: a PE that pushes the parity of its
// current vertex to the parent names the vertex and the parent's slot, and
// the network raises flip_o on the parent. A flip aimed at the boundary is
// absorbed.
//
// The network also holds the pre-grown edge set P sent by the adaptivity
// engine: one bit per edge, set by pg_valid_i/pg_edge_i, cleared by
// pg_clear_i. An edge id is {owner vertex, forward index 0..6}, see lcd_pkg.
// Ids naming no edge are ignored. All outputs except pg_any_o are
// combinational.
//
// The paper generates this module from the decoding graph with its own
// tool; here SystemVerilog generate loops do the same from the package
// functions. Keeping the pre-grown bits in the network and the vertex-enable
// mask (vertices switched off for a sub-graph) are this design's choices.
module lcd_noc
  import lcd_pkg::*;
#(
  parameter int unsigned D = 17
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  vertex_t               state_i   [(D+1)*(D+1)*((D-1)/2)],
  input  logic [(D+1)*(D+1)*((D-1)/2)-1:0] vertex_en_i,
  // flip requests, one per PE
  input  logic                  flip_req_i  [(D+1)*(D+1)],
  input  logic [$clog2((D-1)/2 > 1 ? (D-1)/2 : 2)-1:0] flip_vtx_i [(D+1)*(D+1)],
  input  logic [3:0]            flip_slot_i [(D+1)*(D+1)],
  // pre-grown edge set
  input  logic                  pg_clear_i,
  input  logic                  pg_valid_i,
  input  logic [$clog2((D+1)*(D+1)*((D-1)/2))+2:0] pg_edge_i,
  output logic                  pg_any_o,
  // per-vertex views
  output vertex_t               nbr_o  [(D+1)*(D+1)*((D-1)/2)][NSLOT_NBR],
  output logic [NSLOT-1:0]      acc_o  [(D+1)*(D+1)*((D-1)/2)],
  output logic [(D+1)*(D+1)*((D-1)/2)-1:0] flip_o
);

  localparam int unsigned NV = (D - 1) / 2;
  localparam int unsigned N  = (D + 1) * (D + 1) * NV;
  localparam int unsigned VW = $clog2(N);
  localparam int unsigned JW = $clog2(NV > 1 ? NV : 2);

  logic [NFWD-1:0] pg [N];

  // Pre-grown edge bits.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int g = 0; g < N; g++) pg[g] <= '0;
    end else if (pg_clear_i) begin
      for (int g = 0; g < N; g++) pg[g] <= '0;
    end else if (pg_valid_i) begin
      if ((pg_edge_i[VW+2:3] < VW'(N)) && (pg_edge_i[2:0] < 3'(NFWD)))
        pg[pg_edge_i[VW+2:3]][pg_edge_i[2:0]] <= 1'b1;
    end
  end

  always_comb begin
    pg_any_o = 1'b0;
    for (int g = 0; g < N; g++) pg_any_o |= |pg[g];
  end

  for (genvar g = 0; g < N; g++) begin : g_vtx
    logic [NSLOT_NBR-1:0] fl;
    for (genvar k = 0; k < NSLOT_NBR; k++) begin : g_slot
      localparam int NB = nbr_of(D, g, k);
      if (NB >= 0) begin : g_link
        localparam int OWN  = edge_owner(D, g, k);
        localparam int FI   = edge_fidx(k);
        localparam int NPE  = NB / NV;
        localparam int NJ   = NB % NV;
        localparam int RK   = rev_slot(k);
        logic [2:0] rsum;
        assign nbr_o[g][k] = state_i[NB];
        assign rsum        = {1'b0, state_i[g].radius} + {1'b0, state_i[NB].radius};
        assign acc_o[g][k] = vertex_en_i[g] & vertex_en_i[NB] &
                             ((rsum >= 3'(W_MAX)) | pg[OWN][FI]);
        assign fl[k]       = flip_req_i[NPE] && (flip_vtx_i[NPE] == JW'(NJ)) &&
                             (flip_slot_i[NPE] == 4'(RK));
      end else begin : g_none
        assign nbr_o[g][k] = '0;
        assign acc_o[g][k] = 1'b0;
        assign fl[k]       = 1'b0;
      end
    end
    if (has_boundary(D, g)) begin : g_bnd
      assign acc_o[g][SLOT_BND] = vertex_en_i[g] &
                                  ((state_i[g].radius >= 2'(W_MAX)) | pg[g][NFWD-1]);
    end else begin : g_nobnd
      assign acc_o[g][SLOT_BND] = 1'b0;
    end
    assign flip_o[g] = |fl;
  end

endmodule
