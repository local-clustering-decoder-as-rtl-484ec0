// lcd_adaptivity_engine -- adaptivity engine of the LCD: turns trigger events
// (heralded leakage) into edges for the decoding engine to pre-grow.
//
// The engine stores a precomputed map from each trigger to the set of
// decoding-graph edges made likelier by it, and replays that set when the
// trigger arrives. The map itself is computed offline (for leakage: the
// edges whose error mechanisms become more likely when the measured qubit is
// assumed leaked since its last reset) and written through the cfg_* port.
//
// Trigger ids: trigger = round * NQ + qubit, for the NQ = 2D^2-1 physical
// qubits of the patch and the D+1 measurement layers of a window. Map layout:
// a count memory, cnt_mem[trigger] = number of edges (0..MAXE), and an edge
// memory with MAXE entries per trigger, edge_mem[trigger*MAXE + i] = edge id
// ({vertex, forward slot index}, see lcd_pkg). cfg_sel_i = 1 writes the count
// memory at cfg_addr_i, 0 writes the edge memory.
//
// Handshake: a trigger is taken when trig_valid_i and trig_ready_o are both
// high. The engine then reads the count (one cycle) and emits its edges on
// pg_valid_o/pg_edge_o, one per cycle, before it is ready again. The union
// of the emitted edges over all triggers of a window is the set P of
// pre-grown edges; repeated edges are harmless since the decoding engine
// keeps one bit per edge. Latency: the first edge is valid from the third
// clock edge after the trigger is taken. The memory layout, the fixed MAXE entries per
// trigger and the handshake are this design's choices; the paper only says
// that the map is precomputed and addressed by the triggers.
module lcd_adaptivity_engine #(
  parameter int unsigned D     = 17,
  parameter int unsigned MAXE  = 16,
  parameter int unsigned NQ    = 2 * D * D - 1,
  parameter int unsigned NTRIG = NQ * (D + 1),
  parameter int unsigned EW    = $clog2((D+1)*(D+1)*((D-1)/2)) + 3,
  parameter int unsigned TW    = $clog2(NTRIG),
  parameter int unsigned AW    = $clog2(NTRIG * MAXE)
) (
  input  logic                       clk,
  input  logic                       rst_n,
  // map configuration
  input  logic                       cfg_we_i,
  input  logic                       cfg_sel_i,
  input  logic [AW-1:0]              cfg_addr_i,
  input  logic [EW-1:0]              cfg_data_i,
  // trigger events
  input  logic                       trig_valid_i,
  input  logic [TW-1:0]              trig_id_i,
  output logic                       trig_ready_o,
  // edges to pre-grow
  output logic                       pg_valid_o,
  output logic [EW-1:0]              pg_edge_o,
  output logic [31:0]                edges_sent_o
);

  localparam int unsigned CW = $clog2(MAXE + 1);

  typedef enum logic [1:0] { A_IDLE, A_COUNT, A_EDGES } astate_e;

  logic [CW-1:0] cnt_mem  [NTRIG];
  logic [EW-1:0] edge_mem [NTRIG * MAXE];

  astate_e       st;
  logic [TW-1:0] trig_q;
  logic [CW-1:0] cnt_q, idx_q;

  always_ff @(posedge clk) begin
    if (cfg_we_i) begin
      if (cfg_sel_i) begin
        if (cfg_addr_i < AW'(NTRIG)) cnt_mem[cfg_addr_i[TW-1:0]] <= cfg_data_i[CW-1:0];
      end else begin
        if (cfg_addr_i < AW'(NTRIG * MAXE)) edge_mem[cfg_addr_i] <= cfg_data_i;
      end
    end
  end

  assign trig_ready_o = (st == A_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st           <= A_IDLE;
      trig_q       <= '0;
      cnt_q        <= '0;
      idx_q        <= '0;
      pg_valid_o   <= 1'b0;
      pg_edge_o    <= '0;
      edges_sent_o <= '0;
    end else begin
      pg_valid_o <= 1'b0;
      unique case (st)
        A_IDLE: begin
          if (trig_valid_i && (trig_id_i < TW'(NTRIG))) begin
            trig_q <= trig_id_i;
            st     <= A_COUNT;
          end
        end
        A_COUNT: begin
          cnt_q <= (cnt_mem[trig_q] > CW'(MAXE)) ? CW'(MAXE) : cnt_mem[trig_q];
          idx_q <= '0;
          st    <= A_EDGES;
        end
        default: begin
          if (idx_q < cnt_q) begin
            pg_valid_o   <= 1'b1;
            pg_edge_o    <= edge_mem[AW'(trig_q) * AW'(MAXE) + AW'(idx_q)];
            edges_sent_o <= edges_sent_o + 32'd1;
            idx_q        <= idx_q + CW'(1);
          end else begin
            st <= A_IDLE;
          end
        end
      endcase
    end
  end

  // Assertions are checked from the first clock edge after reset.
  logic chk_en;
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) chk_en <= 1'b0;
    else        chk_en <= 1'b1;

  // A trigger offered must stay until it is taken.
  a_trig_stable: assert property (@(posedge clk) disable iff (!chk_en)
    (trig_valid_i && !trig_ready_o) |=> (trig_valid_i && $stable(trig_id_i)));

endmodule
