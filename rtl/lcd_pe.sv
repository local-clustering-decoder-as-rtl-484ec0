// lcd_pe -- processing element of the LCD decoding engine.
//
// A PE owns NV = (D-1)/2 vertices of the decoding graph (one column of one
// layer of the PE array) and keeps their records (cluster index, parent
// pointer, radius, defect, parity, active, busy) in a small local memory.
//
// Each time its part starts it, the PE walks over the vertices that are in a
// cluster -- a defect, or incident to a fully-grown or pre-grown edge -- one
// vertex per clock cycle, lowest index first, and skips the rest. In the
// growing and picking stages it applies its own copy of the stage kernel
// (grow: an active vertex with radius <= w_max grows by one; pick: active <=
// parity). In the merging and syncing stages the kernel lives in the part and
// is shared by the part's PEs: the PE presents the record of the vertex it is
// at, with its neighbours' records and accessibility, on the cur_* outputs,
// and writes back the record the part returns in the same cycle. A parity
// flip the part raises is passed to the network with the vertex and slot.
// Parity flips arriving from neighbouring PEs (flip_i) are applied at any
// time.
//
// Timing: start is a one-cycle pulse; the PE then spends one cycle per
// in-cluster vertex and one more cycle in which done_o pulses. init loads
// every record in one cycle: cindex = own index, parent = self, radius = 0,
// defect = parity = active = syndrome bit, busy = 0.
//
// The stage kernels follow the paper's pseudo code; the one-vertex-per-cycle
// walk, the register-file memory with every record visible to the network,
// and the encodings are this design's choices.
module lcd_pe
  import lcd_pkg::*;
#(
  parameter int unsigned D     = 17,
  parameter int unsigned PE_ID = 0
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // initialisation
  input  logic                     init_i,
  input  logic [(D-1)/2-1:0]       syndrome_i,
  input  logic [(D-1)/2-1:0]       vertex_en_i,
  // stage command from the part
  input  logic                     start_i,
  input  stage_e                   stage_i,
  // from the network
  input  logic    [NSLOT-1:0]      acc_i   [(D-1)/2],
  input  vertex_t                  nbr_i   [(D-1)/2][NSLOT_NBR],
  input  logic    [(D-1)/2-1:0]    flip_i,
  // records to the network and to the outside
  output vertex_t                  state_o [(D-1)/2],
  // view of the current vertex for the part's shared kernel
  output logic                     cur_valid_o,
  output vertex_t                  cur_u_o,
  output vertex_t                  cur_nbr_o [NSLOT_NBR],
  output logic    [NSLOT-1:0]      cur_acc_o,
  // write-back from the part's shared kernel
  input  vertex_t                  wr_state_i,
  input  logic                     wr_flip_i,
  input  logic    [3:0]            wr_flip_slot_i,
  // parity flip towards the parent of the current vertex
  output logic                     flip_req_o,
  output logic    [$clog2((D-1)/2 > 1 ? (D-1)/2 : 2)-1:0] flip_vtx_o,
  output logic    [3:0]            flip_slot_o,
  // status
  output logic                     done_o,
  output logic                     busy_any_o,
  output logic                     active_any_o
);

  localparam int unsigned NV  = (D - 1) / 2;
  localparam int unsigned JW  = $clog2(NV > 1 ? NV : 2);

  vertex_t          mem [NV];
  logic    [NV-1:0] pending;
  logic             running;
  stage_e           run_stage;
  logic    [NV-1:0] incl;
  logic    [JW-1:0] cur;
  logic             have_cur;
  vertex_t          local_new;
  logic             serial;

  // In-cluster mask: a defect, or an endpoint of an accessible edge.
  always_comb begin
    for (int j = 0; j < NV; j++) incl[j] = mem[j].defect | (|acc_i[j]);
  end

  // Lowest pending vertex.
  always_comb begin
    cur      = '0;
    have_cur = 1'b0;
    for (int j = NV - 1; j >= 0; j--) begin
      if (pending[j]) begin
        cur      = JW'(j);
        have_cur = 1'b1;
      end
    end
  end

  assign serial = (run_stage == ST_MERGING) || (run_stage == ST_SYNCING);

  // PE-local kernels (growing, picking).
  always_comb begin
    local_new = mem[cur];
    if (run_stage == ST_GROWING) begin
      if (mem[cur].active && (mem[cur].radius <= 2'(W_MAX)))
        local_new.radius = mem[cur].radius + 2'd1;
    end else if (run_stage == ST_PICKING) begin
      local_new.active = mem[cur].parity;
    end
  end

  // View for the part.
  assign cur_valid_o = running && have_cur && serial;
  assign cur_u_o     = mem[cur];
  assign cur_acc_o   = acc_i[cur];
  always_comb begin
    for (int k = 0; k < NSLOT_NBR; k++) cur_nbr_o[k] = nbr_i[cur][k];
  end

  assign flip_req_o  = cur_valid_o && wr_flip_i;
  assign flip_vtx_o  = cur;
  assign flip_slot_o = wr_flip_slot_i;

  // Record updates: the walking kernel, then flips from neighbours.
  vertex_t mem_nxt [NV];
  always_comb begin
    for (int j = 0; j < NV; j++) begin
      mem_nxt[j] = mem[j];
      if (running && have_cur && (cur == JW'(j)) && !start_i)
        mem_nxt[j] = serial ? wr_state_i : local_new;
      if (flip_i[j]) mem_nxt[j].parity = ~mem_nxt[j].parity;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pending   <= '0;
      running   <= 1'b0;
      run_stage <= ST_IDLE;
      done_o    <= 1'b0;
      for (int j = 0; j < NV; j++) mem[j] <= '0;
    end else begin
      done_o <= 1'b0;
      if (init_i) begin
        for (int j = 0; j < NV; j++) begin
          mem[j].cindex <= {1'b1, (CIW-1)'(PE_ID * NV + j)};
          mem[j].parent <= SLOT_SELF;
          mem[j].radius <= '0;
          mem[j].defect <= syndrome_i[j] & vertex_en_i[j];
          mem[j].parity <= syndrome_i[j] & vertex_en_i[j];
          mem[j].active <= syndrome_i[j] & vertex_en_i[j];
          mem[j].busy   <= 1'b0;
        end
        pending <= '0;
        running <= 1'b0;
      end else begin
        if (start_i) begin
          pending   <= incl;
          running   <= 1'b1;
          run_stage <= stage_i;
        end else if (running) begin
          if (have_cur) begin
            pending[cur] <= 1'b0;
          end else begin
            running <= 1'b0;
            done_o  <= 1'b1;
          end
        end
        for (int j = 0; j < NV; j++) mem[j] <= mem_nxt[j];
      end
    end
  end

  always_comb begin
    busy_any_o   = 1'b0;
    active_any_o = 1'b0;
    for (int j = 0; j < NV; j++) begin
      busy_any_o   |= mem[j].busy;
      active_any_o |= mem[j].active;
    end
  end

  assign state_o = mem;

endmodule
