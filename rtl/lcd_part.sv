// lcd_part -- a part of the LCD decoding engine: a group of PEs, each in a
// time slot of its own, with the stage logic they share.
//
// A part holds up to nine PEs, a block of 3 columns x 3 layers of the PE
// array; slot 3*(t mod 3)+(c mod 3) inside the block. Because every part
// uses the same slot layout, the PEs that share a slot in different parts
// are at least three links apart, so in a slot no two running PEs touch the
// same neighbour: this is the paper's conflict-free partition, and a parity
// flip or a neighbour read never collides.
//
// On go_i the part runs one step of a stage:
//   * growing, picking (no inter-PE traffic): every PE of the part is
//     started at once and runs its own kernel; done_o pulses when all have
//     finished;
//   * merging, syncing (inter-PE traffic): only the PE of slot_i is started
//     and the part's single copy of the kernel serves it, one vertex per
//     cycle; done_o pulses when that PE has finished (or at once if the slot
//     is empty). The controller steps the slots in lockstep over all parts.
//
// Merging kernel (paper, Box 2): among the accessible neighbours (and the
// boundary, whose cluster index is lowest of all) take the one of lowest
// cluster index; if it is lower than the vertex's own, adopt it and point the
// parent at it. Then, if the vertex has odd parity and is not a root, flip
// the parent's parity and clear its own. busy marks any change. Syncing
// kernel: an inactive vertex with an active accessible neighbour becomes
// active and busy.
//
// Timing: go_i is a one-cycle pulse; done_o pulses one cycle after the last
// PE's done. Block shape, slot order and the handshake are this design's
// choices; the kernels are the paper's.
module lcd_part
  import lcd_pkg::*;
#(
  parameter int unsigned D       = 17,
  parameter int unsigned PART_ID = 0
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   go_i,
  input  stage_e                 stage_i,
  input  logic [3:0]             slot_i,
  // PE side, indexed by slot
  output logic [SLOTS_PER_PART-1:0] pe_start_o,
  input  logic [SLOTS_PER_PART-1:0] pe_done_i,
  input  logic                   pe_cur_valid_i [SLOTS_PER_PART],
  input  vertex_t                pe_cur_u_i     [SLOTS_PER_PART],
  input  vertex_t                pe_cur_nbr_i   [SLOTS_PER_PART][NSLOT_NBR],
  input  logic [NSLOT-1:0]       pe_cur_acc_i   [SLOTS_PER_PART],
  output vertex_t                wr_state_o,
  output logic                   wr_flip_o,
  output logic [3:0]             wr_flip_slot_o,
  output logic                   done_o
);

  // Slots of this part that hold a PE.
  function automatic logic [SLOTS_PER_PART-1:0] present_mask();
    logic [SLOTS_PER_PART-1:0] m;
    for (int s = 0; s < SLOTS_PER_PART; s++) m[s] = (pe_of_slot(D, PART_ID, s) >= 0);
    return m;
  endfunction

  localparam logic [SLOTS_PER_PART-1:0] PRESENT = present_mask();

  logic [SLOTS_PER_PART-1:0] waiting;
  logic                      active_run;
  logic [3:0]                sel;
  stage_e                    run_stage;

  // Kernel inputs from the selected PE.
  vertex_t          u;
  logic [NSLOT-1:0] acc;
  vertex_t          nb [NSLOT_NBR];

  always_comb begin
    u   = '0;
    acc = '0;
    for (int k = 0; k < NSLOT_NBR; k++) nb[k] = '0;
    for (int s = 0; s < SLOTS_PER_PART; s++) begin
      if (sel == 4'(s)) begin
        u   = pe_cur_u_i[s];
        acc = pe_cur_acc_i[s];
        for (int k = 0; k < NSLOT_NBR; k++) nb[k] = pe_cur_nbr_i[s][k];
      end
    end
  end

  // Shared merging / syncing kernel.
  always_comb begin
    logic [CIW-1:0] best;
    logic [3:0]     bslot;
    logic           adopt;
    logic           anyact;
    wr_state_o     = u;
    wr_flip_o      = 1'b0;
    wr_flip_slot_o = u.parent;
    best   = u.cindex;
    bslot  = u.parent;
    adopt  = 1'b0;
    anyact = 1'b0;
    if (run_stage == ST_MERGING) begin
      if (acc[SLOT_BND]) begin
        // The boundary's cluster index is zero, below every vertex.
        if (best != '0) begin
          best  = '0;
          bslot = SLOT_BND;
          adopt = 1'b1;
        end
      end
      for (int k = 0; k < NSLOT_NBR; k++) begin
        if (acc[k] && (nb[k].cindex < best)) begin
          best  = nb[k].cindex;
          bslot = 4'(k);
          adopt = 1'b1;
        end
      end
      wr_state_o.cindex = best;
      wr_state_o.parent = bslot;
      wr_state_o.busy   = adopt;
      if (u.parity && (bslot != SLOT_SELF)) begin
        wr_flip_o         = 1'b1;
        wr_flip_slot_o    = bslot;
        wr_state_o.parity = 1'b0;
        wr_state_o.busy   = 1'b1;
      end
    end else if (run_stage == ST_SYNCING) begin
      for (int k = 0; k < NSLOT_NBR; k++) anyact |= acc[k] & nb[k].active;
      wr_state_o.busy   = anyact & ~u.active;
      wr_state_o.active = u.active | (anyact & ~u.active);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      waiting    <= '0;
      active_run <= 1'b0;
      sel        <= '0;
      run_stage  <= ST_IDLE;
      pe_start_o <= '0;
      done_o     <= 1'b0;
    end else begin
      pe_start_o <= '0;
      done_o     <= 1'b0;
      if (go_i) begin
        run_stage <= stage_i;
        sel       <= slot_i;
        if (stage_i == ST_GROWING || stage_i == ST_PICKING) begin
          pe_start_o <= PRESENT;
          waiting    <= PRESENT;
          active_run <= 1'b1;
        end else begin
          if ((slot_i < 4'(SLOTS_PER_PART)) && PRESENT[slot_i]) begin
            pe_start_o[slot_i] <= 1'b1;
            waiting            <= '0;
            waiting[slot_i]    <= 1'b1;
            active_run         <= 1'b1;
          end else begin
            done_o <= 1'b1;
          end
        end
      end else if (active_run) begin
        if ((waiting & ~pe_done_i) == '0) begin
          active_run <= 1'b0;
          done_o     <= 1'b1;
          waiting    <= '0;
        end else begin
          waiting <= waiting & ~pe_done_i;
        end
      end
    end
  end

  // Assertions are checked from the first clock edge after reset.
  logic chk_en;
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) chk_en <= 1'b0;
    else        chk_en <= 1'b1;

  // A selected PE presents a vertex only while the part is running.
  property p_cur_only_when_selected;
    @(posedge clk) disable iff (!chk_en)
      (pe_cur_valid_i[0] || pe_cur_valid_i[1] || pe_cur_valid_i[2] ||
       pe_cur_valid_i[3] || pe_cur_valid_i[4] || pe_cur_valid_i[5] ||
       pe_cur_valid_i[6] || pe_cur_valid_i[7] || pe_cur_valid_i[8]) |-> active_run;
  endproperty
  a_cur_only_when_selected: assert property (p_cur_only_when_selected);

endmodule
