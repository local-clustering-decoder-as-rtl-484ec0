// lcd_controller -- central controller of the LCD decoding engine.
//
// The controller steps the decoder through its stages: initing, then the
// cycle growing -> merging -> picking -> syncing, until no vertex is active,
// then exiting. Its transition rule is the paper's AdvanceController
// procedure: after a pass over a stage, if any vertex is still busy the
// stage is run again; otherwise initing goes to merging when the pre-grown
// edge set is non-empty (pre-clustering) and to growing when it is empty,
// syncing goes to exiting when no vertex is active and to growing otherwise,
// and every other stage goes to the next one.
//
// A pass over a stage is issued to the parts. For growing and picking one
// go_o pulse starts all PEs at once. For merging and syncing, which need the
// network, the controller issues slot 0..8 in turn, each to all parts in
// lockstep, and waits until every part reports done before the next slot;
// this keeps the PEs running at one time at least three links apart.
//
// Interface: start_i (one-cycle pulse, idle only) begins a decode and pulses
// init_o, which loads the syndrome into the PEs. done_o pulses when the
// exiting stage is reached; cycles_o then holds the clock cycles from
// start_i to done_o. The *_cnt_o counters count stage passes of the last
// decode (growing passes, merging passes, merging re-runs, syncing re-runs,
// and whether it began with pre-clustering). Re-run counting and the slot
// handshake are this design's choices.
module lcd_controller
  import lcd_pkg::*;
#(
  parameter int unsigned NPART = 36
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start_i,
  input  logic              pg_any_i,
  input  logic              busy_any_i,
  input  logic              active_any_i,
  output logic              init_o,
  output logic              go_o,
  output stage_e            stage_o,
  output logic [3:0]        slot_o,
  input  logic [NPART-1:0]  part_done_i,
  output logic              busy_o,
  output logic              done_o,
  output logic [31:0]       cycles_o,
  output logic [15:0]       grow_cnt_o,
  output logic [15:0]       merge_cnt_o,
  output logic [15:0]       merge_rerun_cnt_o,
  output logic [15:0]       sync_rerun_cnt_o,
  output logic              preclustered_o
);

  typedef enum logic [1:0] { PH_ISSUE, PH_WAIT, PH_DECIDE } phase_e;

  stage_e           stage;
  phase_e           phase;
  logic [3:0]       slot;
  logic [NPART-1:0] seen;
  logic             serial;

  assign serial  = (stage == ST_MERGING) || (stage == ST_SYNCING);
  assign stage_o = stage;
  assign slot_o  = slot;
  assign busy_o  = (stage != ST_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      stage             <= ST_IDLE;
      phase             <= PH_ISSUE;
      slot              <= '0;
      seen              <= '0;
      init_o            <= 1'b0;
      go_o              <= 1'b0;
      done_o            <= 1'b0;
      cycles_o          <= '0;
      grow_cnt_o        <= '0;
      merge_cnt_o       <= '0;
      merge_rerun_cnt_o <= '0;
      sync_rerun_cnt_o  <= '0;
      preclustered_o    <= 1'b0;
    end else begin
      init_o <= 1'b0;
      go_o   <= 1'b0;
      done_o <= 1'b0;
      if (stage != ST_IDLE) cycles_o <= cycles_o + 32'd1;
      unique case (stage)
        ST_IDLE: begin
          if (start_i) begin
            stage             <= ST_INITING;
            phase             <= PH_ISSUE;
            init_o            <= 1'b1;
            cycles_o          <= 32'd1;
            grow_cnt_o        <= '0;
            merge_cnt_o       <= '0;
            merge_rerun_cnt_o <= '0;
            sync_rerun_cnt_o  <= '0;
            preclustered_o    <= 1'b0;
          end
        end
        ST_INITING: begin
          // init_o loads the PEs this cycle; the records settle by the next.
          if (phase == PH_ISSUE) begin
            phase <= PH_DECIDE;
          end else if (!busy_any_i) begin
            phase <= PH_ISSUE;
            slot  <= '0;
            if (pg_any_i) begin
              stage          <= ST_MERGING;
              preclustered_o <= 1'b1;
            end else begin
              stage <= ST_GROWING;
            end
          end
        end
        ST_EXITING: begin
          done_o <= 1'b1;
          stage  <= ST_IDLE;
        end
        default: begin
          unique case (phase)
            PH_ISSUE: begin
              go_o  <= 1'b1;
              seen  <= '0;
              phase <= PH_WAIT;
            end
            PH_WAIT: begin
              if ((seen | part_done_i) == '1) begin
                seen <= '0;
                if (serial && slot != 4'(SLOTS_PER_PART - 1)) begin
                  slot  <= slot + 4'd1;
                  phase <= PH_ISSUE;
                end else begin
                  phase <= PH_DECIDE;
                end
              end else begin
                seen <= seen | part_done_i;
              end
            end
            default: begin  // PH_DECIDE: AdvanceController
              phase <= PH_ISSUE;
              slot  <= '0;
              if (busy_any_i) begin
                if (stage == ST_MERGING) merge_rerun_cnt_o <= merge_rerun_cnt_o + 16'd1;
                if (stage == ST_SYNCING) sync_rerun_cnt_o  <= sync_rerun_cnt_o + 16'd1;
              end else begin
                unique case (stage)
                  ST_GROWING: begin
                    stage      <= ST_MERGING;
                    grow_cnt_o <= grow_cnt_o + 16'd1;
                  end
                  ST_MERGING: begin
                    stage       <= ST_PICKING;
                    merge_cnt_o <= merge_cnt_o + 16'd1;
                  end
                  ST_PICKING: stage <= ST_SYNCING;
                  ST_SYNCING: stage <= active_any_i ? ST_GROWING : ST_EXITING;
                  default:    stage <= ST_EXITING;
                endcase
              end
            end
          endcase
        end
      endcase
    end
  end

  // Assertions are checked from the first clock edge after reset.
  logic chk_en;
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) chk_en <= 1'b0;
    else        chk_en <= 1'b1;

  // start is only accepted while idle.
  a_start_when_idle: assert property (@(posedge clk) disable iff (!chk_en)
                                      start_i |-> (stage == ST_IDLE));

endmodule
