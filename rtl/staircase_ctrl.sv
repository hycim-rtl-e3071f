// staircase_ctrl -- sequencer of one inequality-filter iteration (the timing part
// of the "write voltage / staircase pulse buffer").
//
// A filter iteration precharges the match lines (ML) to VDD and then runs four
// phases. In phase p the gates of all cells whose input x_i is 1 receive read
// voltage Vread(5-p): phase 1 applies Vread4, phase 4 applies Vread1, a staircase
// from the lowest to the highest read voltage. A cell holding weight k conducts
// in every phase whose Vread_j has j <= k, so it discharges ML for exactly k
// phases. After phase 4 the comparator is clocked (SENSE) and its decision is
// presented for one cycle (RESULT, done = 1).
//
// Interface: start is taken in IDLE only. Outputs are decoded from the state.
// vread_sel gives the index j of the read voltage applied in the current phase
// (4,3,2,1 in phases 1..4, 0 outside them); phase_en marks the four phases.
// Timing: start in cycle t -> PRE t+1, phases t+2..t+5, SENSE t+6, done t+7.
// The phase order and count follow the paper; one clock cycle per phase and the
// separate RESULT cycle are this design's choice.
module staircase_ctrl
  import hycim_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       start,
  output logic       busy,
  output logic       precharge,
  output logic       phase_en,
  output logic [2:0] vread_sel,
  output logic       sense,
  output logic       done
);

  flt_state_t state, nxt;

  always_comb begin
    nxt = state;
    unique case (state)
      FLT_IDLE:   if (start) nxt = FLT_PRE;
      FLT_PRE:    nxt = FLT_PH1;
      FLT_PH1:    nxt = FLT_PH2;
      FLT_PH2:    nxt = FLT_PH3;
      FLT_PH3:    nxt = FLT_PH4;
      FLT_PH4:    nxt = FLT_SENSE;
      FLT_SENSE:  nxt = FLT_RESULT;
      FLT_RESULT: nxt = FLT_IDLE;
      default:    nxt = FLT_IDLE;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) state <= FLT_IDLE;
    else        state <= nxt;
  end

  always_comb begin
    precharge = (state == FLT_PRE);
    sense     = (state == FLT_SENSE);
    done      = (state == FLT_RESULT);
    busy      = (state != FLT_IDLE);
    phase_en  = 1'b0;
    vread_sel = 3'd0;
    unique case (state)
      FLT_PH1: begin phase_en = 1'b1; vread_sel = 3'd4; end
      FLT_PH2: begin phase_en = 1'b1; vread_sel = 3'd3; end
      FLT_PH3: begin phase_en = 1'b1; vread_sel = 3'd2; end
      FLT_PH4: begin phase_en = 1'b1; vread_sel = 3'd1; end
      default: ;
    endcase
  end

endmodule
