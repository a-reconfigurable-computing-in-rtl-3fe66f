// cim_ctrl: sequencer of one MAC-and-convert operation of the macro.
//
// An operation starts when start is high in the idle state; the configuration (input bits
// n_i, output bits n_o, weight resolution) is latched then. It runs through
//   ST_MAC   n_i cycles, one per input bit, least significant bit first (b_0, b_1, ...):
//            precharge (pch), RWL pulse (rwl_en) and charge sharing (share) in every cycle;
//   ST_CALIB one cycle with SADC high: the reference column is precharged and the initial
//            ramp voltage is set by the weight -1 cells;
//   ST_RAMP  2^n_o cycles with SADC high: ramp step k = 1..2^n_o, one +1 cell per step and
//            one sense-amplifier comparison per step (sa_en);
//   ST_DONE  one cycle with done high; the codes stay valid until the next start.
// So an operation takes n_i + 1 + 2^n_o cycles from the cycle after start to the cycle before
// done. The paper gives the latency as n + 2^n for n_i = n_o = n and also describes the
// initial ramp voltage as set "within a single clock cycle"; this design spends that cycle
// separately, as the paper's timing diagram draws it after the last charge-sharing phase.
// The sub-cycle ordering of precharge, RWL pulse and the S1/S2 switches is left to the
// analog models, which finish each cycle's work at its rising edge.
// The accumulators are held cleared (cha_rst) while idle, and the counters are cleared by
// rct_clr when an operation is accepted. ni = 0 or no = 0 are treated as 1.
module cim_ctrl
  import cim_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       start,
  input  cfg_t       cfg_in,
  output cfg_t       cfg,      // latched configuration
  output state_e     state,
  output logic       busy,
  output logic       done,
  output logic       pch,      // global precharge strobe
  output logic       rwl_en,   // global RWL pulse
  output logic [2:0] bit_idx,  // input bit of this ST_MAC cycle
  output logic       share,    // charge sharing in this cycle (S1 then S2)
  output logic       cha_rst,  // clear the accumulator capacitors
  output logic       sadc,     // ADC enable
  output logic       calib,    // initial-ramp cycle
  output logic [7:0] step,     // ramp step 1..2^n_o, 0 outside the ramp
  output logic       sa_en,    // sense-amplifier strobe
  output logic       rct_clr   // clear the ripple counters
);

  logic [2:0] bit_q;
  logic [7:0] step_q;
  logic [7:0] last_step;
  logic       accept;

  assign accept    = (state == ST_IDLE) && start;
  assign last_step = 8'd1 << cfg.no;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= ST_IDLE;
      cfg    <= '{ni: 3'd1, no: 3'd1, wmode: W2B};
      bit_q  <= '0;
      step_q <= '0;
    end else begin
      case (state)
        ST_IDLE: if (start) begin
          cfg.ni    <= (cfg_in.ni == 3'd0) ? 3'd1 : cfg_in.ni;
          cfg.no    <= (cfg_in.no == 3'd0) ? 3'd1 : cfg_in.no;
          cfg.wmode <= cfg_in.wmode;
          bit_q     <= '0;
          state     <= ST_MAC;
        end
        ST_MAC: begin
          if (bit_q == cfg.ni - 3'd1) state <= ST_CALIB;
          else                        bit_q <= bit_q + 3'd1;
        end
        ST_CALIB: begin
          step_q <= 8'd1;
          state  <= ST_RAMP;
        end
        ST_RAMP: begin
          if (step_q == last_step) begin
            step_q <= '0;
            state  <= ST_DONE;
          end else begin
            step_q <= step_q + 8'd1;
          end
        end
        ST_DONE: state <= ST_IDLE;
        default: state <= ST_IDLE;
      endcase
    end
  end

  always_comb begin
    pch     = 1'b0;
    rwl_en  = 1'b0;
    share   = 1'b0;
    sadc    = 1'b0;
    calib   = 1'b0;
    sa_en   = 1'b0;
    step    = '0;
    bit_idx = bit_q;
    case (state)
      ST_MAC: begin
        pch    = 1'b1;
        rwl_en = 1'b1;
        share  = 1'b1;
      end
      ST_CALIB: begin
        sadc   = 1'b1;
        pch    = 1'b1;
        rwl_en = 1'b1;
        calib  = 1'b1;
      end
      ST_RAMP: begin
        sadc   = 1'b1;
        rwl_en = 1'b1;
        sa_en  = 1'b1;
        step   = step_q;
      end
      default: ;
    endcase
  end

  assign busy    = (state != ST_IDLE);
  assign done    = (state == ST_DONE);
  assign cha_rst = (state == ST_IDLE);
  assign rct_clr = accept;

  // A weight resolution of 2'd3 is not defined.
  a_wmode_legal: assert property (@(posedge clk) disable iff (!rst_n)
                                  accept |-> cfg_in.wmode != wmode_e'(2'd3));
  // MAC and ADC never overlap: SADC is low whenever charge sharing runs.
  a_no_overlap:  assert property (@(posedge clk) disable iff (!rst_n) !(share && sadc));

endmodule
