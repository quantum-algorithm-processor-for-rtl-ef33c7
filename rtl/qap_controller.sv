// qap_controller -- sequencer of the divisor-finding wiring diagram.
//
// Plays the whole program, one gate per clock: the 2s-complement generator
// (PH_TWOS), n-1 CSA stages (PH_CSA, stage 0..n-2) and the zero-remainder
// test (PH_ZERO). The gates come from the three generator blocks, addressed
// by a phase / stage / step counter; nothing is stored.
//
// Handshake: start in PH_IDLE raises load for that cycle (the register
// array presets itself on that edge) and enters PH_TWOS. While busy,
// gate_valid is 1 and gate holds the gate to apply at the next edge; start
// is ignored. After the last gate has been applied, done is 1 for one
// cycle, exactly total_ops(n) cycles after the edge that took start
// (11491 for n = 32). How the program is sequenced is this design's
// choice; the paper gives only its gates and its operation count.
module qap_controller
  import qap_pkg::*;
#(
  parameter int unsigned N_BITS = 32  // dividend width n (even)
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       start,
  output logic       load,
  output logic       busy,
  output logic       done,
  output logic       gate_valid,
  output gate_t      gate,
  output phase_e     phase,
  output logic [7:0] stage,
  output step_t      step
);

  localparam int unsigned LAST_STAGE = N_BITS - 2;
  localparam step_t TWOS_END  = step_t'(twos_len(N_BITS) - 1);
  localparam step_t CSA_END   = step_t'(csa_len(N_BITS, 1'b0) - 1);
  localparam step_t CSAL_END  = step_t'(csa_len(N_BITS, 1'b1) - 1);
  localparam step_t ZERO_END  = step_t'(zero_len(N_BITS) - 1);

  initial begin
    assert (N_BITS % 2 == 0 && N_BITS >= 4 && num_lines(N_BITS) <= 2**LINE_W)
      else $error("qap_controller: N_BITS must be even, 4..62");
  end

  gate_t g_twos, g_csa, g_zero;

  qap_twos_gen #(.N_BITS(N_BITS)) u_twos (.step(step), .gate(g_twos));
  qap_csa_gen  #(.N_BITS(N_BITS)) u_csa  (.step(step), .stage(stage), .gate(g_csa));
  qap_zero_gen #(.N_BITS(N_BITS)) u_zero (.step(step), .gate(g_zero));

  logic phase_end;

  always_comb begin
    unique case (phase)
      PH_TWOS: begin gate = g_twos; phase_end = (step == TWOS_END); end
      PH_CSA:  begin
        gate = g_csa;
        phase_end = (int'(stage) == LAST_STAGE) ? (step == CSAL_END) : (step == CSA_END);
      end
      PH_ZERO: begin gate = g_zero; phase_end = (step == ZERO_END); end
      default: begin gate = GATE_NOP; phase_end = 1'b0; end
    endcase
  end

  assign busy       = (phase != PH_IDLE);
  assign gate_valid = busy;
  assign load       = (phase == PH_IDLE) && start;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      phase <= PH_IDLE;
      stage <= '0;
      step  <= '0;
      done  <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (phase)
        PH_IDLE: if (start) begin
          phase <= PH_TWOS;
          stage <= '0;
          step  <= '0;
        end
        PH_TWOS: if (phase_end) begin
          phase <= PH_CSA;
          step  <= '0;
        end else step <= step + 1'b1;
        PH_CSA: if (phase_end) begin
          step <= '0;
          if (int'(stage) == LAST_STAGE) phase <= PH_ZERO;
          else                           stage <= stage + 1'b1;
        end else step <= step + 1'b1;
        PH_ZERO: if (phase_end) begin
          phase <= PH_IDLE;
          step  <= '0;
          done  <= 1'b1;
        end else step <= step + 1'b1;
        default: phase <= PH_IDLE;
      endcase
    end
  end

endmodule
