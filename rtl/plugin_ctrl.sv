// plugin_ctrl: the sequencing state machine of the PLUGIN selector.
//
// It decodes the 8-bit op port, counts the samples loaded into the sample
// memory (n), and runs the steps of the algorithm strictly in order, as
// the paper's flowchart does:
//   raw data:    VAR -> SD -> P8 -> G1 -> P6 -> G2 -> P4 -> H
//   with z-score: VAR -> SD -> ZS -> P8 -> G1 -> P6 -> G2 -> P4 -> H
// (VAR: variance, SD: sigma, ZS: standardisation, P8: Psi8NS, G1/G2:
// pilot bandwidths, P6/P4: Psi6/Psi4, H: final bandwidth). On entering a
// phase it pulses step_start for one clock and waits for step_done from
// the unit of that phase. phase also tells the datapath which unit owns
// the sample memory and the shared arithmetic resource.
//
// The op encoding (plugin_pkg::op_e) is this design's own: OP_LOAD stores
// the data word as sample n and increments n; OP_CLEAR sets n to 0;
// OP_RUN / OP_RUN_Z start a run without / with standardisation. Ops other
// than OP_NOP are ignored while a run is busy. OP_LOAD beyond DEPTH samples
// is dropped. done pulses for one clock when the result is ready.
module plugin_ctrl
  import plugin_pkg::*;
#(
  parameter int DEPTH = 1024,
  localparam int AW   = $clog2(DEPTH),
  localparam int NW   = AW + 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [7:0]    op,
  input  logic          step_done,
  output phase_e        phase,
  output logic          step_start,
  output logic          zmode,
  output logic [NW-1:0] n,
  output logic          load_we,
  output logic [AW-1:0] load_addr,
  output logic          busy,
  output logic          done
);

  phase_e nxt;

  always_comb begin
    unique case (phase)
      PH_VAR:  nxt = PH_SD;
      PH_SD:   nxt = zmode ? PH_ZS : PH_P8;
      PH_ZS:   nxt = PH_P8;
      PH_P8:   nxt = PH_G1;
      PH_G1:   nxt = PH_P6;
      PH_P6:   nxt = PH_G2;
      PH_G2:   nxt = PH_P4;
      PH_P4:   nxt = PH_H;
      default: nxt = PH_IDLE;
    endcase
  end

  assign busy      = (phase != PH_IDLE);
  assign load_we   = !busy && (op == OP_LOAD) && (32'(n) < DEPTH);
  assign load_addr = AW'(n);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      phase      <= PH_IDLE;
      step_start <= 1'b0;
      zmode      <= 1'b0;
      n          <= '0;
      done       <= 1'b0;
    end else begin
      step_start <= 1'b0;
      done       <= 1'b0;
      if (phase == PH_IDLE) begin
        unique case (op)
          OP_CLEAR: n <= '0;
          OP_LOAD:  if (32'(n) < DEPTH) n <= n + 1'b1;
          OP_RUN, OP_RUN_Z: begin
            zmode      <= (op == OP_RUN_Z);
            phase      <= PH_VAR;
            step_start <= 1'b1;
          end
          default: ;
        endcase
      end else if (step_done) begin
        phase <= nxt;
        if (nxt == PH_IDLE) done <= 1'b1;
        else                step_start <= 1'b1;
      end
    end
  end

endmodule
