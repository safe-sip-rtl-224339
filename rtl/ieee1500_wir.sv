// ieee1500_wir: IEEE 1500 wrapper instruction register (WIR) of a chiplet.
//
// The secure boot reaches each chiplet through its standard test wrapper
// rather than through added security ports: the WIR receives the
// instruction that starts authentication. Like the standard WIR it has a
// shift stage, loaded serially from wsi (LSB first, so the last bit shifted
// in is the MSB) while select_wir and shift_wr are high, and an update stage
// that takes the shift stage on update_wr and drives the active instruction.
// capture_wr loads the active instruction back into the shift stage so that
// it can be read out on wso.
//
// Wrapper signals are sampled on the rising edge of clk (the wrapper clock
// WRCK). Reset puts WS_BYPASS in the update stage, as the standard asks.
// new_instr pulses for one cycle after each update, so that the chiplet can
// start the operation the instruction names. The instruction codes are
// this design's own (see safe_sip_pkg).
module ieee1500_wir
  import safe_sip_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       select_wir,
  input  logic       shift_wr,
  input  logic       capture_wr,
  input  logic       update_wr,
  input  logic       wsi,
  output logic       wso,
  output wir_instr_e instr,
  output logic       new_instr
);

  logic [WIR_W-1:0] shift_q;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      shift_q   <= '0;
      instr     <= WS_BYPASS;
      new_instr <= 1'b0;
    end else begin
      new_instr <= 1'b0;
      if (select_wir) begin
        if (capture_wr)
          shift_q <= instr;
        else if (shift_wr)
          shift_q <= {wsi, shift_q[WIR_W-1:1]};
        if (update_wr) begin
          instr     <= wir_instr_e'(shift_q);
          new_instr <= 1'b1;
        end
      end
    end

  assign wso = shift_q[0];

endmodule
