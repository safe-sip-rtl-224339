// ieee1500_wbr: IEEE 1500 wrapper boundary register (WBR) used as the
// authentication data register of a chiplet.
//
// Garbled chiplets capture their response {G(S), SHA-256(G(S))} in parallel
// from cti and shift it out on wso, MSB first; the in-house chiplet's WBR
// shifts the same stream in from wsi and, on update_wr, presents it in
// parallel on cto. Both ends use this module. Data moves only while select is
// high (the WBR is the selected wrapper data register), on the rising clock
// edge: capture_wr loads cti, shift_wr shifts by one, update_wr copies the
// shift stage to the update stage. A full transfer of N bits takes N shift
// cycles.
//
// How the WBR is used to carry the authentication data follows the text
// ("The WBR facilitates direct interaction with chiplets, providing
// essential handshake signals and inputs"); the serial transport and the
// cell layout are this design's own choices.
module ieee1500_wbr #(
  parameter int unsigned N = 8
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         select,
  input  logic         capture_wr,
  input  logic         shift_wr,
  input  logic         update_wr,
  input  logic [N-1:0] cti,
  input  logic         wsi,
  output logic         wso,
  output logic [N-1:0] cto
);

  logic [N-1:0] shift_q;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      shift_q <= '0;
      cto     <= '0;
    end else if (select) begin
      if (capture_wr)
        shift_q <= cti;
      else if (shift_wr)
        shift_q <= {shift_q[N-2:0], wsi};
      if (update_wr)
        cto <= shift_q;
    end

  assign wso = shift_q[N-1];

endmodule
