// wir: P1500 wrapper instruction register.
//
// A WIR_W-bit shift stage sits between 'wsi' and 'so' while SelectWIR is
// high: CaptureWR loads it with the current instruction, ShiftWR shifts it
// one place towards 'so' (LSB out first, 'wsi' enters at the MSB), and
// UpdateWR copies it to the update stage, whose value 'instr' selects the
// wrapper register and mode. WRSTN low forces WS_BYPASS. Every event acts on
// the rising edge of WRCK. The register and its control signals are those of
// the published wrapper; the instruction set and encoding (bist_pkg::
// wir_instr_e) and the edge choice are this design's. An unknown code written
// to the update stage is replaced by WS_BYPASS.
module wir
  import bist_pkg::*;
(
  input  logic       wrck,
  input  logic       wrstn,
  input  logic       select_wir,
  input  logic       shift_wr,
  input  logic       capture_wr,
  input  logic       update_wr,
  input  logic       wsi,
  output logic       so,
  output wir_instr_e instr
);

  logic [WIR_W-1:0] shift_q;

  always_ff @(posedge wrck or negedge wrstn) begin
    if (!wrstn) begin
      shift_q <= '0;
      instr   <= WS_BYPASS;
    end else if (select_wir) begin
      if (capture_wr)    shift_q <= instr;
      else if (shift_wr) shift_q <= {wsi, shift_q[WIR_W-1:1]};
      if (update_wr) begin
        unique case (shift_q)
          WS_BYPASS, WS_EXTEST, WS_INTEST, WS_WCDR, WS_WDR: instr <= wir_instr_e'(shift_q);
          default:                                          instr <= WS_BYPASS;
        endcase
      end
    end
  end

  assign so = shift_q[0];

endmodule
