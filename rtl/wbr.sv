// wbr: P1500 wrapper boundary register on the core's functional terminals.
//
// N_IN input cells (on the core inputs) and N_OUT output cells (on the core
// outputs) form one scan chain. Shift stage bit k is cell k, cells 0..N_IN-1
// being the input cells: 'wsi' enters at the last output cell and input cell
// 0 drives 'so'. Each cell has a shift and an update
// flip-flop. When the instruction is WS_EXTEST or WS_INTEST and SelectWIR is
// low: CaptureWR loads every input cell from its chip-side input 'pi' and
// every output cell from its core-side output 'core_po', ShiftWR shifts the
// chain, UpdateWR copies it to the update stage. In WS_INTEST the update
// stage of the input cells drives the core inputs 'core_pi'; in WS_EXTEST the
// update stage of the output cells drives the chip-side outputs 'po'. In any
// other instruction both paths are transparent. Rising edge of WRCK; WRSTN
// clears the cells. The register is part of the published wrapper; the cell
// design and the terminal counts (8 and 8) are this design's, as the core's
// terminal count is not published.
module wbr
  import bist_pkg::*;
#(
  parameter int N_IN  = 8,
  parameter int N_OUT = 8
) (
  input  logic             wrck,
  input  logic             wrstn,
  input  wir_instr_e       instr,
  input  logic             select_wir,
  input  logic             shift_wr,
  input  logic             capture_wr,
  input  logic             update_wr,
  input  logic             wsi,
  output logic             so,
  input  logic [N_IN-1:0]  pi,
  output logic [N_IN-1:0]  core_pi,
  input  logic [N_OUT-1:0] core_po,
  output logic [N_OUT-1:0] po
);

  localparam int N = N_IN + N_OUT;

  logic [N-1:0] shift_q, upd_q;
  logic         sel;

  assign sel = !select_wir && (instr == WS_EXTEST || instr == WS_INTEST);

  always_ff @(posedge wrck or negedge wrstn) begin
    if (!wrstn) begin
      shift_q <= '0;
      upd_q   <= '0;
    end else if (sel) begin
      if (capture_wr)    shift_q <= {core_po, pi};
      else if (shift_wr) shift_q <= {wsi, shift_q[N-1:1]};
      if (update_wr)     upd_q   <= shift_q;
    end
  end

  assign so      = shift_q[0];
  assign core_pi = (instr == WS_INTEST) ? upd_q[N_IN-1:0] : pi;
  assign po      = (instr == WS_EXTEST) ? upd_q[N-1:N_IN] : core_po;

endmodule
