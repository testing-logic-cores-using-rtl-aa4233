// wcdr: P1500 Wrapper Control Data Register, the path by which commands reach
// the BIST engine.
//
// While the WCDR instruction is active ('sel') and SelectWIR is low, ShiftWR
// shifts the W-bit shift stage towards 'so' (LSB out first, 'wsi' enters at
// the MSB) and UpdateWR copies it to the update stage 'q' and toggles
// 'upd_tgl'. The toggle tells the core-clock domain that a new command word
// is waiting; 'q' is held stable until the next update, so the receiver may
// sample it once it has synchronised the toggle. All events act on the rising
// edge of WRCK; WRSTN clears both stages. The register is part of the
// published wrapper; its 16-bit width and the toggle handshake are this
// design's.
module wcdr #(
  parameter int W = bist_pkg::WCDR_W
) (
  input  logic         wrck,
  input  logic         wrstn,
  input  logic         sel,
  input  logic         shift_wr,
  input  logic         update_wr,
  input  logic         wsi,
  output logic         so,
  output logic [W-1:0] q,
  output logic         upd_tgl
);

  logic [W-1:0] shift_q;

  always_ff @(posedge wrck or negedge wrstn) begin
    if (!wrstn) begin
      shift_q <= '0;
      q       <= '0;
      upd_tgl <= 1'b0;
    end else if (sel) begin
      if (shift_wr) shift_q <= {wsi, shift_q[W-1:1]};
      if (update_wr) begin
        q       <= shift_q;
        upd_tgl <= ~upd_tgl;
      end
    end
  end

  assign so = shift_q[0];

endmodule
