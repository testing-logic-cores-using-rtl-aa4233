// wdr: P1500 Wrapper Data Register, the output register through which the
// test results are read.
//
// While the WDR instruction is active ('sel') and SelectWIR is low,
// CaptureWR loads the W-bit shift stage with 'd' (the result chosen by the
// BIST Output Selector) and ShiftWR shifts it towards 'so', LSB first, with
// 'wsi' entering at the MSB. Rising edge of WRCK; WRSTN clears it. 'd' comes
// from the core clock domain; it is read when it is static (a signature
// after end_test, or the status word), so it is captured directly. The
// register is part of the published wrapper; the width (one signature) and
// bit order are this design's.
module wdr #(
  parameter int W = bist_pkg::WDR_W
) (
  input  logic         wrck,
  input  logic         wrstn,
  input  logic         sel,
  input  logic         shift_wr,
  input  logic         capture_wr,
  input  logic         wsi,
  input  logic [W-1:0] d,
  output logic         so
);

  logic [W-1:0] shift_q;

  always_ff @(posedge wrck or negedge wrstn) begin
    if (!wrstn)                 shift_q <= '0;
    else if (sel && capture_wr) shift_q <= d;
    else if (sel && shift_wr)   shift_q <= {wsi, shift_q[W-1:1]};
  end

  assign so = shift_q[0];

endmodule
