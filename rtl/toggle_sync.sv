// toggle_sync: carries an event from one clock domain to another.
//
// The sender flips 'tgl_in' once per event. Two flip-flops on the receiving
// clock synchronise it, and a third remembers the previous synchronised value;
// 'pulse' is high for one receiving clock whenever the two differ, three
// receiving clocks or less after the flip. Events must be spaced by more than
// that. Reset clears all three stages, so the sender's toggle must also be 0
// when both resets are released.
module toggle_sync (
  input  logic clk,
  input  logic rst_n,
  input  logic tgl_in,
  output logic pulse
);

  logic [2:0] s;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) s <= '0;
    else        s <= {s[1:0], tgl_in};
  end

  assign pulse = s[2] ^ s[1];

endmodule
