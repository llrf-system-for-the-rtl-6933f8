// edge_sync: two-flop synchroniser and rising-edge detector for a TTL input
// (markers and timing events arriving from outside the FPGA clock domain).
// Output 'rise' is a one-clock pulse, 3 clocks after the input goes high.
module edge_sync (
  input  logic clk,
  input  logic rst,
  input  logic d,
  output logic rise
);
  logic [2:0] s;
  always_ff @(posedge clk) begin
    if (rst) s <= '0;
    else     s <= {s[1:0], d};
  end
  always_comb rise = s[1] & ~s[2];
endmodule
