// Reset synchroniser: asserts asynchronously, releases on the second rising
// edge of clk after rst_n goes high, so every flop of a clock domain leaves
// reset on the same edge.  Helper of the implant top level.
module reset_sync (
  input  logic clk,
  input  logic rst_n,
  output logic rst_n_o
);
  logic [1:0] s;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) s <= '0;
    else        s <= {s[0], 1'b1};
  end
  assign rst_n_o = s[1];
endmodule
