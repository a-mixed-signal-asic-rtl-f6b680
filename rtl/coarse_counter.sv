// coarse_counter: global coarse-time counter.
//
// A free-running W-bit binary counter on the 160 MHz master clock. Its
// value is the coarse timestamp shared by all channels: one count is one
// 6.25 ns clock period and the counter wraps after 2^W periods (about
// 410 us for W = 16). The 16-bit width and the 160 MHz clock follow the
// ASIC description; clearing on reset and wrapping are this design's
// choices. The count changes one cycle after each rising clock edge.
module coarse_counter #(
  parameter int W = 16
) (
  input  logic         clk,
  input  logic         rst_n,
  output logic [W-1:0] count
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) count <= '0;
    else        count <= count + 1'b1;
  end
endmodule
