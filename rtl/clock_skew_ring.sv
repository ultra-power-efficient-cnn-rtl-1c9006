// clock_skew_ring -- the cyclic data-access loop that joins the engines.
// Each engine k owns one region register; on a shift every engine takes the
// region of its upstream neighbour k-1 (engine 0 takes engine NE-1's) and
// hands its own to its downstream neighbour k+1, all in the same cycle.
//
// load copies every engine's image-buffer read data into its register (the
// start of an imagery group); shift rotates the loop by one engine; load has
// priority. After s shifts engine k holds the region that engine (k-s) mod NE
// loaded, so after NE-1 shifts every engine has seen all NE channels of the
// group. The published design realises the neighbour links with a clock-skew
// circuit (a timing technique for moving data between neighbours without a
// hold race); logically that is one register stage per link, which is what
// is written here. The rotation direction (k-1 -> k) is this design's
// choice.
module clock_skew_ring
  import cnn_dsa_pkg::*;
#(
  parameter int unsigned M  = M_DEF,
  parameter int unsigned NE = NE_DEF
) (
  input  logic                   clk,
  input  logic                   load,
  input  logic                   shift,
  input  act_t [(M+2)*(M+2)-1:0] own  [NE],   // from each engine's image buffer
  output act_t [(M+2)*(M+2)-1:0] held [NE]    // to each engine's processing block
);
  for (genvar k = 0; k < NE; k++) begin : g_link
    localparam int unsigned UP = (k + NE - 1) % NE;
    always_ff @(posedge clk) begin
      if (load)       held[k] <= own[k];
      else if (shift) held[k] <= held[UP];
    end
  end
endmodule
