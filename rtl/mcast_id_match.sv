// mcast_id_match: the multi-ID multicast controller.
//
// Eyeriss gives each X-bus one row ID and each PE one column ID; a word on
// the bus carries a (row tag, column tag) pair and is taken where the tag
// equals the ID.  EcoFlow widens this so that an X-bus holds several row IDs
// and a PE several column IDs, letting one PE belong to several multicast
// groups.  This block holds nothing itself: it compares one tag against
// NUM_IDS configured IDs, each with an enable bit, and raises hit when any
// enabled ID equals the tag.  It is purely combinational; the ID registers
// live in the network that uses it.
//
// From the paper: several IDs per X-bus/PE, sized for the largest layer
// (AlexNet: five 5-bit IDs).  Own choice: a per-slot enable bit so that
// unused slots never match.
module mcast_id_match #(
  parameter int unsigned NUM_IDS = 5,
  parameter int unsigned ID_W    = 5
) (
  input  logic [ID_W-1:0] tag,
  input  logic [ID_W-1:0] ids    [NUM_IDS],
  input  logic            id_en  [NUM_IDS],
  output logic            hit
);
  always_comb begin
    hit = 1'b0;
    for (int k = 0; k < NUM_IDS; k++)
      if (id_en[k] && ids[k] == tag) hit = 1'b1;
  end
endmodule
