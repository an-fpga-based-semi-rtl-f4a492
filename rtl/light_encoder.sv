// light_encoder: the output logic of the junction controller, from the
// controller state and the live 3-bit input em to the 24 lamp bits.
//
// The lamp words are the published tables: the eight words of the
// traditional cycle, the Road 1 emergency word and the all-yellow Safe State
// word (see traffic_pkg for the bit layout). The emergency words of roads 2,
// 3 and 4 are the Road 1 word rotated by one, two and three roads, the same
// rotation that turns each green phase of the traditional cycle into the
// next; they are this design's derivation, not printed values.
//
// Rules, in order of priority:
//   1. em differs from the state's mode (the state register has not yet taken
//      a new selection): Safe State. This is the Mealy part of the machine.
//   2. the Safe interval after a change of selection is running: Safe State.
//   3. otherwise the selected state's word: the traditional phase, the
//      emergency word of the selected road, or the Safe State for code 5.
//      The spare codes 6 and 7 also show the Safe State (a choice of this
//      design: all-yellow is the one word that never gives two roads a
//      conflicting right of way).
// Purely combinational; no clock.
module light_encoder
  import traffic_pkg::*;
(
  input  logic [2:0]  em,
  input  ctrl_state_t state,
  output lamps_t      lamps
);

  always_comb begin
    if (sel_t'(em) != state.mode || state.clearing) begin
      lamps = SAFE_PATTERN;
    end else begin
      unique case (state.mode)
        ST_TRADITIONAL: lamps = TRAD_PATTERN[state.phase];
        ST_EMERGENCY1:  lamps = rotate_roads(EMERGENCY1_PATTERN, 0);
        ST_EMERGENCY2:  lamps = rotate_roads(EMERGENCY1_PATTERN, 1);
        ST_EMERGENCY3:  lamps = rotate_roads(EMERGENCY1_PATTERN, 2);
        ST_EMERGENCY4:  lamps = rotate_roads(EMERGENCY1_PATTERN, 3);
        default:        lamps = SAFE_PATTERN;   // Safe State and spare codes
      endcase
    end
  end

endmodule
