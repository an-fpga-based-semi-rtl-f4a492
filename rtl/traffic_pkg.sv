// traffic_pkg: types and constants shared by the four-road junction controller.
//
// Lamp word. Each road drives six lamps, packed most significant bit first as
//   {R, Y, G_straight, G_right, G_left, M}
// where M is the pedestrian (zebra-crossing) signal. Road 1 occupies bits
// [23:18], road 2 [17:12], road 3 [11:6] and road 4 [5:0], so the 24-bit word
// reads as six hexadecimal digits. This order and the hex words below are the
// published tables of the design (traditional cycle, Emergency-1, Safe State);
// the bit order was recovered by decoding those words against the per-road
// columns of the same tables.
//
// State input. The 3-bit code 0 selects the traditional cycle, 1 the Road 1
// emergency and 5 the Safe State, as in the published timing diagrams. Codes
// 2..4 as emergencies of roads 2..4 and 6..7 as spare codes are this design's
// own choice, made so that the eight codes split into the five used states and
// the two spare ones the design leaves free.
package traffic_pkg;

  localparam int unsigned NUM_ROADS      = 4;
  localparam int unsigned LAMPS_PER_ROAD = 6;
  localparam int unsigned OUT_W          = NUM_ROADS * LAMPS_PER_ROAD;  // 24
  localparam int unsigned NUM_PHASES     = 8;

  // Bit position of each lamp inside a road's 6-bit field.
  localparam int unsigned LAMP_R  = 5;
  localparam int unsigned LAMP_Y  = 4;
  localparam int unsigned LAMP_GS = 3;  // green, straight on
  localparam int unsigned LAMP_GR = 2;  // green arrow, right turn
  localparam int unsigned LAMP_GL = 1;  // green arrow, left turn
  localparam int unsigned LAMP_M  = 0;  // zebra crossing

  typedef logic [LAMPS_PER_ROAD-1:0] road_lamps_t;
  typedef logic [OUT_W-1:0]          lamps_t;

  // State-select codes on the 3-bit input.
  typedef enum logic [2:0] {
    ST_TRADITIONAL = 3'd0,
    ST_EMERGENCY1  = 3'd1,
    ST_EMERGENCY2  = 3'd2,
    ST_EMERGENCY3  = 3'd3,
    ST_EMERGENCY4  = 3'd4,
    ST_SAFE        = 3'd5,
    ST_SPARE6      = 3'd6,
    ST_SPARE7      = 3'd7
  } sel_t;

  // Controller state. phase is the sequentially encoded step of the
  // traditional cycle (even = a road's green, odd = the yellow after it).
  // clearing is set during the Safe State interval that separates two
  // selected states.
  typedef struct packed {
    sel_t       mode;
    logic       clearing;
    logic [2:0] phase;
  } ctrl_state_t;

  // Traditional cycle, phases 0..7 (60 s green, 15 s yellow, alternating).
  localparam lamps_t TRAD_PATTERN [NUM_PHASES] = '{
    24'h3218A6, 24'h410820, 24'h98C862, 24'h810420,
    24'h8A6321, 24'h820410, 24'h86298C, 24'h420810
  };

  // Road 1 emergency: road 1 all greens, roads 2 and 3 red, road 4 red with
  // its left-turn arrow.
  localparam lamps_t EMERGENCY1_PATTERN = 24'h3A0822;

  // Safe State: yellow on every road.
  localparam lamps_t SAFE_PATTERN = 24'h410410;

  // Rotate a lamp word by k roads: road r of the result shows what road
  // r-k showed (roads numbered 1..4 cyclically). Rotating the road 1 green
  // phase by one road gives the road 2 green phase, and so on, which is how
  // the emergencies of roads 2..4 are derived from the Road 1 one.
  function automatic lamps_t rotate_roads(lamps_t w, int unsigned k);
    lamps_t r;
    r = w;
    for (int unsigned i = 0; i < k % NUM_ROADS; i++)
      r = {r[LAMPS_PER_ROAD-1:0], r[OUT_W-1:LAMPS_PER_ROAD]};
    return r;
  endfunction

endpackage
