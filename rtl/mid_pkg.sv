// mid_pkg: types, constants and the detector-geometry lookup shared by the
// MID CRU user logic.
//
// Sizes follow the readout chain: 16 GBT links, 8 local-card byte lanes per
// link, 4 detection planes (MT11, MT12, MT21, MT22), 8 regional crates of 16
// local cards, 64-bit O2 words. The O2 header fields (DetElemID bits 50:44,
// fired column 43:36, local card position 35:32, NBP strips 31:16, BP strips
// 15:0) follow the published header layout. Bit 63 is this design's own
// "dummy" marker used by zero suppression; bits 62:51 are zero.
//
// Geometry: local cards 1..117 of one detector half sit in 7 columns. Each
// column is cut by the 9 RPC elements numbered, bottom to top, 14,15,16,17,
// 00,01,02,03,04. loc_geometry() walks the per-column card counts below to
// find the RPC, column and position (0 = lowest card of that column inside
// that RPC) of a card number; crate_card() turns (crate, local ID) into the
// card number, local IDs counting the crate's cards in ascending number order.
package mid_pkg;

  localparam int unsigned NUM_LINKS   = 16;  // GBT links per CRU
  localparam int unsigned NUM_LOC     = 8;   // local-card lanes per GBT link
  localparam int unsigned NUM_PLANES  = 4;   // MT11, MT12, MT21, MT22
  localparam int unsigned NUM_CRATES  = 8;   // regional crates (2 links each)
  localparam int unsigned CRATE_CARDS = 16;  // local-card slots per crate
  localparam int unsigned WORD_W      = 64;  // O2 word width
  localparam int unsigned GBT_W       = 80;  // GBT data word width
  localparam int unsigned LOC_HDR_B   = 5;   // status, trigger, BC hi, BC lo, id
  localparam int unsigned DUMMY_BIT   = 63;  // marks an injected dummy word

  typedef logic [WORD_W-1:0] word_t;
  typedef logic [7:0]        byte_t;

  // One 64-bit O2 word as it travels from reformatting to Stage 3.
  typedef struct packed {
    logic        dummy;     // 63: dummy word, rejected at the final readout
    logic [11:0] rsvd;      // 62:51
    logic [6:0]  det_elem;  // 50:44 DetElemID 1..72
    logic [7:0]  column;    // 43:36 fired column ID
    logic [3:0]  loc_pos;   // 35:32 local card position in that column
    logic [15:0] nbp;       // 31:16 non-bending-plane strip pattern
    logic [15:0] bp;        // 15:0  bending-plane strip pattern
  } o2_word_t;

  // Location of one local card in a plane.
  typedef struct packed {
    logic       valid;      // card slot is equipped
    logic [4:0] rpc;        // RPC element number 0..17
    logic [2:0] column;     // column 0..6, counted from the beam side
    logic [3:0] pos;        // position in the column inside that RPC
  } loc_geo_t;

  // RPC element numbers of the 9 rows, bottom to top.
  localparam int unsigned NUM_ROWS = 9;
  localparam int unsigned NUM_COLS = 7;

  function automatic int unsigned row_rpc(input int unsigned row);
    case (row)
      0: return 14; 1: return 15; 2: return 16; 3: return 17;
      4: return 0;  5: return 1;  6: return 2;  7: return 3;
      default: return 4;
    endcase
  endfunction

  // Number of local cards of column col inside row row.
  function automatic int unsigned cards_in(input int unsigned col, input int unsigned row);
    int unsigned r;
    r = row;
    case (col)
      0: case (r) 0: return 1; 1,2: return 2; 3: return 3; 4: return 0;
                  5: return 3; 6,7: return 2; default: return 1; endcase
      1, 2: case (r) 0: return 1; 1,2: return 2; 3,4,5: return 4;
                  6,7: return 2; default: return 1; endcase
      3, 4, 5: case (r) 0, 8: return 1; default: return 2; endcase
      default: return 1;
    endcase
  endfunction

  // Geometry of local card number n (1..117); valid=0 outside that range.
  function automatic loc_geo_t loc_geometry(input int unsigned n);
    loc_geo_t g;
    int unsigned k;
    g = '0;
    k = 1;
    for (int unsigned c = 0; c < NUM_COLS; c++) begin
      for (int unsigned r = 0; r < NUM_ROWS; r++) begin
        for (int unsigned p = 0; p < cards_in(c, r); p++) begin
          if (k == n) begin
            g.valid  = 1'b1;
            g.rpc    = 5'(row_rpc(r));
            g.column = 3'(c);
            g.pos    = 4'(p);
          end
          k++;
        end
      end
    end
    return g;
  endfunction

  // Card number (1..117) of local ID loc in regional crate crate, 0 if empty.
  // Crates own these card-number ranges, in this order of local IDs:
  // 0: 1-16, 1: 31-38 then 53-60, 2: 17-30, 3: 39-52, 4: 61-76, 5: 77-92,
  // 6: 93-108, 7: 109-117.
  function automatic int unsigned crate_card(input int unsigned crate, input int unsigned loc);
    case (crate)
      0: return 1 + loc;
      1: return (loc < 8) ? 31 + loc : 45 + loc;
      2: return (loc < 14) ? 17 + loc : 0;
      3: return (loc < 14) ? 39 + loc : 0;
      4: return 61 + loc;
      5: return 77 + loc;
      6: return 93 + loc;
      7: return (loc < 9) ? 109 + loc : 0;
      default: return 0;
    endcase
  endfunction

  function automatic loc_geo_t crate_geometry(input int unsigned crate, input int unsigned loc);
    int unsigned n;
    n = crate_card(crate, loc);
    if (n == 0) return '0;
    return loc_geometry(n);
  endfunction

endpackage
