// mid_tb_pkg: helpers shared by the MID testbenches.
//
// Builds the byte frames the front-end cards send on one GBT byte lane:
// status byte (start bit 7 set), trigger, bunch counter high/low, an ID byte
// {card ID, fired planes}, then for a local card 4 bytes per fired plane
// (BP high, BP low, NBP high, NBP low), lowest plane first. Also maps the
// 8 local-card lanes to their byte position in the 80-bit GBT word.
package mid_tb_pkg;

  typedef byte unsigned bq_t[$];

  function automatic void push_header(ref bq_t q, input byte unsigned status,
                                      input byte unsigned trig, input shortint unsigned bc,
                                      input byte unsigned id, input byte unsigned fired);
    q.push_back(status | 8'h80);
    q.push_back(trig);
    q.push_back(bc[15:8]);
    q.push_back(bc[7:0]);
    q.push_back({id[3:0], fired[3:0]});
  endfunction

  function automatic void push_local(ref bq_t q, input byte unsigned status,
                                     input byte unsigned trig, input shortint unsigned bc,
                                     input byte unsigned id, input byte unsigned fired,
                                     input logic [3:0][15:0] bp, input logic [3:0][15:0] nbp);
    push_header(q, status, trig, bc, id, fired);
    for (int p = 0; p < 4; p++) if (fired[p]) begin
      q.push_back(bp[p][15:8]);
      q.push_back(bp[p][7:0]);
      q.push_back(nbp[p][15:8]);
      q.push_back(nbp[p][7:0]);
    end
  endfunction

  // Byte position of local-card lane k in the GBT word (RL is byte 4, RH 9).
  function automatic int lane_byte(input int k);
    return (k < 4) ? k : k + 1;
  endfunction

endpackage
