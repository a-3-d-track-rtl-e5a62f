// sp_pkg -- types and sizes shared by the sector receiver and sector processor.
//
// One sector is fed by 15 optical links, one LCT (local charged track) word per
// link and bunch crossing: six from endcap station 1 (chambers 1A and 1B) and three
// each from stations 2, 3 and 4. Up to eight barrel (MB) segments arrive besides.
// The field widths of the LCT word and of the converted segment are those of the
// sector-receiver look-up tables (PHIL, ETAG, PHIG). The placement of the fields in
// the 32-bit link word, the valid flags, the track record and the output muon
// word are this design's own choices.
package sp_pkg;

  localparam int N_LINK = 15;   // optical links per sector
  localparam int N_ME1  = 6;    // segments from station 1
  localparam int N_SEG  = 3;    // segments from each of stations 2, 3, 4
  localparam int N_MB   = 8;    // barrel segments
  localparam int N_TRK  = 9;    // candidate tracks (3 assemblers x 3 keys)
  localparam int N_OUT  = 3;    // best muons reported

  // Station numbering used in track records.
  localparam int ST_MB = 0, ST_ME1 = 1, ST_ME2 = 2, ST_ME3 = 3, ST_ME4 = 4;
  localparam int N_ST  = 5;

  // 32-bit LCT word from one link (two 16-bit frames).
  typedef struct packed {
    logic       valid;
    logic [3:0] rsv;
    logic [3:0] csc_id;
    logic [6:0] eta_appr;   // approximate eta (wire group)
    logic [3:0] patt;       // CLCT pattern
    logic [2:0] quality;
    logic [7:0] halfstrip;
    logic       lr;         // left/right bend
  } lct_t;

  // Track segment in sector coordinates, after the SR look-up tables.
  typedef struct packed {
    logic        valid;
    logic [2:0]  quality;
    logic [11:0] phi;
    logic [6:0]  eta;
    logic [4:0]  phib;      // signed bend angle
  } seg_t;

  // Segment index per station; 3 bits cover the 8 barrel and 6 ME1 segments.
  typedef logic [2:0] sid_t;

  typedef struct packed {
    logic            valid;
    logic [N_ST-1:0] mask;   // stations on the track: {ME4,ME3,ME2,ME1,MB}
    sid_t [N_ST-1:0] id;     // segment index per station, meaningful where mask set
    logic [3:0]      rank;   // {number of stations, ME1 present}
  } track_t;

  // Output muon word, 20 bits (60 bits for three muons).
  typedef struct packed {
    logic       valid;
    logic [4:0] pt;
    logic       sign;
    logic [1:0] quality;
    logic [4:0] phi;
    logic [5:0] eta;
  } muon_t;

  // Flat segment bus seen by the sector processor: barrel segments first, then
  // stations 1 to 4.
  localparam int B_MB = 0, B_ME1 = 8, B_ME2 = 14, B_ME3 = 17, B_ME4 = 20;
  localparam int N_ALL = 23;

  function automatic int seg_index(input int st, input int id);
    case (st)
      ST_MB:   return B_MB + id;
      ST_ME1:  return B_ME1 + id;
      ST_ME2:  return B_ME2 + id;
      ST_ME3:  return B_ME3 + id;
      default: return B_ME4 + id;
    endcase
  endfunction

  // Number of ones in a station mask.
  function automatic logic [2:0] nstations(input logic [N_ST-1:0] m);
    logic [2:0] n;
    n = '0;
    for (int i = 0; i < N_ST; i++) n = n + 3'(m[i]);
    return n;
  endfunction

  function automatic logic [3:0] track_rank(input logic [N_ST-1:0] m);
    return {nstations(m), m[ST_ME1]};
  endfunction

endpackage
