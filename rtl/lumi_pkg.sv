// lumi_pkg: types and constants shared by the VELO-hit luminosity accumulators.
//
// The accumulators sit behind the real-time 2D clustering on a VELO readout
// board. The numbers fixed by the LHC and by the readout are taken as given:
// 3564 bunch crossings per orbit, a 256-bit cluster data bus, a 64-bit TFC
// word and 20-bit per-BXID RAM words. How a cluster word and the TFC word are
// laid out is not part of the accumulator design and is chosen here: a
// 32-bit cluster word (eight per 256-bit beat) and the BXID / bunch-crossing
// type in the low bits of the TFC word. Change `cluster_t`, `tfc_bxid` and
// `tfc_bx_type` to match another readout.
package lumi_pkg;

  // LHC orbit: bunch crossings per revolution.
  localparam int unsigned NUM_BX   = 3564;
  localparam int unsigned BXID_W   = 12;

  // Input stream widths.
  localparam int unsigned DATA_W            = 256;
  localparam int unsigned TFC_W             = 64;
  localparam int unsigned CLUSTER_W         = 32;
  localparam int unsigned CLUSTERS_PER_BEAT = DATA_W / CLUSTER_W;

  // Width of one per-BXID RAM counter.
  localparam int unsigned PERBX_W = 20;

  // Bunch-crossing types carried by the TFC word.
  localparam int unsigned NUM_BX_TYPES = 4;
  typedef enum logic [1:0] {
    BX_EE = 2'd0,  // neither bunch filled
    BX_BE = 2'd1,  // beam 1 filled only
    BX_EB = 2'd2,  // beam 2 filled only
    BX_BB = 2'd3   // both filled: colliding
  } bx_type_e;

  // One reconstructed cluster (hit). Centroid coordinates are in pixel
  // units with 3 fractional bits: column 0..767 across the three ASICs of a
  // sensor, row 0..255.
  localparam int unsigned COORD_FRAC = 3;
  localparam int unsigned COL_W      = 13;  // 10 integer + 3 fraction
  localparam int unsigned ROW_W      = 11;  //  8 integer + 3 fraction
  localparam int unsigned SENSOR_W   = 3;   // 8 sensors per VELO layer

  typedef struct packed {
    logic                valid;   // slot holds a cluster
    logic [3:0]          flags;   // shape/size/quality, not used for counting
    logic [SENSOR_W-1:0] sensor;  // sensor within the layer
    logic [COL_W-1:0]    col;     // centroid column (x)
    logic [ROW_W-1:0]    row;     // centroid row (y)
  } cluster_t;

  // Rectangular accumulation region on one sensor, in integer pixel units,
  // bounds inclusive.
  typedef struct packed {
    logic [SENSOR_W-1:0] sensor;
    logic [9:0]          col_lo;
    logic [9:0]          col_hi;
    logic [7:0]          row_lo;
    logic [7:0]          row_hi;
  } region_t;

  // Default regions for one layer: one per sensor, regions 0..3 inner
  // (about 14 mm from the beam), regions 4..7 outer (about 26 mm). The boxes
  // are placeholders of 144 x 48 pixels (about 7.9 mm x 2.6 mm); real values
  // come from the detector geometry.
  localparam int unsigned LAYER_REGIONS = 8;
  localparam int unsigned LAYER_OUTER   = 4;
  localparam region_t DEFAULT_REGIONS [LAYER_REGIONS] = '{
    '{sensor: 3'd0, col_lo: 10'd64,  col_hi: 10'd207, row_lo: 8'd192, row_hi: 8'd239},
    '{sensor: 3'd1, col_lo: 10'd64,  col_hi: 10'd207, row_lo: 8'd192, row_hi: 8'd239},
    '{sensor: 3'd2, col_lo: 10'd64,  col_hi: 10'd207, row_lo: 8'd192, row_hi: 8'd239},
    '{sensor: 3'd3, col_lo: 10'd64,  col_hi: 10'd207, row_lo: 8'd192, row_hi: 8'd239},
    '{sensor: 3'd4, col_lo: 10'd560, col_hi: 10'd703, row_lo: 8'd192, row_hi: 8'd239},
    '{sensor: 3'd5, col_lo: 10'd560, col_hi: 10'd703, row_lo: 8'd192, row_hi: 8'd239},
    '{sensor: 3'd6, col_lo: 10'd560, col_hi: 10'd703, row_lo: 8'd192, row_hi: 8'd239},
    '{sensor: 3'd7, col_lo: 10'd560, col_hi: 10'd703, row_lo: 8'd192, row_hi: 8'd239}
  };

  // Event-level information that travels with every beat and every event
  // summary.
  typedef struct packed {
    bx_type_e          bx_type;
    logic [BXID_W-1:0] bxid;
    logic              new_orbit;  // first event of a new LHC orbit
  } event_info_t;

  // TFC word fields.
  function automatic logic [BXID_W-1:0] tfc_bxid(input logic [TFC_W-1:0] tfc);
    return tfc[BXID_W-1:0];
  endfunction

  function automatic bx_type_e tfc_bx_type(input logic [TFC_W-1:0] tfc);
    return bx_type_e'(tfc[BXID_W+1:BXID_W]);
  endfunction

  // True when a cluster falls inside a region (integer part of the centroid).
  function automatic logic in_region(input cluster_t c, input region_t r);
    logic [9:0] cpix;
    logic [7:0] rpix;
    cpix = c.col[COL_W-1:COORD_FRAC];
    rpix = c.row[ROW_W-1:COORD_FRAC];
    return c.valid && (c.sensor == r.sensor)
        && (cpix >= r.col_lo) && (cpix <= r.col_hi)
        && (rpix >= r.row_lo) && (rpix <= r.row_hi);
  endfunction

endpackage
