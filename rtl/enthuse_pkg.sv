// enthuse_pkg: types and constants shared by the Enthuse aggregation engines.
//
// A tuple is a (group, key) pair of two 32-bit unsigned fields, as in the
// evaluated engines (4 x (32-bit + 32-bit) per cycle). Inside the sliding-window
// engine every tuple also carries its group cardinality (the number of tuples of
// its group in the current window), appended by the sorter. The operator is
// chosen at run time with a function_select value; its binary encoding below is
// this design's own choice. Tuples sort by the concatenation {group, key}.
package enthuse_pkg;

  localparam int unsigned GW      = 32;     // group ID width
  localparam int unsigned KW      = 32;     // key width
  localparam int unsigned RW      = 32;     // result width
  localparam int unsigned CARD_W  = 16;     // cardinality width, holds up to WS_MAX = 16K
  localparam int unsigned CNT_W   = 32;     // rolled-over group count width

  typedef logic [GW-1:0] group_t;
  typedef logic [KW-1:0] key_t;
  typedef logic [RW-1:0] result_t;
  typedef logic [CARD_W-1:0] card_t;

  // Runtime operator selection (function_select)
  typedef enum logic [2:0] {
    FN_MIN       = 3'd0,
    FN_MAX       = 3'd1,
    FN_SUM       = 3'd2,
    FN_COUNT     = 3'd3,
    FN_DCOUNT    = 3'd4,   // distinct key count per group (needs input sorted by key too)
    FN_AVG       = 3'd5,   // integer average: sum / count
    FN_MINMEDMAX = 3'd6    // SWAG only: first, median and last tuple of each group
  } fn_e;

  typedef struct packed {
    group_t group;
    key_t   key;
  } tuple_t;

  typedef struct packed {
    group_t group;
    key_t   key;
    card_t  card;
  } ctuple_t;

  typedef struct packed {
    group_t  group;
    result_t result;
  } res_t;

  // Sort order used by the sorter: by group, then by key
  function automatic logic tuple_le(input tuple_t a, input tuple_t b);
    return {a.group, a.key} <= {b.group, b.key};
  endfunction

endpackage
