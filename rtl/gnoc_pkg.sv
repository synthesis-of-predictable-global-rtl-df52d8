// gnoc_pkg: types, constants and elaboration-time helpers shared by the
// global NoC (GNoC) blocks.
//
// A GNoC is written as a sentence of one-letter block tokens:
//   S = switchbox, W = plain wires, B = buffered wires, R = registered wires,
// following the grammar  GNOC := S Wires GNOC | S ,  Wires := {W,B,R}+ .
// Sentences are passed to modules as packed ASCII string parameters
// (sentence_t); the helper functions below read them at elaboration time.
// Token 0 is the leftmost character, which is the west end of the link.
//
// Each edge carries two 256-bit buses, one per direction, as drawn in the
// block figures. The valid bit that travels with each 256-bit word is this
// design's own addition, so that a receiver can tell a word from an idle
// cycle; the links have no flow control (none is described), so a word that
// is sent is always delivered a fixed number of cycles later.
package gnoc_pkg;

  // Width of each GNoC data bus (256 wires per direction in the figures).
  localparam int unsigned DATA_W = 256;

  // Longest sentence a string parameter can hold, in characters.
  localparam int unsigned MAX_LEN = 128;

  typedef logic [8*MAX_LEN-1:0] sentence_t;

  // One bus word: the 256 data wires plus a valid bit.
  typedef struct packed {
    logic              valid;
    logic [DATA_W-1:0] data;
  } flit_t;

  // Switchbox ports: west and east link sides, and the local side towards
  // the region's network interface.
  localparam int unsigned N_PORTS = 3;
  localparam int unsigned PORT_W  = 0;
  localparam int unsigned PORT_E  = 1;
  localparam int unsigned PORT_L  = 2;

  // Source selected for one switchbox output.
  typedef enum logic [1:0] {
    SRC_NONE  = 2'd0,
    SRC_WEST  = 2'd1,
    SRC_EAST  = 2'd2,
    SRC_LOCAL = 2'd3
  } src_e;

  // Static routing of one switchbox: the source of each output port.
  typedef struct packed {
    src_e to_w;
    src_e to_e;
    src_e to_l;
  } route_t;

  // Route after reset: straight through in both directions, local idle.
  localparam route_t ROUTE_THROUGH = '{to_w: SRC_EAST, to_e: SRC_WEST, to_l: SRC_NONE};

  // ---------------------------------------------------------------------
  // Sentence helpers (constant functions)
  // ---------------------------------------------------------------------

  // Number of characters: position of the highest non-zero byte plus one.
  function automatic int unsigned str_len(sentence_t s);
    int unsigned n = 0;
    for (int unsigned i = 0; i < MAX_LEN; i++)
      if (s[8*i +: 8] != 8'h00) n = i + 1;
    return n;
  endfunction

  // Character j of the sentence, counted from the left (west) end.
  function automatic logic [7:0] tok_at(sentence_t s, int unsigned j);
    int unsigned n = str_len(s);
    if (j >= n) return 8'h00;
    return s[8*(n-1-j) +: 8];
  endfunction

  // How many times character c occurs.
  function automatic int unsigned count_tok(sentence_t s, logic [7:0] c);
    int unsigned k = 0;
    for (int unsigned j = 0; j < str_len(s); j++)
      if (tok_at(s, j) == c) k++;
    return k;
  endfunction

  // A link sentence (Wires) is one or more of W, B, R and nothing else.
  function automatic bit wires_ok(sentence_t s);
    int unsigned n = str_len(s);
    if (n == 0) return 1'b0;
    for (int unsigned j = 0; j < n; j++)
      if (!(tok_at(s, j) inside {"W", "B", "R"})) return 1'b0;
    return 1'b1;
  endfunction

  // A GNoC sentence starts and ends with S, has no two S in a row and
  // holds nothing but S, W, B and R.
  function automatic bit gnoc_ok(sentence_t s);
    int unsigned n = str_len(s);
    if (n == 0) return 1'b0;
    if (tok_at(s, 0) != "S" || tok_at(s, n-1) != "S") return 1'b0;
    for (int unsigned j = 0; j < n; j++) begin
      if (!(tok_at(s, j) inside {"S", "W", "B", "R"})) return 1'b0;
      if (j > 0 && tok_at(s, j) == "S" && tok_at(s, j-1) == "S") return 1'b0;
    end
    return 1'b1;
  endfunction

  // The Wires sentence between switchbox k and switchbox k+1 (k from 0),
  // right-justified like a string literal.
  function automatic sentence_t link_of(sentence_t s, int unsigned k);
    sentence_t   r = '0;
    int unsigned seen = 0;
    for (int unsigned j = 0; j < str_len(s); j++) begin
      if (tok_at(s, j) == "S") seen++;
      else if (seen == k + 1) r = {r[8*MAX_LEN-9:0], tok_at(s, j)};
    end
    return r;
  endfunction

endpackage
