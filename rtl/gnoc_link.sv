// gnoc_link: one GNoC edge between two switchboxes, built from a sentence of
// W, B and R tokens (the "Wires" rule of the GNoC grammar).
//
// The sentence is read west to east. Each R token becomes a gnoc_reg_sb, one
// pipeline stage on both buses; W (plain wire) and B (buffered wire) tokens
// have no logic function and become plain connections, since their effect is
// only on slew and delay, which belong to the physical blocks. The link
// therefore has a latency, in global clock cycles, equal to the number of R
// tokens, in both directions, and accepts one word per cycle in each
// direction. For example, "RWWBWWR" is two cycles long.
//
// Interface: east_i enters at the west end and leaves as east_o at the east
// end; west_i enters at the east end and leaves as west_o at the west end.
// A sentence that is empty or holds a character other than W, B, R is
// rejected at elaboration, and an assertion checks the fixed latency in
// simulation. The token set and grammar follow the paper; the
// mapping of W and B to connections is this design's reading of them.
module gnoc_link
  import gnoc_pkg::*;
#(
  parameter sentence_t PATH = "RWWBWWR"
) (
  input  logic  clk,
  input  logic  rst_n,
  input  flit_t east_i,
  output flit_t east_o,
  input  flit_t west_i,
  output flit_t west_o
);

  localparam int unsigned LEN = str_len(PATH);
  localparam int unsigned N_R = count_tok(PATH, "R");

  if (!wires_ok(PATH)) begin : g_bad_path
    $error("gnoc_link: link sentence must be one or more of W, B, R");
  end

  // east_c[j] is the eastbound bus at the west edge of token j;
  // west_c[j] is the westbound bus leaving token j on its west edge.
  flit_t east_c [LEN+1];
  flit_t west_c [LEN+1];

  assign east_c[0]   = east_i;
  assign west_c[LEN] = west_i;

  for (genvar j = 0; j < LEN; j++) begin : g_tok
    if (tok_at(PATH, j) == "R") begin : g_reg
      gnoc_reg_sb u_reg (
        .clk    (clk),
        .rst_n  (rst_n),
        .east_i (east_c[j]),
        .east_o (east_c[j+1]),
        .west_i (west_c[j+1]),
        .west_o (west_c[j])
      );
    end else begin : g_wire
      assign east_c[j+1] = east_c[j];
      assign west_c[j]   = west_c[j+1];
    end
  end

  assign east_o = east_c[LEN];
  assign west_o = west_c[0];

  // The link's promise: every word leaves exactly N_R cycles after it
  // entered, in each direction.
  if (N_R > 0) begin : g_latency_check
    a_east_latency : assert property (@(posedge clk) disable iff (!rst_n)
      east_i.valid |-> ##N_R (east_o.valid && east_o.data == $past(east_i.data, N_R)));
    a_west_latency : assert property (@(posedge clk) disable iff (!rst_n)
      west_i.valid |-> ##N_R (west_o.valid && west_o.data == $past(west_i.data, N_R)));
  end

endmodule
