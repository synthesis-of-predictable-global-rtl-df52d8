// gnoc_top: a complete global NoC, given as one sentence of the GNoC grammar
//   GNOC := S Wires GNOC | S ,   Wires := {W,B,R}+ .
//
// Every S in the sentence becomes a gnoc_switchbox and every run of W/B/R
// tokens between two S becomes a gnoc_link, so the RTL is composed from the
// sentence the way the physical GNoC is composed by abutment. The default
// sentence joins five switchboxes with the four link compositions whose
// timing the paper measures, in the order it lists them:
//   S RWWBWWR S RWWWWWBWWWWWWR S RBWWBWWWBWWWWBWWWWBWWWBWWBR S
//     RBWWBWBWBWBWWBWWBWWBWBWBWWBR S
// Putting the four measured links into one chain is this design's choice; the
// paper built each as a separate design.
//
// Interface: switchbox k has its local port on local_in[k] / local_out[k] and
// its route register on cfg_we[k] / cfg[k] (see gnoc_switchbox). The outer
// west port of the first switchbox and the outer east port of the last are
// brought out as west_in/west_out and east_in/east_out.
// Timing: a word from the local port of switchbox a to that of switchbox b
// takes 2 cycles per switchbox passed (a and b included) plus one per R token
// on the links between them; there is no backpressure anywhere.
module gnoc_top
  import gnoc_pkg::*;
#(
  parameter sentence_t GNOC = sentence_t'({"SRWWBWWRSRWWWWWBWWWWWWRSRBWWBWWWBWWWWBWWWWBWWWBWWBRS",
                                           "RBWWBWBWBWBWWBWWBWWBWBWBWWBRS"}),
  localparam int unsigned N_S = count_tok(GNOC, "S")
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   cfg_we    [N_S],
  input  route_t cfg       [N_S],
  output route_t route     [N_S],
  input  flit_t  local_in  [N_S],
  output flit_t  local_out [N_S],
  input  flit_t  west_in,
  output flit_t  west_out,
  input  flit_t  east_in,
  output flit_t  east_out
);

  if (!gnoc_ok(GNOC)) begin : g_bad_gnoc
    $error("gnoc_top: sentence must be S, then one or more (Wires S), Wires = {W,B,R}+");
  end

  // Buses between switchboxes: east_l[k]/west_l[k] at the west end of link k,
  // east_r[k]/west_r[k] at its east end.
  flit_t east_l [N_S-1];
  flit_t east_r [N_S-1];
  flit_t west_l [N_S-1];
  flit_t west_r [N_S-1];

  for (genvar k = 0; k < N_S; k++) begin : g_sb
    flit_t sb_in  [N_PORTS];
    flit_t sb_out [N_PORTS];

    if (k == 0) begin : g_wedge
      assign sb_in[PORT_W] = west_in;
      assign west_out      = sb_out[PORT_W];
    end else begin : g_wlink
      assign sb_in[PORT_W] = east_r[k-1];
      assign west_r[k-1]   = sb_out[PORT_W];
    end

    if (k == N_S - 1) begin : g_eedge
      assign sb_in[PORT_E] = east_in;
      assign east_out      = sb_out[PORT_E];
    end else begin : g_elink
      assign sb_in[PORT_E] = west_l[k];
      assign east_l[k]     = sb_out[PORT_E];
    end

    assign sb_in[PORT_L] = local_in[k];
    assign local_out[k]  = sb_out[PORT_L];

    gnoc_switchbox u_sb (
      .clk     (clk),
      .rst_n   (rst_n),
      .cfg_we  (cfg_we[k]),
      .cfg_i   (cfg[k]),
      .route_o (route[k]),
      .in_i    (sb_in),
      .out_o   (sb_out)
    );
  end

  for (genvar k = 0; k < N_S - 1; k++) begin : g_link
    gnoc_link #(
      .PATH (link_of(GNOC, k))
    ) u_link (
      .clk    (clk),
      .rst_n  (rst_n),
      .east_i (east_l[k]),
      .east_o (east_r[k]),
      .west_i (west_r[k]),
      .west_o (west_l[k])
    );
  end

endmodule
