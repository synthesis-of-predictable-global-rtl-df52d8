// gnoc_switchbox: switchbox GNoC block (token S).
//
// The block has a flip-flop interface on every port, as in the switchbox
// figure and the experiments, where the switchbox is a stand-in for an
// arbitrary router. Three ports are used: west and east, where links abut,
// and local, towards the network interface of a region. Between the input
// and output flip-flops sits the simplest switch that does the job: a
// statically configured crossbar in which each output port takes the word of
// one chosen input port, or stays idle. One input may feed several outputs
// (multicast), and an output may select its own port's input (turn back).
//
// Configuration: route_t cfg_i is loaded into the route register when
// cfg_we is high; it is used from the next cycle on. After reset the route
// is straight through (east input to west output, west input to east output)
// with the local output idle. The port set, the crossbar, its encoding,
// the configuration port and the reset route are this design's own choices:
// the paper gives the switchbox only its name and its flopped interface.
//
// Timing: a word on in_i[p] appears on out_o[q] exactly two cycles later
// (input flop, then output flop), at one word per cycle per port.
// Ports are indexed with gnoc_pkg::PORT_W, PORT_E and PORT_L.
module gnoc_switchbox
  import gnoc_pkg::*;
(
  input  logic   clk,
  input  logic   rst_n,
  input  logic   cfg_we,
  input  route_t cfg_i,
  output route_t route_o,
  input  flit_t  in_i  [N_PORTS],
  output flit_t  out_o [N_PORTS]
);

  route_t route_q;
  flit_t  in_q  [N_PORTS];
  flit_t  out_q [N_PORTS];
  flit_t  sel   [N_PORTS];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) route_q <= ROUTE_THROUGH;
    else if (cfg_we) route_q <= cfg_i;
  end

  function automatic flit_t pick(src_e src, flit_t w, flit_t e, flit_t l);
    unique case (src)
      SRC_WEST:  return w;
      SRC_EAST:  return e;
      SRC_LOCAL: return l;
      default:   return '0;
    endcase
  endfunction

  always_comb begin
    sel[PORT_W] = pick(route_q.to_w, in_q[PORT_W], in_q[PORT_E], in_q[PORT_L]);
    sel[PORT_E] = pick(route_q.to_e, in_q[PORT_W], in_q[PORT_E], in_q[PORT_L]);
    sel[PORT_L] = pick(route_q.to_l, in_q[PORT_W], in_q[PORT_E], in_q[PORT_L]);
  end

  for (genvar p = 0; p < N_PORTS; p++) begin : g_port
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        in_q[p]  <= '0;
        out_q[p] <= '0;
      end else begin
        in_q[p]  <= in_i[p];
        out_q[p] <= sel[p];
      end
    end

    assign out_o[p] = out_q[p];
  end

  assign route_o = route_q;

endmodule
