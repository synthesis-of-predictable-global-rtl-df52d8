// gnoc_reg_sb: registered-wire GNoC block (token R).
//
// The block pipelines the GNoC wires: each of the two 256-bit buses crossing
// it, one eastbound and one westbound, passes through one flip-flop per wire,
// clocked by the global clock. It is inserted where the delay of the wires
// and buffers between two active blocks would exceed one global clock period.
// The clock itself passes through unregistered; in RTL it is the clk net.
//
// Interface: east_i -> east_o and west_i -> west_o, each a gnoc_pkg::flit_t.
// Timing: every output is its input delayed by exactly one clk cycle, with no
// stall and no flow control. Reset (asynchronous, active low) clears only the
// valid bits; the data flip-flops are not reset, which is this design's choice,
// since an invalid word carries no meaning. The one-flop-per-wire structure on
// both buses follows the register block figure; the valid bit is this design's.
module gnoc_reg_sb
  import gnoc_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  flit_t east_i,
  output flit_t east_o,
  input  flit_t west_i,
  output flit_t west_o
);

  logic              east_v_q, west_v_q;
  logic [DATA_W-1:0] east_d_q, west_d_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      east_v_q <= 1'b0;
      west_v_q <= 1'b0;
    end else begin
      east_v_q <= east_i.valid;
      west_v_q <= west_i.valid;
    end
  end

  always_ff @(posedge clk) begin
    east_d_q <= east_i.data;
    west_d_q <= west_i.data;
  end

  assign east_o = '{valid: east_v_q, data: east_d_q};
  assign west_o = '{valid: west_v_q, data: west_d_q};

endmodule
