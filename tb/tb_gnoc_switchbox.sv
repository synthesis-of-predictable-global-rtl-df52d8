// tb_gnoc_switchbox: self-checking test of the switchbox.
// Random words enter all three ports every cycle while the route register is
// rewritten with a random route every few cycles. A word applied on a port
// at cycle m must leave, exactly two cycles later, on every output whose
// route (the one in force from the clock edge that takes the word in)
// selects that port; an output routed to nothing must stay idle. The reset
// route (straight through, local idle) and the route read-back are checked.
module tb_gnoc_switchbox;
  import gnoc_pkg::*;

  logic   clk = 1'b0;
  logic   rst_n = 1'b0;
  logic   cfg_we;
  route_t cfg_i, route_o;
  flit_t  in_i  [N_PORTS];
  flit_t  out_o [N_PORTS];
  int     checks = 0, failures = 0;
  int     n_routes = 0;

  gnoc_switchbox dut (.*);

  always #5 clk = ~clk;

  function automatic flit_t rand_flit();
    flit_t f;
    for (int i = 0; i < DATA_W / 32; i++) f.data[32*i +: 32] = $urandom;
    f.valid = ($urandom % 4) != 0;
    return f;
  endfunction

  // Independent reference: the word each route value asks for.
  function automatic flit_t expect_for(logic [1:0] src, flit_t w, flit_t e, flit_t l);
    if (src == 2'd1) return w;
    if (src == 2'd2) return e;
    if (src == 2'd3) return l;
    return '0;
  endfunction

  task automatic check(string what, flit_t got, flit_t exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got v=%0b d=%h, expected v=%0b d=%h", what, got.valid,
               got.data[31:0], exp.valid, exp.data[31:0]);
    end
  endtask

  // Inputs and routes of the last two cycles; index 1 is two cycles ago.
  flit_t  hin [2][N_PORTS];
  route_t hroute [2];
  route_t model;

  initial begin
    cfg_we = 1'b0;
    cfg_i  = '{to_w: SRC_NONE, to_e: SRC_NONE, to_l: SRC_NONE};
    for (int p = 0; p < N_PORTS; p++) in_i[p] = '0;
    repeat (3) @(posedge clk);
    #1;
    checks++;
    if (route_o.to_w != SRC_EAST || route_o.to_e != SRC_WEST || route_o.to_l != SRC_NONE) begin
      failures++;
      $display("FAIL reset route is not straight through");
    end
    model = route_o;
    for (int h = 0; h < 2; h++) begin
      hroute[h] = model;
      for (int p = 0; p < N_PORTS; p++) hin[h][p] = '0;
    end
    @(negedge clk) rst_n = 1'b1;
    for (int n = 0; n < 600; n++) begin
      @(negedge clk);
      if (n >= 2) begin
        check("west out",  out_o[PORT_W], expect_for(hroute[1].to_w, hin[1][0], hin[1][1], hin[1][2]));
        check("east out",  out_o[PORT_E], expect_for(hroute[1].to_e, hin[1][0], hin[1][1], hin[1][2]));
        check("local out", out_o[PORT_L], expect_for(hroute[1].to_l, hin[1][0], hin[1][1], hin[1][2]));
        checks++;
        if (route_o !== model) begin
          failures++;
          $display("FAIL route read-back");
        end
      end
      // Keep the straight-through reset route for the first 50 cycles.
      cfg_we = (n >= 50) && ($urandom % 5 == 0);
      if (cfg_we) begin
        cfg_i = route_t'($urandom);
        model = cfg_i;
        n_routes++;
      end
      hin[1]    = hin[0];
      hroute[1] = hroute[0];
      for (int p = 0; p < N_PORTS; p++) begin
        in_i[p]   = rand_flit();
        hin[0][p] = in_i[p];
      end
      hroute[0] = model;
    end
    checks++;
    if (n_routes < 20) begin
      failures++;
      $display("FAIL too few route changes: %0d", n_routes);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
