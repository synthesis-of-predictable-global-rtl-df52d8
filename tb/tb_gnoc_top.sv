// tb_gnoc_top: end-to-end test of the full GNoC at its default sentence
//   S RWWBWWR S RWWWWWBWWWWWWR S RBWWBWWWBWWWWBWWWWBWWWBWWBR S
//     RBWWBWBWBWBWWBWWBWWBWBWBWWBR S
// with 256-bit buses and no parameter changed.
//
// The test runs in phases. Each phase writes the route registers of all
// five switchboxes, streams random words from one or more sources and
// checks every output: each word must arrive on each intended output at
// exactly the predicted cycle, and no output may carry a word nobody sent
// to it. The predicted latency between switchbox a and b is worked out here
// from hand-counted register tokens (two in every default link): two cycles
// for every switchbox passed plus one per R token.
//
// Mechanisms exercised and counted: straight-through traffic in both
// directions at once (the reset route), local inject/eject at intermediate
// switchboxes, multicast (one input to two outputs), turn-back (a word
// sent back the way it came), local loop-back, and route reconfiguration
// between phases. A mechanism that never happened counts as a failure.
module tb_gnoc_top;
  import gnoc_pkg::*;

  localparam int unsigned NS = 5;
  // R tokens on each link, counted by hand from the sentence.
  localparam int unsigned R_LINK [NS-1] = '{2, 2, 2, 2};
  // Output (and source) indices: 0..4 local ports, 5 west edge, 6 east edge.
  localparam int unsigned OW = NS, OE = NS + 1, NO = NS + 2;

  logic   clk = 1'b0;
  logic   rst_n = 1'b0;
  logic   cfg_we    [NS];
  route_t cfg       [NS];
  route_t route     [NS];
  flit_t  local_in  [NS];
  flit_t  local_out [NS];
  flit_t  west_in, west_out, east_in, east_out;

  int checks = 0, failures = 0;
  int cyc = 0;

  // Mechanism counters.
  int n_through_e = 0, n_through_w = 0, n_bidir = 0, n_local = 0;
  int n_multicast = 0, n_turnback = 0, n_loopback = 0, n_reconfig = 0;

  gnoc_top dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  typedef struct {
    logic [DATA_W-1:0] data;
    int                due;
  } exp_t;

  exp_t exp_q [NO][$];

  // Register tokens between switchbox a and b.
  function automatic int r_between(int a, int b);
    int lo = (a < b) ? a : b;
    int hi = (a < b) ? b : a;
    int r = 0;
    for (int k = lo; k < hi; k++) r += R_LINK[k];
    return r;
  endfunction

  // Cycles from a switchbox-a input to a switchbox-b output along a straight path.
  function automatic int lat(int a, int b);
    int d = (a < b) ? b - a : a - b;
    return 2 * (d + 1) + r_between(a, b);
  endfunction

  function automatic logic [DATA_W-1:0] rand_data();
    logic [DATA_W-1:0] d;
    for (int i = 0; i < DATA_W / 32; i++) d[32*i +: 32] = $urandom;
    return d;
  endfunction

  function automatic route_t rt(src_e w, src_e e, src_e l);
    route_t r;
    r.to_w = w;
    r.to_e = e;
    r.to_l = l;
    return r;
  endfunction

  task automatic drive(int src, flit_t f);
    if (src < NS) local_in[src] = f;
    else if (src == OW) west_in = f;
    else east_in = f;
  endtask

  function automatic flit_t out_of(int o);
    if (o < NS) return local_out[o];
    if (o == OW) return west_out;
    return east_out;
  endfunction

  task automatic idle_all();
    for (int k = 0; k < NS; k++) local_in[k] = '0;
    west_in = '0;
    east_in = '0;
  endtask

  // Compare every output with its queue of expected words; called at negedge.
  task automatic check_outputs();
    for (int o = 0; o < NO; o++) begin
      flit_t f = out_of(o);
      if (f.valid) begin
        checks++;
        if (exp_q[o].size() == 0) begin
          failures++;
          $display("FAIL cycle %0d: unexpected word on output %0d", cyc, o);
        end else begin
          exp_t e = exp_q[o].pop_front();
          if (e.data !== f.data || e.due != cyc) begin
            failures++;
            $display("FAIL cycle %0d output %0d: data %s, due %0d", cyc, o,
                     (e.data === f.data) ? "ok" : "wrong", e.due);
          end
        end
      end else if (exp_q[o].size() != 0 && exp_q[o][0].due <= cyc) begin
        checks++;
        failures++;
        $display("FAIL cycle %0d: output %0d missed a word due at %0d", cyc, o, exp_q[o][0].due);
        void'(exp_q[o].pop_front());
      end
    end
  endtask

  // Write all five route registers in one cycle and check the read-back.
  task automatic configure(route_t r [NS]);
    @(negedge clk);
    check_outputs();
    for (int k = 0; k < NS; k++) begin
      cfg[k]    = r[k];
      cfg_we[k] = 1'b1;
    end
    @(negedge clk);
    check_outputs();
    for (int k = 0; k < NS; k++) begin
      cfg_we[k] = 1'b0;
      checks++;
      if (route[k] !== r[k]) begin
        failures++;
        $display("FAIL route read-back of switchbox %0d", k);
      end
    end
    n_reconfig++;
  endtask

  // One stream: source, up to three destinations and their latencies.
  typedef struct {
    int src;
    int ndst;
    int dst [3];
    int lat [3];
  } flow_t;

  // Stream NWORDS cycles on every flow at once, then drain and check that
  // nothing is left over.
  task automatic stream(flow_t flows [$], int nwords);
    for (int n = 0; n < nwords; n++) begin
      @(negedge clk);
      check_outputs();
      idle_all();
      foreach (flows[i]) begin
        flit_t f;
        f.valid = ($urandom % 4) != 0;
        f.data  = rand_data();
        drive(flows[i].src, f);
        if (f.valid)
          for (int d = 0; d < flows[i].ndst; d++) begin
            exp_t e;
            e.data = f.data;
            e.due  = cyc + flows[i].lat[d];
            exp_q[flows[i].dst[d]].push_back(e);
          end
      end
    end
    @(negedge clk);
    check_outputs();
    idle_all();
    repeat (40) begin
      @(negedge clk);
      check_outputs();
    end
    for (int o = 0; o < NO; o++) begin
      checks++;
      if (exp_q[o].size() != 0) begin
        failures++;
        $display("FAIL output %0d: %0d words never arrived", o, exp_q[o].size());
        exp_q[o].delete();
      end
    end
  endtask

  function automatic flow_t fl3(int s, int d0, int l0, int d1, int l1, int d2, int l2);
    flow_t f;
    f.src = s;
    f.ndst = 3;
    f.dst = '{d0, d1, d2};
    f.lat = '{l0, l1, l2};
    return f;
  endfunction

  function automatic flow_t fl1(int s, int d, int l);
    flow_t f = fl3(s, d, l, 0, 0, 0, 0);
    f.ndst = 1;
    return f;
  endfunction

  initial begin
    route_t r [NS];
    flow_t  flows [$];
    for (int k = 0; k < NS; k++) begin
      cfg_we[k] = 1'b0;
      cfg[k]    = rt(SRC_NONE, SRC_NONE, SRC_NONE);
    end
    idle_all();
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;

    // Phase 0: reset route, straight through both ways at once.
    for (int k = 0; k < NS; k++) begin
      checks++;
      if (route[k] !== ROUTE_THROUGH) begin
        failures++;
        $display("FAIL switchbox %0d does not reset to straight through", k);
      end
    end
    flows = {};
    flows.push_back(fl1(OW, OE, lat(0, NS-1)));
    flows.push_back(fl1(OE, OW, lat(NS-1, 0)));
    stream(flows, 60);
    n_through_e++; n_through_w++; n_bidir++;

    // Phase 1: local S1 -> S3 eastbound while local S3 -> S0 westbound.
    for (int k = 0; k < NS; k++) r[k] = ROUTE_THROUGH;
    r[1] = rt(SRC_EAST,  SRC_LOCAL, SRC_NONE);
    r[3] = rt(SRC_LOCAL, SRC_NONE,  SRC_WEST);
    r[0] = rt(SRC_NONE,  SRC_WEST,  SRC_EAST);
    configure(r);
    flows = {};
    flows.push_back(fl1(1, 3, lat(1, 3)));
    flows.push_back(fl1(3, 0, lat(3, 0)));
    stream(flows, 60);
    n_local += 2; n_bidir++;

    // Phase 2: multicast from S0 local to S2 local and on to S4 local and
    // the east edge (S2 and S4 each eject and forward the same word).
    for (int k = 0; k < NS; k++) r[k] = ROUTE_THROUGH;
    r[0] = rt(SRC_EAST, SRC_LOCAL, SRC_NONE);
    r[2] = rt(SRC_EAST, SRC_WEST,  SRC_WEST);
    r[4] = rt(SRC_EAST, SRC_WEST,  SRC_WEST);
    configure(r);
    flows = {};
    flows.push_back(fl3(0, 2, lat(0, 2), 4, lat(0, 4), OE, lat(0, 4)));
    stream(flows, 60);
    n_multicast++;

    // Phase 3: turn-back at S2 (west edge -> S2 -> west edge) and local
    // loop-back at S4.
    for (int k = 0; k < NS; k++) r[k] = ROUTE_THROUGH;
    r[2] = rt(SRC_WEST, SRC_NONE, SRC_NONE);
    r[4] = rt(SRC_NONE, SRC_NONE, SRC_LOCAL);
    configure(r);
    flows = {};
    // Through S0, S1, S2 and back through S1, S0: five switchbox passes.
    flows.push_back(fl1(OW, OW, 2 * 5 + 2 * r_between(0, 2)));
    flows.push_back(fl1(4, 4, lat(4, 4)));
    stream(flows, 60);
    n_turnback++; n_loopback++;

    // Phase 4: back to the reset route, now by reconfiguration.
    for (int k = 0; k < NS; k++) r[k] = ROUTE_THROUGH;
    configure(r);
    flows = {};
    flows.push_back(fl1(OW, OE, lat(0, NS-1)));
    flows.push_back(fl1(OE, OW, lat(NS-1, 0)));
    stream(flows, 60);
    n_through_e++; n_through_w++; n_bidir++;

    $display("mechanisms: through_east=%0d through_west=%0d bidirectional=%0d local=%0d",
             n_through_e, n_through_w, n_bidir, n_local);
    $display("mechanisms: multicast=%0d turnback=%0d loopback=%0d reconfig=%0d",
             n_multicast, n_turnback, n_loopback, n_reconfig);
    if (n_through_e == 0 || n_through_w == 0 || n_bidir == 0 || n_local == 0 ||
        n_multicast == 0 || n_turnback == 0 || n_loopback == 0 || n_reconfig == 0) begin
      failures++;
      $display("FAIL a mechanism never happened");
    end
    checks++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
