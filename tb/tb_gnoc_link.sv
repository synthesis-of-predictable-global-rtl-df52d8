// tb_gnoc_link: self-checking test of link composition from W/B/R sentences.
// Six links are built side by side: the four link compositions whose timing
// the paper measures, a wires-and-buffers-only link and a three-register
// link. Each carries random words in both directions every cycle; the output
// must equal the input of exactly LAT cycles before, where LAT is the number
// of R tokens, written out by hand below (0 for a link with no register).
module tb_gnoc_link;
  import gnoc_pkg::*;

  localparam int unsigned NL = 6;
  localparam sentence_t PATHS [NL] = '{
    sentence_t'("RWWBWWR"),
    sentence_t'("RWWWWWBWWWWWWR"),
    sentence_t'("RBWWBWWWBWWWWBWWWWBWWWBWWBR"),
    sentence_t'("RBWWBWBWBWBWWBWWBWWBWBWBWWBR"),
    sentence_t'("WWBWW"),
    sentence_t'("RBRWR")
  };
  localparam int unsigned LAT [NL] = '{2, 2, 2, 2, 0, 3};
  localparam int unsigned HIST = 8;

  logic  clk = 1'b0;
  logic  rst_n = 1'b0;
  flit_t east_i [NL], east_o [NL], west_i [NL], west_o [NL];
  int    checks = 0, failures = 0;

  for (genvar l = 0; l < NL; l++) begin : g_dut
    gnoc_link #(.PATH(PATHS[l])) dut (
      .clk    (clk),
      .rst_n  (rst_n),
      .east_i (east_i[l]),
      .east_o (east_o[l]),
      .west_i (west_i[l]),
      .west_o (west_o[l])
    );
  end

  always #5 clk = ~clk;

  function automatic flit_t rand_flit();
    flit_t f;
    for (int i = 0; i < DATA_W / 32; i++) f.data[32*i +: 32] = $urandom;
    f.valid = ($urandom % 4) != 0;
    return f;
  endfunction

  task automatic check(string what, int l, flit_t got, flit_t exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL link %0d %s: got v=%0b d=%h, expected v=%0b d=%h", l, what,
               got.valid, got.data[31:0], exp.valid, exp.data[31:0]);
    end
  endtask

  // hist_*[l][0] is the word applied most recently.
  flit_t hist_e [NL][HIST];
  flit_t hist_w [NL][HIST];

  initial begin
    for (int l = 0; l < NL; l++) begin
      east_i[l] = '0;
      west_i[l] = '0;
      for (int h = 0; h < HIST; h++) begin
        hist_e[l][h] = '0;
        hist_w[l][h] = '0;
      end
    end
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    for (int n = 0; n < 400; n++) begin
      @(negedge clk);
      for (int l = 0; l < NL; l++) begin
        flit_t e, w;
        e = rand_flit();
        w = rand_flit();
        for (int h = HIST - 1; h > 0; h--) begin
          hist_e[l][h] = hist_e[l][h-1];
          hist_w[l][h] = hist_w[l][h-1];
        end
        hist_e[l][0] = e;
        hist_w[l][0] = w;
        east_i[l] = e;
        west_i[l] = w;
      end
      #1;
      // Words applied LAT cycles ago (hist index LAT) are due now.
      if (n >= HIST)
        for (int l = 0; l < NL; l++) begin
          check("eastbound", l, east_o[l], hist_e[l][LAT[l]]);
          check("westbound", l, west_o[l], hist_w[l][LAT[l]]);
        end
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
