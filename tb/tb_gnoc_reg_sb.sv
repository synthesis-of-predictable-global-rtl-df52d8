// tb_gnoc_reg_sb: self-checking test of the registered-wire block.
// Random words, valid about three cycles in four, are driven on both buses
// every cycle; each output must equal its input of exactly one cycle before.
// Reset must clear both valid bits. A watchdog ends the run if it hangs.
module tb_gnoc_reg_sb;
  import gnoc_pkg::*;

  logic  clk = 1'b0;
  logic  rst_n = 1'b0;
  flit_t east_i, east_o, west_i, west_o;
  flit_t east_prev, west_prev;
  int    checks = 0, failures = 0;

  gnoc_reg_sb dut (.*);

  always #5 clk = ~clk;

  function automatic flit_t rand_flit();
    flit_t f;
    for (int i = 0; i < DATA_W / 32; i++) f.data[32*i +: 32] = $urandom;
    f.valid = ($urandom % 4) != 0;
    return f;
  endfunction

  task automatic check(string what, flit_t got, flit_t exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got v=%0b d=%h, expected v=%0b d=%h", what, got.valid,
               got.data[31:0], exp.valid, exp.data[31:0]);
    end
  endtask

  initial begin
    east_i = rand_flit();
    west_i = rand_flit();
    east_i.valid = 1'b1;
    west_i.valid = 1'b1;
    repeat (3) @(posedge clk);
    #1;
    checks++;
    if (east_o.valid || west_o.valid) begin
      failures++;
      $display("FAIL valid bits not cleared by reset");
    end
    @(negedge clk) rst_n = 1'b1;
    for (int n = 0; n < 500; n++) begin
      @(negedge clk);
      east_prev = east_i;
      west_prev = west_i;
      east_i = rand_flit();
      west_i = rand_flit();
      #1;
      // The outputs must still show last cycle's inputs, not the new ones.
      if (n > 0) begin
        check("eastbound", east_o, east_prev);
        check("westbound", west_o, west_prev);
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
