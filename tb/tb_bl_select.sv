// tb_bl_select: checks that column ranges accumulate, that single-column and
// full-width ranges work, that an empty range (lo > hi) selects nothing and
// that clear deselects all and wins over a simultaneous range. The expected
// selection is built bit by bit in the testbench.
module tb_bl_select;
  localparam int COLS = 48;
  logic clk = 0, rst_n = 0, rng = 0, clr = 0;
  logic [5:0] lo = '0, hi = '0;
  logic [COLS-1:0] bl, ref_bl;
  int checks = 0, failures = 0;

  bl_select #(.COLS(COLS)) dut (.clk, .rst_n, .range_i(rng), .lo_i(lo), .hi_i(hi),
                                .clr_i(clr), .bl_o(bl));
  always #5 clk = ~clk;

  task automatic check(string what);
    checks++;
    if (bl !== ref_bl) begin
      failures++;
      $display("FAIL %s: bl=%h ref=%h", what, bl, ref_bl);
    end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    ref_bl = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk); check("after reset");
    // full width
    rng = 1; lo = 0; hi = COLS - 1; @(negedge clk); rng = 0;
    ref_bl = '1; check("full");
    clr = 1; @(negedge clk); clr = 0; ref_bl = '0; check("clear");
    for (int k = 0; k < 150; k++) begin
      automatic int r = $urandom_range(0, 9);
      lo = 6'($urandom_range(0, COLS-1));
      hi = (r == 0) ? lo : 6'($urandom_range(0, COLS-1));
      rng = (r < 8); clr = (r >= 7);
      @(negedge clk);
      if (clr) ref_bl = '0;
      else for (int c = 0; c < COLS; c++) if (c >= lo && c <= hi) ref_bl[c] = 1'b1;
      rng = 0; clr = 0;
      check($sformatf("step %0d lo=%0d hi=%0d", k, lo, hi));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
