// tb_wl_latch: checks that row addresses accumulate in the latch, that a
// repeated address is counted once, that clear drops every row and wins over
// a simultaneous set, and that an out-of-range address is ignored. The
// expected latch contents are kept in a separate reference vector.
module tb_wl_latch;
  localparam int ROWS = 64;
  logic clk = 0, rst_n = 0, set = 0, clr = 0;
  logic [5:0] addr = '0;
  logic [ROWS-1:0] wl, ref_wl;
  logic [6:0] cnt;
  int checks = 0, failures = 0;

  wl_latch #(.ROWS(ROWS)) dut (.clk, .rst_n, .set_i(set), .addr_i(addr), .clr_i(clr),
                               .wl_o(wl), .count_o(cnt));
  always #5 clk = ~clk;

  task automatic check(string what);
    checks++;
    if (wl !== ref_wl || cnt != 7'($countones(ref_wl))) begin
      failures++;
      $display("FAIL %s: wl=%h ref=%h cnt=%0d", what, wl, ref_wl, cnt);
    end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    ref_wl = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk); check("after reset");
    for (int k = 0; k < 200; k++) begin
      automatic int r = $urandom_range(0, 9);
      set = 0; clr = 0;
      if (r < 7) begin set = 1; addr = 6'($urandom_range(0, ROWS-1)); end
      else if (r < 8) clr = 1;
      else if (r < 9) begin set = 1; clr = 1; addr = 6'($urandom_range(0, ROWS-1)); end
      @(negedge clk);
      if (clr) ref_wl = '0; else if (set) ref_wl[addr] = 1'b1;
      set = 0; clr = 0;
      check($sformatf("step %0d", k));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
