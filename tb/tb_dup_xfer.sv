// tb_dup_xfer: the transfer engine between two real tiles.
// DUP: a random source row is read from tile 0, and bits src_col..src_col+n-1
// must appear as whole rows dst_row, dst_row+2, ... of tile 1 (every column
// equal to the source bit); the rows in between and after must be untouched.
// COPY: a row of tile 1 copied back into tile 0 must arrive unchanged.
// Busy time is checked: n + 4 cycles for DUP (read command, two cycles until
// the data is back, n writes, done) and 5 for COPY.
module tb_dup_xfer import pim_pkg::*; ;
  localparam int ROWS = 64, COLS = 24, NT = 2;
  logic clk = 0, rst_n = 0;
  logic start = 0, dup = 0, busy, done, xv;
  logic src_tile = 0, dst_tile = 0, xt;
  logic [5:0] src_row = '0, dst_row = '0;
  logic [4:0] src_col = '0;
  logic [5:0] n = '0;
  tile_ctl_t xctl;
  logic [COLS-1:0] xwd, xwm;
  // host access for set-up and checking
  logic h_valid = 0, h_tile = 0;
  tile_ctl_t h_ctl = '0;
  logic [COLS-1:0] h_wdata = '0;
  logic [COLS-1:0] rdata [NT];
  logic rvalid [NT], err [NT];
  logic [31:0] gcnt [NT];
  int checks = 0, failures = 0;

  dup_xfer #(.ROWS(ROWS), .COLS(COLS), .NT(NT)) dut (
    .clk, .rst_n, .start_i(start), .dup_i(dup), .src_tile_i(src_tile), .src_row_i(src_row),
    .src_col_i(src_col), .dst_tile_i(dst_tile), .dst_row_i(dst_row), .n_i(n),
    .busy_o(busy), .done_o(done), .valid_o(xv), .tile_o(xt), .ctl_o(xctl),
    .wdata_o(xwd), .wmask_o(xwm), .rdata_i(rdata[src_tile]), .rvalid_i(rvalid[src_tile]));

  for (genvar t = 0; t < NT; t++) begin : g_t
    pim_tile #(.ROWS(ROWS), .COLS(COLS)) u_tile (
      .clk, .rst_n,
      .valid_i(busy ? (xv && xt == 1'(t)) : (h_valid && h_tile == 1'(t))),
      .ctl_i  (busy ? xctl : h_ctl),
      .wdata_i(busy ? xwd : h_wdata),
      .wmask_i(busy ? xwm : '1),
      .rdata_o(rdata[t]), .rvalid_o(rvalid[t]), .err_o(err[t]), .gates_o(gcnt[t]));
  end
  always #5 clk = ~clk;

  task automatic wr(logic t, int row, logic [COLS-1:0] d);
    h_tile = t; h_ctl = '0; h_ctl.op = CMD_WRITE; h_ctl.row = 16'(row); h_wdata = d; h_valid = 1;
    @(negedge clk); h_valid = 0;
  endtask
  task automatic rd(logic t, int row, output logic [COLS-1:0] d);
    h_tile = t; h_ctl = '0; h_ctl.op = CMD_READ; h_ctl.row = 16'(row); h_valid = 1;
    @(negedge clk); h_valid = 0;
    d = rdata[t];
  endtask
  task automatic run(output int cyc);
    start = 1; @(negedge clk); start = 0;
    cyc = int'(busy);
    while (!done) begin @(negedge clk); if (busy) cyc++; end
    @(negedge clk);
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [COLS-1:0] srcv, d, bg;
    int cyc;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int k = 0; k < 6; k++) begin
      automatic int nn = $urandom_range(1, 12), sc = $urandom_range(0, COLS - nn), dr = 2 * $urandom_range(0, 4);
      srcv = COLS'($urandom); bg = COLS'($urandom);
      wr(0, 40, srcv);
      for (int r = 0; r < 40; r++) wr(1, r, bg);
      dup = 1; src_tile = 0; src_row = 40; src_col = 5'(sc); dst_tile = 1;
      dst_row = 6'(dr); n = 6'(nn);
      run(cyc);
      checks++;
      if (cyc != nn + 4) begin failures++; $display("FAIL dup busy %0d cycles, expected %0d", cyc, nn + 4); end
      for (int r = 0; r < 40; r++) begin
        logic [COLS-1:0] e;
        automatic int i = (r - dr) / 2;
        e = (r >= dr && (r - dr) % 2 == 0 && i < nn) ? {COLS{srcv[sc + i]}} : bg;
        rd(1, r, d);
        checks++;
        if (d !== e) begin failures++; $display("FAIL dup k=%0d row %0d: %h exp %h", k, r, d, e); end
      end
    end
    // plain copy back
    srcv = COLS'($urandom);
    wr(1, 50, srcv); wr(0, 51, '0);
    dup = 0; src_tile = 1; src_row = 50; dst_tile = 0; dst_row = 51;
    run(cyc);
    rd(0, 51, d);
    checks++; if (d !== srcv) begin failures++; $display("FAIL copy %h exp %h", d, srcv); end
    checks++; if (cyc != 5) begin failures++; $display("FAIL copy busy %0d cycles", cyc); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
