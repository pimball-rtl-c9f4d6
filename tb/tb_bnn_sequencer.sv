// tb_bnn_sequencer: runs whole neuron computations on a small tile.
// For each run it writes random inputs x, random weights and thresholds per
// column. In the first four runs x is the same in every column (the layout of
// a fully-connected layer after duplication); in the last four every column
// gets its own x, as in the convolution layout where each column holds the
// input window of one filter position. It picks a fan-in n (1, odd, even, full),
// a batch-normalisation shift and a column range, starts the sequencer and
// then reads the output row. Expected output per column, computed here:
//   P = number of i < n with x_i == w_i,  V = (2*P) >> shift,  y = (V >= T).
// Columns outside the range must keep their old output bit, and weights and
// thresholds must be unchanged after the run. The number of algorithm gates
// must match the step counts the paper gives: 5 per XNOR (2 NOT + 3 NAND),
// 5 for a half add and 9 per full-add bit (NAND only), one COPY per bit of a
// carried-over odd operand, and 5*TW + 1 for the threshold comparison.
// The busy time reported by the sequencer must equal the measured one.
module tb_bnn_sequencer import pim_pkg::*; ;
  localparam int ROWS = 256, COLS = 32, NMAX = 16;
  localparam int PW = $clog2(NMAX) + 1, TW = PW + 1;
  localparam int REG = NMAX + PW + 1;
  localparam int W_BASE = REG, B_BASE = W_BASE + NMAX, T_BASE = B_BASE + REG;
  localparam int OUT_ROW = 2 * (T_BASE + TW + 12);

  logic clk = 0, rst_n = 0;
  logic start = 0, busy, done, sq_valid;
  logic [4:0] n_in = '0;
  logic [2:0] shift = '0;
  logic [4:0] c_lo = '0, c_hi = '0;
  tile_ctl_t sq_ctl;
  logic [31:0] gates, fixes, cycles;
  logic h_valid = 0;
  tile_ctl_t h_ctl = '0;
  logic [COLS-1:0] h_wdata = '0, rdata;
  logic rvalid, err;
  logic [31:0] tgates;
  int checks = 0, failures = 0;
  int odd_seen = 0, fix_seen = 0;

  bnn_sequencer #(.ROWS(ROWS), .COLS(COLS), .NMAX(NMAX)) dut (
    .clk, .rst_n, .start_i(start), .n_in_i(n_in), .bn_shift_i(shift),
    .col_lo_i(c_lo), .col_hi_i(c_hi), .busy_o(busy), .done_o(done),
    .valid_o(sq_valid), .ctl_o(sq_ctl), .gates_o(gates), .fixes_o(fixes), .cycles_o(cycles));

  pim_tile #(.ROWS(ROWS), .COLS(COLS)) u_tile (
    .clk, .rst_n, .valid_i(busy ? sq_valid : h_valid), .ctl_i(busy ? sq_ctl : h_ctl),
    .wdata_i(h_wdata), .wmask_i('1), .rdata_o(rdata), .rvalid_o(rvalid), .err_o(err),
    .gates_o(tgates));
  always #5 clk = ~clk;

  always @(posedge clk) if (err) begin
    failures++; $display("FAIL parity error raised by the tile");
  end

  task automatic wr(int row, logic [COLS-1:0] d);
    h_ctl = '0; h_ctl.op = CMD_WRITE; h_ctl.row = 16'(row); h_wdata = d; h_valid = 1;
    @(negedge clk); h_valid = 0;
  endtask
  task automatic rd(int row, output logic [COLS-1:0] d);
    h_ctl = '0; h_ctl.op = CMD_READ; h_ctl.row = 16'(row); h_valid = 1;
    @(negedge clk); h_valid = 0;
    d = rdata;
  endtask

  function automatic int exp_gates(int n);
    automatic int g = 5 * n, cnt = n, w = 1;
    while (cnt > 1) begin
      g += (cnt / 2) * (5 + 9 * (w - 1));
      if (cnt % 2) g += w;
      cnt = (cnt + 1) / 2; w++;
    end
    return g + 5 * TW + 1;
  endfunction

  function automatic logic has_odd(int n);
    automatic int cnt = n;
    while (cnt > 1) begin if (cnt % 2) return 1; cnt = (cnt + 1) / 2; end
    return 0;
  endfunction

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [COLS-1:0] x [NMAX];
    logic [COLS-1:0] w [NMAX];
    logic [COLS-1:0] t [TW];
    logic [COLS-1:0] y_old, y, d, sel;
    int n, s, lo, hi, busy_cycles, ones;
    int ns [8] = '{1, 2, 3, 16, 7, 11, 5, 16};
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int run = 0; run < 8; run++) begin
      n  = ns[run];
      s  = (run < 4) ? 0 : $urandom_range(1, 2);
      lo = (run % 2) ? $urandom_range(0, 8) : 0;
      hi = (run % 2) ? $urandom_range(lo, COLS - 1) : COLS - 1;
      for (int i = 0; i < NMAX; i++) begin
        w[i] = COLS'($urandom);
        x[i] = (run < 4) ? {COLS{1'($urandom)}} : COLS'($urandom);
        wr(2 * i, x[i]);
        wr(2 * (W_BASE + i), w[i]);
      end
      // thresholds near the middle of the range so both outputs occur
      for (int j = 0; j < TW; j++) t[j] = '0;
      for (int c = 0; c < COLS; c++) begin
        automatic int tv = $urandom_range(0, (2 * n) >> s);
        for (int j = 0; j < TW; j++) t[j][c] = 1'((tv >> j) & 1);
      end
      for (int j = 0; j < TW; j++) wr(2 * (T_BASE + j), t[j]);
      y_old = COLS'($urandom);
      wr(OUT_ROW, y_old);
      // run
      n_in = 5'(n); shift = 3'(s); c_lo = 5'(lo); c_hi = 5'(hi);
      start = 1; @(negedge clk); start = 0;
      busy_cycles = int'(busy);
      while (!done) begin @(negedge clk); if (busy) busy_cycles++; end
      @(negedge clk);
      rd(OUT_ROW, y);
      for (int c = 0; c < COLS; c++) begin
        automatic int tv = 0, v;
        ones = 0;
        for (int i = 0; i < n; i++) ones += (x[i][c] == w[i][c]) ? 1 : 0;
        for (int j = 0; j < TW; j++) tv |= int'(t[j][c]) << j;
        v = (2 * ones) >> s;
        checks++;
        if (c >= lo && c <= hi) begin
          if (y[c] !== (v >= tv)) begin
            failures++;
            $display("FAIL run %0d n=%0d s=%0d col %0d: P=%0d V=%0d T=%0d y=%b", run, n, s, c, ones, v, tv, y[c]);
          end
        end else if (y[c] !== y_old[c]) begin
          failures++; $display("FAIL run %0d col %0d outside range changed", run, c);
        end
      end
      checks++;
      if (int'(gates) != exp_gates(n)) begin
        failures++; $display("FAIL run %0d n=%0d: %0d gates, expected %0d", run, n, gates, exp_gates(n));
      end
      checks++;
      if (int'(cycles) != busy_cycles) begin
        failures++; $display("FAIL run %0d: reported %0d busy cycles, measured %0d", run, cycles, busy_cycles);
      end
      for (int i = 0; i < n; i++) begin
        rd(2 * (W_BASE + i), d);
        checks++;
        if (d !== w[i]) begin failures++; $display("FAIL run %0d weight %0d changed", run, i); end
      end
      for (int j = 0; j < TW; j++) begin
        rd(2 * (T_BASE + j), d);
        checks++;
        if (d !== t[j]) begin failures++; $display("FAIL run %0d threshold bit %0d changed", run, j); end
      end
      if (has_odd(n)) odd_seen++;
      if (fixes > 0) fix_seen++;
      $display("run %0d: n=%0d shift=%0d cols %0d..%0d gates=%0d parity copies=%0d cycles=%0d",
               run, n, s, lo, hi, gates, fixes, cycles);
    end
    checks++; if (odd_seen == 0) begin failures++; $display("FAIL no odd operand carried"); end
    checks++; if (fix_seen == 0) begin failures++; $display("FAIL no parity copy needed"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
