// tb_pimball_full: the end-to-end test of tb_pimball_top with the top at its
// default size (two 1024 x 1024 tiles, fan-in up to 128): a 127-input layer of
// 1024 neurons, then a 128-input layer of 1024 neurons.
// Layer 0 (tile 0): N0 inputs -> M0 neurons; layer 1 (tile 1) takes the first
// K1 of them as inputs and computes M1 neurons.
// Weights and thresholds are loaded once by the host. Two images go through:
//   image A: host writes it into tile 0, tile 0 computes layer 0, the transfer
//            engine duplicates the M0 outputs into tile 1's input rows;
//   pipeline: tile 0 computes image B while tile 1 computes image A;
//   image B: transfer, tile 1 computes layer 1, host reads both results.
// The results are compared with a reference network evaluated here
// (P = matches of x and w, V = (2P) >> shift, y = V >= T, per neuron).
// It also checks a plain row COPY transfer and that the tile error flag
// rises for a gate that breaks the 1T1M parity rule. Each mechanism is counted
// and a mechanism that never happened is a failure: host held off by a busy
// tile, two tiles computing at once, DUP and COPY transfers, parity COPY
// gates, an odd operand carried in the popcount tree, a non-zero batch-norm
// shift, and the parity error flag.
module tb_pimball_full import pim_pkg::*; ;
  localparam int NT = 2, ROWS = 1024, COLS = 1024, NMAX = 128;
  localparam int N0 = 127, M0 = 1024, K1 = 128, M1 = 1024, S0 = 0, S1 = 1;
  localparam int WATCHDOG = 2000000;
  localparam int PW = $clog2(NMAX) + 1, TW = PW + 1;
  localparam int REG = NMAX + PW + 1;
  localparam int W_BASE = REG, B_BASE = W_BASE + NMAX, T_BASE = B_BASE + REG;
  localparam int OUT_ROW = 2 * (T_BASE + TW + 12);
  localparam int AW = $clog2(ROWS), CW = $clog2(COLS), NW = $clog2(NMAX + 1);

  logic clk = 0, rst_n = 0;
  logic host_valid = 0, host_ready, host_rvalid;
  logic host_tile = 0;
  tile_ctl_t host_ctl = '0;
  logic [COLS-1:0] host_wdata = '0, host_wmask = '1, host_rdata;
  logic [NT-1:0] seq_start = '0, seq_busy, seq_done, tile_err;
  logic [NW-1:0] seq_n_in [NT];
  logic [2:0] seq_bn_shift [NT];
  logic [CW-1:0] seq_col_lo [NT], seq_col_hi [NT];
  logic [31:0] seq_gates [NT], seq_fixes [NT], seq_cycles [NT], tile_gates [NT];
  logic xfer_start = 0, xfer_dup = 0, xfer_busy, xfer_done;
  logic xfer_src_tile = 0, xfer_dst_tile = 0;
  logic [AW-1:0] xfer_src_row = '0, xfer_dst_row = '0;
  logic [CW-1:0] xfer_src_col = '0;
  logic [CW:0] xfer_n = '0;
  int checks = 0, failures = 0;
  int n_stall = 0, n_overlap = 0, n_dup = 0, n_copy = 0, n_fix = 0, n_odd = 0, n_shift = 0, n_err = 0;

  pimball_top dut (.*);
  always #5 clk = ~clk;

  always @(posedge clk) begin
    if (seq_busy[0] && seq_busy[1]) n_overlap++;
    if (tile_err != '0) n_err++;
  end

  task automatic wr(logic t, int row, logic [COLS-1:0] d);
    host_tile = t; host_ctl = '0; host_ctl.op = CMD_WRITE; host_ctl.row = 16'(row);
    host_wdata = d; host_valid = 1;
    @(posedge clk);
    while (!host_ready) begin n_stall++; @(posedge clk); end
    #1 host_valid = 0;
    @(negedge clk);
  endtask
  task automatic rd(logic t, int row, output logic [COLS-1:0] d);
    host_tile = t; host_ctl = '0; host_ctl.op = CMD_READ; host_ctl.row = 16'(row); host_valid = 1;
    @(posedge clk);
    while (!host_ready) begin n_stall++; @(posedge clk); end
    #1 host_valid = 0;
    while (!host_rvalid) @(posedge clk);
    d = host_rdata;
    @(negedge clk);
  endtask
  task automatic wait_done(int t);
    while (seq_busy[t]) @(negedge clk);
  endtask
  task automatic xfer(logic dup, logic st, int sr, int sc, logic dt, int dr, int n);
    xfer_dup = dup; xfer_src_tile = st; xfer_src_row = AW'(sr); xfer_src_col = CW'(sc);
    xfer_dst_tile = dt; xfer_dst_row = AW'(dr); xfer_n = (CW+1)'(n);
    xfer_start = 1; @(negedge clk); xfer_start = 0;
    while (!xfer_done) @(negedge clk);
    @(negedge clk);
    if (dup) n_dup++; else n_copy++;
  endtask
  task automatic start(int t, int n, int s, int hi);
    seq_n_in[t] = NW'(n); seq_bn_shift[t] = 3'(s); seq_col_lo[t] = '0; seq_col_hi[t] = CW'(hi);
    seq_start[t] = 1'b1;
  endtask

  // reference layer
  function automatic logic [COLS-1:0] layer(logic [NMAX-1:0] x, int n, int m, int s,
                                            logic [NMAX-1:0] w [COLS], int t [COLS]);
    logic [COLS-1:0] y = '0;
    for (int c = 0; c < m; c++) begin
      int p = 0;
      for (int i = 0; i < n; i++) p += (x[i] == w[c][i]) ? 1 : 0;
      y[c] = (((2 * p) >> s) >= t[c]);
    end
    return y;
  endfunction

  initial begin
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [NMAX-1:0] w0 [COLS], w1 [COLS];
    int t0 [COLS], t1 [COLS];
    logic [NMAX-1:0] xa, xb;
    logic [COLS-1:0] ya0, yb0, ya1, yb1, d, row;
    for (int t = 0; t < NT; t++) begin
      seq_n_in[t] = '0; seq_bn_shift[t] = '0; seq_col_lo[t] = '0; seq_col_hi[t] = '0;
    end
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    // configuration: weights (bit i of column c is w[c][i]) and thresholds
    for (int c = 0; c < COLS; c++) begin
      w0[c] = NMAX'($urandom); w1[c] = NMAX'($urandom);
      t0[c] = $urandom_range(N0 - 3, N0 + 3);
      t1[c] = $urandom_range((K1 - 4) >> S1, (K1 + 4) >> S1);
    end
    for (int i = 0; i < NMAX; i++) begin
      for (int c = 0; c < COLS; c++) row[c] = w0[c][i];
      wr(0, 2 * (W_BASE + i), row);
      for (int c = 0; c < COLS; c++) row[c] = w1[c][i];
      wr(1, 2 * (W_BASE + i), row);
    end
    for (int j = 0; j < TW; j++) begin
      for (int c = 0; c < COLS; c++) row[c] = 1'((t0[c] >> j) & 1);
      wr(0, 2 * (T_BASE + j), row);
      for (int c = 0; c < COLS; c++) row[c] = 1'((t1[c] >> j) & 1);
      wr(1, 2 * (T_BASE + j), row);
    end
    xa = NMAX'($urandom); xb = NMAX'($urandom);
    ya0 = layer(xa, N0, M0, S0, w0, t0); ya1 = layer(ya0[NMAX-1:0], K1, M1, S1, w1, t1);
    yb0 = layer(xb, N0, M0, S0, w0, t0); yb1 = layer(yb0[NMAX-1:0], K1, M1, S1, w1, t1);
    // image A, layer 0
    for (int i = 0; i < N0; i++) wr(0, 2 * i, {COLS{xa[i]}});
    start(0, N0, S0, M0 - 1); @(negedge clk); seq_start = '0;
    wr(0, 2 * N0, '0);             // held off while tile 0 computes
    wait_done(0);
    rd(0, OUT_ROW, d);
    checks++;
    if (d[M0-1:0] !== ya0[M0-1:0]) begin failures++; $display("FAIL image A layer 0: %h exp %h", d[M0-1:0], ya0[M0-1:0]); end
    xfer(1'b1, 1'b0, OUT_ROW, 0, 1'b1, 0, K1);
    // pipeline: image B on tile 0 while image A runs on tile 1
    for (int i = 0; i < N0; i++) wr(0, 2 * i, {COLS{xb[i]}});
    start(0, N0, S0, M0 - 1); start(1, K1, S1, M1 - 1); @(negedge clk); seq_start = '0;
    wait_done(0);
    wait_done(1);
    if (seq_fixes[0] > 0) n_fix++;
    if (N0 % 2 == 1) n_odd++;
    if (S1 != 0) n_shift++;
    rd(1, OUT_ROW, d);
    checks++;
    if (d[M1-1:0] !== ya1[M1-1:0]) begin failures++; $display("FAIL image A layer 1: %h exp %h", d[M1-1:0], ya1[M1-1:0]); end
    rd(0, OUT_ROW, d);
    checks++;
    if (d[M0-1:0] !== yb0[M0-1:0]) begin failures++; $display("FAIL image B layer 0: %h exp %h", d[M0-1:0], yb0[M0-1:0]); end
    xfer(1'b1, 1'b0, OUT_ROW, 0, 1'b1, 0, K1);
    start(1, K1, S1, M1 - 1); @(negedge clk); seq_start = '0;
    wait_done(1);
    rd(1, OUT_ROW, d);
    checks++;
    if (d[M1-1:0] !== yb1[M1-1:0]) begin failures++; $display("FAIL image B layer 1: %h exp %h", d[M1-1:0], yb1[M1-1:0]); end
    $display("layer 0: %0d gates, %0d parity copies, %0d cycles; layer 1: %0d gates, %0d copies, %0d cycles",
             seq_gates[0], seq_fixes[0], seq_cycles[0], seq_gates[1], seq_fixes[1], seq_cycles[1]);
    // plain copy of tile 1's result row into tile 0
    xfer(1'b0, 1'b1, OUT_ROW, 0, 1'b0, OUT_ROW + 2, 1);
    rd(0, OUT_ROW + 2, d);
    checks++;
    if (d[M1-1:0] !== yb1[M1-1:0]) begin failures++; $display("FAIL copy transfer: %h", d); end
    // a NOT with two input rows breaks the parity rule
    host_tile = 1; host_ctl = '0; host_ctl.op = CMD_WL_CLEAR; host_valid = 1; @(negedge clk);
    host_ctl.op = CMD_WL_SET; host_ctl.row = 16'd1; @(negedge clk);
    host_ctl.row = 16'd3; @(negedge clk);
    host_ctl.row = 16'd2; @(negedge clk);
    host_ctl = '0; host_ctl.fire = 1; host_ctl.gate = GATE_NOT; host_ctl.in_odd = 1; @(negedge clk);
    host_valid = 0; @(negedge clk);
    $display("mechanisms: host stalls=%0d overlap cycles=%0d dup=%0d copy=%0d parity-copy runs=%0d odd trees=%0d shifts=%0d errors=%0d",
             n_stall, n_overlap, n_dup, n_copy, n_fix, n_odd, n_shift, n_err);
    checks++; if (n_stall == 0)   begin failures++; $display("FAIL host never held off"); end
    checks++; if (n_overlap == 0) begin failures++; $display("FAIL tiles never overlapped"); end
    checks++; if (n_dup == 0)     begin failures++; $display("FAIL no duplication transfer"); end
    checks++; if (n_copy == 0)    begin failures++; $display("FAIL no copy transfer"); end
    checks++; if (n_fix == 0)     begin failures++; $display("FAIL no parity copy"); end
    checks++; if (n_odd == 0)     begin failures++; $display("FAIL no odd operand"); end
    checks++; if (n_shift == 0)   begin failures++; $display("FAIL no batch-norm shift"); end
    checks++; if (n_err != 1)     begin failures++; $display("FAIL parity error seen %0d times", n_err); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
