// pimball_top: a PIMBALL accelerator of NT tiles.
//
// Each tile is a 1T1M spintronic array that is at once ordinary memory and a
// computing substrate. A network layer is mapped onto one tile, one output
// neuron per column; the tile's own bnn_sequencer then computes every
// selected column in parallel with in-array gates (XNOR, popcount, shift
// batch normalisation, threshold). Between layers the dup_xfer engine reads a
// tile's output row and writes it, duplicated, as the input rows of the next
// tile (the communication phase). Tiles compute independently, so different
// tiles can work on different images at the same time (layer pipelining).
//
// Ports:
//  * host port: one tile command per cycle to tile `host_tile`, taken when
//    `host_valid && host_ready`; reads return on host_rdata/host_rvalid one
//    cycle later. The host loads weights, thresholds and first-layer inputs
//    and reads results; the paper leaves the link (PCIe or memory bus) open.
//  * per-tile sequencer start and configuration, busy/done, gate counters;
//  * transfer engine start and configuration, busy/done;
//  * per-tile error flag for a gate that breaks the 1T1M parity rule.
// Ownership of a tile, checked each cycle: its sequencer while busy, then the
// transfer engine while busy (for its source and destination tiles), then the
// host. host_ready is low while the addressed tile is owned by another agent.
module pimball_top
  import pim_pkg::*;
#(
  parameter int unsigned NT   = 2,
  parameter int unsigned ROWS = pim_pkg::ROWS_DEF,
  parameter int unsigned COLS = pim_pkg::COLS_DEF,
  parameter int unsigned NMAX = 128,
  parameter int unsigned AW   = $clog2(ROWS),
  parameter int unsigned CW   = $clog2(COLS),
  parameter int unsigned NW   = $clog2(NMAX + 1),
  parameter int unsigned TIW  = (NT > 1) ? $clog2(NT) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  // host port
  input  logic             host_valid,
  input  logic [TIW-1:0]   host_tile,
  input  tile_ctl_t        host_ctl,
  input  logic [COLS-1:0]  host_wdata,
  input  logic [COLS-1:0]  host_wmask,
  output logic             host_ready,
  output logic [COLS-1:0]  host_rdata,
  output logic             host_rvalid,
  // per-tile layer sequencers
  input  logic [NT-1:0]    seq_start,
  input  logic [NW-1:0]    seq_n_in     [NT],
  input  logic [2:0]       seq_bn_shift [NT],
  input  logic [CW-1:0]    seq_col_lo   [NT],
  input  logic [CW-1:0]    seq_col_hi   [NT],
  output logic [NT-1:0]    seq_busy,
  output logic [NT-1:0]    seq_done,
  output logic [31:0]      seq_gates    [NT],
  output logic [31:0]      seq_fixes    [NT],
  output logic [31:0]      seq_cycles   [NT],
  // transfer engine
  input  logic             xfer_start,
  input  logic             xfer_dup,
  input  logic [TIW-1:0]   xfer_src_tile,
  input  logic [AW-1:0]    xfer_src_row,
  input  logic [CW-1:0]    xfer_src_col,
  input  logic [TIW-1:0]   xfer_dst_tile,
  input  logic [AW-1:0]    xfer_dst_row,
  input  logic [CW:0]      xfer_n,
  output logic             xfer_busy,
  output logic             xfer_done,
  // status
  output logic [NT-1:0]    tile_err,
  output logic [31:0]      tile_gates   [NT]   // gates fired per tile since reset
);
  // sequencer outputs
  logic            sq_valid [NT];
  tile_ctl_t       sq_ctl   [NT];
  // transfer engine outputs
  logic            xf_valid;
  logic [TIW-1:0]  xf_tile, xf_src_q, xf_dst_q;
  tile_ctl_t       xf_ctl;
  logic [COLS-1:0] xf_wdata, xf_wmask;
  // tile side
  logic            t_valid [NT];
  tile_ctl_t       t_ctl   [NT];
  logic [COLS-1:0] t_wdata [NT];
  logic [COLS-1:0] t_wmask [NT];
  logic [COLS-1:0] t_rdata [NT];
  logic            t_rvalid[NT];
  logic [TIW-1:0]  host_rtile_q;

  // Tiles the transfer engine is using, held for the whole transfer.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      xf_src_q <= '0; xf_dst_q <= '0;
    end else if (xfer_start && !xfer_busy) begin
      xf_src_q <= xfer_src_tile; xf_dst_q <= xfer_dst_tile;
    end
  end

  function automatic logic xfer_owns(int unsigned t);
    return xfer_busy && (t == 32'(xf_src_q) || t == 32'(xf_dst_q));
  endfunction

  always_comb begin
    host_ready = !(seq_busy[host_tile] || xfer_owns(32'(host_tile)));
    for (int unsigned t = 0; t < NT; t++) begin
      if (seq_busy[t]) begin
        t_valid[t] = sq_valid[t];
        t_ctl[t]   = sq_ctl[t];
        t_wdata[t] = '0;
        t_wmask[t] = '0;
      end else if (xfer_owns(t)) begin
        t_valid[t] = xf_valid && (32'(xf_tile) == t);
        t_ctl[t]   = xf_ctl;
        t_wdata[t] = xf_wdata;
        t_wmask[t] = xf_wmask;
      end else begin
        t_valid[t] = host_valid && (32'(host_tile) == t);
        t_ctl[t]   = host_ctl;
        t_wdata[t] = host_wdata;
        t_wmask[t] = host_wmask;
      end
    end
  end

  for (genvar t = 0; t < NT; t++) begin : g_tile
    bnn_sequencer #(.ROWS(ROWS), .COLS(COLS), .NMAX(NMAX), .AW(AW), .CW(CW)) u_seq (
      .clk, .rst_n,
      .start_i   (seq_start[t]),
      .n_in_i    (seq_n_in[t]),
      .bn_shift_i(seq_bn_shift[t]),
      .col_lo_i  (seq_col_lo[t]),
      .col_hi_i  (seq_col_hi[t]),
      .busy_o    (seq_busy[t]),
      .done_o    (seq_done[t]),
      .valid_o   (sq_valid[t]),
      .ctl_o     (sq_ctl[t]),
      .gates_o   (seq_gates[t]),
      .fixes_o   (seq_fixes[t]),
      .cycles_o  (seq_cycles[t])
    );

    pim_tile #(.ROWS(ROWS), .COLS(COLS), .AW(AW), .CW(CW)) u_tile (
      .clk, .rst_n,
      .valid_i (t_valid[t]),
      .ctl_i   (t_ctl[t]),
      .wdata_i (t_wdata[t]),
      .wmask_i (t_wmask[t]),
      .rdata_o (t_rdata[t]),
      .rvalid_o(t_rvalid[t]),
      .err_o   (tile_err[t]),
      .gates_o (tile_gates[t])
    );
  end

  dup_xfer #(.ROWS(ROWS), .COLS(COLS), .NT(NT), .AW(AW), .CW(CW), .TIW(TIW)) u_xfer (
    .clk, .rst_n,
    .start_i   (xfer_start),
    .dup_i     (xfer_dup),
    .src_tile_i(xfer_src_tile),
    .src_row_i (xfer_src_row),
    .src_col_i (xfer_src_col),
    .dst_tile_i(xfer_dst_tile),
    .dst_row_i (xfer_dst_row),
    .n_i       (xfer_n),
    .busy_o    (xfer_busy),
    .done_o    (xfer_done),
    .valid_o   (xf_valid),
    .tile_o    (xf_tile),
    .ctl_o     (xf_ctl),
    .wdata_o   (xf_wdata),
    .wmask_o   (xf_wmask),
    .rdata_i   (t_rdata[xf_src_q]),
    .rvalid_i  (t_rvalid[xf_src_q])
  );

  // Host read data comes from the tile the read was sent to.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) host_rtile_q <= '0;
    else if (host_valid && host_ready) host_rtile_q <= host_tile;
  end
  assign host_rdata  = t_rdata[host_rtile_q];
  assign host_rvalid = t_rvalid[host_rtile_q] && !xfer_owns(32'(host_rtile_q));

endmodule
