// bnn_sequencer: computes one binary neuron per selected column of a tile,
// entirely with in-array gates.
//
// Data layout (transposed array: one neuron per column, bits stored down the
// column). Rows are grouped in pairs called slots; slot s is rows 2s (even,
// on BLO) and 2s+1 (odd, on BLE). With REG = NMAX + PW + 1 slots per operand region:
//   x_i  input neuron i           row 2*(A_BASE + i)        (even)
//   w_i  weight i of this column  row 2*(W_BASE + i)        (even)
//   t_j  threshold bit j (LSB=0)  row 2*(T_BASE + j)        (even)
//   y    output neuron            row OUT_ROW               (even)
// x_i is duplicated in every column, w_i and t_j are per column. The host (or
// the transfer engine) writes them; weights and thresholds survive a run,
// the inputs are overwritten by it.
//
// Operation, after `start_i` (configuration sampled then):
//  1. select columns col_lo..col_hi and write a 0 into the ZERO slot;
//  2. XNOR: p_i = XNOR(x_i, w_i) as NAND(NAND(x,w), NAND(x',w')) with two NOTs
//     and three NANDs (the paper's NAND/NOT dual of its four-NOR XNOR); p_i
//     overwrites x_i;
//  3. popcount: adder tree, operands paired level by level; each addition is
//     ripple carry, a half adder (4 NAND + 1 NOT) on bit 0 and a 9-NAND full
//     adder on every further bit; an odd operand is carried to the next level
//     by COPY gates and widened with a 0 bit;
//  4. shift batch normalisation and the affine step: the comparand is
//     V = (2*P) >> bn_shift, formed only by choosing which rows are read as
//     V's bits (0 where no P bit lands);
//  5. threshold: ripple-borrow chain of V - T, per bit one NOT and four NANDs,
//     then one NOT of the final borrow gives y = (V >= T) into OUT_ROW
//     (5*TW + 1 gates, as the paper counts).
// The additive part of batch normalisation and the -N of the affine step are
// folded into T by whoever writes it (T = threshold + N - bias).
//
// The 1T1M array needs all inputs of a gate on rows of one parity and the
// output on the other parity. Every gate's output row is therefore chosen by
// the input parity (the sequencer remembers each slot's parity), and an input
// on the wrong parity is first moved by a COPY gate into a FIX slot. These
// COPY gates are counted apart (fixes_o) from the gates of the algorithm
// (gates_o). Each gate costs 1 preset + 1 wordline clear + (inputs + 1)
// wordline latches + 1 fire command, one command per cycle.
module bnn_sequencer
  import pim_pkg::*;
#(
  parameter int unsigned ROWS = pim_pkg::ROWS_DEF,
  parameter int unsigned COLS = pim_pkg::COLS_DEF,
  parameter int unsigned NMAX = 128,                  // largest fan-in per column
  parameter int unsigned PW   = $clog2(NMAX) + 1,     // popcount width
  parameter int unsigned TW   = PW + 1,               // threshold width
  parameter int unsigned AW   = $clog2(ROWS),
  parameter int unsigned CW   = $clog2(COLS)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    start_i,
  input  logic [$clog2(NMAX+1)-1:0] n_in_i,    // fan-in, 1..NMAX
  input  logic [2:0]              bn_shift_i,  // right shift of 2*P
  input  logic [CW-1:0]           col_lo_i,
  input  logic [CW-1:0]           col_hi_i,
  output logic                    busy_o,
  output logic                    done_o,      // one-cycle pulse at the end
  output logic                    valid_o,     // command to the tile
  output tile_ctl_t               ctl_o,
  output logic [31:0]             gates_o,     // algorithm gates of the last run
  output logic [31:0]             fixes_o,     // parity COPY gates of the last run
  output logic [31:0]             cycles_o     // busy cycles of the last run
);
  localparam int unsigned SW      = AW - 1;            // slot index width
  localparam int unsigned REG     = NMAX + PW + 1;
  localparam int unsigned A_BASE  = 0;
  localparam int unsigned W_BASE  = REG;
  localparam int unsigned B_BASE  = W_BASE + NMAX;
  localparam int unsigned T_BASE  = B_BASE + REG;
  localparam int unsigned S_BASE  = T_BASE + TW;       // scratch S0..S6
  localparam int unsigned CARRY   = S_BASE + 7;
  localparam int unsigned FIX     = S_BASE + 8;        // FIX0..FIX2
  localparam int unsigned ZERO    = S_BASE + 11;
  localparam int unsigned OUT_ROW = 2 * (S_BASE + 12);

  if (OUT_ROW >= ROWS) begin : g_size_check
    $error("bnn_sequencer: NMAX too large for ROWS");
  end

  typedef logic [AW-1:0] row_t;
  typedef logic [SW-1:0] slot_t;

  // ------------------------------------------------------------------
  // Routine table: every routine is a short list of gates over a small
  // register file RF of row addresses.
  typedef enum logic [2:0] {R_XNOR, R_HADD, R_FADD, R_BORROW, R_SIGN, R_COPY} rtn_e;
  typedef enum logic [3:0] {D_S0, D_S1, D_S2, D_S3, D_S4, D_S5, D_S6,
                            D_D0, D_D1, D_OUT} dsel_e;
  typedef struct packed {
    gate_e       gate;
    logic [3:0]  a, b, c;
    logic [1:0]  nin;
    logic [3:0]  dreg;
    dsel_e       dsel;
  } step_t;

  function automatic step_t mk(gate_e g, logic [3:0] a, b, c, logic [1:0] n, logic [3:0] d, dsel_e s);
    step_t t;
    t.gate = g; t.a = a; t.b = b; t.c = c; t.nin = n; t.dreg = d; t.dsel = s;
    return t;
  endfunction

  function automatic int unsigned rtn_len(rtn_e r);
    case (r)
      R_XNOR, R_HADD, R_BORROW: return 5;
      R_FADD:                   return 9;
      default:                  return 1;
    endcase
  endfunction

  function automatic step_t rtn_step(rtn_e r, int unsigned k);
    case (r)
      R_XNOR: case (k)      // RF0 = x, RF1 = w
        0: return mk(GATE_NOT,  0, 0, 0, 1, 2, D_S0);
        1: return mk(GATE_NOT,  1, 0, 0, 1, 3, D_S1);
        2: return mk(GATE_NAND, 0, 1, 0, 2, 4, D_S2);
        3: return mk(GATE_NAND, 2, 3, 0, 2, 5, D_S3);
        default: return mk(GATE_NAND, 4, 5, 0, 2, 6, D_D0);
      endcase
      R_HADD: case (k)      // RF0 = a, RF1 = b; D0 = sum, D1 = carry
        0: return mk(GATE_NAND, 0, 1, 0, 2, 2, D_S0);
        1: return mk(GATE_NAND, 0, 2, 0, 2, 3, D_S1);
        2: return mk(GATE_NAND, 1, 2, 0, 2, 4, D_S2);
        3: return mk(GATE_NAND, 3, 4, 0, 2, 5, D_D0);
        default: return mk(GATE_NOT, 2, 0, 0, 1, 6, D_D1);
      endcase
      R_FADD: case (k)      // RF0 = a, RF1 = b, RF7 = carry in
        0: return mk(GATE_NAND, 0, 1, 0, 2, 2, D_S0);
        1: return mk(GATE_NAND, 0, 2, 0, 2, 3, D_S1);
        2: return mk(GATE_NAND, 1, 2, 0, 2, 4, D_S2);
        3: return mk(GATE_NAND, 3, 4, 0, 2, 5, D_S3);
        4: return mk(GATE_NAND, 5, 7, 0, 2, 8, D_S4);
        5: return mk(GATE_NAND, 5, 8, 0, 2, 9, D_S5);
        6: return mk(GATE_NAND, 7, 8, 0, 2, 10, D_S6);
        7: return mk(GATE_NAND, 9, 10, 0, 2, 11, D_D0);
        default: return mk(GATE_NAND, 8, 2, 0, 2, 12, D_D1);
      endcase
      R_BORROW: case (k)    // RF0 = v, RF1 = t, RF7 = borrow in; D1 = borrow out
        0: return mk(GATE_NOT,  0, 0, 0, 1, 2, D_S0);
        1: return mk(GATE_NAND, 2, 1, 0, 2, 3, D_S1);
        2: return mk(GATE_NAND, 2, 7, 0, 2, 4, D_S2);
        3: return mk(GATE_NAND, 1, 7, 0, 2, 5, D_S3);
        default: return mk(GATE_NAND, 3, 4, 5, 3, 6, D_D1);
      endcase
      R_SIGN:  return mk(GATE_NOT,  7, 0, 0, 1, 6, D_OUT);
      default: return mk(GATE_COPY, 0, 0, 0, 1, 6, D_D0);
    endcase
  endfunction

  // ------------------------------------------------------------------
  // State
  typedef enum logic [3:0] {
    L_IDLE, L_BLCLR, L_BLSET, L_ZERO, L_XNOR, L_POP, L_POPNEXT,
    L_CMP, L_SIGN, L_END
  } lstate_e;
  typedef enum logic [2:0] {G_FIXCHK, G_PRESET, G_WLCLR, G_WLSET, G_FIRE} gphase_e;

  lstate_e lst;
  logic         par [2**SW];          // parity of the row holding each slot's value

  // layer FSM
  logic [$clog2(NMAX+1)-1:0] n_in;
  logic [2:0]   shift;
  logic [CW-1:0] c_lo, c_hi;
  int unsigned  idx, cnt, wdt, bitn, pairn;
  slot_t        src, dst;

  // routine engine
  logic         rt_busy;
  rtn_e         rt_id;
  int unsigned  rt_k;
  row_t         rf [16];
  slot_t        d0, d1;

  // gate engine
  logic         ge_busy;
  gphase_e      gph;
  gate_e        ge_gate;           // latched fields of the current step
  logic [1:0]   ge_nin;
  logic [3:0]   ge_dreg;
  row_t         ge_in [3];
  logic         ge_pin;
  row_t         ge_out;
  slot_t        ge_oslot;
  logic         ge_exact;
  gate_e        cur_gate;
  row_t         cur_in [3];
  logic [1:0]   cur_nin;
  row_t         cur_out;
  logic         cur_pin, cur_fix;
  logic [1:0]   fix_j, wk;

  function automatic row_t row_of(slot_t s, logic p);
    return {s, p};
  endfunction

  // Combinational helpers for the three engines.
  logic   fx_found;                 // gate engine: an input needs a parity copy
  logic [1:0] fx_j;                 //   ... the first such input
  step_t  nx_st;                    // routine engine: next step
  logic   nx_pin;                   //   ... its input parity
  slot_t  nx_slot;                  //   ... its output slot
  slot_t  a_s, b_s, o_s;            // layer FSM: popcount operand slots
  int     vi;                       // layer FSM: P bit feeding comparand bit idx
  slot_t  vs;

  always_comb begin
    fx_found = 1'b0;
    fx_j     = '0;
    for (int j = 2; j >= 0; j--) begin
      if (j < int'(ge_nin) && ge_in[j][0] != ge_pin) begin
        fx_found = 1'b1;
        fx_j     = 2'(j);
      end
    end
    nx_st  = rtn_step(rt_id, rt_k);
    nx_pin = (nx_st.dsel == D_OUT) ? ~OUT_ROW[0] : rf[nx_st.a][0];
    case (nx_st.dsel)
      D_D0:    nx_slot = d0;
      D_D1:    nx_slot = d1;
      default: nx_slot = slot_t'(S_BASE + int'(nx_st.dsel));
    endcase
    a_s = slot_t'(int'(src) + 2 * pairn * wdt + bitn);
    b_s = slot_t'(int'(src) + (2 * pairn + 1) * wdt + bitn);
    o_s = slot_t'(int'(dst) + pairn * (wdt + 1) + bitn);
    vi  = int'(idx) - 1 + int'(shift);
    vs  = slot_t'(int'(src) + vi);
  end


  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      lst      <= L_IDLE;
      busy_o   <= 1'b0;
      done_o   <= 1'b0;
      valid_o  <= 1'b0;
      ctl_o    <= '0;
      gates_o  <= '0;
      fixes_o  <= '0;
      cycles_o <= '0;
      rt_busy  <= 1'b0;
      ge_busy  <= 1'b0;
      gph      <= G_FIXCHK;
      n_in     <= '0;
      shift    <= '0;
      c_lo     <= '0;
      c_hi     <= '0;
      idx      <= 0; cnt <= 0; wdt <= 0; bitn <= 0; pairn <= 0;
      src      <= '0; dst <= '0; d0 <= '0; d1 <= '0;
      rt_id    <= R_XNOR; rt_k <= 0;
      for (int i = 0; i < 16; i++) rf[i] <= '0;
      for (int i = 0; i < 2**SW; i++) par[i] <= 1'b0;
      for (int i = 0; i < 3; i++) begin ge_in[i] <= '0; cur_in[i] <= '0; end
      ge_gate <= GATE_NOT; ge_nin <= '0; ge_dreg <= '0; ge_pin <= 1'b0; ge_out <= '0; ge_oslot <= '0; ge_exact <= 1'b0;
      cur_gate <= GATE_NOT; cur_nin <= '0; cur_out <= '0; cur_pin <= 1'b0;
      cur_fix <= 1'b0; fix_j <= '0; wk <= '0;
    end else begin
      valid_o <= 1'b0;
      ctl_o   <= '0;
      done_o  <= 1'b0;
      if (busy_o) cycles_o <= cycles_o + 1;

      if (ge_busy) begin
        // ---------------- gate engine: one tile command per cycle -------
        unique case (gph)
          G_FIXCHK: begin
            if (fx_found) begin
              fix_j     <= fx_j;
              cur_gate  <= GATE_COPY;
              cur_in[0] <= ge_in[fx_j];
              cur_nin   <= 2'd1;
              cur_out   <= row_of(slot_t'(FIX + int'(fx_j)), ~ge_in[fx_j][0]);
              cur_pin   <= ge_in[fx_j][0];
              cur_fix   <= 1'b1;
            end else begin
              cur_gate <= ge_gate;
              cur_in   <= ge_in;
              cur_nin  <= ge_nin;
              cur_out  <= ge_out;
              cur_pin  <= ge_pin;
              cur_fix  <= 1'b0;
            end
            gph <= G_PRESET;
          end
          G_PRESET: begin
            valid_o    <= 1'b1;
            ctl_o.op   <= CMD_PRESET;
            ctl_o.row  <= 16'(cur_out);
            ctl_o.pval <= gate_preset(cur_gate);
            gph <= G_WLCLR;
          end
          G_WLCLR: begin
            valid_o  <= 1'b1;
            ctl_o.op <= CMD_WL_CLEAR;
            wk  <= '0;
            gph <= G_WLSET;
          end
          G_WLSET: begin
            valid_o  <= 1'b1;
            ctl_o.op <= CMD_WL_SET;
            if (wk < cur_nin) begin
              ctl_o.row <= 16'(cur_in[wk]);
              wk <= wk + 1'b1;
            end else begin
              ctl_o.row <= 16'(cur_out);
              gph <= G_FIRE;
            end
          end
          G_FIRE: begin
            valid_o      <= 1'b1;
            ctl_o.fire   <= 1'b1;
            ctl_o.gate   <= cur_gate;
            ctl_o.in_odd <= cur_pin;
            if (cur_fix) begin
              ge_in[fix_j] <= cur_out;
              fixes_o <= fixes_o + 1;
              gph <= G_FIXCHK;
            end else begin
              gates_o <= gates_o + 1;
              rf[ge_dreg] <= cur_out;
              if (!ge_exact) par[ge_oslot] <= cur_out[0];
              ge_busy <= 1'b0;
              gph <= G_FIXCHK;
            end
          end
          default: gph <= G_FIXCHK;
        endcase

      end else if (rt_busy) begin
        // ---------------- routine engine: launch the next gate ----------
        if (rt_k == rtn_len(rt_id)) begin
          rt_busy <= 1'b0;
        end else begin
          ge_gate  <= nx_st.gate;
          ge_nin   <= nx_st.nin;
          ge_dreg  <= nx_st.dreg;
          ge_in[0] <= rf[nx_st.a];
          ge_in[1] <= rf[nx_st.b];
          ge_in[2] <= rf[nx_st.c];
          ge_exact <= (nx_st.dsel == D_OUT);
          ge_oslot <= nx_slot;
          ge_out   <= (nx_st.dsel == D_OUT) ? row_t'(OUT_ROW) : row_of(nx_slot, ~nx_pin);
          ge_pin   <= nx_pin;
          ge_busy  <= 1'b1;
          rt_k     <= rt_k + 1;
        end

      end else begin
        // ---------------- layer FSM --------------------------------------
        unique case (lst)
          L_IDLE: if (start_i) begin
            n_in    <= n_in_i;
            shift   <= bn_shift_i;
            c_lo    <= col_lo_i;
            c_hi    <= col_hi_i;
            busy_o  <= 1'b1;
            gates_o <= '0;
            fixes_o <= '0;
            cycles_o<= '0;
            lst     <= L_BLCLR;
          end
          L_BLCLR: begin
            valid_o  <= 1'b1;
            ctl_o.op <= CMD_BL_CLEAR;
            lst <= L_BLSET;
          end
          L_BLSET: begin
            valid_o     <= 1'b1;
            ctl_o.op    <= CMD_BL_RANGE;
            ctl_o.col_lo<= 16'(c_lo);
            ctl_o.col_hi<= 16'(c_hi);
            lst <= L_ZERO;
          end
          L_ZERO: begin
            valid_o    <= 1'b1;
            ctl_o.op   <= CMD_PRESET;
            ctl_o.row  <= 16'(2 * ZERO);
            ctl_o.pval <= 1'b0;
            par[ZERO]  <= 1'b0;
            idx <= 0;
            lst <= L_XNOR;
          end
          L_XNOR: begin
            if (idx == int'(n_in)) begin
              cnt <= int'(n_in); wdt <= 1;
              src <= slot_t'(A_BASE); dst <= slot_t'(B_BASE);
              pairn <= 0; bitn <= 0;
              lst <= L_POP;
            end else begin
              rf[0] <= row_of(slot_t'(A_BASE + idx), 1'b0);
              rf[1] <= row_of(slot_t'(W_BASE + idx), 1'b0);
              d0    <= slot_t'(A_BASE + idx);
              rt_id <= R_XNOR; rt_k <= 0; rt_busy <= 1'b1;
              idx   <= idx + 1;
            end
          end
          L_POP: begin
            // one routine (one adder bit or one carried bit) per visit
            if (cnt <= 1) begin
              idx <= 0;
              lst <= L_CMP;
            end else if (pairn < cnt / 2) begin
              rf[0] <= row_of(a_s, par[a_s]);
              rf[1] <= row_of(b_s, par[b_s]);
              rf[7] <= row_of(slot_t'(CARRY), par[CARRY]);
              d0    <= o_s;
              d1    <= (bitn == wdt - 1) ? slot_t'(int'(o_s) + 1) : slot_t'(CARRY);
              rt_id <= (bitn == 0) ? R_HADD : R_FADD;
              rt_k <= 0; rt_busy <= 1'b1;
              if (bitn == wdt - 1) begin bitn <= 0; pairn <= pairn + 1; end
              else bitn <= bitn + 1;
            end else if (cnt % 2 == 1 && bitn < wdt) begin
              // carry the odd operand over: copy its bits
              rf[0] <= row_of(a_s, par[a_s]);
              d0    <= o_s;
              rt_id <= R_COPY; rt_k <= 0; rt_busy <= 1'b1;
              bitn  <= bitn + 1;
            end else if (cnt % 2 == 1 && bitn == wdt) begin
              // widen it with a 0 in its new top bit
              valid_o    <= 1'b1;
              ctl_o.op   <= CMD_PRESET;
              ctl_o.row  <= 16'(row_of(o_s, 1'b0));
              ctl_o.pval <= 1'b0;
              par[o_s]   <= 1'b0;
              bitn <= bitn + 1;
            end else begin
              lst <= L_POPNEXT;
            end
          end
          L_POPNEXT: begin
            cnt   <= (cnt + 1) / 2;
            wdt   <= wdt + 1;
            src   <= dst;
            dst   <= src;
            pairn <= 0;
            bitn  <= 0;
            lst   <= L_POP;
          end
          L_CMP: begin
            if (idx == TW) begin
              rf[7] <= row_of(slot_t'(CARRY), par[CARRY]);
              rt_id <= R_SIGN; rt_k <= 0; rt_busy <= 1'b1;
              lst   <= L_SIGN;
            end else begin
              if (vi >= 0 && vi < int'(wdt)) rf[0] <= row_of(vs, par[vs]);
              else                           rf[0] <= row_of(slot_t'(ZERO), 1'b0);
              rf[1] <= row_of(slot_t'(T_BASE + idx), 1'b0);
              rf[7] <= (idx == 0) ? row_of(slot_t'(ZERO), 1'b0)
                                  : row_of(slot_t'(CARRY), par[CARRY]);
              d1    <= slot_t'(CARRY);
              rt_id <= R_BORROW; rt_k <= 0; rt_busy <= 1'b1;
              idx   <= idx + 1;
            end
          end
          L_SIGN: begin
            valid_o  <= 1'b1;
            ctl_o.op <= CMD_WL_CLEAR;
            lst <= L_END;
          end
          L_END: begin
            busy_o <= 1'b0;
            done_o <= 1'b1;
            lst    <= L_IDLE;
          end
          default: lst <= L_IDLE;
        endcase
      end
    end
  end

endmodule
