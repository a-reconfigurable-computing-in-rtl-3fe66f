// cim_macro: top level of the reconfigurable dual-8T SRAM compute-in-memory macro.
//
// The macro computes, for each of C (127) columns, y_c = sum_g W[g][c] * x[g] over up to R
// (256) rows and returns it as an n_o-bit ADC code. Inputs x are unsigned n_i-bit numbers
// (1..7 bits) applied bit-serially; weights are 2, 3 or 4-bit sign-magnitude numbers stored
// in 1, 3 or 7 dual 8T cells of one column. Per input bit the array develops a differential
// bit-line voltage proportional to the bit's partial sum; a charge-sharing accumulator
// (CHA) in every column halves its stored voltage and adds half of the new one, which
// weights the bits binarily in the analog domain, so the ADC runs once per operation rather
// than once per bit. The ADC is a ramp ADC sharing one replica column: the reference ramp
// (V_init = -2^(n_o-1) units, then one unit per cycle for 2^n_o cycles) is compared with every
// column's accumulated voltage by a double-differential sense amplifier (SA), and a ripple
// counter (RCT) per column counts the steps below it.
// Transfer function (ideal): with V_Acc = y_c / 2^n_i in units of one cell discharge,
//   code = min(2^n_o - 1, #{k in 1..2^n_o : k - 2^(n_o-1) < V_Acc}).
//
// Structure (after the paper's block diagram): rwl_driver -> dual8t_array -> cha -> sense_amp
// -> rct per column; cim_ctrl sequences everything; adc_ref_driver gates precharge and word
// lines between the array and ref_column. The reference passes through the two voltage
// buffers of the paper, which are analog and not part of this RTL: ref_column's output leaves
// the macro on vadc_ref and the buffered value returns on vadc_buf (tie them together for an
// ideal buffer).
//
// Interface:
//   start/cfg_in  start an operation when idle; cfg_in (n_i, n_o, weight mode) is latched.
//   x             input vector, held stable while busy; x[g] feeds weight g of every column.
//   wr_*          weight write while idle: wr_weight[c] (sign, magnitude) of weight wr_group
//                 is encoded for cell wr_slot (0..cells-1) of that weight and written into
//                 row wr_group * cells + wr_slot of every column, one row per cycle.
//   busy/done     busy from the cycle after start; done for one cycle when codes are valid.
//   code[c]       n_o-bit result of column c (upper bits zero), valid from done until the next
//                 start.
// Timing: n_i + 1 + 2^n_o busy cycles, then done (see cim_ctrl).
module cim_macro
  import cim_pkg::*;
#(
  parameter int R = ROWS,
  parameter int C = MAC_COLS
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // operation
  input  logic                 start,
  input  cfg_t                 cfg_in,
  input  logic [NI_MAX-1:0]    x [R],
  output logic                 busy,
  output logic                 done,
  output logic [NO_MAX-1:0]    code [C],
  // weight write
  input  logic                 wr_en,
  input  wmode_e               wr_wmode,
  input  logic [7:0]           wr_group,
  input  logic [2:0]           wr_slot,
  input  logic                 wr_wsign [C],
  input  logic [MAG_W-1:0]     wr_wmag [C],
  // shared reference through the external voltage buffers
  output vadc_t                vadc_ref,
  input  vadc_t                vadc_buf
);

  cfg_t       cfg;
  state_e     state;    // phase of the operation, for debug
  logic       pch, rwl_en, share, cha_rst, sadc, calib, sa_en, rct_clr;
  logic [2:0] bit_idx;
  logic [7:0] step;

  cim_ctrl u_ctrl (
    .clk, .rst_n, .start, .cfg_in, .cfg, .state, .busy, .done,
    .pch, .rwl_en, .bit_idx, .share, .cha_rst, .sadc, .calib, .step, .sa_en, .rct_clr
  );

  // ---- gating of precharge / word lines between MAC array and reference column
  logic         pch_mac, rwl_mac_en, pch_adc;
  logic [R-1:0] ref_rwl;

  adc_ref_driver #(.R(R)) u_refdrv (
    .sadc, .pch, .rwl_en, .calib, .step, .no(cfg.no),
    .pch_mac, .rwl_mac_en, .pch_adc, .ref_rwl
  );

  // ---- input drivers and array
  logic [R-1:0] rwl;

  rwl_driver #(.R(R)) u_rwl (
    .en(rwl_mac_en), .bit_idx, .wmode(cfg.wmode), .x, .rwl
  );

  logic [$clog2(R)-1:0] wr_row;
  cell_t                wr_cells [C];
  vmac_t                vmac [C];
  logic [10:0]          wr_row_full;

  always_comb begin
    case (wr_wmode)
      W3B:     wr_row_full = 11'(wr_group) * 11'd3 + 11'(wr_slot);
      W4B:     wr_row_full = 11'(wr_group) * 11'd7 + 11'(wr_slot);
      default: wr_row_full = 11'(wr_group);
    endcase
  end
  assign wr_row = wr_row_full[$clog2(R)-1:0];

  for (genvar c = 0; c < C; c++) begin : g_wenc
    weight_encoder u_wenc (
      .wmode(wr_wmode), .wsign(wr_wsign[c]), .wmag(wr_wmag[c]), .slot(wr_slot),
      .wcell(wr_cells[c])
    );
  end

  dual8t_array #(.R(R), .C(C)) u_array (
    .clk, .wr_en(wr_en && !busy && wr_row_full < 11'(R)), .wr_row, .wr_data(wr_cells),
    .pch(pch_mac), .rwl, .vmac
  );

  // ---- shared reference column
  ref_column #(.R(R)) u_ref (
    .clk, .rst_n, .pch_adc, .ref_rwl, .vadc(vadc_ref)
  );

  // ---- per-column accumulator, comparator and counter
  for (genvar c = 0; c < C; c++) begin : g_col
    vacc_t vacc;
    logic  von;

    cha u_cha (
      .clk, .rst_acc(cha_rst), .share, .vmac(vmac[c]), .vacc
    );

    sense_amp u_sa (
      .en(sa_en), .vacc, .vadc(vadc_buf), .von
    );

    rct u_rct (
      .clk, .rst_n, .clr(rct_clr), .inc(von), .no(cfg.no), .code(code[c])
    );
  end

endmodule
