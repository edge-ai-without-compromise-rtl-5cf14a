// rram_array: behavioural model of the 256x256 1T1R RRAM array of one
// core, with the bit-line, word-line and source-line capacitances that
// carry the analog MVM result. It stands in for the analog array so that
// the digital core around it can be simulated; it is written so that it
// also elaborates (one row of cells is touched per clock).
//
// Conductances are integer codes, 1 uS per LSB (the paper's g_min is
// 1 uS and g_max 40 uS), stored as one memory word per row. Line voltages
// are signed codes relative to V_ref.
//
// MVM (voltage-mode sensing). While the WL pulse is high every floating
// line settles to the conductance-weighted average of the driven lines it
// meets through cells whose WL is on:
//   SL j :  V_j = sum_r V_r G[r][j] / sum_r G[r][j]   over rows r with WL on
//   BL r :  V_r = sum_c V_c G[r][c] / sum_c G[r][c]   if WL r is on
// (Fig. 2h of the paper and its V_j formula). The paper samples the
// output lines after the WLs are turned off, so the model starts to
// evaluate this at the first rising clock edge after the WL pulse falls
// (MVM mode only). The analog settling is instantaneous in the chip; the
// model spreads the arithmetic over 2N clock cycles and holds `settling`
// high meanwhile, and the controller waits for it:
//   cycles 1..N      row r = cycle-1: read the row once, add its
//                    contribution to every SL's numerator/denominator,
//                    and finish BL r (its whole sum is in this row)
//   cycles N+1..2N   SL c = cycle-N-1: divide
// The drivers hold their levels while the controller waits, so the
// result equals the one-step formula. The value then stays on the
// floating line (its capacitance) until a driver precharges it. A driven
// line simply takes its driver's level every cycle: V_ref +/- V_read,
// V_ref, or V_ref +/- V_LFSR. Divisions truncate towards zero; settling
// is complete whatever the WL pulse width.
//
// Programming. With prog_pulse high in programming mode, the cells of
// the selected row whose SL is at the select voltage receive a SET
// (conductance up) or RESET (down) pulse, or are read. The selected row
// is the lowest row whose WL is on and whose BL is at the select voltage
// (the host selects one row at a time; this model does not program
// several rows with one pulse). The pulse amplitude comes from the board
// (v_prog, 0.1 V per LSB). The device response is this model's own simple
// law, since the paper gives only measured statistics: a SET of amplitude
// A raises G by max(0, A-11) uS (so the paper's first 1.2 V SET pulse
// adds 1 uS and each +0.1 V step one more), a RESET lowers it by
// max(0, A-14) uS (1.5 V start), clamped to 0..2^G_W-1. A READ returns on
// read_g the conductance of the lowest selected column of that row; it
// stands for the board ADC measurement. Conductances start at G_INIT.
//
// Interface and timing: all outputs change on rising clock edges; v_bl
// and v_sl are the line voltages the neurons sample. read_g is valid the
// cycle after the READ pulse.
module rram_array
  import neurram_pkg::*;
#(
  parameter int unsigned N      = 256,
  parameter int unsigned G_INIT = 1
) (
  input  logic                         clk,
  input  mode_e                        mode,
  input  prog_op_e                     prog_op,
  input  logic                         prog_pulse,
  input  logic [7:0]                   v_prog,
  input  logic [7:0]                   v_read,
  input  logic [7:0]                   v_lfsr,
  input  drive_e [N-1:0]               drv_bl,
  input  drive_e [N-1:0]               drv_sl,
  input  logic [N-1:0]                 wl_en,
  input  logic                         wl_pulse,
  output logic signed [N-1:0][V_W-1:0] v_bl,
  output logic signed [N-1:0][V_W-1:0] v_sl,
  output logic                         settling,
  output logic [G_W-1:0]               read_g
);
  localparam int unsigned AW = (N > 1) ? $clog2(N) : 1;
  localparam int unsigned SW = 32;   // sum width

  logic [N-1:0][G_W-1:0] g [N];      // g[row][col]

  initial begin
    for (int r = 0; r < N; r++) g[r] = {N{G_W'(G_INIT)}};
  end

  // a WL pulse that has ended but not yet been evaluated
  logic settle_req, settle_ack;
  always @(negedge wl_pulse) settle_req <= ~settle_req;

  logic                   div_phase;
  logic [AW-1:0]          idx;
  logic signed [SW-1:0]   sl_num [N];
  logic signed [SW-1:0]   sl_den [N];

  function automatic int level(drive_e d, logic [7:0] vr, logic [7:0] vl);
    unique case (d)
      DRV_VPLUS:  return  int'(vr);
      DRV_VMINUS: return -int'(vr);
      DRV_LFSR_P: return  int'(vl);
      DRV_LFSR_M: return -int'(vl);
      default:    return 0;
    endcase
  endfunction

  function automatic logic is_driven(drive_e d);
    return d inside {DRV_VREF, DRV_VPLUS, DRV_VMINUS, DRV_LFSR_P, DRV_LFSR_M};
  endfunction

  // lowest selected row and column for programming
  logic [AW-1:0] prow, pcol;
  logic          prow_ok;
  always_comb begin
    prow = '0; pcol = '0; prow_ok = 1'b0;
    for (int r = N - 1; r >= 0; r--)
      if (wl_en[r] && drv_bl[r] == DRV_WR_SEL) begin prow = AW'(r); prow_ok = 1'b1; end
    for (int c = N - 1; c >= 0; c--)
      if (drv_sl[c] == DRV_WR_SEL) pcol = AW'(c);
  end

  always @(posedge clk) begin
    logic [N-1:0][G_W-1:0] row;
    // driven lines follow their drivers
    for (int c = 0; c < N; c++)
      if (is_driven(drv_sl[c])) v_sl[c] <= V_W'(level(drv_sl[c], v_read, v_lfsr));
    for (int r = 0; r < N; r++)
      if (is_driven(drv_bl[r])) v_bl[r] <= V_W'(level(drv_bl[r], v_read, v_lfsr));

    if (!settling) begin
      if (settle_req != settle_ack) begin
        settle_ack <= settle_req;
        if (mode == MODE_MVM) begin
          settling  <= 1'b1;
          div_phase <= 1'b0;
          idx       <= '0;
          for (int c = 0; c < N; c++) begin sl_num[c] <= '0; sl_den[c] <= '0; end
        end
      end
    end else if (!div_phase) begin
      // one row: SL partial sums, and the whole BL sum of this row
      row = g[idx];
      if (wl_en[idx]) begin
        if (is_driven(drv_bl[idx])) begin
          for (int c = 0; c < N; c++) begin
            sl_num[c] <= sl_num[c] + SW'(level(drv_bl[idx], v_read, v_lfsr) * int'(row[c]));
            sl_den[c] <= sl_den[c] + SW'(row[c]);
          end
        end else begin
          int num, den;
          num = 0; den = 0;
          for (int c = 0; c < N; c++)
            if (is_driven(drv_sl[c])) begin
              num += level(drv_sl[c], v_read, v_lfsr) * int'(row[c]);
              den += int'(row[c]);
            end
          if (den != 0) v_bl[idx] <= V_W'(num / den);
        end
      end
      if (idx == AW'(N - 1)) div_phase <= 1'b1;
      idx <= idx + AW'(1);
    end else begin
      // one SL division per cycle
      if (!is_driven(drv_sl[idx]) && sl_den[idx] != 0)
        v_sl[idx] <= V_W'(sl_num[idx] / sl_den[idx]);
      if (idx == AW'(N - 1)) settling <= 1'b0;
      idx <= idx + AW'(1);
    end

    // programming
    if (mode == MODE_PROG && prog_pulse && prow_ok) begin
      row = g[prow];
      if (prog_op == PROG_READ) read_g <= row[pcol];
      else begin
        for (int c = 0; c < N; c++)
          if (drv_sl[c] == DRV_WR_SEL) begin
            int gn;
            gn = int'(row[c]);
            if (prog_op == PROG_SET) gn += (int'(v_prog) > 11) ? int'(v_prog) - 11 : 0;
            else                     gn -= (int'(v_prog) > 14) ? int'(v_prog) - 14 : 0;
            if (gn < 0) gn = 0;
            if (gn > (1 << G_W) - 1) gn = (1 << G_W) - 1;
            row[c] = G_W'(gn);
          end
        g[prow] <= row;
      end
    end
  end

  initial begin
    v_bl = '0; v_sl = '0; read_g = '0;
    settle_req = 1'b0; settle_ack = 1'b0;
    settling = 1'b0; div_phase = 1'b0; idx = '0;
    for (int c = 0; c < N; c++) begin sl_num[c] = '0; sl_den[c] = '0; end
  end
endmodule
