// line_driver: the WL/BL logic (SIDE = SIDE_BL) or SL logic (SIDE = SIDE_SL)
// that decides, for every line of one side of the array, which pass gate
// of its driver is on.
//
// Each line's driver connects the line to one of several supplies
// (drive_e). In MVM and neuron-test mode an input line is driven to
// V_ref - V_read, V_ref or V_ref + V_read from a 2-bit pulse-code register
// and a one-hot decoder, as the paper describes. The pulse code is loaded
// from the line's register word when the controller asks for the next
// input pulse: for magnitude bit b, code "0" if the bit is 0, otherwise
// "+1" if the sign bit is 1 and "-1" if it is 0 (the paper's rule).
// Lines that will be sensed float, every line is precharged to V_ref in
// the initialisation phase, and on the SL side the noise phase drives
// V_ref +/- V_LFSR according to the pseudorandom bit of that line.
// In programming mode lines whose register is non-zero get the
// write/read select voltage and the others the inhibit voltage.
// The row side also decides the WLs: BL-to-SL MVM turns on rows
// 0..in_len only, SL-to-BL MVM turns on all rows, neuron test keeps
// all WLs at GND, programming turns on the selected row.
// Supply names follow the driver figure; the exact code values, the
// "rows 0..in_len" reading of "WLs within the input vector length" and
// floating idle lines are this design's choices.
//
// Timing: pulse codes are registered on load_pulse; drv and wl_en are
// combinational from the registers and the controller phase.
module line_driver
  import neurram_pkg::*;
#(
  parameter int unsigned N    = 256,
  parameter side_e       SIDE = SIDE_BL
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  cmd_t                    cmd,
  input  ctrl_t                   ctrl,
  input  logic [N-1:0][REG_W-1:0] regs,
  input  logic [N-1:0]            prn,     // used on the SL side only
  output drive_e [N-1:0]          drv,
  output logic [N-1:0]            wl_en    // used on the BL side only
);
  // 2-bit pulse code per line: 00 "0", 01 "+1", 10 "-1"
  logic [N-1:0][1:0] pcode;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) pcode <= '0;
    else if (ctrl.precharge) pcode <= '0;
    else if (ctrl.load_pulse) begin
      for (int k = 0; k < N; k++) begin
        if (!regs[k][ctrl.bit_idx]) pcode[k] <= 2'b00;
        else if (regs[k][REG_W-1])  pcode[k] <= 2'b01;
        else                        pcode[k] <= 2'b10;
      end
    end
  end

  logic is_input;
  assign is_input = (cmd.in_side == SIDE);

  always_comb begin
    for (int k = 0; k < N; k++) begin
      drv[k] = DRV_FLOAT;
      unique case (cmd.mode)
        MODE_MVM, MODE_NTEST: begin
          if (ctrl.precharge) drv[k] = DRV_VREF;
          else if (is_input && ctrl.drive_in) begin
            unique case (pcode[k])
              2'b01:   drv[k] = DRV_VPLUS;
              2'b10:   drv[k] = DRV_VMINUS;
              default: drv[k] = DRV_VREF;
            endcase
          end else if (SIDE == SIDE_SL && ctrl.noise)
            drv[k] = prn[k] ? DRV_LFSR_P : DRV_LFSR_M;
        end
        MODE_PROG: begin
          if (ctrl.prog_pulse) drv[k] = (regs[k] != '0) ? DRV_WR_SEL : DRV_WR_UNS;
        end
        default: drv[k] = DRV_FLOAT;
      endcase
    end
  end

  always_comb begin
    for (int k = 0; k < N; k++) begin
      wl_en[k] = 1'b0;
      if (SIDE == SIDE_BL) begin
        unique case (cmd.mode)
          MODE_MVM:  wl_en[k] = (cmd.in_side == SIDE_SL) || (k <= int'(cmd.in_len));
          MODE_PROG: wl_en[k] = ctrl.prog_pulse && (regs[k] != '0);
          default:   wl_en[k] = 1'b0;
        endcase
      end
    end
  end
endmodule
