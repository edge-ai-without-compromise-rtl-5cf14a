// cim_core: one compute-in-memory core: a 256x256 transposable
// neurosynaptic array with 256 neurons, the BL/WL and SL register files,
// the BL/WL and SL driver logic, the LFSR pseudorandom generator on the
// SL side, the delay-line WL pulse generator and the controller
// (the core block diagram of the paper).
//
// Host access (bus): one request per cycle to the register file of the
// chosen side: write one word, or clear the whole side. Reads are
// combinational on rdata for the addressed word. The host must only
// access the registers while the core is not busy (asserted).
// Commands: cmd_valid/cmd_ready handshake; done pulses when the command
// has finished and its results are in the registers.
// Analog levels that come from the test board are inputs as codes:
// v_read (MVM input amplitude), v_decr (charge-decrement step), v_lfsr
// (noise amplitude), v_prog (SET/RESET amplitude), and wl_width_ns sets
// the WL pulse width. read_g is the conductance of the last READ.
// Power: with pwr_en low the controller is off and both register files
// are cleared (the RRAM conductances are non-volatile and stay).
// The composition follows the paper's figure; the bus, the clearing on
// power-down and the command format are this design's choices.
module cim_core
  import neurram_pkg::*;
#(
  parameter int unsigned D       = 16,
  parameter int unsigned N       = D * D,
  parameter int unsigned WL_WAIT = 2,
  parameter int unsigned G_INIT  = 1
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           pwr_en,
  input  logic           cmd_valid,
  input  cmd_t           cmd_in,
  output logic           cmd_ready,
  output logic           done,
  output logic           busy,
  output logic           clk_en,
  input  bus_req_t       bus,
  output logic [REG_W-1:0] rdata,
  input  logic [7:0]     v_read,
  input  logic [7:0]     v_decr,
  input  logic [7:0]     v_lfsr,
  input  logic [7:0]     v_prog,
  input  logic [3:0]     wl_width_ns,
  output logic [G_W-1:0] read_g
);
  localparam int unsigned AW = $clog2(N);

  cmd_t  cmd;
  ctrl_t ctrl;
  logic  all_done, settling, lfsr_step, pwr_on, wl_pulse;
  logic [N-1:0][REG_W-1:0] bl_q, sl_q, bl_word, sl_word;
  logic [REG_W-1:0] bl_rdata, sl_rdata;
  logic [N-1:0] prn, wl_en, wl_unused;
  drive_e [N-1:0] drv_bl, drv_sl;
  logic [N-1:0] all_lines;
  assign all_lines = '1;

  core_controller #(.WL_WAIT(WL_WAIT)) u_ctrl (
    .clk, .rst_n, .pwr_en, .cmd_valid, .cmd_in, .cmd_ready, .cmd, .ctrl,
    .all_done, .settling, .lfsr_step, .done, .busy, .pwr_on, .clk_en
  );

  reg_file #(.N(N)) u_bl_regs (
    .clk, .rst_n,
    .clear_all(!pwr_on || (bus.clr && bus.side == SIDE_BL)),
    .ra_we(bus.we && bus.side == SIDE_BL), .ra_addr(bus.addr[AW-1:0]),
    .ra_wdata(bus.wdata), .ra_rdata(bl_rdata),
    .nw_en(ctrl.writeback && cmd.out_side == SIDE_BL), .nw_mask(all_lines),
    .nw_data(bl_word), .q(bl_q)
  );

  reg_file #(.N(N)) u_sl_regs (
    .clk, .rst_n,
    .clear_all(!pwr_on || (bus.clr && bus.side == SIDE_SL)),
    .ra_we(bus.we && bus.side == SIDE_SL), .ra_addr(bus.addr[AW-1:0]),
    .ra_wdata(bus.wdata), .ra_rdata(sl_rdata),
    .nw_en(ctrl.writeback && cmd.out_side == SIDE_SL), .nw_mask(all_lines),
    .nw_data(sl_word), .q(sl_q)
  );

  assign rdata = (bus.side == SIDE_BL) ? bl_rdata : sl_rdata;

  lfsr_prng #(.LEN(N)) u_lfsr (.clk, .rst_n, .step(lfsr_step), .prn);

  line_driver #(.N(N), .SIDE(SIDE_BL)) u_bl_drv (
    .clk, .rst_n, .cmd, .ctrl, .regs(bl_q), .prn, .drv(drv_bl), .wl_en(wl_en)
  );
  line_driver #(.N(N), .SIDE(SIDE_SL)) u_sl_drv (
    .clk, .rst_n, .cmd, .ctrl, .regs(sl_q), .prn, .drv(drv_sl), .wl_en(wl_unused)
  );

  pulse_gen u_pulse (.trig(ctrl.wl_fire), .width_ns(wl_width_ns), .pulse_o(wl_pulse));

  tnsa #(.D(D), .N(N), .G_INIT(G_INIT)) u_tnsa (
    .clk, .rst_n, .cmd, .ctrl, .v_read, .v_decr, .v_lfsr, .v_prog,
    .drv_bl, .drv_sl, .wl_en, .wl_pulse, .bl_word, .sl_word, .all_done, .settling, .read_g
  );

  a_no_access_while_busy: assert property (@(posedge clk) disable iff (!rst_n)
      busy |-> !(bus.we || bus.clr))
    else $error("register access while the core is busy");
endmodule
