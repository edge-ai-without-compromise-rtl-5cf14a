// tnsa: the transposable neurosynaptic array. D x D corelets, each with
// D x D RRAM cells and one neuron, share horizontal BLs/WLs and vertical
// SLs, giving an N x N array (N = D*D = 256) with N neurons.
//
// The neuron of corelet (i, j), numbered k = D*i + j here, is switched to
// BL D*i + j and to SL D*j + i, as in the paper, so that every BL and
// every SL reaches exactly one neuron without neurons at both array
// ends. Through the same two switches a neuron takes its input and sends
// its digital output:
//   input  : from the SL when the inputs are driven on the BLs (BL-to-SL
//            or BL-to-BL MVM), from the BL when they are driven on the
//            SLs (SL-to-BL MVM); in neuron-test mode from the driven side
//            itself; during noise injection always from the SL, whose
//            drivers carry the LFSR levels (this design's choice)
//   output : the same word is offered to the BL register of row D*i + j
//            and the SL register of column D*j + i; the core writes the
//            side the command names. Forward MVM therefore writes SL
//            registers and recurrent MVM writes BL registers.
// It contains the RRAM array and neuron models and the digital readout.
//
// Timing: as its parts; the switches are combinational.
module tnsa
  import neurram_pkg::*;
#(
  parameter int unsigned D      = 16,
  parameter int unsigned N      = D * D,
  parameter int unsigned G_INIT = 1
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  cmd_t                    cmd,
  input  ctrl_t                   ctrl,
  input  logic [7:0]              v_read,
  input  logic [7:0]              v_decr,
  input  logic [7:0]              v_lfsr,
  input  logic [7:0]              v_prog,
  input  drive_e [N-1:0]          drv_bl,
  input  drive_e [N-1:0]          drv_sl,
  input  logic [N-1:0]            wl_en,
  input  logic                    wl_pulse,
  output logic [N-1:0][REG_W-1:0] bl_word,
  output logic [N-1:0][REG_W-1:0] sl_word,
  output logic                    all_done,
  output logic                    settling,
  output logic [G_W-1:0]          read_g
);
  logic signed [N-1:0][V_W-1:0] v_bl, v_sl, v_in;
  logic [N-1:0] sign, cmp, decr_en;
  logic [N-1:0][REG_W-1:0] word;

  rram_array #(.N(N), .G_INIT(G_INIT)) u_array (
    .clk, .mode(cmd.mode), .prog_op(cmd.prog_op), .prog_pulse(ctrl.prog_pulse),
    .v_prog, .v_read, .v_lfsr, .drv_bl, .drv_sl, .wl_en, .wl_pulse,
    .v_bl, .v_sl, .settling, .read_g
  );

  // SL index of neuron k = D*i + j is D*j + i
  function automatic int unsigned sl_of(int unsigned k);
    return (k % D) * D + (k / D);
  endfunction

  logic sense_sl;
  always_comb begin
    if (ctrl.noise)                sense_sl = 1'b1;
    else if (cmd.mode == MODE_NTEST) sense_sl = (cmd.in_side == SIDE_SL);
    else                           sense_sl = (cmd.in_side == SIDE_BL);
    for (int unsigned k = 0; k < N; k++)
      v_in[k] = sense_sl ? v_sl[sl_of(k)] : v_bl[k];
  end

  neuron_array #(.N(N)) u_neurons (
    .clk, .rst_n, .ctrl, .v_decr, .v_in, .decr_en, .sign, .cmp
  );

  neuron_readout #(.N(N)) u_readout (
    .clk, .rst_n, .start(ctrl.out_start), .step(ctrl.decr && ctrl.compare),
    .act(cmd.act), .n_max(cmd.n_max), .sign, .cmp, .decr_en, .all_done, .word
  );

  always_comb begin
    for (int unsigned k = 0; k < N; k++) begin
      bl_word[k]        = word[k];
      sl_word[sl_of(k)] = word[k];
    end
  end
endmodule
