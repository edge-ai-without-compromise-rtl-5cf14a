// core_controller: the per-core controller. It accepts one command at a
// time and generates the phase signals (ctrl) for the line drivers, the
// WL pulse generator, the neurons and the register write-back.
//
// MVM and neuron-test commands run the paper's three phases:
//   INIT    lines, C_sample to V_ref, C_integ discharged           1 cycle
//   input   for each magnitude bit b, most significant first:
//             LOAD  pulse codes for bit b into the drivers         1 cycle
//             FIRE  inputs driven, WL pulse fired, then wait      F
//                   WL_WAIT cycles and until the array has settled
//             2^b x (SAMPLE, INTEG)                                2^(b+1)
//           so n-bit signed inputs take n-1 pulses and 2^(n-1)-1
//           sample/integrate cycles, as in the paper; then
//           noise_cyc x (SAMPLE, INTEG) with the SL drivers at the LFSR
//           levels (the LFSR shifts every cycle while the core is busy, so
//           its two 256-long chains are full of fresh bits by then)
//   output  CMP latch the sign bit                                  1
//           OSTART start the readout                                1
//           while some neuron is still counting (at most n_max):
//             DECR_S, DECR_I, DECR_C  (sample, integrate, compare)  3 per step
//           DECR_S that finds every neuron done                     1
//           WB neuron words into the output-side registers          1
// Programming commands apply one SET/RESET/READ pulse (PROG, 1 cycle).
// done pulses for one cycle when a command ends, back in IDLE.
// An MVM with m magnitude bits, c noise cycles and S decrement steps
// therefore takes 1 + m(1+F) + 2(2^m - 1) + 2c + 2 + 3S + 2 cycles
// from the accepting edge to the edge that ends WB, where F is 1+WL_WAIT
// in neuron-test mode and max(1+WL_WAIT, 2N+2) in MVM mode (the array
// model's settle takes 2N cycles and starts the cycle after the pulse).
// WL_WAIT must be at least 1 so that the array has raised settling
// before the controller looks at it.
//
// Gating: with pwr_en low the controller sits in OFF (the core is power
// gated; pwr_on low tells the core to drop its volatile registers).
// clk_en is high whenever the core needs its clock (a command is waiting
// or running); it is the enable a clock-gating cell would use.
// The phase order follows the paper; the state encoding, one cycle per
// phase, WL_WAIT and the handshake are this design's choices.
module core_controller
  import neurram_pkg::*;
#(
  parameter int unsigned WL_WAIT = 2
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  pwr_en,
  input  logic  cmd_valid,
  input  cmd_t  cmd_in,
  output logic  cmd_ready,
  output cmd_t  cmd,        // command being executed
  output ctrl_t ctrl,
  input  logic  all_done,   // every neuron has finished counting
  input  logic  settling,   // the array is still settling after a WL pulse
  output logic  lfsr_step,
  output logic  done,
  output logic  busy,
  output logic  pwr_on,
  output logic  clk_en
);
  typedef enum logic [3:0] {
    S_OFF, S_IDLE, S_INIT, S_LOAD, S_FIRE, S_SAMP, S_INTEG, S_NSAMP, S_NINTEG,
    S_CMP, S_OSTART, S_DECR_S, S_DECR_I, S_DECR_C, S_WB, S_PROG
  } state_e;

  if (WL_WAIT < 1 || WL_WAIT > 15) begin : g_bad_wait
    $error("WL_WAIT must be 1..15");
  end

  state_e      state;
  logic [2:0]  bit_idx;
  logic [6:0]  rep;      // sample/integrate repetitions left for this bit
  logic [3:0]  wait_cnt;
  logic [3:0]  noise_left;

  function automatic logic [2:0] top_bit(logic [2:0] mag_bits);
    return (mag_bits == 3'd0) ? 3'd0 : mag_bits - 3'd1;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_OFF;
      cmd        <= '0;
      bit_idx    <= '0;
      rep        <= '0;
      wait_cnt   <= '0;
      noise_left <= '0;
      done       <= 1'b0;
    end else begin
      done <= 1'b0;
      if (!pwr_en) begin
        state <= S_OFF;
      end else begin
        unique case (state)
          S_OFF:  state <= S_IDLE;
          S_IDLE: if (cmd_valid) begin
            cmd <= cmd_in;
            if (cmd_in.mode == MODE_PROG) state <= S_PROG;
            else begin
              state   <= S_INIT;
              bit_idx <= top_bit(cmd_in.in_mag_bits);
            end
          end
          S_PROG: begin state <= S_IDLE; done <= 1'b1; end
          S_INIT: state <= S_LOAD;
          S_LOAD: begin state <= S_FIRE; wait_cnt <= 4'(WL_WAIT); end
          S_FIRE: begin
            if (wait_cnt == 0) begin
              if (!settling) begin
                state <= S_SAMP;
                rep   <= 7'(1 << bit_idx);
              end
            end else wait_cnt <= wait_cnt - 4'd1;
          end
          S_SAMP: state <= S_INTEG;
          S_INTEG: begin
            if (rep > 7'd1) begin
              rep   <= rep - 7'd1;
              state <= S_SAMP;
            end else if (bit_idx != 0) begin
              bit_idx <= bit_idx - 3'd1;
              state   <= S_LOAD;
            end else if (cmd.noise_cyc != 0) begin
              noise_left <= cmd.noise_cyc;
              state      <= S_NSAMP;
            end else state <= S_CMP;
          end
          S_NSAMP: state <= S_NINTEG;
          S_NINTEG: begin
            if (noise_left > 4'd1) begin
              noise_left <= noise_left - 4'd1;
              state      <= S_NSAMP;
            end else state <= S_CMP;
          end
          S_CMP:    state <= S_OSTART;
          S_OSTART: state <= S_DECR_S;
          S_DECR_S: state <= all_done ? S_WB : S_DECR_I;
          S_DECR_I: state <= S_DECR_C;
          S_DECR_C: state <= S_DECR_S;
          S_WB:     begin state <= S_IDLE; done <= 1'b1; end
          default:  state <= S_IDLE;
        endcase
      end
    end
  end

  // phase signals
  always_comb begin
    ctrl = '0;
    ctrl.bit_idx = bit_idx;
    unique case (state)
      S_INIT:   ctrl.precharge  = 1'b1;
      S_LOAD:   ctrl.load_pulse = 1'b1;
      S_FIRE: begin
        ctrl.drive_in = 1'b1;
        ctrl.wl_fire  = (wait_cnt == 4'(WL_WAIT));
      end
      S_SAMP:   begin ctrl.drive_in = 1'b1; ctrl.sample = 1'b1; end
      S_INTEG:  begin ctrl.drive_in = 1'b1; ctrl.integ  = 1'b1; end
      S_NSAMP:  begin ctrl.noise = 1'b1; ctrl.sample = 1'b1; end
      S_NINTEG: begin ctrl.noise = 1'b1; ctrl.integ  = 1'b1; end
      S_CMP:    ctrl.compare   = 1'b1;
      S_OSTART: ctrl.out_start = 1'b1;
      S_DECR_S: begin ctrl.decr = !all_done; ctrl.sample  = !all_done; end
      S_DECR_I: begin ctrl.decr = 1'b1; ctrl.integ   = 1'b1; end
      S_DECR_C: begin ctrl.decr = 1'b1; ctrl.compare = 1'b1; end
      S_WB:     ctrl.writeback  = 1'b1;
      S_PROG:   ctrl.prog_pulse = 1'b1;
      default: ;
    endcase
  end

  assign lfsr_step = busy;
  assign cmd_ready = (state == S_IDLE);
  assign busy      = !(state inside {S_IDLE, S_OFF});
  assign pwr_on    = (state != S_OFF);
  assign clk_en    = busy || (cmd_valid && state == S_IDLE);

  // a command must stay stable while it waits to be accepted
  a_cmd_stable: assert property (@(posedge clk) disable iff (!rst_n)
      (cmd_valid && !cmd_ready && pwr_en && state != S_OFF) |=> $stable(cmd_in) || !cmd_valid)
    else $error("command changed while waiting");
endmodule
