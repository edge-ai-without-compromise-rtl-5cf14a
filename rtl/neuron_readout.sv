// neuron_readout: the digital side of the neurons' output phase. For
// every neuron it counts charge-decrement steps until the comparator
// flips, turns the count into the output word for the selected
// activation function, and tells the controller when every neuron is
// finished so that the decrement phase can stop early.
//
// The paper's scheme: after the sign bit is latched, charge is removed
// from C_integ one V_decr step at a time until the comparator output
// flips; the number of steps is the magnitude. At most n_max steps are
// made (N_max = 128 gives 1 sign + 7 magnitude bits; this design
// saturates the magnitude at 127). The phase stops early when all
// neurons have flipped.
//   ACT_LINEAR   all neurons decrement; word = {sign, steps}
//   ACT_RELU     only neurons with sign bit 1 decrement; others give 0
//   ACT_TANH     the counter advances every step up to 35, then every 2
//                steps, from 40 every 3 steps, from 43 every 4 steps
//                (the paper's example; it ends its list with "etc.", and
//                this design keeps 4 steps per count beyond 43)
//   ACT_SIGMOID  tanh count y (signed) plus M, the count n_max steps give,
//                as an unsigned word in 0..2M. The paper then divides by
//                2M to reach [0,1]; that constant scale is left to the
//                host, like the weight normalisation factor.
// Each neuron has a step counter (LINEAR/RELU magnitude, and the n_max
// limit), and a count register with a 2-bit sub-step counter that
// advances the count every 1, 2, 3 or 4 steps depending on the count
// already reached (TANH/SIGMOID). M is the closed form of the same
// schedule evaluated at n_max.
//
// Timing: start (the cycle after the sign is latched) initialises the
// per-neuron state; each cycle with step high evaluates one decrement
// step from cmp. all_done is combinational. word is combinational from
// the state and is written back by the core.
module neuron_readout
  import neurram_pkg::*;
#(
  parameter int unsigned N = 256
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      start,
  input  logic                      step,
  input  act_e                      act,
  input  logic [7:0]                n_max,
  input  logic [N-1:0]              sign,
  input  logic [N-1:0]              cmp,
  output logic [N-1:0]              decr_en,
  output logic                      all_done,
  output logic [N-1:0][REG_W-1:0]   word
);
  logic [N-1:0]      active;
  logic [N-1:0][7:0] steps;
  logic [N-1:0][7:0] cnt;     // schedule counter
  logic [N-1:0][1:0] sub;     // steps since the last count, minus one

  // steps per count at count value c, minus one
  function automatic logic [1:0] interval_m1(logic [7:0] c);
    if (c < 8'd35)      return 2'd0;
    else if (c < 8'd40) return 2'd1;
    else if (c < 8'd43) return 2'd2;
    else                return 2'd3;
  endfunction

  // counter value after s decrement steps under the sigmoid/tanh schedule
  function automatic int unsigned sched(int unsigned s);
    if (s <= 35)      return s;
    else if (s <= 45) return 35 + (s - 35) / 2;
    else if (s <= 54) return 40 + (s - 45) / 3;
    else              return 43 + (s - 54) / 4;
  endfunction

  function automatic logic [MAG_W-1:0] sat(int unsigned v);
    return (v > (1 << MAG_W) - 1) ? MAG_W'((1 << MAG_W) - 1) : MAG_W'(v);
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active <= '0;
      steps  <= '0;
      cnt    <= '0;
      sub    <= '0;
    end else if (start) begin
      for (int k = 0; k < N; k++) begin
        steps[k]  <= '0;
        cnt[k]    <= '0;
        sub[k]    <= '0;
        active[k] <= (n_max != 0) && (act != ACT_RELU || sign[k]);
      end
    end else if (step) begin
      for (int k = 0; k < N; k++) begin
        if (active[k]) begin
          steps[k] <= steps[k] + 8'd1;
          if (sub[k] >= interval_m1(cnt[k])) begin
            cnt[k] <= cnt[k] + 8'd1;
            sub[k] <= '0;
          end else begin
            sub[k] <= sub[k] + 2'd1;
          end
          if (cmp[k] != sign[k] || steps[k] + 8'd1 >= n_max) active[k] <= 1'b0;
        end
      end
    end
  end

  assign decr_en  = active;
  assign all_done = (active == '0);

  always_comb begin
    int unsigned m, y;
    m = sched(int'(n_max));
    for (int k = 0; k < N; k++) begin
      y = int'(cnt[k]);
      unique case (act)
        ACT_LINEAR:  word[k] = {sign[k], sat(int'(steps[k]))};
        ACT_RELU:    word[k] = sign[k] ? {1'b1, sat(int'(steps[k]))} : '0;
        ACT_TANH:    word[k] = {sign[k], sat(y)};
        default:     word[k] = REG_W'(sign[k] ? m + y : m - y);
      endcase
    end
  end
endmodule
