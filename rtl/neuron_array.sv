// neuron_array: behavioural model of the analog part of N voltage-mode
// neurons (one per corelet). Each neuron is a sampling capacitor
// C_sample, an integration capacitor C_integ and one amplifier that is
// used either as an integrator or as a comparator. Charges are kept as
// signed integers in units of (C_sample x one voltage code); the
// 17 fF / 104 fF capacitor ratio is folded into the codes, so this model
// is linear and exact, with none of the analog non-idealities.
//
// The operations, all controlled by the core controller (ctrl):
//   precharge      C_sample to V_ref (q_s = 0), C_integ discharged (q_i = 0)
//   sample         q_s <= line voltage at the neuron's input switch
//   decr & sample  q_s <= -V_decr if the latched sign is 1, +V_decr if 0,
//                  for neurons whose decr_en is set (0 for the others)
//   integ          q_i <= q_i + q_s   (charge transferred onto C_integ)
//   compare (no decr)  latch the sign bit: 1 when q_i > 0
// cmp is the live comparator output (q_i > 0). The paper's comparator
// gives GND for a positive charge and the output is inverted before it
// is latched, so the latched bit is 1 for a positive integral; this
// model gives that inverted value directly.
//
// Timing: every operation takes effect at the rising clock edge that
// ends the cycle in which its control bit is high.
module neuron_array
  import neurram_pkg::*;
#(
  parameter int unsigned N = 256
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  ctrl_t                        ctrl,
  input  logic [7:0]                   v_decr,
  input  logic signed [N-1:0][V_W-1:0] v_in,
  input  logic [N-1:0]                 decr_en,
  output logic [N-1:0]                 sign,
  output logic [N-1:0]                 cmp
);
  logic signed [Q_W-1:0] q_s [N];
  logic signed [Q_W-1:0] q_i [N];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < N; k++) begin q_s[k] <= '0; q_i[k] <= '0; end
      sign <= '0;
    end else begin
      for (int k = 0; k < N; k++) begin
        if (ctrl.precharge) begin
          q_s[k] <= '0;
          q_i[k] <= '0;
        end else begin
          if (ctrl.sample) begin
            if (ctrl.decr)
              q_s[k] <= !decr_en[k] ? '0
                      : sign[k] ? -Q_W'($signed({1'b0, v_decr}))
                                :  Q_W'($signed({1'b0, v_decr}));
            else
              q_s[k] <= Q_W'($signed(v_in[k]));
          end
          if (ctrl.integ) q_i[k] <= q_i[k] + q_s[k];
        end
        if (ctrl.compare && !ctrl.decr) sign[k] <= (q_i[k] > 0);
      end
    end
  end

  always_comb
    for (int k = 0; k < N; k++) cmp[k] = (q_i[k] > 0);
endmodule
