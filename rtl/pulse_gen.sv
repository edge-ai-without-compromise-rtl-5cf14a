// pulse_gen: behavioural model of the core's delay-line pulse generator,
// which sets how long the word-lines stay on during an MVM input pulse.
// It stands for an analog delay line and uses simulation delays, so it
// is not synthesizable.
//
// A rising edge on trig starts a pulse on pulse_o whose width is
// width_ns nanoseconds, limited to the 1 ns .. 10 ns range the paper
// gives for the delay line. The 4-bit width code in whole nanoseconds is
// this design's choice; the paper gives only the range. A new trigger
// while a pulse is running restarts it.
//
// Lint notes: the blocking assignments inside the edge-triggered process
// and the delay whose length is only known at run time are how a delay
// line is modelled; the model is timing behaviour, not a flip-flop.
module pulse_gen #(
  parameter int unsigned MIN_NS = 1,
  parameter int unsigned MAX_NS = 10
) (
  input  logic       trig,
  input  logic [3:0] width_ns,
  output logic       pulse_o
);
  timeunit 1ns; timeprecision 1ps;

  int unsigned w;
  always_comb begin
    w = int'(width_ns);
    if (w < MIN_NS) w = MIN_NS;
    if (w > MAX_NS) w = MAX_NS;
  end

  int unsigned gen;   // generation counter, lets a retrigger win
  initial begin pulse_o = 1'b0; gen = 0; end

  always @(posedge trig) begin
    int unsigned my;
    gen++;
    my = gen;
    pulse_o = 1'b1;
    #(w * 1ns);
    if (my == gen) pulse_o = 1'b0;
  end
endmodule
