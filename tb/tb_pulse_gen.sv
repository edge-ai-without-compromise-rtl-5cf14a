// tb_pulse_gen: measures the output pulse width for every width code,
// including codes outside the 1..10 ns range, which must be clamped.
module tb_pulse_gen;
  timeunit 1ns; timeprecision 1ps;
  logic trig = 0; logic [3:0] width_ns = 0; logic pulse_o;
  int checks = 0, failures = 0;
  realtime t_rise, t_fall;

  pulse_gen dut (.trig, .width_ns, .pulse_o);

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  always @(posedge pulse_o) t_rise = $realtime;
  always @(negedge pulse_o) t_fall = $realtime;

  initial begin
    #10;
    for (int c = 0; c < 16; c++) begin
      int expw;
      expw = (c < 1) ? 1 : (c > 10) ? 10 : c;
      width_ns = 4'(c);
      #5 trig = 1; #2 trig = 0;
      #20;
      checks++;
      if (t_fall - t_rise < expw - 0.01 || t_fall - t_rise > expw + 0.01) begin
        failures++;
        $display("code %0d width %0t expected %0d ns", c, t_fall - t_rise, expw);
      end
      checks++;
      if (pulse_o !== 1'b0) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
