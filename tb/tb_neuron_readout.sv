// tb_neuron_readout: gives each neuron an integrated charge, plays the
// charge-decrement process in the testbench (the comparator is computed
// here) and checks the output words of all four activation functions,
// the n_max saturation and the early stop.
module tb_neuron_readout;
  import neurram_pkg::*;
  localparam int N = 32;
  logic clk = 0, rst_n = 0, start = 0, step = 0;
  act_e act; logic [7:0] n_max;
  logic [N-1:0] sign, cmp, decr_en;
  logic all_done;
  logic [N-1:0][REG_W-1:0] word;
  int checks = 0, failures = 0;
  int q[N], q0[N];
  int early_stops = 0;

  neuron_readout #(.N(N)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #20000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  function automatic int sched(int s);
    int c, sub, iv;
    c = 0; sub = 0;
    for (int i = 0; i < s; i++) begin
      iv = (c < 35) ? 1 : (c < 40) ? 2 : (c < 43) ? 3 : 4;
      sub++;
      if (sub >= iv) begin c++; sub = 0; end
    end
    return c;
  endfunction

  initial begin
    int decr, nsteps;
    act = ACT_LINEAR; n_max = 0; sign = '0; cmp = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int it = 0; it < 60; it++) begin
      act = act_e'(it % 4);
      n_max = (it % 5 == 0) ? 8'd128 : 8'($urandom_range(1, 100));
      decr = $urandom_range(1, 10);
      for (int k = 0; k < N; k++) begin
        q[k] = $urandom_range(0, 600) - 300;
        q0[k] = q[k]; sign[k] = q[k] > 0; cmp[k] = sign[k];
      end
      @(negedge clk); start = 1; @(negedge clk); start = 0;
      nsteps = 0;
      while (!all_done) begin
        // the testbench plays the neuron: decrement those enabled
        for (int k = 0; k < N; k++) if (decr_en[k]) q[k] += sign[k] ? -decr : decr;
        for (int k = 0; k < N; k++) cmp[k] = q[k] > 0;
        step = 1; @(negedge clk); step = 0;
        nsteps++;
        if (nsteps > 300) break;
      end
      if (nsteps < n_max) early_stops++;
      // expected words, from the initial charge alone
      begin
        int smax; smax = 0;
        for (int k = 0; k < N; k++) begin
          int s, v, m, y, mag; bit sg; logic [REG_W-1:0] e;
          v = q0[k]; sg = v > 0; s = 0;
          if (n_max != 0 && (act != ACT_RELU || sg))
            do begin
              s++; v += sg ? -decr : decr;
            end while ((v > 0) == sg && s < n_max);
          if (s > smax) smax = s;
          mag = (s > 127) ? 127 : s;
          y = sched(s); m = sched(n_max);
          unique case (act)
            ACT_LINEAR: e = {sg, 7'(mag)};
            ACT_RELU:   e = sg ? {1'b1, 7'(mag)} : 8'h00;
            ACT_TANH:   e = {sg, 7'(y)};
            default:    e = 8'(sg ? m + y : m - y);
          endcase
          checks++;
          if (word[k] !== e) begin
            failures++;
            if (failures < 10) $display("it %0d act %0d k %0d q0 %0d word %h exp %h", it, act, k, q0[k], word[k], e);
          end
        end
        // the phase lasts exactly as long as the slowest neuron
        checks++;
        if (nsteps != smax) begin failures++; $display("steps %0d expected %0d", nsteps, smax); end
      end
    end
    checks++;
    if (early_stops == 0) begin failures++; $display("early stop never happened"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
