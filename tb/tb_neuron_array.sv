// tb_neuron_array: random sample/integrate sequences, comparison and
// charge-decrement steps, checked against integer charge bookkeeping
// done here.
module tb_neuron_array;
  import neurram_pkg::*;
  localparam int N = 64;
  logic clk = 0, rst_n = 0;
  ctrl_t ctrl;
  logic [7:0] v_decr;
  logic signed [N-1:0][V_W-1:0] v_in;
  logic [N-1:0] decr_en, sign, cmp;
  int checks = 0, failures = 0;
  longint qs[N], qi[N]; bit sg[N];

  neuron_array #(.N(N)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #10000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic cyc(ctrl_t c);
    @(negedge clk); ctrl = c;
    @(posedge clk); #1;
    for (int k = 0; k < N; k++) begin
      if (c.precharge) begin qs[k] = 0; qi[k] = 0; end
      else begin
        longint nqs; nqs = qs[k];
        if (c.sample) nqs = c.decr ? (!decr_en[k] ? 0 : sg[k] ? -longint'(v_decr) : longint'(v_decr))
                                   : longint'($signed(v_in[k]));
        if (c.integ) qi[k] = qi[k] + qs[k];
        qs[k] = nqs;
      end
      if (c.compare && !c.decr) sg[k] = (qi[k] > 0);
    end
    ctrl = '0;
  endtask

  task automatic check_all();
    for (int k = 0; k < N; k++) begin
      checks += 2;
      if (cmp[k] != (qi[k] > 0)) begin failures++; if (failures < 10) $display("cmp %0d q=%0d", k, qi[k]); end
      if (sign[k] != sg[k]) failures++;
    end
  endtask

  initial begin
    ctrl_t c;
    ctrl = '0; v_decr = 8'd7; decr_en = '0; v_in = '0;
    foreach (qs[k]) begin qs[k] = 0; qi[k] = 0; sg[k] = 0; end
    repeat (2) @(posedge clk); rst_n = 1;
    for (int it = 0; it < 30; it++) begin
      c = '0; c.precharge = 1; cyc(c);
      for (int s = 0; s < 8; s++) begin
        for (int k = 0; k < N; k++) v_in[k] = V_W'($urandom_range(0, 200) - 100);
        c = '0; c.sample = 1; cyc(c);
        c = '0; c.integ = 1; cyc(c);
        check_all();
      end
      c = '0; c.compare = 1; cyc(c);
      check_all();
      v_decr = 8'($urandom_range(20, 150));
      for (int s = 0; s < 20; s++) begin
        for (int k = 0; k < N; k++) decr_en[k] = 1'($urandom);
        c = '0; c.decr = 1; c.sample = 1; cyc(c);
        c = '0; c.decr = 1; c.integ = 1; cyc(c);
        c = '0; c.decr = 1; c.compare = 1; cyc(c);
        check_all();
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
