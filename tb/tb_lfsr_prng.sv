// tb_lfsr_prng: checks the PRNG against an independent model built from
// the two polynomials, checks the output balance over many steps.
module tb_lfsr_prng;
  localparam int LEN = 256;
  logic clk = 0, rst_n = 0, step = 0;
  logic [LEN-1:0] prn;
  int checks = 0, failures = 0;

  lfsr_prng #(.LEN(LEN)) dut (.clk, .rst_n, .step, .prn);

  always #5 clk = ~clk;

  // reference model
  logic [16:0] ra; logic [17:0] rb;
  bit ca[LEN], cb[LEN];
  function automatic void ref_step();
    bit oa, ob;
    oa = ra[16]; ob = rb[17];
    ra = {ra[15:0], ra[16] ^ ra[2]};
    rb = {rb[16:0], rb[17] ^ rb[6]};
    for (int k = LEN-1; k > 0; k--) ca[k] = ca[k-1];
    ca[0] = oa;
    for (int k = 0; k < LEN-1; k++) cb[k] = cb[k+1];
    cb[LEN-1] = ob;
  endfunction

  initial begin
    #200000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int ones;
    ra = 17'h1ACE1; rb = 18'h2B00B;
    foreach (ca[k]) begin ca[k] = 0; cb[k] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    ones = 0;
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk); step = ($urandom_range(0, 3) != 0);
      @(posedge clk); #1;
      if (step) ref_step();
      for (int k = 0; k < LEN; k++) begin
        checks++;
        if (prn[k] != (ca[k] ^ cb[k])) begin
          failures++;
          if (failures < 5) $display("mismatch step %0d line %0d", n, k);
        end
      end
      if (n >= 600) ones += $countones(prn);
    end
    // balance: fraction of ones within 45..55 %
    checks++;
    if (ones < (1400*LEN*45)/100 || ones > (1400*LEN*55)/100) begin
      failures++; $display("unbalanced: %0d ones", ones);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
