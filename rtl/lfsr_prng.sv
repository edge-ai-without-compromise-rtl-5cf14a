// lfsr_prng: pseudorandom bit source for probabilistic sampling.
//
// Two Fibonacci LFSRs feed two LEN-long shift chains that move in opposite
// directions: chain A enters at line 0 and moves towards line LEN-1, chain
// B enters at line LEN-1 and moves towards line 0. Bit k of the output is
// chain_a[k] XOR chain_b[k], which decorrelates neighbouring lines.
// LFSR A is 17 bits with feedback from stages 17 and 3, LFSR B is 18 bits
// with feedback from stages 18 and 7 (x^17+x^3+1 and x^18+x^7+1, both
// maximal length). The chain structure, the XOR of the chains and the
// stage numbers 17/3 and 18/7 follow the paper's LFSR figure; the XOR
// feedback gate, the seeds and the one-step-per-enable timing are this
// design's choices.
//
// Interface: step advances both LFSRs and both chains by one position in
// the same clock; prn is registered and valid from the cycle after reset.
module lfsr_prng #(
  parameter int unsigned LEN    = 256,
  parameter logic [16:0] SEED_A = 17'h1ACE1,
  parameter logic [17:0] SEED_B = 18'h2B00B
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           step,
  output logic [LEN-1:0] prn
);
  logic [16:0]    lfsr_a;
  logic [17:0]    lfsr_b;
  logic [LEN-1:0] chain_a, chain_b;

  // stage n of the figure is bit n-1
  logic fb_a, fb_b;
  assign fb_a = lfsr_a[16] ^ lfsr_a[2];
  assign fb_b = lfsr_b[17] ^ lfsr_b[6];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      lfsr_a  <= SEED_A;
      lfsr_b  <= SEED_B;
      chain_a <= '0;
      chain_b <= '0;
    end else if (step) begin
      lfsr_a  <= {lfsr_a[15:0], fb_a};
      lfsr_b  <= {lfsr_b[16:0], fb_b};
      chain_a <= {chain_a[LEN-2:0], lfsr_a[16]};  // moves towards LEN-1
      chain_b <= {lfsr_b[17], chain_b[LEN-1:1]};  // moves towards 0
    end
  end

  assign prn = chain_a ^ chain_b;

  initial begin
    assert (SEED_A != '0 && SEED_B != '0) else $error("LFSR seeds must be non-zero");
  end
endmodule
