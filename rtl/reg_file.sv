// reg_file: the per-line peripheral registers of one side of the array
// (BL/WL registers on the row side, SL registers on the column side).
//
// Each of the N lines owns one REG_W-bit word. A word is an MVM input
// (sign-magnitude, read by the line driver one magnitude bit per pulse),
// an MVM output written back by the neuron of that line, or, in weight
// programming mode, a select flag (non-zero = line selected).
// Writes come from two places, as the paper describes: the external
// random-access port (one word per cycle through the address decoder)
// and the neurons (any subset of lines in one cycle, at the end of the
// output phase). clear_all zeroes every word, which is how the host
// deselects all lines before selecting one cell; it is also applied
// while the core is power-gated, since the registers are volatile.
// The priority clear_all > neuron write > random access and the
// combinational read port are this design's choices.
//
// Timing: writes take effect at the next rising clock edge; q and
// ra_rdata show the stored words combinationally.
module reg_file
  import neurram_pkg::*;
#(
  parameter int unsigned N  = 256,
  parameter int unsigned AW = (N > 1) ? $clog2(N) : 1
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  clear_all,
  // random access port
  input  logic                  ra_we,
  input  logic [AW-1:0]         ra_addr,
  input  logic [REG_W-1:0]      ra_wdata,
  output logic [REG_W-1:0]      ra_rdata,
  // neuron write-back port
  input  logic                  nw_en,
  input  logic [N-1:0]          nw_mask,
  input  logic [N-1:0][REG_W-1:0] nw_data,
  // all words, to the line drivers
  output logic [N-1:0][REG_W-1:0] q
);
  logic [N-1:0][REG_W-1:0] mem;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mem <= '0;
    end else if (clear_all) begin
      mem <= '0;
    end else if (nw_en) begin
      for (int k = 0; k < N; k++)
        if (nw_mask[k]) mem[k] <= nw_data[k];
    end else if (ra_we) begin
      mem[ra_addr] <= ra_wdata;
    end
  end

  assign q        = mem;
  assign ra_rdata = mem[ra_addr];

  // The host must not write while the neurons write back.
  a_no_collision: assert property (@(posedge clk) disable iff (!rst_n)
                                   !(nw_en && ra_we))
    else $error("random-access write collides with neuron write-back");
endmodule
