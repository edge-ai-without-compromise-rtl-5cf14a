// neurram_tb_pkg: reference arithmetic shared by the core and chip
// testbenches. It recomputes, from the register words and the
// conductances, what an ideal core produces: the settled line voltages,
// the integrated charge of every neuron, the number of charge-decrement
// steps and the output word, plus the expected cycle count of an MVM.
package neurram_tb_pkg;
  import neurram_pkg::*;

  // counter value of the sigmoid/tanh schedule after s steps
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

  // pulse value (+1, 0, -1) of a register word for magnitude bit b
  function automatic int pulse(logic [7:0] w, int b);
    if (!w[b]) return 0;
    return w[7] ? 1 : -1;
  endfunction

  // steps a neuron makes from charge q, and its output word
  function automatic void convert(longint q, act_e act, int n_max, int v_decr,
                                  output int steps, output logic [7:0] word);
    bit sg; longint v; int m, y, mag;
    sg = q > 0; v = q; steps = 0;
    if (n_max != 0 && (act != ACT_RELU || sg))
      do begin
        steps++; v += sg ? -v_decr : v_decr;
      end while ((v > 0) == sg && steps < n_max);
    mag = (steps > 127) ? 127 : steps;
    y = sched(steps); m = sched(n_max);
    unique case (act)
      ACT_LINEAR: word = {sg, 7'(mag)};
      ACT_RELU:   word = sg ? {1'b1, 7'(mag)} : 8'h00;
      ACT_TANH:   word = {sg, 7'(y)};
      default:    word = 8'(sg ? m + y : m - y);
    endcase
  endfunction

  // cycles from the accepting clock edge to the first edge that sees done
  // settle_n is the array size N for MVM mode and 0 for neuron test
  function automatic int mvm_cycles(int mag_bits, int noise, int steps, int wl_wait, int settle_n);
    int f;
    f = 1 + wl_wait;
    if (settle_n != 0 && 2 * settle_n + 2 > f) f = 2 * settle_n + 2;
    return 1 + mag_bits * (1 + f) + 2 * ((1 << mag_bits) - 1) + 2 * noise
             + 2 + 3 * steps + 2 + 1;
  endfunction
  // SL index of the neuron switched to BL k
  function automatic int sl_of(int D, int k);
    return (k % D) * D + (k / D);
  endfunction

  // Ideal MVM (or neuron test) of one core. in_regs are the words on the
  // input side, g[r][c] the conductances. Returns the words the output
  // side receives and the largest number of decrement steps.
  function automatic void ref_mvm(int D, cmd_t c, logic [7:0] in_regs[], int g[][],
                                  int v_read, int v_decr,
                                  output logic [7:0] out_words[], output int smax);
    int N; int m;
    longint q[]; int vline[]; int p[];
    N = D * D; m = int'(c.in_mag_bits);
    q = new[N]; vline = new[N]; p = new[N]; out_words = new[N];
    foreach (q[k]) begin q[k] = 0; vline[k] = 0; end
    for (int b = m - 1; b >= 0; b--) begin
      for (int i = 0; i < N; i++) p[i] = pulse(in_regs[i], b);
      if (c.mode == MODE_NTEST) begin
        for (int i = 0; i < N; i++) vline[i] = p[i] * v_read;
      end else if (c.in_side == SIDE_BL) begin
        for (int col = 0; col < N; col++) begin
          int num, den; num = 0; den = 0;
          for (int r = 0; r <= int'(c.in_len) && r < N; r++) begin
            num += p[r] * v_read * g[r][col]; den += g[r][col];
          end
          if (den != 0) vline[col] = num / den;
        end
      end else begin
        for (int r = 0; r < N; r++) begin
          int num, den; num = 0; den = 0;
          for (int col = 0; col < N; col++) begin
            num += p[col] * v_read * g[r][col]; den += g[r][col];
          end
          if (den != 0) vline[r] = num / den;
        end
      end
      // neuron k senses SL sl_of(k) or BL k
      for (int k = 0; k < N; k++) begin
        bit via_sl;
        via_sl = (c.mode == MODE_NTEST) ? (c.in_side == SIDE_SL) : (c.in_side == SIDE_BL);
        q[k] += longint'(1 << b) * (via_sl ? vline[sl_of(D, k)] : vline[k]);
      end
    end
    smax = 0;
    for (int k = 0; k < N; k++) begin
      int s; logic [7:0] w;
      convert(q[k], c.act, int'(c.n_max), v_decr, s, w);
      if (s > smax) smax = s;
      if (c.out_side == SIDE_BL) out_words[k] = w;
      else out_words[sl_of(D, k)] = w;
    end
  endfunction
endpackage
