// tb_ref_pkg -- reference model shared by the MCMA testbenches.
//
// Plain integer arithmetic, written independently of the RTL: the piecewise
// linear sigmoid, a fully connected network with bias, the layout of network
// weights in the tile cache, and a small pseudo-random generator. Fixed point:
// 8 fraction bits in 16-bit words, 16 fraction bits in sums.
package tb_ref_pkg;

  localparam int MAXL = 3;
  localparam int MAXN = 64;
  localparam int NNET = 3;

  // weights: net, layer (1..3), neuron, input (index K = bias)
  typedef int wts_t [NNET][MAXL+1][MAXN][MAXN+1];

  // sigmoid of a sum with 16 fraction bits -> word with 8 fraction bits
  function automatic int sig_ref(int x);
    longint ax, y;
    ax = (x < 0) ? -longint'(x) : longint'(x);
    if (ax >= 5 * 65536)            y = 65536;
    else if (ax >= 155648)          y = ax / 32 + 55296;   // 2.375 and 0.84375
    else if (ax >= 65536)           y = ax / 8 + 40960;    // 0.625
    else                            y = ax / 4 + 32768;    // 0.5
    if (x < 0) y = 65536 - y;
    return int'(y / 256);
  endfunction

  // 16-bit sign extension
  function automatic int sx16(int v);
    v = v & 16'hffff;
    return (v >= 32768) ? v - 65536 : v;
  endfunction

  // evaluate network `net` on input x[0..sizes[0]-1]; returns outputs in y
  function automatic void net_eval(const ref wts_t w, input int net, input int nl,
                                   input int sizes[MAXL+1], input int x[MAXN],
                                   output int y[MAXN]);
    int a[MAXN], b[MAXN];
    a = x;
    for (int l = 1; l <= nl; l++) begin
      for (int n = 0; n < sizes[l]; n++) begin
        int acc;
        acc = w[net][l][n][sizes[l-1]] * 256;       // bias times 1.0
        for (int k = 0; k < sizes[l-1]; k++) acc += w[net][l][n][k] * a[k];
        b[n] = sig_ref(acc);
      end
      a = b;
    end
    y = a;
  endfunction

  // number of cache lines network layer l takes with P PEs
  function automatic int layer_lines(int P, int sizes[MAXL+1], int l);
    return ((sizes[l] + P - 1) / P) * (sizes[l-1] + 1);
  endfunction

  function automatic int net_lines(int P, int nl, int sizes[MAXL+1]);
    automatic int s = 0;
    for (int l = 1; l <= nl; l++) s += layer_lines(P, sizes, l);
    return s;
  endfunction

  // word for PE p of line `line` of network net (line counted within the network)
  function automatic int cache_word(const ref wts_t w, input int net, input int P, input int nl,
                                    input int sizes[MAXL+1], input int line, input int p);
    automatic int l = 1;
    while (line >= layer_lines(P, sizes, l)) begin
      line -= layer_lines(P, sizes, l);
      l++;
    end
    begin
      automatic int g = line / (sizes[l-1] + 1);
      automatic int k = line % (sizes[l-1] + 1);
      automatic int n = g * P + p;
      return (n < sizes[l]) ? (w[net][l][n][k] & 16'hffff) : 0;
    end
  endfunction

  // random weights in [-lim, lim]
  function automatic void rand_weights(ref wts_t w, input int lim);
    for (int a = 0; a < NNET; a++)
      for (int l = 0; l <= MAXL; l++)
        for (int n = 0; n < MAXN; n++)
          for (int k = 0; k <= MAXN; k++)
            w[a][l][n][k] = int'($urandom_range(2 * lim)) - lim;
  endfunction

endpackage
