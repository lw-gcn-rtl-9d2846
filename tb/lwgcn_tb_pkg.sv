// lwgcn_tb_pkg: host-side preprocessing and reference arithmetic used by the
// testbenches.
//
// build_sdmm_stream turns one tile of a sparse left matrix into the word
// stream the PE array consumes, following the two preprocessing steps:
//   1. PCOO compression and round-robin assignment: row i goes to PE i mod K;
//      every PE's rows are concatenated; the first element of a row carries
//      SOR, the last EOR; a row without non-zeros in the tile becomes one
//      empty element with SOR = EOR = 1, VLD = 0.
//   2. Collision stalling: the streams are merged into words, one packet per
//      PE. Within a PE group (one DDM replica) a packet that needs a row
//      stored in the same row-group bank as an earlier packet of this word,
//      but a different row, is held back and a zero packet (VLD = 0) is sent
//      instead. Shorter streams are padded with zero packets.
// Words are returned as 512-bit vectors with K lanes of 16 bits used.
package lwgcn_tb_pkg;
  typedef logic [511:0] word_t;
  typedef int           mat_t[][];

  function automatic logic [15:0] mk_pkt(bit sor, bit eor, bit vld, int col, int val);
    return {sor, eor, vld, 9'(col), 4'(val)};
  endfunction

  // X: m x ncols matrix, the tile is columns t0 .. t0+tw-1
  function automatic void build_sdmm_stream(input mat_t X, input int m, input int t0,
                                            input int tw, input int K, input int R,
                                            input int G, ref word_t words[$],
                                            ref int stalls, ref int empties);
    logic [15:0] q[][$];
    int P = K / R;
    q = new[K];
    for (int i = 0; i < m; i++) begin
      int nz[$];
      for (int j = t0; j < t0 + tw; j++) if (X[i][j] != 0) nz.push_back(j);
      if (nz.size() == 0) begin
        q[i % K].push_back(mk_pkt(1, 1, 0, 0, 0));
        empties++;
      end else
        foreach (nz[e])
          q[i % K].push_back(mk_pkt(e == 0, e == nz.size() - 1, 1, nz[e] - t0, X[i][nz[e]]));
    end
    forever begin
      word_t w;
      bit any = 0;
      for (int p = 0; p < K; p++) if (q[p].size() != 0) any = 1;
      if (!any) break;
      w = '0;
      for (int g = 0; g < R; g++) begin
        int bank_col[int];
        for (int p = g * P; p < (g + 1) * P; p++) begin
          if (q[p].size() == 0) continue;
          begin
            logic [15:0] pk = q[p][0];
            int col = int'(pk[12:4]);
            if (!pk[13]) begin
              w[p*16 +: 16] = q[p].pop_front();
            end else if (!bank_col.exists(col % G) || bank_col[col % G] == col) begin
              bank_col[col % G] = col;
              w[p*16 +: 16] = q[p].pop_front();
            end else begin
              stalls++;          // zero packet: this PE waits one cycle
            end
          end
        end
      end
      words.push_back(w);
    end
  endfunction

  function automatic int sat16(longint v);
    if (v > 32767) return 32767;
    if (v < -32768) return -32768;
    return int'(v);
  endfunction

  // quantisation of the data mover: optional ReLU, arithmetic shift, saturate
  function automatic int quant(int a, int sh, bit relu);
    int v = (relu && a < 0) ? 0 : (a >>> sh);
    return sat16(v);
  endfunction
endpackage
