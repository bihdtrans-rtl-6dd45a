// bihd_ref_pkg: bit-level reference model of the BiHDTrans inference, used
// by the end-to-end testbenches. It is written directly from the equations
// (one loop per dimension, no chunking tricks) and shares no code with the
// RTL. Hypervectors live in the padded layout of the hardware: NCH*DP bits,
// bit g = word (g / DP), bit (g % DP); word a belongs to head a / CPH and
// bit g is a real dimension when (a % CPH)*DP + g % DP < DH.
package bihd_ref_pkg;

  class ref_model #(
    int D = 60, int NH = 3, int DP = 8, int N = 4, int L = 12, int K = 4,
    int FEAT_W = 6, int LVL_B = 3
  );
    localparam int DH  = D / NH;
    localparam int CPH = (DH + DP - 1) / DP;
    localparam int NCH = NH * CPH;
    localparam int DPD = NCH * DP;      // padded dimension
    localparam int Q   = 1 << LVL_B;

    bit pos [N][DPD];
    bit lvl [Q][DPD];
    bit bvq [DPD];
    bit bvk [DPD];
    bit bvv [DPD];
    bit bva [DPD];
    bit cls [K][DPD];

    bit he [L][DPD];
    bit hc [L][DPD];
    bit mask [L][NH][L];
    int sims [K];
    int label;
    // statistics seen while computing
    int n_empty_rows;
    int n_full_rows;
    int n_enc_ties;

    function bit valid_dim(int g);
      return ((g / DP) % CPH) * DP + (g % DP) < DH;
    endfunction

    function void randomize_tables();
      for (int g = 0; g < DPD; g++) begin
        for (int i = 0; i < N; i++) pos[i][g] = 1'($urandom);
        for (int q = 0; q < Q; q++) lvl[q][g] = 1'($urandom);
        for (int k = 0; k < K; k++) cls[k][g] = 1'($urandom);
        bvq[g] = 1'($urandom); bvk[g] = 1'($urandom);
        bvv[g] = 1'($urandom); bva[g] = 1'($urandom);
      end
    endfunction

    // word a of a table, as the configuration port loads it
    function logic [DP-1:0] word(int sel, int row, int a);
      logic [DP-1:0] w;
      for (int b = 0; b < DP; b++) begin
        int g = a * DP + b;
        case (sel)
          0: w[b] = pos[row][g];
          1: w[b] = lvl[row][g];
          2: w[b] = bvq[g];
          3: w[b] = bvk[g];
          4: w[b] = bvv[g];
          5: w[b] = bva[g];
          default: w[b] = cls[row][g];
        endcase
      end
      return w;
    endfunction

    // H_e^t = sign(rho^t(sum_i F_i (.) V_i)), t = tok+1, sign(0) = +1
    function void encode(int tok, int feat[N]);
      bit s [DPD];
      for (int g = 0; g < DPD; g++) begin
        int c = 0;
        for (int i = 0; i < N; i++)
          c += (pos[i][g] == lvl[feat[i] >> (FEAT_W - LVL_B)][g]) ? 1 : 0;
        if (2 * c == N) n_enc_ties++;
        s[g] = (2 * c >= N);
      end
      for (int g = 0; g < DPD; g++)
        he[tok][g] = s[((g - (tok + 1)) % DPD + DPD) % DPD];
    endfunction

    // attention for query token t over all heads, then H_c^t
    function void attend(int t);
      for (int h = 0; h < NH; h++) begin
        int nsel = 0;
        for (int i = 0; i < L; i++) begin
          int dot = 0;
          for (int g = h * CPH * DP; g < (h + 1) * CPH * DP; g++)
            if (valid_dim(g))
              dot += (((he[t][g] ~^ bvq[g]) == (he[i][g] ~^ bvk[g])) ? 1 : -1);
          mask[t][h][i] = (dot > 0);
          nsel += mask[t][h][i];
        end
        if (nsel == 0) n_empty_rows++;
        if (nsel == L) n_full_rows++;
        for (int g = h * CPH * DP; g < (h + 1) * CPH * DP; g++) begin
          int sum = 0;
          for (int i = 0; i < L; i++)
            if (mask[t][h][i]) sum += ((he[i][g] ~^ bvv[g]) ? 1 : -1);
          hc[t][g] = (sum >= 0) ~^ bva[g];
        end
      end
    endfunction

    function void classify(int t);
      label = 0;
      for (int k = 0; k < K; k++) begin
        sims[k] = 0;
        for (int g = 0; g < DPD; g++)
          if (valid_dim(g) && hc[t][g] == cls[k][g]) sims[k]++;
        if (sims[k] > sims[label]) label = k;
      end
    endfunction
  endclass

endpackage
