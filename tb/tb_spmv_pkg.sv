// tb_spmv_pkg -- SpMV job generator and reference model for the testbenches.
//
// spmv_job builds one random SpMV problem y = alpha*A*x + beta*y and the
// memory images the accelerator reads:
//   * x and y images: 16 FP32 values per 512-bit beat, zero padded;
//   * per A channel, per x segment: an instruction beat holding the number
//     of element beats, then the element beats. Non-zeros are assigned to
//     PEs with the accelerator's row map and each PE's list is reordered by
//     a greedy scheduler so that two elements whose rows share a URAM word
//     (rows 2e and 2e+1 of one PE) are at least acc_lat slots apart; where
//     nothing may go an empty slot (all-ones index) is inserted. This is the
//     host-side "colouring and reordering" step.
// The reference result is accumulated in exactly the order the hardware
// sees the elements, with bit-exact FP32 rounding (tb_fp_pkg), so results
// can be compared bit for bit. Counters report how often the mechanisms of
// interest occur (empty slots, words holding two live rows, segments).
package tb_spmv_pkg;
  import tb_fp_pkg::*;

  typedef logic [511:0] beat_t;

  typedef struct {
    int          grow;   // global row
    int          lrow;   // row local to the PE
    int          col;    // column inside the segment
    logic [31:0] val;
    bit          bubble;
  } el_t;

  class spmv_job;
    int ha, w, u, d, acc_lat;
    int m, k, nnz, nseg;
    logic [31:0] alpha, beta;
    logic [31:0] x[], y[], acc[], yexp[];
    beat_t       x_img[$], y_img[$];
    beat_t       a_img[][$];
    // statistics
    int n_bubbles, n_pair_words, n_elem_beats, max_beats_sum;

    function new(int ha, int w, int u, int d, int acc_lat);
      this.ha = ha; this.w = w; this.u = u; this.d = d; this.acc_lat = acc_lat;
    endfunction

    function int pe_of(int r);
      return ((r % 16) / 2) * ha + (r / 16) % ha;
    endfunction

    function int lrow_of(int r);
      return 2 * ((r / 16) / ha) + r % 2;
    endfunction

    // Random problem: m x k, about nnz non-zeros; hot_rows > 0 puts half of
    // them on that many rows to force reordering and empty slots.
    function void gen(int m_, int k_, int nnz_, int hot_rows);
      el_t     peq[][$];
      int      npe = 8 * ha;
      bit      used[longint];
      m = m_; k = k_; nnz = 0;
      nseg = (k + w - 1) / w;
      alpha = rnd_f32(120, 130);
      beta  = rnd_f32(120, 130);
      x = new[k]; y = new[m]; acc = new[m]; yexp = new[m];
      foreach (x[i]) x[i] = rnd_f32(115, 135);
      foreach (y[i]) y[i] = rnd_f32(115, 135);
      foreach (acc[i]) acc[i] = 32'd0;
      a_img = new[ha];
      n_bubbles = 0; n_pair_words = 0; n_elem_beats = 0; max_beats_sum = 0;
      x_img.delete(); y_img.delete();
      for (int b = 0; b < (k + 15) / 16; b++) begin
        beat_t bt = '0;
        for (int l = 0; l < 16; l++) if (16*b + l < k) bt[32*l +: 32] = x[16*b + l];
        x_img.push_back(bt);
      end
      for (int b = 0; b < (m + 15) / 16; b++) begin
        beat_t bt = '0;
        for (int l = 0; l < 16; l++) if (16*b + l < m) bt[32*l +: 32] = y[16*b + l];
        y_img.push_back(bt);
      end
      for (int s = 0; s < nseg; s++) begin
        int c0 = s * w;
        int cw = (k - c0 < w) ? k - c0 : w;
        int cnt = int'((longint'(nnz_) * cw) / k);
        int lanes_len[];
        el_t sched[][$];
        peq = new[npe];
        for (int i = 0; i < cnt; i++) begin
          int r = (hot_rows > 0 && i % 2 == 0) ? int'($urandom % hot_rows) : int'($urandom % m);
          int c = $urandom % cw;
          el_t e;
          if (used.exists(longint'(r) * k + c0 + c)) continue;
          used[longint'(r) * k + c0 + c] = 1'b1;
          e.grow = r; e.lrow = lrow_of(r); e.col = c; e.val = rnd_f32(115, 135); e.bubble = 0;
          peq[pe_of(r)].push_back(e);
          nnz++;
        end
        // greedy reordering per PE lane
        sched = new[npe];
        lanes_len = new[npe];
        for (int g = 0; g < npe; g++) begin
          int last[int];
          int t = 0;
          while (peq[g].size() > 0) begin
            int found = -1;
            for (int i = 0; i < peq[g].size(); i++) begin
              int wd = peq[g][i].lrow / 2;
              if (!last.exists(wd) || t - last[wd] >= acc_lat) begin found = i; break; end
            end
            if (found >= 0) begin
              int wd = peq[g][found].lrow / 2;
              if (last.exists(wd) && (peq[g][found].lrow % 2) != 0) n_pair_words++;
              last[wd] = t;
              sched[g].push_back(peq[g][found]);
              peq[g].delete(found);
            end else begin
              el_t bub;
              bub.bubble = 1; bub.grow = 0; bub.lrow = 0; bub.col = 0; bub.val = 0;
              sched[g].push_back(bub);
            end
            t++;
          end
        end
        // pack per channel, and run the reference in the same order
        for (int c = 0; c < ha; c++) begin
          int nb = 0;
          beat_t hdr = '0;
          for (int p = 0; p < 8; p++) if (sched[8*c+p].size() > nb) nb = sched[8*c+p].size();
          hdr[31:0] = 32'(nb);
          a_img[c].push_back(hdr);
          n_elem_beats += nb;
          for (int t = 0; t < nb; t++) begin
            beat_t bt = '0;
            for (int p = 0; p < 8; p++) begin
              el_t e;
              if (t < sched[8*c+p].size()) e = sched[8*c+p][t];
              else e.bubble = 1;
              if (e.bubble) begin
                bt[64*p +: 64] = {32'd0, 32'hFFFF_FFFF};
                n_bubbles++;
              end else begin
                bt[64*p +: 64] = {e.val, 18'(e.lrow), 14'(e.col)};
                acc[e.grow] = fadd(acc[e.grow], fmul(e.val, x[c0 + e.col]));
              end
            end
            a_img[c].push_back(bt);
          end
        end
        begin
          int mx = 0;
          for (int c = 0; c < ha; c++) begin
            int nb = 0;
            for (int p = 0; p < 8; p++) if (sched[8*c+p].size() > nb) nb = sched[8*c+p].size();
            if (nb > mx) mx = nb;
          end
          max_beats_sum += mx;
        end
      end
      foreach (yexp[i]) yexp[i] = fadd(fmul(alpha, acc[i]), fmul(beta, y[i]));
    endfunction

    // the paper's cycle model (M + K)/16 + NNZ/(8 HA)
    function real model_cycles();
      return real'(m + k) / 16.0 + real'(nnz) / real'(8 * ha);
    endfunction
  endclass
endpackage
