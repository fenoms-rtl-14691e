// fenoms_ref_pkg: testbench reference model of the D-BAM score.
//
// Works on plain bit vectors, independently of the RTL: cell c of a
// hypervector is the number of ones in bits c*PF .. c*PF+PF-1; the vector is
// folded into parts of WL cells; each part is cut into m-subsets from its
// first cell. A subset scores one for its upper bound check when every cell
// has 2r <= 2q + ap, and one for its lower bound check unless every cell has
// 2r < 2q - an (ap, an are the margins in half levels).
package fenoms_ref_pkg;

  function automatic int cell_val(const ref bit hv [], input int c, input int pf);
    int v = 0;
    for (int i = c * pf; i < (c + 1) * pf && i < hv.size(); i++) v += hv[i];
    return v;
  endfunction

  function automatic int dbam_score(const ref bit q [], const ref bit r [],
                                    input int pf, input int wl, input int m,
                                    input int ap, input int an);
    int ncells, nparts, score;
    ncells = (q.size() + pf - 1) / pf;
    nparts = (ncells + wl - 1) / wl;
    score = 0;
    for (int p = 0; p < nparts; p++) begin
      int cells;
      cells = (ncells - p * wl < wl) ? ncells - p * wl : wl;
      for (int j = 0; j * m < cells; j++) begin
        bit ubc, below_all;
        ubc = 1; below_all = 1;
        for (int k = 0; k < m && j * m + k < cells; k++) begin
          int c, qv, rv;
          c = p * wl + j * m + k;
          qv = cell_val(q, c, pf);
          rv = cell_val(r, c, pf);
          if (!(2 * rv <= 2 * qv + ap)) ubc = 0;
          if (!(2 * rv < 2 * qv - an)) below_all = 0;
        end
        score += ubc + (below_all ? 0 : 1);
      end
    end
    return score;
  endfunction

endpackage
