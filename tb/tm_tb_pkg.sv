// tm_tb_pkg - reference Tsetlin Machine model for the testbenches.
//
// tm_model holds a random TM in uncompressed form: one Include/Exclude bit
// per (class, clause, feature, literal).  It computes class sums and the
// winning class straight from that form (AND of the included literals per
// clause, +1 for even and -1 for odd clauses, empty clauses output 0, ties
// to the lowest class), independently of the accelerator.  It also
// compiles the model into the 16-bit Include instruction stream the
// accelerator runs: one instruction per Include, in class / clause /
// feature / literal order, with the clause-change bit toggled at each new
// clause, the class-change bit toggled at each new class, the polarity bit
// set for odd clauses, L = 1 for a complemented literal and the offset
// counted in features from the previous Include of the same clause.
package tm_tb_pkg;

  class tm_model;
    int unsigned n_feat, n_class, n_clause;
    bit          inc[];   // index ((m*n_clause + j)*n_feat + f)*2 + l

    function new(int unsigned f, int unsigned m, int unsigned cl);
      n_feat = f; n_class = m; n_clause = cl;
      inc = new[m*cl*f*2];
    endfunction

    function int unsigned idx(int unsigned m, int unsigned j, int unsigned f,
                              int unsigned l);
      return ((m*n_clause + j)*n_feat + f)*2 + l;
    endfunction

    // Each TA is an Include with probability pct/1000; every class gets at
    // least one Include so that it appears in the instruction stream.
    function void randomize_model(int unsigned pct);
      foreach (inc[i]) inc[i] = (($urandom % 1000) < pct);
      for (int unsigned m = 0; m < n_class; m++) begin
        bit any = 0;
        for (int unsigned j = 0; j < n_clause; j++)
          for (int unsigned f = 0; f < n_feat; f++)
            for (int unsigned l = 0; l < 2; l++) any |= inc[idx(m,j,f,l)];
        if (!any) inc[idx(m, 0, $urandom % n_feat, $urandom % 2)] = 1;
      end
    endfunction

    function int class_sum(int unsigned m, bit x[]);
      int s = 0;
      for (int unsigned j = 0; j < n_clause; j++) begin
        bit out = 1, any = 0;
        for (int unsigned f = 0; f < n_feat; f++)
          for (int unsigned l = 0; l < 2; l++)
            if (inc[idx(m,j,f,l)]) begin
              any = 1;
              out &= (l == 0) ? x[f] : !x[f];
            end
        if (any && out) s += (j % 2 == 0) ? 1 : -1;
      end
      return s;
    endfunction

    function int unsigned predict(bit x[]);
      int best = 0; int unsigned bi = 0;
      for (int unsigned m = 0; m < n_class; m++) begin
        int s = class_sum(m, x);
        if (m == 0 || s > best) begin best = s; bi = m; end
      end
      return bi;
    endfunction

    // Instructions of classes [m_lo, m_hi).
    function void compile(int unsigned m_lo, int unsigned m_hi,
                          ref logic [15:0] prog[$]);
      bit cc = 0, e = 0, first_cl;
      int unsigned prev_f;
      prog.delete();
      for (int unsigned m = m_lo; m < m_hi; m++) begin
        bit first_in_class = 1;
        for (int unsigned j = 0; j < n_clause; j++) begin
          first_cl = 1; prev_f = 0;
          for (int unsigned f = 0; f < n_feat; f++)
            for (int unsigned l = 0; l < 2; l++)
              if (inc[idx(m,j,f,l)]) begin
                if (first_cl) begin
                  cc = !cc;
                  if (first_in_class) begin e = !e; first_in_class = 0; end
                end
                prog.push_back({(j % 2 == 1), cc, e, 12'(f - prev_f), l[0]});
                first_cl = 0; prev_f = f;
              end
        end
      end
    endfunction
  endclass

  // A batch of random Boolean datapoints: x[b][f] is feature f of
  // datapoint b; word(f) packs feature f of every datapoint, datapoint 0 in
  // bit 0, as one feature packet.
  class tm_batch;
    bit x[][];

    function new(int unsigned n_dp, int unsigned n_feat);
      x = new[n_dp];
      foreach (x[b]) begin
        x[b] = new[n_feat];
        foreach (x[b][f]) x[b][f] = 1'($urandom % 2);
      end
    endfunction

    function logic [63:0] word(int unsigned f);
      logic [63:0] w = '0;
      foreach (x[b]) w[b] = x[b][f];
      return w;
    endfunction
  endclass

endpackage
