// sosa_ref_pkg: reference model of the scheduler, for the testbenches.
//
// It models the algorithm directly from its definition, not from the
// systolic mechanics: each virtual schedule is a plain list of jobs in WSPT
// order, and every cost is summed job by job,
//   sum^HI = sum over jobs K with T^K >= T^J of (EPT_K - n_K)
//   sum^LO = sum over jobs K with T^K <  T^J of (8 W_K - n_K T^K)
//   cost   = W_J (EPT_J + sum^HI) + EPT_J floor(sum^LO / 8), saturated to 16 bits,
// leaving out the head job when it pops in the same iteration. One step is
// one iteration: the head pops if n >= its release point, otherwise it does
// one unit of virtual work; then the new job, if any, is inserted behind
// every job whose WSPT is at least its own.
//
// The cost and release definitions are the paper's; the
// fixed-point rounding mirrors this design's number formats.
package sosa_ref_pkg;

  typedef struct {
    int id;
    int w;
    int ept;
    int t;
    int apt;
    int n;
  } ref_job_t;

  function automatic int ref_wspt(int w, int ept);
    int q;
    if (ept == 0) return 255;
    q = (w * 8) / ept;
    return (q > 255) ? 255 : q;
  endfunction

  function automatic int ref_apt(int alpha, int ept);
    return ((alpha + 1) * ept) / 256;
  endfunction

  class vs_model;
    int       depth;
    ref_job_t q[$];

    function new(int depth);
      this.depth = depth;
    endfunction

    function bit pops();
      return q.size() > 0 && q[0].n >= q[0].apt;
    endfunction

    function bit full();
      return q.size() >= depth;
    endfunction

    function longint unsigned cost(int w, int ept);
      int t = ref_wspt(w, ept);
      longint shi = 0, slo = 0, c;
      for (int k = pops() ? 1 : 0; k < q.size(); k++) begin
        if (q[k].t >= t) shi += q[k].ept - q[k].n;
        else             slo += q[k].w * 8 - q[k].n * q[k].t;
      end
      c = w * (ept + shi) + ept * (slo / 8);
      return (c > 65535) ? 65535 : c;
    endfunction

    // Insert position of a job with WSPT t, after any pop of this iteration.
    function int ins_pos(int t);
      int p = 0;
      for (int k = pops() ? 1 : 0; k < q.size(); k++) if (q[k].t >= t) p++;
      return p;
    endfunction

    // One iteration. Returns the released job ID or -1.
    function int step(bit ins, int id, int w, int ept, int alpha);
      int rel = -1;
      ref_job_t j;
      int p;
      if (ins) p = ins_pos(ref_wspt(w, ept));
      if (pops()) begin
        rel = q[0].id;
        void'(q.pop_front());
      end else if (q.size() > 0) begin
        q[0].n++;
      end
      if (ins) begin
        j.id = id; j.w = w; j.ept = ept; j.t = ref_wspt(w, ept);
        j.apt = ref_apt(alpha, ept); j.n = 0;
        q.insert(p, j);
      end
      return rel;
    endfunction

    // Memoized sums the systolic array should hold for job k.
    function longint shi_of(int k);
      longint s = 0;
      for (int i = 0; i <= k; i++) s += q[i].ept - q[i].n;
      return s;
    endfunction

    function longint slo_of(int k);
      longint s = 0;
      for (int i = k; i < q.size(); i++) s += q[i].w * 8 - q[i].n * q[i].t;
      return s;
    endfunction
  endclass

endpackage
