// rs_model_pkg: software reference model of the whole ReliableSketch pipeline,
// used by the end-to-end testbenches.
//
// The model is written from the algorithm, not from the RTL: MurmurHash3_x86_32
// per array (seed 1 + array index), multiply-shift reduction of the hash to a
// bucket index, Error-Sensible bucket layers and an optional two-array mice filter
// in place of layer 1. Keys refused by every layer are flagged for the emergency
// stack, which the testbench models itself. Raw bucket reads return the stored
// bucket. Requests are applied one at a time in
// issue order, which is what a hazard-free pipeline must reproduce. The testbench
// gives the layer sizes and thresholds as plain numbers, so the RTL's sizing
// functions are checked too.
package rs_model_pkg;

  typedef struct {
    logic [31:0] id;
    longint      yes;
    longint      no;
  } mbucket_t;

  typedef struct {
    longint est;
    longint mpe;
    int     layer;      // insert: layer that took the key (D+1: stack); query: last layer read
    bit     emergency;
    logic [31:0] key;   // key field of the result (bucket ID for a raw bucket read)
  } mres_t;

  function automatic logic [31:0] murmur3(logic [31:0] key, logic [31:0] seed);
    logic [31:0] h, k;
    k = key * 32'hcc9e2d51;
    k = (k << 15) | (k >> 17);
    k = k * 32'h1b873593;
    h = seed ^ k;
    h = (h << 13) | (h >> 19);
    h = h * 5 + 32'he6546b64;
    h = h ^ 32'd4;
    h = h ^ (h >> 16);
    h = h * 32'h85ebca6b;
    h = h ^ (h >> 13);
    h = h * 32'hc2b2ae35;
    h = h ^ (h >> 16);
    return h;
  endfunction

  function automatic int reduce(logic [31:0] h, int n);
    longint unsigned p;
    p = longint'(h) * longint'(n);
    return int'(p >> 32);
  endfunction

  class sketch_model;
    int        d;
    int        widths[];
    int        lambdas[];
    bit        use_filter;
    int        fcnt;           // counters per filter array
    mbucket_t  layers[][];
    int        f1[], f2[];
    // event counts
    longint    n_hit, n_vote, n_replace, n_pass, n_absorb, n_fpass, n_stack;

    function new(int d, int widths[], int lambdas[], bit use_filter);
      this.d           = d;
      this.widths      = widths;
      this.lambdas     = lambdas;
      this.use_filter  = use_filter;
      this.fcnt        = (widths[0] + 1) / 2;
      layers = new[d];
      for (int i = 0; i < d; i++) begin
        layers[i] = new[widths[i]];
        foreach (layers[i][j]) layers[i][j] = '{id: 0, yes: 0, no: 0};
      end
      f1 = new[fcnt];
      f2 = new[fcnt];
      foreach (f1[j]) begin f1[j] = 0; f2[j] = 0; end
    endfunction

    function automatic mres_t apply(bit is_query, logic [31:0] key);
      mres_t r;
      r = '{est: 0, mpe: 0, layer: 0, emergency: 0, key: key};
      for (int i = 0; i < d; i++) begin
        r.layer = i + 1;
        if (i == 0 && use_filter) begin
          int a, b, m;
          a = reduce(murmur3(key, 32'd1), fcnt);
          b = reduce(murmur3(key, 32'(1 + d)), fcnt);
          m = (f1[a] < f2[b]) ? f1[a] : f2[b];
          if (m < lambdas[0]) begin
            if (is_query) begin r.est += m; r.mpe += m; end
            else begin
              if (f1[a] == m) f1[a]++;
              if (f2[b] == m) f2[b]++;
              n_absorb++;
            end
            return r;
          end
          if (is_query) begin r.est += lambdas[0]; r.mpe += lambdas[0]; end
          else n_fpass++;
          continue;
        end
        begin
          int j;
          mbucket_t b;
          bit empty, match, locked;
          j      = reduce(murmur3(key, 32'(1 + i)), widths[i]);
          b      = layers[i][j];
          empty  = (b.yes == 0);
          match  = !empty && b.id == key;
          locked = !empty && b.no >= lambdas[i];
          if (is_query) begin
            if (match) begin r.est += b.yes; r.mpe += b.no; return r; end
            r.est += b.no; r.mpe += b.no;
            if (!locked) return r;
          end else begin
            if (match) begin
              b.yes++; n_hit++;
              layers[i][j] = b;
              return r;
            end
            if (!locked) begin
              if (b.no + 1 > b.yes) begin
                longint t;
                t = b.yes;
                b.yes = b.no + 1; b.no = t; b.id = key; n_replace++;
              end else begin
                b.no++; n_vote++;
              end
              layers[i][j] = b;
              return r;
            end
            n_pass++;
          end
        end
      end
      r.emergency = 1;
      if (!is_query) begin
        r.layer = d + 1;
        n_stack++;
      end
      return r;
    endfunction

    // raw read of bucket (or filter counter pair) idx of layer l, 1-based
    function automatic mres_t read(int l, int idx);
      mres_t r;
      r = '{est: 0, mpe: 0, layer: l, emergency: 0, key: {8'(l), 24'(idx)}};
      if (l < 1 || l > d) begin
        r.layer = 0;
        r.emergency = 1;
      end else if (l == 1 && use_filter) begin
        if (idx < fcnt) begin r.est = f1[idx]; r.mpe = f2[idx]; end
      end else if (idx < widths[l-1]) begin
        r.key = layers[l-1][idx].id;
        r.est = layers[l-1][idx].yes;
        r.mpe = layers[l-1][idx].no;
      end else r.key = '0;
      return r;
    endfunction
  endclass

endpackage
