// tdc_ref_pkg: reference models used by the testbenches.
//
// ref_hits scans a wire's samples one time bin at a time, the way the hit
// definition reads: a hit starts at a bin t that is high, follows a low bin
// (bins before the data count as low) and starts four high bins; it ends at
// the first bin e that is low, follows a high bin and starts four low bins
// (bins after the data count as low). Leading edge t, width e-t, both
// saturated at 255; at most max_hits hits are kept. It is written from the
// definition, independently of the edge detector's group structure.
package tdc_ref_pkg;

  typedef struct {
    int le;
    int width;
  } ref_hit_t;

  function automatic bit sample(input logic [9:0] words [], input int n, input int t);
    if (t < 0 || t >= 10*n) return 1'b0;
    return words[t/10][9 - (t%10)];
  endfunction

  function automatic void ref_hits(input logic [9:0] words [], input int n,
                                   input int max_hits, output ref_hit_t hits [$]);
    bit inside_hit = 0;
    int le = 0;
    hits = {};
    for (int t = 0; t < 10*n + 4; t++) begin
      if (!inside_hit) begin
        if (!sample(words, n, t-1) && sample(words, n, t) && sample(words, n, t+1) &&
            sample(words, n, t+2) && sample(words, n, t+3)) begin
          inside_hit = 1;
          le = t;
        end
      end else begin
        if (sample(words, n, t-1) && !sample(words, n, t) && !sample(words, n, t+1) &&
            !sample(words, n, t+2) && !sample(words, n, t+3)) begin
          ref_hit_t h;
          inside_hit = 0;
          h.le    = (le > 255) ? 255 : le;
          h.width = (t - le > 255) ? 255 : t - le;
          if (hits.size() < max_hits) hits.push_back(h);
        end
      end
    end
  endfunction

  // random 10-bit words made of runs of 1..maxrun equal samples
  function automatic void rand_words(output logic [9:0] words [], input int n,
                                     input int maxrun, input int p_one);
    int run = 0;
    bit v = 0;
    logic [9:0] w;
    words = new[n];
    for (int i = 0; i < n; i++) begin
      for (int b = 9; b >= 0; b--) begin
        if (run == 0) begin
          v   = ($urandom_range(99) < p_one);
          run = $urandom_range(maxrun, 1);
        end
        w[b] = v;
        run--;
      end
      words[i] = w;
    end
  endfunction

endpackage
