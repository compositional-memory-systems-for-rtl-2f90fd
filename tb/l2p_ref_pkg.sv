// l2p_ref_pkg: reference models shared by the testbenches.
//
// init_word gives the content main memory holds before anything was written to it.
// cache_ref is an independent model of a set-associative cache with true LRU
// replacement and write-back: per set it keeps the resident line addresses, most
// recently used first, and a dirty flag per line. access() reports whether the access
// hits and whether it evicts a dirty line. It only knows sets and line addresses, so
// the same model serves a single bank and the whole partitioned cache.
package l2p_ref_pkg;

  function automatic logic [31:0] init_word(logic [31:0] byte_addr);
    logic [31:0] a;
    a = {byte_addr[31:2], 2'b00};
    return (a * 32'h9E37_79B1) ^ 32'h5BD1_E995;
  endfunction

  class cache_ref;
    int unsigned ways;
    int unsigned lines [int unsigned][$];   // set -> line addresses, MRU first
    bit          dirty [int unsigned];      // line address -> dirty
    int unsigned n_hit, n_miss, n_wb;

    function new(int unsigned ways);
      this.ways = ways;
    endfunction

    function void reset();
      lines.delete();
      dirty.delete();
      n_hit = 0; n_miss = 0; n_wb = 0;
    endfunction

    // returns 1 on hit; wb is set when a dirty line is evicted
    function bit access(int unsigned set, int unsigned laddr, bit we, output bit wb);
      int idx[$];
      bit hit;
      wb = 0;
      if (!lines.exists(set)) lines[set] = {};
      idx = lines[set].find_first_index(x) with (x == laddr);
      hit = (idx.size() != 0);
      if (hit) begin
        lines[set].delete(idx[0]);
        n_hit++;
      end else begin
        n_miss++;
        if (lines[set].size() == ways) begin
          int unsigned victim = lines[set].pop_back();
          if (dirty.exists(victim) && dirty[victim]) begin
            wb = 1;
            n_wb++;
          end
          dirty.delete(victim);
        end
        dirty[laddr] = 0;
      end
      lines[set].push_front(laddr);
      if (we) dirty[laddr] = 1;
      return hit;
    endfunction
  endclass

endpackage
