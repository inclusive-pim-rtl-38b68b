// lru_ref: reference model of a set-associative true-LRU cache of line addresses, used to
// check the locality predictor. Each set is a list ordered from most to least recent.
class lru_ref;
  int ways, sets;
  longint lines [int][$];

  function new(int ways_i, int sets_i);
    ways = ways_i;
    sets = sets_i;
  endfunction

  // returns 1 on a hit; updates recency and fills on a miss
  function bit access(longint line);
    int s;
    int hit_at;
    s = int'(line % longint'(sets));
    if (!lines.exists(s)) lines[s] = {};
    hit_at = -1;
    for (int i = 0; i < lines[s].size(); i++) if (hit_at < 0 && lines[s][i] == line) hit_at = i;
    if (hit_at >= 0) begin
      lines[s].delete(hit_at);
      lines[s].push_front(line);
      return 1;
    end
    lines[s].push_front(line);
    if (lines[s].size() > ways) void'(lines[s].pop_back());
    return 0;
  endfunction
endclass
