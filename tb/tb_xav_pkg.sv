// tb_xav_pkg: reference models shared by the XAV testbenches.
//
// It plays the part of the rule compiler for small, hand-written rule sets
// and computes the expected results independently of the RTL:
//  * an lsRE fragment is given as a literal front part and a back part in
//    which '#' stands for the class [0-9] and every other character for
//    itself;
//  * the literal (ldRE) for the pre-filter is the last 8, 4 or 2 bytes of
//    the front part (the longest of those lengths that fits);
//  * the reverse DFA is the trie of the reversed front parts, each back part
//    is a chain of states, all in one state space (0 dead, 1 reverse start);
//  * xor filter tables are built by peeling (Graf and Lemire), retrying
//    seeds until it succeeds;
//  * expected fragment matches are found by brute force over every end
//    position of every front part.
package tb_xav_pkg;
  import xav_pkg::*;

  localparam int SEG  = 2**SEG_W;
  localparam int MAXF = 64;

  class xav_rules;
    string front [$];
    string back  [$];
    // compiled tables
    int        tr   [int];      // (state*256+byte) -> next, absent = dead
    stt_info_t info [int];      // state -> info, absent = not accepting
    int        nstates;
    logic [63:0] dfu_words [1024];
    logic [7:0]  x4 [3*SEG];
    logic [7:0]  x8 [3*SEG];
    logic [63:0] seed4, seed8;
    int        n2, n4, n8;

    function void add(string f, string b);
      front.push_back(f);
      back.push_back(b);
    endfunction

    static function bit in_class(byte c, byte pat);
      if (pat == "#") return (c >= "0" && c <= "9");
      return c == pat;
    endfunction

    static function int ld_len(int l);
      if (l >= 8) return 8;
      if (l >= 4) return 4;
      return 2;
    endfunction

    // the ldRE of fragment i as a right-aligned key (oldest byte highest)
    function logic [63:0] ld_key(int i);
      logic [63:0] k;
      int l, n;
      l = front[i].len();
      n = ld_len(l);
      k = '0;
      for (int j = l - n; j < l; j++) k = {k[55:0], 8'(front[i][j])};
      return k;
    endfunction

    static function void slots(logic [63:0] key, logic [63:0] seed,
                               output int s0, output int s1, output int s2, output logic [7:0] fp);
      logic [63:0] h, f;
      h  = xav_hash(key, seed);
      s0 = int'(h[SEG_W-1:0]);
      s1 = SEG + int'(h[21 +: SEG_W]);
      s2 = 2*SEG + int'(h[42 +: SEG_W]);
      f  = h ^ (h >> 32);
      fp = f[7:0];
    endfunction

    // xor filter by peeling; returns 0 if this seed does not peel
    static function bit build_xor(logic [63:0] keys [$], logic [63:0] seed, ref logic [7:0] tbl [3*SEG]);
      int cnt [3*SEG];
      int xk  [3*SEG];
      int q [$];
      int st_k [$];
      int st_s [$];
      int s [3];
      logic [7:0] fp;
      foreach (cnt[i]) begin cnt[i] = 0; xk[i] = 0; tbl[i] = '0; end
      foreach (keys[i]) begin
        slots(keys[i], seed, s[0], s[1], s[2], fp);
        for (int j = 0; j < 3; j++) begin cnt[s[j]]++; xk[s[j]] ^= i; end
      end
      foreach (cnt[i]) if (cnt[i] == 1) q.push_back(i);
      while (q.size() > 0) begin
        int sl, k;
        sl = q.pop_front();
        if (cnt[sl] != 1) continue;
        k = xk[sl];
        st_k.push_back(k);
        st_s.push_back(sl);
        slots(keys[k], seed, s[0], s[1], s[2], fp);
        for (int j = 0; j < 3; j++) begin
          xk[s[j]] ^= k;
          cnt[s[j]]--;
          if (cnt[s[j]] == 1) q.push_back(s[j]);
        end
      end
      if (st_k.size() != keys.size()) return 0;
      for (int i = st_k.size() - 1; i >= 0; i--) begin
        slots(keys[st_k[i]], seed, s[0], s[1], s[2], fp);
        tbl[st_s[i]] = fp ^ tbl[s[0]] ^ tbl[s[1]] ^ tbl[s[2]] ^ tbl[st_s[i]];
      end
      return 1;
    endfunction

    static function bit xor_member(logic [63:0] key, logic [63:0] seed, ref logic [7:0] tbl [3*SEG]);
      int s0, s1, s2;
      logic [7:0] fp;
      slots(key, seed, s0, s1, s2, fp);
      return (tbl[s0] ^ tbl[s1] ^ tbl[s2]) == fp;
    endfunction

    function void compile();
      logic [63:0] k4 [$];
      logic [63:0] k8 [$];
      int node;
      tr.delete();
      info.delete();
      nstates = 2;
      foreach (dfu_words[i]) dfu_words[i] = '0;
      // reverse trie of the front parts
      foreach (front[f]) begin
        node = 1;
        for (int i = front[f].len() - 1; i >= 0; i--) begin
          int key;
          key = node*256 + int'(front[f][i]);
          if (!tr.exists(key)) begin tr[key] = nstates; nstates++; end
          node = tr[key];
        end
        info[node] = '{accept: 1'b1, frag: FRAG_W'(f), fwd_start: '0};
      end
      // forward chains
      foreach (back[f]) begin
        if (back[f].len() > 0) begin
          int s;
          s = nstates; nstates++;
          info[lookup_front_end(f)].fwd_start = STATE_W'(s);
          for (int j = 0; j < back[f].len(); j++) begin
            for (int c = 0; c < 256; c++)
              if (in_class(byte'(c), back[f][j])) tr[s*256 + c] = nstates;
            s = nstates; nstates++;
          end
          info[s] = '{accept: 1'b1, frag: FRAG_W'(f), fwd_start: '0};
        end
      end
      // pre-filter literals
      n2 = 0; n4 = 0; n8 = 0;
      foreach (front[f]) begin
        logic [63:0] k;
        k = ld_key(f);
        case (ld_len(front[f].len()))
          2: begin dfu_words[k[15:6]][k[5:0]] = 1'b1; n2++; end
          4: begin if (!(k inside {k4})) k4.push_back(k); n4++; end
          default: begin if (!(k inside {k8})) k8.push_back(k); n8++; end
        endcase
      end
      seed4 = 64'h1234;
      while (!build_xor(k4, seed4, x4)) seed4 = seed4 + 64'h9e3779b97f4a7c15;
      seed8 = 64'h5678;
      while (!build_xor(k8, seed8, x8)) seed8 = seed8 + 64'h9e3779b97f4a7c15;
    endfunction

    function int lookup_front_end(int f);
      int node;
      node = 1;
      for (int i = front[f].len() - 1; i >= 0; i--) node = tr[node*256 + int'(front[f][i])];
      return node;
    endfunction

    function int next_state(int s, byte c);
      if (tr.exists(s*256 + int'(c))) return tr[s*256 + int'(c)];
      return 0;
    endfunction

    function stt_info_t state_info(int s);
      if (s != 0 && info.exists(s)) return info[s];
      return '0;
    endfunction

    // brute-force expected fragment matches of one packet:
    // each entry {frag, start, end} packed as frag*2^24 + start*2^12 + end
    function void expect_matches(byte pkt [$], ref longint exp [$]);
      foreach (front[f]) begin
        int l, nb;
        l  = front[f].len();
        nb = back[f].len();
        for (int e = l - 1; e < pkt.size(); e++) begin
          bit ok;
          ok = 1;
          for (int j = 0; j < l; j++) if (pkt[e-l+1+j] != byte'(front[f][j])) ok = 0;
          if (ok && nb > 0) begin
            if (e + nb >= pkt.size()) ok = 0;
            else for (int j = 0; j < nb; j++) if (!in_class(pkt[e+1+j], byte'(back[f][j]))) ok = 0;
          end
          if (ok) exp.push_back(longint'(f) * 64'h1000000 + longint'(e-l+1) * 64'h1000 + longint'(e + nb));
        end
      end
    endfunction
  endclass

  // rule set read by the behavioural STT model of the block testbenches
  xav_rules g_rules;

  // a default rule set in the style of the paper's examples
  function automatic xav_rules default_rules();
    xav_rules r;
    r = new();
    r.add("user=",       "########");   // front with a 4-byte literal, digit back part
    r.add("AUTH ",       "");           // 4-byte literal, no back part
    r.add("PARTIAL",     "");           // 4-byte literal
    r.add("BODY",        "");           // 4-byte literal
    r.add("XBODY",       "");           // front part nested in the one above
    r.add("GET /admin",  "");           // 8-byte literal
    r.add("\x01mic|",    "##");         // 4-byte literal, short back part
    r.add("ab",          "cd");         // 2-byte literal (DFU)
    r.add("zq",          "");           // 2-byte literal (DFU)
    r.add("passwd=root", "#");          // 8-byte literal
    return r;
  endfunction
  // a random packet of len bytes over a small alphabet (so that partial
  // literals occur) with nplant fragments planted whole: front part, then
  // the back part with a random digit for each '#'
  function automatic void make_packet(xav_rules r, int len, int nplant, ref byte pkt [$]);
    string alpha;
    alpha = "abcdqzBODYXuser=0123456789 ";
    pkt.delete();
    for (int i = 0; i < len; i++) pkt.push_back(byte'(alpha[$urandom_range(alpha.len() - 1)]));
    for (int n = 0; n < nplant; n++) begin
      int f, at;
      string s;
      f = $urandom_range(r.front.size() - 1);
      s = r.front[f];
      for (int j = 0; j < r.back[f].len(); j++)
        s = {s, (r.back[f][j] == "#") ? string'(8'("0" + $urandom_range(9))) : string'(r.back[f][j])};
      at = $urandom_range(len - 1);
      for (int i = 0; i < s.len(); i++) if (at + i < len) pkt[at + i] = byte'(s[i]);
    end
  endfunction
endpackage
