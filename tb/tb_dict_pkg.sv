// tb_dict_pkg: builds a compressed dictionary image for the testbenches and
// answers dictionary questions directly from the word list.
//
// build() turns a list of lower-case words into the 22-bit node words of the
// preorder binary trie (root at address 0, character in bits 21:17, bit 16
// set when a node's only child is the word end, bits 15:0 the distance to the
// right sibling, 0 = none, 65535 = the sibling is the word end '_').
// Words are sorted in label order with the word end ranking after 'z', so a
// word that is a prefix of another follows it. Nodes are then allocated in
// the order they first appear, which is the preorder of the trie, and each
// new node links its predecessor at the same depth as right sibling.
// node_pref[a] records the prefix spelled by the path to node a, which lets
// the checks work from strings instead of from the image.
package tb_dict_pkg;

  string       words [$];
  logic [21:0] image [$];
  string       node_pref [$];

  function automatic int code(byte ch);
    return int'(ch) - 96;  // 'a' -> 1
  endfunction

  // Label-order comparison, end of word ranks as 27.
  function automatic bit label_before(string a, string b);
    for (int p = 0; p < 64; p++) begin
      int ca, cb;
      ca = (p < a.len()) ? code(a[p]) : 27;
      cb = (p < b.len()) ? code(b[p]) : 27;
      if (ca != cb) return ca < cb;
      if (ca == 27) return 0;
    end
    return 0;
  endfunction

  function automatic void build();
    string sorted [$];
    int    path [64];
    string prev;
    sorted = words;
    for (int i = 0; i < sorted.size(); i++)
      for (int j = 0; j + 1 < sorted.size() - i; j++)
        if (label_before(sorted[j+1], sorted[j])) begin
          string t;
          t = sorted[j]; sorted[j] = sorted[j+1]; sorted[j+1] = t;
        end
    image.delete();
    node_pref.delete();
    image.push_back({5'd27, 1'b0, 16'd0});
    node_pref.push_back("");
    prev = "";
    foreach (sorted[w]) begin
      string s;
      int lcp;
      s   = sorted[w];
      lcp = 0;
      while (lcp < s.len() && lcp < prev.len() && s[lcp] == prev[lcp]) lcp++;
      if (lcp == s.len()) begin
        // s is a prefix of the previous word: the word end becomes the
        // right sibling of the previous word's node at depth lcp.
        image[path[lcp]][15:0] = 16'hFFFF;
      end else begin
        for (int p = lcp; p < s.len(); p++) begin
          int a;
          a = image.size();
          if (p == lcp && w > 0)
            image[path[p]][15:0] = 16'(a - path[p]);
          image.push_back({5'(code(s[p])), 1'(p == s.len() - 1), 16'd0});
          node_pref.push_back(s.substr(0, p));
          path[p] = a;
        end
      end
      prev = s;
    end
  endfunction

  function automatic bit is_word(string s);
    foreach (words[i]) if (words[i] == s) return 1;
    return 0;
  endfunction

  function automatic bit has_prefix(string s);
    foreach (words[i])
      if (words[i].len() >= s.len() && words[i].substr(0, s.len() - 1) == s) return 1;
    return 0;
  endfunction

  // Address of the node spelling s, -1 if none.
  function automatic int node_of(string s);
    foreach (node_pref[a]) if (a > 0 && node_pref[a] == s) return a;
    return -1;
  endfunction

  // The dictionary drawn in Fig. 5 of the source paper.
  function automatic void use_fig5_words();
    words = '{"abandon", "abase", "abate", "acrid", "consensus",
              "consequence", "fat", "fate"};
  endfunction

endpackage
