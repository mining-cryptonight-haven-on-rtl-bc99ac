// hbm_pkg: storage shared by all hbm_model ports of one simulation.
//
// The scratchpad of the miner lives in the card's HBM. In simulation the
// memory is a sparse associative array of 16-byte words indexed by word
// address (byte address / 16); words never written read as zero.
package hbm_pkg;
  logic [127:0] words [longint unsigned];

  function automatic logic [127:0] rd(input longint unsigned waddr);
    return words.exists(waddr) ? words[waddr] : 128'd0;
  endfunction

  // Deterministic 128-bit fill pattern for word w of region r (splitmix64).
  function automatic logic [63:0] splitmix(input logic [63:0] x);
    logic [63:0] z;
    z = x + 64'h9e3779b97f4a7c15;
    z = (z ^ (z >> 30)) * 64'hbf58476d1ce4e5b9;
    z = (z ^ (z >> 27)) * 64'h94d049bb133111eb;
    return z ^ (z >> 31);
  endfunction

  function automatic logic [127:0] pattern(input longint unsigned waddr);
    return {splitmix(64'(waddr) * 2 + 1), splitmix(64'(waddr) * 2)};
  endfunction

  // Order-sensitive digest of n words starting at word address base.
  function automatic logic [127:0] digest(input longint unsigned base, input int n);
    logic [127:0] d;
    d = '0;
    for (int i = 0; i < n; i++) begin
      d = {d[126:0], d[127]} ^ rd(base + longint'(i));
    end
    return d;
  endfunction
endpackage
