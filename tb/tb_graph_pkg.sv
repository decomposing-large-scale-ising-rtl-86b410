// tb_graph_pkg: test instances and reference models for the decomposer
// testbenches.
//
// make_instance builds a clause-shaped Ising instance like the one the
// Chancellor construction gives for 3-SAT: n variables, m clauses, one
// ancilla spin per clause (id n+c), every clause coupling its three
// variables pairwise and each of them to its ancilla. Couplings and fields
// are planted: J_ij = w * t_i * t_j with w in 1..wmax and h_i = t_i * hmag,
// so the assignment t (t_i = +-1) is the unique ground state and its energy
// is the target the decomposer is given. Every spin's row holds its h_i as
// the diagonal entry. pack_csr lays the instance out as the decomposer reads
// it: 32-bit row pointers from byte 0, then 16-bit {id, weight} entries from
// a 16-byte aligned edge base.
// The reference functions compute, independently of the RTL, the BFS
// selection, clamped fields, full local fields and the energy.
package tb_graph_pkg;
  import decomp_pkg::*;

  int n_vars, n_clauses, n_spins;
  int J [][];            // J[i][j], symmetric, 0 = no coupling
  int h [];
  int t [];              // planted spins, +1 / -1
  int row_ids  [][$];    // CSR rows: ids in ascending order (with diagonal)
  int row_wts  [][$];
  logic [AXI_W-1:0] img [$];   // memory image, 16-byte beats
  int edge_base;         // byte address of the entries

  function automatic void make_instance(int n, int m, int wmax, int hmag, int isolated = 0);
    n_vars = n; n_clauses = m; n_spins = n + m;
    J = new[n_spins];
    foreach (J[i]) begin J[i] = new[n_spins]; foreach (J[i][j]) J[i][j] = 0; end
    h = new[n_spins]; t = new[n_spins];
    foreach (t[i]) begin t[i] = ($urandom_range(0, 1) == 1) ? 1 : -1; h[i] = t[i] * hmag; end
    for (int c = 0; c < m; c++) begin
      int v [3];
      int a;
      // the last `isolated` variables are left out of every clause
      v[0] = $urandom_range(0, n - 1 - isolated);
      do v[1] = $urandom_range(0, n - 1 - isolated); while (v[1] == v[0]);
      do v[2] = $urandom_range(0, n - 1 - isolated); while (v[2] == v[0] || v[2] == v[1]);
      a = n + c;
      for (int x = 0; x < 3; x++) begin
        add_pair(v[x], a, $urandom_range(1, wmax));
        for (int y = x + 1; y < 3; y++) add_pair(v[x], v[y], $urandom_range(1, wmax));
      end
    end
    row_ids = new[n_spins]; row_wts = new[n_spins];
    for (int i = 0; i < n_spins; i++) begin
      row_ids[i].delete(); row_wts[i].delete();
      for (int j = 0; j < n_spins; j++) begin
        if (j == i) begin row_ids[i].push_back(j); row_wts[i].push_back(h[i]); end
        else if (J[i][j] != 0) begin row_ids[i].push_back(j); row_wts[i].push_back(J[i][j]); end
      end
    end
  endfunction

  function automatic void add_pair(int i, int j, int w);
    int nw;
    nw = J[i][j] + w * t[i] * t[j];
    if (nw > 15) nw = 15;
    if (nw < -15) nw = -15;
    J[i][j] = nw; J[j][i] = nw;
  endfunction

  function automatic logic [ENTRY_W-1:0] enc(int id, int w);
    entry_t e;
    e.id = id_t'(id);
    e.w  = WGT_W'(w);
    return e;
  endfunction

  function automatic void pack_csr();
    int ptr [];
    int nent, nbeats_ptr, nbeats_e;
    logic [AXI_W-1:0] b;
    ptr = new[n_spins + 1];
    ptr[0] = 0;
    for (int i = 0; i < n_spins; i++) ptr[i+1] = ptr[i] + row_ids[i].size();
    nent = ptr[n_spins];
    nbeats_ptr = (4 * (n_spins + 1) + 15) / 16;
    edge_base  = 16 * nbeats_ptr;
    nbeats_e   = (nent + P - 1) / P;
    img.delete();
    for (int k = 0; k < nbeats_ptr; k++) begin
      b = '0;
      for (int l = 0; l < 4; l++) if (4*k + l <= n_spins) b[32*l +: 32] = ptr[4*k + l];
      img.push_back(b);
    end
    for (int k = 0; k < nbeats_e; k++) img.push_back('0);
    for (int i = 0; i < n_spins; i++)
      for (int x = 0; x < row_ids[i].size(); x++) begin
        int idx = ptr[i] + x;
        img[nbeats_ptr + idx / P][ENTRY_W*(idx % P) +: ENTRY_W] = enc(row_ids[i][x], row_wts[i][x]);
      end
  endfunction

  // spin bit to +-1
  function automatic int sv(bit s); return s ? 1 : -1; endfunction

  // reference BFS, same rules as the traversal unit
  function automatic void ref_bfs(int seed, int cap, output int list[$]);
    bit mem [];
    int head;
    mem = new[n_spins];
    list.delete();
    list.push_back(seed); mem[seed] = 1; head = 0;
    while (list.size() < cap && head < list.size()) begin
      int v = list[head];
      head++;
      if (v >= n_vars) continue;
      foreach (row_ids[v][x]) begin
        int u = row_ids[v][x];
        if (!mem[u] && list.size() < cap) begin list.push_back(u); mem[u] = 1; end
      end
    end
  endfunction

  // clamped field of spin i: h_i + sum over j outside insub of J_ij s_j
  function automatic int ref_clamp(int i, bit s [], bit insub [], bit mask_en);
    int f = h[i];
    for (int j = 0; j < n_spins; j++)
      if (j != i && J[i][j] != 0 && !(mask_en && insub[j])) f += J[i][j] * sv(s[j]);
    return f;
  endfunction

  function automatic longint ref_energy(bit s []);
    longint e = 0;
    for (int i = 0; i < n_spins; i++) e -= sv(s[i]) * ref_clamp(i, s, s, 1'b0);
    return e;
  endfunction

  function automatic longint planted_energy();
    bit s [];
    s = new[n_spins];
    foreach (s[i]) s[i] = (t[i] == 1);
    return ref_energy(s);
  endfunction
endpackage
