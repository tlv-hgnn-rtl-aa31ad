// Testbench of the vertex grouper.
//  1. The running example of the paper's vertex-grouping figure: six targets
//     P1..P6 with the printed Jaccard weights and N_max = 3 must end in the two
//     printed groups {P1,P2,P3} and {P4,P5,P6}.
//  2. Random graphs with random weights and N_max, compared with a software
//     model of the greedy algorithm (seed = lowest unvisited vertex, add the
//     candidate of largest positive gain, candidates in order of discovery):
//     the member stream, every vertex's group and the groups' inner and outer
//     weight sums.
module tb_vertex_grouper;
  import tlv_pkg::*;
  localparam int NV = 16, NE = 96, LN = 4;
  localparam int VW = $clog2(NV + 1), EW = $clog2(NE + 1);
  logic clk = 0, rst_n = 0;
  logic ld_we; logic [1:0] ld_sel; logic [EW-1:0] ld_addr; logic [31:0] ld_data;
  logic start; logic [VW-1:0] cfg_n, cfg_nmax;
  logic busy, done, mem_valid, mem_ready, grp_close;
  logic [VW-1:0] mem_vid, mem_gid, n_groups, vg_rd_addr, vg_rd_gid, gw_rd_addr;
  logic [39:0] gw_rd_in; logic signed [39:0] gw_rd_out;
  int checks = 0, failures = 0;

  vertex_grouper #(.N_HV(NV), .N_HE(NE), .LANES(LN)) dut (.*);
  always #5 clk = ~clk;

  // graph as a weight matrix (0 = no edge)
  int w [NV][NV];
  int n, nmax;

  // --- model ---
  int m_grp [NV];
  longint m_in [NV], m_out [NV];
  int m_order_v [$], m_order_g [$];
  int m_ngroups;

  task automatic model();
    longint k [NV], m2, sig, kin [NV], gin, gout;
    bit vis [NV];
    int cand [$];
    int g, size;
    m2 = 0;
    for (int i = 0; i < n; i++) begin
      k[i] = 0;
      for (int j = 0; j < n; j++) k[i] += w[i][j];
      m2 += k[i]; vis[i] = 0;
    end
    m_order_v.delete(); m_order_g.delete();
    g = 0;
    for (int s = 0; s < n; s++) begin
      int v; longint vkin;
      if (vis[s]) continue;
      cand.delete();
      for (int i = 0; i < n; i++) kin[i] = 0;
      sig = 0; gin = 0; gout = 0; size = 0;
      v = s; vkin = 0;
      forever begin
        longint best; int bi;
        vis[v] = 1; m_grp[v] = g; size++;
        m_order_v.push_back(v); m_order_g.push_back(g);
        sig += k[v]; gin += vkin; gout += k[v] - 2 * vkin;
        for (int j = 0; j < n; j++) if (w[v][j] != 0 && !vis[j]) begin
          bit seen; seen = 0;
          foreach (cand[c]) if (cand[c] == j) seen = 1;
          if (!seen) cand.push_back(j);
          kin[j] += w[v][j];
        end
        if (size == nmax) break;
        best = 0; bi = -1;
        foreach (cand[c]) if (!vis[cand[c]]) begin
          longint gn;
          gn = m2 * kin[cand[c]] - k[cand[c]] * sig;
          if (bi < 0 || gn > best) begin best = gn; bi = cand[c]; end
        end
        if (bi < 0 || best <= 0) break;
        v = bi; vkin = kin[bi];
      end
      m_in[g] = gin; m_out[g] = gout;
      g++;
    end
    m_ngroups = g;
  endtask

  // the adjacency order of the hardware walk must match the model's j order,
  // so neighbours are loaded in increasing ID order
  task automatic load_graph();
    int e;
    e = 0;
    for (int i = 0; i < n; i++) begin
      @(negedge clk); ld_we = 1; ld_sel = 0; ld_addr = EW'(i); ld_data = e;
      for (int j = 0; j < n; j++) if (w[i][j] != 0) begin
        @(negedge clk); ld_sel = 1; ld_addr = EW'(e); ld_data = j;
        @(negedge clk); ld_sel = 2; ld_addr = EW'(e); ld_data = w[i][j];
        e++;
      end
    end
    @(negedge clk); ld_sel = 0; ld_addr = EW'(n); ld_data = e;
    @(negedge clk); ld_we = 0;
  endtask

  int got_v [$], got_g [$];
  always @(posedge clk) if (mem_valid && mem_ready) begin got_v.push_back(int'(mem_vid)); got_g.push_back(int'(mem_gid)); end

  task automatic run_and_compare(bit fig);
    got_v.delete(); got_g.delete();
    load_graph();
    cfg_n = VW'(n); cfg_nmax = VW'(nmax);
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    while (!done) begin
      @(negedge clk);
      mem_ready = ($urandom_range(0, 3) != 0);
    end
    model();
    checks++;
    if (int'(n_groups) != m_ngroups) begin failures++; $display("groups %0d vs %0d", n_groups, m_ngroups); end
    checks++;
    if (got_v.size() != m_order_v.size()) failures++;
    else foreach (got_v[i]) begin
      checks++;
      if (got_v[i] != m_order_v[i] || got_g[i] != m_order_g[i]) failures++;
    end
    for (int i = 0; i < n; i++) begin
      vg_rd_addr = VW'(i); #1;
      checks++;
      if (int'(vg_rd_gid) != m_grp[i]) failures++;
    end
    for (int g = 0; g < m_ngroups; g++) begin
      gw_rd_addr = VW'(g); #1;
      checks += 2;
      if (longint'(gw_rd_in) != m_in[g]) failures++;
      if (longint'(gw_rd_out) != m_out[g]) failures++;
    end
    if (fig) begin
      // printed outcome: {P1,P2,P3} and {P4,P5,P6}
      checks++;
      if (!(m_grp[0] == m_grp[1] && m_grp[1] == m_grp[2] && m_grp[3] == m_grp[4] &&
            m_grp[4] == m_grp[5] && m_grp[0] != m_grp[3])) failures++;
      for (int i = 0; i < 6; i++) begin
        vg_rd_addr = VW'(i); #1;
        checks++;
        if (int'(vg_rd_gid) != ((i < 3) ? 0 : 1)) failures++;
      end
    end
  endtask

  function automatic int q16(real x);
    return int'(x * 65536.0 + 0.5);
  endfunction

  task automatic set_edge(int a, int b, real x);
    w[a][b] = q16(x); w[b][a] = q16(x);
  endtask

  initial begin
    ld_we = 0; ld_sel = 0; ld_addr = 0; ld_data = 0; start = 0; mem_ready = 1;
    cfg_n = 0; cfg_nmax = 0; vg_rd_addr = 0; gw_rd_addr = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    // 1. the paper's example
    for (int i = 0; i < NV; i++) for (int j = 0; j < NV; j++) w[i][j] = 0;
    n = 6; nmax = 3;
    set_edge(0, 1, 5.0/8);  set_edge(0, 2, 6.0/10); set_edge(0, 3, 1.0/12);
    set_edge(1, 2, 2.0/9);  set_edge(1, 3, 1.0/9);  set_edge(2, 3, 1.0/10);
    set_edge(2, 4, 1.0/11); set_edge(2, 5, 2.0/10); set_edge(3, 4, 4.0/7);
    set_edge(3, 5, 4.0/7);  set_edge(4, 5, 4.0/8);
    run_and_compare(1);
    // 2. random graphs
    for (int t = 0; t < 12; t++) begin
      int ne;
      n = $urandom_range(5, NV); nmax = $urandom_range(2, 6);
      for (int i = 0; i < NV; i++) for (int j = 0; j < NV; j++) w[i][j] = 0;
      ne = 0;
      for (int i = 0; i < n; i++) for (int j = i + 1; j < n; j++)
        if ($urandom_range(0, 3) == 0 && ne + 2 <= NE) begin
          int x; x = $urandom_range(1, 65535);
          w[i][j] = x; w[j][i] = x; ne += 2;
        end
      run_and_compare(0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
