// tb_subq_gen: local coupling matrices of BFS-selected subproblems.
// Subproblem A fills bank 0; then bank 0 is read out while subproblem B
// fills bank 1 at the same time (double buffering); then bank 1 is read
// out, and subproblem C reuses bank 0 to show that read-out left it empty.
// Every read-out word is compared with J between the selected spins, in
// upper-triangle order, and rd_done must come with the last word. The fill
// of A runs without gaps and must take one clock per valid edge (at least
// one per beat) plus one clock to take in the first beat.
module tb_subq_gen;
  import decomp_pkg::*;
  import tb_graph_pkg::*;
  localparam int SUB_N = 45;
  localparam int CW = $clog2(SUB_N + 1);
  logic clk = 0, rst_n = 1;
  int checks = 0, failures = 0;

  id_t list [SUB_N];
  logic [CW-1:0] count, rd_count;
  logic fill_bank, in_valid, in_ready, busy, rd_start, rd_bank, rd_valid, rd_ready, rd_done;
  row_beat_t in_beat;
  wgt_t rd_w;

  subq_gen #(.SUB_N(SUB_N)) dut (.*);
  always #5 clk = ~clk;

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  row_beat_t beats [$];
  int exp_edges;

  task automatic make_beats(int i);
    int off, n, nb;
    row_beat_t b;
    off = $urandom_range(0, P - 1);
    n = row_ids[i].size();
    nb = (off + n + P - 1) / P;
    for (int k = 0; k < nb; k++) begin
      int nv;
      b = '0; b.row = id_t'(i); b.last = (k == nb - 1); nv = 0;
      for (int l = 0; l < P; l++) begin
        int x;
        x = k * P + l - off;
        if (x >= 0 && x < n) begin
          b.data[16*l +: 16] = enc(row_ids[i][x], row_wts[i][x]);
          b.lane_vld[l] = 1'b1; nv++;
        end else b.data[16*l +: 16] = 16'($urandom);
      end
      exp_edges += (nv == 0) ? 1 : nv;
      beats.push_back(b);
    end
  endtask

  int lists [3][$];

  task automatic fill(int which, bit gaps, output int cyc);
    beats.delete(); exp_edges = 0;
    foreach (lists[which][k]) make_beats(lists[which][k]);
    cyc = 0;
    while (beats.size() > 0) begin
      in_valid = gaps ? ($urandom_range(0, 2) != 0) : 1'b1;
      in_beat  = beats[0];
      @(negedge clk);
      if (in_valid && in_ready) void'(beats.pop_front());
      @(posedge clk); #1;
      cyc++;
    end
    in_valid = 0;
    while (busy) begin @(posedge clk); #1; cyc++; end
  endtask

  task automatic readout(int which, bit bank);
    int k, r, c, n;
    bit got_done;
    k = lists[which].size();
    rd_bank = bank; rd_count = CW'(k);
    rd_start = 1;
    @(posedge clk); #1 rd_start = 0;
    r = 0; c = 1; n = 0; got_done = 0;
    while (n < k * (k - 1) / 2) begin
      rd_ready = ($urandom_range(0, 3) != 0);
      @(negedge clk);
      if (rd_valid && rd_ready) begin
        int e;
        e = J[lists[which][r]][lists[which][c]];
        chk(int'(rd_w) == e, $sformatf("set %0d J(%0d,%0d) got %0d exp %0d", which, r, c, rd_w, e));
        n++;
        if (c == k - 1) begin r++; c = r + 1; end else c++;
      end
      @(posedge clk); #1;
      if (rd_done) got_done = 1;
    end
    rd_ready = 0;
    chk(got_done, "rd_done with the last word");
    @(negedge clk);
    chk(!rd_valid, "read-out stops after the triangle");
  endtask

  initial begin
    int cyc;
    in_valid = 0; in_beat = '0; rd_start = 0; rd_bank = 0; rd_ready = 0; rd_count = '0;
    fill_bank = 0; count = '0;
    foreach (list[k]) list[k] = '0;
    make_instance(20, 91, 3, 4, 0);
    ref_bfs(3, SUB_N, lists[0]);
    ref_bfs(11, SUB_N, lists[1]);
    ref_bfs(17, 30, lists[2]);
    #1 rst_n = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    while (busy) @(posedge clk);   // reset-time clear
    #1;
    // A into bank 0, no gaps: one clock per edge
    foreach (lists[0][k]) list[k] = id_t'(lists[0][k]);
    count = CW'(lists[0].size()); fill_bank = 0;
    fill(0, 0, cyc);
    chk(cyc == exp_edges + 1, $sformatf("fill rate: %0d edge slots took %0d clocks", exp_edges, cyc));
    // read bank 0 while B fills bank 1 (list contents belong to B meanwhile:
    // read-out does not use the CAM)
    foreach (lists[1][k]) list[k] = id_t'(lists[1][k]);
    count = CW'(lists[1].size()); fill_bank = 1;
    fork
      readout(0, 0);
      fill(1, 1, cyc);
    join
    readout(1, 1);
    foreach (lists[2][k]) list[k] = id_t'(lists[2][k]);
    count = CW'(lists[2].size()); fill_bank = 0;
    fill(2, 1, cyc);
    readout(2, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
