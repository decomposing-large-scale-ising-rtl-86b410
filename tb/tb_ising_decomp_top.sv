// tb_ising_decomp_top: the whole decomposer at its default parameters,
// solving planted clause-shaped instances with the behavioural chip model.
//
// Every frame the chip receives is checked against values computed here:
// the selected spins must be the BFS of the unit's seed, the frame size their
// count, each h' the clamped field of the global solution as read back
// through the host port, and each J the coupling between the selected spins.
// Runs:
//   A  uf20-sized instance (20 variables, 91 clauses, 111 spins), target =
//      planted energy: must end with sat and the planted solution;
//   B  same instance, unreachable target, 3 iterations: must stop on the
//      iteration limit without sat;
//   C  uf50-sized instance (50 variables, 218 clauses, 268 spins) with three
//      variables in no clause, so some traversals end with an empty queue:
//      must end with sat and the planted energy.
// Counted mechanisms, each of which must occur: BFS(k+1) finished during
// Core(k)/Feedback(k) (overlap), waiting for the GTU, BFS ending at capacity,
// BFS ending with an empty queue, the row stream stalled by the subproblem
// generator (backpressure), both list/matrix banks used, done by sat, done
// by the iteration limit, the J FIFO filling up because the link side (own
// clock, 125 MHz against 100 MHz) drains it more slowly than it is written.
module tb_ising_decomp_top;
  import decomp_pkg::*;
  import tb_graph_pkg::*;
  localparam int SUB_N = 45, LINK_W = 10, MEM_BEATS = 4096;
  localparam int CW = $clog2(SUB_N + 1);
  localparam int C_CAP = 45, C_ITER = 300;
  logic clk = 0, link_clk = 0, rst_n = 1;
  int checks = 0, failures = 0;

  logic host_we;
  logic [$clog2(MEM_BEATS)-1:0] host_waddr;
  logic [AXI_W-1:0] host_wdata;
  logic start, done, irq, sat;
  nspin_t cfg_n_spins, cfg_n_vars;
  logic [ADDR_W-1:0] cfg_rowptr_base, cfg_edge_base;
  logic [CW-1:0] cfg_cap;
  logic [15:0] cfg_max_iter, cfg_seed, iter, stat_overlap, stat_gtu_wait;
  energy_t cfg_target, energy;
  state_t state;
  id_t spin_rd_addr;
  logic spin_rd_data;
  logic ser_tx_valid, ser_tx_sof, ser_rx_valid;
  logic [LINK_W-1:0] ser_tx_data, ser_rx_data;

  ising_decomp_top dut (.*);
  cobi_chip_model #(.SUB_N(SUB_N), .LINK_W(LINK_W), .ANNEAL_CYCLES(400)) chip (.*, .clk(link_clk));

  always #5 clk = ~clk;          // decomposer clock, 100 MHz
  always #4 link_clk = ~link_clk; // link clock, 125 MHz, unrelated phase

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // mechanism counters
  int m_overlap = 0, m_gtu_wait = 0, m_cap_stop = 0, m_empty_stop = 0;
  int m_jfifo_full = 0;
  int m_backpressure = 0, m_bank0 = 0, m_bank1 = 0, m_sat = 0, m_limit = 0, m_frames = 0;
  int cur_cap;
  state_t prev_state;

  // per-stage clock counts of the current run
  int t_gtu_busy, t_clamp, t_feedback, t_dispatch_wait, n_gtu_runs;
  always @(negedge clk) if (rst_n) begin
    if (dut.u_gtu.busy) t_gtu_busy++;
    if (dut.u_gtu.done) n_gtu_runs++;
    if (state == S_CLAMP_SUBQ) t_clamp++;
    if (state == S_FEEDBACK) t_feedback++;
    if (state == S_DISPATCH || state == S_CORE_WAIT) t_dispatch_wait++;
    if (dut.c_bt_valid && !dut.c_bt_ready) m_backpressure++;
    if (dut.rd_valid && !dut.rd_ready) m_jfifo_full++;
    if (dut.u_gtu.done) begin
      if (int'(dut.u_gtu.count[dut.u_gtu.bk]) == cur_cap) m_cap_stop++; else m_empty_stop++;
    end
    if (state == S_CLAMP_SUBQ && prev_state != S_CLAMP_SUBQ) begin
      if (dut.u_ctrl.cur_bank) m_bank1++; else m_bank0++;
    end
    prev_state = state;
  end

  // read the global solution through the host port
  task automatic read_spins(output bit s []);
    s = new[n_spins];
    for (int i = 0; i < n_spins; i++) begin
      spin_rd_addr = id_t'(i);
      @(posedge clk); #1;
      s[i] = spin_rd_data;
    end
  endtask

  // frame checker: runs while the chip anneals
  int frames_checked = 0;
  bit checking = 0;
  always @(posedge clk) begin
    if (rst_n && !checking && chip.frames > frames_checked) begin
      bit s [];
      bit insub [];
      int lst [$];
      int ref_list [$];
      int k;
      bit b;
      checking = 1;
      frames_checked = chip.frames;
      m_frames++;
      b = dut.u_ctrl.cur_bank;
      k = int'(dut.u_gtu.count[b]);
      lst.delete();
      for (int r = 0; r < k; r++) lst.push_back(int'(dut.u_gtu.list[b][r]));
      #1;
      read_spins(s);
      insub = new[n_spins];
      foreach (lst[r]) insub[lst[r]] = 1;
      ref_bfs(lst[0], cur_cap, ref_list);
      chk(ref_list == lst, $sformatf("frame %0d: selection is the BFS of seed %0d", m_frames, lst[0]));
      chk(chip.k == k, "frame size");
      for (int r = 0; r < k; r++)
        chk(chip.hf[r] == ref_clamp(lst[r], s, insub, 1'b1),
            $sformatf("frame %0d h'[%0d] got %0d exp %0d", m_frames, r, chip.hf[r], ref_clamp(lst[r], s, insub, 1'b1)));
      for (int r = 0; r < k; r++)
        for (int c = r + 1; c < k; c++)
          chk(chip.jm[r][c] == J[lst[r]][lst[c]], $sformatf("frame %0d J[%0d][%0d]", m_frames, r, c));
      checking = 0;
    end
  end

  task automatic load_and_run(int cap, int max_iter, longint target, int seed, output int cycles);
    foreach (img[a]) begin
      host_we = 1; host_waddr = 12'(a); host_wdata = img[a];
      @(posedge clk); #1;
    end
    host_we = 0;
    cur_cap = cap;
    cfg_n_spins = nspin_t'(n_spins); cfg_n_vars = nspin_t'(tb_graph_pkg::n_vars);
    cfg_rowptr_base = '0; cfg_edge_base = ADDR_W'(edge_base);
    cfg_cap = CW'(cap); cfg_max_iter = 16'(max_iter); cfg_target = energy_t'(target);
    cfg_seed = 16'(seed);
    t_gtu_busy = 0; t_clamp = 0; t_feedback = 0; t_dispatch_wait = 0; n_gtu_runs = 0;
    start = 1;
    @(posedge clk); #1 start = 0;
    cycles = 0;
    forever begin @(negedge clk); cycles++; if (done) break; end
    $display("  per iteration (clocks): BFS %0d, clamp+build %0d, dispatch+core %0d, feedback %0d",
             t_gtu_busy / (n_gtu_runs ? n_gtu_runs : 1), t_clamp / int'(iter), t_dispatch_wait / int'(iter),
             t_feedback / int'(iter));
    m_overlap += int'(stat_overlap);
    m_gtu_wait += int'(stat_gtu_wait) + 1;     // the first BFS is always waited for
    wait (!checking);
    @(posedge clk); #1;
  endtask

  initial begin
    bit s [];
    int cycles;
    longint tgt;
    host_we = 0; host_waddr = '0; host_wdata = '0; start = 0; spin_rd_addr = '0;
    cfg_n_spins = '0; cfg_n_vars = '0; cfg_rowptr_base = '0; cfg_edge_base = '0;
    cfg_cap = '0; cfg_max_iter = '0; cfg_target = '0; cfg_seed = '0;
    #1 rst_n = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    while (dut.u_subq.clr_act) @(posedge clk);
    #1;

    // ---- run A ----
    make_instance(20, 91, 2, 6, 0);
    pack_csr();
    tgt = planted_energy();
    load_and_run(SUB_N, 200, tgt, 16'hACE1, cycles);
    $display("A: CSR image %0d beats of %0d", img.size(), MEM_BEATS);
    $display("A: %0d spins, done after %0d iterations, %0d clocks, energy %0d target %0d sat %0d",
             n_spins, iter, cycles, energy, tgt, sat);
    chk(sat, "A ends satisfied");
    chk(energy == energy_t'(tgt), "A energy equals the planted energy");
    read_spins(s);
    for (int i = 0; i < n_spins; i++) chk(s[i] == (t[i] == 1), $sformatf("A spin %0d", i));
    if (sat) m_sat++;

    // ---- run B ----
    load_and_run(SUB_N, 3, tgt - 1, 16'h1234, cycles);
    $display("B: stopped after %0d iterations, sat %0d", iter, sat);
    chk(!sat && iter == 16'd3, "B stops on the iteration limit");
    if (!sat && iter == 3) m_limit++;

    // ---- run C ----
    make_instance(50, 218, 2, 6, 3);
    pack_csr();
    tgt = planted_energy();
    load_and_run(C_CAP, C_ITER, tgt, 16'h5EED, cycles);
    $display("C: CSR image %0d beats of %0d", img.size(), MEM_BEATS);
    $display("C: %0d spins, done after %0d iterations, %0d clocks, energy %0d target %0d sat %0d",
             n_spins, iter, cycles, energy, tgt, sat);
    chk(sat, "C ends satisfied");
    chk(energy == energy_t'(tgt), "C energy equals the planted energy");
    if (sat) m_sat++;

    $display("frames %0d overlap %0d gtu_wait %0d cap_stop %0d empty_stop %0d backpressure %0d bank0 %0d bank1 %0d sat %0d limit %0d jfifo_full %0d",
             m_frames, m_overlap, m_gtu_wait, m_cap_stop, m_empty_stop, m_backpressure, m_bank0, m_bank1, m_sat, m_limit, m_jfifo_full);
    chk(m_overlap > 0, "BFS(k+1) overlapped Core(k)");
    chk(m_gtu_wait > 0, "controller waited for the GTU");
    chk(m_cap_stop > 0, "BFS stopped at capacity");
    chk(m_empty_stop > 0, "BFS stopped with an empty queue");
    chk(m_backpressure > 0, "row stream backpressure");
    chk(m_jfifo_full > 0, "J FIFO full: link-clock side stalls the matrix read-out");
    chk(m_bank0 > 0 && m_bank1 > 0, "both banks used");
    chk(m_sat > 0, "done by satisfaction");
    chk(m_limit > 0, "done by iteration limit");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
