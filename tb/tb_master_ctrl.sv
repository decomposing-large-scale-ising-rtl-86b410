// tb_master_ctrl: the controller with behavioural neighbours.
// The GTU model answers each launch after a programmable delay with a random
// list of distinct spins; the row-reader/clamp model returns one field per
// requested row (a fixed function of the row) with random gaps; the h FIFO,
// generator busy flag and link answer with random delays. The testbench keeps
// its own copy of the global spins from the write port and checks:
//   INIT writes every spin once per run,
//   seeds stay below the variable count,
//   clamp rows are the current list in order and reach the h FIFO unchanged,
//   feedback writes the chip spins to the listed spins, then requests all
//   rows in order, and the energy equals -sum s_i f_i of the mirrored spins,
//   sat/done/irq and the iteration count follow the target and the limit,
//   every non-final iteration counts as either an overlap or a GTU wait,
//   rd_start/tx_start come once per iteration with the list count.
module tb_master_ctrl;
  import decomp_pkg::*;
  localparam int SUB_N = 8, CW = $clog2(SUB_N + 1);
  localparam int N = 40, NV = 30;
  logic clk = 0, rst_n = 1;
  int checks = 0, failures = 0;

  logic start; nspin_t cfg_n_spins, cfg_n_vars; logic [15:0] cfg_max_iter, cfg_seed;
  energy_t cfg_target; state_t state; logic done, irq, sat; logic [15:0] iter, stat_overlap, stat_gtu_wait;
  energy_t energy;
  logic gtu_start, gtu_bank, gtu_busy, gtu_done; id_t gtu_seed;
  id_t list [2][SUB_N]; logic [CW-1:0] count [2];
  logic rq_valid, rq_ready, feedback_mode, mask_en, cl_valid, cl_ready, cl_spin;
  id_t rq_row; field_t cl_field;
  logic hf_valid, hf_ready; field_t hf_data;
  logic cur_bank, subq_busy, rd_start, tx_start, tx_done, spins_valid;
  logic [CW-1:0] rd_count, tx_count; logic [SUB_N-1:0] spins;
  logic sp_we, sp_wdata; id_t sp_waddr;

  master_ctrl #(.SUB_N(SUB_N)) dut (.*);
  always #5 clk = ~clk;

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  function automatic field_t fval(int r); return field_t'((r * 7) % 23 - 11); endfunction

  int gtu_delay = 5;
  bit mirror [N];
  int init_writes;

  // ---------------- GTU model ----------------
  initial begin
    gtu_busy = 0; gtu_done = 0;
    for (int b = 0; b < 2; b++) begin count[b] = '0; for (int j = 0; j < SUB_N; j++) list[b][j] = '0; end
    forever begin
      @(posedge clk); #1;
      gtu_done = 0;
      if (gtu_start) begin
        int b; int kk; bit used [N];
        b = gtu_bank;
        chk(gtu_seed < NV, "seed below the variable count");
        gtu_busy = 1;
        repeat (gtu_delay) @(posedge clk);
        #1;
        kk = $urandom_range(SUB_N, 1);
        for (int j = 0; j < N; j++) used[j] = 0;
        list[b][0] = gtu_seed; used[gtu_seed] = 1;
        for (int j = 1; j < kk; j++) begin
          int x;
          do x = $urandom_range(N - 1); while (used[x]);
          used[x] = 1; list[b][j] = id_t'(x);
        end
        count[b] = CW'(kk);
        gtu_busy = 0; gtu_done = 1;
      end
    end
  end

  // ---------------- row reader + clamp model ----------------
  int rq_q [$];
  int clamp_rows [$];
  bit cl_take;
  always @(negedge clk) cl_take = rst_n && cl_valid && cl_ready;
  initial begin
    cl_valid = 0; cl_field = '0; cl_spin = 0; rq_ready = 0;
    forever begin
      @(posedge clk); #1;
      if (cl_take) begin void'(rq_q.pop_front()); cl_valid = 0; end
      rq_ready = ($urandom_range(3) != 0) && rq_q.size() < 4;
      if (!cl_valid && rq_q.size() > 0 && $urandom_range(2) != 0) begin
        cl_valid = 1; cl_field = fval(rq_q[0]); cl_spin = mirror[rq_q[0]];
      end
    end
  end

  // ---------------- h FIFO, generator, link ----------------
  field_t hf_seen [$];
  always @(posedge clk) begin hf_ready <= $urandom_range(3) != 0; subq_busy <= $urandom_range(2) == 0; end

  logic [SUB_N-1:0] chip_spins;
  initial begin
    tx_done = 0; spins_valid = 0; spins = '0;
    forever begin
      @(posedge clk); #1;
      tx_done = 0; spins_valid = 0;
      if (tx_start) begin
        repeat ($urandom_range(6, 1)) @(posedge clk);
        #1 tx_done = 1;
        @(posedge clk); #1 tx_done = 0;
        repeat ($urandom_range(10, 1)) @(posedge clk);
        #1;
        chip_spins = SUB_N'($urandom);
        spins = chip_spins; spins_valid = 1;
      end
    end
  end

  // ---------------- monitor ----------------
  state_t prev;
  int fb_rows [$];
  int wb_idx, n_iter_seen, n_rd, n_tx;
  bit in_wb;
  always @(negedge clk) if (rst_n) begin
    if (state == S_CLAMP_SUBQ && prev != S_CLAMP_SUBQ) begin
      clamp_rows.delete(); hf_seen.delete();
    end
    if (state == S_FEEDBACK && prev != S_FEEDBACK) begin fb_rows.delete(); wb_idx = 0; end
    if (rq_valid && rq_ready) begin
      rq_q.push_back(int'(rq_row));
      if (state == S_CLAMP_SUBQ) clamp_rows.push_back(int'(rq_row));
    end
    if (hf_valid && hf_ready) hf_seen.push_back(hf_data);
    if (sp_we) begin
      if (state == S_INIT) init_writes++;
      else if (state == S_FEEDBACK) begin
        chk(sp_waddr == list[cur_bank][wb_idx] && sp_wdata == chip_spins[wb_idx],
            $sformatf("write-back %0d: addr %0d exp %0d data %0d exp %0d t=%0t", wb_idx, sp_waddr, list[cur_bank][wb_idx], sp_wdata, chip_spins[wb_idx], $time));
        wb_idx++;
      end
      mirror[sp_waddr] = sp_wdata;
    end
    if (rd_start) begin n_rd++; chk(rd_count == count[cur_bank], "rd_count"); end
    if (tx_start) begin n_tx++; chk(tx_count == count[cur_bank], "tx_count"); end
    if (state == S_FEEDBACK && rq_valid && rq_ready) fb_rows.push_back(int'(rq_row));
    if (state != S_CLAMP_SUBQ && prev == S_CLAMP_SUBQ) begin
      int kk; kk = int'(count[cur_bank]);
      chk(clamp_rows.size() == kk && hf_seen.size() == kk, $sformatf("clamp rows %0d h' %0d k %0d t=%0t", clamp_rows.size(), hf_seen.size(), kk, $time));
      for (int j = 0; j < kk && j < clamp_rows.size() && j < hf_seen.size(); j++) begin
        chk(clamp_rows[j] == int'(list[cur_bank][j]), "clamp row order");
        chk(hf_seen[j] == fval(clamp_rows[j]), "h' passed to FIFO");
      end
    end
    if (state != S_FEEDBACK && prev == S_FEEDBACK) begin
      energy_t e; e = '0;
      n_iter_seen++;
      chk(wb_idx == int'(count[cur_bank]) || state == S_CLAMP_SUBQ, "all listed spins written back");
      chk(fb_rows.size() == N, "feedback requests every row");
      foreach (fb_rows[j]) chk(fb_rows[j] == j, "feedback row order");
      for (int i = 0; i < N; i++) e = mirror[i] ? e - energy_t'(fval(i)) : e + energy_t'(fval(i));
      chk(energy == e, $sformatf("energy got %0d exp %0d", energy, e));
    end
    if (prev == S_CORE_WAIT) chk(state inside {S_CORE_WAIT, S_FEEDBACK}, "core wait exit");
    prev = state;
  end

  task automatic run(int delay, int max_it, energy_t tgt, int seed, output int ov, output int wt);
    gtu_delay = delay;
    init_writes = 0; n_iter_seen = 0; n_rd = 0; n_tx = 0;
    cfg_max_iter = 16'(max_it); cfg_target = tgt; cfg_seed = 16'(seed);
    start = 1; @(posedge clk); #1 start = 0;
    @(negedge clk);
    while (!done) @(negedge clk);
    @(negedge clk);
    chk(init_writes >= N, "INIT wrote every spin");
    chk(int'(iter) == n_iter_seen && n_rd == n_iter_seen && n_tx == n_iter_seen,
        $sformatf("iter %0d feedbacks %0d rd %0d tx %0d", iter, n_iter_seen, n_rd, n_tx));
    chk(int'(stat_overlap) + int'(stat_gtu_wait) == int'(iter) - 1, "each iteration overlapped or waited");
    ov = stat_overlap; wt = stat_gtu_wait;
    repeat (30) @(posedge clk); #1;
  endtask

  int irq_cnt;
  always @(negedge clk) if (irq) irq_cnt++;

  initial begin
    int ov, wt, tot_ov = 0, tot_wt = 0, s_sat = 0, s_lim = 0;
    start = 0; cfg_n_spins = nspin_t'(N); cfg_n_vars = nspin_t'(NV);
    cfg_max_iter = '0; cfg_target = '0; cfg_seed = '0; irq_cnt = 0;
    #1 rst_n = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    // fast GTU: next traversal done before feedback ends
    run(3, 6, -energy_t'(100000), 16'h0BAD, ov, wt);
    chk(!sat && iter == 6 && ov > 0, "fast GTU: limit reached with overlap");
    tot_ov += ov; tot_wt += wt; if (!sat && iter == 6) s_lim++;
    // slow GTU: controller waits
    run(400, 5, -energy_t'(100000), 16'h0001, ov, wt);
    chk(!sat && iter == 5 && wt > 0, "slow GTU: limit reached with waits");
    tot_ov += ov; tot_wt += wt; if (!sat && iter == 5) s_lim++;
    // reachable target: done on the first energy check
    run(3, 50, energy_t'(100000), 16'h7777, ov, wt);
    chk(sat && iter == 1, "target met after one iteration");
    if (sat) s_sat++;
    // random delays and a target near the mirrored energies
    for (int r = 0; r < 6; r++) begin
      run($urandom_range(300, 1), 8, energy_t'($urandom_range(40)) - 20, $urandom, ov, wt);
      tot_ov += ov; tot_wt += wt;
      if (sat) begin s_sat++; chk(energy <= cfg_target, "sat only when energy reaches target"); end
      else begin s_lim++; chk(iter == 8 && energy > cfg_target, "limit only when target missed"); end
    end
    chk(irq_cnt == 9, $sformatf("one irq per run, got %0d", irq_cnt));
    $display("overlap %0d wait %0d sat runs %0d limit runs %0d", tot_ov, tot_wt, s_sat, s_lim);
    chk(tot_ov > 0 && tot_wt > 0 && s_sat > 0 && s_lim > 0, "all completion paths used");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired in state %s iter %0d", state.name(), iter);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
