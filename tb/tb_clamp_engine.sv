// tb_clamp_engine: clamped and full local fields of a clause-shaped instance.
// Random global spins are written into a spin_mem, a random subset of spins
// forms the mask. Rows are fed as lane beats (random lane offset, as they
// come out of the CSR) and each output is compared with the reference sum,
// in both modes (mask on: h_i', mask off: full field) and with the row's
// own spin. Pass 1 streams without stalls and checks the rate of one beat
// per clock and a latency of two clocks after the last beat; pass 2 adds
// random gaps and output backpressure.
module tb_clamp_engine;
  import decomp_pkg::*;
  import tb_graph_pkg::*;
  logic clk = 0, rst_n = 1;
  int checks = 0, failures = 0;

  logic mask_en;
  logic [N_MAX-1:0] member;
  logic in_valid, in_ready, out_valid, out_ready, out_spin, spin_re;
  row_beat_t in_beat;
  id_t spin_raddr [P+1];
  logic [P:0] spin_rdata;
  id_t out_row;
  field_t out_field;

  logic we, wdata;
  id_t waddr;
  logic [P:0] re;
  id_t raddr [P+1];

  spin_mem #(.DEPTH(N_MAX), .NRD(P+1)) u_sp (.clk, .we, .waddr, .wdata, .re, .raddr, .rdata(spin_rdata));
  assign re = {(P+1){spin_re}};
  assign raddr = spin_raddr;

  clamp_engine dut (.*);

  always #5 clk = ~clk;

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  bit s [];
  bit insub [];
  row_beat_t beats [$];
  int exp_row [$];
  int exp_f [$];
  bit exp_s [$];

  // lane beats of row i, starting at a random lane
  task automatic make_beats(int i);
    int off, n, nb;
    row_beat_t b;
    off = $urandom_range(0, P - 1);
    n = row_ids[i].size();
    nb = (off + n + P - 1) / P;
    for (int k = 0; k < nb; k++) begin
      b = '0;
      b.row = id_t'(i);
      b.last = (k == nb - 1);
      for (int l = 0; l < P; l++) begin
        int x;
        x = k * P + l - off;
        if (x >= 0 && x < n) begin
          b.data[16*l +: 16] = enc(row_ids[i][x], row_wts[i][x]);
          b.lane_vld[l] = 1'b1;
        end else begin
          b.data[16*l +: 16] = 16'($urandom);   // neighbouring rows' entries
        end
      end
      beats.push_back(b);
    end
  endtask

  // collect outputs
  int nout = 0;
  always @(negedge clk) if (rst_n && out_valid && out_ready) begin
    int r, f;
    bit sb;
    r = exp_row.pop_front(); f = exp_f.pop_front(); sb = exp_s.pop_front();
    chk(int'(out_row) == r, $sformatf("row %0d exp %0d", out_row, r));
    chk(int'(out_field) == f, $sformatf("row %0d field %0d exp %0d (mask %0d)", r, out_field, f, mask_en));
    chk(out_spin == sb, "row spin");
    nout++;
  end

  task automatic run_pass(bit gaps, bit m);
    int nrows, cyc, nbeats;
    mask_en = m;
    beats.delete();
    nrows = 0;
    for (int i = 0; i < n_spins; i++) begin
      make_beats(i);
      exp_row.push_back(i);
      exp_f.push_back(ref_clamp(i, s, insub, m));
      exp_s.push_back(s[i]);
      nrows++;
    end
    nbeats = beats.size();
    nout = 0; cyc = 0;
    while (beats.size() > 0) begin
      in_valid = gaps ? ($urandom_range(0, 3) != 0) : 1'b1;
      in_beat = beats[0];
      out_ready = gaps ? ($urandom_range(0, 2) != 0) : 1'b1;
      @(negedge clk);
      if (in_valid && in_ready) void'(beats.pop_front());
      @(posedge clk); #1;
      cyc++;
    end
    in_valid = 0;
    while (nout < nrows) begin
      out_ready = gaps ? ($urandom_range(0, 2) != 0) : 1'b1;
      @(posedge clk); #1;
      cyc++;
    end
    if (!gaps) begin
      chk(cyc == nbeats + 2, $sformatf("rate: %0d beats took %0d clocks", nbeats, cyc));
    end
  endtask

  initial begin
    in_valid = 0; in_beat = '0; out_ready = 1; mask_en = 0; member = '0;
    we = 0; wdata = 0; waddr = '0;
    make_instance(50, 218, 3, 5, 0);          // uf50-sized: 268 spins
    s = new[n_spins]; insub = new[n_spins];
    #1 rst_n = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int i = 0; i < n_spins; i++) begin
      s[i] = 1'($urandom);
      insub[i] = ($urandom_range(0, 3) == 0);
      member[i] = insub[i];
      we = 1; waddr = id_t'(i); wdata = s[i];
      @(posedge clk); #1;
    end
    we = 0;
    run_pass(0, 1);
    run_pass(0, 0);
    run_pass(1, 1);
    run_pass(1, 0);
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
