// ising_decomp_top: FPGA decomposer for large Ising problems, on-chip CSR mode.
//
// The chip solving the Ising problem (a 50-spin oscillator array) is far
// smaller than the problems it must solve, so this unit cuts the global
// problem into subproblems of at most SUB_N spins, one per iteration:
//   1. the graph traversal unit (gtu) picks a connected set of spins by BFS;
//   2. one CSR row stream feeds, in parallel, the clamping engine, which
//      folds the fixed outside spins into the fields h_i', and the
//      subproblem generator, which gathers the couplings J_local;
//   3. the serial link sends (h', J_local) to the chip and receives spins;
//   4. the returned spins overwrite the global solution and the full energy
//      is checked against the host's target.
// BFS(k+1) runs while iteration k is transferred, solved and fed back.
//
// The global problem sits in csr_bram, which the host fills through the
// load port (row pointers at cfg_rowptr_base, entries at cfg_edge_base, byte
// addresses, beats of 16 bytes). Two AXI4 read masters serve the traversal
// and the clamp/subproblem stream; in the external-DDR variant they would go
// to the DDR controller through an AXI interconnect instead. The host reads
// the solution through spin_rd_addr/spin_rd_data (one-cycle latency).
// Signals to the chip: ser_tx_* out, ser_rx_* in (LINK_W bits per
// link_clk). The link runs in its own clock domain: h' and J reach it
// through dual-clock FIFOs (async_fifo), its start/done/spins-valid pulses
// cross through toggle synchronisers (pulse_sync), and tx_count and the
// returned spins, which stay stable around those pulses, cross directly.
// Block structure and data flow follow the paper's architecture figures;
// widths, framing and memory map are this design's.
module ising_decomp_top
  import decomp_pkg::*;
#(
  parameter int unsigned SUB_N       = 45,
  parameter int unsigned MEM_BEATS   = 4096,
  parameter int unsigned MAX_BURST   = 16,
  parameter int unsigned LINK_W      = 10,
  parameter int unsigned HFIFO_DEPTH = 64,
  parameter int unsigned JFIFO_DEPTH = 16,
  localparam int unsigned CW         = $clog2(SUB_N + 1)
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         link_clk,   // serial link clock
  // host: problem load
  input  logic                         host_we,
  input  logic [$clog2(MEM_BEATS)-1:0] host_waddr,
  input  logic [AXI_W-1:0]             host_wdata,
  // host: configuration and control
  input  logic                         start,
  input  nspin_t                       cfg_n_spins,
  input  nspin_t                       cfg_n_vars,
  input  logic [ADDR_W-1:0]            cfg_rowptr_base,
  input  logic [ADDR_W-1:0]            cfg_edge_base,
  input  logic [CW-1:0]                cfg_cap,
  input  logic [15:0]                  cfg_max_iter,
  input  energy_t                      cfg_target,
  input  logic [15:0]                  cfg_seed,
  output logic                         done,
  output logic                         irq,
  output logic                         sat,
  output logic [15:0]                  iter,
  output energy_t                      energy,
  output state_t                       state,
  output logic [15:0]                  stat_overlap,
  output logic [15:0]                  stat_gtu_wait,
  // host: solution read-back
  input  id_t                          spin_rd_addr,
  output logic                         spin_rd_data,
  // serial link to the COBI chip
  output logic                         ser_tx_valid,
  output logic                         ser_tx_sof,
  output logic [LINK_W-1:0]            ser_tx_data,
  input  logic                         ser_rx_valid,
  input  logic [LINK_W-1:0]            ser_rx_data
);
  // ---------------- memory and AXI ----------------
  logic [1:0]        ar_valid, ar_ready, r_valid, r_ready, r_last;
  logic [ADDR_W-1:0] ar_addr [2];
  logic [7:0]        ar_len  [2];
  logic [AXI_W-1:0]  r_data  [2];

  csr_bram #(.MEM_BEATS(MEM_BEATS), .NPORTS(2)) u_mem (
    .clk, .rst_n, .host_we, .host_waddr, .host_wdata,
    .ar_valid, .ar_ready, .ar_addr, .ar_len, .r_valid, .r_ready, .r_data, .r_last);

  // reader 0: traversal
  logic      g_rq_valid, g_rq_ready, g_bt_valid, g_bt_ready;
  id_t       g_rq_row;
  row_beat_t g_beat;
  logic [15:0] g_beats;

  csr_row_reader #(.MAX_BURST(MAX_BURST)) u_rd_gtu (
    .clk, .rst_n, .rowptr_base(cfg_rowptr_base), .edge_base(cfg_edge_base),
    .req_valid(g_rq_valid), .req_ready(g_rq_ready), .req_row(g_rq_row),
    .ar_valid(ar_valid[0]), .ar_ready(ar_ready[0]), .ar_addr(ar_addr[0]), .ar_len(ar_len[0]),
    .r_valid(r_valid[0]), .r_ready(r_ready[0]), .r_data(r_data[0]), .r_last(r_last[0]),
    .out_valid(g_bt_valid), .out_ready(g_bt_ready), .out_beat(g_beat), .beats_read(g_beats));

  // reader 1: clamp / subproblem / energy stream
  logic      c_rq_valid, c_rq_ready, c_bt_valid, c_bt_ready;
  id_t       c_rq_row;
  row_beat_t c_beat;
  logic [15:0] c_beats;

  csr_row_reader #(.MAX_BURST(MAX_BURST)) u_rd_row (
    .clk, .rst_n, .rowptr_base(cfg_rowptr_base), .edge_base(cfg_edge_base),
    .req_valid(c_rq_valid), .req_ready(c_rq_ready), .req_row(c_rq_row),
    .ar_valid(ar_valid[1]), .ar_ready(ar_ready[1]), .ar_addr(ar_addr[1]), .ar_len(ar_len[1]),
    .r_valid(r_valid[1]), .r_ready(r_ready[1]), .r_data(r_data[1]), .r_last(r_last[1]),
    .out_valid(c_bt_valid), .out_ready(c_bt_ready), .out_beat(c_beat), .beats_read(c_beats));

  // ---------------- traversal ----------------
  logic             gtu_start, gtu_bank, gtu_busy, gtu_done;
  id_t              gtu_seed;
  logic [N_MAX-1:0] member;
  id_t              list  [2][SUB_N];
  logic [CW-1:0]    count [2];

  gtu #(.SUB_N(SUB_N)) u_gtu (
    .clk, .rst_n, .start(gtu_start), .bank(gtu_bank), .seed(gtu_seed),
    .n_vars(cfg_n_vars), .cap(cfg_cap), .busy(gtu_busy), .done(gtu_done),
    .member, .list, .count,
    .req_valid(g_rq_valid), .req_ready(g_rq_ready), .req_row(g_rq_row),
    .in_valid(g_bt_valid), .in_ready(g_bt_ready), .in_beat(g_beat));

  // ---------------- global solution ----------------
  localparam int unsigned NRD = P + 2;
  logic           sp_we, sp_wdata;
  id_t            sp_waddr;
  logic [NRD-1:0] sp_re, sp_rdata;
  id_t            sp_raddr [NRD];
  logic           cl_spin_re;
  id_t            cl_raddr [P+1];

  always_comb begin
    for (int i = 0; i <= P; i++) begin
      sp_raddr[i] = cl_raddr[i];
      sp_re[i]    = cl_spin_re;
    end
    sp_raddr[P+1] = spin_rd_addr;
    sp_re[P+1]    = 1'b1;
  end
  assign spin_rd_data = sp_rdata[P+1];

  spin_mem #(.DEPTH(N_MAX), .NRD(NRD)) u_spins (
    .clk, .we(sp_we), .waddr(sp_waddr), .wdata(sp_wdata),
    .re(sp_re), .raddr(sp_raddr), .rdata(sp_rdata));

  // ---------------- row stream fork ----------------
  logic fb_mode;
  logic cl_in_valid, cl_in_ready, sq_in_valid, sq_in_ready;

  assign cl_in_valid = c_bt_valid && (fb_mode || sq_in_ready);
  assign sq_in_valid = c_bt_valid && !fb_mode && cl_in_ready;
  assign c_bt_ready  = cl_in_ready && (fb_mode || sq_in_ready);

  // ---------------- clamping engine ----------------
  logic   mask_en, cl_valid, cl_ready, cl_spin;
  id_t    cl_row;
  field_t cl_field;

  clamp_engine u_clamp (
    .clk, .rst_n, .mask_en, .member,
    .in_valid(cl_in_valid), .in_ready(cl_in_ready), .in_beat(c_beat),
    .spin_re(cl_spin_re), .spin_raddr(cl_raddr), .spin_rdata(sp_rdata[P:0]),
    .out_valid(cl_valid), .out_ready(cl_ready), .out_row(cl_row),
    .out_field(cl_field), .out_spin(cl_spin));

  // ---------------- h FIFO (decomposer clock -> link clock) ----------------
  logic   hf_valid, hf_ready, ho_valid, ho_ready;
  field_t hf_data, ho_data;

  async_fifo #(.WIDTH(FIELD_W), .DEPTH(HFIFO_DEPTH)) u_hfifo (
    .rst_n, .wclk(clk), .in_valid(hf_valid), .in_ready(hf_ready), .in_data(hf_data),
    .rclk(link_clk), .out_valid(ho_valid), .out_ready(ho_ready), .out_data(ho_data));

  // ---------------- subproblem generator ----------------
  logic          cur_bank, subq_busy, rd_start, rd_valid, rd_ready, rd_done;
  logic [CW-1:0] rd_count;
  wgt_t          rd_w;

  subq_gen #(.SUB_N(SUB_N)) u_subq (
    .clk, .rst_n, .list(list[cur_bank]), .count(count[cur_bank]), .fill_bank(cur_bank),
    .in_valid(sq_in_valid), .in_ready(sq_in_ready), .in_beat(c_beat), .busy(subq_busy),
    .rd_start, .rd_bank(cur_bank), .rd_count, .rd_valid, .rd_ready, .rd_w, .rd_done);

  // ---------------- J FIFO (decomposer clock -> link clock) ----------------
  logic jo_valid, jo_ready;
  wgt_t jo_data;

  async_fifo #(.WIDTH(WGT_W), .DEPTH(JFIFO_DEPTH)) u_jfifo (
    .rst_n, .wclk(clk), .in_valid(rd_valid), .in_ready(rd_ready), .in_data(rd_w),
    .rclk(link_clk), .out_valid(jo_valid), .out_ready(jo_ready), .out_data(jo_data));

  // ---------------- serial link (link clock) ----------------
  // tx_count and spins are held stable for thousands of clocks around the
  // pulses that announce them, so they cross without synchronisers.
  logic             tx_start, tx_done, spins_valid;
  logic             l_tx_start, l_tx_busy, l_tx_done, l_spins_valid;
  logic [CW-1:0]    tx_count;
  logic [SUB_N-1:0] spins;

  pulse_sync u_sync_start (.rst_n, .src_clk(clk), .src_pulse(tx_start),
                           .dst_clk(link_clk), .dst_pulse(l_tx_start));
  pulse_sync u_sync_done  (.rst_n, .src_clk(link_clk), .src_pulse(l_tx_done),
                           .dst_clk(clk), .dst_pulse(tx_done));
  pulse_sync u_sync_spins (.rst_n, .src_clk(link_clk), .src_pulse(l_spins_valid),
                           .dst_clk(clk), .dst_pulse(spins_valid));

  cobi_link #(.SUB_N(SUB_N), .LINK_W(LINK_W)) u_link (
    .clk(link_clk), .rst_n, .tx_start(l_tx_start), .tx_count, .tx_busy(l_tx_busy), .tx_done(l_tx_done),
    .h_valid(ho_valid), .h_ready(ho_ready), .h_data(ho_data),
    .j_valid(jo_valid), .j_ready(jo_ready), .j_data(jo_data),
    .ser_tx_valid, .ser_tx_sof, .ser_tx_data, .ser_rx_valid, .ser_rx_data,
    .spins_valid(l_spins_valid), .spins);

  // ---------------- master controller ----------------
  master_ctrl #(.SUB_N(SUB_N)) u_ctrl (
    .clk, .rst_n, .start, .cfg_n_spins, .cfg_n_vars, .cfg_max_iter,
    .cfg_target, .cfg_seed, .state, .done, .irq, .sat, .iter, .energy,
    .stat_overlap, .stat_gtu_wait,
    .gtu_start, .gtu_bank, .gtu_seed, .gtu_busy, .gtu_done, .list, .count,
    .rq_valid(c_rq_valid), .rq_ready(c_rq_ready), .rq_row(c_rq_row), .feedback_mode(fb_mode),
    .mask_en, .cl_valid, .cl_ready, .cl_field, .cl_spin,
    .hf_valid, .hf_ready, .hf_data,
    .cur_bank, .subq_busy, .rd_start, .rd_count,
    .tx_start, .tx_count, .tx_done, .spins_valid, .spins,
    .sp_we, .sp_waddr, .sp_wdata);
endmodule
