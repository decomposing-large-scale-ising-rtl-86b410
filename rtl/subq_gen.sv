// subq_gen: builds the local coupling matrix J_local of a subproblem.
//
// The selected-node list (global ids in local order) is the content of two
// content-addressable memories. Each neighbor entry of a streamed row forms
// an edge (u = row, v = id, w). The row CAM turns u into its local row
// index, the column CAM turns v into its local column index (match lines,
// then an encoder). When both hit and row < col, w is written into the
// SUB_N x SUB_N matrix at (row, col); the mirrored entry of the symmetric
// pair (row > col) and the diagonal (h_i, handled by the clamping engine)
// are skipped, so the matrix holds the upper triangle. Edges are handled one
// per cycle: a beat with k valid lanes takes k cycles (at least one), and a
// new beat is accepted in the cycle its last edge is processed.
//
// The matrix has two banks (double buffering): fill_bank selects the one
// being written while the other may be read out. Read-out (rd_start) walks
// the upper triangle of the first rd_count rows, row by row, one coupling
// per accepted rd_ready, and clears each entry as it reads it, so a bank is
// empty again for its next subproblem. rd_done pulses with the last word.
// Row/column CAMs, encoders, decoders and the 45 x 45 matrix follow the
// paper's subproblem-generator figure; upper-triangle storage, clear-on-read
// and the serial one-edge-per-cycle rate are this design's choices. After
// reset the unit spends SUB_N*SUB_N cycles clearing both banks (busy high).
module subq_gen
  import decomp_pkg::*;
#(
  parameter int unsigned SUB_N = 45,
  localparam int unsigned CW   = $clog2(SUB_N + 1),
  localparam int unsigned IW   = $clog2(SUB_N)
) (
  input  logic          clk,
  input  logic          rst_n,
  // CAM contents: the selected nodes
  input  id_t           list [SUB_N],
  input  logic [CW-1:0] count,
  input  logic          fill_bank,
  // row beats
  input  logic          in_valid,
  output logic          in_ready,
  input  row_beat_t     in_beat,
  output logic          busy,
  // read-out of the finished matrix
  input  logic          rd_start,
  input  logic          rd_bank,
  input  logic [CW-1:0] rd_count,
  output logic          rd_valid,
  input  logic          rd_ready,
  output wgt_t          rd_w,
  output logic          rd_done
);
  localparam int unsigned CELLS = SUB_N * SUB_N;
  localparam int unsigned MW    = $clog2(CELLS);

  logic [WGT_W-1:0] bank_rd [2];     // combinational read of each bank

  // ---------------- fill side ----------------
  row_beat_t       beat;
  logic            have;
  logic [P-1:0]    pend, pick, pend_nx;
  entry_t          e;
  logic            row_hit, col_hit;
  logic [IW-1:0]   row_idx, col_idx;
  logic            wr_en;
  logic [MW-1:0]   wr_addr;

  // next edge: lowest pending lane
  always_comb begin
    pick = '0;
    for (int l = P - 1; l >= 0; l--) if (pend[l]) pick = P'(1) << l;
  end
  assign pend_nx  = pend & ~pick;
  // after reset both banks are swept to zero once (CELLS cycles)
  logic          clr_act;
  logic [MW-1:0] clr_addr;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      clr_act <= 1'b1; clr_addr <= '0;
    end else if (clr_act) begin
      clr_addr <= clr_addr + 1'b1;
      if (clr_addr == MW'(CELLS - 1)) clr_act <= 1'b0;
    end
  end

  assign in_ready = !clr_act && (!have || (pend_nx == '0));
  assign busy     = have || clr_act;

  always_comb begin
    e = '0;
    for (int l = 0; l < P; l++) if (pick[l]) e = lane_entry(beat.data, l);
  end

  // row CAM and column CAM with encoders
  always_comb begin
    row_hit = 1'b0; col_hit = 1'b0; row_idx = '0; col_idx = '0;
    for (int k = 0; k < SUB_N; k++) begin
      if (k < int'(count) && list[k] == beat.row) begin row_hit = 1'b1; row_idx = IW'(k); end
      if (k < int'(count) && list[k] == e.id)     begin col_hit = 1'b1; col_idx = IW'(k); end
    end
  end

  assign wr_en   = have && (pick != '0) && row_hit && col_hit && (row_idx < col_idx);
  assign wr_addr = MW'(row_idx * SUB_N + col_idx);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      have <= 1'b0; pend <= '0; beat <= '0;
    end else begin
      if (in_valid && in_ready) begin
        have <= 1'b1;
        beat <= in_beat;
        pend <= in_beat.lane_vld;
      end else if (have) begin
        pend <= pend_nx;
        if (pend_nx == '0) have <= 1'b0;
      end
    end
  end

  // ---------------- read-out side ----------------
  logic          rd_act, rd_b;
  logic [IW-1:0] rr, rc;
  logic [CW-1:0] rk;
  logic [MW-1:0] rd_addr;
  logic          rd_last;

  assign rd_addr  = MW'(rr * SUB_N + rc);
  assign rd_valid = rd_act;
  assign rd_w     = wgt_t'(bank_rd[rd_b]);
  assign rd_last  = (CW'(rr) == rk - 2) && (CW'(rc) == rk - 1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_act <= 1'b0; rd_b <= 1'b0; rr <= '0; rc <= '0; rk <= '0; rd_done <= 1'b0;
    end else begin
      rd_done <= 1'b0;
      if (rd_start) begin
        rd_b <= rd_bank; rk <= rd_count; rr <= '0; rc <= IW'(1);
        if (rd_count < 2) rd_done <= 1'b1;
        else              rd_act  <= 1'b1;
      end else if (rd_act && rd_ready) begin
        if (rd_last) begin
          rd_act <= 1'b0; rd_done <= 1'b1;
        end else if (CW'(rc) == rk - 1) begin
          rr <= rr + 1'b1; rc <= rr + IW'(2);
        end else begin
          rc <= rc + 1'b1;
        end
      end
    end
  end

  // one write port per bank: fill has the bank unless it is being drained
  for (genvar b = 0; b < 2; b++) begin : g_bank
    logic [WGT_W-1:0] mat [CELLS];
    logic             we;
    logic [MW-1:0]    wa;
    logic [WGT_W-1:0] wd;
    always_comb begin
      we = 1'b0; wa = rd_addr; wd = '0;
      if (clr_act) begin
        we = 1'b1; wa = clr_addr;
      end else if (wr_en && fill_bank == 1'(b)) begin
        we = 1'b1; wa = wr_addr; wd = e.w;
      end else if (rd_act && rd_ready && rd_b == 1'(b)) begin
        we = 1'b1;
      end
    end
    always_ff @(posedge clk) if (we) mat[wa] <= wd;
    assign bank_rd[b] = mat[rd_addr];
  end

  // a bank is never filled and drained in the same cycle
  assert property (@(posedge clk) disable iff (!rst_n)
                   !(wr_en && rd_act && rd_ready && fill_bank == rd_b));
endmodule
