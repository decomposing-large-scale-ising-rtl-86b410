// csr_row_reader: fetches one CSR row over AXI4 and streams it as lane beats.
//
// For a requested row i it first reads the two beats holding row_ptr[i] and
// row_ptr[i+1] (32-bit words at rowptr_base + 4i; the base must be 16-byte
// aligned), then fetches entries start .. end-1 (16-bit entries at
// edge_base + 2*index) with INCR bursts of up to MAX_BURST beats. A burst is
// never allowed to cross a MAX_BURST-beat boundary, which also keeps it inside
// a 4 KiB page. Every beat of the row is passed downstream unchanged with a
// per-lane valid mask (entries before start or from end on are masked off),
// the row index and a last flag. A row with no entries yields one beat with
// no valid lane and last set, so consumers always see the end of a row.
// One row is handled at a time; req_ready is high only when idle. Output
// beats follow AXI R beats combinationally (rready = out_ready).
// The paper gives the burst reads of up to 16 beats and the row_ptr/neighbor
// block layout; the state sequence and masking are this design's.
module csr_row_reader
  import decomp_pkg::*;
#(
  parameter int unsigned MAX_BURST = 16
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [ADDR_W-1:0] rowptr_base,
  input  logic [ADDR_W-1:0] edge_base,
  // row request
  input  logic              req_valid,
  output logic              req_ready,
  input  id_t               req_row,
  // AXI4 read master
  output logic              ar_valid,
  input  logic              ar_ready,
  output logic [ADDR_W-1:0] ar_addr,
  output logic [7:0]        ar_len,
  input  logic              r_valid,
  output logic              r_ready,
  input  logic [AXI_W-1:0]  r_data,
  input  logic              r_last,
  // row beat stream
  output logic              out_valid,
  input  logic              out_ready,
  output row_beat_t         out_beat,
  output logic [15:0]       beats_read   // edge beats fetched (statistics)
);
  localparam int unsigned LANE_B = $clog2(P);          // entries per beat
  localparam int unsigned BLEN_B = $clog2(MAX_BURST);

  typedef enum logic [2:0] {R_IDLE, R_PTR_AR, R_PTR_R0, R_PTR_R1, R_EDGE_AR, R_EDGE_R, R_EMPTY} rstate_t;
  rstate_t          st;
  id_t              row;
  logic [PTR_W-1:0] start_i, end_i;
  logic [PTR_W-1:0] cur_beat, last_beat;

  // beats left to the row's end, limited by the burst boundary
  logic [PTR_W-1:0] to_end, to_bound;
  assign to_end   = last_beat - cur_beat;
  assign to_bound = PTR_W'(MAX_BURST - 1) - PTR_W'(cur_beat[BLEN_B-1:0]);

  assign req_ready = (st == R_IDLE);
  assign ar_valid  = (st == R_PTR_AR) || (st == R_EDGE_AR);
  assign ar_addr   = (st == R_PTR_AR)
                   ? ((rowptr_base + ADDR_W'({row, 2'b00})) & ~ADDR_W'(BEAT_B - 1))
                   : (edge_base + ADDR_W'(cur_beat) * ADDR_W'(BEAT_B));
  assign ar_len    = (st == R_PTR_AR) ? 8'd1 : ((to_end < to_bound) ? to_end[7:0] : to_bound[7:0]);
  assign r_ready   = (st == R_PTR_R0) || (st == R_PTR_R1) || ((st == R_EDGE_R) && out_ready);

  always_comb begin
    out_valid        = 1'b0;
    out_beat.data    = r_data;
    out_beat.row     = row;
    out_beat.last    = 1'b1;
    out_beat.lane_vld = '0;
    if (st == R_EDGE_R) begin
      out_valid     = r_valid;
      out_beat.last = (cur_beat == last_beat);
      for (int l = 0; l < P; l++) begin
        out_beat.lane_vld[l] = ({cur_beat[PTR_W-LANE_B-1:0], LANE_B'(l)} >= start_i)
                            && ({cur_beat[PTR_W-LANE_B-1:0], LANE_B'(l)} <  end_i);
      end
    end else if (st == R_EMPTY) begin
      out_valid = 1'b1;
    end
  end

  logic [1:0] lane;
  assign lane = row[1:0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= R_IDLE; row <= '0; start_i <= '0; end_i <= '0;
      cur_beat <= '0; last_beat <= '0; beats_read <= '0;
    end else begin
      unique case (st)
        R_IDLE: if (req_valid) begin
          row <= req_row;
          st  <= R_PTR_AR;
        end
        R_PTR_AR: if (ar_ready) st <= R_PTR_R0;
        R_PTR_R0: if (r_valid) begin
          start_i <= r_data[32*lane +: 32];
          if (lane != 2'd3) end_i <= r_data[32*(32'(lane)+1) +: 32];
          st <= R_PTR_R1;
        end
        R_PTR_R1: if (r_valid) begin
          logic [PTR_W-1:0] e;
          e = (lane == 2'd3) ? r_data[31:0] : end_i;
          end_i     <= e;
          cur_beat  <= start_i >> LANE_B;
          last_beat <= (e - 1'b1) >> LANE_B;
          st        <= (e == start_i) ? R_EMPTY : R_EDGE_AR;
        end
        R_EDGE_AR: if (ar_ready) begin
          st   <= R_EDGE_R;
        end
        R_EDGE_R: if (r_valid && out_ready) begin
          beats_read <= beats_read + 1'b1;
          cur_beat   <= cur_beat + 1'b1;
          if (r_last) st <= (cur_beat == last_beat) ? R_IDLE : R_EDGE_AR;
        end
        R_EMPTY: if (out_ready) st <= R_IDLE;
        default: st <= R_IDLE;
      endcase
    end
  end

  // An accepted address is held stable until the slave takes it.
  assert property (@(posedge clk) disable iff (!rst_n)
                   ar_valid && !ar_ready |=> ar_valid && $stable(ar_addr));
endmodule
