// clamp_engine: computes clamped local fields h_i' from streamed CSR rows.
//
// For every row i of the subproblem it evaluates
//     h_i' = h_i + sum over neighbors j outside the subproblem of J_ij * s_j
// where s_j is the current global spin. A beat carries P entries, one per
// lane. Each lane slices its entry into id and weight, looks up s_j in its own
// spin-memory bank, turns the weight into +W (s_j = 1) or -W (s_j = 0), and
// gates it with the lane valid and the mask (the neighbor is inside the
// subproblem, so it stays a variable of the subproblem instead of being
// clamped). The diagonal entry (j == i) carries h_i and is added unmasked.
// A balanced adder tree reduces the P lane terms to one sum, which an
// accumulator adds up over the beats of the row. After the last beat the
// field is offered on the output with the row index and the row's own spin.
// With mask_en low nothing is masked and the output is the full local field
// h_i + sum_j J_ij s_j, which the controller uses to evaluate the energy.
//
// Timing: beat accepted in cycle t (spin reads issued), lane terms, tree and
// accumulator in cycle t+1, field valid from cycle t+2. One beat per cycle,
// i.e. P entries per cycle, as long as out_ready is high; a held output
// stalls the whole pipeline (in_ready low).
// Lanes, slicing, spin sign rule, mask, adder tree and accumulator follow the
// paper's clamping-engine figure; the diagonal h_i and the energy mode are
// this design's choices.
module clamp_engine
  import decomp_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  input  logic             mask_en,
  input  logic [N_MAX-1:0] member,
  // row beats
  input  logic             in_valid,
  output logic             in_ready,
  input  row_beat_t        in_beat,
  // spin memory read ports: 0..P-1 lanes, P the row's own spin
  output logic             spin_re,
  output id_t              spin_raddr [P+1],
  input  logic [P:0]       spin_rdata,
  // clamped field output
  output logic             out_valid,
  input  logic             out_ready,
  output id_t              out_row,
  output field_t           out_field,
  output logic             out_spin
);
  logic      stall;
  logic      s1_valid;
  row_beat_t s1_beat;
  field_t    acc;
  field_t    term [P];
  field_t    tree_sum;

  assign stall    = out_valid && !out_ready;
  assign in_ready = !stall;
  assign spin_re  = in_valid && in_ready;

  always_comb begin
    for (int l = 0; l < P; l++) spin_raddr[l] = lane_entry(in_beat.data, l).id;
    spin_raddr[P] = in_beat.row;
  end

  // lane datapath: slice, sign by spin, valid and mask gating
  always_comb begin
    for (int l = 0; l < P; l++) begin
      entry_t e;
      field_t w;
      e = lane_entry(s1_beat.data, l);
      w = field_t'($signed(e.w));
      if (!s1_beat.lane_vld[l])         term[l] = '0;
      else if (e.id == s1_beat.row)     term[l] = w;                 // h_i
      else if (mask_en && member[e.id]) term[l] = '0;                // in subproblem
      else                              term[l] = spin_rdata[l] ? w : -w;
    end
  end

  // balanced adder tree, P a power of two
  localparam int unsigned LVL = $clog2(P);
  always_comb begin
    field_t t [LVL+1][P];
    for (int i = 0; i < P; i++) t[0][i] = term[i];
    for (int lv = 1; lv <= LVL; lv++)
      for (int i = 0; i < P; i++)
        t[lv][i] = (i < (P >> lv)) ? t[lv-1][2*i] + t[lv-1][2*i+1] : '0;
    tree_sum = t[LVL][0];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_valid <= 1'b0; s1_beat <= '0; acc <= '0;
      out_valid <= 1'b0; out_row <= '0; out_field <= '0; out_spin <= 1'b0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (!stall) begin
        s1_valid <= in_valid;
        if (in_valid) s1_beat <= in_beat;
        if (s1_valid) begin
          if (s1_beat.last) begin
            out_valid <= 1'b1;
            out_field <= acc + tree_sum;
            out_row   <= s1_beat.row;
            out_spin  <= spin_rdata[P];
            acc       <= '0;
          end else begin
            acc <= acc + tree_sum;
          end
        end
      end
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n)
                   out_valid && !out_ready |=> out_valid && $stable(out_field));
endmodule
