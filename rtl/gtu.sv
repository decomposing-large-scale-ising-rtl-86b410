// gtu: graph traversal unit, breadth-first selection of a subproblem.
//
// Starting from a seed variable, the unit walks the coupling graph breadth
// first and collects up to cap spins (cap <= SUB_N) into a selected-node list.
// The list doubles as the BFS queue: spins are appended at the tail (count)
// and a head pointer walks it. Only variables (id < n_vars) are expanded;
// ancillas met as neighbors of an expanded variable are appended to the list,
// and so belong to the subproblem, but are never expanded. A membership
// bitmap over all spins prevents duplicates and is exported as the mask of
// the clamping engine. For each expanded variable the unit requests its CSR
// row from a row reader and examines the P entries of a beat in one cycle,
// appending every new neighbor in lane order until the list is full.
// Traversal ends when the list holds cap spins or the queue is empty; done
// then pulses and count holds the subproblem size.
//
// The list has two banks: a traversal writes bank `bank` (sampled at start)
// while the other bank, holding the previous subproblem, stays readable for
// the feedback step. start clears the bitmap in one cycle.
// The paper gives BFS over variables, the stop rule, the burst row reads and
// the on-chip queue; the shared list/queue, the lane-parallel append and
// counting ancillas against the capacity are this design's choices.
module gtu
  import decomp_pkg::*;
#(
  parameter int unsigned SUB_N = 45,
  localparam int unsigned CW   = $clog2(SUB_N + 1)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  logic             bank,
  input  id_t              seed,
  input  nspin_t           n_vars,
  input  logic [CW-1:0]    cap,
  output logic             busy,
  output logic             done,
  output logic [N_MAX-1:0] member,
  output id_t              list  [2][SUB_N],
  output logic [CW-1:0]    count [2],
  // row reader
  output logic             req_valid,
  input  logic             req_ready,
  output id_t              req_row,
  input  logic             in_valid,
  output logic             in_ready,
  input  row_beat_t        in_beat
);
  typedef enum logic [1:0] {G_IDLE, G_NEXT, G_REQ, G_SCAN} gstate_t;
  gstate_t       st;
  logic          bk;
  logic [CW-1:0] head;
  logic [CW-1:0] cnt;
  id_t           head_id;

  assign cnt       = count[bk];
  assign head_id   = list[bk][head];
  assign busy      = (st != G_IDLE);
  assign req_valid = (st == G_REQ);
  assign in_ready  = (st == G_SCAN);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= G_IDLE; bk <= 1'b0; head <= '0; req_row <= '0; done <= 1'b0;
      member <= '0;
      count[0] <= '0; count[1] <= '0;
      for (int b = 0; b < 2; b++) for (int k = 0; k < SUB_N; k++) list[b][k] <= '0;
    end else begin
      done <= 1'b0;
      unique case (st)
        G_IDLE: if (start) begin
          bk           <= bank;
          member       <= '0;
          member[seed] <= 1'b1;
          list[bank][0] <= seed;
          count[bank]  <= CW'(1);
          head         <= '0;
          st           <= G_NEXT;
        end
        G_NEXT: begin
          if (cnt >= cap || head == cnt) begin
            done <= 1'b1;
            st   <= G_IDLE;
          end else if (nspin_t'(head_id) >= n_vars) begin
            head <= head + 1'b1;                  // ancilla: not expanded
          end else begin
            req_row <= head_id;
            head    <= head + 1'b1;
            st      <= G_REQ;
          end
        end
        G_REQ: if (req_ready) st <= G_SCAN;
        G_SCAN: if (in_valid) begin
          logic [CW-1:0] c;
          c = cnt;
          for (int l = 0; l < P; l++) begin
            entry_t e;
            e = lane_entry(in_beat.data, l);
            if (in_beat.lane_vld[l] && !member[e.id] && c < cap) begin
              list[bk][c] <= e.id;
              member[e.id] <= 1'b1;
              c = c + 1'b1;
            end
          end
          count[bk] <= c;
          if (in_beat.last) st <= G_NEXT;
        end
        default: st <= G_IDLE;
      endcase
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) count[bk] <= CW'(SUB_N));
endmodule
