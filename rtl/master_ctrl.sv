// master_ctrl: master FSM and stage sequencing of the decomposer.
//
// States: IDLE -> INIT -> GTU -> CLAMP_SUBQ -> DISPATCH -> CORE_WAIT ->
// FEEDBACK -> (DONE | CLAMP_SUBQ | GTU).
//  INIT       writes a random initial solution (16-bit LFSR, one spin per
//             clock) and launches the first traversal.
//  GTU        waits for the traversal of the next subproblem (gtu_done flag).
//  CLAMP_SUBQ requests the CSR rows of the selected spins, in list order, from
//             the row reader that feeds both the clamping engine (mask on) and
//             the subproblem generator; clamped fields go to the h FIFO. It
//             ends when k fields are out and the generator is idle.
//  DISPATCH   starts the link frame and the matrix read-out, and launches
//             the traversal for iteration k+1 into the other list bank, so
//             that BFS(k+1) overlaps transfer, Core(k) and Feedback(k).
//  CORE_WAIT  waits for the spins returned by the chip (core busy).
//  FEEDBACK   writes the k returned spins into the global solution, then
//             streams all N rows through the clamping engine with the mask
//             off to get every local field f_i = h_i + sum_j J_ij s_j and the
//             energy E = -sum_i s_i f_i. E <= target means the instance is
//             solved: DONE with sat and a one-cycle irq. Otherwise, after
//             max_iter iterations DONE without sat; else on to CLAMP_SUBQ
//             when the next traversal is already done, or GTU to wait for it.
// Seeds are drawn from the LFSR by rejection: a value below n_vars is kept.
// The state names, the overlap BFS(k+1) || Core(k), and Clamp(k+1) waiting
// for Core(k) follow the paper. The paper's "SAT validation" is realised
// here as the energy test against a host-given target, an own choice: with
// the Chancellor construction a satisfying assignment has a known energy.
module master_ctrl
  import decomp_pkg::*;
#(
  parameter int unsigned SUB_N = 45,
  localparam int unsigned CW   = $clog2(SUB_N + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  // configuration and control
  input  logic          start,
  input  nspin_t        cfg_n_spins,
  input  nspin_t        cfg_n_vars,
  input  logic [15:0]   cfg_max_iter,
  input  energy_t       cfg_target,
  input  logic [15:0]   cfg_seed,
  output state_t        state,
  output logic          done,
  output logic          irq,
  output logic          sat,
  output logic [15:0]   iter,
  output energy_t       energy,
  output logic [15:0]   stat_overlap,   // BFS(k+1) finished before Feedback(k) ended
  output logic [15:0]   stat_gtu_wait,  // iterations that had to wait for the GTU
  // GTU
  output logic          gtu_start,
  output logic          gtu_bank,
  output id_t           gtu_seed,
  input  logic          gtu_busy,
  input  logic          gtu_done,
  input  id_t           list  [2][SUB_N],
  input  logic [CW-1:0] count [2],
  // row requests (reader feeding clamp and subproblem generator)
  output logic          rq_valid,
  input  logic          rq_ready,
  output id_t           rq_row,
  output logic          feedback_mode,  // rows go to the clamping engine only
  // clamping engine output
  output logic          mask_en,
  input  logic          cl_valid,
  output logic          cl_ready,
  input  field_t        cl_field,
  input  logic          cl_spin,
  // h FIFO
  output logic          hf_valid,
  input  logic          hf_ready,
  output field_t        hf_data,
  // subproblem generator
  output logic          cur_bank,
  input  logic          subq_busy,
  output logic          rd_start,
  output logic [CW-1:0] rd_count,
  // link
  output logic          tx_start,
  output logic [CW-1:0] tx_count,
  input  logic          tx_done,
  input  logic          spins_valid,
  input  logic [SUB_N-1:0] spins,
  // global solution write port
  output logic          sp_we,
  output id_t           sp_waddr,
  output logic          sp_wdata
);
  logic [15:0]   lfsr;
  id_t           seed_q;
  logic          gtu_ready;        // a finished traversal waits to be used
  logic          gtu_pending;      // a launched traversal has not finished
  logic [CW-1:0] k;
  nspin_t        rq_idx, out_cnt;
  logic          fb_wb;            // feedback: write-back phase
  logic          tx_seen, sp_seen;
  logic [SUB_N-1:0] spins_q;
  nspin_t        init_addr;

  assign gtu_seed      = seed_q;
  assign feedback_mode = (state == S_FEEDBACK);
  assign mask_en       = (state == S_CLAMP_SUBQ);
  assign rd_count      = k;
  assign tx_count      = k;

  // row request sequencing
  always_comb begin
    rq_valid = 1'b0;
    rq_row   = '0;
    if (state == S_CLAMP_SUBQ && rq_idx < nspin_t'(k)) begin
      rq_valid = 1'b1;
      rq_row   = list[cur_bank][rq_idx[$clog2(SUB_N)-1:0]];
    end else if (state == S_FEEDBACK && !fb_wb && rq_idx < cfg_n_spins) begin
      rq_valid = 1'b1;
      rq_row   = id_t'(rq_idx);
    end
  end

  // clamp output routing: to the h FIFO, or consumed by the energy sum
  assign hf_valid = (state == S_CLAMP_SUBQ) && cl_valid;
  assign hf_data  = cl_field;
  assign cl_ready = (state == S_FEEDBACK) ? 1'b1 : (state == S_CLAMP_SUBQ) && hf_ready;

  // spin write port
  always_comb begin
    sp_we = 1'b0; sp_waddr = '0; sp_wdata = 1'b0;
    if (state == S_INIT) begin
      sp_we = 1'b1; sp_waddr = id_t'(init_addr); sp_wdata = lfsr[0];
    end else if (state == S_FEEDBACK && fb_wb) begin
      sp_we    = 1'b1;
      sp_waddr = list[cur_bank][rq_idx[$clog2(SUB_N)-1:0]];
      sp_wdata = spins_q[rq_idx[$clog2(SUB_N)-1:0]];
    end
  end

  function automatic logic [15:0] lfsr_next(logic [15:0] x);
    return x[0] ? ((x >> 1) ^ 16'hB400) : (x >> 1);
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; lfsr <= 16'h1; seed_q <= '0;
      gtu_ready <= 1'b0; gtu_pending <= 1'b0; gtu_start <= 1'b0; gtu_bank <= 1'b0;
      k <= '0; rq_idx <= '0; out_cnt <= '0; fb_wb <= 1'b0; tx_seen <= 1'b0; sp_seen <= 1'b0;
      spins_q <= '0; init_addr <= '0; cur_bank <= 1'b0;
      done <= 1'b0; irq <= 1'b0; sat <= 1'b0; iter <= '0; energy <= '0;
      stat_overlap <= '0; stat_gtu_wait <= '0;
      rd_start <= 1'b0; tx_start <= 1'b0;
    end else begin
      gtu_start <= 1'b0; rd_start <= 1'b0; tx_start <= 1'b0; irq <= 1'b0;
      lfsr <= lfsr_next(lfsr);
      if (nspin_t'(lfsr[ID_W-1:0]) < cfg_n_vars) seed_q <= lfsr[ID_W-1:0];
      if (gtu_done) begin gtu_ready <= 1'b1; gtu_pending <= 1'b0; end
      if (spins_valid) begin spins_q <= spins; sp_seen <= 1'b1; end
      if (tx_done) tx_seen <= 1'b1;

      unique case (state)
        S_IDLE, S_DONE: if (start) begin
          lfsr <= (cfg_seed == '0) ? 16'h1 : cfg_seed;
          init_addr <= '0; iter <= '0; sat <= 1'b0; done <= 1'b0;
          gtu_ready <= 1'b0; cur_bank <= 1'b0;
          stat_overlap <= '0; stat_gtu_wait <= '0;
          state <= S_INIT;
        end
        S_INIT: begin
          // a traversal launched before the previous run ended must finish
          // before the first one of this run is started
          if (init_addr != cfg_n_spins - 1'b1) init_addr <= init_addr + 1'b1;
          else if (!gtu_busy && !gtu_pending) begin
            gtu_ready <= 1'b0;
            gtu_start <= 1'b1; gtu_bank <= 1'b0; gtu_pending <= 1'b1;
            state <= S_GTU;
          end
        end
        S_GTU: if (gtu_ready && !gtu_start) begin
          gtu_ready <= 1'b0;
          cur_bank  <= gtu_bank;
          k         <= count[gtu_bank];
          rq_idx <= '0; out_cnt <= '0;
          state  <= S_CLAMP_SUBQ;
        end
        S_CLAMP_SUBQ: begin
          if (rq_valid && rq_ready) rq_idx <= rq_idx + 1'b1;
          if (hf_valid && hf_ready) out_cnt <= out_cnt + 1'b1;
          if (out_cnt == nspin_t'(k) && !subq_busy) begin
            tx_start <= 1'b1; rd_start <= 1'b1;
            tx_seen <= 1'b0; sp_seen <= 1'b0;
            if (!gtu_busy && !gtu_pending) begin   // launch BFS(k+1)
              gtu_start <= 1'b1; gtu_bank <= ~cur_bank; gtu_pending <= 1'b1;
            end
            state <= S_DISPATCH;
          end
        end
        S_DISPATCH: if (tx_seen) state <= S_CORE_WAIT;
        S_CORE_WAIT: if (sp_seen) begin
          fb_wb <= 1'b1; rq_idx <= '0; out_cnt <= '0; energy <= '0;
          state <= S_FEEDBACK;
        end
        S_FEEDBACK: begin
          if (fb_wb) begin
            rq_idx <= rq_idx + 1'b1;
            if (rq_idx == nspin_t'(k) - 1'b1) begin fb_wb <= 1'b0; rq_idx <= '0; end
          end else begin
            if (rq_valid && rq_ready) rq_idx <= rq_idx + 1'b1;
            if (cl_valid) begin
              out_cnt <= out_cnt + 1'b1;
              energy  <= cl_spin ? energy - energy_t'(cl_field) : energy + energy_t'(cl_field);
            end
            if (out_cnt == cfg_n_spins) begin
              iter <= iter + 1'b1;
              if (energy <= cfg_target) begin
                sat <= 1'b1; done <= 1'b1; irq <= 1'b1; state <= S_DONE;
              end else if (iter + 1'b1 >= cfg_max_iter) begin
                done <= 1'b1; irq <= 1'b1; state <= S_DONE;
              end else if (gtu_ready) begin
                stat_overlap <= stat_overlap + 1'b1;
                gtu_ready <= 1'b0;
                cur_bank  <= gtu_bank;
                k         <= count[gtu_bank];
                rq_idx <= '0; out_cnt <= '0;
                state  <= S_CLAMP_SUBQ;
              end else begin
                stat_gtu_wait <= stat_gtu_wait + 1'b1;
                state <= S_GTU;
              end
            end
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // Clamp(k+1) never starts before Core(k) has returned its spins.
  assert property (@(posedge clk) disable iff (!rst_n)
                   state == S_CORE_WAIT |=> state inside {S_CORE_WAIT, S_FEEDBACK});
endmodule
