// mmm_controller: the single fused loop that sequences the computation of
// C = A*B one (d1i x d1j) block at a time, and the address streams of the
// three global-memory units.
//
// For every block (I,J) it runs the four phases of the two-level blocked
// algorithm. Phase 1 (PH_READ) reads step 0: the d1i x d0k column block of A
// and the d0k x d1j row block of B, NT = r_A*r_B iterations with BGA values
// of A and BGB values of B per iteration. Phase 2 (PH_RD_COMP) reads step k+1
// into the other buffer of the mapped memories while issuing the NT tiles of
// step k to the systolic array. Phase 3 (PH_COMP) issues the last step. After
// a drain (PH_DRAIN, until the C FIFOs are full again) phase 4 (PH_WRITE)
// reads the block out of the C FIFOs in row-major order, D0J values per beat.
// Tile order within a step is ii (row tile, 0..r_B-1) then jj (column tile,
// 0..r_A-1), jj fastest; k is the slowest index.
//
// Interfaces. A and B arrive as valid/ready streams (a_valid/a_ready,
// b_valid/b_ready); in phases 1-2 an iteration needs a beat of both, and a
// missing beat stalls the whole loop (en low), which is how a global-memory
// stall shows up in a single fused pipeline. a_addr/b_addr give the element
// address of lane 0 of the current beat: A is column-major
// (address = col*d2i + row), B is row-major (row*d2j + col). During Write,
// c_load pops FIFO row pop_row into the output register; c_valid/c_ready is
// the store handshake and c_addr the row-major address of the beat's first
// value. Matrix sizes are given at start in blocks: n_bi = d2i/d1i,
// n_bj = d2j/d1j, n_k = d2k/d0k (all at least 1). done pulses for one cycle at
// the end. The phases, their overlap, the reuse ratios and the storage
// formats follow the paper; stream handshakes, tile order, block order (J
// fastest) and the drain state are this design's own.
module mmm_controller
  import mmm_pkg::*;
#(
  parameter int D0I = 28,
  parameter int D0J = 28,
  parameter int D0K = 6,
  parameter int BGA = 7,
  parameter int BGB = 7
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic [15:0] n_bi,
  input  logic [15:0] n_bj,
  input  logic [15:0] n_k,
  output logic        busy,
  output logic        done,
  output phase_e      phase,
  output logic        en,
  // A load unit
  input  logic        a_valid,
  output logic        a_ready,
  output logic [31:0] a_addr,
  output logic        a_wr_en,
  output logic        a_wr_buf,
  output logic [15:0] a_wr_k,
  output logic [15:0] a_wr_r0,
  output logic [15:0] a_wr_idx,
  // B load unit
  input  logic        b_valid,
  output logic        b_ready,
  output logic [31:0] b_addr,
  output logic        b_wr_en,
  output logic        b_wr_buf,
  output logic [15:0] b_wr_k,
  output logic [15:0] b_wr_r0,
  output logic [15:0] b_wr_idx,
  // compute issue (stage 0 of the compute pipeline)
  output logic        issue,
  output logic        first_k,
  output logic        rd_buf,
  output logic [15:0] a_rd_idx,
  output logic [15:0] b_rd_idx,
  output logic        pop_all,
  input  logic        c_full,
  // C store unit
  output logic        c_load,
  output logic [15:0] pop_row,
  output logic        c_valid,
  input  logic        c_ready,
  output logic [31:0] c_addr
);
  localparam int R_A = D0I * D0K / BGA;   // reuse of each B value (d1j = r_A*d0j)
  localparam int R_B = D0J * D0K / BGB;   // reuse of each A value (d1i = r_B*d0i)
  localparam int NT  = R_A * R_B;         // iterations per step
  localparam int D1I = R_B * D0I;
  localparam int D1J = R_A * D0J;

  if (D0I % BGA != 0 || D0J % BGB != 0) begin : g_bad
    $error("BGA must divide D0I and BGB must divide D0J");
  end

  logic [15:0] nbi_q, nbj_q, nk_q;
  logic [15:0] blk_i, blk_j, kr, kc;
  logic [31:0] t;
  // read counters
  logic [15:0] akk, aii, ai0, bkk, bjj, bj0;
  // compute counters
  logic [15:0] cii, cjj;
  // write counters
  logic [15:0] wii, wi, wjj;
  logic        w_left;          // values still to load in this block

  logic rd_phase, cp_phase, rd_ok, step_end;
  logic [31:0] d2i, d2j;

  assign d2i = 32'(nbi_q) * 32'(D1I);
  assign d2j = 32'(nbj_q) * 32'(D1J);

  assign rd_phase = (phase == PH_READ) || (phase == PH_RD_COMP);
  assign cp_phase = (phase == PH_RD_COMP) || (phase == PH_COMP);
  assign rd_ok    = a_valid && b_valid;
  assign en       = rd_phase ? rd_ok : 1'b1;
  assign a_ready  = rd_phase && b_valid;
  assign b_ready  = rd_phase && a_valid;
  assign step_end = (t == 32'(NT - 1));
  assign busy     = (phase != PH_IDLE);

  assign a_addr   = (32'(kr) * 32'(D0K) + 32'(akk)) * d2i
                  + 32'(blk_i) * 32'(D1I) + 32'(aii) * 32'(D0I) + 32'(ai0);
  assign b_addr   = (32'(kr) * 32'(D0K) + 32'(bkk)) * d2j
                  + 32'(blk_j) * 32'(D1J) + 32'(bjj) * 32'(D0J) + 32'(bj0);

  assign a_wr_en  = rd_phase && rd_ok;
  assign a_wr_buf = kr[0];
  assign a_wr_k   = akk;
  assign a_wr_r0  = ai0;
  assign a_wr_idx = aii;
  assign b_wr_en  = rd_phase && rd_ok;
  assign b_wr_buf = kr[0];
  assign b_wr_k   = bkk;
  assign b_wr_r0  = bj0;
  assign b_wr_idx = bjj;

  assign issue    = cp_phase && en;
  assign first_k  = (kc == 16'd0);
  assign rd_buf   = kc[0];
  assign a_rd_idx = cii;
  assign b_rd_idx = cjj;
  assign pop_all  = issue && !first_k;

  assign c_load   = (phase == PH_WRITE) && w_left && (!c_valid || c_ready);
  assign pop_row  = wi;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      phase   <= PH_IDLE;
      done    <= 1'b0;
      {nbi_q, nbj_q, nk_q} <= '0;
      {blk_i, blk_j, kr, kc} <= '0;
      t       <= '0;
      {akk, aii, ai0, bkk, bjj, bj0} <= '0;
      {cii, cjj} <= '0;
      {wii, wi, wjj} <= '0;
      w_left  <= 1'b0;
      c_valid <= 1'b0;
      c_addr  <= '0;
    end else begin
      done <= 1'b0;
      // read-side counters: kk slowest, then tile index, then lane group
      if (rd_phase && rd_ok) begin
        if (int'(ai0) + BGA < D0I) ai0 <= ai0 + 16'(BGA);
        else begin
          ai0 <= '0;
          if (int'(aii) < R_B - 1) aii <= aii + 1'b1;
          else begin aii <= '0; akk <= (int'(akk) < D0K - 1) ? akk + 1'b1 : '0; end
        end
        if (int'(bj0) + BGB < D0J) bj0 <= bj0 + 16'(BGB);
        else begin
          bj0 <= '0;
          if (int'(bjj) < R_A - 1) bjj <= bjj + 1'b1;
          else begin bjj <= '0; bkk <= (int'(bkk) < D0K - 1) ? bkk + 1'b1 : '0; end
        end
      end
      // compute-side counters: ii then jj, jj fastest
      if (issue) begin
        if (int'(cjj) < R_A - 1) cjj <= cjj + 1'b1;
        else begin cjj <= '0; cii <= (int'(cii) < R_B - 1) ? cii + 1'b1 : '0; end
      end

      unique case (phase)
        PH_IDLE: begin
          if (start) begin
            nbi_q <= n_bi; nbj_q <= n_bj; nk_q <= n_k;
            blk_i <= '0; blk_j <= '0; kr <= '0; kc <= '0; t <= '0;
            phase <= PH_READ;
          end
        end
        PH_READ: if (en) begin
          if (step_end) begin
            t  <= '0;
            kr <= 16'd1;
            kc <= 16'd0;
            phase <= (nk_q == 16'd1) ? PH_COMP : PH_RD_COMP;
          end else t <= t + 1;
        end
        PH_RD_COMP: if (en) begin
          if (step_end) begin
            t  <= '0;
            kr <= kr + 1'b1;
            kc <= kc + 1'b1;
            if (kr == nk_q - 16'd1) phase <= PH_COMP;
          end else t <= t + 1;
        end
        PH_COMP: begin
          if (step_end) begin
            t <= '0;
            phase <= PH_DRAIN;
          end else t <= t + 1;
        end
        PH_DRAIN: begin
          if (c_full) begin
            phase  <= PH_WRITE;
            {wii, wi, wjj} <= '0;
            w_left <= 1'b1;
          end
        end
        PH_WRITE: begin
          if (c_load) begin
            c_valid <= 1'b1;
            c_addr  <= (32'(blk_i) * 32'(D1I) + 32'(wii) * 32'(D0I) + 32'(wi)) * d2j
                     + 32'(blk_j) * 32'(D1J) + 32'(wjj) * 32'(D0J);
            if (int'(wjj) < R_A - 1) wjj <= wjj + 1'b1;
            else begin
              wjj <= '0;
              if (int'(wi) < D0I - 1) wi <= wi + 1'b1;
              else begin
                wi <= '0;
                if (int'(wii) < R_B - 1) wii <= wii + 1'b1;
                else begin wii <= '0; w_left <= 1'b0; end
              end
            end
          end else if (c_ready) begin
            c_valid <= 1'b0;
          end
          // block finished: last beat accepted and nothing left to load
          if (!w_left && c_valid && c_ready) begin
            c_valid <= 1'b0;
            kr <= '0; kc <= '0; t <= '0;
            if (blk_j < nbj_q - 16'd1) begin
              blk_j <= blk_j + 1'b1;
              phase <= PH_READ;
            end else if (blk_i < nbi_q - 16'd1) begin
              blk_j <= '0;
              blk_i <= blk_i + 1'b1;
              phase <= PH_READ;
            end else begin
              phase <= PH_IDLE;
              done  <= 1'b1;
            end
          end
        end
        default: phase <= PH_IDLE;
      endcase
    end
  end

  a_c_beat_held: assert property (@(posedge clk) disable iff (!rst_n)
    c_valid && !c_ready |-> !c_load)
    else $error("mmm_controller: C beat overwritten before accepted");
  a_one_step_per_issue: assert property (@(posedge clk) disable iff (!rst_n)
    issue |-> kc < nk_q)
    else $error("mmm_controller: compute issued past the last step");
endmodule
