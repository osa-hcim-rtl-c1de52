// controller -- sequencer of the hybrid saliency-aware CIM macro.
//
// A multi-bit MAC between a-bit activations and w-bit weights is split into
// 1-bit MACs W[i] x A[j] of output order k = i + j. One operation runs in two
// modes:
//
//  * Saliency evaluation mode: the 1-bit MACs of the s highest orders
//    (k = w+a-2 down to w+a-1-s) are issued to the DCIM path, one per cycle. Their
//    DMACs are normalized to 3 bits and accumulated by the saliency evaluator,
//    which returns the boundary B = B_D/A. They also go to the accumulator.
//  * Computing mode: the remaining 1-bit MACs are allocated by their order.
//    k >= B goes to DCIM, one 1-bit MAC per cycle. B-4 <= k < B goes to ACIM:
//    all analog MACs of the same weight bit i are merged into one bit-parallel
//    operation whose activation field A[jlo +: n] is 1..4 bits wide, and one such
//    operation starts whenever the SAR ADC is free (every 3 cycles). k < B-4 is
//    discarded. DCIM and ACIM run concurrently on different weight bits through
//    the two ports of the HCIMAs.
//
// Both modes visit weight bits from the most significant down, and within a
// weight bit the activation bits from the most significant down, which is the
// issue order of the 8b x 8b allocation example in the paper.
// The DMAC of a digital issue appears one cycle later; its tag (order, mode) is
// delayed by one register here (d_tag_q) so that the evaluator and the
// accumulator see it with the DMAC. After the last saliency DMAC the controller
// waits one cycle for S to settle, latches B_D/A and enters computing mode. The
// operation ends (done, one cycle) when both paths are empty and the last AMAC
// has been added. A RW request is accepted only in IDLE and takes one cycle.
//
// With 4-bit weights an HCIMA holds two weights, in rows 0..3 and rows 4..7;
// cfg.w_half selects which one an operation uses. The mode sequence, the
// allocation rule and the 4-order analog window follow the paper; the issue
// order, the handshakes and the cycle-level timing are this design's choices.
module controller
  import osa_pkg::*;
(
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,
  input  op_cfg_t         cfg,
  input  logic            rw_req,
  input  bda_t            ose_bda,
  input  logic            adc_busy,
  input  logic            amac_valid,
  output state_e          state,
  output logic            busy,
  output logic            done,
  output logic            rw_go,
  // digital issue (this cycle)
  output logic            d_en,
  output logic [2:0]      d_row,
  output logic [2:0]      d_bit,
  // tag of the DMAC on the adder tree output (this cycle)
  output dtag_t           d_tag_q,
  // analog issue (this cycle)
  output logic            a_start,
  output logic [2:0]      a_row,
  output logic [2:0]      a_lo,
  output logic [2:0]      a_n,
  output logic [SH_W-1:0] a_shift,
  // per-operation controls
  output logic            op_clear,
  output bda_t            bda_q,
  output logic [2:0]      nq_shift_q
);

  op_cfg_t cfg_q;
  int      wb, ab, ksal_lo;

  // Digital iterator
  logic       d_act;
  int         d_kmin, d_kmax;
  logic [3:0] di, dj;
  logic       d_sal;
  // Analog iterator
  logic       a_act;
  int         a_kmin, a_kmax;
  logic [3:0] ai;
  logic       a_start_q;

  always_comb begin
    wb      = int'(cfg_q.w_bits);
    ab      = int'(cfg_q.a_bits);
    ksal_lo = wb + ab - 1 - int'(cfg_q.s_orders);
  end

  function automatic int jlo_of(int i, int kmin);
    return (kmin - i > 0) ? kmin - i : 0;
  endfunction

  function automatic int jhi_of(int i, int kmx, int a_bits);
    return (kmx - i < a_bits - 1) ? kmx - i : a_bits - 1;
  endfunction

  // Highest weight bit below 'below' whose activation range is not empty; -1 if none
  function automatic int next_row(int below, int kmin, int kmx, int w_bits, int a_bits);
    int r;
    r = -1;
    for (int i = MAX_WB - 1; i >= 0; i--)
      if (r < 0 && i < below && i < w_bits && jhi_of(i, kmx, a_bits) >= jlo_of(i, kmin))
        r = i;
    return r;
  endfunction

  function automatic logic [2:0] phys_row(int i);
    return (cfg_q.w_bits <= 4'd4 && cfg_q.w_half) ? 3'(i + 4) : 3'(i);
  endfunction

  // Current issues
  int a_jlo, a_jhi;
  always_comb begin
    d_en    = d_act;
    d_row   = phys_row(int'(di));
    d_bit   = dj[2:0];
    a_jlo   = jlo_of(int'(ai), a_kmin);
    a_jhi   = jhi_of(int'(ai), a_kmax, ab);
    a_start = a_act && !adc_busy && !a_start_q;
    a_row   = phys_row(int'(ai));
    a_lo    = 3'(a_jlo);
    a_n     = 3'(a_jhi - a_jlo + 1);
    a_shift = SH_W'(int'(ai) + a_jlo + (a_jhi - a_jlo + 1) + 4);
  end

  assign nq_shift_q = cfg_q.nq_shift;
  assign busy     = (state != ST_IDLE);
  assign done     = (state == ST_DONE);
  assign rw_go    = (state == ST_IDLE) && rw_req && !start;
  assign op_clear = (state == ST_IDLE) && start;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= ST_IDLE;
      cfg_q     <= '0;
      d_act     <= 1'b0;
      d_kmin    <= 0;
      d_kmax    <= 0;
      di        <= '0;
      dj        <= '0;
      d_sal     <= 1'b0;
      a_act     <= 1'b0;
      a_kmin    <= 0;
      a_kmax    <= 0;
      ai        <= '0;
      a_start_q <= 1'b0;
      d_tag_q   <= '0;
      bda_q     <= '0;
    end else begin
      a_start_q <= a_start;

      // Tag pipeline aligned with the adder tree register
      d_tag_q.valid <= d_en;
      d_tag_q.sal   <= d_sal;
      d_tag_q.k     <= SH_W'(int'(di) + int'(dj));
      d_tag_q.order <= 2'(int'(di) + int'(dj) - ksal_lo);

      // Digital iterator: step to the next (i, j)
      if (d_act) begin
        if (int'(dj) > jlo_of(int'(di), d_kmin)) begin
          dj <= dj - 4'd1;
        end else begin
          int r;
          r = next_row(int'(di), d_kmin, d_kmax, wb, ab);
          if (r < 0) d_act <= 1'b0;
          else begin
            di <= 4'(r);
            dj <= 4'(jhi_of(r, d_kmax, ab));
          end
        end
      end

      // Analog iterator: one operation per weight bit
      if (a_start) begin
        int r;
        r = next_row(int'(ai), a_kmin, a_kmax, wb, ab);
        if (r < 0) a_act <= 1'b0;
        else       ai    <= 4'(r);
      end

      unique case (state)
        ST_IDLE: begin
          if (start) begin
            int wq, aq, kl, kh, r;
            cfg_q <= cfg;
            wq = int'(cfg.w_bits);
            aq = int'(cfg.a_bits);
            kh = wq + aq - 2;
            kl = wq + aq - 1 - int'(cfg.s_orders);
            r  = next_row(MAX_WB, kl, kh, wq, aq);
            d_kmin <= kl;
            d_kmax <= kh;
            d_sal  <= 1'b1;
            d_act  <= (r >= 0);
            di     <= 4'(r);
            dj     <= 4'(jhi_of(r, kh, aq));
            state  <= ST_SAL;
          end else if (rw_req) begin
            state <= ST_RW;
          end
        end
        ST_RW:  state <= ST_IDLE;
        ST_SAL: begin
          if (!d_act || (int'(dj) <= jlo_of(int'(di), d_kmin) &&
                         next_row(int'(di), d_kmin, d_kmax, wb, ab) < 0))
            state <= ST_SAL_END;
        end
        ST_SAL_END: begin
          if (!d_tag_q.valid) begin
            int b, dkl, dkh, akl, akh, rd, ra;
            b   = int'(ose_bda);
            dkl = b;
            dkh = ksal_lo - 1;
            akl = b - AWIN;
            akh = (b - 1 < ksal_lo - 1) ? b - 1 : ksal_lo - 1;
            rd  = next_row(MAX_WB, dkl, dkh, wb, ab);
            ra  = next_row(MAX_WB, akl, akh, wb, ab);
            bda_q  <= ose_bda;
            d_kmin <= dkl;
            d_kmax <= dkh;
            d_sal  <= 1'b0;
            d_act  <= (rd >= 0);
            di     <= 4'(rd);
            dj     <= 4'(jhi_of(rd, dkh, ab));
            a_kmin <= akl;
            a_kmax <= akh;
            a_act  <= (ra >= 0);
            ai     <= 4'(ra);
            state  <= ST_COMP;
          end
        end
        ST_COMP: begin
          logic d_last, a_last;
          d_last = !d_act || (int'(dj) <= jlo_of(int'(di), d_kmin) &&
                              next_row(int'(di), d_kmin, d_kmax, wb, ab) < 0);
          a_last = !a_act || (a_start && next_row(int'(ai), a_kmin, a_kmax, wb, ab) < 0);
          if (d_last && a_last) state <= ST_DRAIN;
        end
        ST_DRAIN: begin
          if (!adc_busy && !amac_valid && !a_start_q && !d_tag_q.valid) state <= ST_DONE;
        end
        ST_DONE: state <= ST_IDLE;
        default: state <= ST_IDLE;
      endcase
    end
  end

endmodule
