// natsa_pu: one NATSA processing unit: control unit, 1 KB scratchpad, the
// dot product unit (DPU), VEC lanes each of dot product update (DPUU),
// distance compute (DCU) and profile update (PUU), and the multiplexers that
// feed the DCUs from either the DPU or the DPUUs.
//
// Operation. On start the control unit copies the configuration words from
// the scratchpad (natsa_pkg gives the map). It then walks its list of
// diagonals; the list holds the start column j of each diagonal (row 0) and
// was prepared by the host. For each diagonal of length L = nprof - j:
//   1. DPU: reads T[0..m-1] and T[j..j+m-1], VEC words at a time, and forms
//      the dot product of the first cell.
//   2-3. The first cell alone (lane 0) goes through the DCU, with the mux
//      selecting the DPU result, and then through the profile update.
//   4-6. The rest of the diagonal is done in batches of up to VEC cells
//      (i..i+VEC-1, j+i..j+i+VEC-1): the four T vectors that leave and enter
//      the windows, then mu and sigma of both sides are read; the chained
//      DPUUs give the batch's dot products from the last one of the previous
//      batch; the DCUs give the distances.
// The profile update is done for the row side (PP[i+k], index j+i+k) and then
// the column side (PP[j+i+k], index i+k): read VEC profile words, compare in
// the PUUs, write back only the lanes that improved, values then indices.
// Writes whose lane mask is empty are skipped. The row side is finished
// before the column side starts, so overlapping ranges stay correct. PP and
// II are this PU's private copies (the host initialises PP to +inf and
// reduces the copies of all PUs afterwards).
//
// Interface. start begins a run (accepted in idle or done); done stays high
// from the end of the run until the next start. The memory port carries one
// access at a time: mem_req_valid and mem_req stay stable until the
// one-cycle mem_rsp_valid, reads return VEC words starting at the address.
//
// Which units exist, what they compute and the order of the six steps follow
// the paper. The state machine, the one-access-at-a-time memory port, the
// batch width and the ordering of row and column updates are this design's.
module natsa_pu
  import natsa_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  // host access to the scratchpad
  input  logic              spm_we,
  input  logic [SPM_AW-1:0] spm_addr,
  input  word_t             spm_wdata,
  // run control
  input  logic              start,
  output logic              done,
  // memory port towards the channel controller
  output logic              mem_req_valid,
  output mem_req_t          mem_req,
  input  logic              mem_rsp_valid,
  input  vec_t              mem_rsp_rdata
);
  typedef enum logic [4:0] {
    S_IDLE, S_CFG, S_NEXT, S_DP_A, S_DP_B,
    S_RD_TI0, S_RD_TJ0, S_RD_TIM, S_RD_TJM,
    S_RD_MUI, S_RD_MUJ, S_RD_SGI, S_RD_SGJ, S_COMP,
    S_RD_PPI, S_WR_PPI, S_WR_III, S_RD_PPJ, S_WR_PPJ, S_WR_IIJ,
    S_ADV, S_DONE
  } state_e;

  state_e state;

  // ---------------------------------------------------------------- config
  logic [SPM_AW-1:0] spm_rd_addr;
  word_t             spm_rd_data;
  logic [SPM_AW-1:0] cfg_cnt;
  word_t             cfg [16];   // words 0..SPM_NCFG-1 used

  natsa_spm #(.DEPTH(1 << SPM_AW)) u_spm (
    .clk     (clk),
    .wr_en   (spm_we),
    .wr_addr (spm_addr),
    .wr_data (spm_wdata),
    .rd_addr (spm_rd_addr),
    .rd_data (spm_rd_data)
  );
  assign spm_rd_addr = cfg_cnt;

  word_t m_int, m_f, nprof, t_base, mu_base, sg_base, pp_base, ii_base, dg_base, ndiag;
  assign m_int   = cfg[4'(SPM_M)];
  assign m_f     = cfg[4'(SPM_MF)];
  assign nprof   = cfg[4'(SPM_NPROF)];
  assign t_base  = cfg[4'(SPM_T)];
  assign mu_base = cfg[4'(SPM_MU)];
  assign sg_base = cfg[4'(SPM_SG)];
  assign pp_base = cfg[4'(SPM_PP)];
  assign ii_base = cfg[4'(SPM_II)];
  assign dg_base = cfg[4'(SPM_DIAG)];
  assign ndiag   = cfg[4'(SPM_NDIAG)];

  // ------------------------------------------------------- walk registers
  word_t dcnt;      // diagonals done
  word_t jdiag;     // start column of the current diagonal
  word_t dlen;      // its length
  word_t i_r;       // row of lane 0 of the current batch
  word_t kk;        // DPU position inside the window
  word_t cnt;       // cells in the current batch (1..VEC)
  logic  first;     // current batch is the first cell (DPU result)
  logic  side_j;    // profile update on the column side
  word_t jcol;
  assign jcol = jdiag + i_r;

  vec_t  ta_r, ti0_r, tj0_r, tim_r, tjm_r, mui_r, muj_r, sgi_r, sgj_r, pp_r, d_r;
  word_t q_cur;

  lane_mask_t lane_v;
  always_comb
    for (int unsigned k = 0; k < VEC; k++) lane_v[k] = (k < cnt);

  // ----------------------------------------------------------------- DPU
  lane_mask_t dp_mask;
  logic       dp_clear, dp_valid;
  word_t      dp_q;
  always_comb
    for (int unsigned k = 0; k < VEC; k++) dp_mask[k] = (kk + k < m_int);
  assign dp_clear = (state == S_NEXT);
  assign dp_valid = (state == S_DP_B) && mem_rsp_valid;

  natsa_dpu u_dpu (
    .clk(clk), .rst_n(rst_n), .clear(dp_clear), .valid(dp_valid),
    .mask(dp_mask), .ta(ta_r), .tb(mem_rsp_rdata), .q(dp_q)
  );

  // ------------------------------------------------- DPUU chain, mux, DCU
  word_t q_chain [VEC+1];
  word_t q_sel [VEC];
  word_t d_lane [VEC];
  assign q_chain[0] = q_cur;
  for (genvar k = 0; k < VEC; k++) begin : g_lane
    natsa_dpuu u_dpuu (
      .t_im(tim_r[k]), .t_jm(tjm_r[k]), .t_i(ti0_r[k]), .t_j(tj0_r[k]),
      .q_in(q_chain[k]), .q_out(q_chain[k+1])
    );
    // multiplexer (2): DPU result for the first cell, DPUU otherwise
    assign q_sel[k] = first ? ((k == 0) ? dp_q : '0) : q_chain[k+1];
    natsa_dcu u_dcu (
      .m_f(m_f), .q(q_sel[k]), .mu_i(mui_r[k]), .mu_j(muj_r[k]),
      .sg_i(sgi_r[k]), .sg_j(sgj_r[k]), .d(d_lane[k])
    );
  end

  word_t q_last;
  always_comb begin
    q_last = q_sel[0];
    for (int unsigned k = 1; k < VEC; k++)
      if (k == cnt - 1) q_last = q_sel[k];
  end

  // ----------------------------------------------------------------- PUU
  vec_t       pp_new, ii_new;
  lane_mask_t upd;
  for (genvar k = 0; k < VEC; k++) begin : g_puu
    word_t idx;
    assign idx = side_j ? (i_r + k) : (jcol + k);
    natsa_puu u_puu (
      .valid(lane_v[k]), .d(d_r[k]), .idx(idx), .pp_old(pp_r[k]), .ii_old('0),
      .pp_new(pp_new[k]), .ii_new(ii_new[k]), .upd(upd[k])
    );
  end

  // -------------------------------------------------------- memory port
  always_comb begin
    mem_req       = '0;
    mem_req_valid = 1'b1;
    case (state)
      S_NEXT:   mem_req.addr = dg_base + dcnt;
      S_DP_A:   mem_req.addr = t_base + kk;
      S_DP_B:   mem_req.addr = t_base + jdiag + kk;
      S_RD_TI0: mem_req.addr = t_base + i_r - 1;
      S_RD_TJ0: mem_req.addr = t_base + jcol - 1;
      S_RD_TIM: mem_req.addr = t_base + i_r + m_int - 1;
      S_RD_TJM: mem_req.addr = t_base + jcol + m_int - 1;
      S_RD_MUI: mem_req.addr = mu_base + i_r;
      S_RD_MUJ: mem_req.addr = mu_base + jcol;
      S_RD_SGI: mem_req.addr = sg_base + i_r;
      S_RD_SGJ: mem_req.addr = sg_base + jcol;
      S_RD_PPI: mem_req.addr = pp_base + i_r;
      S_RD_PPJ: mem_req.addr = pp_base + jcol;
      S_WR_PPI, S_WR_PPJ: begin
        mem_req.we    = 1'b1;
        mem_req.addr  = pp_base + (side_j ? jcol : i_r);
        mem_req.mask  = upd;
        mem_req.wdata = pp_new;
      end
      S_WR_III, S_WR_IIJ: begin
        mem_req.we    = 1'b1;
        mem_req.addr  = ii_base + (side_j ? jcol : i_r);
        mem_req.mask  = upd;
        mem_req.wdata = ii_new;
      end
      default:  mem_req_valid = 1'b0;
    endcase
    // no access past the end of the list, and no write with an empty mask
    if (state == S_NEXT && dcnt >= ndiag) mem_req_valid = 1'b0;
    if (mem_req.we && upd == '0)         mem_req_valid = 1'b0;
  end

  // ------------------------------------------------------ control unit
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      cfg_cnt <= '0;
      dcnt    <= '0;
      jdiag   <= '0;
      dlen    <= '0;
      i_r     <= '0;
      kk      <= '0;
      cnt     <= 32'd1;
      first   <= 1'b0;
      side_j  <= 1'b0;
      q_cur   <= '0;
      done    <= 1'b0;
      for (int unsigned c = 0; c < 16; c++) cfg[c] <= '0;
      {ta_r, ti0_r, tj0_r, tim_r, tjm_r} <= '0;
      {mui_r, muj_r, sgi_r, sgj_r, pp_r, d_r} <= '0;
    end else begin
      case (state)
        S_IDLE, S_DONE: if (start) begin
          done    <= 1'b0;
          cfg_cnt <= '0;
          state   <= S_CFG;
        end
        S_CFG: begin
          // scratchpad read has one cycle of latency
          if (cfg_cnt != '0) cfg[4'(cfg_cnt - 1'b1)] <= spm_rd_data;
          if (cfg_cnt == SPM_AW'(SPM_NCFG)) begin
            dcnt  <= '0;
            state <= S_NEXT;
          end else begin
            cfg_cnt <= cfg_cnt + 1'b1;
          end
        end
        S_NEXT: begin
          if (dcnt >= ndiag) begin
            done  <= 1'b1;
            state <= S_DONE;
          end else if (mem_rsp_valid) begin
            jdiag <= mem_rsp_rdata[0];
            dlen  <= nprof - mem_rsp_rdata[0];
            kk    <= '0;
            i_r   <= '0;
            if (mem_rsp_rdata[0] >= nprof || mem_rsp_rdata[0] == '0) begin
              dcnt <= dcnt + 1;   // empty or main diagonal: nothing to do
            end else begin
              state <= S_DP_A;
            end
          end
        end
        S_DP_A: if (mem_rsp_valid) begin
          ta_r  <= mem_rsp_rdata;
          state <= S_DP_B;
        end
        S_DP_B: if (mem_rsp_valid) begin
          if (kk + VEC >= m_int) begin
            first <= 1'b1;
            cnt   <= 32'd1;
            state <= S_RD_MUI;
          end else begin
            kk    <= kk + VEC;
            state <= S_DP_A;
          end
        end
        S_RD_TI0: if (mem_rsp_valid) begin ti0_r <= mem_rsp_rdata; state <= S_RD_TJ0; end
        S_RD_TJ0: if (mem_rsp_valid) begin tj0_r <= mem_rsp_rdata; state <= S_RD_TIM; end
        S_RD_TIM: if (mem_rsp_valid) begin tim_r <= mem_rsp_rdata; state <= S_RD_TJM; end
        S_RD_TJM: if (mem_rsp_valid) begin tjm_r <= mem_rsp_rdata; state <= S_RD_MUI; end
        S_RD_MUI: if (mem_rsp_valid) begin mui_r <= mem_rsp_rdata; state <= S_RD_MUJ; end
        S_RD_MUJ: if (mem_rsp_valid) begin muj_r <= mem_rsp_rdata; state <= S_RD_SGI; end
        S_RD_SGI: if (mem_rsp_valid) begin sgi_r <= mem_rsp_rdata; state <= S_RD_SGJ; end
        S_RD_SGJ: if (mem_rsp_valid) begin sgj_r <= mem_rsp_rdata; state <= S_COMP;   end
        S_COMP: begin
          for (int unsigned k = 0; k < VEC; k++) d_r[k] <= d_lane[k];
          q_cur  <= q_last;
          side_j <= 1'b0;
          state  <= S_RD_PPI;
        end
        S_RD_PPI, S_RD_PPJ: if (mem_rsp_valid) begin
          pp_r  <= mem_rsp_rdata;
          state <= (state == S_RD_PPI) ? S_WR_PPI : S_WR_PPJ;
        end
        S_WR_PPI, S_WR_PPJ: begin
          if (upd == '0)          state <= (state == S_WR_PPI) ? S_RD_PPJ : S_ADV;
          else if (mem_rsp_valid) state <= (state == S_WR_PPI) ? S_WR_III : S_WR_IIJ;
          if (state == S_WR_PPI && upd == '0) side_j <= 1'b1;
        end
        S_WR_III: if (mem_rsp_valid) begin side_j <= 1'b1; state <= S_RD_PPJ; end
        S_WR_IIJ: if (mem_rsp_valid) state <= S_ADV;
        S_ADV: begin
          first <= 1'b0;
          i_r   <= i_r + cnt;
          if (i_r + cnt >= dlen) begin
            dcnt  <= dcnt + 1;
            state <= S_NEXT;
          end else begin
            cnt   <= (dlen - (i_r + cnt) >= VEC) ? 32'(VEC) : dlen - (i_r + cnt);
            state <= S_RD_TI0;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // A response only ever answers a request.
  a_rsp_needs_req: assert property (@(posedge clk) disable iff (!rst_n)
    mem_rsp_valid |-> mem_req_valid);
endmodule
