// sscmsd_read_path -- SSCMSD decoding and validation of a cache-line read.
//
// The four codewords of a line arrive on consecutive clocks (two DQ beats
// each). As in the paper's read timing, the syndrome of codeword k and the
// CRC hash of its 16 data symbols are computed in the clock after it
// arrives; one syndrome unit is shared by the four codewords and the hash
// is built up block by block, which the CRC's linearity allows. The 8
// address bytes, which the controller knows, are folded in with the last
// block. At the end of the fifth clock the first decision is taken from
// H1 (hash of the received data D' and address) against the received hash
// H', and the four syndromes (decision table, Table 4 of the paper):
//
//   scenario 1  H1 == H', all Si == 0  -> respond "no error" at once
//   scenario 3  H1 != H', all Si == 0  -> respond "uncorrectable"
//   scenario 2/4  some Si != 0         -> slow path:
//      CORRECT: single-symbol correction of the codewords with Si != 0;
//               any DUE codeword -> respond "uncorrectable"
//      VERIFY : H2 = hash of the corrected data D'' and the address;
//               H2 == H'' -> "corrected", else "uncorrectable" (the hash
//               caught a mis-correction of a multi-symbol error)
//
// hash_en = 0 switches the hash checks off (selective error protection,
// which the paper allows): the path then behaves as plain SSC-RS decoding.
//
// CRC_POLY_REFL selects the CRC-32 polynomial and must match the write path.
//
// Interface: rd_valid/rd_beats carry one codeword per clock, four per line;
// rd_addr is sampled with the first codeword of each line and must be the
// address the controller issued (not what the DRAM may have decoded).
// The response is a one-clock pulse on resp_valid with the line, status,
// scenario and the per-codeword non-zero-syndrome flags.
// Timing: with the first codeword in clock 1, the response of scenarios 1
// and 3 is registered at the end of clock 5 (resp_valid in clock 6, 5
// clocks after the first codeword); a DUE found by the corrector responds
// one clock later and a corrected line two clocks later. The correction
// path works on its own copy of the codewords, so a new line may start in
// the clock after the previous line's last codeword and reads run at the
// full rate of one line per four clocks; responses stay in order. Gaps
// between the codewords of a line are allowed. The exact register
// boundaries of the slow path are this design's choice; the paper gives
// the five-clock fast path.
module sscmsd_read_path
  import sscmsd_pkg::*;
#(
  parameter hash_t CRC_POLY_REFL = CRC32C_REFL  // hash polynomial, reflected form
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        hash_en,
  input  logic        rd_valid,
  input  beat_pair_t  rd_beats,
  input  addr_t       rd_addr,
  output logic        resp_valid,
  output addr_t       resp_addr,
  output line_t       resp_data,
  output rd_status_t  resp_status,
  output scenario_t   resp_scenario,
  output logic [NUM_CW-1:0] resp_synd_nz,
  output logic [NUM_CW-1:0] resp_ce        // codewords with a corrected symbol
);

  typedef enum logic [1:0] {SL_IDLE, SL_CORRECT, SL_VERIFY} sl_state_t;

  // ---------------------------------------------------------- capture stage
  logic [1:0] cnt_q;         // codewords of the current line received so far
  logic       cap_vld_q;
  logic [1:0] cap_idx_q;
  cw_t        cwbuf_q [NUM_CW];
  addr_t      addr_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt_q     <= '0;
      cap_vld_q <= 1'b0;
      cap_idx_q <= '0;
      addr_q    <= '0;
      for (int k = 0; k < int'(NUM_CW); k++) cwbuf_q[k] <= '0;
    end else begin
      cap_vld_q <= rd_valid;
      if (rd_valid) begin
        cap_idx_q       <= cnt_q;
        cwbuf_q[cnt_q]  <= beats_to_cw(rd_beats);
        cnt_q           <= cnt_q + 2'd1;
        if (cnt_q == 2'd0) addr_q <= rd_addr;
      end
    end
  end

  // ------------------------------------------- syndrome + hash stage (RSk)
  cw_t   cur_cw;
  sym_t  s1, s2;
  logic  nz;
  hash_t crc_q, crc_start, crc_blk, crc_fin;
  sym_t  s1_q [NUM_CW];
  sym_t  s2_q [NUM_CW];
  logic [NUM_CW-1:0] nz_q;

  assign cur_cw    = cwbuf_q[cap_idx_q];
  assign crc_start = (cap_idx_q == 2'd0) ? CRC_INIT : crc_q;

  rs_syndrome u_syn (.cw(cur_cw), .s1(s1), .s2(s2), .nz(nz));

  crc32c_update #(.NBYTES(BLK_SYMS), .POLY_REFL(CRC_POLY_REFL)) u_crc_blk (
    .crc_in (crc_start),
    .data   (cur_cw[SYM_POS_H-1:SYM_POS_D0]),
    .crc_out(crc_blk)
  );
  crc32c_update #(.NBYTES(ADDR_BYTES), .POLY_REFL(CRC_POLY_REFL)) u_crc_addr (
    .crc_in (crc_blk),
    .data   (addr_q),
    .crc_out(crc_fin)
  );

  // First decision (end of clock 5).
  logic [NUM_CW-1:0] nz_all;
  hash_t     h1, h_rx;
  logic      hash_match, any_nz, decide;
  scenario_t scn;

  always_comb begin
    nz_all = nz_q;
    nz_all[cap_idx_q] = nz;
    for (int k = 0; k < int'(NUM_CW); k++) h_rx[k*SYM_W +: SYM_W] = cwbuf_q[k][SYM_POS_H];
    h1         = crc_fin ^ CRC_XOROUT;
    hash_match = (h1 == h_rx);
    any_nz     = |nz_all;
    decide     = cap_vld_q && (cap_idx_q == 2'd3);
    unique case ({hash_match, any_nz})
      2'b10:   scn = SCN1_CLEAN;
      2'b11:   scn = SCN2_SYND;
      2'b00:   scn = SCN3_HASH_ONLY;
      default: scn = SCN4_HASH_SYND;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      crc_q <= '0;
      nz_q  <= '0;
      for (int k = 0; k < int'(NUM_CW); k++) begin
        s1_q[k] <= '0;
        s2_q[k] <= '0;
      end
    end else if (cap_vld_q) begin
      crc_q            <= crc_blk;
      nz_q[cap_idx_q]  <= nz;
      s1_q[cap_idx_q]  <= s1;
      s2_q[cap_idx_q]  <= s2;
    end
  end

  // ------------------------------------------------------------ slow path
  sl_state_t sl_state_q;
  cw_t       sl_cw_q [NUM_CW];
  sym_t      sl_s1_q [NUM_CW];
  sym_t      sl_s2_q [NUM_CW];
  addr_t     sl_addr_q;
  scenario_t sl_scn_q;
  logic [NUM_CW-1:0] sl_nz_q;
  logic [NUM_CW-1:0] sl_ce_q;

  cw_t  corr_cw [NUM_CW];
  logic [NUM_CW-1:0] corr_ce, corr_due;

  for (genvar k = 0; k < NUM_CW; k++) begin : g_corr
    logic [4:0] pos_unused;
    rs_ssc_corrector u_corr (
      .cw     (sl_cw_q[k]),
      .s1     (sl_s1_q[k]),
      .s2     (sl_s2_q[k]),
      .cw_out (corr_cw[k]),
      .ce     (corr_ce[k]),
      .due    (corr_due[k]),
      .err_pos(pos_unused)
    );
  end

  line_t sl_line;
  hash_t sl_hash_rx, h2_raw, h2;
  always_comb begin
    for (int k = 0; k < int'(NUM_CW); k++) begin
      sl_line[k*BLK_SYMS*SYM_W +: BLK_SYMS*SYM_W] = sl_cw_q[k][SYM_POS_H-1:SYM_POS_D0];
      sl_hash_rx[k*SYM_W +: SYM_W] = sl_cw_q[k][SYM_POS_H];
    end
  end

  crc32c_update #(.NBYTES(LINE_BYTES + ADDR_BYTES), .POLY_REFL(CRC_POLY_REFL)) u_crc_h2 (
    .crc_in (CRC_INIT),
    .data   ({sl_addr_q, sl_line}),
    .crc_out(h2_raw)
  );
  assign h2 = h2_raw ^ CRC_XOROUT;

  // ------------------------------------------------- control and response
  line_t fast_line;
  always_comb begin
    for (int k = 0; k < int'(NUM_CW); k++) begin
      if (k == 3)
        fast_line[k*BLK_SYMS*SYM_W +: BLK_SYMS*SYM_W] = cur_cw[SYM_POS_H-1:SYM_POS_D0];
      else
        fast_line[k*BLK_SYMS*SYM_W +: BLK_SYMS*SYM_W] = cwbuf_q[k][SYM_POS_H-1:SYM_POS_D0];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sl_state_q    <= SL_IDLE;
      sl_addr_q     <= '0;
      sl_scn_q      <= SCN1_CLEAN;
      sl_nz_q       <= '0;
      sl_ce_q       <= '0;
      for (int k = 0; k < int'(NUM_CW); k++) begin
        sl_cw_q[k] <= '0;
        sl_s1_q[k] <= '0;
        sl_s2_q[k] <= '0;
      end
      resp_valid    <= 1'b0;
      resp_addr     <= '0;
      resp_data     <= '0;
      resp_status   <= RD_NO_ERROR;
      resp_scenario <= SCN1_CLEAN;
      resp_synd_nz  <= '0;
      resp_ce       <= '0;
    end else begin
      resp_valid <= 1'b0;

      // Slow path: correction, then hash re-check.
      unique case (sl_state_q)
        SL_CORRECT: begin
          if (|corr_due) begin
            resp_valid    <= 1'b1;
            resp_addr     <= sl_addr_q;
            resp_data     <= sl_line;
            resp_status   <= RD_UNCORRECTABLE;
            resp_scenario <= sl_scn_q;
            resp_synd_nz  <= sl_nz_q;
            resp_ce       <= '0;
            sl_state_q    <= SL_IDLE;
          end else begin
            for (int k = 0; k < int'(NUM_CW); k++) sl_cw_q[k] <= corr_cw[k];
            sl_ce_q    <= corr_ce;
            sl_state_q <= SL_VERIFY;
          end
        end
        SL_VERIFY: begin
          resp_valid    <= 1'b1;
          resp_addr     <= sl_addr_q;
          resp_data     <= sl_line;
          resp_status   <= (h2 == sl_hash_rx || !hash_en) ? RD_CORRECTED : RD_UNCORRECTABLE;
          resp_scenario <= sl_scn_q;
          resp_synd_nz  <= sl_nz_q;
          resp_ce       <= sl_ce_q;
          sl_state_q    <= SL_IDLE;
        end
        default: ;
      endcase

      // First decision of a completed line.
      if (decide) begin
        if (!any_nz) begin
          resp_valid    <= 1'b1;
          resp_addr     <= addr_q;
          resp_data     <= fast_line;
          resp_status   <= (hash_match || !hash_en) ? RD_NO_ERROR : RD_UNCORRECTABLE;
          resp_scenario <= scn;
          resp_synd_nz  <= nz_all;
          resp_ce       <= '0;
        end else begin
          for (int k = 0; k < int'(NUM_CW); k++) begin
            sl_cw_q[k] <= (k == 3) ? cur_cw : cwbuf_q[k];
            sl_s1_q[k] <= (k == 3) ? s1 : s1_q[k];
            sl_s2_q[k] <= (k == 3) ? s2 : s2_q[k];
          end
          sl_addr_q  <= addr_q;
          sl_scn_q   <= scn;
          sl_nz_q    <= nz_all;
          sl_state_q <= SL_CORRECT;
        end
      end
    end
  end

  // A line completes at most once every four clocks and the slow path takes
  // two, so it is always idle when a new decision is taken.
  assert property (@(posedge clk) disable iff (!rst_n)
                   decide |-> (sl_state_q == SL_IDLE))
    else $error("read path: decision while the corrector is busy");

endmodule
