// sscmsd_write_path -- SSCMSD encoding of a cache-line write.
//
// Implements the write side of the scheme (hash first, then encode data and
// hash together, "scheme A" in the paper): a CRC-32C hash H is taken over
// the 64-byte line and the 8-byte line address, H is split into four 8-bit
// symbols H0..H3, and hash symbol Hk joins data block k (16 bytes) to form
// a 17-symbol dataword. Four RS(19,17,8) encoders turn the datawords into
// four codewords, which leave on the 76-line DQ bus as eight beats, two
// beats (one codeword) per clock. Hashing the address, which the paper
// offers as an extension, is always on here; it is what lets the read path
// catch a read from the wrong address.
//
// CRC_POLY_REFL selects the CRC-32 polynomial (Castagnoli by default); the
// read path must use the same one.
// Interface: valid/ready request (wr_valid, wr_ready, wr_addr, wr_data);
// the burst leaves as dq_valid/dq_beats with dq_first on codeword 0 and
// dq_last on codeword 3, and dq_addr holding the address for the command
// path. The stream cannot be stalled, as on a real DQ bus.
// Timing: hashing and encoding are combinational in the accepting cycle;
// codeword k leaves k+1 cycles after the request is accepted. A new
// request is accepted in the cycle of dq_last, so back-to-back writes use
// the bus every cycle (one line per four clocks). The registering and the
// handshake are this design's choices.
module sscmsd_write_path
  import sscmsd_pkg::*;
#(
  parameter hash_t CRC_POLY_REFL = CRC32C_REFL  // hash polynomial, reflected form
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        wr_valid,
  output logic        wr_ready,
  input  addr_t       wr_addr,
  input  line_t       wr_data,
  output logic        dq_valid,
  output beat_pair_t  dq_beats,
  output logic        dq_first,
  output logic        dq_last,
  output addr_t       dq_addr,
  output hash_t       dq_hash      // hash of the burst on the bus (for monitoring)
);

  hash_t crc_raw, hash;
  dw_t   dw   [NUM_CW];
  cw_t   cw   [NUM_CW];
  cw_t   cw_q [NUM_CW];
  logic [1:0] idx_q;
  logic       busy_q;

  crc32c_update #(.NBYTES(LINE_BYTES + ADDR_BYTES), .POLY_REFL(CRC_POLY_REFL)) u_hash (
    .crc_in  (CRC_INIT),
    .data    ({wr_addr, wr_data}),
    .crc_out (crc_raw)
  );
  assign hash = crc_raw ^ CRC_XOROUT;

  for (genvar k = 0; k < NUM_CW; k++) begin : g_cw
    always_comb begin
      for (int j = 0; j < int'(BLK_SYMS); j++)
        dw[k][j] = wr_data[(k*BLK_SYMS + j)*SYM_W +: SYM_W];
      dw[k][BLK_SYMS] = hash[k*SYM_W +: SYM_W];
    end
    rs_encoder u_enc (.dw(dw[k]), .cw(cw[k]));
  end

  wire accept = wr_valid && wr_ready;
  assign wr_ready = !busy_q || (idx_q == 2'd3);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy_q  <= 1'b0;
      idx_q   <= '0;
      dq_addr <= '0;
      dq_hash <= '0;
      for (int k = 0; k < int'(NUM_CW); k++) cw_q[k] <= '0;
    end else begin
      if (accept) begin
        busy_q  <= 1'b1;
        idx_q   <= '0;
        dq_addr <= wr_addr;
        dq_hash <= hash;
        for (int k = 0; k < int'(NUM_CW); k++) cw_q[k] <= cw[k];
      end else if (busy_q) begin
        idx_q  <= idx_q + 2'd1;
        busy_q <= (idx_q != 2'd3);
      end
    end
  end

  assign dq_valid = busy_q;
  assign dq_beats = cw_to_beats(cw_q[idx_q]);
  assign dq_first = busy_q && (idx_q == 2'd0);
  assign dq_last  = busy_q && (idx_q == 2'd3);

endmodule
