// sscmsd_ecc_top -- SSCMSD error handling engine of a DDRx memory controller.
//
// Sits between the controller's cache-line request interface and the DQ
// bus of one rank of 19 x4 DRAM chips (16 data chips, 2 RS check chips and
// 1 hash chip; 76 DQ lines). Writes go through sscmsd_write_path (hash of
// line and address, four RS(19,17,8) codewords, eight beats); reads come
// back through sscmsd_read_path (syndromes and hash in parallel, fast
// error-free decision, slow correction and hash re-check). The addresses of
// outstanding reads wait in a tag FIFO so that the read path hashes the
// returned data with the address the controller issued; a line fetched
// from a wrong location (an address-bus error) then fails the hash check.
//
// Interface:
//   cache side : wr_valid/wr_ready/wr_addr/wr_data (write line),
//                rd_req_valid/rd_req_ready/rd_req_addr (read request),
//                rd_resp_* (read response pulse, status and scenario).
//   memory side: mem_wr_* (write burst, one codeword = two beats per clock,
//                with its address), mem_rd_cmd_* (read command), mem_rd_valid/
//                mem_rd_beats (returned burst, four codewords in order of
//                the requests). The DDR PHY, command scheduling and DRAM
//                chips belong on these ports and are outside this design.
//   hash_en    : 1 = full SSCMSD; 0 = hash checks off (plain SSC-RS).
// Parameters: RD_TAG_DEPTH, the number of reads that may be outstanding
// (this design's choice), and CRC_POLY_REFL, the CRC-32 polynomial of the
// hash (Castagnoli by default; the paper names it, the two Koopman
// polynomials and IEEE 802.3 as candidates).
// The assertions are disabled during the asynchronous reset, which some
// lint tools report as a reset net used in a clocked context.
// Timing: see the two paths. A read request is forwarded as a command in
// the clock it is accepted (mem_rd_cmd_addr is rd_req_addr wired through,
// so the two carry the same bits); its response comes 5 clocks after the first
// returned codeword on the error-free path.
module sscmsd_ecc_top
  import sscmsd_pkg::*;
#(
  parameter int unsigned RD_TAG_DEPTH  = 8,
  parameter hash_t       CRC_POLY_REFL = CRC32C_REFL  // hash polynomial, reflected form
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        hash_en,
  // cache-line side
  input  logic        wr_valid,
  output logic        wr_ready,
  input  addr_t       wr_addr,
  input  line_t       wr_data,
  input  logic        rd_req_valid,
  output logic        rd_req_ready,
  input  addr_t       rd_req_addr,
  output logic        rd_resp_valid,
  output addr_t       rd_resp_addr,
  output line_t       rd_resp_data,
  output rd_status_t  rd_resp_status,
  output scenario_t   rd_resp_scenario,
  output logic [NUM_CW-1:0] rd_resp_synd_nz,
  output logic [NUM_CW-1:0] rd_resp_ce,
  // DRAM side
  output logic        mem_wr_valid,
  output beat_pair_t  mem_wr_beats,
  output logic        mem_wr_first,
  output logic        mem_wr_last,
  output addr_t       mem_wr_addr,
  output logic        mem_rd_cmd_valid,
  output addr_t       mem_rd_cmd_addr,
  input  logic        mem_rd_valid,
  input  beat_pair_t  mem_rd_beats
);

  hash_t wr_hash_unused;

  sscmsd_write_path #(.CRC_POLY_REFL(CRC_POLY_REFL)) u_wr (
    .clk      (clk),
    .rst_n    (rst_n),
    .wr_valid (wr_valid),
    .wr_ready (wr_ready),
    .wr_addr  (wr_addr),
    .wr_data  (wr_data),
    .dq_valid (mem_wr_valid),
    .dq_beats (mem_wr_beats),
    .dq_first (mem_wr_first),
    .dq_last  (mem_wr_last),
    .dq_addr  (mem_wr_addr),
    .dq_hash  (wr_hash_unused)
  );

  // Outstanding read addresses.
  logic       tag_full, tag_empty;
  addr_t      tag_head;
  logic [1:0] rd_cw_cnt_q;

  assign rd_req_ready     = !tag_full;
  assign mem_rd_cmd_valid = rd_req_valid && !tag_full;
  assign mem_rd_cmd_addr  = rd_req_addr;

  tag_fifo #(.WIDTH(ADDR_W), .DEPTH(RD_TAG_DEPTH)) u_tags (
    .clk   (clk),
    .rst_n (rst_n),
    .push  (mem_rd_cmd_valid),
    .din   (rd_req_addr),
    .pop   (mem_rd_valid && rd_cw_cnt_q == 2'd3),
    .dout  (tag_head),
    .full  (tag_full),
    .empty (tag_empty)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)            rd_cw_cnt_q <= '0;
    else if (mem_rd_valid) rd_cw_cnt_q <= rd_cw_cnt_q + 2'd1;
  end

  assert property (@(posedge clk) disable iff (!rst_n) mem_rd_valid |-> !tag_empty)
    else $error("ecc top: read data returned with no read outstanding");

  sscmsd_read_path #(.CRC_POLY_REFL(CRC_POLY_REFL)) u_rd (
    .clk           (clk),
    .rst_n         (rst_n),
    .hash_en       (hash_en),
    .rd_valid      (mem_rd_valid),
    .rd_beats      (mem_rd_beats),
    .rd_addr       (tag_head),
    .resp_valid    (rd_resp_valid),
    .resp_addr     (rd_resp_addr),
    .resp_data     (rd_resp_data),
    .resp_status   (rd_resp_status),
    .resp_scenario (rd_resp_scenario),
    .resp_synd_nz  (rd_resp_synd_nz),
    .resp_ce       (rd_resp_ce)
  );

endmodule
