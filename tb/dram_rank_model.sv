// dram_rank_model -- behavioural model of one rank of 19 x4 DDR devices,
// with fault injection, for the end-to-end testbench. Not synthesizable
// and not part of the design: it stands in for the DRAM chips and the
// DDR PHY.
//
// Stores LINES cache lines of eight 76-bit beats, indexed by address bits
// [6 +: log2(LINES)] (64-byte lines). A write burst is taken as four
// two-beat words starting with wr_first. A read command returns the four
// two-beat words of the line READ_LAT clocks later; queued reads follow
// back to back. Faults are applied to data on the way out, beat by beat:
//   out = ((stored & ~stuck_mask) | (stuck_val & stuck_mask)) ^ xor_mask
// and addr_flip is XORed into the address of every read, modelling an
// address-bus error during reads.
module dram_rank_model
  import sscmsd_pkg::*;
#(
  parameter int unsigned LINES    = 64,
  parameter int unsigned READ_LAT = 4
) (
  input  logic       clk,
  input  logic       wr_valid,
  input  beat_pair_t wr_beats,
  input  logic       wr_first,
  input  addr_t      wr_addr,
  input  logic       rd_cmd_valid,
  input  addr_t      rd_cmd_addr,
  output logic       rd_valid,
  output beat_pair_t rd_beats,
  input  beat_t      xor_mask   [8],
  input  beat_t      stuck_mask [8],
  input  beat_t      stuck_val  [8],
  input  addr_t      addr_flip
);

  localparam int unsigned IW = $clog2(LINES);

  beat_t mem [LINES][8];
  int unsigned wr_idx, wr_k;
  longint cycle = 0;

  typedef struct { int unsigned idx; longint start; } rd_t;
  rd_t rq[$];
  longint bus_free = 0;

  function automatic int unsigned index_of(addr_t a);
    return int'(a[6 +: IW]);
  endfunction

  initial begin
    for (int i = 0; i < int'(LINES); i++)
      for (int b = 0; b < 8; b++) mem[i][b] = '0;
    rd_valid = 0;
    rd_beats = '0;
  end

  always @(posedge clk) begin
    cycle <= cycle + 1;
    // writes
    if (wr_valid) begin
      int unsigned idx, k;
      idx = wr_first ? index_of(wr_addr) : wr_idx;
      k   = wr_first ? 0 : wr_k;
      mem[idx][2*k]     = wr_beats[0];
      mem[idx][2*k + 1] = wr_beats[1];
      wr_idx = idx;
      wr_k   = k + 1;
    end
    // read commands
    if (rd_cmd_valid) begin
      rd_t r;
      longint st;
      st = cycle + READ_LAT;
      if (st < bus_free) st = bus_free;
      r.idx = index_of(rd_cmd_addr ^ addr_flip);
      r.start = st;
      bus_free = st + 4;
      rq.push_back(r);
    end
    // read data
    rd_valid <= 1'b0;
    if (rq.size() != 0 && cycle >= rq[0].start) begin
      int k;
      beat_pair_t bp;
      k = int'(cycle - rq[0].start);
      for (int b = 0; b < 2; b++) begin
        beat_t s;
        s = mem[rq[0].idx][2*k + b];
        bp[b] = ((s & ~stuck_mask[2*k + b]) | (stuck_val[2*k + b] & stuck_mask[2*k + b]))
                ^ xor_mask[2*k + b];
      end
      rd_valid <= 1'b1;
      rd_beats <= bp;
      if (k == 3) void'(rq.pop_front());
    end
  end

endmodule
