// tag_fifo -- small synchronous FIFO for the addresses of outstanding reads.
//
// The memory controller issues a read address and, some clocks later, the
// DRAM returns the line. The SSCMSD read path must hash the data together
// with the address the controller asked for, so the issued addresses wait
// here in order until their data comes back. Register-array FIFO with a
// read pointer, a write pointer and an occupancy count; push and pop may
// happen in the same clock. Depth is this design's choice.
//
// Interface: push/din when !full, pop when !empty; dout is the oldest entry
// (valid while !empty). Timing: one-clock write, combinational head.
module tag_fifo #(
  parameter int unsigned WIDTH = 64,
  parameter int unsigned DEPTH = 8
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             push,
  input  logic [WIDTH-1:0] din,
  input  logic             pop,
  output logic [WIDTH-1:0] dout,
  output logic             full,
  output logic             empty
);

  localparam int unsigned PW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [WIDTH-1:0] mem_q [DEPTH];
  logic [PW-1:0]    rp_q, wp_q;
  logic [PW:0]      cnt_q;

  assign full  = (cnt_q == (PW+1)'(DEPTH));
  assign empty = (cnt_q == '0);
  assign dout  = mem_q[rp_q];

  wire do_push = push && !full;
  wire do_pop  = pop && !empty;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rp_q  <= '0;
      wp_q  <= '0;
      cnt_q <= '0;
      for (int i = 0; i < int'(DEPTH); i++) mem_q[i] <= '0;
    end else begin
      if (do_push) begin
        mem_q[wp_q] <= din;
        wp_q <= (wp_q == PW'(DEPTH - 1)) ? '0 : wp_q + 1'b1;
      end
      if (do_pop) rp_q <= (rp_q == PW'(DEPTH - 1)) ? '0 : rp_q + 1'b1;
      cnt_q <= cnt_q + (PW+1)'(do_push) - (PW+1)'(do_pop);
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) !(pop && empty))
    else $error("tag_fifo: pop while empty");
  assert property (@(posedge clk) disable iff (!rst_n) !(push && full))
    else $error("tag_fifo: push while full");

endmodule
