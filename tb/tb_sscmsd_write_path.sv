// tb_sscmsd_write_path -- self-checking testbench of the SSCMSD write path.
//
// Sends random lines with random addresses, first with gaps and then
// back to back, and compares every two-beat word on the DQ side with the
// reference: CRC-32C of line and address split into four hash symbols,
// RS(19,17,8) encoding of each 16-byte block with its hash symbol, and the
// chip/pin/beat mapping. It also checks the burst framing and timing
// (codeword k leaves k+1 clocks after the request is accepted) and that
// back-to-back requests keep the bus busy every clock. A second instance
// built with another CRC-32 polynomial (Koopman {1,1,30}) runs alongside
// and is checked against the reference with that polynomial.
module tb_sscmsd_write_path;
  import sscmsd_pkg::*;
  import sscmsd_ref_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic wr_valid = 0, wr_ready;
  addr_t wr_addr;
  line_t wr_data;
  logic dq_valid, dq_first, dq_last;
  beat_pair_t dq_beats;
  addr_t dq_addr;
  hash_t dq_hash;
  longint cycle = 0;

  sscmsd_write_path dut (.*);

  // A second instance built with the Koopman {1,1,30} hash polynomial,
  // driven in lock step with the first.
  logic       wr_ready_k, dq_valid_k, dq_first_k, dq_last_k;
  beat_pair_t dq_beats_k;
  addr_t      dq_addr_k;
  hash_t      dq_hash_k;
  sscmsd_write_path #(.CRC_POLY_REFL(CRC32K2_REFL)) dut_k (
    .clk, .rst_n, .wr_valid, .wr_ready(wr_ready_k), .wr_addr, .wr_data,
    .dq_valid(dq_valid_k), .dq_beats(dq_beats_k), .dq_first(dq_first_k),
    .dq_last(dq_last_k), .dq_addr(dq_addr_k), .dq_hash(dq_hash_k));

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL @%0d: %s", cycle, what);
    end
  endtask

  // expected stream
  typedef struct { line_t line; addr_t addr; longint t_acc; } req_t;
  req_t q[$];
  int   cw_idx = 0;
  int   lines_done = 0;
  int   busy_cycles = 0;

  always @(posedge clk) if (rst_n) begin
    if (wr_valid && wr_ready) q.push_back('{wr_data, wr_addr, cycle});
    if (dq_valid) begin
      busy_cycles++;
      if (q.size() == 0) check(0, "burst with no request");
      else begin
        req_t r;
        r = q[0];
        check(dq_beats == ref_beats(ref_line_cw(r.line, r.addr, cw_idx)),
              $sformatf("codeword %0d of line %0d differs", cw_idx, lines_done));
        check(dq_first == (cw_idx == 0) && dq_last == (cw_idx == 3), "burst framing");
        check(dq_addr == r.addr, "burst address");
        check(dq_valid_k && dq_beats_k == ref_beats(ref_line_cw(r.line, r.addr, cw_idx, 32'h32583499)),
              $sformatf("Koopman-polynomial instance: codeword %0d of line %0d differs", cw_idx, lines_done));
        check(dq_hash == ref_line_hash(r.line, r.addr), "hash");
        check(cycle == r.t_acc + 1 + cw_idx,
              $sformatf("codeword %0d at cycle %0d, accepted at %0d", cw_idx, cycle, r.t_acc));
        if (cw_idx == 3) begin
          void'(q.pop_front());
          cw_idx = 0;
          lines_done++;
        end else cw_idx++;
      end
    end
  end

  initial begin
    #200000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int busy0;
    longint t0;
    wr_addr = '0;
    wr_data = '0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    // requests with gaps
    for (int n = 0; n < 20; n++) begin
      @(negedge clk);
      wr_valid = 1;
      wr_data  = rand_line();
      wr_addr  = rand_addr();
      do @(posedge clk); while (!wr_ready);
      @(negedge clk);
      wr_valid = 0;
      repeat ($urandom_range(6, 0)) @(posedge clk);
    end
    repeat (8) @(posedge clk);
    // back to back
    busy0 = busy_cycles;
    @(negedge clk);
    t0 = cycle;
    for (int n = 0; n < 30; n++) begin
      wr_valid = 1;
      wr_data  = rand_line();
      wr_addr  = rand_addr();
      @(posedge clk);
      while (!wr_ready) @(posedge clk);
      @(negedge clk);
    end
    wr_valid = 0;
    repeat (8) @(posedge clk);
    check(busy_cycles - busy0 == 120, $sformatf("back-to-back bus cycles %0d", busy_cycles - busy0));
    check(lines_done == 50, $sformatf("lines written %0d", lines_done));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
