// tb_sscmsd_ecc_top -- end-to-end testbench of the SSCMSD ECC engine, with
// every parameter at its default.
//
// The engine is connected to a behavioural rank of 19 x4 devices with
// fault injection (dram_rank_model). The test writes and reads whole cache
// lines through the engine and checks:
//  1. streams of back-to-back writes and reads (several reads in flight,
//     one line per four clocks on the DQ bus), all error free;
//  2. directed cases for each branch of the read decision: clean line,
//     check-chip fault (scenario 2), data-chip fault (scenario 4),
//     address-bus error during a read (scenario 3), a double-symbol error
//     the corrector cannot correct, a double-symbol error that the RS code
//     mis-corrects and the hash re-check catches, and the hash checks
//     switched off;
//  3. the fault modes of the paper's evaluation, each on RUNS random lines:
//     1 bit, 1 pin, 1 chip (random / all 0 / all 1), 1 bus lane,
//     correlated bus fault on two adjacent lanes, bit + bus, bit + chip,
//     bit + pin, pin + pin, chip + chip and three faulty chips, plus the
//     stuck-at forms of the error model: a column fault (one bit stuck at
//     0 or 1) and one pin stuck at 0 or 1 in all beats. As in the
//     paper, a line reported uncorrectable counts as correctly flagged
//     (CF); a line delivered as good is CF when its data is right and a
//     silent data corruption (SDC) otherwise. Single-chip/lane faults must
//     always be corrected; no mode may produce an SDC;
//  4. address errors during reads on RUNS random lines: always detected.
// Each mechanism (decision scenarios 1..4, corrector DUE, hash re-check
// failure, hash-off mode, several reads in flight) must occur at least
// once.
module tb_sscmsd_ecc_top;
  import sscmsd_pkg::*;
  import sscmsd_ref_pkg::*;

  localparam int RUNS  = 1000;
  localparam int LINES = 64;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, hash_en = 1;
  logic wr_valid = 0, wr_ready;
  addr_t wr_addr = '0;
  line_t wr_data = '0;
  logic rd_req_valid = 0, rd_req_ready;
  addr_t rd_req_addr = '0;
  logic rd_resp_valid;
  addr_t rd_resp_addr;
  line_t rd_resp_data;
  rd_status_t rd_resp_status;
  scenario_t rd_resp_scenario;
  logic [3:0] rd_resp_synd_nz, rd_resp_ce;
  logic mem_wr_valid, mem_wr_first, mem_wr_last;
  beat_pair_t mem_wr_beats;
  addr_t mem_wr_addr;
  logic mem_rd_cmd_valid;
  addr_t mem_rd_cmd_addr;
  logic mem_rd_valid;
  beat_pair_t mem_rd_beats;

  beat_t xor_mask [8];
  beat_t stuck_mask [8];
  beat_t stuck_val [8];
  addr_t addr_flip;

  longint cycle = 0;

  sscmsd_ecc_top dut (.*);

  dram_rank_model #(.LINES(LINES), .READ_LAT(4)) u_dram (
    .clk(clk), .wr_valid(mem_wr_valid), .wr_beats(mem_wr_beats), .wr_first(mem_wr_first),
    .wr_addr(mem_wr_addr), .rd_cmd_valid(mem_rd_cmd_valid), .rd_cmd_addr(mem_rd_cmd_addr),
    .rd_valid(mem_rd_valid), .rd_beats(mem_rd_beats), .xor_mask(xor_mask),
    .stuck_mask(stuck_mask), .stuck_val(stuck_val), .addr_flip(addr_flip));

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL @%0d: %s", cycle, what);
    end
  endtask

  // ---------------------------------------------------------- monitors
  typedef struct {
    addr_t a; line_t d; rd_status_t st; scenario_t scn; logic [3:0] ce;
  } resp_t;
  resp_t rq[$];
  int n_scn[4];
  int n_corr_due = 0, n_h2_fail = 0, n_hash_off = 0, max_inflight = 0, inflight = 0;
  int n_wr_busy = 0;

  always @(posedge clk) if (rst_n) begin
    if (rd_resp_valid) begin
      rq.push_back('{rd_resp_addr, rd_resp_data, rd_resp_status, rd_resp_scenario, rd_resp_ce});
      n_scn[rd_resp_scenario]++;
      if (rd_resp_status == RD_UNCORRECTABLE && rd_resp_scenario inside {SCN2_SYND, SCN4_HASH_SYND})
        if (rd_resp_ce == 0) n_corr_due++; else n_h2_fail++;
    end
    inflight <= inflight + int'(rd_req_valid && rd_req_ready) - int'(rd_resp_valid);
    if (inflight > max_inflight) max_inflight = inflight;
    if (mem_wr_valid) n_wr_busy++;
  end

  // ------------------------------------------------------------ helpers
  function automatic addr_t line_addr(int idx);
    addr_t a;
    a = rand_addr();
    a[5:0] = '0;
    a[6 +: 6] = 6'(idx);
    return a;
  endfunction

  task automatic write_line(addr_t a, line_t l);
    @(negedge clk);
    wr_valid = 1; wr_addr = a; wr_data = l;
    @(posedge clk);
    while (!wr_ready) @(posedge clk);
    @(negedge clk);
    wr_valid = 0;
  endtask

  task automatic drain_writes();
    repeat (6) @(posedge clk);
  endtask

  task automatic read_line(addr_t a, output resp_t r);
    int guard;
    @(negedge clk);
    rd_req_valid = 1; rd_req_addr = a;
    @(posedge clk);
    while (!rd_req_ready) @(posedge clk);
    @(negedge clk);
    rd_req_valid = 0;
    guard = 0;
    while (rq.size() == 0 && guard < 100) begin
      @(posedge clk);
      guard++;
    end
    check(rq.size() != 0, "read timed out");
    if (rq.size() != 0) r = rq.pop_front();
    else r = '{'0, '0, RD_UNCORRECTABLE, SCN1_CLEAN, '0};
    #1;
  endtask

  task automatic clear_faults();
    for (int b = 0; b < 8; b++) begin
      xor_mask[b] = '0; stuck_mask[b] = '0; stuck_val[b] = '0;
    end
    addr_flip = '0;
  endtask

  // Fault generators (paper, Sec. 7, "mechanisms used to introduce errors").
  task automatic f_bit();
    xor_mask[$urandom_range(7, 0)][$urandom_range(DQ_W - 1, 0)] ^= 1'b1;
  endtask
  task automatic f_pin();           // two consecutive bits of one symbol on one DQ pin
    int k, pin;
    k = $urandom_range(3, 0);
    pin = $urandom_range(DQ_W - 1, 0);
    xor_mask[2*k][pin] ^= 1'b1;
    xor_mask[2*k + 1][pin] ^= 1'b1;
  endtask
  task automatic f_chip(int c);     // random data, all 0 or all 1 in every beat
    int kind;
    kind = $urandom_range(2, 0);
    for (int b = 0; b < 8; b++) begin
      stuck_mask[b][4*c +: 4] = 4'hF;
      stuck_val[b][4*c +: 4]  = (kind == 0) ? 4'($urandom) : (kind == 1) ? 4'h0 : 4'hF;
    end
  endtask
  task automatic f_col();           // one bit of the line stuck at 0 or 1
    int b, pin;
    b = $urandom_range(7, 0);
    pin = $urandom_range(DQ_W - 1, 0);
    stuck_mask[b][pin] = 1'b1;
    stuck_val[b][pin]  = 1'($urandom);
  endtask
  task automatic f_pin_stuck();     // one DQ pin stuck at 0 or 1 in all beats
    int pin;
    logic v;
    pin = $urandom_range(DQ_W - 1, 0);
    v = 1'($urandom);
    for (int b = 0; b < 8; b++) begin
      stuck_mask[b][pin] = 1'b1;
      stuck_val[b][pin]  = v;
    end
  endtask
  task automatic f_bus(int c, int nlanes);   // random errors in random beats
    logic [7:0] beats;
    beats = 8'($urandom_range(255, 1));
    for (int b = 0; b < 8; b++)
      if (beats[b])
        for (int l = 0; l < nlanes; l++) xor_mask[b][4*(c + l) +: 4] ^= 4'($urandom_range(15, 1));
  endtask

  function automatic string mode_name(int m);
    case (m)
      0: return "1 bit";            1: return "1 pin";
      2: return "1 chip";           3: return "1 bus lane";
      4: return "correlated bus";   5: return "1 bit + 1 bus";
      6: return "1 bit + chip";     7: return "1 bit + 1 pin";
      8: return "1 pin + 1 pin";    9: return "chip + chip";
      10: return "3 fault mode";    11: return "column (stuck bit)";
      default: return "1 pin stuck";
    endcase
  endfunction

  task automatic inject(int m);
    int c, c2, c3;
    c  = $urandom_range(18, 0);
    c2 = (c + 1 + $urandom_range(17, 0)) % 19;
    do c3 = $urandom_range(18, 0); while (c3 == c || c3 == c2);
    case (m)
      0: f_bit();
      1: f_pin();
      2: f_chip(c);
      3: f_bus(c, 1);
      4: f_bus($urandom_range(17, 0), 2);
      5: begin f_bit(); f_bus(c, 1); end
      6: begin f_chip(c); f_bit(); end
      7: begin f_bit(); f_pin(); end
      8: begin f_pin(); f_pin(); end
      9: begin f_chip(c); f_chip(c2); end
      10: begin f_chip(c); f_chip(c2); f_chip(c3); end
      11: f_col();
      default: f_pin_stuck();
    endcase
  endtask

  initial begin
    #100ms;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    line_t store [LINES];
    addr_t saddr [LINES];
    resp_t r;
    clear_faults();
    repeat (3) @(posedge clk);
    rst_n <= 1;

    // ---------------------------------------------- 1. streams, error free
    begin
      int busy0;
      busy0 = n_wr_busy;
      @(negedge clk);
      for (int i = 0; i < LINES; i++) begin
        store[i] = rand_line();
        saddr[i] = line_addr(i);
        wr_valid = 1; wr_addr = saddr[i]; wr_data = store[i];
        @(posedge clk);
        while (!wr_ready) @(posedge clk);
        @(negedge clk);
      end
      wr_valid = 0;
      drain_writes();
      check(n_wr_busy - busy0 == 4 * LINES, "write bursts missing");
    end
    begin
      longint t0, t1;
      int got;
      @(negedge clk);
      t0 = cycle;
      fork
        begin
          for (int i = 0; i < 32; i++) begin
            rd_req_valid = 1; rd_req_addr = saddr[i];
            @(posedge clk);
            while (!rd_req_ready) @(posedge clk);
            @(negedge clk);
          end
          rd_req_valid = 0;
        end
        begin
          got = 0;
          while (got < 32) begin
            @(posedge clk);
            #1;
            while (rq.size() != 0) begin
              r = rq.pop_front();
              check(r.st == RD_NO_ERROR && r.d == store[got] && r.a == saddr[got],
                    $sformatf("stream read %0d", got));
              got++;
            end
          end
          t1 = cycle;
        end
      join
      $display("32 back-to-back reads in %0d clocks, up to %0d in flight", t1 - t0, max_inflight);
      check(t1 - t0 <= 32 * 4 + 16, "read stream slower than one line per four clocks");
      check(max_inflight >= 2, "never more than one read in flight");
    end

    // ------------------------------------------------- 2. directed cases
    begin
      int i;
      i = 3;
      // check chip 1 (C1) fault
      clear_faults(); f_chip(1);
      for (int b = 0; b < 8; b++) stuck_val[b][4 +: 4] = ~store[i][0 +: 4]; // ensure an error
      for (int b = 0; b < 8; b++) begin stuck_mask[b] = '0; xor_mask[b][4 +: 4] = 4'hA; end
      read_line(saddr[i], r);
      check(r.st == RD_CORRECTED && r.scn == SCN2_SYND && r.d == store[i], "check-chip fault");
      // data chip fault
      clear_faults(); for (int b = 0; b < 8; b++) xor_mask[b][4*9 +: 4] = 4'h5;
      read_line(saddr[i], r);
      check(r.st == RD_CORRECTED && r.scn == SCN4_HASH_SYND && r.d == store[i] &&
            r.ce == 4'hF, "data-chip fault");
      // address-bus error during a read
      clear_faults(); addr_flip = 64'h1 << 7;
      read_line(saddr[i], r);
      check(r.st == RD_UNCORRECTABLE && r.scn == SCN3_HASH_ONLY, "address error on read");
      // double-symbol error, S1 = 0: corrector DUE (codeword 1, chips 4 and 11)
      clear_faults();
      begin
        cw_t e;
        beat_pair_t bp;
        e = '0;
        e[4]  = 8'h37;
        e[11] = ref_mul(8'h37, ref_pow(8'h02, 255 + 4 - 11));
        bp = ref_beats(e);
        xor_mask[2] = bp[0]; xor_mask[3] = bp[1];
      end
      read_line(saddr[i], r);
      check(r.st == RD_UNCORRECTABLE && r.ce == 0, "double error, corrector DUE");
      // double-symbol error that is mis-corrected: two symbols of a weight-3 codeword
      clear_faults();
      begin
        cw_t c3, e;
        dw_t d;
        beat_pair_t bp;
        do begin
          d = '0; d[5] = 8'($urandom_range(255, 1)); c3 = ref_encode(d);
        end while (c3[0] == 0 || c3[1] == 0);
        e = '0; e[1] = c3[1]; e[7] = c3[7];
        bp = ref_beats(e);
        xor_mask[4] = bp[0]; xor_mask[5] = bp[1];
        read_line(saddr[i], r);
        check(r.st == RD_UNCORRECTABLE && r.ce == 4'b0100, "mis-correction caught by hash");
        // the same with the hash checks off: silently mis-corrected, as plain SSC-RS
        hash_en = 0;
        read_line(saddr[i], r);
        check(r.st == RD_CORRECTED && r.d != store[i], "hash off: mis-correction passes");
        if (r.st == RD_CORRECTED) n_hash_off++;
        clear_faults(); addr_flip = 64'h1 << 8;
        read_line(saddr[i], r);
        check(r.st == RD_NO_ERROR && r.d == store[i ^ 4], "hash off: wrong-address line passes");
        if (r.st == RD_NO_ERROR) n_hash_off++;
        hash_en = 1;
      end
      clear_faults();
      read_line(saddr[i], r);
      check(r.st == RD_NO_ERROR && r.scn == SCN1_CLEAN && r.d == store[i], "clean re-read");
    end

    // ---------------------------------------------- 3. fault-mode campaign
    for (int m = 0; m < 13; m++) begin
      int cf, sdc, due;
      cf = 0; sdc = 0; due = 0;
      for (int n = 0; n < RUNS; n++) begin
        int i;
        i = $urandom_range(LINES - 1, 0);
        store[i] = rand_line();
        clear_faults();
        write_line(saddr[i], store[i]);
        drain_writes();
        inject(m);
        read_line(saddr[i], r);
        if (r.st == RD_UNCORRECTABLE) begin cf++; due++; end
        else if (r.d == store[i]) cf++;
        else sdc++;
      end
      clear_faults();
      $display("fault mode %-16s runs %0d  CF %0d  (DUE %0d)  SDC %0d",
               mode_name(m), RUNS, cf, due, sdc);
      check(sdc == 0, $sformatf("%s: %0d silent data corruptions", mode_name(m), sdc));
      if (m <= 3 || m >= 11) check(due == 0, $sformatf("%s: single-chip fault not corrected", mode_name(m)));
    end

    // ------------------------------------------ 4. address errors on reads
    begin
      int det;
      det = 0;
      for (int n = 0; n < RUNS; n++) begin
        clear_faults();
        addr_flip = '0;
        addr_flip[6 +: 6] = 6'($urandom_range(63, 1));
        read_line(saddr[$urandom_range(LINES - 1, 0)], r);
        if (r.st == RD_UNCORRECTABLE) det++;
      end
      clear_faults();
      $display("address errors during reads: %0d of %0d detected", det, RUNS);
      check(det == RUNS, "address error not detected");
    end

    // ---------------------------------------------- mechanism coverage
    $display("scenarios 1..4: %0d %0d %0d %0d; corrector DUE %0d; hash re-check failures %0d; hash-off passes %0d; max reads in flight %0d",
             n_scn[0], n_scn[1], n_scn[2], n_scn[3], n_corr_due, n_h2_fail, n_hash_off, max_inflight);
    for (int s = 0; s < 4; s++) check(n_scn[s] > 0, $sformatf("scenario %0d never happened", s + 1));
    check(n_corr_due > 0, "corrector DUE never happened");
    check(n_h2_fail > 0, "hash re-check failure never happened");
    check(n_hash_off > 0, "hash-off mode never used");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
