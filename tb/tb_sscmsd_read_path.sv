// tb_sscmsd_read_path -- self-checking testbench of the SSCMSD read path.
//
// Lines are encoded by the reference model, corrupted on purpose and fed
// to the read path as four codewords on consecutive clocks. Each response
// is compared with the expected status, decision-table scenario, data and
// latency (first codeword in clock t; response in clock t+5 on the fast
// path, t+6 for a DUE codeword, t+7 after correction). Directed cases
// cover each branch of the decision flow:
//   clean line                         -> scenario 1, no error
//   check symbol hit only              -> scenario 2, corrected
//   data or hash symbol hit            -> scenario 4, corrected
//   read of another address's line     -> scenario 3, uncorrectable
//   2-symbol error with S1 = 0         -> corrector DUE, uncorrectable
//   2-symbol error that the RS decoder mis-corrects -> H2 != H'', uncorrectable
//   hash checks off (hash_en = 0)      -> the last cases pass as plain SSC-RS
// followed by a stream of back-to-back lines with single-chip faults.
// Last, a second instance built with the IEEE 802.3 CRC-32 polynomial is
// given lines encoded with that polynomial (clean and with a faulty chip)
// and lines encoded with CRC-32C, which it must reject.
module tb_sscmsd_read_path;
  import sscmsd_pkg::*;
  import sscmsd_ref_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, hash_en = 1;
  logic rd_valid = 0;
  beat_pair_t rd_beats;
  addr_t rd_addr;
  logic resp_valid;
  addr_t resp_addr;
  line_t resp_data;
  rd_status_t resp_status;
  scenario_t resp_scenario;
  logic [3:0] resp_synd_nz, resp_ce;
  longint cycle = 0;
  int seen[4];    // responses per scenario

  sscmsd_read_path dut (.rd_valid(rd_valid && !phase_i), .*);

  // A second instance built with the IEEE 802.3 hash polynomial; it only
  // sees the lines sent in the last phase of the test.
  logic       phase_i = 0;
  logic       resp_valid_i;
  addr_t      resp_addr_i;
  line_t      resp_data_i;
  rd_status_t resp_status_i;
  scenario_t  resp_scenario_i;
  logic [3:0] resp_synd_nz_i, resp_ce_i;
  sscmsd_read_path #(.CRC_POLY_REFL(CRC32_IEEE_REFL)) dut_i (
    .clk, .rst_n, .hash_en, .rd_valid(rd_valid && phase_i), .rd_beats, .rd_addr,
    .resp_valid(resp_valid_i), .resp_addr(resp_addr_i), .resp_data(resp_data_i),
    .resp_status(resp_status_i), .resp_scenario(resp_scenario_i),
    .resp_synd_nz(resp_synd_nz_i), .resp_ce(resp_ce_i));

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL @%0d: %s", cycle, what);
    end
  endtask

  typedef struct {
    addr_t addr; line_t data; rd_status_t st; scenario_t scn; int lat; bit chk_data;
    longint t0; string name;
  } exp_t;
  exp_t q[$];

  always @(posedge clk) if (rst_n && resp_valid) begin
    if (q.size() == 0) check(0, "unexpected response");
    else begin
      exp_t e;
      e = q.pop_front();
      check(resp_status == e.st, $sformatf("%s: status %s expected %s", e.name,
                                           resp_status.name(), e.st.name()));
      check(resp_scenario == e.scn, $sformatf("%s: scenario %0d expected %0d", e.name,
                                              resp_scenario + 1, e.scn + 1));
      check(resp_addr == e.addr, $sformatf("%s: address", e.name));
      if (e.chk_data) check(resp_data == e.data, $sformatf("%s: data", e.name));
      check(cycle - e.t0 == e.lat, $sformatf("%s: latency %0d expected %0d", e.name,
                                             cycle - e.t0, e.lat));
      seen[resp_scenario]++;
    end
  end

  // Drive the four codewords of a line on consecutive clocks.
  task automatic send(cw_t cw[4], addr_t a, exp_t e);
    for (int k = 0; k < 4; k++) begin
      rd_valid = 1;
      rd_beats = ref_beats(cw[k]);
      rd_addr  = (k == 0) ? a : ~a;     // address only sampled with codeword 0
      @(posedge clk);
      if (k == 0) begin
        e.t0 = cycle;
        q.push_back(e);
      end
      @(negedge clk);
    end
    rd_valid = 0;
  endtask

  task automatic encode(line_t l, addr_t a, output cw_t cw[4]);
    for (int k = 0; k < 4; k++) cw[k] = ref_line_cw(l, a, k);
  endtask

  function automatic exp_t mk(line_t l, addr_t a, rd_status_t st, scenario_t scn, int lat,
                              bit chk, string name);
    exp_t e;
    e.addr = a; e.data = l; e.st = st; e.scn = scn; e.lat = lat; e.chk_data = chk;
    e.t0 = 0; e.name = name;
    return e;
  endfunction

  // Send one line to the IEEE-polynomial instance and check its response.
  task automatic send_i(cw_t cw[4], addr_t a, line_t l, rd_status_t st, scenario_t scn,
                        int lat, string name);
    longint t0;
    for (int k = 0; k < 4; k++) begin
      rd_valid = 1;
      rd_beats = ref_beats(cw[k]);
      rd_addr  = a;
      @(posedge clk);
      if (k == 0) t0 = cycle;
      @(negedge clk);
    end
    rd_valid = 0;
    while (!resp_valid_i && cycle - t0 < 12) @(negedge clk);
    check(resp_valid_i, $sformatf("%s: no response", name));
    check(resp_status_i == st && resp_scenario_i == scn,
          $sformatf("%s: status %s scenario %0d", name, resp_status_i.name(), resp_scenario_i + 1));
    if (st != RD_UNCORRECTABLE) check(resp_data_i == l, $sformatf("%s: data", name));
    check(cycle - t0 == lat, $sformatf("%s: latency %0d expected %0d", name, cycle - t0, lat));
    @(negedge clk);
  endtask

  task automatic idle(int n);
    repeat (n) @(negedge clk);
  endtask

  initial begin
    #400000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    line_t l;
    addr_t a, a2;
    cw_t   cw[4], c3;
    dw_t   d;
    int    p, qpos;
    sym_t  ep, eq;
    rd_beats = '0;
    rd_addr  = '0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(negedge clk);

    // 1. clean line
    l = rand_line(); a = rand_addr(); encode(l, a, cw);
    send(cw, a, mk(l, a, RD_NO_ERROR, SCN1_CLEAN, 5, 1, "clean")); idle(8);

    // 2. error in check symbol C1 of codeword 2 only
    l = rand_line(); a = rand_addr(); encode(l, a, cw);
    cw[2][1] ^= 8'h5A;
    send(cw, a, mk(l, a, RD_CORRECTED, SCN2_SYND, 7, 1, "check-symbol error")); idle(8);

    // 3. error in a data symbol of codeword 1
    l = rand_line(); a = rand_addr(); encode(l, a, cw);
    cw[1][9] ^= 8'hFF;
    send(cw, a, mk(l, a, RD_CORRECTED, SCN4_HASH_SYND, 7, 1, "data-symbol error")); idle(8);

    // 4. error in the hash symbol of codeword 3
    l = rand_line(); a = rand_addr(); encode(l, a, cw);
    cw[3][18] ^= 8'h01;
    send(cw, a, mk(l, a, RD_CORRECTED, SCN4_HASH_SYND, 7, 1, "hash-symbol error")); idle(8);

    // 5. line stored for address a2 returned for a read of a
    l = rand_line(); a = rand_addr(); a2 = a ^ 64'h40; encode(l, a2, cw);
    send(cw, a, mk(l, a, RD_UNCORRECTABLE, SCN3_HASH_ONLY, 5, 0, "wrong address")); idle(8);

    // 6. two-symbol error with S1 = 0 in codeword 0: always a DUE
    l = rand_line(); a = rand_addr(); encode(l, a, cw);
    p = 4; qpos = 11; ep = 8'h37;
    eq = ref_mul(ep, ref_pow(8'h02, (255 + p - qpos) % 255));
    cw[0][p] ^= ep; cw[0][qpos] ^= eq;
    send(cw, a, mk(l, a, RD_UNCORRECTABLE, SCN4_HASH_SYND, 6, 0, "corrector DUE")); idle(8);

    // 7. two-symbol error that the RS decoder mis-corrects: add two of the
    //    three non-zero symbols of a weight-3 codeword c3
    do begin
      d = '0;
      d[5] = 8'($urandom_range(255, 1));
      c3 = ref_encode(d);
    end while (c3[0] == 0 || c3[1] == 0);
    l = rand_line(); a = rand_addr(); encode(l, a, cw);
    cw[2][1] ^= c3[1]; cw[2][7] ^= c3[7];
    send(cw, a, mk(l, a, RD_UNCORRECTABLE, SCN4_HASH_SYND, 7, 0, "mis-correction")); idle(8);

    // 8. same two cases with the hash checks off: plain SSC-RS behaviour
    hash_en = 0;
    l = rand_line(); a = rand_addr(); a2 = a ^ 64'h1; encode(l, a2, cw);
    send(cw, a, mk(l, a, RD_NO_ERROR, SCN3_HASH_ONLY, 5, 1, "wrong address, hash off")); idle(8);
    l = rand_line(); a = rand_addr(); encode(l, a, cw);
    cw[2][1] ^= c3[1]; cw[2][7] ^= c3[7];
    begin
      line_t bad;
      bad = l;
      bad[8*(32 + 5) +: 8] ^= c3[7];       // symbol 7 = D5 of block 2
      send(cw, a, mk(bad, a, RD_CORRECTED, SCN4_HASH_SYND, 7, 1, "mis-correction, hash off"));
    end
    idle(8);
    hash_en = 1;

    // 9. back-to-back lines, each clean or with one faulty chip
    for (int n = 0; n < 40; n++) begin
      int chip;
      bit faulty;
      l = rand_line(); a = rand_addr(); encode(l, a, cw);
      faulty = (n % 3 != 0);
      chip = $urandom_range(18, 0);
      if (faulty) for (int k = 0; k < 4; k++) cw[k][chip] ^= 8'($urandom_range(255, 1));
      send(cw, a, mk(l, a, faulty ? RD_CORRECTED : RD_NO_ERROR,
                     !faulty ? SCN1_CLEAN : (chip < 2 ? SCN2_SYND : SCN4_HASH_SYND),
                     faulty ? 7 : 5, 1, $sformatf("stream line %0d chip %0d", n, chip)));
    end
    idle(12);
    check(q.size() == 0, "responses missing");

    // 10. the IEEE-polynomial instance: clean and single-chip-fault lines
    // encoded with that polynomial pass; a line hashed with CRC-32C does not.
    phase_i = 1;
    for (int n = 0; n < 10; n++) begin
      int chip;
      l = rand_line(); a = rand_addr();
      for (int k = 0; k < 4; k++) cw[k] = ref_line_cw(l, a, k, 32'h04C11DB7);
      send_i(cw, a, l, RD_NO_ERROR, SCN1_CLEAN, 5, $sformatf("IEEE clean %0d", n));
      chip = $urandom_range(18, 2);
      for (int k = 0; k < 4; k++) cw[k][chip] ^= 8'($urandom_range(255, 1));
      send_i(cw, a, l, RD_CORRECTED, SCN4_HASH_SYND, 7, $sformatf("IEEE chip %0d", chip));
      encode(l, a, cw);
      send_i(cw, a, l, RD_UNCORRECTABLE, SCN3_HASH_ONLY, 5, $sformatf("CRC-32C line %0d", n));
    end
    phase_i = 0;
    for (int s = 0; s < 4; s++) check(seen[s] > 0, $sformatf("scenario %0d never seen", s + 1));
    $display("scenarios seen: %0d %0d %0d %0d", seen[0], seen[1], seen[2], seen[3]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
