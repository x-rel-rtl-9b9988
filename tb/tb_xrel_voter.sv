// tb_xrel_voter -- self-checking test of the X-Rel voter.
// 1. The elaboration-time bound: k from (N, Q_DUBV) is checked against the
//    published sweep for N = 16 (0.006 % -> 1 ... 12.5 % -> 12) and against the
//    worked example N = 8, Q_DUBV = 10 % -> k = 4.
// 2. Four voters (N=8/k=4, N=16/k=12, N=16/k=0, N=8/k=4 with zero-on-error)
//    get random inputs shaped to hit every vote case: identical words, words
//    differing only in the relaxed low bits, one corrupted upper part, and
//    three different upper parts.  Outputs are compared with a counting model.
// 3. The quality property: with OM2 = OM3 = exact value and any corruption of
//    OM1, the output never lies 2^k or further from the exact value.
module tb_xrel_voter;
  import xrel_pkg::*;
  import xrel_ref_pkg::*;
  int checks = 0, failures = 0;

  logic [7:0]  a8, b8, c8, o8, z8;
  logic [15:0] a16, b16, c16, o16, x16;
  logic        e8, e16, ex16, ez8;
  vote_status_e s8, s16, sx16, sz8;

  xrel_voter #(.N(8),  .QDUBV_MPCT(10_000)) u8  (.om1(a8),  .om2(b8),  .om3(c8),  .out(o8),  .error(e8),  .status(s8));
  xrel_voter #(.N(8),  .QDUBV_MPCT(10_000), .ZERO_ON_ERROR(1'b1))
                                             uz8 (.om1(a8),  .om2(b8),  .om3(c8),  .out(z8),  .error(ez8), .status(sz8));
  xrel_voter                                 u16 (.om1(a16), .om2(b16), .om3(c16), .out(o16), .error(e16), .status(s16));
  xrel_voter #(.N(16), .QDUBV_MPCT(1))       ux16(.om1(a16), .om2(b16), .om3(c16), .out(x16), .error(ex16), .status(sx16));

  int hit [5];

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  // Shape three words around a base: mode 0 identical, 1 low-bit noise only,
  // 2 one upper part corrupted, 3 all upper parts different.
  function automatic void shape(int unsigned n, int unsigned k, int mode,
                                output longint unsigned o1, output longint unsigned o2,
                                output longint unsigned o3);
    longint unsigned base, lowm, full;
    full = (64'd1 << n) - 1;
    lowm = (64'd1 << k) - 1;
    base = {$urandom, $urandom} & full;
    o1 = base; o2 = base; o3 = base;
    if (mode >= 1) begin
      o1 ^= 64'($urandom) & lowm; o2 ^= 64'($urandom) & lowm; o3 ^= 64'($urandom) & lowm;
    end
    if (mode == 2) begin
      case ($urandom % 3)
        0: o1 ^= (((longint'($urandom) % ((64'd1 << (n-k)) - 1)) + 1) << k) & full;
        1: o2 ^= (((longint'($urandom) % ((64'd1 << (n-k)) - 1)) + 1) << k) & full;
        default: o3 ^= (((longint'($urandom) % ((64'd1 << (n-k)) - 1)) + 1) << k) & full;
      endcase
    end
    if (mode == 3) begin
      o2 = (o2 & lowm) | ((((o1 >> k) + 1) << k) & full);
      o3 = (o3 & lowm) | ((((o1 >> k) + 2) << k) & full);
    end
  endfunction

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint unsigned o1, o2, o3, ro, ed;
    int rs;
    static int unsigned q_tab [12] = '{6, 12, 24, 48, 97, 195, 390, 781, 1562, 3125, 6250, 12500};

    // 1. quality bound -> k
    for (int i = 0; i < 12; i++) check(k_from_qdubv(16, q_tab[i]) == i + 1, "k from Q_DUBV (N=16)");
    check(k_from_qdubv(8, 10_000) == 4, "k for N=8, Q_DUBV=10%");
    check(mted(8, 10_000) == 25, "MTED for N=8, Q_DUBV=10%");
    check(k_from_qdubv(16, 1) == 0, "k = 0 when MTED < 1");

    // 2. vote cases
    for (int it = 0; it < 4000; it++) begin
      int mode;
      mode = it % 4;
      shape(8, 4, mode, o1, o2, o3);
      a8 = 8'(o1); b8 = 8'(o2); c8 = 8'(o3);
      shape(16, 12, mode, o1, o2, o3);
      a16 = 16'(o1); b16 = 16'(o2); c16 = 16'(o3);
      #1;
      ref_vote(8, 4, 1'b0, 64'(a8), 64'(b8), 64'(c8), ro, rs);
      check(o8 == 8'(ro) && int'(s8) == rs && e8 == (rs == 4), "N=8 k=4");
      hit[rs]++;
      ref_vote(8, 4, 1'b1, 64'(a8), 64'(b8), 64'(c8), ro, rs);
      check(z8 == 8'(ro) && int'(sz8) == rs && ez8 == (rs == 4), "N=8 k=4 zero-on-error");
      ref_vote(16, 12, 1'b0, 64'(a16), 64'(b16), 64'(c16), ro, rs);
      check(o16 == 16'(ro) && int'(s16) == rs && e16 == (rs == 4), "N=16 k=12");
      hit[rs]++;
      ref_vote(16, 0, 1'b0, 64'(a16), 64'(b16), 64'(c16), ro, rs);
      check(x16 == 16'(ro) && int'(sx16) == rs && ex16 == (rs == 4), "N=16 k=0 (exact)");
      if (mode == 1) check(!e8 && !e16, "low-bit differences never raise Error");
    end
    for (int s = 0; s < 5; s++) check(hit[s] > 0, "every vote case reached");

    // 3. error distance stays below 2^k with one faulty module
    for (int it = 0; it < 2000; it++) begin
      longint unsigned exact;
      exact = 64'($urandom & 32'hFFFF);
      a16 = 16'($urandom); b16 = 16'(exact); c16 = 16'(exact);
      a8 = 8'($urandom); b8 = 8'(exact); c8 = 8'(exact);
      #1;
      ed = (64'(o16) > exact) ? 64'(o16) - exact : exact - 64'(o16);
      check(ed < (64'd1 << 12) && !e16, "ED < 2^k, N=16");
      ed = (64'(o8) > (exact & 64'hFF)) ? 64'(o8) - (exact & 64'hFF) : (exact & 64'hFF) - 64'(o8);
      check(ed < 16 && !e8, "ED < 2^k, N=8");
    end
    $display("vote cases: agree=%0d m3=%0d m1=%0d m2=%0d none=%0d", hit[0], hit[1], hit[2], hit[3], hit[4]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
