// tb_cpm_top -- end-to-end test of the CPM device at its default size.
//
// The testbench is the host CPU on the address and data bus.  It runs, through
// the bus only, each array algorithm the design is meant for, and checks the
// memory contents it reads back against results it computes itself on its
// own copy of the data:
//   RAM read/write            insertion and deletion by moving content
//   multi-word match search   match enumeration (priority encoder) and count
//   threshold search          local-maximum search
//   global max and sum by sections of M elements (fig. "global operation")
//   2-D sum by Mx x My sections (running sums along X then Y)
//   encryption by a neighbouring vector and its decryption
//   histogram by counting     sorted insertion, sortedness check
//   (1,2,1) and (1,2,4,2,1) neighbouring-vector filters, and the 2-D
//   (1,2,1) x (1,2,1) tensor
//   multi-word addition with carry between PEs
//   2-D edge line along X     slope-3/4 edge messenger (4 x 3 area)
//   edge messengers for a set of 12 slopes around a circle of radius 5,
//   each pixel marked with its best value and area (in context 1)
//   context switch between two jobs' addressable registers
// It also counts the bus cycles each algorithm needs and checks them against
// the count that follows from the algorithm (a constant for the universal
// operations, 2M + N/M + 4 for the sectioned global operations,
// Mx + My + N/(Mx*My) + 7 for the 2-D sum), and fails any
// mechanism that never ran.  Element address i = y*COLS + x; "up" is y+1.
module tb_cpm_top;
  import cpm_pkg::*;
  localparam int W = 16, ROWS = 8, COLS = 8, N = ROWS * COLS, ABUS_W = 20;
  localparam logic [ABUS_W-1:0] REGB = ABUS_W'(2) << (ABUS_W - 2);
  localparam logic [ABUS_W-1:0] INSB = ABUS_W'(3) << (ABUS_W - 2);

  logic              clk = 0, rst_n = 0;
  logic              bus_en = 0, bus_we = 0;
  logic [ABUS_W-1:0] bus_addr = '0;
  logic [W-1:0]      bus_wdata = '0, bus_rdata;
  logic              bus_rvalid;
  logic [W-1:0]      chain_first_r, chain_last_r;
  logic              chain_last_s;

  cpm_top dut (
    .clk, .rst_n, .bus_en, .bus_we, .bus_addr, .bus_wdata, .bus_rdata, .bus_rvalid,
    .chain_left_r ('0), .chain_left_s (1'b0), .chain_right_r ('0),
    .chain_first_r, .chain_last_r, .chain_last_s
  );

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int bus_cycles = 0;
  always @(posedge clk) if (bus_en) bus_cycles++;

  typedef enum int {
    M_RAM, M_INSERT, M_DELETE, M_MATCH, M_ENUM, M_COUNT, M_THRESH, M_LOCMAX,
    M_GMAX, M_GSUM, M_SORTINS, M_SORTCHK, M_GAUSS, M_CARRY, M_EDGEX, M_MESSENGER, M_CTX, M_HIST, M_TEMPLATE, M_SORT, M_SUM2D, M_LINESET, M_LINEMARK, M_CRYPT, M_GAUSS5, M_GAUSS2D,
    M_NUM
  } mech_e;
  int mech [M_NUM];
  string mech_name [M_NUM] = '{"ram", "insert", "delete", "match", "enumerate", "count",
                               "threshold", "local_max", "global_max", "global_sum",
                               "sorted_insert", "sorted_check", "gauss121", "carry_add",
                               "edge_x", "messenger", "context_switch", "histogram", "template", "sort", "sum2d", "line_set", "line_mark", "crypt", "gauss12421", "gauss2d"};

  logic [W-1:0] mem [N];     // host's model of every A register

  // ---------------- bus helpers ----------------
  task automatic ck(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic xfer(logic we, logic [ABUS_W-1:0] ad, logic [W-1:0] d);
    bus_en = 1; bus_we = we; bus_addr = ad; bus_wdata = d;
    @(posedge clk); #1;
    bus_en = 0; bus_we = 0;
  endtask

  task automatic wr(int ad, logic [W-1:0] d);
    xfer(1, ABUS_W'(ad), d);
  endtask

  task automatic rd_any(logic [ABUS_W-1:0] ad, output logic [W-1:0] d);
    xfer(0, ad, '0);
    ck(bus_rvalid === 1'b1, "read data one cycle after the read");
    d = bus_rdata;
  endtask

  task automatic rd(int ad, output logic [W-1:0] d);
    rd_any(ABUS_W'(ad), d);
  endtask

  task automatic setreg(logic [3:0] r, int v);
    xfer(1, REGB | ABUS_W'(r), W'(v));
  endtask

  task automatic act(int s, int e, int inc);
    setreg(REG_START, s); setreg(REG_END, e); setreg(REG_INCR, inc);
  endtask

  task automatic ex(instr_t i, logic [W-1:0] d = '0);
    xfer(1, INSB | ABUS_W'(i), d);
  endtask

  task automatic rdreg(logic [3:0] r, output logic [W-1:0] d);
    rd_any(REGB | ABUS_W'(r), d);
  endtask

  task automatic load(int lo, int hi);
    for (int k = lo; k <= hi; k++) wr(k, mem[k]);
  endtask

  task automatic check_mem(int lo, int hi, string what);
    logic [W-1:0] d;
    for (int k = lo; k <= hi; k++) begin
      rd(k, d);
      ck(d === mem[k], $sformatf("%s: A[%0d]=%0d expected %0d", what, k, d, mem[k]));
    end
  endtask

  function automatic int sx(logic [W-1:0] v);
    return int'(signed'(v));
  endfunction

  logic [W-1:0] best_m [N];   // model of the line marks (context 1)

  // ---------------- algorithms ----------------
  // Insert value v at position p of a list of length len (elements 0..len-1).
  task automatic insert_at(int p, int len, logic [W-1:0] v);
    int c0 = bus_cycles;
    act(p, len, 1);
    ex(mk(OP_MOV, DST_R, SRC_A, SRC_ZERO));
    ex(mk(OP_MOV, DST_A, SRC_LEFT, SRC_ZERO));
    wr(p, v);
    ck(bus_cycles - c0 == 6, $sformatf("insert takes 6 bus cycles, took %0d", bus_cycles - c0));
    for (int k = len; k > p; k--) mem[k] = mem[k-1];
    mem[p] = v;
    mech[M_INSERT]++;
  endtask

  task automatic delete_at(int p, int len);
    int c0 = bus_cycles;
    act(p, len, 1);
    ex(mk(OP_MOV, DST_R, SRC_A, SRC_ZERO));
    ex(mk(OP_MOV, DST_A, SRC_RIGHT, SRC_ZERO));
    ck(bus_cycles - c0 == 5, $sformatf("delete takes 5 bus cycles, took %0d", bus_cycles - c0));
    for (int k = p; k < len - 1; k++) mem[k] = mem[k+1];
    mech[M_DELETE]++;
  endtask

  // Sectioned global reduction (max or add) with section length m.
  task automatic sections(op_e op, int m, output int result);
    int c0 = bus_cycles;
    logic [W-1:0] d;
    setreg(REG_END, N - 1);
    setreg(REG_INCR, m);
    for (int j = 0; j < m; j++) begin
      setreg(REG_START, j);
      if (j == 0) ex(mk(OP_MOV, DST_R, SRC_A, SRC_ZERO));
      else        ex(mk(op, DST_R, SRC_A, SRC_LEFT));
    end
    setreg(REG_START, m - 1);
    ex(mk(OP_MOV, DST_A, SRC_R, SRC_ZERO));
    result = 0;
    for (int k = m - 1; k < N; k += m) begin
      rd(k, d);
      if (op == OP_MAX) result = (int'(d) > result) ? int'(d) : result;
      else              result += int'(d);
    end
    ck(bus_cycles - c0 == 2 * m + N / m + 4,
       $sformatf("sectioned op: %0d bus cycles, expected %0d", bus_cycles - c0, 2 * m + N / m + 4));
  endtask

  // Edge messenger for the Mx x My area whose far corner is (mx, my) from the
  // pixel (either sign).  Each step moves one unit toward the pixel, to the
  // neighbour nearer the line (smaller |f|, f(x,y) = my*x - mx*y; an x step on
  // a tie).  The pixel stepped onto is added where f > 0 (left of the walk),
  // subtracted where f < 0 and skipped on the line.  The image is in mem and
  // in A; every pixel whose area lies inside the image is checked.
  // Afterwards the messenger value is folded into the best mark of every
  // pixel, kept in the addressable register of context 1:
  //   mark = max(mark, |value| * 16 + idx)   (unsigned)
  // so the high bits hold the best line-segment magnitude and the low four
  // the area that gave it.  best_m models the marks, including the values
  // pixels near the border get from the chain and boundary links.
  task automatic line_walk(int mx, int my, int idx, output string steps);
    int px, py, c0, e, f, fx, fy, n;
    logic [W-1:0] m [N], mn [N], nb;
    int wx [16], wy [16], wf [16];
    logic [W-1:0] d;
    src_e from;
    op_e  op;
    // the walk, worked out on the host
    px = mx; py = my; n = 0; steps = "";
    while (px != 0 || py != 0) begin
      fx = (px != 0) ? my * (px - ((px > 0) ? 1 : -1)) - mx * py : 1 << 30;
      fy = (py != 0) ? my * px - mx * (py - ((py > 0) ? 1 : -1)) : 1 << 30;
      if (((fx < 0) ? -fx : fx) <= ((fy < 0) ? -fy : fy)) begin
        px -= (px > 0) ? 1 : -1; steps = {steps, "X"};
      end else begin
        py -= (py > 0) ? 1 : -1; steps = {steps, "Y"};
      end
      wx[n] = px; wy[n] = py; wf[n] = my * px - mx * py; n++;
    end
    // run it on the array: the messenger rides in R
    act(0, N - 1, 1);
    c0 = bus_cycles;
    ex(mk(OP_MOV, DST_R, SRC_ZERO, SRC_ZERO));
    for (int k = 0; k < n; k++) begin
      if (steps[k] == "X") from = (mx > 0) ? SRC_RIGHT : SRC_LEFT;
      else                 from = (my > 0) ? SRC_UP : SRC_DOWN;
      op = (wf[k] > 0) ? OP_ADD : (wf[k] < 0) ? OP_SUB : OP_MOV;
      ex(mk(op, DST_R, from, (op == OP_MOV) ? SRC_ZERO : SRC_A));
    end
    ck(bus_cycles - c0 == ((mx < 0) ? -mx : mx) + ((my < 0) ? -my : my) + 1,
       $sformatf("walk (%0d,%0d): %0d instructions", mx, my, bus_cycles - c0));
    // reference: the same walk over a model of the mesh links
    for (int i = 0; i < N; i++) m[i] = '0;
    for (int k = 0; k < n; k++) begin
      for (int i = 0; i < N; i++) begin
        if (steps[k] == "X") nb = (mx > 0) ? ((i + 1 < N) ? m[i + 1] : '0)
                                           : ((i > 0) ? m[i - 1] : '0);
        else                 nb = (my > 0) ? ((i + COLS < N) ? m[i + COLS] : '0)
                                           : ((i >= COLS) ? m[i - COLS] : '0);
        mn[i] = (wf[k] > 0) ? nb + mem[i] : (wf[k] < 0) ? nb - mem[i] : nb;
      end
      m = mn;
    end
    ex(mk(OP_MOV, DST_A, SRC_R, SRC_ZERO));
    for (int y = 0; y < ROWS; y++)
      for (int x = 0; x < COLS; x++)
        if (x + mx >= 0 && x + mx < COLS && y + my >= 0 && y + my < ROWS) begin
          e = 0;
          for (int k = 0; k < n; k++) begin
            f = int'(mem[(y + wy[k]) * COLS + x + wx[k]]);
            e += (wf[k] > 0) ? f : (wf[k] < 0) ? -f : 0;
          end
          rd(y * COLS + x, d);
          ck(sx(d) == e, $sformatf("walk (%0d,%0d) at (%0d,%0d): %0d expected %0d",
                                   mx, my, x, y, sx(d), e));
        end
    // fold into the marks: R <= |R| * 16 + idx, then in context 1 A <= max(A, R)
    c0 = bus_cycles;
    ex(mk(OP_ABS, DST_R, SRC_R, SRC_ZERO));
    for (int k = 0; k < 4; k++) ex(mk(OP_ADD, DST_R, SRC_R, SRC_R));
    ex(mk(OP_ADD, DST_R, SRC_R, SRC_DATA), W'(idx));
    setreg(REG_CTX, 1);
    ex(mk(OP_MAX, DST_A, SRC_A, SRC_R));
    setreg(REG_CTX, 0);
    ck(bus_cycles - c0 == 9, $sformatf("marking takes 9 bus cycles, took %0d", bus_cycles - c0));
    for (int i = 0; i < N; i++) begin
      nb = m[i][W-1] ? -m[i] : m[i];
      nb = (nb << 4) + W'(idx);
      if (nb > best_m[i]) best_m[i] = nb;
    end
    load(0, N - 1);
    mech[M_LINESET]++;
  endtask

  // ---------------- watchdog ----------------
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- test ----------------
  initial begin
    logic [W-1:0] d;
    int len, exp_i, got;

    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;

    // ---- plain RAM ----
    for (int k = 0; k < N; k++) mem[k] = W'($urandom_range(0, 999));
    load(0, N - 1);
    check_mem(0, N - 1, "ram");
    mech[M_RAM]++;

    // ---- insertion and deletion ----
    len = 20;
    insert_at(5, len, 16'd4321); len++;
    insert_at(0, len, 16'd1111); len++;
    insert_at(len, len, 16'd2222); len++;
    check_mem(0, len - 1, "insert");
    delete_at(3, len); len--;
    delete_at(0, len); len--;
    check_mem(0, len - 1, "delete");

    // ---- multi-word match search, enumeration and count ----
    for (int k = 0; k < N; k++) mem[k] = W'($urandom_range(0, 9));
    mem[4] = 5; mem[5] = 6; mem[6] = 7;
    mem[30] = 5; mem[31] = 6; mem[32] = 7;
    mem[62] = 5; mem[63] = 6;
    load(0, N - 1);
    act(0, N - 1, 1);
    begin
      int c0;
      int expect_pos [$];
      c0 = bus_cycles;
      ex(mk(OP_EQ, DST_A, SRC_A, SRC_DATA, CH_SET), 16'd5);
      ex(mk(OP_EQ, DST_A, SRC_A, SRC_DATA, CH_LEFT), 16'd6);
      ex(mk(OP_EQ, DST_A, SRC_A, SRC_DATA, CH_LEFT), 16'd7);
      ck(bus_cycles - c0 == 3, "3-word match takes 3 instructions");
      mech[M_MATCH]++;
      for (int k = 2; k < N; k++)
        if (mem[k-2] == 5 && mem[k-1] == 6 && mem[k] == 7) expect_pos.push_back(k);
      rdreg(REG_COUNT, d);
      ck(int'(d) == expect_pos.size(), $sformatf("match count %0d expected %0d", d, expect_pos.size()));
      mech[M_COUNT]++;
      foreach (expect_pos[q]) begin
        rdreg(REG_MATCH, d);
        ck(d === {1'b1, 15'(expect_pos[q])}, $sformatf("match %0d at %0d", q, d[14:0]));
        setreg(REG_MATCH_NEXT, 0);
        mech[M_ENUM]++;
      end
      rdreg(REG_MATCH, d);
      ck(d[W-1] == 1'b0, "all matches enumerated");
    end

    // ---- threshold search ----
    for (int k = 0; k < N; k++) mem[k] = W'($urandom_range(0, 999));
    load(0, N - 1);
    begin
      int below, above, c0;
      below = 0; above = 0;
      for (int k = 0; k < N; k++) begin
        below += int'(mem[k] < 300);
        above += int'(mem[k] > 700);
      end
      c0 = bus_cycles;
      ex(mk(OP_LT, DST_A, SRC_A, SRC_DATA), 16'd300);
      ck(bus_cycles - c0 == 1, "threshold search is one instruction");
      rdreg(REG_COUNT, d); ck(int'(d) == below, $sformatf("below 300: %0d expected %0d", d, below));
      ex(mk(OP_GT, DST_A, SRC_A, SRC_DATA), 16'd700);
      rdreg(REG_COUNT, d); ck(int'(d) == above, $sformatf("above 700: %0d expected %0d", d, above));
      mech[M_THRESH]++;
    end

    // ---- histogram: per bin, S = (A > lo-1) & (A < hi), then COUNT ----
    begin
      int n_total, c0;
      n_total = 0;
      for (int lo = 0; lo < 1000; lo += 250) begin
        int n;
        n = 0;
        for (int k = 0; k < N; k++) n += int'(mem[k] >= lo && mem[k] < lo + 250);
        c0 = bus_cycles;
        if (lo == 0) ex(mk(OP_SSET, DST_A, SRC_A, SRC_A));
        else         ex(mk(OP_GT, DST_A, SRC_A, SRC_DATA), W'(lo - 1));
        ex(mk(OP_LT, DST_A, SRC_A, SRC_DATA, CH_AND), W'(lo + 250));
        rdreg(REG_COUNT, d);
        ck(bus_cycles - c0 == 3, "histogram bin takes 3 bus cycles");
        ck(int'(d) == n, $sformatf("histogram bin %0d: %0d expected %0d", lo, d, n));
        n_total += int'(d);
      end
      ck(n_total == N, "histogram n_total add up to N");
      mech[M_HIST]++;
    end

    // ---- template match: neighbouring vector (-1,1,0) equal to a bus value ----
    begin
      int n, first;
      n = 0; first = -1;
      for (int k = 1; k < N; k++)
        if (mem[k] - mem[k-1] == 16'd5) begin n++; if (first < 0) first = k; end
      // plant two hits so the search is never empty
      if (n == 0) begin
        mem[10] = mem[9] + 16'd5; mem[40] = mem[39] + 16'd5;
        wr(10, mem[10]); wr(40, mem[40]);
        n = 0; first = -1;
        for (int k = 1; k < N; k++)
          if (mem[k] - mem[k-1] == 16'd5) begin n++; if (first < 0) first = k; end
      end
      act(0, N - 1, 1);
      ex(mk(OP_MOV, DST_R, SRC_A, SRC_ZERO));
      ex(mk(OP_SUB, DST_R, SRC_A, SRC_LEFT));           // (-1,1,0)
      act(1, N - 1, 1);                                  // PE 0 has no left item
      ex(mk(OP_EQ, DST_A, SRC_R, SRC_DATA), 16'd5);
      rdreg(REG_COUNT, d); ck(int'(d) == n, $sformatf("template hits %0d expected %0d", d, n));
      rdreg(REG_MATCH, d); ck(d === {1'b1, 15'(first)}, "first template hit");
      act(0, N - 1, 1);
      mech[M_TEMPLATE]++;
    end

    // ---- local maxima (chain ends see zero) ----
    begin
      int n_loc, first, c0;
      n_loc = 0; first = -1;
      for (int k = 0; k < N; k++) begin
        int l, r;
        l = (k == 0) ? 0 : int'(mem[k-1]);
        r = (k == N - 1) ? 0 : int'(mem[k+1]);
        if (int'(mem[k]) > l && int'(mem[k]) > r) begin
          n_loc++;
          if (first < 0) first = k;
        end
      end
      c0 = bus_cycles;
      ex(mk(OP_MOV, DST_R, SRC_A, SRC_ZERO));
      ex(mk(OP_GT, DST_A, SRC_A, SRC_LEFT, CH_SET));
      ex(mk(OP_GT, DST_A, SRC_A, SRC_RIGHT, CH_AND));
      ck(bus_cycles - c0 == 3, "local maxima take 3 instructions");
      rdreg(REG_COUNT, d); ck(int'(d) == n_loc, $sformatf("local maxima %0d expected %0d", d, n_loc));
      rdreg(REG_MATCH, d); ck(d === {1'b1, 15'(first)}, "first local maximum");
      mech[M_LOCMAX]++;
    end

    // ---- global maximum and sum by sections (M = sqrt(N)) ----
    begin
      int mx, sm;
      mx = 0; sm = 0;
      for (int k = 0; k < N; k++) begin
        mx = (int'(mem[k]) > mx) ? int'(mem[k]) : mx;
        sm += int'(mem[k]);
      end
      sections(OP_MAX, COLS, got);
      ck(got == mx, $sformatf("global max %0d expected %0d", got, mx));
      mech[M_GMAX]++;
      load(0, N - 1);
      sections(OP_ADD, COLS, got);
      ck(got == sm, $sformatf("global sum %0d expected %0d", got, sm));
      mech[M_GSUM]++;
      load(0, N - 1);
      sections(OP_MAX, 4, got);   // another section length
      ck(got == mx, "global max with M=4");
    end

    // ---- 2-D sum by Mx x My sections: running sums along X, then along Y ----
    begin
      localparam int MX = 4, MY = 4;
      int sm, c0, tot;
      sm = 0;
      for (int k = 0; k < N; k++) sm += int'(mem[k]);
      load(0, N - 1);
      c0 = bus_cycles;
      act(0, N - 1, 1);
      ex(mk(OP_MOV, DST_R, SRC_ZERO, SRC_ZERO));
      for (int j = 0; j < MX; j++) ex(mk(OP_ADD, DST_R, SRC_LEFT, SRC_A));
      ex(mk(OP_MOV, DST_A, SRC_R, SRC_ZERO));
      ex(mk(OP_MOV, DST_R, SRC_ZERO, SRC_ZERO));
      for (int j = 0; j < MY; j++) ex(mk(OP_ADD, DST_R, SRC_DOWN, SRC_A));
      ex(mk(OP_MOV, DST_A, SRC_R, SRC_ZERO));
      tot = 0;
      for (int y = MY - 1; y < ROWS; y += MY)
        for (int x = MX - 1; x < COLS; x += MX) begin
          int e;
          rd(y * COLS + x, d);
          e = 0;
          for (int yy = y - MY + 1; yy <= y; yy++)
            for (int xx = x - MX + 1; xx <= x; xx++) e += int'(mem[yy * COLS + xx]);
          ck(int'(d) == e, $sformatf("2-D section (%0d,%0d) sum %0d expected %0d", x, y, d, e));
          tot += int'(d);
        end
      ck(tot == sm, $sformatf("2-D sum %0d expected %0d", tot, sm));
      ck(bus_cycles - c0 == 3 + 4 + MX + MY + N / (MX * MY),
         $sformatf("2-D sum: %0d bus cycles, expected %0d", bus_cycles - c0, 3 + 4 + MX + MY + N / (MX * MY)));
      mech[M_SUM2D]++;
      load(0, N - 1);
    end

    // ---- encryption by the neighbouring vector (1,1) and decryption ----
    begin
      logic [W-1:0] plain [N];
      int c0;
      for (int k = 0; k < N; k++) mem[k] = W'($urandom);
      plain = mem;
      load(0, N - 1);
      c0 = bus_cycles;
      act(0, N - 1, 1);
      ex(mk(OP_MOV, DST_R, SRC_A, SRC_ZERO));
      ex(mk(OP_ADD, DST_A, SRC_A, SRC_LEFT));        // y[i] = x[i] + x[i-1]
      ck(bus_cycles - c0 == 5, "encryption takes 5 bus cycles");
      for (int k = 0; k < N; k++) mem[k] = plain[k] + ((k > 0) ? plain[k-1] : '0);
      check_mem(0, N - 1, "encrypted");
      // undo it as a wave from the left: x[i] = y[i] - x[i-1], one PE at a time
      c0 = bus_cycles;
      setreg(REG_INCR, 0);                            // start address only
      for (int k = 0; k < N; k++) begin
        setreg(REG_START, k);
        ex(mk(OP_SUB, DST_R, SRC_A, SRC_LEFT));
      end
      act(0, N - 1, 1);
      ex(mk(OP_MOV, DST_A, SRC_R, SRC_ZERO));
      ck(bus_cycles - c0 == 2 * N + 5, $sformatf("decryption: %0d bus cycles, expected %0d",
                                                 bus_cycles - c0, 2 * N + 5));
      mem = plain;
      check_mem(0, N - 1, "decrypted");
      mech[M_CRYPT]++;
    end

    // ---- sorted insertion: loading values one by one yields a sorted list ----
    len = 0;
    for (int t = 0; t < 24; t++) begin
      logic [W-1:0] v;
      int p;
      v = W'($urandom_range(0, 99));
      p = len;
      if (len > 0) begin
        act(0, len - 1, 1);
        ex(mk(OP_GT, DST_A, SRC_A, SRC_DATA), v);
        rdreg(REG_MATCH, d);
        if (d[W-1]) p = int'(d[14:0]);
      end
      exp_i = 0;
      while (exp_i < len && mem[exp_i] <= v) exp_i++;
      ck(p == exp_i, $sformatf("insertion point %0d expected %0d", p, exp_i));
      insert_at(p, len, v);
      len++;
      mech[M_SORTINS]++;
    end
    check_mem(0, len - 1, "sorted insert");
    for (int k = 1; k < len; k++) ck(mem[k-1] <= mem[k], "model list sorted");

    // ---- sortedness check ----
    act(0, len - 1, 1);
    ex(mk(OP_MOV, DST_R, SRC_A, SRC_ZERO));
    act(1, len - 1, 1);
    ex(mk(OP_LT, DST_A, SRC_A, SRC_LEFT));
    rdreg(REG_COUNT, d); ck(d == 0, "sorted list reports no inversion");
    wr(3, 16'd500); mem[3] = 16'd500;
    act(0, len - 1, 1);
    ex(mk(OP_MOV, DST_R, SRC_A, SRC_ZERO));
    act(1, len - 1, 1);
    ex(mk(OP_LT, DST_A, SRC_A, SRC_LEFT));
    rdreg(REG_COUNT, d);
    begin
      int inv;
      inv = 0;
      for (int k = 1; k < len; k++) inv += int'(mem[k] < mem[k-1]);
      ck(int'(d) == inv && inv > 0, $sformatf("inversions %0d expected %0d", d, inv));
    end
    mech[M_SORTCHK]++;

    // ---- sorting by neighbour exchanges, stopping when the list is sorted ----
    begin
      localparam int LS = 32;
      int rounds, inv;
      logic [W-1:0] ref_l [$];
      for (int k = 0; k < LS; k++) begin
        mem[k] = W'($urandom_range(0, 999));
        ref_l.push_back(mem[k]);
      end
      ref_l.sort();
      load(0, LS - 1);
      rounds = 0;
      forever begin
        // sortedness check: S = (A < left) from the second element on
        act(0, LS - 1, 1);
        ex(mk(OP_MOV, DST_R, SRC_A, SRC_ZERO));
        setreg(REG_START, 1);
        ex(mk(OP_LT, DST_A, SRC_A, SRC_LEFT));
        rdreg(REG_COUNT, d);
        if (d == 0) break;
        // exchange pairs (p, p+1) for p = rounds%2, +2, ...: the left member
        // keeps the smaller, the right member the larger value
        setreg(REG_START, 0);
        ex(mk(OP_MOV, DST_R, SRC_A, SRC_ZERO));
        act(rounds % 2, LS - 2, 2);
        ex(mk(OP_MIN, DST_A, SRC_A, SRC_RIGHT));
        act(rounds % 2 + 1, LS - 1, 2);
        ex(mk(OP_MAX, DST_A, SRC_A, SRC_LEFT));
        rounds++;
        if (rounds > LS) break;
      end
      for (int k = 0; k < LS; k++) mem[k] = ref_l[k];
      check_mem(0, LS - 1, "sort");
      ck(rounds <= LS, $sformatf("sorted in %0d rounds, at most %0d", rounds, LS));
      $display("sort of %0d values took %0d exchange rounds", LS, rounds);
      mech[M_SORT]++;
    end

    // ---- (1,2,1) neighbouring vector ----
    for (int k = 0; k < N; k++) mem[k] = W'($urandom_range(0, 999));
    load(0, N - 1);
    act(0, N - 1, 1);
    begin
      logic [W-1:0] orig [N];
      orig = mem;
      ex(mk(OP_MOV, DST_R, SRC_A, SRC_ZERO));            // (1)
      ex(mk(OP_ADD, DST_R, SRC_A, SRC_LEFT));            // (1,1,0)
      ex(mk(OP_ADD, DST_R, SRC_R, SRC_RIGHT));           // (1,2,1)
      ex(mk(OP_MOV, DST_A, SRC_R, SRC_ZERO));
      for (int k = 1; k < N - 1; k++) mem[k] = orig[k-1] + 2 * orig[k] + orig[k+1];
      mem[0] = 2 * orig[0] + orig[1];                    // left of PE 0 reads zero
      mem[N-1] = orig[N-2] + orig[N-1];                  // right of PE N-1 reads zero
      check_mem(0, N - 1, "gauss121");
      mech[M_GAUSS]++;
    end

    // ---- (1,2,4,2,1) neighbouring vector: (1,2,1) in R, then 2A + R[i-1] + R[i+1] ----
    begin
      logic [W-1:0] orig [N], g [N];
      int c0;
      for (int k = 0; k < N; k++) orig[k] = W'($urandom_range(0, 999));
      mem = orig;
      load(0, N - 1);
      c0 = bus_cycles;
      ex(mk(OP_MOV, DST_R, SRC_A, SRC_ZERO));            // (1)
      ex(mk(OP_ADD, DST_R, SRC_A, SRC_LEFT));            // (1,1,0)
      ex(mk(OP_ADD, DST_R, SRC_R, SRC_RIGHT));           // (1,2,1)
      ex(mk(OP_ADD, DST_A, SRC_A, SRC_A));               // (2)
      ex(mk(OP_ADD, DST_A, SRC_A, SRC_LEFT));            // (1,2,2,0,0)
      ex(mk(OP_ADD, DST_A, SRC_A, SRC_RIGHT));           // (1,2,4,2,1)
      ck(bus_cycles - c0 == 6, "gauss12421 takes 6 instructions");
      for (int k = 2; k < N - 2; k++)
        mem[k] = orig[k-2] + 2 * orig[k-1] + 4 * orig[k] + 2 * orig[k+1] + orig[k+2];
      // near the ends the chain reads zero; the (1,2,1) step then sees
      // PE N-1 without its right neighbour's (1,1,0)
      for (int k = 0; k < N; k++)
        g[k] = ((k > 0) ? orig[k-1] : '0) + orig[k] + ((k < N - 1) ? orig[k] + orig[k+1] : '0);
      for (int k = 0; k < N; k++)
        if (k < 2 || k >= N - 2)
          mem[k] = 2 * orig[k] + ((k > 0) ? g[k-1] : '0) + ((k < N - 1) ? g[k+1] : '0);
      check_mem(0, N - 1, "gauss12421");
      mech[M_GAUSS5]++;
    end

    // ---- 2-D neighbouring tensor (1,2,1) x (1,2,1): the 1-D filter along X,
    //      then along Y; pixels off the image border are checked ----
    begin
      logic [W-1:0] orig [N];
      logic [W-1:0] d;
      int c0, e;
      for (int k = 0; k < N; k++) orig[k] = W'($urandom_range(0, 999));
      mem = orig;
      load(0, N - 1);
      c0 = bus_cycles;
      ex(mk(OP_MOV, DST_R, SRC_A, SRC_ZERO));
      ex(mk(OP_ADD, DST_R, SRC_A, SRC_LEFT));
      ex(mk(OP_ADD, DST_R, SRC_R, SRC_RIGHT));
      ex(mk(OP_MOV, DST_A, SRC_R, SRC_ZERO));
      ex(mk(OP_ADD, DST_R, SRC_A, SRC_DOWN));
      ex(mk(OP_ADD, DST_R, SRC_R, SRC_UP));
      ex(mk(OP_MOV, DST_A, SRC_R, SRC_ZERO));
      ck(bus_cycles - c0 == 7, "2-D (1,2,1) filter takes 7 instructions");
      for (int y = 1; y < ROWS - 1; y++)
        for (int x = 1; x < COLS - 1; x++) begin
          e = 0;
          for (int dy = -1; dy <= 1; dy++)
            for (int dx = -1; dx <= 1; dx++)
              e += (2 - ((dx < 0) ? -dx : dx)) * (2 - ((dy < 0) ? -dy : dy))
                   * int'(orig[(y + dy) * COLS + x + dx]);
          rd(y * COLS + x, d);
          ck(int'(d) == e, $sformatf("gauss2d (%0d,%0d): %0d expected %0d", x, y, d, e));
        end
      mech[M_GAUSS2D]++;
      load(0, N - 1);
    end

    // ---- 32-bit addition: records of two words, low word first ----
    begin
      logic [31:0] addend, x;
      addend = 32'h0001_FFF7;
      for (int k = 0; k < N; k += 2) begin
        x = {$urandom_range(0, 65535), 16'(k * 977)} ;
        if (k % 8 == 0) x[15:0] = 16'hFFF0;     // forces carries
        mem[k] = x[15:0]; mem[k+1] = x[31:16];
      end
      load(0, N - 1);
      act(0, N - 1, 1);
      ex(mk(OP_LT, DST_A, SRC_ZERO, SRC_ZERO));           // S <= 0 everywhere
      act(0, N - 1, 2);
      ex(mk(OP_ADD, DST_A, SRC_A, SRC_DATA, CH_SET, 1'b0, 1'b1), addend[15:0]);
      setreg(REG_START, 1);
      ex(mk(OP_ADD, DST_A, SRC_A, SRC_DATA, CH_SET, 1'b0, 1'b1), addend[31:16]);
      for (int k = 0; k < N; k += 2) begin
        x = {mem[k+1], mem[k]} + addend;
        mem[k] = x[15:0]; mem[k+1] = x[31:16];
      end
      check_mem(0, N - 1, "carry add");
      mech[M_CARRY]++;
    end

    // ---- 2-D images ----
    begin
      logic [W-1:0] img [N];
      int dlt [N];
      int exp_v [N];
      localparam int L = 2;
      for (int k = 0; k < N; k++) img[k] = W'($urandom_range(0, 255));
      // a horizontal step edge between rows 3 and 4
      for (int x = 0; x < COLS; x++) begin
        img[3*COLS + x] = 16'd20;
        img[4*COLS + x] = 16'd220;
      end

      // edge line along X: D = top - bottom, then sum D over the pixel and
      // its L left neighbours (a messenger walking right)
      mem = img; load(0, N - 1);
      act(0, N - 1, 1);
      ex(mk(OP_MOV, DST_R, SRC_A, SRC_ZERO));
      ex(mk(OP_SUB, DST_A, SRC_UP, SRC_DOWN));
      ex(mk(OP_MOV, DST_R, SRC_ZERO, SRC_ZERO));
      for (int k = 0; k <= L; k++) ex(mk(OP_ADD, DST_R, SRC_LEFT, SRC_A));
      ex(mk(OP_MOV, DST_A, SRC_R, SRC_ZERO));
      for (int k = 0; k < N; k++)
        dlt[k] = ((k + COLS < N) ? int'(img[k+COLS]) : 0) - ((k >= COLS) ? int'(img[k-COLS]) : 0);
      for (int k = 0; k < N; k++) begin
        exp_v[k] = 0;
        for (int j = 0; j <= L; j++) if (k - j >= 0) exp_v[k] += dlt[k-j];
      end
      for (int k = 0; k < N; k++) begin
        rd(k, d);
        ck(sx(d) == exp_v[k], $sformatf("edge_x pixel %0d: %0d expected %0d", k, sx(d), exp_v[k]));
      end
      // magnitude: |value| says how likely an edge is
      ex(mk(OP_ABS, DST_A, SRC_A, SRC_ZERO));
      for (int k = 0; k < N; k += 5) begin
        rd(k, d);
        ck(int'(d) == ((exp_v[k] < 0) ? -exp_v[k] : exp_v[k]), "edge_x magnitude");
      end
      mech[M_EDGEX]++;

      // slope 3/4 messenger over a 4 x 3 area: walk from corner (4,3) to the
      // origin pixel, adding pixels 1,3,5 and subtracting 2,4,6
      mem = img; load(0, N - 1);
      act(0, N - 1, 1);
      begin
        int c0;
        c0 = bus_cycles;
        ex(mk(OP_MOV, DST_R, SRC_ZERO, SRC_ZERO));       // messenger at 7
        ex(mk(OP_SUB, DST_R, SRC_RIGHT, SRC_A));         // 6: -x step, subtract
        ex(mk(OP_ADD, DST_R, SRC_UP, SRC_A));            // 5: -y step, add
        ex(mk(OP_SUB, DST_R, SRC_RIGHT, SRC_A));         // 4
        ex(mk(OP_ADD, DST_R, SRC_UP, SRC_A));            // 3
        ex(mk(OP_SUB, DST_R, SRC_RIGHT, SRC_A));         // 2
        ex(mk(OP_ADD, DST_R, SRC_UP, SRC_A));            // 1
        ex(mk(OP_MOV, DST_R, SRC_RIGHT, SRC_ZERO));      // 0
        ck(bus_cycles - c0 == 8, "messenger: Mx+My steps plus start");
      end
      ex(mk(OP_MOV, DST_A, SRC_R, SRC_ZERO));
      for (int y = 0; y + 3 < ROWS; y++) begin
        for (int x = 0; x + 4 < COLS; x++) begin
          int e;
          e =   int'(img[(y+0)*COLS + x+1]) - int'(img[(y+1)*COLS + x+1])
              + int'(img[(y+1)*COLS + x+2]) - int'(img[(y+2)*COLS + x+2])
              + int'(img[(y+2)*COLS + x+3]) - int'(img[(y+3)*COLS + x+3]);
          rd(y * COLS + x, d);
          ck(sx(d) == e, $sformatf("messenger (%0d,%0d): %0d expected %0d", x, y, sx(d), e));
        end
      end
      mech[M_MESSENGER]++;

      // a set of lines for an angular resolution of about 2/D, D = 5: far
      // corners near a circle of radius 5, in the first quadrant and mirrored
      // into the second; the generic walk must reproduce the 4 x 3 one above
      mem = img; load(0, N - 1);
      begin
        int cx [6] = '{5, 5, 4, 3, 2, 1};
        int cy [6] = '{1, 2, 3, 4, 5, 5};
        string st;
        // clear the marks (context 1)
        setreg(REG_CTX, 1);
        ex(mk(OP_MOV, DST_A, SRC_ZERO, SRC_ZERO));
        setreg(REG_CTX, 0);
        for (int i = 0; i < N; i++) best_m[i] = '0;
        for (int k = 0; k < 6; k++) begin
          line_walk(cx[k], cy[k], 2 * k, st);
          if (cx[k] == 4 && cy[k] == 3) ck(st == "XYXYXYX", {"4 x 3 walk is ", st});
          line_walk(-cx[k], cy[k], 2 * k + 1, st);
        end
        // every pixel now carries its best value and the area it came from
        setreg(REG_CTX, 1);
        for (int i = 0; i < N; i++) begin
          rd(i, d);
          ck(d == best_m[i], $sformatf("mark of pixel %0d: %0h expected %0h", i, d, best_m[i]));
        end
        setreg(REG_CTX, 0);
        begin
          bit [15:0] won;
          won = '0;
          for (int i = 0; i < N; i++) won[best_m[i][3:0]] = 1'b1;
          ck($countones(won) >= 4, $sformatf("only %0d areas win a pixel", $countones(won)));
        end
        mech[M_LINEMARK]++;
      end
    end

    // ---- context switch: a second job's data in the other addressable register ----
    begin
      logic [W-1:0] job0 [N];
      load(0, N - 1);                  // context 0: the image
      job0 = mem;
      setreg(REG_CTX, 1);
      for (int k = 0; k < N; k++) mem[k] = W'(k * 11);
      load(0, N - 1);
      act(0, N - 1, 1);
      ex(mk(OP_ADD, DST_A, SRC_A, SRC_DATA), 16'd3);
      for (int k = 0; k < N; k++) mem[k] = mem[k] + 16'd3;
      check_mem(0, N - 1, "context 1");
      setreg(REG_CTX, 0);
      mem = job0;
      check_mem(0, N - 1, "context 0 kept");
      rdreg(REG_CTX, d); ck(d == 0, "context register");
      mech[M_CTX]++;
    end

    for (int m = 0; m < M_NUM; m++) begin
      $display("mechanism %-14s happened %0d times", mech_name[m], mech[m]);
      ck(mech[m] > 0, $sformatf("mechanism %s never happened", mech_name[m]));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
