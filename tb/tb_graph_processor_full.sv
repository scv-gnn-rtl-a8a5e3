// tb_graph_processor_full: the end-to-end test of tb_graph_processor run on the
// graph processor at its default sizes (8 engines of 64 PEs, queue depth 16,
// SCV vector height 512, 64/64/256 kB memories).
//
// 1. Aggregation: a random sparse adjacency matrix of NODES x NODES is cut into
//    SCV column vectors of height VECH, the tiles (VECH x VECH) are visited in
//    Z-Morton order, and the stream of vector headers and non-zeros is fed in.
//    Z and an initial PS are loaded through the host port; afterwards PS is read
//    back and compared with PS0 + A*Z computed here in stream order.
// 2. Combination: Zc = H * W for a sparse H of NVPE rows (output stationary,
//    rows pinned to engines).
// 3. Raw vector commands: a chain of vector adds onto one address, and a
//    memory-mode sequence LOAD / MUL-with-M / UNLOAD.
// Values are small dyadic numbers, so every sum and product is exact and the
// reference does not depend on rounding. Each mechanism counter of the design
// (bank-conflict stall, MAC conversion, FWD_1, FWD_2, cross-queue redirect,
// arbiter wait) must have fired at least once.
module tb_graph_processor_full;
  import scv_pkg::*;
  import fp_ref_pkg::*;

  localparam int NPE_T   = N_PE;
  localparam int NVPE_T  = N_VPE;
  localparam int VECH_T  = VEC_H;
  localparam int DQ      = QDEPTH;
  localparam int CR_T    = C_WORDS / N_PE;
  localparam int NODES   = 256;     // graph size (all Z rows fit in B)
  localparam int DENS    = 3;       // percent of non-zeros
  localparam int W       = NPE_T * 32;
  localparam int RW      = $clog2(CR_T);

  logic clk = 0, clk_a = 0, rst_n = 0, rst_a_n = 0;
  logic [ADDR_W-1:0] a_base = 0, b_base_row = 0, c_base_row = 0;
  logic s_valid = 0, s_ready;
  stream_el_t s_el;
  logic [1:0] h_sel = 0;
  logic h_re = 0, h_we = 0;
  logic [RW-1:0] h_row = 0;
  logic [W-1:0] h_wdata = 0, h_rdata;
  logic busy, a_busy;
  logic [8:0][31:0] counters;

  graph_processor dut (.*);

  always #5 clk = ~clk;
  always #1 clk_a = ~clk_a;

  int checks = 0, failures = 0;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // ---------------- helpers ----------------
  function automatic logic [31:0] dy();   // k/4, k in -8..8, k != 0
    int k;
    k = $urandom_range(1, 8);
    return d2s((($urandom % 2) ? -1.0 : 1.0) * real'(k) / 4.0);
  endfunction

  task automatic host_write(input logic [1:0] sel, input int row, input logic [W-1:0] d);
    @(negedge clk); h_sel = sel; h_we = 1; h_row = RW'(row); h_wdata = d;
    @(negedge clk); h_we = 0;
  endtask
  task automatic host_read(input logic [1:0] sel, input int row, output logic [W-1:0] d);
    @(negedge clk); h_sel = sel; h_re = 1; h_row = RW'(row);
    @(negedge clk); h_re = 0; d = h_rdata;
  endtask
  task automatic send(input stream_el_t el);
    @(negedge clk_a); s_el = el; s_valid = 1;
    do @(posedge clk_a); while (!s_ready);
    #0; @(negedge clk_a); s_valid = 0;
  endtask
  task automatic drain();
    int quiet;
    quiet = 0;
    while (quiet < 20) begin
      @(posedge clk);
      if (busy || a_busy || s_valid) quiet = 0; else quiet++;
    end
  endtask
  function automatic int morton_x(int z); // de-interleave even bits
    int r = 0;
    for (int i = 0; i < 16; i++) r |= ((z >> (2*i)) & 1) << i;
    return r;
  endfunction

  // ---------------- test data ----------------
  logic [31:0] adj [NODES][NODES];
  logic [31:0] zf  [NODES][NPE_T];
  logic [31:0] ps0 [NODES][NPE_T];
  logic [31:0] ps  [NODES][NPE_T];
  logic [31:0] vals[$];
  stream_el_t  strm[$];

  task automatic compare_row(input logic [1:0] sel, input int r, input logic [31:0] exp_v [NPE_T], input string what);
    logic [W-1:0] got;
    host_read(sel, r, got);
    for (int f = 0; f < NPE_T; f++) begin
      checks++;
      if (got[f*32 +: 32] !== exp_v[f]) begin
        failures++;
        if (failures < 12) $display("FAIL %s row %0d lane %0d: got %h expected %h", what, r, f, got[f*32 +: 32], exp_v[f]);
      end
    end
  endtask

  initial begin
    logic [W-1:0] row;
    logic [31:0]  ev [NPE_T];
    int nt, tr, tc, nv, t0, t1;
    stream_el_t el;
    s_el = '0;
    repeat (3) @(posedge clk);
    rst_n = 1; rst_a_n = 1;

    // ===== 1. aggregation =====
    for (int i = 0; i < NODES; i++) for (int j = 0; j < NODES; j++)
      adj[i][j] = ($urandom_range(0, 99) < DENS) ? dy() : 32'd0;
    for (int i = 0; i < NODES; i++) for (int f = 0; f < NPE_T; f++) begin
      zf[i][f] = dy(); ps0[i][f] = dy(); ps[i][f] = ps0[i][f];
    end
    nt = (NODES + VECH_T - 1) / VECH_T;
    // SCV-Z: tiles in Z-Morton order, the columns of a tile left to right
    for (int z = 0; z < 64 * 64; z++) begin
      tc = morton_x(z); tr = morton_x(z >> 1);
      if (tr >= nt || tc >= nt) continue;
      for (int j = tc * VECH_T; j < (tc + 1) * VECH_T && j < NODES; j++) begin
        nv = 0;
        for (int k = 0; k < VECH_T; k++) if (tr * VECH_T + k < NODES && adj[tr*VECH_T+k][j] != 0) nv++;
        if (nv == 0) continue;
        el = '0; el.kind = EL_AGG_HDR; el.f0 = tr; el.f1 = j; el.f2 = vals.size();
        strm.push_back(el);
        for (int k = 0; k < VECH_T; k++) if (tr * VECH_T + k < NODES && adj[tr*VECH_T+k][j] != 0) begin
          el = '0; el.kind = EL_AGG_NZ; el.f0 = k;
          strm.push_back(el);
          vals.push_back(adj[tr*VECH_T+k][j]);
          for (int f = 0; f < NPE_T; f++)
            ps[tr*VECH_T+k][f] = fadd(fmul(adj[tr*VECH_T+k][j], zf[j][f]), ps[tr*VECH_T+k][f]);
        end
      end
    end
    for (int r = 0; r * NPE_T < vals.size(); r++) begin
      row = '0;
      for (int l = 0; l < NPE_T; l++) if (r * NPE_T + l < vals.size()) row[l*32 +: 32] = vals[r*NPE_T+l];
      host_write(2'd0, r, row);
    end
    for (int i = 0; i < NODES; i++) begin
      for (int f = 0; f < NPE_T; f++) row[f*32 +: 32] = zf[i][f];
      host_write(2'd1, i, row);
      for (int f = 0; f < NPE_T; f++) row[f*32 +: 32] = ps0[i][f];
      host_write(2'd2, i, row);
    end
    $display("aggregation: %0d stream elements, %0d non-zeros", strm.size(), vals.size());
    t0 = $time;
    foreach (strm[k]) send(strm[k]);
    drain();
    t1 = $time;
    $display("aggregation took %0d engine cycles (%0d non-zeros on %0d engines)", (t1 - t0) / 10, vals.size(), NVPE_T);
    for (int i = 0; i < NODES; i++) begin
      for (int f = 0; f < NPE_T; f++) ev[f] = ps[i][f];
      compare_row(2'd2, i, ev, "aggregation PS");
    end

    // ===== 2. combination: Zc[i] = sum_k H(i,k) * W[k], rows pinned =====
    begin
      localparam int K = 12;
      logic [31:0] h [NVPE_T][K];
      logic [31:0] wm [K][NPE_T];
      logic [31:0] zc [NVPE_T][NPE_T];
      int nh;
      nh = 0;
      for (int k = 0; k < K; k++) begin
        for (int f = 0; f < NPE_T; f++) wm[k][f] = dy();
        for (int f = 0; f < NPE_T; f++) row[f*32 +: 32] = wm[k][f];
        host_write(2'd1, k, row);      // W rows replace Z rows 0..K-1
      end
      for (int i = 0; i < NVPE_T; i++) begin
        for (int f = 0; f < NPE_T; f++) zc[i][f] = 32'd0;
        host_write(2'd2, 100 + i, '0); // output block at C rows 100..
      end
      // H values packed into A from word 512
      row = '0;
      for (int k = 0; k < K; k++) for (int i = 0; i < NVPE_T; i++)
        h[i][k] = ($urandom_range(0, 99) < 60) ? dy() : 32'd0;
      for (int k = 0; k < K; k++) begin
        for (int i = 0; i < NVPE_T; i++) row[i*32 +: 32] = h[i][k];
        host_write(2'd0, 512 / NPE_T + k, row);
      end
      c_base_row = 100;
      // walk the columns of H; zero entries are skipped
      for (int k = 0; k < K; k++) for (int i = 0; i < NVPE_T; i++) if (h[i][k] != 0) begin
        el = '0; el.kind = EL_CMB_NZ; el.f0 = i; el.f1 = k; el.f2 = 512 + k * NPE_T + i;
        send(el); nh++;
        for (int f = 0; f < NPE_T; f++) zc[i][f] = fadd(fmul(h[i][k], wm[k][f]), zc[i][f]);
      end
      drain();
      c_base_row = 0;
      for (int i = 0; i < NVPE_T; i++) begin
        for (int f = 0; f < NPE_T; f++) ev[f] = zc[i][f];
        compare_row(2'd2, 100 + i, ev, "combination");
      end
      $display("combination: %0d non-zeros of H", nh);
    end

    // ===== 3. raw vector commands =====
    begin
      logic [31:0] x [NPE_T], s0, m0;
      // C row 120 = x; three times C[120] += A scalar s0 (chain -> FWD_1)
      for (int f = 0; f < NPE_T; f++) begin x[f] = dy(); row[f*32 +: 32] = x[f]; end
      host_write(2'd2, 120, row);
      s0 = dy(); m0 = dy();
      row = '0; row[32 +: 32] = s0; row[0 +: 32] = m0;
      host_write(2'd0, 40, row);       // A words 40*NPE_T (m0), +1 (s0)
      for (int n = 0; n < 3; n++) begin
        el = '0; el.kind = EL_RAW;
        el.f0 = {8'd1, 15'd0, 1'b1, 1'b0, 4'({1'b0, OP_ADD}), 3'b001};
        el.f1 = 40 * NPE_T + 1; el.f3 = 120 * NPE_T;
        send(el);
        for (int f = 0; f < NPE_T; f++) x[f] = fadd(s0, x[f]);
      end
      // memory mode on engine 2: LOAD M = B row 3; C[121] = s0 * M; C[122] = UNLOAD
      el = '0; el.kind = EL_RAW; el.f0 = {8'd2, 15'd0, 1'b1, 1'b0, 4'({1'b0, OP_LOAD}), 3'b010};
      el.f2 = 3 * NPE_T; el.f3 = 123 * NPE_T; send(el);
      el.f0 = {8'd2, 15'd0, 1'b1, 1'b0, 4'({1'b1, OP_MUL}), 3'b001};
      el.f1 = 40 * NPE_T + 1; el.f3 = 121 * NPE_T; send(el);
      el.f0 = {8'd2, 15'd0, 1'b1, 1'b0, 4'({1'b0, OP_UNLOAD}), 3'b001};
      el.f3 = 122 * NPE_T; send(el);
      drain();
      compare_row(2'd2, 120, x, "vector add chain");
      for (int f = 0; f < NPE_T; f++) ev[f] = fmul(s0, d2s(0.0) == 0 ? 32'd0 : 32'd0);
      // B row 3 currently holds W row 3
      begin
        logic [W-1:0] brow;
        host_read(2'd1, 3, brow);
        for (int f = 0; f < NPE_T; f++) ev[f] = fmul(s0, brow[f*32 +: 32]);
        compare_row(2'd2, 121, ev, "memory-mode multiply");
        for (int f = 0; f < NPE_T; f++) ev[f] = brow[f*32 +: 32];
        compare_row(2'd2, 122, ev, "unload");
      end
    end

    // ===== 4. burst of vector adds on rows of one C bank (bank conflicts) =====
    begin
      logic [31:0] y [8][NPE_T], s1;
      logic [31:0] yv [NPE_T];
      s1 = dy();
      row = '0; row[0 +: 32] = s1;
      host_write(2'd0, 41, row);
      for (int n = 0; n < 8; n++) begin
        for (int f = 0; f < NPE_T; f++) begin y[n][f] = dy(); row[f*32 +: 32] = y[n][f]; end
        host_write(2'd2, 64 + 2 * n, row);
      end
      for (int n = 0; n < 8; n++) begin
        el = '0; el.kind = EL_RAW;
        el.f0 = {8'(n % NVPE_T), 15'd0, 1'b1, 1'b0, 4'({1'b0, OP_ADD}), 3'b001};
        el.f1 = 41 * NPE_T; el.f3 = (64 + 2 * n) * NPE_T;
        send(el);
      end
      drain();
      for (int n = 0; n < 8; n++) begin
        for (int f = 0; f < NPE_T; f++) yv[f] = fadd(s1, y[n][f]);
        compare_row(2'd2, 64 + 2 * n, yv, "burst add");
      end
    end

    // ===== 5. more entries pinned to one engine than its queue holds (arbiter waits) =====
    begin
      localparam int NB5 = 2 * DQ + 4;
      logic [31:0] y [NB5][NPE_T], s1;
      logic [31:0] yv [NPE_T];
      s1 = dy();
      row = '0; row[0 +: 32] = s1;
      host_write(2'd0, 42, row);
      for (int n = 0; n < NB5; n++) begin
        for (int f = 0; f < NPE_T; f++) begin y[n][f] = dy(); row[f*32 +: 32] = y[n][f]; end
        host_write(2'd2, CR_T / 2 + n, row);
      end
      for (int n = 0; n < NB5; n++) begin
        el = '0; el.kind = EL_RAW;
        el.f0 = {8'd0, 15'd0, 1'b1, 1'b0, 4'({1'b0, OP_SUB}), 3'b001};
        el.f1 = 42 * NPE_T; el.f3 = (CR_T / 2 + n) * NPE_T;
        send(el);
      end
      drain();
      for (int n = 0; n < NB5; n++) begin
        for (int f = 0; f < NPE_T; f++) yv[f] = fadd(s1, fneg(y[n][f]));
        compare_row(2'd2, CR_T / 2 + n, yv, "pinned subtract burst");
      end
    end

    // ===== mechanisms =====
    begin
      string names [9] = '{"issued", "bank-conflict stalls", "MACs executed", "FWD_2 executed",
                           "MAC conversions", "FWD_1 marks", "FWD_2 marks", "cross-queue redirects",
                           "arbiter waits"};
      for (int k = 0; k < 9; k++) begin
        $display("%-22s %0d", names[k], counters[k]);
        checks++;
        if (counters[k] == 0) begin failures++; $display("FAIL mechanism never happened: %s", names[k]); end
      end
      checks++;
      if (counters[2] != counters[4]) begin failures++; $display("FAIL MACs executed != converted"); end
      checks++;
      if (counters[3] != counters[6]) begin failures++; $display("FAIL FWD_2 executed != marked"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
