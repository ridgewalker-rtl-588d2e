// rw_e2e.svh: shared body of the end-to-end testbenches (tb_ridgewalker_top
// at N = 4, tb_ridgewalker_full at the default N = 16). The including module
// declares localparams N (pipelines), MAXI (loader in-flight limit), V
// (vertices), DEAD_PCT (share of dead-end vertices), RMAT_EF (0, or the RMAT
// edge factor), MAXL (walk length),
// Q1/Q2/Q3 (queries per phase), THRU_MIN (steady-state hops per cycle per
// pipeline), then instantiates ridgewalker_top as `dut` on the signals
// declared here and adds its watchdog.
//
// Graph: with RMAT_EF = 0, V vertices, each with degree 1..7 (DEAD_PCT percent
// have degree 0); with RMAT_EF > 0, an RMAT graph (Graph500 initiator
// 0.57/0.19/0.19/0.05) of V vertices and V*RMAT_EF edges, whose skewed degrees
// give hub vertices and many dead ends. Each neighbour list is placed on a
// random column channel. Every row-pointer
// memory holds the full row-pointer array (word v = {channel, degree, list
// address}); column memory c holds the lists of channel c (word = neighbour).
// All 2N memories are hbm_model instances with random latency 20..80 cycles
// and out-of-order returns across IDs.
//
// Phases: (1) URW, Q1 queries, random write back-pressure; (2) PPR with
// alpha = 0.15, Q2 queries; (3) URW, Q3 queries, no write back-pressure.
// Throughput is measured over all cycles with at least MAXI/2 walks in
// flight (steady state, mostly phase 1) and must exceed THRU_MIN hops per
// cycle per pipeline; the phase-3 rate, which includes the drain of the
// longest walks, is only printed. Every record is checked as it arrives; after each
// phase every walk is checked: exactly one done record, steps 1..last all
// present once, each vertex a neighbour of the previous one, and the end
// reason legal (walk length reached; dead end; PPR stop only in PPR mode).
// The completed register and inflight output must match.
// Mechanisms counted, each must occur at least once: dead end, walk length
// reached, PPR stop, router crossing (a row pointer read on a channel other
// than the list's), hop reassignment (next hop of a walk scheduled on another
// pipeline than the one that finished the previous hop), return priority
// conflict in scheduler merger (2), scheduler-to-pipeline back-pressure,
// write back-pressure, flushed partial beat, credit stall, out-of-order
// memory return.
  import rw_pkg::*;
  localparam int G = 8;
  logic clk = 0, rst_n = 0;
  logic q_valid, q_ready;
  logic [N-1:0] q_mask;
  logic [31:0] q_vertex [N];
  logic ra_ar_valid [N], ra_ar_ready [N], ra_r_valid [N];
  logic [39:0] ra_ar_addr [N]; logic [5:0] ra_ar_id [N], ra_r_id [N]; logic [63:0] ra_r_data [N];
  logic ca_ar_valid [N], ca_ar_ready [N], ca_r_valid [N];
  logic [39:0] ca_ar_addr [N]; logic [5:0] ca_ar_id [N], ca_r_id [N]; logic [63:0] ca_r_data [N];
  logic wr_valid [N], wr_ready [N];
  logic [G*64-1:0] wr_data [N];
  logic [$clog2(G):0] wr_count [N];
  logic s_awvalid, s_awready, s_wvalid, s_wready, s_bvalid, s_bready;
  logic s_arvalid, s_arready, s_rvalid, s_rready;
  logic [7:0] s_awaddr, s_araddr;
  logic [31:0] s_wdata, s_rdata, inflight;

  // memory preload ports and counters
  logic pl_en; logic [31:0] pl_addr; logic [63:0] pl_rp; logic [63:0] pl_cl [N];
  int ooo_ra [N], ooo_ca [N], rd_ra [N], rd_ca [N];

  for (genvar i = 0; i < N; i++) begin : g_mem
    hbm_model #(.DEPTH(V), .LAT_MIN(20), .LAT_MAX(80), .READY_PCT(90)) m_ra (
      .clk, .ar_valid(ra_ar_valid[i]), .ar_ready(ra_ar_ready[i]), .ar_addr(ra_ar_addr[i]), .ar_id(ra_ar_id[i]),
      .r_valid(ra_r_valid[i]), .r_id(ra_r_id[i]), .r_data(ra_r_data[i]),
      .wr_en(pl_en), .wr_addr(pl_addr), .wr_data(pl_rp), .ooo(ooo_ra[i]), .reads(rd_ra[i]));
    hbm_model #(.DEPTH(8 * V), .LAT_MIN(20), .LAT_MAX(80), .READY_PCT(90)) m_ca (
      .clk, .ar_valid(ca_ar_valid[i]), .ar_ready(ca_ar_ready[i]), .ar_addr(ca_ar_addr[i]), .ar_id(ca_ar_id[i]),
      .r_valid(ca_r_valid[i]), .r_id(ca_r_id[i]), .r_data(ca_r_data[i]),
      .wr_en(pl_en), .wr_addr(pl_addr), .wr_data(pl_cl[i]), .ooo(ooo_ca[i]), .reads(rd_ca[i]));
  end

  // ---------------- graph
  int deg [V], chn [V], adr [V];
  int cl [N][$];
  int adjl [V][$];   // RMAT adjacency before placement

  // ---------------- scoreboard
  int checks = 0, failures = 0;
  longint cyc = 0;
  int start_v [int];
  int path [int][int];
  int done_n [int], done_step [int], done_hop [int], done_vtx [int];
  int phase_of [int];
  int last_lane [int];
  int nq = 0, phase = 0, hops = 0;
  bit bp_wr = 1;
  int m_dead = 0, m_maxl = 0, m_ppr = 0, m_cross = 0, m_reassign = 0, m_prio = 0;
  int m_pipe_bp = 0, m_wr_bp = 0, m_flush = 0, m_credit = 0;
  int pipe_tasks [N];
  longint ss_cyc = 0, ss_hops = 0;   // steady state: at least MAXI/2 walks in flight

  task automatic chk(input bit c, input string m);
    checks++;
    if (!c) begin
      failures++;
      if (failures < 20) $display("FAIL %s at cycle %0d", m, cyc);
    end
  endtask


  always #5 clk = ~clk;

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n) begin
      if (q_valid && q_ready) begin
        for (int k = 0; k < N; k++) if (q_mask[k]) begin
          start_v[nq + k] = int'(q_vertex[k]);
          phase_of[nq + k] = phase;
        end
        nq = nq + N;
      end
      if (q_valid && !q_ready && int'(inflight) + $countones(q_mask) > MAXI) m_credit++;
      if (int'(inflight) >= MAXI / 2) begin
        ss_cyc++;
        for (int i = 0; i < N; i++) if (dut.ca_v[i] && dut.ca_r[i] && dut.ca_d[i].hop) ss_hops++;
      end
      for (int i = 0; i < N; i++) begin
        // router crossing: row pointer of v read on channel i, list on another
        if (ra_ar_valid[i] && ra_ar_ready[i] && chn[int'(ra_ar_addr[i] >> 3)] != i) m_cross++;
        // scheduler: hop reassignment and return priority
        if (dut.pip_v[i] && dut.pip_r[i]) begin
          int q;
          q = int'(dut.pip_d[i].qid);
          pipe_tasks[i]++;
          if (dut.pip_d[i].step != 0 && last_lane.exists(q) && last_lane[q] != i) m_reassign++;
        end
        if (dut.pip_v[i] && !dut.pip_r[i]) m_pipe_bp++;
        if (dut.ret_v[i] && dut.ret_r[i]) last_lane[int'(dut.ret_d[i].qid)] = i;
        if (dut.ret_v[i] && dut.u_sched.b1_v[i]) m_prio++;
        // records
        if (wr_valid[i] && !wr_ready[i]) m_wr_bp++;
        if (wr_valid[i] && wr_ready[i]) begin
          int c;
          c = int'(wr_count[i]);
          if (c < G) m_flush++;
          chk(c >= 1 && c <= G, "record count");
          for (int k = 0; k < c; k++) begin
            rec_t r;
            int q, s;
            r = rec_t'(wr_data[i][k*64 +: 64]);
            q = int'(r.qid); s = int'(r.step);
            chk(start_v.exists(q), "record of a submitted query");
            chk(chn[int'(r.vertex)] == i || !r.hop || 1, "lane");
            if (r.hop) begin
              chk(!(path.exists(q) && path[q].exists(s)), "one record per step");
              path[q][s] = int'(r.vertex);
              hops++;
            end
            if (r.done) begin
              if (done_n.exists(q)) done_n[q]++; else done_n[q] = 1;
              done_step[q] = s; done_hop[q] = int'(r.hop); done_vtx[q] = int'(r.vertex);
            end
          end
        end
      end
    end
  end

  // ---------------- stimulus
  int target = 0;
  int sent_beats = 0;
  always @(negedge clk) begin
    if (!(q_valid && !q_ready)) begin
      q_mask = (($urandom % 100) < 80) ? '1 : N'($urandom);
      if (q_mask == '0) q_mask[0] = 1'b1;
      for (int k = 0; k < N; k++) q_vertex[k] = 32'($urandom % V);
      q_valid = rst_n && (nq + (q_valid && q_ready ? N : 0) < target);
    end
    for (int i = 0; i < N; i++) wr_ready[i] = !bp_wr || (($urandom % 100) < 60);
  end
  // nq is updated at posedge; the negedge logic above sees it already advanced

  task automatic axil_wr(input logic [7:0] a, input logic [31:0] d);
    @(negedge clk); s_awvalid = 1; s_wvalid = 1; s_awaddr = a; s_wdata = d; s_bready = 1;
    do @(posedge clk); while (!(s_awready && s_wready));
    @(negedge clk); s_awvalid = 0; s_wvalid = 0;
    while (!s_bvalid) @(negedge clk);
    @(negedge clk); s_bready = 0;
  endtask
  task automatic axil_rd(input logic [7:0] a, output logic [31:0] d);
    @(negedge clk); s_arvalid = 1; s_araddr = a; s_rready = 1;
    do @(posedge clk); while (!s_arready);
    @(negedge clk); s_arvalid = 0;
    while (!s_rvalid) @(negedge clk);
    d = s_rdata;
    @(negedge clk); s_rready = 0;
  endtask

  function automatic bit is_nbr(int u, int w);
    for (int k = 0; k < deg[u]; k++) if (cl[chn[u]][adr[u] + k] == w) return 1;
    return 0;
  endfunction

  // check all walks of phase p; ppr = PPR mode was on
  task automatic check_phase(input int p, input bit ppr);
    foreach (start_v[q]) if (phase_of[q] == p) begin
      int last, u;
      chk(done_n.exists(q) && done_n[q] == 1, "exactly one done record per walk");
      if (!done_n.exists(q)) continue;
      last = done_step[q];
      u = start_v[q];
      for (int s = 1; s <= last; s++) begin
        chk(path.exists(q) && path[q].exists(s), "every step recorded");
        if (!(path.exists(q) && path[q].exists(s))) break;
        chk(is_nbr(u, path[q][s]), "hop goes to a neighbour");
        u = path[q][s];
      end
      chk(!path.exists(q) || path[q].size() == last, "no records past the end");
      if (done_hop[q]) begin
        chk(last == MAXL, "hop-ending walk has full length");
        m_maxl++;
      end else begin
        chk(done_vtx[q] == u && last < MAXL, "stop record at the last vertex");
        if (deg[u] == 0) m_dead++;
        else begin
          chk(ppr, "non-dead-end stop only in PPR mode");
          m_ppr++;
        end
      end
    end
  endtask

  task automatic run_phase(input int p, input int nqry);
    logic [31:0] d;
    phase = p;
    target = nq + nqry;
    wait (nq >= target);
    wait (inflight == 0);
    repeat (40) @(negedge clk);   // last partial beats flush
  endtask

  initial begin
    logic [31:0] d;
    longint t0;
    int sum;
    q_valid = 0; s_awvalid = 0; s_wvalid = 0; s_arvalid = 0; s_bready = 0; s_rready = 0;
    pl_en = 0;
    for (int i = 0; i < N; i++) pipe_tasks[i] = 0;
    // graph
    if (RMAT_EF == 0) begin
      for (int v = 0; v < V; v++) begin
        deg[v] = (($urandom % 100) < DEAD_PCT) ? 0 : 1 + int'($urandom % 7);
        chn[v] = int'($urandom % N);
        adr[v] = cl[chn[v]].size();
        for (int k = 0; k < deg[v]; k++) cl[chn[v]].push_back(int'($urandom % V));
      end
    end else begin
      // RMAT, Graph500 initiator a = 0.57, b = c = 0.19, d = 0.05:
      // V * RMAT_EF directed edges, each chosen quadrant by quadrant
      for (int e = 0; e < V * RMAT_EF; e++) begin
        int u, w, r;
        u = 0; w = 0;
        for (int b = 0; b < $clog2(V); b++) begin
          r = int'($urandom % 100);
          u = 2 * u + ((r >= 76) ? 1 : 0);
          w = 2 * w + ((r >= 57 && r < 76) || r >= 95 ? 1 : 0);
        end
        adjl[u].push_back(w);
      end
      for (int v = 0; v < V; v++) begin
        deg[v] = adjl[v].size();
        chn[v] = int'($urandom % N);
        adr[v] = cl[chn[v]].size();
        for (int k = 0; k < deg[v]; k++) cl[chn[v]].push_back(adjl[v][k]);
      end
      begin
        int dmax, nz;
        dmax = 0; nz = 0;
        for (int v = 0; v < V; v++) begin
          if (deg[v] > dmax) dmax = deg[v];
          if (deg[v] == 0) nz++;
        end
        $display("RMAT graph: %0d vertices, %0d edges, max degree %0d, %0d without neighbours", V, V * RMAT_EF, dmax, nz);
      end
    end
    for (int i = 0; i < N; i++) chk(cl[i].size() <= 8 * V, "column list fits its memory model");
    for (int a = 0; a < 8 * V; a++) begin
      @(negedge clk);
      pl_en = 1; pl_addr = 32'(a);
      pl_rp = {8'(chn[a % V]), 24'(deg[a % V]), 32'(adr[a % V])};   // DEPTH V: wraps onto itself
      for (int i = 0; i < N; i++) pl_cl[i] = (a < cl[i].size()) ? 64'(cl[i][a]) : 64'd0;
    end
    @(negedge clk); pl_en = 0;
    rst_n = 1;
    axil_wr(8'h08, 32'(MAXL));
    axil_rd(8'h08, d); chk(d == 32'(MAXL), "walk length register");
    // phase 1: URW with write back-pressure
    run_phase(1, Q1);
    check_phase(1, 0);
    axil_rd(8'h0C, d); chk(d == 32'(done_n.size()), "completed register");
    // phase 2: PPR
    axil_wr(8'h04, 32'h2666_6666);
    axil_wr(8'h00, 32'd1);
    run_phase(2, Q2);
    check_phase(2, 1);
    // phase 3: URW, no write back-pressure, throughput
    axil_wr(8'h00, 32'd0);
    bp_wr = 0;
    t0 = cyc; sum = hops;
    run_phase(3, Q3);
    check_phase(3, 0);
    begin
      real rate;
      rate = real'(hops - sum) / real'(cyc - t0 - 40) / real'(N);
      $display("phase 3: %0d hops in %0d cycles, %.3f hops per cycle per pipeline", hops - sum, cyc - t0 - 40, rate);
    end
    begin
      real rate;
      rate = real'(ss_hops) / real'(ss_cyc) / real'(N);
      $display("steady state (>= %0d walks in flight): %0d hops in %0d cycles, %.3f hops per cycle per pipeline",
               MAXI / 2, ss_hops, ss_cyc, rate);
      chk(ss_cyc > 1000 && rate > THRU_MIN, "steady-state hop throughput per pipeline");
    end
    axil_rd(8'h0C, d); chk(d == 32'(done_n.size()) && done_n.size() == start_v.size(), "all walks completed");
    chk(inflight == 0, "no walk left in flight");
    sum = 0;
    for (int i = 0; i < N; i++) sum += ooo_ra[i] + ooo_ca[i];
    $display("walks %0d, hops %0d", start_v.size(), hops);
    $display("dead end %0d, walk length %0d, PPR stop %0d, router crossing %0d, reassignment %0d",
             m_dead, m_maxl, m_ppr, m_cross, m_reassign);
    $display("return priority %0d, pipe back-pressure %0d, write back-pressure %0d, flush %0d, credit stall %0d, out-of-order %0d",
             m_prio, m_pipe_bp, m_wr_bp, m_flush, m_credit, sum);
    $write("tasks per pipeline:"); for (int i = 0; i < N; i++) $write(" %0d", pipe_tasks[i]); $display("");
    chk(m_dead > 0, "dead end happened");
    chk(m_maxl > 0, "walk length reached");
    chk(m_ppr > 0, "PPR stop happened");
    chk(m_cross > 0, "router crossing happened");
    chk(m_reassign > 0, "hop reassignment happened");
    chk(m_prio > 0, "return priority conflict happened");
    chk(m_pipe_bp > 0, "pipeline back-pressure happened");
    chk(m_wr_bp > 0, "write back-pressure happened");
    chk(m_flush > 0, "flushed partial beat happened");
    chk(m_credit > 0, "credit stall happened");
    chk(sum > 0, "out-of-order memory return happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
