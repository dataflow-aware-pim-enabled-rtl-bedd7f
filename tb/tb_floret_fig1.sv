// tb_floret_fig1 -- the same end-to-end test as tb_floret_noi, run on the
// 36-chiplet network of the paper's Fig. 1: six curves of six chiplets, the
// twelve heads and tails joined in the ring H1-T1-H2-...-H6-T6-H1. Here a
// tail is up to six ring hops from another curve's head.
//
// The PIM chiplets are modelled here: a chiplet that receives an activation
// applies its layer's function f_l(x) = 3x + l + 1 + t (t = task number) as a
// stand-in for the crossbar matrix-vector product and sends the result to the
// chiplet holding the next layer. The layer-to-chiplet mapping follows the
// scheme the paper describes for Floret: the task list is a queue, one task is
// mapped at a time, its layers go onto consecutive free chiplets in curve
// order (spilling from a curve's tail into the next curve when it runs out),
// and a task's chiplets are freed for later tasks when it completes.
// ResNet tasks (NN1..NN6) also carry skip connections: every even layer sends
// its output to the layer two ahead as well, and that chiplet checks it
// against its main-path input. Chiplets per DNN: ceil(parameters / 4M),
// with parameters from the paper's Table I; 4M parameters per chiplet is this
// test's own assumption.
//
// Phases:
//  1. latency: single flits between random chiplet pairs in an idle network
//     arrive after exactly the hop count worked out from the topology, with
//     at most N_SFC-1 ring hops from a tail (3 at the default size);
//  2. workloads: WL1..WL5 of the paper's Table II run one after the other,
//     4 input activations per DNN task; every final result is checked
//     against the layer functions applied in order;
//  3. random forward traffic (destination later in curve order) with random
//     stalls: every flit arrives once, at its destination.
// Throughout, the ring-link transfers seen inside the NoI must equal the ring
// hops expected for the delivered flits, and each mechanism (curve-internal
// delivery, spill to another curve, ring CW and CCW, multi-hop ring path,
// turn back to the own head, output stall, input stall, chiplet reuse, a task
// spanning two curves, a skip-connection flit) must occur at least once.
module tb_floret_fig1;
  import floret_pkg::*;

  localparam int unsigned NS = 6, SL = 6, NC = NS * SL;
  localparam int unsigned M_IN = 4;        // input activations per task

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic  [NC-1:0] civ, cir, cov, cor;
  flit_t [NC-1:0] cif, cof;

  floret_noi #(.N_SFC(NS), .SFC_LEN(SL)) dut (
    .clk, .rst_n,
    .chip_in_valid(civ), .chip_in_flit(cif), .chip_in_ready(cir),
    .chip_out_valid(cov), .chip_out_flit(cof), .chip_out_ready(cor));

  int unsigned checks = 0, failures = 0;
  task automatic check(bit cond, string msg);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 30) $display("FAIL: %s (t=%0t)", msg, $time);
    end
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- topology reference ----------------
  function automatic int ring_hops_from(int node, int dsfc);
    int d;
    d = (2 * dsfc - node + 2 * NS) % (2 * NS);
    return (d <= NS) ? d : 2 * NS - d;
  endfunction
  function automatic bit ring_cw(int node, int dsfc);
    return ((2 * dsfc - node + 2 * NS) % (2 * NS)) <= NS;
  endfunction
  // hops along curves and ring, and the ring part alone
  function automatic int hops(int a, int b, output int ring);
    int sa, pa, sb, pb;
    sa = a / SL; pa = a % SL; sb = b / SL; pb = b % SL;
    ring = 0;
    if (sa == sb && pb >= pa) return pb - pa;
    if (pa == 0) begin
      ring = ring_hops_from(2 * sa, sb);
      if (pb == SL - 1 && !ring_cw(2 * sa, sb)) begin ring = ring - 1; return ring; end
      return ring + pb;
    end
    ring = ring_hops_from(2 * sa + 1, sb);
    // going CCW the ring passes the destination curve's tail first
    if (pb == SL - 1 && !ring_cw(2 * sa + 1, sb)) begin
      ring = ring - 1;
      return (SL - 1 - pa) + ring;
    end
    return (SL - 1 - pa) + ring + pb;
  endfunction

  // ---------------- mechanism counters ----------------
  int n_intra, n_spill, n_upstream, n_cw, n_ccw, n_multi, n_ostall, n_istall;
  int n_reuse, n_spill_task, ring_expected, ring_seen;

  // ---------------- chiplet model state ----------------
  flit_t oq [NC][$];            // outgoing flits per chiplet
  int    cfg_task [NC];         // -1 = free
  int    cfg_layer[NC];
  int    cfg_next [NC];         // -1 = last layer
  bit    ever_used[NC];
  int    mode;                  // 0 latency, 1 workloads, 2 random
  int    pending;               // flits in flight (modes 0 and 2)
  int    rnd_dest_cnt [NC];     // random mode: flits expected per chiplet
  int    got_at [NC];           // latency mode: arrival marker

  // tasks
  localparam int MAXT = 64;
  int    t_len   [MAXT];
  int    t_chip  [MAXT][32];
  int    t_left  [MAXT];
  int    t_skip  [MAXT];        // skip-connection flits still to arrive
  bit    t_res   [MAXT];        // task is a ResNet (has skip connections)
  int    sk_q [NC][$];          // skip data received, per chiplet
  int    mn_q [NC][$];          // main-path data received, per chiplet
  int    n_skip;
  int    exp_res [MAXT][$];
  int    n_tasks_done;

  function automatic logic [31:0] f_layer(logic [31:0] x, int l, int t);
    return x * 3 + 32'(l + 1 + t);
  endfunction

  // -------- per-cycle driver / monitor, shared by all phases --------
  logic [NC-1:0] fire_in, fire_out;
  flit_t [NC-1:0] out_snap;
  int rdy_pct = 100;

  task automatic cycle();
    @(negedge clk);
    for (int c = 0; c < NC; c++) begin
      civ[c] = oq[c].size() > 0;
      cif[c] = civ[c] ? oq[c][0] : '0;
      cor[c] = ($urandom_range(99) < rdy_pct);
    end
    #4;
    fire_in  = civ & cir;
    fire_out = cov & cor;
    out_snap = cof;
    for (int c = 0; c < NC; c++) begin
      if (cov[c] && !cor[c]) n_ostall++;
      if (civ[c] && !cir[c]) n_istall++;
    end
    for (int k = 0; k < 2 * NS; k++) begin
      if (dut.rout_valid[k][0] && dut.rout_ready[k][0]) begin n_cw++;  ring_seen++; end
      if (dut.rout_valid[k][1] && dut.rout_ready[k][1]) begin n_ccw++; ring_seen++; end
    end
    @(posedge clk);
    for (int c = 0; c < NC; c++) begin
      if (fire_in[c]) void'(oq[c].pop_front());
      if (fire_out[c]) receive(c, out_snap[c]);
    end
  endtask

  task automatic receive(int c, flit_t f);
    int r, src;
    src = int'(f.src);
    check(int'(f.dest) == c, $sformatf("flit for %0d delivered to %0d", f.dest, c));
    void'(hops(src, c, r));
    ring_expected += r;
    if (src / SL != c / SL) n_spill++;
    else if (src % SL < c % SL) n_intra++;
    else if (src % SL > c % SL) n_upstream++;
    if (r >= 2) n_multi++;
    case (mode)
      0: begin got_at[c]++; pending--; end
      2: begin rnd_dest_cnt[c]--; pending--; end
      default: begin
        int t;
        logic [31:0] y;
        t = cfg_task[c];
        check(t >= 0 && TASK_W'(t) == f.task_id,
              $sformatf("chiplet %0d got task %0d data, holds task %0d", c, f.task_id, t));
        if (t >= 0 && cfg_layer[c] >= 2 && int'(f.src) == t_chip[t][cfg_layer[c] - 2]) begin
          // skip connection from two layers back: its value x must satisfy
          // main input = f_(l-1)(x)
          n_skip++;
          t_skip[t]--;
          sk_q[c].push_back(int'(f.data));
        end else if (t >= 0) begin
          if (t_res[t] && cfg_layer[c] >= 2 && cfg_layer[c] % 2 == 0)
            mn_q[c].push_back(int'(f.data));
          y = f_layer(f.data, cfg_layer[c], t);
          if (t_res[t] && cfg_layer[c] % 2 == 0 && cfg_layer[c] + 2 < t_len[t]) begin
            flit_t g;
            g.dest = ID_W'(t_chip[t][cfg_layer[c] + 2]); g.src = ID_W'(c);
            g.task_id = TASK_W'(t); g.data = y;
            oq[c].push_back(g);
          end
          if (cfg_next[c] < 0) begin
            check(exp_res[t].size() > 0 && y == 32'(exp_res[t][0]),
                  $sformatf("task %0d: wrong result", t));
            if (exp_res[t].size() > 0) void'(exp_res[t].pop_front());
            t_left[t]--;
          end else begin
            flit_t g;
            g.dest = ID_W'(cfg_next[c]); g.src = ID_W'(c);
            g.task_id = TASK_W'(t); g.data = y;
            oq[c].push_back(g);
          end
        end
      end
    endcase
    // pair skip values with main-path values in arrival order
    while (sk_q[c].size() > 0 && mn_q[c].size() > 0) begin
      check(32'(mn_q[c][0]) == f_layer(32'(sk_q[c][0]), cfg_layer[c] - 1, cfg_task[c]),
            $sformatf("chiplet %0d: skip value does not match main path", c));
      void'(sk_q[c].pop_front());
      void'(mn_q[c].pop_front());
    end
  endtask

  // ---------------- workload description (paper's Tables I and II) ----------------
  // chiplets per DNN NN1..NN8 at 4M parameters per chiplet:
  // 24.76->7, 36.5->10, 25.94->7, 9.42->3, 43.6->11, 54.84->14, 93.4->24, 54.84->14
  localparam int NN_CHIPS [1:8] = '{7, 10, 7, 3, 11, 14, 24, 14};
  // WLk as (count, NN) pairs in queue order
  localparam int WL_PAIRS [5][7][2] = '{
    '{'{16,3}, '{1,8}, '{3,6}, '{4,5}, '{2,1}, '{1,2}, '{1,4}},
    '{'{2,6},  '{1,7}, '{7,5}, '{4,4}, '{2,7}, '{1,3}, '{1,1}},
    '{'{12,3}, '{9,8}, '{3,5}, '{10,1},'{12,3},'{5,4}, '{1,7}},
    '{'{1,2},  '{3,8}, '{5,6}, '{4,2}, '{3,3}, '{4,4}, '{2,7}},
    '{'{1,6},  '{3,7}, '{4,4}, '{6,8}, '{4,6}, '{3,4}, '{2,7}}
  };

  int alloc_ptr;

  // Map a task of n layers onto the next n free chiplets in curve order.
  function automatic bit try_map(int t, int n);
    int nfree, c, k;
    nfree = 0;
    for (int i = 0; i < NC; i++) if (cfg_task[i] < 0) nfree++;
    if (nfree < n) return 0;
    c = alloc_ptr; k = 0;
    while (k < n) begin
      if (cfg_task[c] < 0) begin
        t_chip[t][k] = c;
        cfg_task[c] = t; cfg_layer[c] = k;
        if (ever_used[c]) n_reuse++;
        ever_used[c] = 1;
        k++;
      end
      c = (c + 1) % NC;
    end
    alloc_ptr = c;
    for (int i = 0; i < n; i++)
      cfg_next[t_chip[t][i]] = (i == n - 1) ? -1 : t_chip[t][i + 1];
    if (t_chip[t][0] / SL != t_chip[t][n-1] / SL) n_spill_task++;
    t_len[t] = n;
    return 1;
  endfunction

  task automatic run_workload(int wl);
    int queue_nn [$];
    int next_task, active;
    bit busy [MAXT];
    for (int p = 0; p < 7; p++)
      repeat (WL_PAIRS[wl][p][0]) queue_nn.push_back(WL_PAIRS[wl][p][1]);
    for (int t = 0; t < MAXT; t++) busy[t] = 0;
    next_task = 0; active = 0;
    while (queue_nn.size() > 0 || active > 0) begin
      // map the task at the head of the queue if it fits; one at a time
      if (queue_nn.size() > 0 && next_task < MAXT) begin
        int n;
        n = NN_CHIPS[queue_nn[0]];
        if (try_map(next_task, n)) begin
          t_left[next_task] = M_IN;
          t_res[next_task] = (queue_nn[0] <= 6);   // NN1..NN6 are ResNets
          t_skip[next_task] = 0;
          if (queue_nn[0] <= 6)
            for (int l = 0; l + 2 < n; l += 2) t_skip[next_task] += M_IN;
          exp_res[next_task].delete();
          for (int i = 0; i < M_IN; i++) begin
            logic [31:0] x, y;
            flit_t g;
            x = $urandom;
            y = x;
            for (int l = 0; l < n; l++) y = f_layer(y, l, next_task);
            exp_res[next_task].push_back(int'(y));
            // the first layer's chiplet reads the input and sends layer 0's output
            g.dest = ID_W'(t_chip[next_task][1]); g.src = ID_W'(t_chip[next_task][0]);
            g.task_id = TASK_W'(next_task); g.data = f_layer(x, 0, next_task);
            oq[t_chip[next_task][0]].push_back(g);
            if (t_res[next_task] && n > 2) begin
              g.dest = ID_W'(t_chip[next_task][2]);
              oq[t_chip[next_task][0]].push_back(g);
            end
          end
          void'(queue_nn.pop_front());
          busy[next_task] = 1;
          active++;
          next_task++;
        end
      end
      cycle();
      // completed tasks give their chiplets back
      for (int t = 0; t < next_task; t++)
        if (busy[t] && t_left[t] == 0 && t_skip[t] == 0) begin
          busy[t] = 0; active--; n_tasks_done++;
          for (int i = 0; i < t_len[t]; i++) cfg_task[t_chip[t][i]] = -1;
        end
    end
  endtask

  initial begin
    int a, b, r, h, lat, nq, r0;
    civ = '0; cif = '0; cor = '1;
    n_intra = 0; n_spill = 0; n_upstream = 0; n_cw = 0; n_ccw = 0; n_multi = 0;
    n_ostall = 0; n_istall = 0; n_reuse = 0; n_spill_task = 0;
    ring_expected = 0; ring_seen = 0; n_skip = 0; n_tasks_done = 0; alloc_ptr = 0;
    for (int c = 0; c < NC; c++) begin
      cfg_task[c] = -1; cfg_next[c] = -1; cfg_layer[c] = 0; ever_used[c] = 0;
      got_at[c] = 0; rnd_dest_cnt[c] = 0;
    end
    repeat (3) @(posedge clk);
    rst_n = 1'b1;

    // 1. latency in an idle network
    mode = 0;
    for (int n = 0; n < 300; n++) begin
      flit_t g;
      a = $urandom_range(NC - 1);
      do b = $urandom_range(NC - 1); while (b == a);
      h = hops(a, b, r);
      g.dest = ID_W'(b); g.src = ID_W'(a); g.task_id = '0; g.data = 32'(n);
      oq[a].push_back(g);
      pending = 1; got_at[b] = 0; lat = 0;
      r0 = ring_seen;
      cycle();                      // accepted at this edge
      check(oq[a].size() == 0, "idle network refused a flit");
      while (pending > 0 && lat < 100) begin cycle(); lat++; end
      // the flit is visible h cycles after acceptance and taken one cycle later
      check(got_at[b] == 1 && lat == h + 1,
            $sformatf("%0d -> %0d took %0d cycles, expected %0d", a, b, lat, h + 1));
      // ring hops seen inside the network: as computed; from a tail never more
      // than N_SFC-1 (three at the default size: every tail reaches every
      // other curve's head within three hops), from a head at most N_SFC
      check(ring_seen - r0 == r && r <= int'(NS) - ((a % SL == 0) ? 0 : 1),
            $sformatf("%0d -> %0d: %0d ring hops seen, %0d expected", a, b, ring_seen - r0, r));
    end

    // 2. the paper's workloads
    mode = 1;
    rdy_pct = 85;
    for (int wl = 0; wl < 5; wl++) begin
      int n_before;
      n_before = n_tasks_done;
      run_workload(wl);
      nq = 0;
      for (int p = 0; p < 7; p++) nq += WL_PAIRS[wl][p][0];
      check(n_tasks_done - n_before == nq, $sformatf("WL%0d: %0d of %0d tasks done",
            wl + 1, n_tasks_done - n_before, nq));
      $display("WL%0d: %0d DNN tasks mapped and completed", wl + 1, nq);
    end

    // 3. random forward traffic (destination later in curve order than the
    //    source, as in a DNN's dataflow) with random stalls. Arbitrary
    //    all-to-all traffic at high load can deadlock this network: the
    //    curves and the ring form a cycle and there are no virtual channels.
    mode = 2;
    rdy_pct = 60;
    pending = 0;
    for (int n = 0; n < 3000; n++) begin
      flit_t g;
      a = $urandom_range(NC - 2);
      b = $urandom_range(NC - 1, a + 1);
      g.dest = ID_W'(b); g.src = ID_W'(a); g.task_id = 4'hf; g.data = 32'(n);
      oq[a].push_back(g);
      rnd_dest_cnt[b]++;
      pending++;
      if (n % 4 == 3) cycle();
    end
    lat = 0;
    while (pending > 0 && lat < 20000) begin cycle(); lat++; end
    check(pending == 0, $sformatf("random: %0d flits never delivered", pending));
    for (int c = 0; c < NC; c++)
      check(rnd_dest_cnt[c] == 0, $sformatf("random: chiplet %0d count off by %0d", c, rnd_dest_cnt[c]));

    check(ring_seen == ring_expected,
          $sformatf("ring transfers %0d, expected %0d", ring_seen, ring_expected));

    $display("mechanisms: intra-curve %0d, spill %0d, back to own head %0d, ring CW %0d, ring CCW %0d",
             n_intra, n_spill, n_upstream, n_cw, n_ccw);
    $display("            multi-hop ring %0d, output stalls %0d, input stalls %0d, chiplet reuse %0d, tasks spanning curves %0d, skip flits %0d",
             n_multi, n_ostall, n_istall, n_reuse, n_spill_task, n_skip);
    check(n_intra > 0, "no curve-internal delivery");
    check(n_spill > 0, "no spill to another curve");
    check(n_upstream > 0, "no turn back to the own head");
    check(n_cw > 0, "no CW ring transfer");
    check(n_ccw > 0, "no CCW ring transfer");
    check(n_multi > 0, "no multi-hop ring path");
    check(n_ostall > 0, "no output stall");
    check(n_istall > 0, "no input stall");
    check(n_reuse > 0, "no chiplet reuse");
    check(n_spill_task > 0, "no task spanning two curves");
    check(n_skip > 0, "no skip-connection flit");
    for (int c = 0; c < NC; c++)
      check(sk_q[c].size() == 0 && mn_q[c].size() == 0,
            $sformatf("chiplet %0d: unpaired skip/main values", c));

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
