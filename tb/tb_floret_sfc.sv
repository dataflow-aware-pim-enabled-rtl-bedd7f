// tb_floret_sfc -- self-checking test of one space-filling-curve segment.
//
// Curve 1 of a 3-curve network, 5 chiplets per curve. Sinks are the five
// chiplet outputs and the four ring outputs of the head and tail. The sink a
// flit must reach is worked out here from the topology (destination on this
// curve and downstream: that chiplet; otherwise the tail's or head's ring
// output on the shorter way round the 6-node ring).
// Directed part: every source/destination pair with all outputs ready; the
// flit must reach the right sink unchanged after exactly as many cycles as
// the hops it makes along the curve.
// Random part: 400 flits injected at random sources with random output
// stalls; every flit must arrive once, at its sink, and in order per
// source/sink pair.
module tb_floret_sfc;
  import floret_pkg::*;

  localparam int unsigned NS = 3, SL = 5, ME = 1;
  localparam int unsigned NSRC = SL + 4;   // chiplets, then ring inputs
  localparam int unsigned NSNK = SL + 4;   // chiplets, then ring outputs

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic  [SL-1:0]    liv, lir, lov, lor;
  flit_t [SL-1:0]    lif, lof;
  logic  [1:0][1:0]  riv, rir, rov, ror;
  flit_t [1:0][1:0]  rif, rof;

  floret_sfc #(.SFC_IDX(ME), .N_SFC(NS), .SFC_LEN(SL)) dut (
    .clk, .rst_n,
    .loc_in_valid(liv), .loc_in_flit(lif), .loc_in_ready(lir),
    .loc_out_valid(lov), .loc_out_flit(lof), .loc_out_ready(lor),
    .ring_in_valid(riv), .ring_in_flit(rif), .ring_in_ready(rir),
    .ring_out_valid(rov), .ring_out_flit(rof), .ring_out_ready(ror));

  int unsigned checks = 0, failures = 0;
  task automatic check(bit cond, string msg);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s (t=%0t)", msg, $time);
    end
  endtask

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Source s: 0..SL-1 chiplet; SL+2e+d ring input of end e, direction d.
  // Sink  k: 0..SL-1 chiplet; SL+2e+d ring output of end e, direction d.
  // Which ring direction a flit at ring node `node` takes to curve dsfc.
  function automatic int ring_dir(int node, int dsfc);
    int n, hops;
    n = node; hops = 0;
    while (n != 2 * dsfc) begin n = (n + 1) % (2 * NS); hops++; end
    return (hops <= NS) ? 0 : 1;
  endfunction

  // Expected sink and hops along the curve for a flit from source s.
  function automatic int exp_sink(int s, int dest, output int hops);
    int dsfc, dpos, start;
    dsfc = dest / SL; dpos = dest % SL;
    // where the flit first sits on the curve
    if (s < SL) start = s;
    else start = ((s - SL) / 2 == 0) ? 0 : SL - 1;
    if (dsfc == ME && dpos >= start && !(start == SL - 1 && s >= SL && dpos != SL - 1)) begin
      hops = dpos - start;
      return dpos;
    end
    if (dsfc == ME && start == 0 && s >= SL) begin  // ring into the head
      hops = dpos;
      return dpos;
    end
    if (start == 0) begin   // leaving at the head for another curve
      hops = 0;
      return SL + 0 + ring_dir(2 * ME, dsfc);
    end
    hops = SL - 1 - start;
    return SL + 2 + ring_dir(2 * ME + 1, dsfc);
  endfunction

  function automatic flit_t mk(int dest, int src, int seq);
    flit_t f;
    f.dest = ID_W'(dest); f.src = ID_W'(src);
    f.task_id = TASK_W'(seq); f.data = DATA_W'(seq * 32'h0101_0107 + dest);
    return f;
  endfunction

  // sink-side views
  logic  [NSNK-1:0] snk_v;
  flit_t [NSNK-1:0] snk_f;
  always_comb begin
    for (int k = 0; k < SL; k++) begin snk_v[k] = lov[k]; snk_f[k] = lof[k]; end
    for (int e = 0; e < 2; e++)
      for (int d = 0; d < 2; d++) begin
        snk_v[SL + 2*e + d] = rov[e][d]; snk_f[SL + 2*e + d] = rof[e][d];
      end
  end

  task automatic set_ready(logic [NSNK-1:0] r);
    for (int k = 0; k < SL; k++) lor[k] = r[k];
    for (int e = 0; e < 2; e++)
      for (int d = 0; d < 2; d++) ror[e][d] = r[SL + 2*e + d];
  endtask

  task automatic drive(int s, bit v, flit_t f);
    if (s < SL) begin liv[s] = v; lif[s] = f; end
    else begin riv[(s-SL)/2][(s-SL)%2] = v; rif[(s-SL)/2][(s-SL)%2] = f; end
  endtask

  function automatic bit src_ready(int s);
    return (s < SL) ? lir[s] : rir[(s-SL)/2][(s-SL)%2];
  endfunction

  // Legal sources for a destination: a ring input only carries flits the
  // neighbouring node would really send here.
  function automatic bit legal(int s, int dest);
    int dsfc;
    dsfc = dest / SL;
    if (s < SL) return 1;
    // head inputs: flits for this curve, or flits in transit on the ring
    // that keep going the way they came
    if (s == SL + 0) return dsfc == ME || ring_dir(2*ME, dsfc) == 0;
    if (s == SL + 1) return dsfc == ME || ring_dir(2*ME, dsfc) == 1;
    // tail inputs: flits in transit that keep their direction
    if (s == SL + 2) return dsfc != ME && ring_dir(2*ME+1, dsfc) == 0;
    return ring_dir(2*ME+1, dsfc) == 1;
  endfunction

  flit_t q [NSNK][$];   // expected flits per sink, in order
  int    hops_exp, sink, seen, lat;
  flit_t f;

  initial begin
    liv = '0; lif = '0; riv = '0; rif = '0;
    set_ready('1);
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk);

    // directed
    for (int s = 0; s < NSRC; s++)
      for (int d = 0; d < NS * SL; d++) begin
        if (!legal(s, d)) continue;
        sink = exp_sink(s, d, hops_exp);
        f = mk(d, s, d);
        drive(s, 1'b1, f);
        @(posedge clk);
        check(src_ready(s), $sformatf("source %0d not ready", s));
        @(negedge clk);
        drive(s, 1'b0, '0);
        lat = 0; seen = 0;
        while (lat < 12 && !seen) begin
          for (int k = 0; k < NSNK; k++)
            if (snk_v[k]) begin
              seen = 1;
              check(k == sink && snk_f[k] == f,
                    $sformatf("src %0d dest %0d: at sink %0d, expected sink %0d", s, d, k, sink));
            end
          if (!seen) begin @(negedge clk); lat++; end
        end
        check(seen == 1, $sformatf("src %0d dest %0d: never delivered", s, d));
        check(lat == hops_exp, $sformatf("src %0d dest %0d: %0d cycles, expected %0d", s, d, lat, hops_exp));
        @(negedge clk);
      end

    // random traffic with random stalls
    fork
      begin : drv
        for (int n = 0; n < 400; n++) begin
          int s, d;
          do begin
            s = $urandom_range(NSRC - 1);
            d = $urandom_range(NS * SL - 1);
          end while (!legal(s, d));
          f = mk(d, s, n);
          sink = exp_sink(s, d, hops_exp);
          drive(s, 1'b1, f);
          @(posedge clk);
          while (!src_ready(s)) @(posedge clk);
          q[sink].push_back(f);
          #1 drive(s, 1'b0, '0);
        end
      end
      begin : mon
        int got;
        got = 0;
        repeat (4000) begin
          @(negedge clk);
          set_ready(NSNK'($urandom));
          @(posedge clk);
          for (int k = 0; k < NSNK; k++) begin
            bit rdy;
            rdy = (k < SL) ? lor[k] : ror[(k-SL)/2][(k-SL)%2];
            if (snk_v[k] && rdy) begin
              got++;
              if (q[k].size() == 0) check(0, $sformatf("unexpected flit at sink %0d", k));
              else begin
                int idx;
                idx = -1;
                // first queued flit from the same source must be this one
                for (int j = 0; j < q[k].size(); j++)
                  if (idx < 0 && q[k][j].src == snk_f[k].src) idx = j;
                check(idx >= 0 && q[k][idx] == snk_f[k],
                      $sformatf("sink %0d: wrong or reordered flit", k));
                if (idx >= 0) q[k].delete(idx);
              end
            end
          end
        end
        check(got == 400, $sformatf("random: %0d of 400 flits delivered", got));
      end
    join

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
