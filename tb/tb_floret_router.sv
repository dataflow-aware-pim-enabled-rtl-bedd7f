// tb_floret_router -- self-checking test of floret_router in all three roles.
//
// Three routers of a 3-curve x 4-chiplet network are built side by side: a mid
// router (curve 1, position 2), a head (curve 1, position 0) and a tail
// (curve 1, position 3). The expected output for a destination is worked out
// here by walking the ring node by node, not with the package's rule.
// Checks:
//  1. every destination from every used input leaves on the expected output,
//     unchanged, one cycle after it was accepted, and on no other output;
//  2. with the output held not ready the flit stays put and unchanged and is
//     delivered once, when the output frees up;
//  3. two inputs contending for one output are served alternately;
//  4. a stream through one input and output runs at one flit per cycle.
module tb_floret_router;
  import floret_pkg::*;

  localparam int unsigned NS = 3, SL = 4;
  localparam int unsigned NR = 3;   // routers under test

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic  [NPORTS-1:0] iv [NR], ir [NR], ov [NR], orr [NR];
  flit_t [NPORTS-1:0] ifl [NR], ofl [NR];

  int unsigned checks = 0, failures = 0;

  floret_router #(.ROLE(ROLE_MID),  .SFC_IDX(1), .POS(2), .N_SFC(NS), .SFC_LEN(SL)) u_mid (
    .clk, .rst_n, .in_valid(iv[0]), .in_flit(ifl[0]), .in_ready(ir[0]),
    .out_valid(ov[0]), .out_flit(ofl[0]), .out_ready(orr[0]));
  floret_router #(.ROLE(ROLE_HEAD), .SFC_IDX(1), .POS(0), .N_SFC(NS), .SFC_LEN(SL)) u_head (
    .clk, .rst_n, .in_valid(iv[1]), .in_flit(ifl[1]), .in_ready(ir[1]),
    .out_valid(ov[1]), .out_flit(ofl[1]), .out_ready(orr[1]));
  floret_router #(.ROLE(ROLE_TAIL), .SFC_IDX(1), .POS(3), .N_SFC(NS), .SFC_LEN(SL)) u_tail (
    .clk, .rst_n, .in_valid(iv[2]), .in_flit(ifl[2]), .in_ready(ir[2]),
    .out_valid(ov[2]), .out_flit(ofl[2]), .out_ready(orr[2]));

  function automatic int pos_of(int r);
    return (r == 0) ? 2 : (r == 1) ? 0 : SL - 1;
  endfunction

  // Used inputs per role: mid {L,S}, head {L,CW,CCW}, tail {L,S,CW,CCW}.
  function automatic bit in_used(int r, int p);
    if (p == 0) return 1;
    if (r == 0) return p == 1;
    if (r == 1) return p >= 2;
    return 1;
  endfunction

  // Reference: ring node of the router and of the destination curve's head;
  // walk clockwise counting hops.
  function automatic int expect_port(int r, int dest);
    int me, dsfc, node, tgt, hops;
    me   = 1 * SL + pos_of(r);
    dsfc = dest / SL;
    if (dest == me) return 0;
    if (r == 0) return 1;
    if (r == 1 && dsfc == 1) return 1;
    node = (r == 1) ? 2 : 3;
    tgt  = 2 * dsfc;
    hops = 0;
    while (node != tgt) begin
      node = (node + 1) % (2 * NS);
      hops++;
    end
    return (hops <= NS) ? 2 : 3;
  endfunction

  function automatic flit_t mk(int dest, int src, int data);
    flit_t f;
    f.dest = ID_W'(dest);
    f.src = ID_W'(src);
    f.task_id = TASK_W'(data);
    f.data = DATA_W'(data * 32'h9e37_79b9);
    return f;
  endfunction

  task automatic check(bit cond, string msg);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s (t=%0t)", msg, $time);
    end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int n_out;
  flit_t f, f2, got [$];

  initial begin
    for (int r = 0; r < NR; r++) begin
      iv[r] = '0; ifl[r] = '0; orr[r] = '1;
    end
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk);

    // 1. routing and one-cycle latency
    for (int r = 0; r < NR; r++)
      for (int p = 0; p < NPORTS; p++) begin
        if (!in_used(r, p)) begin
          check(ir[r][p] == 1'b0, $sformatf("router %0d unused input %0d is ready", r, p));
          continue;
        end
        for (int d = 0; d < NS * SL; d++) begin
          int e;
          e = expect_port(r, d);
          f = mk(d, p, d + 16 * r);
          iv[r][p] = 1'b1; ifl[r][p] = f;
          @(posedge clk);
          check(ir[r][p] == 1'b1, $sformatf("router %0d input %0d not ready", r, p));
          @(negedge clk);
          iv[r][p] = 1'b0;
          for (int o = 0; o < NPORTS; o++)
            if (o == e) begin
              check(ov[r][o] == 1'b1 && ofl[r][o] == f,
                    $sformatf("router %0d in %0d dest %0d: expected on port %0d", r, p, d, e));
            end else begin
              check(ov[r][o] == 1'b0,
                    $sformatf("router %0d in %0d dest %0d: stray flit on port %0d", r, p, d, o));
            end
          @(negedge clk);
          check(ov[r] == '0, $sformatf("router %0d: flit delivered twice", r));
        end
      end

    // 2. backpressure on the tail's CW ring output
    f = mk(9, 0, 77);   // curve 2 head: one hop CW from the tail of curve 1
    orr[2][2] = 1'b0;
    iv[2][0] = 1'b1; ifl[2][0] = f;
    @(negedge clk);
    iv[2][0] = 1'b0;
    for (int k = 0; k < 5; k++) begin
      check(ov[2][2] == 1'b1 && ofl[2][2] == f, "stalled flit not held");
      @(negedge clk);
    end
    orr[2][2] = 1'b1;
    @(posedge clk);
    @(negedge clk);
    check(ov[2][2] == 1'b0, "stalled flit not released exactly once");

    // 3. contention: tail local and curve inputs both to ring CW, two each,
    //    queued while the output is blocked, then drained
    orr[2][2] = 1'b0;
    for (int k = 0; k < 2; k++) begin
      iv[2][0] = 1'b1; ifl[2][0] = mk(8, 100 + k, k);
      iv[2][1] = 1'b1; ifl[2][1] = mk(9, 200 + k, k);
      @(posedge clk);
      check(ir[2][0] && ir[2][1], "contention: input buffer full too early");
      @(negedge clk);
    end
    iv[2][0] = 1'b0; iv[2][1] = 1'b0;
    @(negedge clk);
    check(ir[2][0] == 1'b0 && ir[2][1] == 1'b0, "contention: buffers of depth 2 not full");
    orr[2][2] = 1'b1;
    repeat (8) begin
      if (ov[2][2]) got.push_back(ofl[2][2]);
      @(negedge clk);
    end
    check(got.size() == 4, $sformatf("contention: %0d of 4 flits delivered", got.size()));
    for (int k = 1; k < got.size(); k++)
      check((got[k].src >= 200) != (got[k-1].src >= 200),
            "contention: round robin did not alternate");
    got.delete();

    // 4. throughput: 10 flits back to back, head local -> curve
    fork
      begin
        for (int k = 0; k < 10; k++) begin
          iv[1][0] = 1'b1; ifl[1][0] = mk(SL + 1, 0, k);
          @(posedge clk);
          while (!ir[1][0]) @(posedge clk);
          #1;
        end
        iv[1][0] = 1'b0;
      end
      begin
        int first, last, cyc;
        first = -1; last = -1; cyc = 0;
        repeat (30) begin
          @(posedge clk);
          cyc++;
          if (ov[1][1] && orr[1][1]) begin
            if (first < 0) first = cyc;
            last = cyc;
            check(ofl[1][1].task_id == TASK_W'(got.size()), "stream out of order");
            got.push_back(ofl[1][1]);
          end
        end
        check(got.size() == 10, "stream lost flits");
        check(last - first == 9, $sformatf("stream took %0d cycles for 10 flits", last - first + 1));
      end
    join

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
