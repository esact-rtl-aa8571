// tb_dyn_alloc: random critical-block maps (uneven, as similarity makes them)
// are scheduled; the test checks that every critical block is scheduled
// exactly once, no line exceeds ceil(total / lines), the reported naive
// makespan is the largest per-token count, and the run time.
module tb_dyn_alloc;
  localparam int NT = 16, NL = 16, H = 12, SLOTS = H * NT / NL + H;
  logic clk = 0, rst_n = 0, start = 0;
  logic [H-1:0] crit [NT];
  logic busy, done;
  logic [7:0] total, makespan, naive_makespan, load [NL];
  logic [3:0] sched_tok [NL][SLOTS];
  logic [3:0] sched_head [NL][SLOTS];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  dyn_alloc #(.NT(NT), .NL(NL), .H(H)) dut (.clk, .rst_n, .start, .crit, .busy, .done,
    .total, .makespan, .naive_makespan, .load, .sched_tok, .sched_head);

  task automatic run(int dens);
    int seen [NT][H];
    int tot, nv, c, cycles, ms;
    tot = 0; nv = 0;
    foreach (crit[t]) begin
      crit[t] = '0;
      for (int h = 0; h < H; h++) if ($urandom_range(0, 99) < ((t % 4 == 0) ? 95 : dens)) crit[t][h] = 1;
      c = $countones(crit[t]); tot += c; if (c > nv) nv = c;
    end
    foreach (seen[t, h]) seen[t][h] = 0;
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    cycles = 1;
    while (!done) begin @(negedge clk); cycles++; end
    ms = (tot + NL - 1) / NL;
    checks++; if (cycles != NT * H + 2) begin failures++; $display("FAIL cycles %0d", cycles); end
    checks++; if (total != 8'(tot) || makespan != 8'(ms) || naive_makespan != 8'(nv)) begin
      failures++; $display("FAIL total %0d/%0d makespan %0d/%0d naive %0d/%0d", total, tot, makespan, ms, naive_makespan, nv); end
    for (int l = 0; l < NL; l++) begin
      checks++; if (load[l] > 8'(ms)) begin failures++; $display("FAIL line %0d load %0d", l, load[l]); end
      for (int s = 0; s < int'(load[l]); s++) seen[sched_tok[l][s]][sched_head[l][s]]++;
    end
    foreach (seen[t, h]) begin
      checks++;
      if (seen[t][h] != int'(crit[t][h])) begin failures++; $display("FAIL block %0d,%0d seen %0d", t, h, seen[t][h]); end
    end
  endtask

  initial begin
    foreach (crit[t]) crit[t] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    run(0); run(30); run(60); run(100);
    for (int i = 0; i < 5; i++) run($urandom_range(0, 100));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
