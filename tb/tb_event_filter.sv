// tb_event_filter: random event bursts in a 14 x 14 corner of the sensor
// (so the border neighbours are exercised) against a reference model of the
// two filters: refractory (drop if own pixel fired <= 1 ms ago) then
// nearest-neighbour (keep only if a neighbour fired < 5 ms ago), with every
// raw event updating its pixel's timestamp.  The output side is randomly
// back-pressured.  Checks each passed event, the drop counters, and that
// both kinds of drop and passes occurred.
module tb_event_filter;
  import pcarect_pkg::*;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_ready, out_valid, out_ready = 0, busy_init;
  event_t in_ev, out_ev;
  logic [31:0] n_ref_drop, n_noise_drop;
  int checks = 0, failures = 0;

  event_filter dut (.*);
  always #5 clk = ~clk;

  // reference state
  bit         seen [256][256];
  int unsigned last_t [256][256];
  event_t     expq[$];
  int         exp_ref = 0, exp_noise = 0, n_pass = 0;

  function automatic bit ref_filter(event_t e, output bit refd);
    bit nb;
    refd = seen[e.y][e.x] && (e.t - last_t[e.y][e.x] <= THETA_REF);
    nb = 0;
    for (int dy = -1; dy <= 1; dy++)
      for (int dx = -1; dx <= 1; dx++) begin
        int nx = int'(e.x) + dx, ny = int'(e.y) + dy;
        if ((dx != 0 || dy != 0) && nx >= 0 && ny >= 0 && nx < SENSOR_W && ny < SENSOR_H)
          if (seen[ny][nx] && (e.t - last_t[ny][nx] < THETA_NOISE)) nb = 1;
      end
    seen[e.y][e.x] = 1;
    last_t[e.y][e.x] = e.t;
    return !refd && nb;
  endfunction

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // output monitor
  always @(posedge clk) begin
    if (rst_n && out_valid && out_ready) begin
      if (expq.size() == 0) check(0, "unexpected output");
      else begin
        automatic event_t e = expq.pop_front();
        check(out_ev == e, $sformatf("out x=%0d y=%0d t=%0d exp x=%0d y=%0d t=%0d",
              out_ev.x, out_ev.y, out_ev.t, e.x, e.y, e.t));
        n_pass++;
      end
    end
  end
  always @(negedge clk) out_ready <= ($urandom_range(0, 3) != 0);

  initial begin
    int unsigned t = 1000;
    in_ev = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    check(busy_init == 1, "init sweep after reset");
    wait (!busy_init);
    for (int i = 0; i < 3000; i++) begin
      event_t e;
      bit refd, pass;
      // bursts of activity separated by quiet gaps
      t += (i % 200 == 0) ? 20000 : $urandom_range(0, 300);
      e.x = 8'($urandom_range(0, 13));
      e.y = 8'($urandom_range(0, 13));
      if (i % 500 == 250) begin e.x = 8'(SENSOR_W - 1); e.y = 8'(SENSOR_H - 1); end
      e.t = t;
      @(negedge clk);
      in_valid = 1; in_ev = e;
      @(posedge clk);
      while (!in_ready) @(posedge clk);
      pass = ref_filter(e, refd);
      if (pass) expq.push_back(e);
      else if (refd) exp_ref++;
      else exp_noise++;
      #1 in_valid = 0;
    end
    repeat (50) @(posedge clk);
    check(expq.size() == 0, "all expected events delivered");
    check(n_ref_drop == exp_ref, $sformatf("ref drops %0d exp %0d", n_ref_drop, exp_ref));
    check(n_noise_drop == exp_noise, $sformatf("noise drops %0d exp %0d", n_noise_drop, exp_noise));
    check(exp_ref > 0 && exp_noise > 0 && n_pass > 0, "all three outcomes seen");
    $display("passed=%0d refractory=%0d noise=%0d", n_pass, exp_ref, exp_noise);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
