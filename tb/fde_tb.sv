// fde_tb: self-checking test of the frequency-deviation extraction.
// Phase pairs of two ideal tones are generated with exact integer phase increments per
// estimate (in 2^-32 turn).  For a frequency offset of d turns per estimate and an interval
// of tp estimates the output must be exactly tp * d turns, including offsets that make the
// differential phase wrap several times per interval in either direction (counter-assisted
// unwrapping), tiny offsets and zero.  Also checked: the per-estimate differential phase,
// the number of wrap pulses, and that the first estimate only opens the first interval.
module fde_tb;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0;
  logic [31:0] phase_ref = '0, phase_dut = '0;
  logic [23:0] tp_frames = 24'd1;
  logic dphi_valid, ferr_valid, wrap_up, wrap_dn;
  logic [31:0] dphi;
  logic signed [47:0] ferr;
  int checks = 0, failures = 0;

  fde dut (.*);
  always #5 clk = ~clk;

  longint exp_ferr;
  logic [31:0] dphi_q[$];
  int n_ferr, n_up, n_dn;

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  always @(posedge clk) begin
    if (rst_n && ferr_valid) begin
      check(longint'(ferr) == exp_ferr, $sformatf("ferr %0d exp %0d", ferr, exp_ferr));
      n_ferr++;
    end
    if (rst_n && dphi_valid) check(dphi_q.size() > 0 && dphi == dphi_q.pop_front(), "dphi");
    if (rst_n && wrap_up) n_up++;
    if (rst_n && wrap_dn) n_dn++;
  end

  // inc_ref/inc_dut: phase steps per estimate; d = inc_ref - inc_dut must lie in (-1/2, 1/2) turn
  task automatic run(longint inc_ref, longint inc_dut, int tp, int intervals);
    logic [31:0] pr, pd;
    longint d, total;
    int exp_up, exp_dn;
    longint acc;
    d = longint'($signed(32'(inc_ref - inc_dut)));
    exp_ferr = d * tp;
    n_ferr = 0; n_up = 0; n_dn = 0;
    rst_n <= 0; tp_frames <= 24'(tp); dphi_q.delete();
    repeat (2) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    pr = $urandom; pd = $urandom;
    // wraps expected: count crossings of the differential phase through 0
    acc = longint'(32'(pr - pd));
    exp_up = 0; exp_dn = 0;
    for (int i = 0; i <= tp * intervals; i++) begin
      in_valid <= 1; phase_ref <= pr; phase_dut <= pd;
      dphi_q.push_back(pr - pd);
      @(posedge clk);
      if ((i % 3) == 1) begin in_valid <= 0; @(posedge clk); end
      if (i < tp * intervals) begin
        total = acc + d;
        if (total >= (longint'(1) << 32)) exp_up++;
        if (total < 0) exp_dn++;
        acc = total & 64'hFFFF_FFFF;
      end
      pr = pr + 32'(inc_ref); pd = pd + 32'(inc_dut);
    end
    in_valid <= 0;
    repeat (3) @(posedge clk);
    check(n_ferr == intervals, $sformatf("intervals %0d exp %0d", n_ferr, intervals));
    check(n_up == exp_up && n_dn == exp_dn, $sformatf("wraps up %0d/%0d dn %0d/%0d", n_up, exp_up, n_dn, exp_dn));
    total = exp_ferr;
    $display("d=%0d tp=%0d: ferr %0d, wraps up %0d down %0d", d, tp, total, n_up, n_dn);
  endtask

  initial begin
    run(64'd1589137899, 64'd0, 5, 6);            // +0.37 turn per estimate
    run(64'd1000, 64'd1760936591, 7, 5);        // -0.41 turn per estimate
    run(64'd4295, 64'd0, 3, 4);                 // 1e-6 turn per estimate
    run(64'd123456789, 64'd123456789, 4, 3);    // zero offset
    run(64'd429496730, 64'd0, 1, 10);           // tp = 1
    run(64'd0, 64'd2000000000, 17, 3);          // large negative, long interval
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
