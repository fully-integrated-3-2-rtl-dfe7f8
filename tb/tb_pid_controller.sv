// tb_pid_controller: self-checking test of pid_controller at its default widths
// (12-bit power meter, 16-bit DAC, 16-bit gains with 8 fraction bits).
// Part 1 feeds random readings, set points and gains and compares every DAC code
// with a reference PID computed here in 64-bit integer arithmetic (error, clamped
// integral, difference, shift, mid-scale offset, clamp to the DAC range); both DAC
// clamps must be hit. Part 2 closes the loop around a simple model of the optics
// (reading = 2048 + (dac - 32768 - drift)/8) with a slow drift and checks that the
// reading settles within 4 codes of the set point.
module tb_pid_controller;
  logic clk = 1'b0, rst_n = 1'b0;
  logic pm_valid = 1'b0;
  logic [11:0] pm_data = '0, setpoint = '0;
  logic signed [15:0] kp = '0, ki = '0, kd = '0;
  logic dac_valid;
  logic [15:0] dac_data;
  int checks = 0, failures = 0;
  int sat_hi = 0, sat_lo = 0;

  pid_controller dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  longint integ = 0, eprev = 0;
  localparam longint ILIM = (64'sd1 <<< 22) - 1;

  function automatic longint ref_step(input longint pm, input longint sp);
    longint e, acc, code;
    e = sp - pm;
    integ = integ + e;
    if (integ > ILIM) integ = ILIM;
    if (integ < -ILIM) integ = -ILIM;
    acc = longint'(kp) * e + longint'(ki) * integ + longint'(kd) * (e - eprev);
    eprev = e;
    code = 32768 + (acc >>> 8);
    if (code < 0) code = 0;
    if (code > 65535) code = 65535;
    return code;
  endfunction

  task automatic sample(input logic [11:0] pm, output longint got);
    @(negedge clk);
    pm_data = pm;
    pm_valid = 1'b1;
    @(negedge clk);
    pm_valid = 1'b0;
    checks++;
    if (!dac_valid) failures++;
    got = longint'(dac_data);
  endtask

  initial begin
    longint got, expv;
    int pm;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    // part 1: random stimulus against the reference
    for (int t = 0; t < 3000; t++) begin
      if (t % 300 == 0) begin
        kp = 16'($signed($urandom_range(0, 4000)) - 2000);
        ki = 16'($signed($urandom_range(0, 200)) - 100);
        kd = 16'($signed($urandom_range(0, 2000)) - 1000);
        setpoint = 12'($urandom);
      end
      pm = (t % 300 < 150) ? $urandom_range(0, 4095) : int'(setpoint);
      expv = ref_step(pm, longint'(setpoint));
      sample(12'(pm), got);
      checks++;
      if (got != expv) begin
        failures++;
        if (failures < 5) $display("t=%0d dac %0d expected %0d", t, got, expv);
      end
      if (got == 65535) sat_hi++;
      if (got == 0) sat_lo++;
      repeat ($urandom_range(0, 2)) @(negedge clk);
    end
    checks++;
    if (sat_hi == 0 || sat_lo == 0) begin
      failures++;
      $display("clamps not exercised: hi=%0d lo=%0d", sat_hi, sat_lo);
    end
    // part 2: closed loop
    rst_n = 1'b0;
    @(negedge clk);
    rst_n = 1'b1;
    kp = 16'sd512; ki = 16'sd64; kd = 16'sd0; setpoint = 12'd2600;
    got = 32768;
    for (int t = 0; t < 600; t++) begin
      automatic int drift = 1500 + t / 2;
      pm = 2048 + (int'(got) - 32768 - drift) / 8;
      if (pm < 0) pm = 0;
      if (pm > 4095) pm = 4095;
      sample(12'(pm), got);
    end
    checks++;
    if (pm < 2596 || pm > 2604) begin
      failures++;
      $display("closed loop did not settle: reading %0d", pm);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
