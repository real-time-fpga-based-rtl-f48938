// tb_shaping_core: self-checking test of the three-exponential shaping core.
//
// The reference is computed independently in double precision at the
// sub-phase rate, y[m] = M*y[m-1] + x[m] per bank, combined as
// (1-S_f)*y_ff + S_f*y_fs - y_r, floored and saturated to 16 bits, then
// 2x linearly interpolated.  The hardware output must match within
// TOL LSB on every sample.  Checked:
//   * latency: an isolated impulse first shows on `dac` exactly 13 cycles
//     after it is presented, and dac_valid follows in_valid by 13 cycles
//   * single impulses at every sub-phase (sub-phase precision)
//   * a dense random stream with pile-up, one new frame every cycle (II=1)
//   * saturation with large amplitudes
//   * a runtime reload of the shape parameters
module tb_shaping_core;
  import sipm_pkg::*;

  localparam int NCYC = 1200;
  localparam int LAT  = 13;
  localparam int TOL  = 2;

  logic clk = 0, rst_n = 0;
  always #3.2 clk = ~clk;

  logic in_valid;
  logic [N_PHASES-1:0] trig;
  amp_t [N_PHASES-1:0] amp;
  logic cfg_load, cfg_busy, dac_valid;
  coef_t m_r, m_ff, m_fs;
  sf_t sf;
  sample_t [N_OUT-1:0] dac;

  shaping_core dut (.*);

  int checks = 0, failures = 0;
  int cyc = 0;

  // stimulus and reference, indexed by input cycle
  logic [N_PHASES-1:0] st_trig [NCYC];
  int                  st_amp  [NCYC][N_PHASES];
  logic                st_val  [NCYC];
  int                  ref_dac [NCYC][N_OUT];

  real mr, mff, mfs, sfr;

  function automatic int floor_sat(real v);
    real f;
    f = $floor(v);
    if (f > 32767.0)  return 32767;
    if (f < -32768.0) return -32768;
    return int'(f);
  endfunction

  function automatic int fl2(int a, int b);
    int t;
    t = a + b;
    return (t >= 0) ? t / 2 : -((-t + 1) / 2);
  endfunction

  // reference over cycles [c0, c1) with state reset at c0
  task automatic build_ref(int c0, int c1);
    real yr, yff, yfs;
    int s[N_PHASES];
    int last;
    yr = 0; yff = 0; yfs = 0; last = 0;
    for (int c = c0; c < c1; c++) begin
      for (int k = 0; k < N_PHASES; k++) begin
        real x;
        x = (st_val[c] && st_trig[c][k]) ? real'(st_amp[c][k]) : 0.0;
        yr = mr * yr + x; yff = mff * yff + x; yfs = mfs * yfs + x;
        s[k] = floor_sat((1.0 - sfr) * yff + sfr * yfs - yr);
      end
      for (int k = 0; k < N_PHASES; k++) begin
        ref_dac[c][2*k]   = fl2(k == 0 ? last : s[k-1], s[k]);
        ref_dac[c][2*k+1] = s[k];
      end
      last = s[N_PHASES-1];
    end
  endtask

  task automatic set_shape(real tr, real tff, real tfs, real sfv);
    m_r  = coef_t'(longint'($floor($exp(-0.8 / tr)  * real'(1 << COEF_W))));
    m_ff = coef_t'(longint'($floor($exp(-0.8 / tff) * real'(1 << COEF_W))));
    m_fs = coef_t'(longint'($floor($exp(-0.8 / tfs) * real'(1 << COEF_W))));
    sf   = sf_t'(int'(sfv * real'(1 << SF_FRAC)));
    mr  = real'(m_r)  / real'(1 << COEF_W);
    mff = real'(m_ff) / real'(1 << COEF_W);
    mfs = real'(m_fs) / real'(1 << COEF_W);
    sfr = real'(sf) / real'(1 << SF_FRAC);
  endtask

  // run cycles [c0, c1): drive, and compare outputs of input cycle c-LAT
  task automatic run(int c0, int c1, bit check_latency);
    int first_nz;
    first_nz = -1;
    for (int c = c0; c < c1 + LAT; c++) begin
      @(negedge clk);
      if (c < c1) begin
        in_valid = st_val[c];
        trig     = st_trig[c];
        for (int k = 0; k < N_PHASES; k++) amp[k] = amp_t'(st_amp[c][k]);
      end else begin
        in_valid = 1'b0; trig = '0; amp = '0;
      end
      // outputs now reflect the input applied LAT cycles before
      if (c - LAT >= c0 && c - LAT < c1) begin
        int oc;
        oc = c - LAT;
        checks++;
        if (dac_valid !== st_val[oc]) begin
          failures++;
          $display("FAIL valid cycle %0d: %0b vs %0b", oc, dac_valid, st_val[oc]);
        end
        for (int j = 0; j < N_OUT; j++) begin
          int d;
          d = int'(dac[j]) - ref_dac[oc][j];
          checks++;
          if (d > TOL || d < -TOL) begin
            failures++;
            if (failures < 20)
              $display("FAIL cycle %0d sample %0d: dut %0d ref %0d", oc, j, dac[j], ref_dac[oc][j]);
          end
        end
      end
      if (check_latency && first_nz < 0 && dac != '0) first_nz = c - c0;
    end
    if (check_latency) begin
      checks++;
      if (first_nz != LAT) begin
        failures++;
        $display("FAIL latency %0d, expected %0d", first_nz, LAT);
      end else $display("latency %0d cycles", first_nz);
    end
  endtask

  task automatic clear_stim(int c0, int c1);
    for (int c = c0; c < c1; c++) begin
      st_val[c] = 1'b1; st_trig[c] = '0;
      for (int k = 0; k < N_PHASES; k++) st_amp[c][k] = 0;
    end
  endtask

  task automatic load_shape();
    @(negedge clk); cfg_load = 1'b1;
    @(negedge clk); cfg_load = 1'b0;
    while (cfg_busy) @(negedge clk);
    // flush: let the filters decay with the new poles (state was zero)
  endtask

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_valid = 0; trig = '0; amp = '0; cfg_load = 0;
    set_shape(1.0, 50.0, 100.0, 0.20);
    repeat (3) @(negedge clk);
    rst_n = 1;
    load_shape();

    // 1. single impulse, latency and full pulse (20 pe at 1000 LSB/pe)
    clear_stim(0, 150);
    st_trig[0][3] = 1'b1; st_amp[0][3] = 20000;
    build_ref(0, 150);
    run(0, 150, 1'b1);

    // 2. impulses at every sub-phase, separated so that each decays
    for (int k = 0; k < N_PHASES; k++) begin
      int b;
      b = 150 + k * 40;
      clear_stim(b, b + 40);
    end
    for (int k = 0; k < N_PHASES; k++) begin
      st_trig[150 + k * 40][k] = 1'b1;
      st_amp[150 + k * 40][k] = 5000 + 1000 * k;
    end
    build_ref(150, 470);
    run(150, 470, 1'b0);
    repeat (200) @(negedge clk);   // let the tails die to zero

    // 3. dense random stream with pile-up, frames every cycle, some invalid
    for (int c = 470; c < 800; c++) begin
      st_val[c] = ($urandom_range(0, 9) != 0);
      for (int k = 0; k < N_PHASES; k++) begin
        st_trig[c][k] = ($urandom_range(0, 15) == 0);
        st_amp[c][k]  = $urandom_range(0, 600);
      end
    end
    build_ref(470, 800);
    run(470, 800, 1'b0);
    repeat (200) @(negedge clk);

    // 4. saturation: huge amplitudes
    clear_stim(800, 880);
    for (int k = 0; k < N_PHASES; k++) begin
      st_trig[800][k] = 1'b1; st_amp[800][k] = 65535;
    end
    build_ref(800, 880);
    run(800, 880, 1'b0);
    repeat (400) @(negedge clk);

    // 5. reload another shape at runtime (scintillator-like) and repeat
    set_shape(2.0, 20.0, 300.0, 0.60);
    load_shape();
    repeat (20) @(negedge clk);
    clear_stim(880, 1100);
    st_trig[880][0] = 1'b1; st_amp[880][0] = 8000;
    st_trig[881][5] = 1'b1; st_amp[881][5] = 4000;
    build_ref(880, 1100);
    run(880, 1100, 1'b1);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
