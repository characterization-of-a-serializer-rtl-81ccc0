`timescale 1ps / 1fs
// tb_tds_serializer: end-to-end test of the whole serializer at its default
// parameters (30-bit frames, PLL x120).
//
// A 40 MHz reference drives the chip. After PLL lock the testbench plays the
// trigger logic: on every falling edge of loading_clk it presents the next
// 30-bit frame. A reference model, written from the serializer's rules and
// not from its RTL, predicts the line: each captured frame is sent MSB
// first, the 30 frames' bits back to back, and the first bit of a frame
// occupies the 26th line-clock period after the loading_clk edge that
// captured it (its slot ends T_load/2 + (3 + 2/3) T_fBITover3 after that
// edge). The testbench builds its own line clock from ref_clk (x120, rising
// edges on the reference's), and samples sb in the middle of every bit
// period of it.
//
// Phases, each counted as a mechanism that must occur:
//   1. PLL lock and clock start; 40 MHz and 160 MHz rising edges aligned
//   2. latency pattern: 5 ones then 145 zeros in five frames, giving one
//      5-bit pulse every 31.25 ns; latency measured in ps
//   3. PRBS-31 (x^31 + x^28 + 1) frames, back to back
//   4. data-path reset in mid-stream; the latency after it must be the same
//   5. reference switched to 48 MHz (5.76 Gbps), reset, PRBS-31 again
//   6. bit doubling {b_i b_i}: each source bit sent twice, half effective
//      rate
//   7. reference at 53.33 MHz (6.4 Gbps) and 8. at 12 MHz (1.44 Gbps), the
//      other rates the chip was run at; PRBS-31 at each
module tb_tds_serializer;

  localparam int unsigned NB       = 30;       // bits per frame
  localparam int unsigned LAT_SLOT = 25;       // line-clock periods to first bit slot

  logic          ref_clk = 1'b0;
  logic          rst_n   = 1'b0;
  logic [NB-1:0] din     = '0;
  logic          loading_clk, clk40, pll_lock, sb;

  realtime t_ref_half = 12500.0;              // 40 MHz

  tds_serializer dut (
    .ref_clk     (ref_clk),
    .rst_n       (rst_n),
    .din         (din),
    .loading_clk (loading_clk),
    .clk40       (clk40),
    .pll_lock    (pll_lock),
    .sb          (sb)
  );

  initial forever begin
    #(t_ref_half);
    ref_clk = ~ref_clk;
  end

  int unsigned checks   = 0;
  int unsigned failures = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL at %0t: %s", $time, what);
    end
  endtask

  // ---------------- source ----------------
  typedef enum logic [1:0] {SRC_LATENCY, SRC_PRBS, SRC_DOUBLE} src_mode_e;
  src_mode_e     mode    = SRC_LATENCY;
  logic [30:0]   prbs    = 31'h7FFF_FFFF;
  int unsigned   lat_idx = 0;

  function automatic logic prbs_step(ref logic [30:0] s);
    logic b;
    b = s[30] ^ s[27];              // x^31 + x^28 + 1
    s = {s[29:0], b};
    return b;
  endfunction

  function automatic logic [NB-1:0] next_frame();
    logic [NB-1:0] f;
    logic b;
    case (mode)
      SRC_LATENCY: begin
        f = (lat_idx == 0) ? {5'b11111, 25'b0} : '0;
        lat_idx = (lat_idx + 1) % 5;
      end
      SRC_PRBS: for (int i = NB - 1; i >= 0; i--) f[i] = prbs_step(prbs);
      default: begin
        for (int i = NB - 1; i >= 0; i -= 2) begin
          b = prbs_step(prbs);
          f[i] = b; f[i-1] = b;
        end
      end
    endcase
    return f;
  endfunction

  logic din_dbl = 1'b0;   // frame on din was made in bit-doubling mode
  always @(negedge loading_clk) begin
    din_dbl <= (mode == SRC_DOUBLE);
    din     <= next_frame();
  end

  // ---------------- reference model ----------------
  // The testbench's own line clock: 120 periods per reference period with
  // rising edges on the reference's rising edges, as the chip's PLL is
  // specified. The testbench counts its periods and samples sb in the middle
  // of each.
  logic    fbit_clk = 1'b0;
  realtime tr_last  = 0.0;
  realtime tr_per   = 0.0;
  always @(posedge ref_clk) begin
    if (tr_last > 0.0) tr_per = $realtime - tr_last;
    tr_last = $realtime;
  end
  always @(posedge ref_clk) begin
    realtime h;
    if (tr_per > 0.0) begin
      h = tr_per / 240.0;
      repeat (119) begin
        fbit_clk = 1'b1;
        #(h);
        fbit_clk = 1'b0;
        #(h);
      end
      fbit_clk = 1'b1;
      #(h);
      fbit_clk = 1'b0;
    end
  end
  longint unsigned fcnt = 0;
  always @(posedge fbit_clk) fcnt++;

  localparam int unsigned QD = 64;
  logic [NB-1:0]   q_frame [QD];
  longint unsigned q_slot  [QD];
  realtime         q_time  [QD];
  bit              q_dbl   [QD];
  int unsigned     q_wr = 0, q_rd = 0;
  bit              model_on = 1'b0;

  always @(posedge loading_clk) begin
    if (model_on && rst_n) begin
      q_frame[q_wr % QD] = din;
      q_slot [q_wr % QD] = fcnt - 1 + 64'(LAT_SLOT);   // fcnt already counts the slot starting now
      q_dbl  [q_wr % QD] = din_dbl;
      q_time [q_wr % QD] = $realtime;
      q_wr++;
    end
  end

  // counters of mechanisms
  int unsigned n_bits = 0, n_frames_done = 0, n_lat_meas = 0, n_pulses = 0;
  int unsigned n_align = 0, n_resets = 0, n_rate_switch = 0, n_double_pairs = 0;
  realtime     t_bit = 1.0e6 / 4800.0;      // ps per bit at 4.8 Gbps
  realtime     lat_seen;
  realtime     t_last_pulse = 0.0;
  logic        prev_sb = 1'b0;
  int unsigned run_len = 0;
  logic        pair_first;

  always @(negedge fbit_clk) begin
    longint unsigned s;
    int unsigned j;
    s = fcnt - 1;                           // slot that started at the last posedge
    if (model_on && q_rd != q_wr) begin
      if (s >= q_slot[q_rd % QD]) begin
        j = int'(s - q_slot[q_rd % QD]);
        check(sb == q_frame[q_rd % QD][NB-1-j],
              $sformatf("frame %0d bit %0d: sb=%b expected %b", q_rd, NB-1-j, sb, q_frame[q_rd % QD][NB-1-j]));
        n_bits++;
        if (j == 0) begin
          // time from the capturing edge to the end of the first bit slot
          lat_seen = $realtime - q_time[q_rd % QD] + t_bit / 2.0;
          check(lat_seen > 26.0 * t_bit - 2.0 && lat_seen < 26.0 * t_bit + 2.0,
                $sformatf("latency %0.1f ps, expected %0.1f ps", lat_seen, 26.0 * t_bit));
          n_lat_meas++;
        end
        if (q_dbl[q_rd % QD] && j % 2 == 1) begin
          check(sb == pair_first, "doubled bit pair differs");
          n_double_pairs++;
        end
        pair_first = sb;
        if (j == NB - 1) begin
          q_rd++;
          n_frames_done++;
        end
      end
    end
    // latency-pattern pulse detection on the line itself
    if (mode == SRC_LATENCY && model_on) begin
      if (sb && !prev_sb) begin
        // pulses repeat every five Loading Clock cycles (31.25 ns at 4.8 Gbps)
        if (t_last_pulse > 0.0)
          check($realtime - t_last_pulse > 150.0 * t_bit - 2.0 && $realtime - t_last_pulse < 150.0 * t_bit + 2.0,
                $sformatf("pulse spacing %0.1f ps", $realtime - t_last_pulse));
        t_last_pulse = $realtime;
      end
      if (sb) run_len++;
      if (!sb && prev_sb) begin
        check(run_len == 5, $sformatf("latency pulse %0d bits wide", run_len));
        n_pulses++;
        run_len = 0;
      end
    end
    prev_sb = sb;
  end

  // 40 MHz / 160 MHz alignment
  always @(posedge clk40) begin
    #1;
    check(loading_clk == 1'b1, "clk40 rose without loading_clk");
    n_align++;
  end

  task automatic run_frames(input int unsigned nf);
    int unsigned target;
    target = n_frames_done + nf;
    while (n_frames_done < target) @(posedge loading_clk);
  endtask

  task automatic do_reset();
    model_on = 1'b0;
    @(posedge loading_clk);
    #1000 rst_n = 1'b0;
    repeat (3) @(posedge loading_clk);
    @(negedge loading_clk);
    #100 rst_n = 1'b1;
    q_rd = q_wr;
    @(negedge loading_clk);
    #100 model_on = 1'b1;
    n_resets++;
  endtask

  // Change the reference frequency, let the PLL follow, reset the data path.
  task automatic set_rate(input real f_ref_mhz);
    model_on = 1'b0;
    @(posedge ref_clk);
    t_ref_half = 1.0e6 / f_ref_mhz / 2.0;
    t_bit      = 1.0e6 / (f_ref_mhz * 120.0);
    repeat (6) @(posedge ref_clk);
    n_rate_switch++;
    do_reset();
  endtask

  initial begin
    realtime t0;
    // 1. lock
    wait (pll_lock);
    check(1'b1, "lock");
    repeat (2) @(posedge loading_clk);
    t0 = $realtime;
    repeat (16) @(posedge loading_clk);
    check(($realtime - t0) > 16 * 6250.0 - 2.0 && ($realtime - t0) < 16 * 6250.0 + 2.0,
          $sformatf("loading clock period %0.2f ps", ($realtime - t0) / 16));
    @(negedge loading_clk);
    #100 rst_n = 1'b1;
    @(negedge loading_clk);
    #100 model_on = 1'b1;

    // 2. latency pattern
    mode = SRC_LATENCY;
    run_frames(25);
    // 3. PRBS-31
    mode = SRC_PRBS;
    run_frames(60);
    // 4. reset mid-stream, same latency afterwards
    do_reset();
    run_frames(30);
    // 5. 48 MHz reference -> 5.76 Gbps
    set_rate(48.0);
    run_frames(60);
    // 6. bit doubling
    mode = SRC_DOUBLE;
    run_frames(2);              // frames already queued in PRBS mode drain
    run_frames(30);
    // 7. 53.33 MHz reference -> 6.4 Gbps (the logic itself has no rate limit)
    mode = SRC_PRBS;
    set_rate(160.0 / 3.0);
    run_frames(30);
    // 8. 12 MHz reference -> 1.44 Gbps
    set_rate(12.0);
    run_frames(30);

    check(n_rate_switch == 3, "not all reference frequencies exercised");
    check(n_pulses      > 0, "latency pulse never seen");
    check(n_lat_meas    > 0, "latency never measured");
    check(n_align       > 0, "clk40 never rose");
    check(n_resets      > 0, "reset never exercised");
    check(n_rate_switch > 0, "rate switch never exercised");
    check(n_double_pairs > 0, "bit doubling never exercised");
    check(n_bits >= 200 * NB, "too few bits checked");
    $display("mechanisms: bits=%0d frames=%0d latency_measurements=%0d latency_pulses=%0d clk40_aligned=%0d resets=%0d rate_switches=%0d doubled_pairs=%0d",
             n_bits, n_frames_done, n_lat_meas, n_pulses, n_align, n_resets, n_rate_switch, n_double_pairs);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // watchdog
  initial begin
    #(400_000_000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
