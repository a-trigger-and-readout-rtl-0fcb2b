// camera_bench_body.svh: declarations, stimulus tasks and the camera-computer
// model shared by the end-to-end testbenches. Expects NB, NP, WPP, LAT and PC
// as localparams of the including module.
  logic clk_eth = 0, clk_ns = 0, rst_n = 0, trig = 0, pulse = 0;
  logic       adc_req    [NB];
  logic [$clog2(NP)-1:0]  adc_pixel  [NB];
  logic [$clog2(WPP)-1:0] adc_sample [NB];
  logic       adc_ack    [NB];
  logic [15:0] adc_data  [NB];
  logic [7:0] gmii_txd   [NB];
  logic       gmii_tx_en [NB];
  logic [7:0] gmii_rxd   [NB];
  logic       gmii_rx_dv [NB];
  logic       gmii_rx_er [NB];
  logic [31:0] settings  [NB][NUM_REGS-REG_SETTINGS];
  logic       board_busy [NB];
  logic [31:0] lost_triggers [NB];
  logic [7:0] ts_gmii_txd, ts_gmii_rxd = 0;
  logic       ts_gmii_tx_en, ts_gmii_rx_dv = 0, ts_gmii_rx_er = 0;
  logic       sync_ok, camera_busy;
  logic [15:0] ts_overflows;
  int checks = 0, failures = 0;

  always #4 clk_eth = ~clk_eth;
  always #0.5 clk_ns = ~clk_ns;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // central clock: 1 MHz
  real t_pulse[$];
  initial begin
    #100.3;
    forever begin
      pulse = 1; t_pulse.push_back($realtime);
      #100 pulse = 0;
      #900;
    end
  end

  function automatic int pulses_before(input real t);
    int n = 0;
    foreach (t_pulse[i]) if (t_pulse[i] <= t) n++;
    return n;
  endfunction

  // camera trigger, 40 ns wide, kept clear of the central pulse edges
  real t_trig [int];
  bit  busy_flag [int];      // event number -> busy flag in its time stamp
  real t_busy_edge [$];      // times camera_busy changed
  always @(camera_busy) if (rst_n) t_busy_edge.push_back($realtime);
  function automatic bit near_busy_edge(input real t);
    foreach (t_busy_edge[i]) if (t_busy_edge[i] > t - 60.0 && t_busy_edge[i] < t + 60.0) return 1;
    return 0;
  endfunction
  int  ntrig = 0;
  task automatic fire();
    while (($realtime - t_pulse[$]) < 6.0 || ($realtime - t_pulse[$]) > 994.0) #7;
    trig = 1; t_trig[ntrig] = $realtime; ntrig++;
    #40 trig = 0;
  endtask

  // mechanism counters
  int n_complete = 0, n_full = 0, n_setting = 0, n_bad_ctrl = 0, n_dead_stamp = 0, n_busy_flag = 0;
  int n_usec_step = 0, n_padded = 0;
  int frag_count [int];     // event number -> data fragments received
  bit stamped    [int];     // event number -> time stamp received
  int board_frames [NB];
  int bad_seen [NB];
  int board_last_ev [NB];
  int board_last_lost [NB];
  int data_errors = 0, ts_errors = 0, last_usec = -1;
  int ts_frames = 0;

  for (genvar b = 0; b < NB; b++) begin : g_b
    logic done, fcs_ok, pre_ok;
    int len, gap, nframes, evd;
    logic [7:0] body [2048];
    adc_model #(.NUM_PIXELS(NP), .WORDS_PER_PIXEL(WPP), .LAT(LAT)) u_adc (
      .clk(clk_eth), .rst_n, .board(b), .adc_req(adc_req[b]), .adc_pixel(adc_pixel[b]),
      .adc_sample(adc_sample[b]), .adc_ack(adc_ack[b]), .adc_data(adc_data[b]), .events_done(evd)
    );
    gmii_sink u_sink (.clk(clk_eth), .rst_n, .txd(gmii_txd[b]), .tx_en(gmii_tx_en[b]), .done, .len, .body,
                      .fcs_ok, .pre_ok, .gap, .frames(nframes));
    initial begin board_frames[b] = 0; board_last_ev[b] = -1; board_last_lost[b] = 0; end
    always @(posedge clk_eth) if (done) begin
      automatic logic [31:0] evn = {body[18], body[19], body[20], body[21]};
      automatic logic [31:0] lst = {body[22], body[23], body[24], body[25]};
      automatic int bad = 0;
      if (!(fcs_ok && pre_ok && len == 14 + EVENT_HDR_BYTES + 2 * NP * WPP)) bad++;
      if ({body[0], body[1], body[2], body[3], body[4], body[5]} != 48'hFFFFFFFFFFFF) bad++;
      if ({body[6], body[7], body[8], body[9], body[10], body[11]} != {MAC_PREFIX, 8'h00, 16'(b)}) bad++;
      if ({body[12], body[13]} != ETHERTYPE_DAQ || body[14] != MSG_EVENT || {body[16], body[17]} != 16'(b)) bad++;
      if (int'(evn) <= board_last_ev[b]) bad++;
      if (int'(lst) != board_last_lost[b] + int'(evn) - board_last_ev[b] - 1) bad++;
      for (int p = 0; p < NP; p++)
        for (int k = 0; k < WPP; k++)
          if ({body[30 + 2*(p*WPP+k)], body[31 + 2*(p*WPP+k)]} != adc_word(b, board_frames[b], p, k)) bad++;
      if (bad != 0) data_errors++;
      check(bad == 0, $sformatf("board %0d frame %0d: %0d errors", b, board_frames[b], bad));
      board_last_ev[b] = int'(evn); board_last_lost[b] = int'(lst);
      board_frames[b]++;
      if (frag_count.exists(int'(evn))) frag_count[int'(evn)]++; else frag_count[int'(evn)] = 1;
    end
    always @(posedge clk_eth) if (rst_n && dut.g_board[b].u_fe.u_buf.full) n_full++;
    always @(posedge clk_eth) bad_seen[b] = int'(dut.g_board[b].u_fe.u_rx.frames_bad);
    always @(posedge clk_eth) if (rst_n && settings[b][0] == 32'h0ABC_0000 + 32'(b)) n_setting++;
    initial begin gmii_rxd[b] = 0; gmii_rx_dv[b] = 0; gmii_rx_er[b] = 0; end
  end

  // time-stamp receiver
  logic ts_done, ts_fcs_ok, ts_pre_ok;
  int ts_len, ts_gap, ts_nframes;
  logic [7:0] ts_body [2048];
  gmii_sink u_ts_sink (.clk(clk_eth), .rst_n, .txd(ts_gmii_txd), .tx_en(ts_gmii_tx_en), .done(ts_done),
                       .len(ts_len), .body(ts_body), .fcs_ok(ts_fcs_ok), .pre_ok(ts_pre_ok),
                       .gap(ts_gap), .frames(ts_nframes));
  always @(posedge clk_eth) if (ts_done) begin
    automatic logic [31:0] evn = {ts_body[18], ts_body[19], ts_body[20], ts_body[21]};
    automatic logic [47:0] us  = {ts_body[22], ts_body[23], ts_body[24], ts_body[25], ts_body[26], ts_body[27]};
    automatic logic [15:0] ns  = {ts_body[28], ts_body[29]};
    ts_frames++;
    checks++;
    if (ts_len == 60 && 14 + TSTAMP_PAYLOAD_BYTES < 60) n_padded++;
    if (!(ts_fcs_ok && ts_pre_ok && ts_body[14] == MSG_TSTAMP && t_trig.exists(int'(evn)))) begin
      ts_errors++; failures++; $display("FAIL bad time-stamp frame for event %0d", evn);
    end else begin
      automatic real t = t_trig[int'(evn)];
      automatic int  np = pulses_before(t);
      automatic real d = t - t_pulse[np - 1];
      if (!(int'(us) == np && real'(ns) >= d - 1.0 && real'(ns) <= d + 1.0)) begin
        ts_errors++; failures++; $display("FAIL ev %0d: usec %0d exp %0d nsec %0d exp %0.1f", evn, us, np, ns, d);
      end
      if (last_usec >= 0 && int'(us) > last_usec) n_usec_step++;
      last_usec = int'(us);
      stamped[int'(evn)] = 1;
      busy_flag[int'(evn)] = ts_body[34][0];
    end
  end

  // control frames into one board
  task automatic send_ctrl(input int b, input logic [7:0] a, input logic [31:0] v, input bit corrupt);
    bq_t pl, f;
    pl = '{CMD_WRITE, a, v[31:24], v[23:16], v[15:8], v[7:0]};
    f = build_frame({MAC_PREFIX, 8'h00, 16'(b)}, PC, ETHERTYPE_CTRL, pl, corrupt);
    foreach (f[i]) begin @(negedge clk_eth); gmii_rx_dv[b] = 1; gmii_rxd[b] = f[i]; end
    @(negedge clk_eth); gmii_rx_dv[b] = 0; gmii_rxd[b] = 0;
    repeat (16) @(negedge clk_eth);
  endtask

  // all_mechanisms: also require every mechanism listed in the end-to-end test
  task automatic finish_checks(input bit all_mechanisms);
    int busy_lost = 0;
    // merge
    foreach (frag_count[e]) if (frag_count[e] == NB && stamped.exists(e)) n_complete++;
    foreach (stamped[e]) if (!frag_count.exists(e)) n_dead_stamp++;
    // busy flag: set for triggers no board took, clear for complete events
    // (unless the trigger came within 60 ns of a busy edge)
    foreach (stamped[e]) if (!near_busy_edge(t_trig[e])) begin
      if (!frag_count.exists(e)) begin
        check(busy_flag[e], $sformatf("event %0d: busy flag set for a dead-time trigger", e));
        n_busy_flag++;
      end else if (frag_count[e] == NB) begin
        check(!busy_flag[e], $sformatf("event %0d: busy flag clear for a complete event", e));
      end
    end
    for (int b = 0; b < NB; b++) begin
      check(board_frames[b] + int'(lost_triggers[b]) == ntrig,
            $sformatf("board %0d: frames %0d + lost %0d == triggers %0d", b, board_frames[b], lost_triggers[b], ntrig));
      busy_lost += int'(lost_triggers[b]);
      if (bad_seen[b] == 1) n_bad_ctrl++;
    end
    check(ts_frames + int'(ts_overflows) == ntrig,
          $sformatf("stamps %0d + overflows %0d == triggers %0d", ts_frames, ts_overflows, ntrig));
    check(data_errors == 0, "all data frames correct");
    check(ts_errors == 0, "all time stamps correct");
    foreach (frag_count[e]) if (!stamped.exists(e) && int'(ts_overflows) == 0) check(0, "fragment without stamp");
    $display("mechanisms: complete=%0d busy_lost=%0d full=%0d setting=%0d bad_ctrl=%0d dead_stamp=%0d busy_flag=%0d ts_ovf=%0d usec_step=%0d padded=%0d",
             n_complete, busy_lost, n_full, n_setting, n_bad_ctrl, n_dead_stamp, n_busy_flag, ts_overflows, n_usec_step, n_padded);
    check(n_complete > 0, "complete events merged");
    if (all_mechanisms) begin
    check(busy_lost > 2 * NB, "triggers lost while busy");
    check(n_full > 0, "buffer full");
    check(n_setting > 0, "setting written over Ethernet");
    check(n_bad_ctrl == NB, "corrupted control frames ignored");
    check(n_dead_stamp >= 2, "dead-time triggers still time-stamped");
    check(n_busy_flag > 0, "busy flag in time stamps of dead-time triggers");
    check(ts_overflows > 0, "time-stamp FIFO overflow");
    check(n_usec_step > 0, "microsecond count advances");
    check(n_padded > 0, "short frames padded");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask
