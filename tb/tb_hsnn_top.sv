// tb_hsnn_top: end-to-end test of the whole network at reduced size: a
// 9-level queue, 256 neurons on a 16 x 16 image, run for 25 neuron periods.
//
// Parameters: LEVELS (queue levels of the DUT), RUN_PERIODS (run length in
// neuron periods), MIN_CHECK_EVERY (events between full checks that the
// processed event is the earliest one), READ_EVERY (read back every n-th
// neuron).
//
// The testbench plays the host. It fills the tables from the model of the
// image-segmentation experiment: eq. (1) membrane potential with I0 = 6.918,
// tau = 0.1447, threshold 1 (4096 potential units), one free-running period
// mapped to PERIOD = 4000 time units; eq. (3) for the inverse table; an
// 8-neighbour grid topology; eq. (2) weights
// w = wmax (1 - 1/(1+exp(-alpha (|d| - delta)))) with wmax = 0.0325,
// alpha = 100 and delta = 6 grey levels: about wmax for neighbours whose
// grey levels differ by less than 6, about 0 otherwise. (The equation is
// printed with |d| + delta, which would make every weight 0; the minus sign
// is this testbench's reading.) A synthetic image of
// four flat regions with noise and random initial firing times are loaded,
// the network runs, and the neurons are read back.
//
// A reference model follows every event the DUT processes: the event's
// neuron and time must be the model's earliest firing time, and the model
// applies the same table arithmetic to the nine neurons. At the end each
// neuron's firing time, pixel and potential must match. The mechanisms
// exercised are counted and each must have happened at least once.
module tb_hsnn_top;
  import hsnn_pkg::*;
  localparam int unsigned LEVELS          = 9;
  localparam int          RUN_PERIODS     = 25;
  localparam int          MIN_CHECK_EVERY = 1;
  localparam int          READ_EVERY      = 1;

  hsnn_top #(.LEVELS(LEVELS)) dut (.*);

  initial begin
    #200_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end


  localparam int unsigned NN      = 2 ** (LEVELS - 1);
  localparam int unsigned GW      = 2 ** ((LEVELS - 1) / 2);   // grid width
  localparam int          PERIOD  = 4000;
  localparam int          TH      = 4096;
  localparam real         I0      = 6.918;
  localparam real         TAU     = 0.1447;
  localparam real         WMAX    = 0.0325;
  localparam real         ALPHA   = 100.0;
  localparam real         DELTA   = 6.0;

  logic clk = 1'b0, rst_n = 1'b0;
  logic h_valid = 1'b0;
  hcmd_e h_cmd = H_NOP;
  id_t h_addr = '0;
  logic [31:0] h_data = '0;
  logic h_ready, r_valid, running, queue_overflow;
  time_t r_ftime, sim_time;
  pixel_t r_pixel;
  pot_t r_potential;
  logic [31:0] events, elapsed;

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic check(input bit c, input string m);
    checks++;
    if (!c) begin
      failures++;
      if (failures < 20) $display("FAIL cycle %0d: %s", cyc, m);
    end
  endtask

  // reference tables and neuron state
  id_t     offs [N_SYN];
  weight_t wl   [512];
  pot_t    ml   [8192];
  time_t   il   [8192];
  time_t   r_ft [NN];
  pixel_t  r_px [NN];

  function automatic real t_of_p(real p);   // eq. (3), seconds to reach p
    return -TAU * $ln(1.0 - p * TAU / I0);
  endfunction

  task automatic host(input hcmd_e c, input int a, input int d);
    @(negedge clk);
    h_valid = 1'b1; h_cmd = c; h_addr = id_t'(a); h_data = 32'(d);
    @(posedge clk);
    while (!h_ready) @(posedge clk);
    #1 h_valid = 1'b0;
  endtask

  // mechanism counters
  int n_events = 0, n_resets = 0, n_over = 0, n_wrap = 0, n_sync = 0, n_delins = 0;
  int n_inserts = 0, n_probes = 0, n_wait = 0, n_timestop = 0;
  time_t last_t = '0;

  // follow the DUT: at the first synapse of each event apply the event
  always @(posedge clk) if (rst_n && dut.u_ctrl.pe_valid && !dut.u_ctrl.pe_probe &&
                             dut.u_ctrl.pe_syn == '0) begin
    id_t pre; time_t t;
    pre = dut.u_ctrl.pe_pre_id;
    t   = dut.u_ctrl.sim_time;
    check(r_ft[pre] == t, $sformatf("event neuron %0d at %0d, model says %0d", pre, t, r_ft[pre]));
    check(dut.u_ctrl.pe_pre_pixel == r_px[pre], "event pixel");
    if (n_events % MIN_CHECK_EVERY == 0)
      for (int n = 0; n < NN; n++)
        if (time_before(r_ft[n], t)) begin
          check(0, $sformatf("neuron %0d fires at %0d, before the event at %0d", n, r_ft[n], t));
          break;
        end
    if (n_events > 0 && t < last_t) n_wrap++;
    if (n_events > 0 && t == last_t) n_sync++;
    last_t = t;
    n_events++;
    for (int s = 0; s < N_SYN; s++) begin
      id_t post; int p; bit same;
      post = id_t'(pre + offs[s]) & id_t'(NN - 1);
      same = (offs[s] == '0);
      p = int'(ml[time_t'(r_ft[post] - t)]);
      if (same) begin
        p = p - TH; n_resets++;
      end else begin
        p = p + int'(wl[9'(int'(r_px[pre]) - int'(r_px[post]))]);
        if (p >= TH) n_over++;
      end
      if (p < 0) p = 0;
      if (p > 8191) p = 8191;
      r_ft[post] = time_t'(il[p] + t);
    end
  end

  always @(posedge clk) if (rst_n) begin
    if (dut.u_queue.op_valid && dut.u_queue.op_ready && dut.u_queue.op == Q_DELINS) n_delins++;
    if (dut.u_queue.op_valid && dut.u_queue.op_ready && dut.u_queue.op == Q_INSERT) n_inserts++;
    if (dut.running && !dut.ev_settled) n_wait++;
  end

  initial begin
    longint c0, c_run;
    offs = '{id_t'(-GW-1), id_t'(-GW), id_t'(-GW+1), id_t'(-1), id_t'(0), id_t'(1),
             id_t'(GW-1), id_t'(GW), id_t'(GW+1)};
    for (int a = 0; a < 512; a++) begin
      int d; real w;
      d = (a >= 256) ? a - 512 : a;
      if (d < 0) d = -d;
      w = WMAX * (1.0 - 1.0 / (1.0 + $exp(-ALPHA * (real'(d) - DELTA))));
      wl[a] = weight_t'($rtoi(w * TH + 0.5));
    end
    begin
      real tth;
      tth = t_of_p(1.0);
      for (int ph = 0; ph < 8192; ph++) begin
        real s, p;
        if (ph > PERIOD) ml[ph] = '0;
        else begin
          s = real'(PERIOD - ph) / PERIOD * tth;
          p = I0 / TAU * (1.0 - $exp(-s / TAU));
          ml[ph] = pot_t'($rtoi(p * TH + 0.5));
        end
      end
      for (int p = 0; p < 8192; p++) begin
        if (p >= TH) il[p] = '0;
        else il[p] = time_t'($rtoi((tth - t_of_p(real'(p) / TH)) / tth * PERIOD + 0.5));
      end
    end
    for (int n = 0; n < NN; n++) begin
      int x, y;
      x = n % GW; y = n / GW;
      r_px[n] = pixel_t'(((x < GW / 2) ? 60 : 170) + ((y < GW / 2) ? 0 : 40) + $urandom_range(0, 3));
      r_ft[n] = time_t'($urandom_range(0, PERIOD - 1));
    end

    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    c0 = cyc;
    for (int s = 0; s < N_SYN; s++) host(H_WR_TOPO, s, int'(offs[s]));
    for (int a = 0; a < 512; a++)   host(H_WR_WEIGHT, a, int'(wl[a]));
    for (int a = 0; a < 8192; a++)  host(H_WR_MEMB, a, int'(ml[a]));
    for (int a = 0; a < 8192; a++)  host(H_WR_INVMEMB, a, int'(il[a]));
    host(H_WR_THRESH, 0, TH);
    for (int n = 0; n < NN; n++) host(H_INIT_NRN, n, int'({r_px[n], r_ft[n]}));
    check(n_inserts == NN, $sformatf("%0d initial inserts", n_inserts));
    $display("loaded %0d neurons in %0d cycles", NN, cyc - c0);

    c_run = cyc;
    host(H_RUN, 0, RUN_PERIODS * PERIOD);
    @(posedge clk);
    while (running) @(posedge clk);
    $display("ran %0d events in %0d cycles (%0d cycles per event), simulated time %0d",
             events, cyc - c_run, (cyc - c_run) / (events > 0 ? events : 1), elapsed);
    check(events == 32'(n_events), "event count");
    check(n_delins == N_SYN * n_events, "one delete-insert per involved neuron");
    // an event costs 9 issues 7 cycles apart plus pipeline and root latency
    check((cyc - c_run) <= longint'(events) * 80 + 200, "cycles per event");
    if (elapsed <= RUN_PERIODS * PERIOD && dut.u_queue.top_valid) n_timestop++;
    check(!queue_overflow, "queue overflow");

    for (int n = 0; n < NN; n += READ_EVERY) begin
      host(H_READ_NRN, n, 0);
      while (!r_valid) @(posedge clk);
      n_probes++;
      check(r_ftime == r_ft[n] && r_pixel == r_px[n] &&
            r_potential == ml[time_t'(r_ft[n] - sim_time)],
            $sformatf("neuron %0d: ft %0d px %0d pot %0d, model ft %0d px %0d", n, r_ftime, r_pixel,
                      r_potential, r_ft[n], r_px[n]));
    end

    $display("mechanisms: events %0d, resets %0d, pushed over threshold %0d, same-time events %0d,",
             n_events, n_resets, n_over, n_sync);
    $display("  time wraps %0d, delete-inserts %0d, inserts %0d, cycles waiting for the root %0d,",
             n_wrap, n_delins, n_inserts, n_wait);
    $display("  probes %0d, stop on run time %0d", n_probes, n_timestop);
    check(n_events > 0,   "no event processed");
    check(n_resets > 0,   "no reset");
    check(n_over > 0,     "no neuron pushed over threshold");
    check(n_sync > 0,     "no synchronised firing");
    check(n_wrap > 0,     "no time wrap");
    check(n_delins > 0,   "no delete-insert");
    check(n_inserts > 0,  "no insert");
    check(n_wait > 0,     "no wait for the root");
    check(n_probes > 0,   "no probe");
    check(n_timestop > 0, "run did not stop on its run time");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
