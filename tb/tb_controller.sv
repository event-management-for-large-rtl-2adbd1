// tb_controller: the controller against simple models of its neighbours.
// The "merger" offers a scripted list of events with rising firing times and
// drops `settled` for a few cycles after each delete-insert; the "processing
// element" is busy for five cycles after each issue and answers probes.
// Checked: host writes reach the configuration port unchanged; H_INIT_NRN
// waits for the queue and presents the right insert; each event's nine
// synapse numbers leave in order, 7 cycles apart, with the event's neuron,
// pixel and firing time as simulation time; the elapsed time and event
// count; the run stopping before the first event beyond the run time; and
// the probe read-back.
module tb_controller;
  import hsnn_pkg::*;
  logic clk = 0, rst_n = 0;
  logic h_valid = 0;
  hcmd_e h_cmd = H_NOP;
  id_t h_addr = '0;
  logic [31:0] h_data = '0;
  logic h_ready, r_valid, running;
  time_t r_ftime; pixel_t r_pixel; pot_t r_potential;
  logic [31:0] events, elapsed;
  logic ev_valid = 0, ev_settled = 0;
  elem_t ev = '0;
  logic pe_valid, pe_probe, cfg_wr_en;
  syn_t pe_syn; id_t pe_pre_id; pixel_t pe_pre_pixel; time_t sim_time;
  hcmd_e cfg_sel; id_t cfg_addr; logic [31:0] cfg_data;
  logic pe_busy, probe_valid = 0;
  time_t probe_ftime = '0; pixel_t probe_pixel = '0; pot_t probe_potential = '0;
  logic ins_valid, ins_ready = 0;
  elem_t ins_elem;

  controller dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;
  initial begin #10_000_000; failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  task automatic check(input bit c, input string m);
    checks++;
    if (!c) begin failures++; $display("FAIL cycle %0d: %s", cyc, m); end
  endtask

  // processing element model
  logic [5:0] busy_sr = '0;
  always @(posedge clk) busy_sr <= {busy_sr[4:0], pe_valid};
  assign pe_busy = pe_valid || (|busy_sr);
  always @(posedge clk) begin
    probe_valid <= 1'b0;
    if (busy_sr[2] && probe_pend) begin
      probe_valid <= 1'b1; probe_ftime <= 13'd1234; probe_pixel <= 8'd77; probe_potential <= 13'd999;
      probe_pend <= 1'b0;
    end
    if (pe_valid && pe_probe) probe_pend <= 1'b1;
  end
  logic probe_pend = 0;

  // merger model: the event list
  localparam int NE = 12;
  elem_t evs [NE];
  int ev_i = 0;
  int unsettle = 0;
  always @(posedge clk) begin
    if (busy_sr[3] && !pe_probe) unsettle <= 4;
    else if (unsettle > 0) unsettle <= unsettle - 1;
  end
  always_comb begin
    ev_settled = (unsettle == 0) && !busy_sr[3];
    ev_valid   = (ev_i < NE);
    ev         = (ev_i < NE) ? evs[ev_i] : '0;
  end

  // observe issues
  int issued_syn = 0;
  longint last_issue = 0;
  always @(posedge clk) if (rst_n && pe_valid && !pe_probe) begin
    check(int'(pe_syn) == issued_syn, $sformatf("synapse number %0d, expected %0d", pe_syn, issued_syn));
    check(pe_pre_id == evs[ev_i].id && pe_pre_pixel == evs[ev_i].pixel && sim_time == evs[ev_i].ftime,
          "event fields");
    if (issued_syn > 0) check(cyc - last_issue == 7, $sformatf("issue interval %0d", cyc - last_issue));
    last_issue = cyc;
    issued_syn++;
    if (issued_syn == N_SYN) begin issued_syn = 0; ev_i++; end
  end

  task automatic host(input hcmd_e c, input int a, input int d);
    @(negedge clk); h_valid = 1; h_cmd = c; h_addr = id_t'(a); h_data = 32'(d);
    #1;
    while (!h_ready) begin @(negedge clk); #1; end
    if (c != H_RUN && c != H_READ_NRN && c != H_INIT_NRN)
      check(cfg_wr_en && cfg_sel == c && cfg_addr == id_t'(a) && cfg_data == 32'(d), "config write");
    if (c == H_INIT_NRN)
      check(ins_valid && ins_elem.id == id_t'(a) && ins_elem.ftime == time_t'(d) &&
            ins_elem.pixel == pixel_t'(d >> TIME_W) && cfg_wr_en, "init insert");
    @(negedge clk); h_valid = 0;
  endtask

  initial begin
    int t;
    t = 8100;                  // crosses the 13-bit wrap
    for (int i = 0; i < NE; i++) begin
      t += $urandom_range(0, 300);
      evs[i] = '{id: id_t'($urandom), ftime: time_t'(t), pixel: pixel_t'($urandom)};
    end
    repeat (2) @(posedge clk);
    rst_n = 1;
    host(H_WR_TOPO, 3, 255);
    host(H_WR_MEMB, 100, 4000);
    host(H_WR_THRESH, 0, 4096);
    fork
      host(H_INIT_NRN, 5, (8'd9 << 13) | 13'd700);
      begin repeat (4) @(posedge clk); ins_ready = 1; end
    join
    ins_ready = 0;
    // a run of length 0 stops before the first event
    host(H_RUN, 0, 0);
    repeat (5) @(posedge clk);
    check(!running && events == 0, "run of length 0 processes nothing beyond time 0");
    // run up to the first event, then seven more
    host(H_RUN, 0, 32'(int'(evs[0].ftime) + 0));
    while (running) @(posedge clk);
    check(events == 1 && ev_i == 1, $sformatf("run to event 0: %0d events", events));
    check(elapsed == 32'(evs[0].ftime), "elapsed time");
    host(H_RUN, 0, 32'(((int'(evs[7].ftime) - int'(evs[0].ftime)) & 8191) + 2));
    while (running) @(posedge clk);
    check(events == 7 && ev_i == 8, $sformatf("second run: %0d events", events));
    check(sim_time == evs[7].ftime, "simulation time at the last event");
    // probe
    host(H_READ_NRN, 42, 0);
    while (!r_valid) @(posedge clk);
    check(r_ftime == 13'd1234 && r_pixel == 8'd77 && r_potential == 13'd999, "probe read-back");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
