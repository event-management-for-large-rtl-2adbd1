// tb_processing_element: a 256-neuron processing element with random
// tables. Events of nine neurons are issued (one neuron per cycle, which the
// pipeline must accept, and one per 7 cycles as in the full system); a
// reference model computes each neuron's new firing time from the same
// tables, and the test checks the delete-insert sent to the event queue
// (ID, new firing time, pixel), its latency of 4 cycles after issue, the
// write-back to the neuron state memory (seen by later events and by the
// probe) and the probe's returned potential.
module tb_processing_element;
  import hsnn_pkg::*;
  localparam int unsigned NN = 256;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_probe = 0;
  syn_t synapse_nbr = '0;
  id_t  pre_id = '0;
  pixel_t pre_pixel = '0;
  time_t sim_time = '0;
  logic cfg_wr_en = 0;
  hcmd_e cfg_sel = H_NOP;
  id_t cfg_addr = '0;
  logic [31:0] cfg_data = '0;
  logic q_valid, probe_valid, busy;
  elem_t q_elem;
  id_t probe_id;
  time_t probe_ftime;
  pixel_t probe_pixel;
  pot_t probe_potential;

  processing_element #(.N_NEURONS(NN)) dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;
  initial begin #20_000_000; failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  // reference tables and state
  id_t     r_topo [N_SYN];
  weight_t r_w    [512];
  pot_t    r_m    [8192];
  time_t   r_inv  [8192];
  time_t   r_ft   [NN];
  pixel_t  r_px   [NN];
  pot_t    th = pot_t'(3000);

  task automatic cfg(input hcmd_e s, input int a, input int d);
    @(negedge clk); cfg_wr_en = 1; cfg_sel = s; cfg_addr = id_t'(a); cfg_data = 32'(d);
    @(negedge clk); cfg_wr_en = 0;
  endtask

  function automatic elem_t model(input int syn, input id_t pre, input pixel_t ppx, input time_t t);
    id_t post; int p; time_t nft; bit same;
    post = id_t'(pre + r_topo[syn]) & id_t'(NN - 1);
    same = (r_topo[syn] == '0);
    p    = int'(r_m[time_t'(r_ft[post] - t)]);
    p    = same ? p - int'(th) : p + int'(r_w[9'(int'(ppx) - int'(r_px[post]))]);
    if (p < 0) p = 0;
    if (p > 8191) p = 8191;
    nft  = time_t'(r_inv[p] + t);
    return '{id: post, ftime: nft, pixel: r_px[post]};
  endfunction

  // expected queue outputs, in issue order, with their due cycle
  elem_t  exp_q [$];
  longint exp_c [$];
  always @(posedge clk) if (rst_n && q_valid) begin
    checks++;
    if (exp_q.size() == 0) begin
      failures++; $display("FAIL: unexpected queue output");
    end else begin
      elem_t e; longint c;
      e = exp_q.pop_front(); c = exp_c.pop_front();
      if (q_elem != e || cyc != c) begin
        failures++;
        $display("FAIL cycle %0d (due %0d): id %0d ft %0d px %0d, expected id %0d ft %0d px %0d",
                 cyc, c, q_elem.id, q_elem.ftime, q_elem.pixel, e.id, e.ftime, e.pixel);
      end
    end
  end

  task automatic event_issue(input id_t pre, input time_t t, input int spacing);
    for (int s = 0; s < N_SYN; s++) begin
      elem_t e;
      @(negedge clk);
      in_valid = 1; in_probe = 0; synapse_nbr = syn_t'(s); pre_id = pre; pre_pixel = r_px[pre]; sim_time = t;
      e = model(s, pre, r_px[pre], t);
      exp_q.push_back(e); exp_c.push_back(cyc + 4);
      r_ft[e.id] = e.ftime;
      @(negedge clk);
      in_valid = 0;
      repeat (spacing - 1) @(negedge clk);
    end
  endtask

  initial begin
    id_t offs [N_SYN] = '{-16'sd17, -16'sd16, -16'sd15, -16'sd1, 16'sd0, 16'sd1, 16'sd15, 16'sd16, 16'sd17};
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int s = 0; s < N_SYN; s++) begin r_topo[s] = offs[s]; cfg(H_WR_TOPO, s, int'(offs[s])); end
    for (int a = 0; a < 512; a++) begin r_w[a] = weight_t'($urandom); cfg(H_WR_WEIGHT, a, int'(r_w[a])); end
    for (int a = 0; a < 8192; a++) begin r_m[a] = pot_t'($urandom); cfg(H_WR_MEMB, a, int'(r_m[a])); end
    for (int a = 0; a < 8192; a++) begin r_inv[a] = time_t'($urandom); cfg(H_WR_INVMEMB, a, int'(r_inv[a])); end
    cfg(H_WR_THRESH, 0, int'(th));
    for (int n = 0; n < NN; n++) begin
      r_ft[n] = time_t'($urandom); r_px[n] = pixel_t'($urandom);
      cfg(H_INIT_NRN, n, int'({r_px[n], r_ft[n]}));
    end
    // events: pre neurons neighbouring each other, so state written by one
    // event is read by the next
    for (int k = 0; k < 60; k++) begin
      id_t pre; time_t t;
      pre = id_t'($urandom_range(0, 40) + 100);
      t = time_t'($urandom);
      event_issue(pre, t, (k % 2 == 0) ? 1 : DELINS_INTERVAL);
      repeat (6) @(negedge clk);
    end
    repeat (10) @(negedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("FAIL: %0d outputs missing", exp_q.size()); end
    // probes: firing time, pixel and present potential, nothing written
    for (int k = 0; k < 50; k++) begin
      id_t n; time_t t; longint c0;
      n = id_t'($urandom_range(0, NN - 1)); t = time_t'($urandom);
      @(negedge clk); in_valid = 1; in_probe = 1; pre_id = n; sim_time = t; c0 = cyc;
      @(negedge clk); in_valid = 0; in_probe = 0;
      while (!probe_valid) @(negedge clk);
      checks++;
      if (probe_id != n || probe_ftime != r_ft[n] || probe_pixel != r_px[n] ||
          probe_potential != r_m[time_t'(r_ft[n] - t)] || cyc - c0 != 3) begin
        failures++;
        $display("FAIL probe %0d: ft %0d px %0d pot %0d after %0d", n, probe_ftime, probe_pixel, probe_potential, cyc - c0);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
