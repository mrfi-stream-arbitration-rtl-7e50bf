// mrfi_traffic -- random-traffic generator and scoreboard for mrfi_noc.
//
// Connects to every port of an mrfi_noc of the same K, M and FW (FW >= 32).
// Each node sends N_FLITS flits in bursts of 1..M flits, each burst to one
// random destination; a flit carries {source, destination, sequence number}.
// The receiving host drains its RX port slowly (DRAIN_PCT percent of cycles),
// so receive buffers fill and flow control has to act. From cycle
// ROTATE_AT on, rotary priority is used.
//
// Checked: every flit arrives once, at its destination, tagged with its
// source, in order per source/destination pair; no band is ever driven twice;
// in every cycle the granted data bands are either all M bands or none (the
// allocation leaves no band idle when a pair is admitted); and every mechanism
// happened at least once: a lost arbitration, a pair holding several bands,
// several pairs sharing the bands, flow control raised, and (only if
// K > M) more requests than bands. done rises when everything has arrived.
module mrfi_traffic #(
  parameter int unsigned K         = 16,
  parameter int unsigned M         = 16,
  parameter int unsigned FW        = 32,
  parameter int unsigned N_FLITS   = 40,
  parameter int unsigned DRAIN_PCT = 60,
  parameter int unsigned ROTATE_AT = 200,
  localparam int unsigned IDW  = (K > 1) ? $clog2(K) : 1,
  localparam int unsigned SV_W = 2 + IDW,
  localparam int unsigned CNTW = $clog2(M + 1)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  output mrfi_pkg::prio_mode_e prio_mode,
  output logic                 prio_load_en,
  output logic [IDW-1:0]       prio_load_map [K],
  output logic [CNTW-1:0]      in_cnt   [K],
  output logic [IDW-1:0]       in_dest  [K][M],
  output logic [FW-1:0]        in_data  [K][M],
  input  logic [K-1:0]         in_ready,
  input  logic [CNTW-1:0]      out_cnt  [K],
  input  logic [IDW-1:0]       out_src  [K][M],
  input  logic [FW-1:0]        out_data [K][M],
  output logic [CNTW-1:0]      out_pop  [K],
  input  logic [SV_W-1:0]      sub_vec  [K],
  input  logic [M-1:0]         tx_ch    [K],
  input  logic [K-1:0]         lost,
  input  logic                 collision,
  output logic                 done,
  output int                   checks,
  output int                   failures,
  output int                   cycles
);

  int sent [K], rcvd_total, next_seq [K][K], exp_seq [K][K];
  int n_lost, n_multi, n_shared, n_fc, n_sat, n_rot_cycles, busy_cycles, granted_bands;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  initial begin
    checks = 0; failures = 0; cycles = 0; done = 1'b0;
    rcvd_total = 0; n_lost = 0; n_multi = 0; n_shared = 0; n_fc = 0; n_sat = 0;
    n_rot_cycles = 0; busy_cycles = 0; granted_bands = 0;
    prio_mode = mrfi_pkg::PRIO_STATIC; prio_load_en = 1'b0;
    for (int n = 0; n < K; n++) begin
      prio_load_map[n] = IDW'(n);
      in_cnt[n] = '0; out_pop[n] = '0; sent[n] = 0;
      for (int k = 0; k < M; k++) begin in_dest[n][k] = '0; in_data[n][k] = '0; end
      for (int d = 0; d < K; d++) begin next_seq[n][d] = 0; exp_seq[n][d] = 0; end
    end
    @(posedge rst_n);
    forever begin
      @(negedge clk);
      cycles++;
      if (cycles == ROTATE_AT) prio_mode = mrfi_pkg::PRIO_ROTARY;
      if (prio_mode == mrfi_pkg::PRIO_ROTARY) n_rot_cycles++;

      // ---- observe the current cycle ----
      begin
        logic [M-1:0] all_bands;
        int pairs;
        all_bands = '0; pairs = 0;
        for (int n = 0; n < K; n++) begin
          all_bands |= tx_ch[n];
          if (tx_ch[n] != '0) pairs++;
          if ($countones(tx_ch[n]) > 1) n_multi++;
          if (lost[n]) n_lost++;
          if (sub_vec[n][SV_W-1]) n_fc++;
        end
        if (pairs > 1) n_shared++;
        if (pairs == int'(M)) begin
          int waiting;
          waiting = 0;
          for (int n = 0; n < K; n++) if (lost[n]) waiting++;
          if (waiting > 0) n_sat++;
        end
        if (all_bands != '0) begin
          busy_cycles++;
          granted_bands += $countones(all_bands);
        end
        check(all_bands == '0 || all_bands == '1,
              $sformatf("cycle %0d: granted bands %b not all or none", cycles, all_bands));
        check(!collision, $sformatf("cycle %0d: band collision", cycles));
      end

      // ---- host RX: drain and score ----
      for (int n = 0; n < K; n++) begin
        int take;
        take = ($urandom_range(99, 0) < DRAIN_PCT) ? $urandom_range(int'(out_cnt[n]), 0) : 0;
        out_pop[n] = CNTW'(take);
        for (int k = 0; k < take; k++) begin
          int s, d, q;
          s = int'(out_data[n][k][31:24]);
          d = int'(out_data[n][k][23:16]);
          q = int'(out_data[n][k][15:0]);
          check(s < int'(K) && d == n && int'(out_src[n][k]) == s && q == exp_seq[s][n],
                $sformatf("node %0d got flit src %0d(tag %0d) dst %0d seq %0d", n, s, out_src[n][k], d, q));
          if (s < int'(K)) exp_seq[s][n] = q + 1;
          rcvd_total++;
        end
      end

      // ---- host TX: new bursts ----
      for (int n = 0; n < K; n++) begin
        int len, d;
        in_cnt[n] = '0;
        if (in_ready[n] && sent[n] < int'(N_FLITS) && $urandom_range(2, 0) != 0) begin
          len = $urandom_range(M, 1);
          if (len > int'(N_FLITS) - sent[n]) len = int'(N_FLITS) - sent[n];
          d = $urandom_range(K - 1, 0);
          for (int k = 0; k < len; k++) begin
            in_dest[n][k] = IDW'(d);
            in_data[n][k] = FW'({8'(n), 8'(d), 16'(next_seq[n][d])});
            next_seq[n][d]++;
          end
          in_cnt[n] = CNTW'(len);
          sent[n] += len;
        end
      end

      if (rcvd_total == int'(K * N_FLITS) && !done) begin
        done = 1'b1;
        check(n_lost > 0, "an arbitration was lost");
        check(n_multi > 0, "a pair held several bands");
        check(n_shared > 0, "several pairs shared the bands");
        check(n_fc > 0, "flow control was raised");
        check(n_rot_cycles > 0, "rotary priority was used");
        if (K > M) check(n_sat > 0, "more requests than bands");
        for (int s = 0; s < int'(K); s++)
          for (int d = 0; d < int'(K); d++)
            check(exp_seq[s][d] == next_seq[s][d], $sformatf("pair %0d->%0d complete", s, d));
        $display("traffic K=%0d M=%0d: %0d flits in %0d cycles; lost %0d, multi-band %0d, shared %0d, fc %0d, saturated %0d, rotary cycles %0d",
                 K, M, rcvd_total, cycles, n_lost, n_multi, n_shared, n_fc, n_sat, n_rot_cycles);
        $display("traffic: bands granted in busy cycles %0d of %0d", granted_bands, busy_cycles * int'(M));
      end
    end
  end

endmodule
