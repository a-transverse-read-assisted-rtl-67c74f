// tb_segment_merger: asynchronous write-in distribution.
//
// Four MAC models (8-bit segments, 5 segments per queue, 2 groups per sign)
// offer random numbers of segments with random signs and random gaps. Every
// cycle the testbench checks, against its own model: which MAC is granted
// (round-robin from the last grant, skipping MACs whose sign half is full),
// that the pushed segment and sign are that MAC's head segment, the group
// index (queues filled in order, D segments each, spilling across MACs), the
// used bitmap, the full flags, the blocked flag, and that nothing is granted
// while open is low. A clear between rounds restarts the allocation.
//
// Paper vs own: first-come-first-served filling of queues follows the
// paper; round-robin order and the per-sign halves are this design's choices
// and are checked as such. Runs at reduced size with parameter overrides.
module tb_segment_merger;
  localparam int NMAC = 4, P = 8, D = 5, GPS = 2;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic                    open = 0, clear = 0;
  logic [NMAC-1:0]         mac_valid;
  logic [NMAC-1:0][P-1:0]  mac_seg;
  logic [NMAC-1:0]         mac_neg;
  logic [NMAC-1:0]         mac_ready;
  logic                    push_valid, push_neg, blocked;
  logic [0:0]              push_idx;
  logic [P-1:0]            push_seg;
  logic [1:0][GPS-1:0]     used;
  logic [1:0]              full;

  segment_merger #(.NMAC(NMAC), .P(P), .D(D), .GPS(GPS)) dut (
    .clk, .rst_n, .open, .clear, .mac_valid, .mac_seg, .mac_neg, .mac_ready,
    .push_valid, .push_neg, .push_idx, .push_seg, .used, .full, .blocked);

  logic [P-1:0] q[NMAC][$];
  bit           sgn[NMAC];
  bit           gap[NMAC];
  int           n_s[2];
  int           ptr;
  int           pushes;
  int           blocked_seen;

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s (t=%0t)", what, $time);
    end
  endtask

  always_comb
    for (int i = 0; i < NMAC; i++) begin
      mac_valid[i] = (q[i].size() > 0) && !gap[i];
      mac_seg[i]   = (q[i].size() > 0) ? q[i][0] : '0;
      mac_neg[i]   = sgn[i];
    end

  task automatic step_check();
    int exp_i;
    bit exp_blk;
    bit exp_full[2];
    #1;
    exp_full[0] = (n_s[0] == GPS * D);
    exp_full[1] = (n_s[1] == GPS * D);
    exp_i = -1;
    exp_blk = 0;
    for (int k = 0; k < NMAC; k++) begin
      int i;
      i = (ptr + k) % NMAC;
      if (mac_valid[i] && exp_full[sgn[i]]) exp_blk = open;
      if (exp_i < 0 && mac_valid[i] && !exp_full[sgn[i]]) exp_i = i;
    end
    if (!open) exp_i = -1;
    chk(full[0] == exp_full[0] && full[1] == exp_full[1], "full flags");
    chk(blocked == exp_blk, "blocked flag");
    if (exp_blk) blocked_seen++;
    if (exp_i < 0) chk(mac_ready == '0 && !push_valid, "no grant");
    else begin
      int s;
      s = sgn[exp_i];
      chk(mac_ready == NMAC'(1 << exp_i), $sformatf("grant to MAC %0d", exp_i));
      chk(push_valid && push_seg == q[exp_i][0] && push_neg == sgn[exp_i], "pushed segment");
      chk(int'(push_idx) == n_s[s] / D, $sformatf("group index sign %0d n=%0d got %0d", s, n_s[s], push_idx));
    end
    @(posedge clk);
    #1;
    if (exp_i >= 0) begin
      void'(q[exp_i].pop_front());
      n_s[sgn[exp_i]]++;
      ptr = (exp_i + 1) % NMAC;
      pushes++;
    end
    for (int s = 0; s < 2; s++)
      for (int g = 0; g < GPS; g++)
        chk(used[s][g] == (n_s[s] > g * D), "used bitmap");
    @(negedge clk);
    for (int i = 0; i < NMAC; i++) gap[i] = ($urandom_range(0, 3) == 0);
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int round = 0; round < 30; round++) begin
      for (int i = 0; i < NMAC; i++) begin
        int n;
        q[i].delete();
        n = $urandom_range(0, 5);
        for (int k = 0; k < n; k++) q[i].push_back(P'($urandom));
        sgn[i] = 1'($urandom);
        gap[i] = 0;
      end
      n_s = '{0, 0};
      ptr = 0;
      clear = 1; @(negedge clk); clear = 0;
      open = 0;
      step_check();                      // closed: nothing may move
      open = 1;
      for (int c = 0; c < 40; c++) step_check();
    end
    chk(blocked_seen > 0, "a full sign half blocked a MAC at least once");
    chk(pushes > 100, "enough segments moved");
    $display("blocked cycles %0d, pushes %0d", blocked_seen, pushes);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
