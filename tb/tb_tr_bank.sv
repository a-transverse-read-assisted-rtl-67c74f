// tb_tr_bank: TR bank model (8 tracks, 8 partitions, 5 data domains).
//
// Each iteration both vectors write random segments into random partitions
// of their own parity, one segment per cycle per vector, sealing each
// partition right after its last segment. Checked: a partition is written
// exactly 2 + D*(WRITE_CYC+SHIFT_CYC) = 22 cycles after its first segment;
// the TR count of every part equals the ones written into it (zero padding
// adds none); both vectors requesting TR in the same cycle are granted one
// after the other, the second in the slot right after the first; tr_done
// follows the grant by TR_CYC = 5 cycles; clearing and rewriting a partition
// replaces its old contents.
//
// Paper vs own: the 2-cycle write, 2-cycle shift, 5-cycle TR and the
// parity interleaving follow the paper; the 2-cycle queue start and the
// request/grant handshake are this design's. Reduced size by overrides.
module tb_tr_bank;
  localparam int P = 8, D = 5, NPART = 8;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int cycle = 0;
  always @(posedge clk) cycle++;

  logic [1:0]             push_valid = '0;
  logic [1:0][2:0]        push_grp = '0;
  logic [1:0][P-1:0]      push_seg = '0;
  logic [NPART-1:0]       seal = '0, clear = '0, written;
  logic [1:0]             tr_req = '0, tr_gnt, tr_done;
  logic [1:0][NPART-1:0]  tr_mask = '0;
  logic [NPART-1:0][P-1:0][2:0] cnt;

  tr_bank #(.P(P), .D(D), .NPART(NPART)) dut (
    .clk, .rst_n, .push_valid, .push_grp, .push_seg, .seal, .clear, .written,
    .tr_req, .tr_mask, .tr_gnt, .tr_done, .cnt);

  int exp_cnt[NPART][P];
  int first_push[NPART];
  int wr_at[NPART];
  int last_first = -1;
  int alternations = 0;

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s (cycle %0d)", what, cycle);
    end
  endtask

  // vector v writes its partitions; plan[g] = number of segments
  task automatic feed(input int v, input int plan[NPART]);
    for (int g = v; g < NPART; g += 2) begin
      for (int k = 0; k < plan[g]; k++) begin
        logic [P-1:0] s;
        s = P'($urandom);
        for (int b = 0; b < P; b++) exp_cnt[g][b] += s[b];
        push_valid[v] = 1; push_grp[v] = 3'(g); push_seg[v] = s;
        if (k == 0) first_push[g] = cycle;
        @(negedge clk);
        push_valid[v] = 0;
        if (k == plan[g] - 1) begin
          seal[g] = 1;
          @(negedge clk);
          seal[g] = 0;
        end
      end
    end
  endtask

  always @(negedge clk)
    for (int g = 0; g < NPART; g++)
      if (written[g] && wr_at[g] < 0) wr_at[g] = cycle;

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int it = 0; it < 12; it++) begin
      int plan[NPART];
      logic [1:0][NPART-1:0] m;
      int gcyc[2], dcyc[2];
      m = '0;
      for (int g = 0; g < NPART; g++) begin
        plan[g] = ($urandom_range(0, 2) == 0) ? 0 : $urandom_range(1, D);
        if (it < 2) plan[g] = (g < 4) ? D : 1;
        for (int b = 0; b < P; b++) exp_cnt[g][b] = 0;
        wr_at[g] = -1;
        if (plan[g] > 0) m[g % 2][g] = 1'b1;
      end
      if (m[0] == '0) begin plan[0] = 1; m[0][0] = 1; end
      if (m[1] == '0) begin plan[1] = 1; m[1][1] = 1; end
      fork
        feed(0, plan);
        feed(1, plan);
      join
      // wait until all used partitions are written
      for (int t = 0; t < 200 && ((written & (m[0] | m[1])) != (m[0] | m[1])); t++) @(negedge clk);
      @(negedge clk);
      chk((written & (m[0] | m[1])) == (m[0] | m[1]), "all used partitions written");
      for (int g = 0; g < NPART; g++)
        if (plan[g] > 0) chk(wr_at[g] - first_push[g] == 2 + D * 4,
                             $sformatf("write time of partition %0d: %0d", g, wr_at[g] - first_push[g]));
      // both vectors ask for TR in the same cycle
      tr_mask = m;
      tr_req  = 2'b11;
      gcyc = '{-1, -1};
      dcyc = '{-1, -1};
      for (int t = 0; t < 40 && (dcyc[0] < 0 || dcyc[1] < 0); t++) begin
        for (int v = 0; v < 2; v++) if (gcyc[v] >= 0) tr_req[v] = 1'b0;
        #1;
        for (int v = 0; v < 2; v++) begin
          if (tr_gnt[v]) begin
            chk(tr_gnt[1 - v] == 1'b0, "one TR at a time");
            gcyc[v] = cycle;
          end
          if (tr_done[v]) begin
            dcyc[v] = cycle;
            for (int g = v; g < NPART; g += 2)
              if (m[v][g])
                for (int b = 0; b < P; b++)
                  chk(int'(cnt[g][b]) == exp_cnt[g][b], $sformatf("TR count g%0d b%0d", g, b));
          end
        end
        @(negedge clk);
      end
      chk(gcyc[0] >= 0 && gcyc[1] >= 0 && dcyc[0] >= 0 && dcyc[1] >= 0, "both vectors read");
      for (int v = 0; v < 2; v++) chk(dcyc[v] - gcyc[v] == 5, $sformatf("TR latency %0d", dcyc[v] - gcyc[v]));
      begin
        int first;
        first = (gcyc[0] < gcyc[1]) ? 0 : 1;
        chk(gcyc[0] != gcyc[1], "ping-pong: different slots");
        chk(gcyc[1 - first] - gcyc[first] == 5, "second vector read in the next TR slot");
        alternations++;
        last_first = first;
      end
      tr_req = '0;
      clear = '1; @(negedge clk); clear = '0;
      chk(written == '0, "clear empties partitions");
    end
    chk(alternations > 5, "alternation exercised");
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
