// tb_vector_ctrl: round controller of one vector (4 MACs, 8 partitions,
// vector parity 1), driven by scripted models of the MACs, the merger, the
// TR bank and the tree adder.
//
// Checked: mac_start follows start; the merger is open only while filling;
// a blocked MAC ends the round (stall) and idle MACs end the last round; the
// seal and clear masks name exactly the used partitions, mapped as
// sign*4 + 2*index + 1; no TR is requested before all used partitions are
// written or while tr_enable is low; add_valid comes with tr_done; round
// results are accumulated with sign; rounds and stalls are counted; a dot
// product with no segments finishes without any TR.
//
// Paper vs own: the fill / seal / TR / add sequence follows the paper;
// ending a round at the first blocked MAC and the accumulation are this
// design's choices. Reduced size by overrides.
module tb_vector_ctrl;
  localparam int NMAC = 4, NPART = 8, GPS = 2;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start = 0, tr_enable = 0;
  logic mac_start;
  logic [NMAC-1:0] mac_busy = '0;
  logic open, merge_clear, blocked = 0;
  logic [1:0][GPS-1:0] used = '0;
  logic [NPART-1:0] seal, clear, written = '0, tr_mask;
  logic tr_req, tr_gnt = 0, tr_done = 0;
  logic add_valid, add_out_valid = 0;
  logic signed [13:0] add_sum = '0;
  logic busy, done;
  logic signed [19:0] result;
  logic [7:0] rounds, stalls;

  vector_ctrl #(.NMAC(NMAC), .NPART(NPART), .VEC(1)) dut (
    .clk, .rst_n, .start, .tr_enable, .mac_start, .mac_busy, .open, .merge_clear,
    .used, .blocked, .seal, .clear, .written, .tr_req, .tr_mask, .tr_gnt, .tr_done,
    .add_valid, .add_out_valid, .add_sum, .busy, .done, .result, .rounds, .stalls);

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s (t=%0t)", what, $time);
    end
  endtask

  function automatic logic [NPART-1:0] gmap(input logic [1:0][GPS-1:0] u);
    logic [NPART-1:0] r;
    r = '0;
    for (int s = 0; s < 2; s++) for (int i = 0; i < GPS; i++) r[s * 4 + 2 * i + 1] = u[s][i];
    return r;
  endfunction

  // one TR round as seen from the bank and adder side
  task automatic serve_round(input logic [1:0][GPS-1:0] u, input int sum);
    logic [NPART-1:0] g;
    g = gmap(u);
    // wait for seal
    for (int t = 0; t < 20 && seal == '0; t++) @(negedge clk);
    chk(seal == g, $sformatf("seal mask %b vs %b", seal, g));
    chk(!open, "merger closed while sealing");
    // partitions become written one by one; no TR request before all are
    for (int k = 0; k < NPART; k++) begin
      @(negedge clk);
      chk(!tr_req || ((written & g) == g), "no TR before all used partitions are written");
      written[k] = g[k];
    end
    tr_enable = 0;
    repeat (3) begin
      @(negedge clk);
      chk(!tr_req, "no TR while tr_enable is low");
    end
    tr_enable = 1;
    #1;
    chk(tr_req && tr_mask == g, "TR request with the used partitions");
    @(negedge clk);
    chk(tr_req, "request held until granted");
    tr_gnt = 1; @(negedge clk); tr_gnt = 0;
    repeat (4) @(negedge clk);
    tr_done = 1;
    #1;
    chk(add_valid, "adder started with tr_done");
    @(negedge clk);
    tr_done = 0;
    repeat (2) @(negedge clk);
    add_out_valid = 1; add_sum = 14'(sum);
    @(negedge clk);
    add_out_valid = 0;
    #1;
    chk(clear == g && merge_clear, "clear mask and merger clear");
    @(negedge clk);
    written = '0;
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int it = 0; it < 6; it++) begin
      logic [1:0][GPS-1:0] u1, u2;
      int s1, s2;
      u1 = '{2'($urandom_range(1, 3)), 2'($urandom)};
      u2 = '{2'($urandom), 2'($urandom_range(1, 3))};
      s1 = $urandom_range(0, 4000) - 2000;
      s2 = $urandom_range(0, 4000) - 2000;
      // round 1 ends with a stall
      start = 1;
      #1 chk(mac_start, "mac_start with start");
      @(negedge clk); start = 0;
      mac_busy = '1;
      chk(open && busy && !done, "filling");
      repeat (3) begin @(negedge clk); chk(open, "still filling"); end
      used = u1;
      blocked = 1; @(negedge clk); blocked = 0;
      serve_round(u1, s1);
      // round 2: MACs finish
      #1 chk(open, "next round reopens the merger");
      used = u2;
      repeat (2) @(negedge clk);
      mac_busy = '0;
      @(negedge clk);
      serve_round(u2, s2);
      used = '0;
      @(negedge clk);
      chk(done && !busy, "dot product done");
      chk(int'(result) == s1 + s2, $sformatf("result %0d vs %0d", result, s1 + s2));
      chk(rounds == 2 && stalls == 1, "two rounds, one stall");
    end
    // a dot product whose MACs emit nothing
    start = 1; @(negedge clk); start = 0;
    for (int t = 0; t < 8; t++) begin
      chk(!tr_req && seal == '0, "no TR for an empty dot product");
      @(negedge clk);
    end
    chk(done && result == 0 && rounds == 0, "empty dot product gives 0");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
