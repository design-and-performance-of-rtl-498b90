// tb_coinc3: self-checking test of the 3-adjacent coincidence pipeline.
// Directed patterns (line, L, diagonal chain, pairs, row wrap-around) and
// random sparse patterns are applied; the expected result is computed by
// brute force over all triples of hit pixels (any connected triple) and, for
// the per-pixel map, by counting hit neighbours from the list of hits.
module tb_coinc3;
  localparam int GX = 20, GY = 20, N = GX * GY;
  logic clk = 0, rst_n = 0;
  logic [N-1:0] hits, pattern, coinc_map;
  logic coinc;
  int checks = 0, failures = 0;

  coinc3 #(.GRID_X(GX), .GRID_Y(GY)) dut (.*);

  always #2 clk = ~clk;

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic bit adj(int a, int b);
    int ax = a % GX, ay = a / GX, bx = b % GX, by = b / GX;
    return (a != b) && (ax - bx <= 1) && (bx - ax <= 1) && (ay - by <= 1) && (by - ay <= 1);
  endfunction

  task automatic apply_and_check(logic [N-1:0] h, string name);
    int list[$];
    bit exp_any = 0;
    logic [N-1:0] exp_map = '0;
    for (int i = 0; i < N; i++) if (h[i]) list.push_back(i);
    foreach (list[i]) foreach (list[j]) foreach (list[k])
      if (i < j && j < k) begin
        int e = int'(adj(list[i], list[j])) + int'(adj(list[j], list[k])) + int'(adj(list[i], list[k]));
        if (e >= 2) exp_any = 1;
      end
    foreach (list[i]) begin
      int c = 0;
      foreach (list[j]) if (adj(list[i], list[j])) c++;
      if (c >= 2) exp_map[list[i]] = 1'b1;
    end
    @(negedge clk) hits = h;
    @(posedge clk); @(posedge clk); #1;
    checks += 3;
    if (coinc !== exp_any) begin failures++; $display("FAIL %s coinc=%0b exp=%0b", name, coinc, exp_any); end
    if (coinc_map !== exp_map) begin failures++; $display("FAIL %s map", name); end
    if (pattern !== h) begin failures++; $display("FAIL %s pattern", name); end
  endtask

  function automatic logic [N-1:0] px(int x, int y);
    return (N)'(1) << (y * GX + x);
  endfunction

  initial begin
    int n_pos = 0;
    hits = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    apply_and_check(px(5,5) | px(6,5) | px(7,5), "line");
    apply_and_check(px(5,5) | px(6,5) | px(6,6), "L");
    apply_and_check(px(2,2) | px(3,3) | px(4,4), "diagonal");
    apply_and_check(px(2,2) | px(3,3), "pair");
    apply_and_check(px(2,2) | px(4,4) | px(6,6), "gaps");
    apply_and_check(px(19,4) | px(0,5) | px(1,5), "no wrap");
    apply_and_check(px(19,19) | px(18,18) | px(19,18), "corner");
    apply_and_check(px(0,0) | px(2,0) | px(1,1), "V");
    apply_and_check('0, "empty");
    for (int t = 0; t < 400; t++) begin
      logic [N-1:0] h;
      int nh, cx, cy, x, y;
      h  = '0;
      nh = 2 + int'($urandom % 8);
      cx = int'($urandom % GX);
      cy = int'($urandom % GY);
      for (int i = 0; i < nh; i++) begin
        x = cx + int'($urandom % 5) - 2;
        y = cy + int'($urandom % 5) - 2;
        if (x >= 0 && x < GX && y >= 0 && y < GY) h |= px(x, y);
      end
      apply_and_check(h, "random");
      if (coinc) n_pos++;
    end
    checks++;
    if (n_pos < 20) begin failures++; $display("FAIL too few positive random cases %0d", n_pos); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
