// tb_torus_route: random positions on random torus sizes (up to the full
// 32x32x64 machine). For each it checks against an independent model: every
// productive direction shortens the ring distance by one and no other does;
// local delivery when source equals destination; deterministic packets take
// the first productive dimension in x,y,z order on VC1; adaptive packets take
// the productive, free output with the most VC0 tokens, else fall back to the
// escape channel; 'go' only when the chosen output can hold the whole packet,
// plus one more maximum-size packet when the packet enters an escape ring.
module tb_torus_route;
  int checks = 0, failures = 0;
  logic [2:0][7:0] dims, my, dst;
  logic adaptive;
  logic [1:0] src_dim;
  logic [3:0] need;
  logic [5:0] out_rdy, productive;
  logic [5:0][7:0] tok0, tok1;
  logic local_dst, vc, go;
  logic [2:0] dir;
  int n_adapt = 0, n_esc = 0, n_loc = 0;

  torus_route #(.TOKW(8)) dut (.*);

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  function automatic int ringdist(int a, int b, int n);
    int d = (b - a + n) % n;
    return (d <= n - d) ? d : n - d;
  endfunction

  initial begin
    for (int t = 0; t < 20000; t++) begin
      int dist0, best, bdir, det;
      logic [5:0] prod_ref;
      for (int k = 0; k < 3; k++) begin
        int n;
        n = (t % 4 == 0) ? ((k == 2) ? 64 : 32) : $urandom_range(1, 16);
        dims[k] = 8'(n);
        my[k]   = 8'($urandom_range(0, n - 1));
        dst[k]  = (t % 7 == 0) ? my[k] : 8'($urandom_range(0, n - 1));
      end
      adaptive = 1'($urandom);
      src_dim  = 2'($urandom);
      need     = 4'($urandom_range(1, 8));
      out_rdy  = 6'($urandom);
      for (int j = 0; j < 6; j++) begin
        tok0[j] = 8'($urandom_range(0, 32)); tok1[j] = 8'($urandom_range(0, 20));
      end
      #1;
      prod_ref = '0;
      for (int k = 0; k < 3; k++) begin
        int n;
        n = dims[k];
        dist0 = ringdist(my[k], dst[k], n);
        // a hop in + or - direction is productive if it shortens the distance
        if (dist0 > 0) begin
          if (ringdist((my[k] + 1) % n, dst[k], n) < dist0)
            prod_ref[2*k] = 1'b1;
          else
            prod_ref[2*k+1] = 1'b1;
        end
      end
      check(productive == prod_ref, $sformatf("productive %b vs %b", productive, prod_ref));
      check(local_dst == (prod_ref == 0), "local");
      if (prod_ref == 0) begin
        check(dir == 3'd6 && go, "local dir"); n_loc++;
        continue;
      end
      det = 0;
      for (int j = 5; j >= 0; j--) if (prod_ref[j]) det = j;
      best = -1; bdir = -1;
      for (int j = 0; j < 6; j++)
        if (prod_ref[j] && out_rdy[j] && tok0[j] >= need && int'(tok0[j]) > best) begin
          best = tok0[j]; bdir = j;
        end
      if (adaptive && bdir >= 0) begin
        check(dir == 3'(bdir) && vc == 1'b0 && go, "adaptive choice"); n_adapt++;
      end else begin
        check(dir == 3'(det) && vc == 1'b1, "deterministic/escape choice");
        check(go == (out_rdy[det] && int'(tok1[det]) >= int'(need) + ((int'(src_dim) != det / 2) ? 8 : 0)),
              "escape go with bubble rule");
        n_esc++;
      end
    end
    check(n_adapt > 100 && n_esc > 100 && n_loc > 100, "all cases seen");
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
