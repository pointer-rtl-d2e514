// tb_scheduler -- the worked example of the architecture: seven layer-1
// points, layer-2 centres P1, P3, P5 with receptive fields {1,4,7},
// {2,3,6}, {4,5,7}. With the last-layer order [1,3,5] the token sequence must
// be E1 E4 E7 E'1 E2 E3 E6 E'3 E5 E'5 (shared E4, E7 issued once); with the
// order [1,5,3] it must be E1 E4 E7 E'1 E5 E'5 E2 E3 E6 E'3. Tokens are taken
// under random back-pressure; each token's neighbour list is checked.
module tb_scheduler;
  import pointer_pkg::*;
  logic clk = 0, rst_n = 0, clear = 0, go = 0;
  logic rf_valid = 0, rf_layer = 0, ord_valid = 0;
  idx_t rf_centre, ord_idx;
  logic [K_MAX-1:0][IDX_W-1:0] rf_neigh;
  logic tok_valid, tok_ready, busy, done;
  token_t tok;
  int checks = 0, failures = 0;
  int got_l [$], got_c [$];

  scheduler dut (.clk, .rst_n, .clear, .k(5'd3), .rf_valid, .rf_layer, .rf_centre, .rf_neigh,
    .ord_valid, .ord_idx, .go, .tok_valid, .tok_ready, .tok, .busy, .done);
  always #5 clk = ~clk;

  function automatic logic [K_MAX-1:0][IDX_W-1:0] nl(int a, int b, int c);
    nl = '0; nl[0] = IDX_W'(a); nl[1] = IDX_W'(b); nl[2] = IDX_W'(c);
  endfunction
  // layer-1 receptive field of point p: three input points 10p, 10p+1, 10p+2
  function automatic logic [K_MAX-1:0][IDX_W-1:0] rf1_of(int p);
    return nl(10 * p, 10 * p + 1, 10 * p + 2);
  endfunction

  always_ff @(posedge clk) if (tok_valid && tok_ready) begin
    got_l.push_back(int'(tok.layer));
    got_c.push_back(int'(tok.centre));
    checks++;
    if (tok.layer == 1'b0 && tok.neigh[2:0] != rf1_of(int'(tok.centre))[2:0]) begin
      failures++; $display("FAIL neighbours of E1_%0d", tok.centre);
    end
  end

  task automatic run(int o0, int o1, int o2, int exp_l[10], int exp_c[10]);
    int ord[3];
    ord = '{o0, o1, o2};
    @(negedge clk); clear = 1; @(negedge clk); clear = 0;
    for (int p = 1; p <= 7; p++) begin
      rf_valid = 1; rf_layer = 0; rf_centre = IDX_W'(p); rf_neigh = rf1_of(p); @(negedge clk);
    end
    rf_layer = 1;
    rf_centre = 1; rf_neigh = nl(1, 4, 7); @(negedge clk);
    rf_centre = 3; rf_neigh = nl(2, 3, 6); @(negedge clk);
    rf_centre = 5; rf_neigh = nl(4, 5, 7); @(negedge clk);
    rf_valid = 0;
    for (int i = 0; i < 3; i++) begin ord_valid = 1; ord_idx = IDX_W'(ord[i]); @(negedge clk); end
    ord_valid = 0;
    got_l.delete(); got_c.delete();
    go = 1; @(negedge clk); go = 0;
    while (!done) @(negedge clk);
    checks++;
    if (got_c.size() != 10) begin failures++; $display("FAIL %0d tokens", got_c.size()); end
    for (int i = 0; i < 10 && i < got_c.size(); i++) begin
      checks++;
      if (got_l[i] != exp_l[i] || got_c[i] != exp_c[i]) begin
        failures++;
        $display("FAIL token %0d: layer %0d point %0d, expected layer %0d point %0d", i, got_l[i] + 1, got_c[i], exp_l[i] + 1, exp_c[i]);
      end
    end
  endtask

  always @(negedge clk) tok_ready <= 1'($urandom % 3 != 0);

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    run(1, 3, 5, '{0, 0, 0, 1, 0, 0, 0, 1, 0, 1}, '{1, 4, 7, 1, 2, 3, 6, 3, 5, 5});
    run(1, 5, 3, '{0, 0, 0, 1, 0, 1, 0, 0, 0, 1}, '{1, 4, 7, 1, 5, 5, 2, 3, 6, 3});
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
