// tb_config_regs -- reset values, then a write to every register decoded
// into the right field of cfg.
module tb_config_regs;
  import pointer_pkg::*;
  logic clk = 0, rst_n = 0, we = 0;
  logic [5:0] addr;
  logic [31:0] data;
  cfg_t cfg;
  int checks = 0, failures = 0;

  config_regs dut (.clk, .rst_n, .wr_en(we), .wr_addr(addr), .wr_data(data), .cfg);
  always #5 clk = ~clk;

  task automatic chk(string what, longint got, longint ex);
    checks++;
    if (got != ex) begin
      failures++;
      $display("FAIL %s got %0d exp %0d", what, got, ex);
    end
  endtask
  task automatic wr(int a, int d);
    @(negedge clk); we = 1; addr = 6'(a); data = d;
    @(negedge clk); we = 0;
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    chk("n_points rst", cfg.n_points, 1024);
    chk("n_c1 rst", cfg.n_c1, 512);
    chk("n_c2 rst", cfg.n_c2, 128);
    chk("k rst", cfg.k, 16);
    chk("len1 rst", cfg.feat_len[1], 128);
    chk("reorder rst", cfg.reorder_en, 1);
    wr(0, 300); wr(1, 100); wr(2, 20); wr(3, 8);
    wr(4, 8); wr(5, 256); wr(6, 512);
    wr(7, 32'h100); wr(8, 32'h2000); wr(9, 32'h30000); wr(10, 32'h400000);
    wr(11, 9); wr(12, 0);
    for (int s = 0; s < 6; s++) wr(16 + s, (s * 3 << 22) | ((64 + s) << 11) | (4 + s));
    wr(40, 32'hffff_ffff);   // unmapped: no effect
    chk("n_points", cfg.n_points, 300);
    chk("n_c1", cfg.n_c1, 100);
    chk("n_c2", cfg.n_c2, 20);
    chk("k", cfg.k, 8);
    chk("len0", cfg.feat_len[0], 8);
    chk("len1", cfg.feat_len[1], 256);
    chk("len2", cfg.feat_len[2], 512);
    chk("coord", cfg.coord_base, 32'h100);
    chk("base0", cfg.feat_base[0], 32'h2000);
    chk("base1", cfg.feat_base[1], 32'h30000);
    chk("base2", cfg.feat_base[2], 32'h400000);
    chk("slot", cfg.slot_shift, 9);
    chk("reorder", cfg.reorder_en, 0);
    for (int s = 0; s < 6; s++) begin
      mlp_cfg_t m;
      m = mlp_cfg_t'(cfg.mlp[s]);
      chk("mlp in", m.in_dim, 4 + s);
      chk("mlp out", m.out_dim, 64 + s);
      chk("mlp ima", m.ima_base, s * 3);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
