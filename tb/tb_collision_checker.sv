// tb_collision_checker: random inserts, lookups and releases against a
// reference table of open transactions. Checks that a lookup stalls when the
// line is already open or the table is full, that the free tag offered is
// really free, that an insert occupies it, and that releases on either
// release port free their entry.
module tb_collision_checker;
  import culsans_pkg::*;
  localparam int E = 4, NR = 2, TW = 2;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  line_addr_t  lookup;
  logic        stall, insert;
  logic [TW-1:0] free_tag;
  logic [NR-1:0] rel;
  logic [TW-1:0] rel_tag [NR];
  logic [E-1:0]  busy;

  collision_checker #(.Entries(E), .NumRel(NR)) dut (
    .clk_i(clk), .rst_ni(rst_n), .lookup_addr_i(lookup), .stall_o(stall),
    .insert_i(insert), .free_tag_o(free_tag), .release_i(rel),
    .release_tag_i(rel_tag), .busy_o(busy)
  );

  task automatic check(logic cond, string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", msg); end
  endtask

  logic       ref_v [E];
  line_addr_t ref_a [E];
  int n_hit = 0, n_full = 0, n_ins = 0;

  initial begin
    lookup = '0; insert = 0; rel = '0; rel_tag[0] = '0; rel_tag[1] = '0;
    for (int i = 0; i < E; i++) ref_v[i] = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int k = 0; k < 4000; k++) begin
      logic exp_hit, exp_full;
      @(negedge clk);
      // choose inputs
      lookup = line_addr_t'($urandom % 6);
      rel = '0;
      for (int r = 0; r < NR; r++) begin
        rel_tag[r] = TW'($urandom);
        if (ref_v[rel_tag[r]] && ($urandom % 3 == 0) && !(r == 1 && rel[0] && rel_tag[0] == rel_tag[1]))
          rel[r] = 1'b1;
      end
      #1;
      exp_hit = 0; exp_full = 1;
      for (int i = 0; i < E; i++) begin
        if (ref_v[i] && ref_a[i] == lookup) exp_hit = 1;
        if (!ref_v[i]) exp_full = 0;
      end
      check(stall == (exp_hit || exp_full), $sformatf("stall for line %0d (hit %0b full %0b)", lookup, exp_hit, exp_full));
      for (int i = 0; i < E; i++) check(busy[i] == ref_v[i], "busy vector");
      if (!stall) check(!ref_v[free_tag], "free tag is free");
      if (exp_hit) n_hit++;
      if (exp_full && !exp_hit) n_full++;
      insert = !stall && ($urandom % 2);
      @(posedge clk);
      for (int r = 0; r < NR; r++) if (rel[r]) ref_v[rel_tag[r]] = 0;
      if (insert) begin ref_v[free_tag] = 1; ref_a[free_tag] = lookup; n_ins++; end
      #1 insert = 0; rel = '0;
    end
    check(n_hit > 0 && n_full > 0 && n_ins > 0, "hit stall, full stall and insert all seen");
    $display("  hit stalls %0d, full stalls %0d, inserts %0d", n_hit, n_full, n_ins);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
