// tb_gcs_shm_list -- checks the shared memory list lookup against a reference scan.
// Registers random regions (including the two of the paper's example, (0x0A, 8) and
// (0xF0, 32) on one line), removes some, flips lines between held and invalidated, and
// compares hit, line and presence for random and boundary addresses.
`timescale 1ns/1ps
module tb_gcs_shm_list;
  import gcs_pkg::*;
  logic clk = 0, rst_n;
  always #5 clk = ~clk;
  initial begin rst_n = 1'b1; #1 rst_n = 1'b0; end   // a real edge for the asynchronous reset
  logic cfg_we, cfg_valid;
  line_t cfg_line, lk_line;
  logic [$clog2(SHM_MAX)-1:0] cfg_idx;
  logic [ADDR_W-1:0] cfg_base, lk_addr;
  logic [SIZE_W-1:0] cfg_size;
  logic [NUM_LINES-1:0] line_held;
  logic lk_hit, lk_present;
  gcs_shm_list dut (.*);

  int checks = 0, failures = 0;
  logic              rv [NUM_LINES][SHM_MAX];
  logic [ADDR_W-1:0] rb [NUM_LINES][SHM_MAX];
  logic [SIZE_W-1:0] rs [NUM_LINES][SHM_MAX];

  task automatic wr(int l, int i, longint b, int s, logic v);
    @(negedge clk);
    cfg_we = 1; cfg_line = line_t'(l); cfg_idx = i[$clog2(SHM_MAX)-1:0];
    cfg_base = ADDR_W'(b); cfg_size = SIZE_W'(s); cfg_valid = v;
    rv[l][i] = v; rb[l][i] = ADDR_W'(b); rs[l][i] = SIZE_W'(s);
    @(negedge clk);
    cfg_we = 0;
  endtask

  task automatic look(longint a);
    logic e_hit; line_t e_line;
    e_hit = 0; e_line = '0;
    for (int l = 0; l < NUM_LINES && !e_hit; l++)
      for (int i = 0; i < SHM_MAX; i++)
        if (!e_hit && rv[l][i] && ADDR_W'(a) >= rb[l][i] && longint'(a) < longint'(rb[l][i]) + longint'(rs[l][i])) begin
          e_hit = 1; e_line = line_t'(l);
        end
    lk_addr = ADDR_W'(a);
    #1;
    checks++;
    if (lk_hit != e_hit || (e_hit && lk_line != e_line) || lk_present != (e_hit && line_held[e_line])) begin
      failures++;
      $display("addr %h: hit %0d/%0d line %0d/%0d present %0d", a, lk_hit, e_hit, lk_line, e_line, lk_present);
    end
  endtask

  initial begin
    cfg_we = 0; cfg_valid = 0; cfg_line = '0; cfg_idx = '0; cfg_base = '0; cfg_size = '0;
    line_held = '0; lk_addr = '0;
    for (int l = 0; l < NUM_LINES; l++) for (int i = 0; i < SHM_MAX; i++) begin rv[l][i] = 0; rb[l][i] = 0; rs[l][i] = 0; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    // the paper's example: one line protecting (0x0A, 8) and (0xF0, 32)
    wr(0, 0, 'h0A, 8, 1);
    wr(0, 1, 'hF0, 32, 1);
    line_held[0] = 1;
    look('h0A); look('h11); look('h12); look('h09); look('hF0); look('h10F); look('h110);
    line_held[0] = 0;   // invalidation drops both regions at once
    look('h0A); look('hF0);
    checks++; if (lk_present) failures++;
    // random disjoint regions: line l, region i in [0x10000*(l+1) + 0x1000*i, +size)
    for (int l = 1; l < NUM_LINES; l++)
      for (int i = 0; i < SHM_MAX; i++)
        if ($urandom_range(3) != 0) wr(l, i, 'h10000 * (l + 1) + 'h1000 * i, $urandom_range(1, 4095), 1);
    for (int it = 0; it < 4000; it++) begin
      if ($urandom_range(9) == 0) line_held = NUM_LINES'($urandom);
      if ($urandom_range(49) == 0) wr($urandom_range(1, NUM_LINES - 1), $urandom_range(SHM_MAX - 1), 0, 0, 0);
      look(longint'($urandom_range(32'h10000, 32'h10000 * (NUM_LINES + 1))));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
