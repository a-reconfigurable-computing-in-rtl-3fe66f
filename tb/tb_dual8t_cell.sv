// tb_dual8t_cell: checks the dual 8T bitcell against its truth table.
// Every legal stored value (-1, 0, +1) is written and read with RWL low and high; with RWL
// high, +1 must discharge only RBLL, -1 only RBLR and 0 neither; with RWL low nothing
// discharges. Random write/read sequences follow.
module tb_dual8t_cell;
  import cim_pkg::*;

  logic  clk = 1'b0;
  logic  wl, rwl, dis_l, dis_r;
  cell_t wdata, stored;
  int checks = 0, failures = 0;

  dual8t_cell dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (10_000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(int wval, logic in_bit);
    cell_t v;
    logic el, er;
    v = (wval > 0) ? CELL_POS : (wval < 0) ? CELL_NEG : CELL_ZERO;
    @(negedge clk); wl = 1'b1; wdata = v; rwl = 1'b0;
    @(negedge clk); wl = 1'b0; wdata = CELL_ZERO; rwl = in_bit;
    #1;
    el = in_bit && (wval == 1);
    er = in_bit && (wval == -1);
    checks++;
    if (dis_l !== el || dis_r !== er || stored !== v) begin
      failures++;
      $display("w=%0d in=%0b: dis_l=%0b dis_r=%0b (exp %0b %0b)", wval, in_bit, dis_l, dis_r, el, er);
    end
  endtask

  initial begin
    wl = 1'b0; rwl = 1'b0; wdata = CELL_ZERO;
    for (int w = -1; w <= 1; w++) begin
      check(w, 1'b0);
      check(w, 1'b1);
    end
    for (int i = 0; i < 50; i++) check($urandom_range(0, 2) - 1, 1'($urandom_range(0, 1)));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
