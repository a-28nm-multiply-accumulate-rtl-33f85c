// tb_share_mux: loads random 12-pixel rows into the 4-way sharing mux and
// steps sel through the groups (in order and at random), checking that each
// registered group holds columns 3g..3g+2 of the loaded row one cycle after
// sel, including when the next row is loaded in the cycle of the last group.
module tb_share_mux;
  logic clk = 0;
  logic              load;
  logic [11:0][11:0] row, row_m;
  logic [1:0]        sel;
  logic [2:0][11:0]  grp;
  int checks = 0, failures = 0;

  share_mux dut (.clk, .load, .row, .sel, .grp);

  always #5 clk = ~clk;

  initial begin
    load = 0; sel = 0;
    for (int r = 0; r < 500; r++) begin
      @(negedge clk);
      load = 1;
      for (int c = 0; c < 12; c++) row[c] = 12'($urandom);
      row_m = row;
      for (int g = 0; g < 4; g++) begin
        automatic int gs = (r % 2) ? g : $urandom_range(3, 0);
        @(negedge clk);
        load = (g == 3);                       // next row arrives with the last group
        for (int c = 0; c < 12; c++) row[c] = 12'($urandom);
        sel = 2'(gs);
        @(posedge clk); #1;
        for (int i = 0; i < 3; i++) begin
          checks++;
          if (grp[i] !== row_m[gs*3 + i]) begin
            failures++;
            if (failures < 10) $display("row %0d group %0d lane %0d: got %h exp %h", r, gs, i, grp[i], row_m[gs*3+i]);
          end
        end
      end
      load = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
