// tb_lane_ram: the banked on-chip buffer. Writes random words into random
// (row, lane) slots of a 4-lane, 8-bit, 37-row instance and a 1-lane 20-bit
// instance, compares the combinational full-row read with a shadow copy
// after every write, and checks that rows beyond DEPTH read as zero.
module tb_lane_ram;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic we4 = 0, we1 = 0;
  logic [1:0] wl4 = 0;
  logic [5:0] wa4 = 0, ra4 = 0;
  logic [7:0] wd4 = 0;
  logic [31:0] rd4;
  logic [6:0] wa1 = 0, ra1 = 0;
  logic [19:0] wd1 = 0, rd1;
  logic [7:0] sh4 [37][4];
  logic [19:0] sh1 [100];

  lane_ram #(.LANES(4), .DW(8), .DEPTH(37)) u4 (.clk, .we(we4), .wlane(wl4), .waddr(wa4), .wdata(wd4), .raddr(ra4), .rdata(rd4));
  lane_ram #(.LANES(1), .DW(20), .DEPTH(100)) u1 (.clk, .we(we1), .wlane(1'b0), .waddr(wa1), .wdata(wd1), .raddr(ra1), .rdata(rd1));

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // initialise every word so nothing undefined is ever compared
    for (int r = 0; r < 37; r++) for (int l = 0; l < 4; l++) begin
      @(negedge clk); we4 = 1; wa4 = 6'(r); wl4 = 2'(l); wd4 = 0; sh4[r][l] = 0;
    end
    for (int r = 0; r < 100; r++) begin
      @(negedge clk); we1 = 1; wa1 = 7'(r); wd1 = 0; sh1[r] = 0; we4 = 0;
    end
    @(negedge clk); we1 = 0;
    for (int n = 0; n < 500; n++) begin
      int r, l, r1;
      r = $urandom_range(0, 36); l = $urandom_range(0, 3); r1 = $urandom_range(0, 99);
      @(negedge clk);
      we4 = 1; wa4 = 6'(r); wl4 = 2'(l); wd4 = 8'($urandom()); sh4[r][l] = wd4;
      we1 = 1; wa1 = 7'(r1); wd1 = 20'($urandom()); sh1[r1] = wd1;
      @(negedge clk);
      we4 = 0; we1 = 0;
      ra4 = 6'(r); ra1 = 7'(r1);
      #1;
      checks++;
      if (rd4 !== {sh4[r][3], sh4[r][2], sh4[r][1], sh4[r][0]}) begin failures++; $display("row %0d = %h", r, rd4); end
      checks++;
      if (rd1 !== sh1[r1]) begin failures++; $display("word %0d = %h", r1, rd1); end
      ra4 = 6'($urandom_range(0, 36));
      #1;
      checks++;
      if (rd4 !== {sh4[ra4][3], sh4[ra4][2], sh4[ra4][1], sh4[ra4][0]}) begin failures++; $display("row %0d mismatch", ra4); end
    end
    for (int r = 37; r < 64; r++) begin
      ra4 = 6'(r); #1;
      checks++;
      if (rd4 !== '0) begin failures++; $display("row %0d beyond depth = %h", r, rd4); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
