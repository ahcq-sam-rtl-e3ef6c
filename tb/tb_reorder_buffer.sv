// tb_reorder_buffer: row capture and reordered read-out.
// Loads a random permutation as the channel-index table, captures random rows
// for each group, then reads every (lane, group) and checks the accumulators,
// the destination address perm[tile_base + lane], the group tag and the
// one-cycle read latency.
module tb_reorder_buffer;
  import ahcq_pkg::*;
  localparam int L = 8, MAXCH = 64;
  logic clk = 0, rst_n = 0;
  logic cap_valid = 0;
  logic [1:0] cap_g = '0;
  logic [L-1:0][MACC_W-1:0] cap_mul = '0;
  logic [L-1:0][SACC_W-1:0] cap_sh = '0;
  logic perm_we = 0;
  logic [CH_W-1:0] perm_addr = '0, perm_data = '0;
  logic rd_en = 0;
  logic [2:0] rd_lane = '0;
  logic [1:0] rd_g = '0;
  logic rd_first_in = 0, rd_last_in = 0;
  logic [CH_W-1:0] tile_base = '0;
  logic rd_valid;
  logic signed [MACC_W-1:0] rd_mul;
  logic signed [SACC_W-1:0] rd_sh;
  logic [CH_W-1:0] rd_dest;
  logic [1:0] rd_gout;
  logic rd_first, rd_last;
  int checks = 0, failures = 0;
  int perm [MAXCH];
  logic [L-1:0][MACC_W-1:0] mrow [NGROUPS];
  logic [L-1:0][SACC_W-1:0] srow [NGROUPS];

  reorder_buffer #(.LANES(L), .MAXCH(MAXCH)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input longint got, exp, input string what);
    checks++;
    if (got != exp) begin failures++; $display("FAIL %s: got %0d expected %0d", what, got, exp); end
  endtask

  initial begin
    for (int i = 0; i < MAXCH; i++) perm[i] = i;
    for (int i = MAXCH - 1; i > 0; i--) begin
      automatic int j = $urandom_range(0, i);
      automatic int t = perm[i]; perm[i] = perm[j]; perm[j] = t;
    end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < MAXCH; i++) begin
      @(negedge clk); perm_we = 1; perm_addr = CH_W'(i); perm_data = CH_W'(perm[i]);
    end
    @(negedge clk); perm_we = 0;
    for (int t = 0; t < 3; t++) begin
      tile_base = CH_W'(t * 16 + 3);
      for (int g = 0; g < NGROUPS; g++) begin
        for (int l = 0; l < L; l++) begin
          mrow[g][l] = MACC_W'($urandom);
          srow[g][l] = {8'($urandom), 32'($urandom)};
        end
        @(negedge clk); cap_valid = 1; cap_g = 2'(g); cap_mul = mrow[g]; cap_sh = srow[g];
      end
      @(negedge clk); cap_valid = 0;
      for (int l = 0; l < L; l++) for (int g = 0; g < NGROUPS; g++) begin
        @(negedge clk);
        rd_en = 1; rd_lane = 3'(l); rd_g = 2'(g); rd_first_in = (g == 0); rd_last_in = (g == NGROUPS - 1);
        @(negedge clk);
        rd_en = 0;
        chk(rd_valid, 1, "rd_valid");
        chk(rd_mul, signed'(mrow[g][l]), "mul");
        chk(rd_sh, signed'(srow[g][l]), "shift");
        chk(rd_dest, perm[int'(tile_base) + l], "destination");
        chk(rd_gout, g, "group tag");
        chk(rd_first, g == 0, "first");
        chk(rd_last, g == NGROUPS - 1, "last");
        @(negedge clk);
        chk(rd_valid, 0, "rd_valid low");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
