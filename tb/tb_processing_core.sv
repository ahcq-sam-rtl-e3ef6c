// tb_processing_core: the lane array with its MSB router.
// Runs random reductions in uniform mode (with a zero point) and in HLUQ
// mode (label widths 1..3) on a 4-lane core and compares every lane's
// multiplier and bit-shift accumulators with sums formed here from the
// HLUQ rule (top n bits zero -> w * 2^-code in the bit-shift lane; otherwise
// code * w in the multiplier lane and w * 1 in the bit-shift lane).
module tb_processing_core;
  import ahcq_pkg::*;
  localparam int L = 4;
  logic clk = 0, rst_n = 0, valid = 0, first = 0, last = 0;
  mm_mode_e mode = MM_UNIFORM;
  logic [1:0] label_bits = 2'd1;
  logic [ZP_W-1:0] azp = '0;
  logic [PE_IN-1:0][ABITS-1:0] ia_word = '0;
  logic [L-1:0][PE_IN-1:0][WBITS-1:0] w_word = '0;
  logic [L-1:0][MACC_W-1:0] mul_acc;
  logic [L-1:0][SACC_W-1:0] sh_acc;
  logic done;
  logic [PE_IN-1:0] beat_log_elems;
  int checks = 0, failures = 0, log_seen = 0;

  processing_core #(.LANES(L)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int r = 0; r < 80; r++) begin
      automatic int nb = $urandom_range(1, 20);
      longint em [L];
      longint es [L];
      mode = (r % 2) ? MM_HLUQ : MM_UNIFORM;
      label_bits = 2'($urandom_range(1, 3));
      azp = 4'($urandom_range(0, 15));
      for (int l = 0; l < L; l++) begin em[l] = 0; es[l] = 0; end
      for (int b = 0; b < nb; b++) begin
        @(negedge clk);
        valid = 1; first = (b == 0); last = (b == nb - 1);
        for (int i = 0; i < PE_IN; i++) ia_word[i] = 4'($urandom_range(0, 15));
        for (int l = 0; l < L; l++) for (int i = 0; i < PE_IN; i++) begin
          automatic int c = int'(ia_word[i]);
          int wv;
          w_word[l][i] = 5'($urandom_range(0, 31));
          wv = int'(signed'(w_word[l][i]));
          if (mode == MM_HLUQ) begin
            if (c < (16 >> label_bits)) es[l] += (longint'(wv) * 65536) >>> c;
            else begin em[l] += c * wv; es[l] += longint'(wv) * 65536; end
          end else em[l] += (c - int'(azp)) * wv;
        end
        #1 log_seen += $countones(beat_log_elems);
      end
      @(negedge clk);
      valid = 0;
      checks++;
      if (!done) begin failures++; $display("FAIL no done"); end
      for (int l = 0; l < L; l++) begin
        checks += 2;
        if (signed'(mul_acc[l]) != MACC_W'(em[l])) begin
          failures++; $display("FAIL r%0d lane %0d mul %0d exp %0d", r, l, signed'(mul_acc[l]), em[l]);
        end
        if (signed'(sh_acc[l]) != SACC_W'(es[l])) begin
          failures++; $display("FAIL r%0d lane %0d shift %0d exp %0d", r, l, signed'(sh_acc[l]), es[l]);
        end
      end
    end
    checks++;
    if (log_seen == 0) begin failures++; $display("FAIL no log-labelled element seen"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
