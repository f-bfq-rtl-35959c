// tb_fbfq_bit_slicer: random Q2_K, Q3_K and Q8_K super-blocks; for every
// block index the sliced fields must equal those of the reference
// dequantisation (whole super-block decoded to integers, Q3_K scales unpacked
// with the 32-bit mask method), and the super-block scales the stored ones.
module tb_fbfq_bit_slicer;
  import fbfq_pkg::*;
  import fbfq_tb_pkg::*;
  logic [MAX_SB_BYTES-1:0][7:0] sb;
  sbkind_e kind;
  logic [3:0] blk;
  w_row_t wrow;
  i_row_t irow;
  logic [15:0] sb_scale, sb_min;
  logic [31:0] i_scale;
  int checks = 0, failures = 0;

  fbfq_bit_slicer dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic load(input sb_t s);
    for (int i = 0; i < MAX_SB_BYTES; i++) sb[i] = s[i];
  endtask

  initial begin
    sb_t s;
    for (int t = 0; t < 30; t++) begin
      for (int k = 0; k < 3; k++) begin
        kind = sbkind_e'(k);
        s = (k == 0) ? gen_q2() : (k == 1) ? gen_q3() : gen_q8();
        load(s);
        for (int b = 0; b < 16; b++) begin
          blk = 4'(b);
          #1;
          checks++;
          if (k < 2) begin
            w_row_t r;
            r = ref_w_row(s, k == 1, b);
            if (wrow !== r) begin
              failures++;
              $display("kind %0d blk %0d: wrow %h expected %h", k, b, wrow, r);
            end
          end else begin
            i_row_t r;
            r = ref_i_row(s, b);
            if (irow !== r) begin
              failures++;
              $display("Q8 blk %0d: irow %h expected %h", b, irow, r);
            end
          end
        end
        checks++;
        case (k)
          0: if (sb_scale != {s[81], s[80]} || sb_min != {s[83], s[82]}) begin failures++; $display("Q2 sb scales"); end
          1: if (sb_scale != {s[109], s[108]}) begin failures++; $display("Q3 sb scale"); end
          default: if (i_scale != {s[3], s[2], s[1], s[0]}) begin failures++; $display("Q8 scale"); end
        endcase
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
