// Testbench for popcount_bucket_encoder: all 256 byte values through the
// approximate encoder (k = 4) and the exact one (k = 9). Expected bucket
// ids come from a bit-by-bit count and the bucket table {0,1,2}->0,
// {3,4}->1, {5,6}->2, {7,8}->3; the values from the architecture example
// (0x07, 0x00, 0x7F, 0x3F, 0x0F, 0x1F -> 1 0 3 2 1 2) are checked too.
module tb_popcount_bucket_encoder;
  int checks = 0, failures = 0;
  logic [7:0] value;
  logic [1:0] bucket;
  logic [3:0] bucket_acc;

  popcount_bucket_encoder dut (.value(value), .bucket(bucket));
  popcount_bucket_encoder #(.W(8), .K(9)) dut_acc (.value(value), .bucket(bucket_acc));

  function automatic int ref_bucket(int pc);
    case (pc)
      0, 1, 2: return 0;
      3, 4:    return 1;
      5, 6:    return 2;
      default: return 3;
    endcase
  endfunction

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    byte unsigned ex_val[6] = '{8'h07, 8'h00, 8'h7F, 8'h3F, 8'h0F, 8'h1F};
    int           ex_bkt[6] = '{1, 0, 3, 2, 1, 2};
    for (int v = 0; v < 256; v++) begin
      automatic int pc = 0;
      value = 8'(v);
      for (int b = 0; b < 8; b++) pc += v[b];
      #1;
      checks++;
      if (int'(bucket) != ref_bucket(pc)) begin
        failures++;
        $display("FAIL value=%02h bucket=%0d exp=%0d", v, bucket, ref_bucket(pc));
      end
      checks++;
      if (int'(bucket_acc) != pc) begin
        failures++;
        $display("FAIL exact value=%02h bucket=%0d exp=%0d", v, bucket_acc, pc);
      end
    end
    for (int i = 0; i < 6; i++) begin
      value = ex_val[i];
      #1;
      checks++;
      if (int'(bucket) != ex_bkt[i]) begin
        failures++;
        $display("FAIL example %02h -> %0d", ex_val[i], bucket);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
