// tb_dcs3d_processing -- random and corner vectors for one 3D-DCS iteration,
// compared with the bit-by-bit reference model.
module tb_dcs3d_processing;
  import hddcs_pkg::*;
  import hddcs_ref_pkg::*;
  int checks = 0, failures = 0;

  word_t in1, in2, in3, p1, p2, p3, o1, o2, o3;
  state_t st, nx;

  dcs3d_processing dut (.in1, .in2, .in3, .out1_prng(p1), .out2_prng(p2), .out3_prng(p3),
                        .out1(o1), .out2(o2), .out3(o3));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 5000; i++) begin
      in1 = $urandom; in2 = $urandom; in3 = $urandom;
      p1 = $urandom; p2 = $urandom; p3 = $urandom;
      case (i)
        0: begin p1 = '0; p2 = '0; p3 = '0; end                 // nothing selected: hold
        1: begin p1 = '1; p2 = '1; p3 = '1; end                 // all selected: F itself
        2: begin in3 = 32'd31; in1 = 32'd63; in2 = 32'd32; p1 = '1; p2 = '1; p3 = '1; end
        default: ;
      endcase
      #1;
      st.x = in1; st.y = in2; st.z = in3;
      nx = ref_step(st, p1, p2, p3);
      checks++;
      if (o1 != nx.x || o2 != nx.y || o3 != nx.z) begin
        failures++;
        $display("vec %0d: got %h %h %h want %h %h %h", i, o1, o2, o3, nx.x, nx.y, nx.z);
      end
      if (i == 0) begin
        checks++;
        if (o1 != in1 || o2 != in2 || o3 != in3) failures++;
      end
      if (i == 2) begin
        // x' = NOT x XOR bit 31, y' = NOT y XOR bit (63 mod 32 = 31), z' = NOT z XOR bit 0
        checks++;
        if (o1 != (~in1 ^ 32'h8000_0000) || o2 != (~in2 ^ 32'h8000_0000) || o3 != (~in3 ^ 32'h1)) begin
          failures++;
          $display("corner: got %h %h %h", o1, o2, o3);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
