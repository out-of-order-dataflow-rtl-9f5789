// lod_tb: checks the leading-ones detector at the two widths the scheduler
// uses (32 and 128) with single-bit, random and empty vectors. The expected
// position is found by a reference scan from the LSB upwards, a different
// method from the one in the block.
module lod_tb;
  int checks = 0, failures = 0;

  logic [31:0]  v32;  logic f32;  logic [4:0] p32;
  logic [127:0] v128; logic f128; logic [6:0] p128;

  lod #(.W(32))  u32  (.vec(v32),  .found(f32),  .pos(p32));
  lod #(.W(128)) u128 (.vec(v128), .found(f128), .pos(p128));

  function automatic int ref_pos(input logic [127:0] v, input int w);
    int r = -1;
    for (int i = 0; i < w; i++) if (v[i]) r = w - 1 - i;  // last hit is the MSB
    return r;
  endfunction

  task automatic check(input int w);
    int r;
    #1;
    if (w == 32) begin
      r = ref_pos({96'b0, v32}, 32);
      checks++;
      if ((r < 0 && f32) || (r >= 0 && (!f32 || int'(p32) != r))) begin
        failures++; $display("FAIL w=32 v=%h found=%0d pos=%0d exp=%0d", v32, f32, p32, r);
      end
    end else begin
      r = ref_pos(v128, 128);
      checks++;
      if ((r < 0 && f128) || (r >= 0 && (!f128 || int'(p128) != r))) begin
        failures++; $display("FAIL w=128 v=%h found=%0d pos=%0d exp=%0d", v128, f128, p128, r);
      end
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    v32 = '0; check(32);
    v128 = '0; check(128);
    for (int i = 0; i < 32; i++) begin v32 = 32'b1 << i; check(32); end
    for (int i = 0; i < 128; i++) begin v128 = 128'b1 << i; check(128); end
    for (int n = 0; n < 300; n++) begin
      v32 = $urandom & $urandom;       // sparse random vectors
      check(32);
      v128 = {$urandom, $urandom, $urandom, $urandom} >> ($urandom % 128);
      check(128);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
