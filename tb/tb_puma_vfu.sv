// tb_puma_vfu: checks every operation of the vector functional unit (one
// lane) on random and corner-case Q8.8 operands against a reference computed
// here with saturation, and the ROM row produced for the transcendental ops.
module tb_puma_vfu;
  import puma_pkg::*;
  aluop_e op; word_t a [1], b [1], y [1], rnd; logic [8:0] rom_row [1]; logic is_rom;
  puma_vfu dut (.*);
  int checks = 0, failures = 0;

  function automatic int sat(longint v);
    return (v > 32767) ? 32767 : (v < -32768) ? -32768 : int'(v);
  endfunction

  function automatic int ref_y(aluop_e o, int x, int z, int r);
    case (o)
      AOP_ADD:  return sat(x + z);
      AOP_SUB:  return sat(x - z);
      AOP_MUL:  return sat((longint'(x) * z) >>> 8);
      AOP_DIV:  return (z == 0) ? ((x < 0) ? -32768 : 32767) : sat((longint'(x) * 256) / z);
      AOP_SHL:  return (z < 0) ? (x >>> (-z)) : sat(longint'(x) <<< (z % 32));
      AOP_AND:  return int'(shortint'(x & z));
      AOP_OR:   return int'(shortint'(x | z));
      AOP_INV:  return int'(shortint'(~x));
      AOP_RELU: return (x < 0) ? 0 : x;
      AOP_MIN:  return (x < z) ? x : z;
      AOP_MAX:  return (x > z) ? x : z;
      AOP_RND:  return int'(shortint'(r));
      default:  return x;
    endcase
  endfunction

  initial begin
    for (int t = 0; t < 4000; t++) begin
      int x, z, e, ri;
      op = aluop_e'(t % 16);
      x = int'(shortint'($urandom));
      z = int'(shortint'($urandom));
      if (t % 5 == 0) z = int'($urandom_range(0, 40)) - 20;
      if (t % 7 == 0) z = 0;
      if (t % 11 == 0) x = int'($urandom_range(0, 2047)) - 1024;
      if (op == AOP_SHL) z = int'($urandom_range(0, 30)) - 15;
      a[0] = word_t'(x); b[0] = word_t'(z); rnd = 16'($urandom);
      #1;
      checks++;
      if (op inside {AOP_SIG, AOP_TANH, AOP_LOG, AOP_EXP}) begin
        ri = (op == AOP_LOG) ? (x >>> 5) : (x >>> 5) + 64;
        ri = (ri < 0) ? 0 : (ri > 127) ? 127 : ri;
        ri += 128 * (int'(op) - 12);
        if (!is_rom || int'(rom_row[0]) != ri) begin failures++; $display("rom row op %0d x %0d got %0d exp %0d", op, x, rom_row[0], ri); end
      end else begin
        e = ref_y(op, x, z, int'(rnd));
        if (is_rom || int'($signed(y[0])) != e) begin
          failures++;
          if (failures < 10) $display("op %0d x %0d z %0d got %0d exp %0d", op, x, z, $signed(y[0]), e);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
