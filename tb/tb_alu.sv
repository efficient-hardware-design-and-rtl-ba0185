// tb_alu: checks every ALU operation on directed corner values and 400
// random operand pairs against a reference written independently below
// (signed comparison via sign bits, arithmetic shift via a bit loop).
module tb_alu;
  import mips_pkg::*;
  logic [31:0] a, b, y;
  logic [4:0]  shamt;
  alu_op_e     op;
  logic        zero;
  int checks = 0, failures = 0;

  alu dut (.*);

  function automatic logic [31:0] ref_y(input alu_op_e o, input logic [31:0] x, input logic [31:0] z,
                                        input logic [4:0] s);
    logic [31:0] r;
    case (o)
      ALU_ADD:  return x + z;
      ALU_SUB:  return x + ~z + 32'd1;
      ALU_AND:  return x & z;
      ALU_OR:   return x | z;
      ALU_XOR:  return (x | z) & ~(x & z);
      ALU_NOR:  return ~x & ~z;
      ALU_SLT:  return (x[31] != z[31]) ? {31'd0, x[31]} : {31'd0, x < z};
      ALU_SLTU: return {31'd0, x < z};
      ALU_SLL:  begin r = z; repeat (s) r = {r[30:0], 1'b0}; return r; end
      ALU_SRL:  begin r = z; repeat (s) r = {1'b0, r[31:1]}; return r; end
      ALU_SRA:  begin r = z; repeat (s) r = {r[31], r[31:1]}; return r; end
      ALU_LUI:  return z * 32'h10000;
      default:  return 32'hx;
    endcase
  endfunction

  task automatic try(input alu_op_e o, input logic [31:0] x, input logic [31:0] z, input logic [4:0] s);
    logic [31:0] e;
    op = o; a = x; b = z; shamt = s;
    #1;
    e = ref_y(o, x, z, s);
    checks++;
    if (y !== e || zero !== (e == 0)) begin
      failures++;
      $display("FAIL: op=%s a=%h b=%h s=%0d y=%h expected %h", o.name(), x, z, s, y, e);
    end
  endtask

  initial begin
    logic [31:0] corner [6] = '{32'h0, 32'h1, 32'h7fffffff, 32'h80000000, 32'hffffffff, 32'h12345678};
    for (int o = 0; o <= int'(ALU_LUI); o++)
      foreach (corner[i]) foreach (corner[j]) try(alu_op_e'(o), corner[i], corner[j], 5'(i * 7));
    repeat (400) try(alu_op_e'($urandom_range(0, int'(ALU_LUI))), $urandom, $urandom, 5'($urandom));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
