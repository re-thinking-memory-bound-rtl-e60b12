// tb_pe_alu: random test of the PE ALU against a reference model, including
// predication and dummy-flag propagation (OR of the used operand flags).
//
// Interface: the ALU is purely combinational, so each random vector is checked
// after a 1 ns settle. The dummy-flag OR follows the paper's runahead ALU
// change; the operation set and predication are own choices.
`timescale 1ns/1ps
module tb_pe_alu;
  import cgra_pkg::*;
  op_e op; logic pred_en; word_t p, i1, i2, res;
  int checks = 0, failures = 0;
  pe_alu dut (.*);

  function automatic word_t model(op_e o, logic pe, word_t pp, word_t a, word_t b);
    word_t r;
    unique case (o)
      OP_ADD:   r.v = a.v + b.v;
      OP_SUB:   r.v = a.v - b.v;
      OP_MUL:   r.v = a.v * b.v;
      OP_AND:   r.v = a.v & b.v;
      OP_OR:    r.v = a.v | b.v;
      OP_XOR:   r.v = a.v ^ b.v;
      OP_SHL:   r.v = a.v << b.v[4:0];
      OP_LSHR:  r.v = a.v >> b.v[4:0];
      OP_ASHR:  r.v = $signed(a.v) >>> b.v[4:0];
      OP_CMPEQ: r.v = {31'd0, a.v == b.v};
      OP_CMPLT: r.v = {31'd0, $signed(a.v) < $signed(b.v)};
      OP_MOV:   r.v = a.v;
      default:  r.v = 32'd0;
    endcase
    r.dmy = a.dmy | ((o != OP_MOV) & b.dmy) | (pe & pp.dmy);
    return r;
  endfunction

  initial begin
    word_t e;
    for (int n = 0; n < 20000; n++) begin
      op = op_e'(1 + $urandom % 12);
      pred_en = $urandom % 2;
      p  = '{dmy: ($urandom % 8) == 0, v: $urandom % 2};
      i1 = '{dmy: ($urandom % 8) == 0, v: ($urandom % 4 == 0) ? 32'hFFFF_FFF0 + $urandom % 16 : $urandom};
      i2 = '{dmy: ($urandom % 8) == 0, v: ($urandom % 2) ? $urandom % 40 : $urandom};
      #1;
      e = model(op, pred_en, p, i1, i2);
      checks++;
      if (res !== e) begin
        failures++;
        if (failures < 10) $display("FAIL op=%0d a=%h b=%h got %h exp %h", op, i1, i2, res, e);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #1000000; $display("FAIL: watchdog"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
