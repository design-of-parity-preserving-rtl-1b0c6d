// tb_alu_ref_pkg: reference model of the ALU function table, written from
// the table itself (A + 1, A - B, A - 1, ...) rather than from the adder
// structure, for use by the testbenches. Widths up to 32 bits.
package tb_alu_ref_pkg;

  // Result of the arithmetic operation picked by {s1, s0, cin} on N-bit
  // operands, modulo 2**N, with the carry out the ALU's adder must give.
  function automatic void arith_ref(input int unsigned n, input longint unsigned a, b,
                                    input logic s1, s0, cin,
                                    output longint unsigned f, output logic cout);
    longint unsigned m;
    m = (64'd1 << n) - 1;
    case ({s1, s0, cin})
      3'b000: begin f = a;         cout = 1'b0;         end  // transfer A
      3'b001: begin f = a + 1;     cout = (a == m);     end  // increment A
      3'b010: begin f = a + b;     cout = (a + b) > m;  end  // add
      3'b011: begin f = a + b + 1; cout = (a + b + 1) > m; end  // add with carry
      3'b100: begin f = a - b - 1; cout = (a > b);      end  // subtract with borrow
      3'b101: begin f = a - b;     cout = (a >= b);     end  // subtract
      3'b110: begin f = a - 1;     cout = (a != 0);     end  // decrement A
      default: begin f = a;        cout = 1'b1;         end  // transfer A
    endcase
    f &= m;
  endfunction

  // Result of the logic operation picked by {s1, s0}.
  function automatic longint unsigned logic_ref(input int unsigned n, input longint unsigned a, b,
                                                input logic s1, s0);
    longint unsigned m;
    m = (64'd1 << n) - 1;
    case ({s1, s0})
      2'b00:   return (a | b) & m;
      2'b01:   return (a ^ b) & m;
      2'b10:   return (a & b) & m;
      default: return (~a) & m;
    endcase
  endfunction

endpackage
