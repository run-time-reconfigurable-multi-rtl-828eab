// tb_karatsuba_mult -- Karatsuba-Urdhva multipliers at every width the
// design uses (9, 17, 24, 37, 53) and at the paper's 8/16/32-bit sizes,
// random and corner operands, against the '*' operator.
module tb_karatsuba_mult;
  int checks = 0, failures = 0;

  logic [52:0]  x53, y53;  logic [105:0] p53;
  logic [36:0]  x37, y37;  logic [73:0]  p37;
  logic [31:0]  x32, y32;  logic [63:0]  p32;
  logic [23:0]  x24, y24;  logic [47:0]  p24;
  logic [16:0]  x17, y17;  logic [33:0]  p17;
  logic [15:0]  x16, y16;  logic [31:0]  p16;
  logic [8:0]   x9,  y9;   logic [17:0]  p9;
  logic [7:0]   x8,  y8;   logic [15:0]  p8;

  karatsuba_mult          d53 (.x(x53), .y(y53), .p(p53));
  karatsuba_mult #(.W(37)) d37 (.x(x37), .y(y37), .p(p37));
  karatsuba_mult #(.W(32)) d32 (.x(x32), .y(y32), .p(p32));
  karatsuba_mult #(.W(24)) d24 (.x(x24), .y(y24), .p(p24));
  karatsuba_mult #(.W(17)) d17 (.x(x17), .y(y17), .p(p17));
  karatsuba_mult #(.W(16)) d16 (.x(x16), .y(y16), .p(p16));
  karatsuba_mult #(.W(9))  d9  (.x(x9),  .y(y9),  .p(p9));
  karatsuba_mult #(.W(8))  d8  (.x(x8),  .y(y8),  .p(p8));

  task automatic chk(string w, logic [105:0] got, logic [105:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 10) $display("W=%s got %h expected %h", w, got, exp);
    end
  endtask

  function automatic logic [63:0] r64();
    return {$urandom, $urandom};
  endfunction

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int it = 0; it < 4000; it++) begin
      logic [63:0] u, v;
      u = r64(); v = r64();
      if (it == 0) begin u = '1; v = '1; end
      if (it == 1) begin u = '0; v = '1; end
      if (it == 2) begin u = 64'h5555_5555_5555_5555; v = 64'hAAAA_AAAA_AAAA_AAAA; end
      x53 = u[52:0]; y53 = v[52:0];
      x37 = u[36:0]; y37 = v[36:0];
      x32 = u[31:0]; y32 = v[31:0];
      x24 = u[23:0]; y24 = v[23:0];
      x17 = u[16:0]; y17 = v[16:0];
      x16 = u[15:0]; y16 = v[15:0];
      x9  = u[8:0];  y9  = v[8:0];
      x8  = u[7:0];  y8  = v[7:0];
      #1;
      chk("53", p53, 106'(x53) * 106'(y53));
      chk("37", 106'(p37), 106'(x37) * 106'(y37));
      chk("32", 106'(p32), 106'(x32) * 106'(y32));
      chk("24", 106'(p24), 106'(x24) * 106'(y24));
      chk("17", 106'(p17), 106'(x17) * 106'(y17));
      chk("16", 106'(p16), 106'(x16) * 106'(y16));
      chk("9",  106'(p9),  106'(x9)  * 106'(y9));
      chk("8",  106'(p8),  106'(x8)  * 106'(y8));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
