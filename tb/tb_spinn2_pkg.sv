// tb_spinn2_pkg: checks the sizes and bit positions of the shared packet
// types: 192-bit NoC packet with the 15-bit NoC header on top, 17-bit packet
// header, 32-bit address and 128-bit payload at the bottom; 8+32+128-bit
// SpiNNaker packet; 33-bit CNoC flit.
module tb_spinn2_pkg;
  import spinn2_pkg::*;
  int checks = 0, failures = 0;
  task automatic chk(input bit c, input string m);
    checks++; if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask
  noc_pkt_t p;
  logic [191:0] v;
  sp_pkt_t s;
  initial begin
    chk($bits(noc_pkt_t) == 192, "noc packet 192 bit");
    chk($bits(noc_hdr_t) == 15, "noc header 15 bit");
    chk($bits(cflit_t) == 33, "cflit 33 bit");
    chk($bits(sp_pkt_t) == 168, "spinnaker packet 168 bit");
    p = '0; p.hdr.size = 3'd4; v = p; chk(v[191:189] == 3'd4, "size at top");
    p = '0; p.hdr.c = 1'b1; v = p; chk(v[177] == 1'b1, "C bit at 177");
    p = '0; p.hdr.pe = 4'b1000; v = p; chk(v[181] == 1'b1, "PE3 bit at 181");
    p = '0; p.phdr = 17'h1_0000; v = p; chk(v[176] == 1'b1, "packet header at 176:160");
    p = '0; p.addr = 32'h8000_0001; v = p; chk(v[159] && v[128], "address at 159:128");
    p = '0; p.data = 128'h1; v = p; chk(v[0], "payload aligned right");
    s = '0; s.ctrl = 8'h40; chk(s.ctrl[7:6] == SP_C2C, "C2C type code");
    chk(DNOC_PORTS == 9 && CNOC_PORTS == 6, "port counts");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
