// ipv4_mark_field_tb: checks marking-bit extraction and rewrite on random
// IPv4 headers. Each header gets a correct checksum computed from scratch;
// after a rewrite the checksum is recomputed from scratch and must equal the
// incremental one in the output header, the DSCP LSB must hold the new value
// and every other bit must be unchanged. Non-IPv4 headers must be flagged.
module ipv4_mark_field_tb;
  import ampm_pkg::*;
  logic [159:0] hdr = '0, hdr_out;
  logic wr = 0, new_mark = 0, is_ipv4, mark;
  flow_key_t flow;
  int checks = 0, failures = 0;

  ipv4_mark_field dut (.hdr_i(hdr), .wr_i(wr), .new_mark_i(new_mark), .is_ipv4_o(is_ipv4),
    .mark_o(mark), .flow_o(flow), .hdr_o(hdr_out));

  function automatic logic [15:0] csum(logic [159:0] h);
    int unsigned s = 0;
    h[79:64] = '0;
    for (int i = 0; i < 10; i++) s += h[159 - 16 * i -: 16];
    while (s >> 16) s = (s & 32'hffff) + (s >> 16);
    return ~16'(s);
  endfunction

  task automatic check(logic c, string what);
    checks++; if (!c) begin failures++; $display("FAIL %s hdr=%h", what, hdr); end
  endtask

  initial begin
    for (int i = 0; i < 3000; i++) begin
      for (int w = 0; w < 5; w++) hdr[32 * w +: 32] = $urandom;
      hdr[159:152] = (i % 10 == 0) ? {4'($urandom), 4'($urandom)} : 8'h45;
      hdr[79:64] = csum(hdr);
      wr = $urandom % 2; new_mark = $urandom % 2;
      #1;
      check(is_ipv4 == (hdr[159:156] == 4 && hdr[155:152] >= 5), "is_ipv4");
      check(mark == hdr[146], "mark");
      check(flow.src == hdr[63:32] && flow.dst == hdr[31:0] && flow.proto == hdr[87:80], "flow");
      if (wr) begin
        logic [159:0] e; e = hdr; e[146] = new_mark; e[79:64] = csum(e);
        // 0x0000 and 0xffff are the same one's complement value
        check(hdr_out == e || (hdr_out[79:64] == ~e[79:64] && (e[79:64] == 0 || e[79:64] == 16'hffff)
                               && {hdr_out[159:80], hdr_out[63:0]} == {e[159:80], e[63:0]}), "rewrite");
      end else begin
        check(hdr_out == hdr, "pass");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
