// tb_cram_fpc_decomp -- self-checking test of the FPC decompressor.
//
// Random lines of mixed FPC patterns are encoded by the reference encoder
// written bit by bit in this file; every slot whose stream fits 30 bytes is expanded
// and must give the original line back. Streams that fit 15 bytes are also
// expanded from their first 15 bytes only, zero-extended, as a 4-to-1 line
// delivers them. Combinational; outputs sampled 1 ns after the input.
module tb_cram_fpc_decomp;
  import cram_pkg::*;

  // reference encoder: id 5 in 8 bits, then per word a 3-bit prefix and its
  // data, appended bit by bit (LSB first) to a queue; zero words merge into
  // runs of up to 8. Returns the stream length in bits.
  function automatic void push_bits(ref bit q[$], input logic [31:0] v, input int n);
    for (int b = 0; b < n; b++) q.push_back(v[b]);
  endfunction

  function automatic int fpc_ref(input cram_pkg::line_t l, output cram_pkg::slot_t s);
    bit q[$];
    int i;
    push_bits(q, 32'd5, 8);
    i = 0;
    while (i < 16) begin
      logic [31:0] w;
      w = l[32*i +: 32];
      if (w == 0) begin
        int n;
        n = 0;
        while (i + n < 16 && n < 8 && l[32*(i+n) +: 32] == 0) n++;
        push_bits(q, 0, 3); push_bits(q, n - 1, 3);
        i += n;
        continue;
      end
      if ($signed(w) >= -8 && $signed(w) <= 7)               begin push_bits(q, 1, 3); push_bits(q, w, 4); end
      else if ($signed(w) >= -128 && $signed(w) <= 127)      begin push_bits(q, 2, 3); push_bits(q, w, 8); end
      else if (w[31:24] == w[7:0] && w[23:16] == w[7:0] && w[15:8] == w[7:0])
                                                             begin push_bits(q, 6, 3); push_bits(q, w, 8); end
      else if ($signed(w) >= -32768 && $signed(w) <= 32767)  begin push_bits(q, 3, 3); push_bits(q, w, 16); end
      else if (w[15:0] == 0)                                 begin push_bits(q, 4, 3); push_bits(q, w >> 16, 16); end
      else if ($signed(w[31:16]) >= -128 && $signed(w[31:16]) <= 127 &&
               $signed(w[15:0]) >= -128 && $signed(w[15:0]) <= 127)
                                                             begin push_bits(q, 5, 3); push_bits(q, w[7:0], 8); push_bits(q, w[23:16], 8); end
      else                                                   begin push_bits(q, 7, 3); push_bits(q, w, 32); end
      i++;
    end
    s = '0;
    for (int b = 0; b < cram_pkg::SLOT_BITS && b < q.size(); b++) s[b] = q[b];
    return q.size();
  endfunction

  // a word of pattern class c (0 zero .. 6 two signed bytes, 7 random)
  function automatic logic [31:0] fpc_word(input int c);
    logic [31:0] r;
    r = $urandom();
    case (c)
      0: return 0;
      1: return {{28{r[3]}}, r[3:0]};
      2: return {{24{r[7]}}, r[7:0]};
      3: return {4{r[7:0]}};
      4: return {{16{r[15]}}, r[15:0]};
      5: return {r[31:16], 16'h0};
      6: return {{8{r[23]}}, r[23:16], {8{r[7]}}, r[7:0]};
      default: return r;
    endcase
  endfunction

  // a line whose words use classes up to `maxc`, zero words with weight `zw` in 8
  function automatic cram_pkg::line_t fpc_line(input int maxc, input int zw);
    cram_pkg::line_t l;
    for (int i = 0; i < 16; i++)
      l[32*i +: 32] = ($urandom_range(0, 7) < zw) ? 32'h0 : fpc_word($urandom_range(1, maxc));
    return l;
  endfunction

  slot_t slot;
  line_t line;
  int checks = 0, failures = 0;

  cram_fpc_decomp dut (.slot, .line);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures <= 10) $display("FAIL @%0t: %s", $time, what);
    end
  endtask

  task automatic try_line(input line_t l);
    slot_t s;
    int bits;
    bits = fpc_ref(l, s);
    if (bits > 240) return;
    slot = s;
    #1;
    check(line === l, $sformatf("line from 30-byte slot, %0d bits", bits));
    if (bits <= 120) begin
      slot = {120'h0, s[119:0]};
      #1;
      check(line === l, $sformatf("line from 15-byte slot, %0d bits", bits));
    end
  endtask

  initial begin
    slot = '0;
    fork
      begin
        try_line('0);
        try_line({16{32'hFFFF_FFF8}});
        for (int k = 0; k < 16; k++) begin
          line_t l;
          l = '0;
          l[32*k +: 32] = 32'hDEAD_BEEF;
          try_line(l);
        end
        for (int c = 1; c <= 7; c++)
          for (int n = 0; n < 100; n++) try_line(fpc_line(c, 0));
        for (int n = 0; n < 3000; n++) try_line(fpc_line($urandom_range(1, 7), $urandom_range(0, 7)));
        check(checks > 1500, "enough lines fit a slot");
      end
      begin
        #1ms;
        $display("FAIL: watchdog");
        failures++;
      end
    join_any
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
