// tb_const_ram - writes every constant of a small table with random values,
// reads them back on two ports at once, and checks that writes and reads
// outside the table are ignored or return zero.
module tb_const_ram;
  import tf_pkg::*;
  localparam int DEPTH = 10, WORDS = 5;
  logic clk = 0, we = 0;
  logic [SET_W-1:0] wset, raddr [2];
  logic [5:0] widx;
  word_t wdata;
  word_t rdata [2][WORDS];
  word_t ref_mem [DEPTH][WORDS];
  int checks = 0, failures = 0;

  const_ram #(.DEPTH(DEPTH), .WORDS(WORDS), .N_RD(2)) dut (
    .clk(clk), .we(we), .wset(wset), .widx(widx), .wdata(wdata), .raddr(raddr), .rdata(rdata));

  always #5 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic wr(input int s, input int i, input word_t v);
    @(negedge clk);
    we = 1; wset = SET_W'(s); widx = 6'(i); wdata = v;
    @(negedge clk);
    we = 0;
  endtask

  initial begin
    for (int s = 0; s < DEPTH; s++)
      for (int i = 0; i < WORDS; i++) begin
        ref_mem[s][i] = word_t'($urandom);
        wr(s, i, ref_mem[s][i]);
      end
    // out-of-range writes must not alias onto real entries
    wr(DEPTH, 0, 18'sd1234);
    wr(0, WORDS, 18'sd4321);
    wr(0, 63, 18'sd999);
    for (int n = 0; n < 200; n++) begin
      int a0, a1;
      a0 = $urandom_range(DEPTH - 1); a1 = $urandom_range(DEPTH + 3);
      raddr[0] = SET_W'(a0); raddr[1] = SET_W'(a1);
      #1;
      for (int i = 0; i < WORDS; i++) begin
        checks += 2;
        if (rdata[0][i] !== ref_mem[a0][i]) begin failures++; $display("p0 set %0d idx %0d", a0, i); end
        if (a1 < DEPTH) begin
          if (rdata[1][i] !== ref_mem[a1][i]) begin failures++; $display("p1 set %0d idx %0d", a1, i); end
        end else if (rdata[1][i] !== '0) begin failures++; $display("p1 oob set %0d", a1); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
