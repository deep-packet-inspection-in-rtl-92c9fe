// Self-checking testbench for packet_buffer.
//
// A small buffer (K = 4 rows of 8 bits, 16 words) is written with random words and
// metadata while a shadow copy is kept in the testbench. Every cycle each row port,
// the metadata port and the word port read random addresses; the values are
// compared with the shadow copy (only addresses already written are checked).
// Words written in a cycle must be readable in the next one.
module tb_packet_buffer;
  localparam int K = 4, NB = 8, DEPTH = 16, MW = 4, AW = 4;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  logic              wr_en;
  logic [AW-1:0]     wr_addr;
  logic [K*NB-1:0]   wr_data;
  logic [MW-1:0]     wr_meta;
  logic [AW-1:0]     row_addr [K];
  logic [NB-1:0]     row_data [K];
  logic [AW-1:0]     meta_addr, rd_addr;
  logic [MW-1:0]     meta_data, rd_meta;
  logic [K*NB-1:0]   rd_data;

  packet_buffer #(.K(K), .NB(NB), .DEPTH(DEPTH), .META_W(MW)) dut (.*);

  logic [K*NB-1:0] sh_data [DEPTH];
  logic [MW-1:0]   sh_meta [DEPTH];
  bit              sh_ok   [DEPTH];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin
    foreach (sh_ok[i]) sh_ok[i] = 0;
    wr_en = 0; wr_addr = 0; wr_data = 0; wr_meta = 0;
    foreach (row_addr[i]) row_addr[i] = 0;
    meta_addr = 0; rd_addr = 0;
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk);
      // check reads of the previous cycle's addresses
      for (int r = 0; r < K; r++)
        if (sh_ok[row_addr[r]])
          check(row_data[r] == sh_data[row_addr[r]][r*NB +: NB],
                $sformatf("row %0d addr %0d", r, row_addr[r]));
      if (sh_ok[meta_addr]) check(meta_data == sh_meta[meta_addr], "meta port");
      if (sh_ok[rd_addr]) begin
        check(rd_data == sh_data[rd_addr], "word port data");
        check(rd_meta == sh_meta[rd_addr], "word port meta");
      end
      // new random stimulus
      wr_en   = 1'($urandom);
      wr_addr = AW'($urandom);
      wr_data = $urandom;
      wr_meta = MW'($urandom);
      if (wr_en) begin
        sh_data[wr_addr] = wr_data;
        sh_meta[wr_addr] = wr_meta;
        sh_ok[wr_addr]   = 1;
      end
      @(posedge clk); #1;
      for (int r = 0; r < K; r++) row_addr[r] = AW'($urandom);
      meta_addr = AW'($urandom);
      rd_addr   = (n % 3 == 0) ? wr_addr : AW'($urandom);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
