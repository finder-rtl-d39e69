// tb_fm_index_mem: fills both directions' arrays with random buckets, then
// reads random addresses and checks the bucket one cycle later. Coalesced
// pairs (keep_sa, then from_sa with a deliberately different address) must
// return the latched bucket and count as a sense-amplifier hit, not as an
// array read.
module tb_fm_index_mem;
  localparam int D = 8, AW = 6, BW = 2*D + 128;
  logic clk = 0, rst_n = 0;
  logic wr_en = 0, rd_en = 0, keep_sa = 0, from_sa = 0;
  logic [AW-1:0] wr_addr = '0, rd_addr = '0;
  logic [BW-1:0] wr_data = '0, bucket;
  logic array_read, sa_hit;
  logic [BW-1:0] ref_mem [2**AW];
  int checks = 0, failures = 0, reads = 0, hits = 0;

  always #5 clk = ~clk;
  fm_index_mem #(.D(D), .AW(AW)) dut (.*);

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    if (array_read) reads++;
    if (sa_hit) hits++;
  end

  initial begin
    logic [BW-1:0] last;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int a = 0; a < 2**AW; a++) begin
      @(negedge clk);
      wr_en = 1; wr_addr = AW'(a);
      wr_data = {$urandom(), $urandom(), $urandom(), $urandom(), $urandom()};
      ref_mem[a] = wr_data;
    end
    @(negedge clk) wr_en = 0;
    for (int k = 0; k < 1000; k++) begin
      int a;
      bit coal;
      a = $urandom_range(2**AW - 1);
      coal = ($urandom_range(2) == 0);
      @(negedge clk) begin rd_en = 1; rd_addr = AW'(a); keep_sa = coal; from_sa = 0; end
      @(negedge clk) begin
        checks++;
        if (bucket !== ref_mem[a]) begin failures++; $display("FAIL read %0d", a); end
        last = bucket;
        if (coal) begin
          rd_addr = rd_addr ^ AW'(1);   // a from_sa request ignores its address
          keep_sa = 0; from_sa = 1;
        end else begin
          rd_en = 0;
        end
      end
      if (coal) begin
        @(negedge clk) begin
          checks++;
          if (bucket !== last) begin failures++; $display("FAIL SA reuse"); end
          rd_en = 0; from_sa = 0;
        end
      end
    end
    @(negedge clk);
    checks++;
    if (reads != 1000 || hits == 0 || reads + hits < 1100) begin
      failures++;
      $display("FAIL counts reads=%0d hits=%0d", reads, hits);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
