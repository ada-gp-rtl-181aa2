// tb_global_buffer: writes random words to random addresses of the full
// 4096-word buffer, keeps a reference copy, and reads them back, checking
// the one-cycle read latency, simultaneous read and write (old data
// returned) and that rd_data holds when rd_en is low.
module tb_global_buffer;
  import ada_gp_pkg::*;
  localparam int DEPTH = 4096;
  logic clk = 0;
  logic wr_en, rd_en;
  logic [$clog2(DEPTH)-1:0] wr_addr, rd_addr;
  vec_t wr_data, rd_data;
  int checks = 0, failures = 0;

  global_buffer #(.DEPTH(DEPTH)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  vec_t ref_m [int];
  function automatic vec_t rnd();
    vec_t v;
    for (int i = 0; i < VEC; i++) v[i] = data_t'($urandom);
    return v;
  endfunction

  initial begin
    vec_t hold;
    int a;
    wr_en = 0; rd_en = 0; wr_addr = 0; rd_addr = 0; wr_data = '0;
    for (int i = 0; i < 600; i++) begin
      @(negedge clk);
      wr_en = 1; wr_addr = $urandom; wr_data = rnd();
      ref_m[int'(wr_addr)] = wr_data;
    end
    @(negedge clk); wr_en = 0;
    foreach (ref_m[k]) begin
      @(negedge clk);
      rd_en = 1; rd_addr = k[$clog2(DEPTH)-1:0];
      @(posedge clk); #1;
      checks++;
      if (rd_data !== ref_m[k]) failures++;
    end
    // read and write the same address in one cycle: old data
    @(negedge clk);
    a = 77;
    rd_en = 1; rd_addr = 12'(a); wr_en = 1; wr_addr = 12'(a); wr_data = rnd();
    hold = ref_m.exists(a) ? ref_m[a] : rd_data;
    if (!ref_m.exists(a)) begin
      // make the address known first
      @(negedge clk); rd_en = 0; wr_en = 1; wr_addr = 12'(a); wr_data = rnd(); hold = wr_data;
      @(negedge clk); rd_en = 1; rd_addr = 12'(a); wr_en = 1; wr_data = rnd();
    end
    ref_m[a] = wr_data;
    @(posedge clk); #1;
    checks++;
    if (rd_data !== hold) failures++;
    // hold when rd_en is low
    @(negedge clk); rd_en = 0; wr_en = 0;
    hold = rd_data;
    repeat (3) @(posedge clk);
    #1 checks++;
    if (rd_data !== hold) failures++;
    @(negedge clk); rd_en = 1; rd_addr = 12'(a);
    @(posedge clk); #1 checks++;
    if (rd_data !== ref_m[a]) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
