// tb_oselm_bram: checks the single-port RAM: writes land at the clock
// edge, rdata shows the addressed word one cycle later, a read on the cycle
// of a write returns the old word, and random traffic matches a shadow
// array.
module tb_oselm_bram;
  import oselm_pkg::*;
  localparam int DEPTH = 40;
  logic clk = 0;
  int checks = 0, failures = 0;
  fx_t shadow [DEPTH];
  always #5 clk = ~clk;

  oselm_ram_if #(.AW(6)) port ();
  oselm_bram #(.DEPTH(DEPTH)) dut (.clk, .port(port));

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    port.we = 0; port.addr = 0; port.wdata = 0;
    for (int k = 0; k < DEPTH; k++) shadow[k] = '0;
    // fill
    for (int k = 0; k < DEPTH; k++) begin
      @(negedge clk);
      port.addr = 6'(k); port.we = 1; port.wdata = fx_t'(k * 1000 + 7);
      shadow[k] = fx_t'(k * 1000 + 7);
    end
    @(negedge clk); port.we = 0;
    // read back
    for (int k = 0; k < DEPTH; k++) begin
      @(negedge clk); port.addr = 6'(k);
      @(negedge clk);
      checks++;
      if (port.rdata !== shadow[k]) begin failures++; $display("FAIL rd %0d", k); end
    end
    // read-before-write on the same address
    @(negedge clk); port.addr = 6'd3; port.we = 1; port.wdata = fx_t'(-5);
    @(negedge clk); port.we = 0;
    checks++;
    if (port.rdata !== shadow[3]) begin failures++; $display("FAIL read-before-write"); end
    shadow[3] = fx_t'(-5);
    @(negedge clk);
    checks++;
    if (port.rdata !== fx_t'(-5)) begin failures++; $display("FAIL write not stored"); end
    // random traffic
    for (int k = 0; k < 2000; k++) begin
      int ad;
      logic w;
      fx_t v;
      ad = int'($urandom % DEPTH); w = 1'($urandom); v = fx_t'($urandom);
      @(negedge clk);
      port.addr = 6'(ad); port.we = w; port.wdata = v;
      @(negedge clk);
      port.we = 0;
      checks++;
      if (port.rdata !== shadow[ad]) begin failures++; $display("FAIL random rd %0d", ad); end
      if (w) shadow[ad] = v;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
