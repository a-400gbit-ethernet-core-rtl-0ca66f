// tb_arp_cache -- self-checking test of the ARP cache: random half-entry writes,
// then reads of every written entry through both read ports, one cycle after the
// index, compared with a model of the table.
module tb_arp_cache;
  logic clk = 0;
  always #1 clk = ~clk;

  logic wr_en, wr_hi;
  logic [7:0] wr_idx, rd_idx_a, rd_idx_b;
  logic [31:0] wr_data;
  logic [47:0] rd_mac_a, rd_mac_b;

  arp_cache #(.ENTRIES(256)) dut (.*);

  int checks = 0, failures = 0;
  logic [47:0] model [256];
  bit          valid [256];

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wr_en = 0; wr_hi = 0; wr_idx = 0; wr_data = 0; rd_idx_a = 0; rd_idx_b = 0;
    // fill every entry, both halves
    for (int i = 0; i < 256; i++)
      for (int h = 0; h < 2; h++) begin
        @(negedge clk);
        wr_en = 1; wr_idx = 8'(i); wr_hi = h[0]; wr_data = $urandom;
        if (h == 0) model[i][31:0] = wr_data; else model[i][47:32] = wr_data[15:0];
      end
    // random rewrites
    for (int n = 0; n < 300; n++) begin
      @(negedge clk);
      wr_en = 1; wr_idx = 8'($urandom); wr_hi = 1'($urandom); wr_data = $urandom;
      if (!wr_hi) model[wr_idx][31:0] = wr_data; else model[wr_idx][47:32] = wr_data[15:0];
    end
    @(negedge clk);
    wr_en = 0;
    for (int i = 0; i < 256; i++) begin
      rd_idx_a = 8'(i); rd_idx_b = 8'(255 - i);
      @(negedge clk);
      checks += 2;
      if (rd_mac_a !== model[i])       begin failures++; $display("port A entry %0d", i); end
      if (rd_mac_b !== model[255 - i]) begin failures++; $display("port B entry %0d", 255 - i); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
