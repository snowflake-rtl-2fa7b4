// tb_memory_interconnect: three masters issue random reads and writes through
// the interconnect to the behavioural memory (with random stalls). Each
// master checks that its read responses come back in order with the data it
// expects; the testbench also checks that every master is served (no
// starvation under round-robin arbitration).
module tb_memory_interconnect;
  import snowflake_pkg::*;
  localparam int NM = 3;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  mem_req_t [NM-1:0] req;
  logic [NM-1:0] req_ready;
  mem_rsp_t [NM-1:0] rsp;
  mem_req_t mreq;
  logic mreq_ready;
  mem_rsp_t mrsp;

  memory_interconnect #(.NM(NM)) dut (.*);
  mem_model #(.DEPTH(256), .LAT(5), .STALL(1'b1)) mem (.clk, .rst_n, .req(mreq), .ready(mreq_ready), .rsp(mrsp));

  line_t shadow [256];
  line_t expq [NM][$];
  int served [NM];

  initial begin
    repeat (30000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Master m only writes to addresses with addr % NM == m, so its own reads
  // see a deterministic value.
  initial begin
    for (int a = 0; a < 256; a++) begin
      shadow[a] = {8{$urandom}};
      mem.mem[a] = shadow[a];
    end
    req = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
  end

  for (genvar m = 0; m < NM; m++) begin : g_m
    initial begin
      int n;
      n = 0;
      @(posedge rst_n);
      while (n < 300) begin
        @(negedge clk);
        if (!req[m].valid || req_ready[m]) begin end
        if ($urandom % 3 != 0) begin
          int a;
          a = ($urandom % 85) * NM + m;
          req[m].valid = 1;
          req[m].we    = $urandom % 2;
          req[m].addr  = 32'(a);
          req[m].wdata = {8{$urandom}};
          @(posedge clk);
          while (!req_ready[m]) @(posedge clk);
          if (req[m].we) shadow[a] = req[m].wdata;
          else expq[m].push_back(shadow[a]);
          n++;
          served[m]++;
          @(negedge clk); req[m].valid = 0;
        end
      end
    end
    always @(posedge clk) if (rst_n && rsp[m].valid) begin
      checks++;
      if (expq[m].size() == 0 || rsp[m].rdata !== expq[m].pop_front()) begin
        failures++; $display("master %0d bad response", m);
      end
    end
  end

  initial begin
    @(posedge rst_n);
    wait (served[0] == 300 && served[1] == 300 && served[2] == 300);
    repeat (50) @(posedge clk);
    for (int m = 0; m < NM; m++) begin
      checks++;
      if (expq[m].size() != 0) begin failures++; $display("master %0d missing %0d responses", m, expq[m].size()); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
