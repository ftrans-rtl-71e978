// tb_embedding_lookup: a behavioural DDR read channel with random request
// back-pressure and a random 2..5 clock in-order response delay serves rows
// whose content is a hash of the beat address. Checks that every token block
// receives the beat at base + id * ceil(D/8) + block, is written once, and
// that done comes after the last write; two sentences with different bases.
module tb_embedding_lookup;
  import ftrans_pkg::*;
  localparam int D = 20, L = 8, NBD = (D + BLK - 1) / BLK, TW = $clog2(L);
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;
  always #5 clk = ~clk;

  logic start, done, ddr_req_valid, ddr_req_ready, ddr_rsp_valid, o_we;
  logic [TW:0] n_tok;
  logic [31:0] base, ddr_req_addr;
  logic [TW-1:0] tok_idx, o_tok;
  logic [15:0] tok_id;
  logic [BLK*DATA_W-1:0] ddr_rsp_data;
  logic [$clog2(NBD)-1:0] o_blk;
  blk_t o_data;

  embedding_lookup #(.D(D), .L_MAX(L), .ID_W(16)) dut (.*);

  int ids [L], seen [L][NBD], checks = 0, failures = 0, stalls = 0;
  blk_t got [L][NBD];
  assign tok_id = 16'(ids[tok_idx]);

  function automatic blk_t row(logic [31:0] a);
    blk_t b;
    for (int l = 0; l < BLK; l++) b[l] = word_t'((a * 32'd2654435761) >> (l * 3));
    return b;
  endfunction

  // DDR model: accepted requests are answered in order after 2..5 clocks
  logic [31:0] q_addr [$];
  int q_due [$];
  int cyc = 0;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    ddr_rsp_valid <= 1'b0;
    if (rst_n) begin
      if (ddr_req_valid && ddr_req_ready) begin
        q_addr.push_back(ddr_req_addr);
        q_due.push_back(cyc + int'($urandom_range(2, 5)));
      end
      if (ddr_req_valid && !ddr_req_ready) stalls++;
      if (q_addr.size() > 0 && q_due[0] <= cyc) begin
        ddr_rsp_valid <= 1'b1;
        ddr_rsp_data  <= row(q_addr[0]);
        void'(q_addr.pop_front());
        void'(q_due.pop_front());
      end
      ddr_req_ready <= ($urandom_range(0, 3) != 0);
      if (o_we) begin got[o_tok][o_blk] = o_data; seen[o_tok][o_blk]++; end
    end
  end

  task automatic run(input int n, input logic [31:0] b);
    for (int t = 0; t < L; t++) begin
      ids[t] = int'($urandom_range(0, 999));
      for (int k = 0; k < NBD; k++) seen[t][k] = 0;
    end
    @(negedge clk);
    start = 1; n_tok = (TW+1)'(n); base = b;
    @(negedge clk) start = 0;
    wait (done);
    @(posedge clk);
    @(negedge clk);
    for (int t = 0; t < L; t++)
      for (int k = 0; k < NBD; k++) begin
        checks++;
        if (t < n ? (seen[t][k] != 1 || got[t][k] != row(b + 32'(ids[t] * NBD + k))) : (seen[t][k] != 0)) begin
          failures++;
          if (failures < 10) $display("FAIL t%0d b%0d seen %0d", t, k, seen[t][k]);
        end
      end
  endtask

  initial begin
    start = 0; n_tok = '0; base = '0; ddr_req_ready = 0; ddr_rsp_valid = 0; ddr_rsp_data = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    run(L, 32'h1000);
    run(5, 32'h0002_0000);
    checks++;
    if (stalls == 0) begin failures++; $display("FAIL no back-pressure seen"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
