// embedding_lookup: fetches token embeddings from off-chip memory.
//
// The embedding table is too large for on-chip memory and stays in DDR. For
// each of the n_tok tokens of a sentence, the unit reads the token id from
// the token buffer, computes the address of its embedding row and requests
// the row's ceil(D/8) 128-bit beats (one beat = one block of 8 words):
//   beat address = base + id * ceil(D/8) + block.
// Requests are issued back to back as long as the memory accepts them
// (ddr_req_ready); responses return in request order, each is written as one
// block into the layer input buffer. The unit is done when the last response
// has been written.
//
// Keeping the embedding table in DDR and looking rows up from the tokenized
// sentence follows the paper. The request/response port (an in-order,
// valid/ready read channel standing in for the DDR controller), the row
// layout and the absence of a positional-encoding adder (positional
// information is expected to be folded into the table) are this design's
// choices.
module embedding_lookup
  import ftrans_pkg::*;
#(
  parameter int D     = 200,
  parameter int L_MAX = 64,
  parameter int ID_W  = 16,
  localparam int NBD = (D + BLK - 1) / BLK
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      start,
  input  logic [$clog2(L_MAX):0]    n_tok,
  input  logic [31:0]               base,
  output logic                      done,
  output logic [$clog2(L_MAX)-1:0]  tok_idx,
  input  logic [ID_W-1:0]           tok_id,
  output logic                      ddr_req_valid,
  output logic [31:0]               ddr_req_addr,
  input  logic                      ddr_req_ready,
  input  logic                      ddr_rsp_valid,
  input  logic [BLK*DATA_W-1:0]     ddr_rsp_data,
  output logic                      o_we,
  output logic [$clog2(L_MAX)-1:0]  o_tok,
  output logic [$clog2(NBD)-1:0]    o_blk,
  output blk_t                      o_data
);
  localparam int TW  = $clog2(L_MAX);
  localparam int BW  = $clog2(NBD);

  logic          active, issuing;
  logic [TW:0]   qt, rt;     // request / response token
  logic [BW:0]   qb, rb;     // request / response block

  assign tok_idx       = qt[TW-1:0];
  assign ddr_req_valid = issuing;
  assign ddr_req_addr  = base + 32'(tok_id) * NBD + 32'(qb);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active  <= 1'b0;
      issuing <= 1'b0;
      qt      <= '0;
      qb      <= '0;
      rt      <= '0;
      rb      <= '0;
      done    <= 1'b0;
    end else begin
      done <= 1'b0;
      if (!active) begin
        if (start) begin
          qt      <= '0;
          qb      <= '0;
          rt      <= '0;
          rb      <= '0;
          active  <= (n_tok != 0);
          issuing <= (n_tok != 0);
          done    <= (n_tok == 0);
        end
      end else begin
        if (issuing && ddr_req_ready) begin
          if (int'(qb) == NBD - 1) begin
            qb <= '0;
            qt <= qt + 1'b1;
            if (qt == n_tok - 1'b1) issuing <= 1'b0;
          end else begin
            qb <= qb + 1'b1;
          end
        end
        if (ddr_rsp_valid) begin
          if (int'(rb) == NBD - 1) begin
            rb <= '0;
            rt <= rt + 1'b1;
            if (rt == n_tok - 1'b1) begin
              active <= 1'b0;
              done   <= 1'b1;
            end
          end else begin
            rb <= rb + 1'b1;
          end
        end
      end
    end
  end

  assign o_we   = active && ddr_rsp_valid;
  assign o_tok  = rt[TW-1:0];
  assign o_blk  = rb[BW-1:0];
  assign o_data = blk_t'(ddr_rsp_data);

endmodule
