// weight_loader: copies a weight matrix, and optionally a bias vector,
// from its sequential DRAM form into a weight_bram in blocked form.
//
// The matrix is stored row-major in DRAM (out_dim rows of in_dim 16-bit
// weights, one weight in the low half of each 32-bit word). Weight (o, i)
// goes to BRAM word (o / LANES) * in_dim + i, lane o % LANES, so that one
// BRAM word holds everything one compute cycle of the unified linear layer
// needs. Biases (n_bias words) follow into the bias BRAM at word o / LANES,
// lane o % LANES. The same loader serves the patch embedding, LayerNorm and
// gating units (with LANES = 1 where only one weight per cycle is needed).
// The paper names this loader; the layout and the one-word-per-cycle pace are
// this design's choices.
//
// Timing: one DRAM read issued per cycle, written one cycle later. done
// pulses one cycle after the last write.
module weight_loader
  import edge_moe_pkg::*;
#(
  parameter int unsigned LANES = 16,
  parameter int unsigned DEPTH = 9216,
  parameter int unsigned BDEPTH = 48,
  localparam int unsigned AWI = (DEPTH > 1) ? $clog2(DEPTH) : 1,
  localparam int unsigned BAW = (BDEPTH > 1) ? $clog2(BDEPTH) : 1,
  localparam int unsigned LW  = (LANES > 1) ? $clog2(LANES) : 1
)(
  input  logic           clk,
  input  logic           rst_n,
  input  logic           start,
  input  addr_t          w_base,
  input  addr_t          b_base,
  input  logic [15:0]    in_dim,
  input  logic [15:0]    out_dim,
  input  logic           with_bias,
  output logic           busy,
  output logic           done,
  output mem_req_t       mem_req,
  input  mem_rsp_t       mem_rsp,
  output logic           w_wr_en,
  output logic [AWI-1:0] w_wr_addr,
  output logic [LW-1:0]  w_wr_lane,
  output logic           b_wr_en,
  output logic [BAW-1:0] b_wr_addr,
  output logic [LW-1:0]  b_wr_lane,
  output wgt_t           wr_data
);

  typedef enum logic [1:0] {L_IDLE, L_W, L_B, L_DRAIN} lstate_e;
  lstate_e st;
  logic [15:0] o, i;           // issue indices
  logic [15:0] o_d, i_d;       // indices of the word in flight
  logic        is_b_d;
  addr_t       addr;

  assign busy = (st != L_IDLE);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      st <= L_IDLE; o <= '0; i <= '0; addr <= '0; done <= 1'b0;
      o_d <= '0; i_d <= '0; is_b_d <= 1'b0;
    end else begin
      done <= 1'b0;
      case (st)
        L_IDLE: if (start) begin st <= L_W; o <= '0; i <= '0; addr <= w_base; end
        L_W: begin
          o_d <= o; i_d <= i; is_b_d <= 1'b0;
          addr <= addr + 1'b1;
          if (i == in_dim - 1) begin
            i <= '0;
            if (o == out_dim - 1) begin
              o <= '0;
              if (with_bias) begin st <= L_B; addr <= b_base; end
              else st <= L_DRAIN;
            end else o <= o + 1'b1;
          end else i <= i + 1'b1;
        end
        L_B: begin
          o_d <= o; is_b_d <= 1'b1;
          addr <= addr + 1'b1;
          if (o == out_dim - 1) st <= L_DRAIN;
          else o <= o + 1'b1;
        end
        L_DRAIN: begin st <= L_IDLE; done <= 1'b1; end
        default: st <= L_IDLE;
      endcase
    end
  end

  always_comb begin
    mem_req       = '0;
    mem_req.valid = (st == L_W) || (st == L_B);
    mem_req.addr  = addr;
    wr_data       = wgt_t'(mem_rsp.rdata[15:0]);
    w_wr_en       = mem_rsp.rvalid && !is_b_d;
    b_wr_en       = mem_rsp.rvalid && is_b_d;
    w_wr_addr     = AWI'(32'(o_d / LANES) * 32'(in_dim) + 32'(i_d));
    w_wr_lane     = LW'(o_d % LANES);
    b_wr_addr     = BAW'(o_d / LANES);
    b_wr_lane     = LW'(o_d % LANES);
  end

endmodule
