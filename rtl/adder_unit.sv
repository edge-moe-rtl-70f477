// adder_unit: element-wise matrix addition for the residual connections
// (the "Adder unit" / "Matrix Addition" of the paper, which gives only its
// name and purpose).
//
// out[i] = sat(a[i] + b[i]) for i < len, all three vectors in DRAM. With a
// single DRAM port it reads a[i], reads b[i] and writes out[i] in three
// consecutive cycles; out may alias a or b.
//
// Timing: start with the configuration; done pulses after the last write;
// 3*len + 2 cycles in all.
module adder_unit
  import edge_moe_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  input  logic     start,
  input  addr_t    a_base,
  input  addr_t    b_base,
  input  addr_t    o_base,
  input  logic [23:0] len,
  output logic     done,
  output mem_req_t mem_req,
  input  mem_rsp_t mem_rsp
);

  typedef enum logic [2:0] {A_IDLE, A_RA, A_RB, A_WR, A_DONE} astate_e;
  astate_e st;
  logic [23:0] idx;
  act_t a_val;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      st <= A_IDLE; idx <= '0; a_val <= '0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      case (st)
        A_IDLE: if (start) begin idx <= '0; st <= (len == 0) ? A_DONE : A_RA; end
        A_RA:   st <= A_RB;
        A_RB:   begin a_val <= act_t'(mem_rsp.rdata); st <= A_WR; end
        A_WR:   begin
          idx <= idx + 1'b1;
          st  <= (idx == len - 1) ? A_DONE : A_RA;
        end
        A_DONE: begin done <= 1'b1; st <= A_IDLE; end
        default: st <= A_IDLE;
      endcase
    end
  end

  always_comb begin
    mem_req = '0;
    case (st)
      A_RA: begin mem_req.valid = 1'b1; mem_req.addr = a_base + addr_t'(idx); end
      A_RB: begin mem_req.valid = 1'b1; mem_req.addr = b_base + addr_t'(idx); end
      A_WR: begin
        mem_req.valid = 1'b1; mem_req.we = 1'b1; mem_req.addr = o_base + addr_t'(idx);
        mem_req.wdata = sat32(64'(a_val) + 64'(act_t'(mem_rsp.rdata)));
      end
      default: ;
    endcase
  end

endmodule
