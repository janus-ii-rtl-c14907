// iop: Input-Output Processor, the bridge between the control computer and
// the 16 SPs of a Processing Board.
//
// The host side is the user side of the PCIe endpoint (not modelled): a
// request carries a target (0..15 one SP, T_BCAST all SPs, T_IOP the IOP
// itself), a word address, write data and a write flag. The IOP holds one
// request at a time. A unicast request is passed to its SP's host link and
// held until that SP takes it. A broadcast write goes to all SPs and is done
// once every SP has taken it (each SP is released as soon as it has); this is
// how one command starts all SPs together. A read waits for its SP's
// response and returns it to the host; broadcast reads are not supported and
// answer 0. A read of the IOP (T_IOP, address 0) returns the busy lines of
// the 16 SPs, the dedicated status lines of the paper; address 1 returns 1
// when all SPs are idle.
//
// Timing: host_ready is high when no request is held; a write takes at least
// one clock in the buffer, a read at least two. Routing, broadcast and status
// monitoring are the paper's tasks for the IOP; the protocol is this design's.
module iop
  import sg_pkg::*;
#(
  parameter int unsigned N = NSP
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                host_valid,
  input  logic                host_we,
  input  logic [4:0]          host_target,
  input  logic [31:0]         host_addr,
  input  logic [31:0]         host_wdata,
  output logic                host_ready,
  output logic                host_rvalid,
  output logic [31:0]         host_rdata,
  output host_req_t [N-1:0]   sp_req,
  input  logic [N-1:0]        sp_ready,
  input  host_rsp_t [N-1:0]   sp_rsp,
  input  logic [N-1:0]        sp_busy
);
  logic        buf_v, buf_we, rd_pend;
  logic [4:0]  buf_tgt;
  logic [31:0] buf_addr, buf_wdata;
  logic [N-1:0] todo;          // SPs that still have to take the request

  assign host_ready = !buf_v;

  always_comb begin
    for (int i = 0; i < N; i++) begin
      sp_req[i].valid = buf_v && !rd_pend && todo[i];
      sp_req[i].we    = buf_we;
      sp_req[i].addr  = buf_addr;
      sp_req[i].wdata = buf_wdata;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      buf_v <= 1'b0; buf_we <= 1'b0; rd_pend <= 1'b0; buf_tgt <= '0;
      buf_addr <= '0; buf_wdata <= '0; todo <= '0;
      host_rvalid <= 1'b0; host_rdata <= '0;
    end else begin
      host_rvalid <= 1'b0;
      if (host_valid && host_ready) begin
        buf_v     <= 1'b1;
        buf_we    <= host_we;
        buf_tgt   <= host_target;
        buf_addr  <= host_addr;
        buf_wdata <= host_wdata;
        rd_pend   <= 1'b0;
        if (host_target == T_BCAST && host_we) todo <= '1;
        else if (host_target < 5'(N))          todo <= N'(1) << host_target;
        else                                    todo <= '0;
      end else if (buf_v) begin
        if (rd_pend) begin
          if (sp_rsp[buf_tgt[$clog2(N)-1:0]].valid) begin
            host_rvalid <= 1'b1;
            host_rdata  <= sp_rsp[buf_tgt[$clog2(N)-1:0]].rdata;
            buf_v       <= 1'b0;
            rd_pend     <= 1'b0;
          end
        end else if (todo == '0) begin
          // IOP-local access, or a request nobody takes
          buf_v <= 1'b0;
          if (!buf_we) begin
            host_rvalid <= 1'b1;
            if (buf_tgt == T_IOP && buf_addr == 32'd0)      host_rdata <= 32'(sp_busy);
            else if (buf_tgt == T_IOP && buf_addr == 32'd1) host_rdata <= {31'd0, sp_busy == '0};
            else                                            host_rdata <= '0;
          end
        end else begin
          logic [N-1:0] left;
          left = todo & ~sp_ready;
          todo <= left;
          if (left == '0) begin
            if (buf_we) buf_v <= 1'b0;
            else        rd_pend <= 1'b1;
          end
        end
      end
    end
  end

  a_one_read: assert property (@(posedge clk) disable iff (!rst_n)
    rd_pend |-> !buf_we && buf_tgt < 5'(N))
    else $error("iop: read pending without a single SP target");
endmodule
