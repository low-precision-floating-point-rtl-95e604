// dma: moves rows between external memory and the on-chip buffers.
//
// External memory is a plain beat port, MEM_W (512) bits per beat, with a
// valid/ready request channel (read or write, beat address) and in-order
// read responses that the DMA always accepts. One buffer row spans
// ceil(width / MEM_W) consecutive beats (3 for the IFMB, 6 for the WB, 4
// for the OFMB at the default sizes); a transfer of `rows` rows covers
// consecutive beats from ext_addr and consecutive rows from buf_addr.
//
//   load  (IFMB, WB or OFMB): read requests are issued back to back; the
//         responses are packed into a row register and each complete row is
//         written to the buffer in the next cycle.
//   store (OFMB only): each row is read from the OFMB, latched, and sent as
//         write beats.
//
// One transfer at a time; cmd_ready is high when idle and busy covers the
// whole transfer. The data layout in external memory is the buffer row
// layout, which the compiler prepares.
//
// From the paper: a DMA moves data between external memory and the three
// buffers. Own choices: whole-row transfers, the 512-bit request/response
// port, and stores only from the OFMB.
module dma
  import lpfp_pkg::*;
#(
  parameter int IFM_W = 1536,
  parameter int W_W   = 3072,
  parameter int OFM_W = 2048
) (
  input  logic              clk,
  input  logic              rst_n,
  input  dma_cmd_t          cmd,
  input  logic              cmd_valid,
  output logic              cmd_ready,
  output logic              busy,
  // external memory
  output logic              mem_req_valid,
  input  logic              mem_req_ready,
  output logic              mem_req_we,
  output logic [EXT_AW-1:0] mem_req_addr,
  output logic [MEM_W-1:0]  mem_req_wdata,
  input  logic              mem_rsp_valid,
  input  logic [MEM_W-1:0]  mem_rsp_rdata,
  // buffer writes
  output logic              ifm_we,
  output logic              w_we,
  output logic              ofm_we,
  output logic              wbank,
  output logic [ADDR_W-1:0] waddr,
  output logic [IFM_W-1:0]  ifm_wdata,
  output logic [W_W-1:0]    w_wdata,
  output logic [OFM_W-1:0]  ofm_wdata,
  // OFMB reads (store)
  output logic              ofm_re,
  output logic              rbank,
  output logic [ADDR_W-1:0] ofm_raddr,
  input  logic [OFM_W-1:0]  ofm_rdata
);

  function automatic int beats_of(input int w);
    return (w + MEM_W - 1) / MEM_W;
  endfunction

  localparam int B_IFM = beats_of(IFM_W);
  localparam int B_W   = beats_of(W_W);
  localparam int B_OFM = beats_of(OFM_W);
  localparam int BMAX  = (B_IFM > B_W) ? ((B_IFM > B_OFM) ? B_IFM : B_OFM)
                                       : ((B_W > B_OFM) ? B_W : B_OFM);

  typedef enum logic [2:0] {S_IDLE, S_LOAD, S_ST_RD, S_ST_LATCH, S_ST_SEND} state_e;

  state_e                       state;
  dma_cmd_t                     c;
  logic [BMAX-1:0][MEM_W-1:0]   rowbuf;
  logic [7:0]                   beats, beat;
  logic [EXT_AW-1:0]            req_cnt, req_total, ext_ptr;
  logic [ADDR_W-1:0]            row_cnt;
  logic                         row_full;

  assign cmd_ready = (state == S_IDLE);
  assign busy      = (state != S_IDLE);

  always_comb
    unique case (cmd.target)
      BUF_IFM: beats = 8'(B_IFM);
      BUF_W:   beats = 8'(B_W);
      default: beats = 8'(B_OFM);
    endcase

  logic [7:0] cur_beats;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      state     <= S_IDLE;
      c         <= '0;
      cur_beats <= '0;
      beat      <= '0;
      req_cnt   <= '0;
      req_total <= '0;
      ext_ptr   <= '0;
      row_cnt   <= '0;
      row_full  <= 1'b0;
      rowbuf    <= '0;
    end else begin
      row_full <= 1'b0;
      unique case (state)
        S_IDLE:
          if (cmd_valid) begin
            c         <= cmd;
            cur_beats <= beats;
            beat      <= '0;
            req_cnt   <= '0;
            req_total <= EXT_AW'(cmd.rows) * EXT_AW'(beats);
            ext_ptr   <= cmd.ext_addr;
            row_cnt   <= '0;
            state     <= cmd.store ? S_ST_RD : S_LOAD;
          end
        S_LOAD: begin
          if (mem_req_valid && mem_req_ready) begin
            req_cnt <= req_cnt + EXT_AW'(1);
            ext_ptr <= ext_ptr + EXT_AW'(1);
          end
          if (mem_rsp_valid) begin
            rowbuf[beat] <= mem_rsp_rdata;
            if (beat == cur_beats - 8'd1) begin
              beat     <= '0;
              row_full <= 1'b1;
            end else begin
              beat <= beat + 8'd1;
            end
          end
          if (row_full) begin
            row_cnt <= row_cnt + ADDR_W'(1);
            if (row_cnt == c.rows - ADDR_W'(1)) state <= S_IDLE;
          end
        end
        S_ST_RD:    state <= S_ST_LATCH;
        S_ST_LATCH: begin
          rowbuf <= (BMAX*MEM_W)'(ofm_rdata);
          beat   <= '0;
          state  <= S_ST_SEND;
        end
        S_ST_SEND:
          if (mem_req_ready) begin
            ext_ptr <= ext_ptr + EXT_AW'(1);
            if (beat == cur_beats - 8'd1) begin
              row_cnt <= row_cnt + ADDR_W'(1);
              state   <= (row_cnt == c.rows - ADDR_W'(1)) ? S_IDLE : S_ST_RD;
            end else begin
              beat <= beat + 8'd1;
            end
          end
        default: state <= S_IDLE;
      endcase
    end

  // external memory requests
  assign mem_req_valid = (state == S_LOAD && req_cnt < req_total) || (state == S_ST_SEND);
  assign mem_req_we    = (state == S_ST_SEND);
  assign mem_req_addr  = ext_ptr;
  assign mem_req_wdata = rowbuf[beat];

  // buffer writes: one full row the cycle after its last beat arrived
  assign wbank     = c.bank;
  assign waddr     = c.buf_addr + row_cnt;
  assign ifm_we    = row_full && c.target == BUF_IFM;
  assign w_we      = row_full && c.target == BUF_W;
  assign ofm_we    = row_full && c.target == BUF_OFM;
  assign ifm_wdata = IFM_W'(rowbuf);
  assign w_wdata   = W_W'(rowbuf);
  assign ofm_wdata = OFM_W'(rowbuf);

  // OFMB reads for a store
  assign ofm_re    = (state == S_ST_RD);
  assign rbank     = c.bank;
  assign ofm_raddr = c.buf_addr + row_cnt;

  a_store_ofm: assert property (@(posedge clk) disable iff (!rst_n)
                                cmd_valid && cmd_ready && cmd.store |-> cmd.target == BUF_OFM)
    else $error("dma: only the OFMB can be stored");
  a_rows: assert property (@(posedge clk) disable iff (!rst_n)
                           cmd_valid && cmd_ready |-> cmd.rows != '0)
    else $error("dma: transfer of 0 rows");

endmodule
