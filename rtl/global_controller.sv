// global_controller -- moves activations between the global buffer and the
// PE array and sequences the PEs.
//
// A job is started with `start` and described by `active` (which PEs take
// part), per-PE base addresses `in_base`/`out_base` in the global buffer and
// `pool_len`, the number of input windows pooled into one output (1 = no
// pooling). For window t = 0 .. pool_len-1 the controller
//   FETCH  copies, for every active PE p, the N_IN input bytes at
//          in_base[p] + t*N_IN into the PE's input register (one byte per
//          cycle, the buffer read takes one cycle);
//   RUN    starts all active PEs together (pool_first = (t == 0)) and waits
//          until each has signalled done;
// and then STORE writes the N_OUT output bytes of every active PE to
// out_base[p] .. out_base[p]+N_OUT-1. `done` pulses when the job is over.
// The byte read from the buffer goes to the PEs unregistered: pe_in_wdata is
// gb_rdata, written in the cycle after the read was issued.
// The published design names a global controller only; this job format and
// its byte-serial transfers are this design's choices.
module global_controller
  import rram_pkg::*;
#(
  parameter int unsigned N_PE     = 16,
  parameter int unsigned GB_DEPTH = 65536
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        start,
  input  logic [N_PE-1:0]             active,
  input  logic [$clog2(GB_DEPTH)-1:0] in_base  [N_PE],
  input  logic [$clog2(GB_DEPTH)-1:0] out_base [N_PE],
  input  logic [7:0]                  pool_len,
  output logic                        busy,
  output logic                        done,
  // global buffer port B
  output logic                        gb_we,
  output logic [$clog2(GB_DEPTH)-1:0] gb_addr,
  output logic [7:0]                  gb_wdata,
  input  logic [7:0]                  gb_rdata,
  // PE array
  output logic [N_PE-1:0]             pe_in_we,
  output logic [IN_AW-1:0]            pe_in_addr,
  output logic [A_BITS-1:0]           pe_in_wdata,
  output logic [N_PE-1:0]             pe_start,
  output logic                        pe_pool_first,
  input  logic [N_PE-1:0]             pe_done,
  input  logic signed [A_BITS-1:0]    pe_out [N_PE][N_OUT]
);

  localparam int PW = (N_PE > 1) ? $clog2(N_PE) : 1;
  localparam int GW = $clog2(GB_DEPTH);

  typedef enum logic [2:0] { S_IDLE, S_FETCH, S_RUN, S_WAIT, S_STORE } state_e;
  state_e state;

  logic [PW-1:0]     p;
  logic [IN_AW:0]    i;          // element counter, one bit wider than an index
  logic [7:0]        t;
  logic [N_PE-1:0]   pending;
  logic              rd_q;       // a buffer read issued in the previous cycle
  logic [PW-1:0]     p_q;
  logic [IN_AW-1:0]  i_q;

  logic last_elem_in, last_elem_out, last_pe;
  assign last_elem_in  = (32'(i) == N_IN - 1);
  assign last_elem_out = (32'(i) == N_OUT - 1);
  assign last_pe       = (32'(p) == N_PE - 1);

  assign busy = (state != S_IDLE);

  always_comb begin
    gb_we    = 1'b0;
    gb_addr  = '0;
    gb_wdata = '0;
    case (state)
      S_FETCH: gb_addr = in_base[p] + GW'(32'(t) * N_IN) + GW'(i);
      S_STORE: begin
        gb_we    = active[p];
        gb_addr  = out_base[p] + GW'(i);
        gb_wdata = pe_out[p][i[OUT_AW-1:0]];
      end
      default: ;
    endcase
  end

  // write into the PE input register one cycle after the buffer read
  always_comb begin
    pe_in_we    = '0;
    pe_in_we[p_q] = rd_q;
    pe_in_addr  = i_q;
    pe_in_wdata = gb_rdata;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state         <= S_IDLE;
      done          <= 1'b0;
      p             <= '0;
      i             <= '0;
      t             <= '0;
      pending       <= '0;
      rd_q          <= 1'b0;
      p_q           <= '0;
      i_q           <= '0;
      pe_start      <= '0;
      pe_pool_first <= 1'b1;
    end else begin
      done     <= 1'b0;
      pe_start <= '0;
      rd_q     <= 1'b0;
      case (state)
        S_IDLE: if (start) begin
          state <= S_FETCH;
          t     <= '0;
          p     <= '0;
          i     <= '0;
        end
        S_FETCH: begin
          if (active[p]) begin
            rd_q <= 1'b1;
            p_q  <= p;
            i_q  <= i[IN_AW-1:0];
          end
          if (!active[p] || last_elem_in) begin
            i <= '0;
            if (last_pe) begin
              p     <= '0;
              state <= S_RUN;
            end else p <= p + 1'b1;
          end else i <= i + 1'b1;
        end
        S_RUN: begin                       // the last input byte is written now
          pe_start      <= active;
          pe_pool_first <= (t == 0);
          pending       <= active;
          state         <= S_WAIT;
        end
        S_WAIT: begin
          pending <= pending & ~pe_done;
          if ((pending & ~pe_done) == '0) begin
            if (32'(t) + 1 < 32'(pool_len)) begin
              t     <= t + 1'b1;
              state <= S_FETCH;
            end else begin
              state <= S_STORE;
            end
          end
        end
        S_STORE: begin
          if (!active[p] || last_elem_out) begin
            i <= '0;
            if (last_pe) begin
              p     <= '0;
              state <= S_IDLE;
              done  <= 1'b1;
            end else p <= p + 1'b1;
          end else i <= i + 1'b1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) (start && !busy) |-> (pool_len != 0));

endmodule
