// csr_gather: maps compressed rows of the adjacency matrix and one column of
// B onto the MAC array for the aggregation phase X' = A B.
//
// For a row group g (nodes g*NUM_PE .. g*NUM_PE+NUM_PE-1, one per engine), a
// neighbour chunk k and an output column c, it walks the CSR rows of the
// group's nodes: for engine p it reads row_ptr[n] and row_ptr[n+1], then for
// the up to 16 neighbours j in slots k*16 .. k*16+15 of that row it reads the
// column index j and fetches B[j][c] from the feature buffer that holds B
// (bank j mod NUM_PE, word (j / NUM_PE) * k_stride + c / 16, lane c mod 16).
// The low W_BITS bits of that byte (B is quantized like a weight, to 4 bits)
// become the MAC weight of engine p, slot s, and the slot's mask bit is set.
// `more` reports that some row of the group has neighbours beyond chunk k, so
// the controller runs another chunk; a group costs as many chunks as its
// longest row, which is why the host orders nodes by in-degree.
//
// The paper gives the CSR format and the row-per-engine mapping; this
// sequential walker, one memory access per cycle, is this design's own,
// chosen for simplicity rather than speed. NUM_PE and N_MAC must be powers
// of two.
//
// Timing: `start` when `busy` is low; `done` pulses when `w_pe`, `mask` and
// `more` are valid. Each engine costs at most 4 cycles plus 3 per neighbour
// in the chunk; nodes at or past `num_nodes` cost 2.
module csr_gather #(
  parameter int unsigned NUM_PE    = a2q_pkg::NUM_PE,
  parameter int unsigned N_MAC     = a2q_pkg::MACS_PER_PE,
  parameter int unsigned W_BITS    = a2q_pkg::W_BITS,
  parameter int unsigned FEAT_BITS = a2q_pkg::FEAT_BITS,
  parameter int unsigned FB_AW     = $clog2(a2q_pkg::FB_DEPTH),
  parameter int unsigned EB_AW     = $clog2(a2q_pkg::EB_DEPTH)
) (
  input  logic                                          clk,
  input  logic                                          rst_n,
  input  logic                                          start,
  input  logic [15:0]                                   group,
  input  logic [15:0]                                   chunk,
  input  logic [15:0]                                   col,
  input  logic [15:0]                                   k_stride,
  input  logic [EB_AW-1:0]                              col_base,
  input  logic [31:0]                                   num_nodes,
  // edge buffer
  output logic                                          a_rd_en,
  output logic [EB_AW-1:0]                              a_rd_addr,
  input  logic [31:0]                                   a_rd_data,
  output logic                                          b_rd_en,
  output logic [EB_AW-1:0]                              b_rd_addr,
  input  logic [31:0]                                   b_rd_data,
  // feature buffer holding B
  output logic [NUM_PE-1:0]                             fb_rd_en,
  output logic [NUM_PE-1:0][FB_AW-1:0]                  fb_rd_addr,
  input  logic [NUM_PE-1:0][N_MAC-1:0][FEAT_BITS-1:0]   fb_rd_data,
  // operands for the MAC array
  output logic [NUM_PE-1:0][N_MAC-1:0][W_BITS-1:0]      w_pe,
  output logic [NUM_PE-1:0][N_MAC-1:0]                  mask,
  output logic                                          more,
  output logic                                          busy,
  output logic                                          done
);

  localparam int unsigned PW = (NUM_PE > 1) ? $clog2(NUM_PE) : 1;
  localparam int unsigned PS = $clog2(NUM_PE);
  localparam int unsigned SW = $clog2(N_MAC);
  localparam int unsigned MS = $clog2(N_MAC);

  typedef enum logic [2:0] {S_IDLE, S_PTR, S_PTRW, S_IDX, S_IDXW, S_FEAT, S_NEXT} state_e;
  state_e state;

  logic [PW-1:0]  p;
  logic [SW:0]    s;
  logic [31:0]    base, row_end;
  logic [PW-1:0]  bank;
  logic [31:0]    node, idx, j;

  assign node = 32'(group) * 32'(NUM_PE) + 32'(p);
  assign idx  = base + 32'(s);
  assign j    = b_rd_data;

  // Memory requests, issued from the current state
  always_comb begin
    a_rd_en    = 1'b0;
    a_rd_addr  = EB_AW'(node);
    b_rd_en    = 1'b0;
    b_rd_addr  = EB_AW'(node + 1);
    fb_rd_en   = '0;
    fb_rd_addr = '0;
    unique case (state)
      S_PTR: if (node < num_nodes) begin
        a_rd_en = 1'b1;
        b_rd_en = 1'b1;
      end
      S_IDX: if (idx < row_end) begin
        b_rd_en   = 1'b1;
        b_rd_addr = col_base + EB_AW'(idx);
      end
      S_IDXW: begin
        fb_rd_en[j[PW-1:0]]   = 1'b1;
        fb_rd_addr[j[PW-1:0]] = FB_AW'(32'(j >> PS) * 32'(k_stride) + 32'(col >> MS));
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      p       <= '0;
      s       <= '0;
      base    <= '0;
      row_end <= '0;
      bank    <= '0;
      w_pe    <= '0;
      mask    <= '0;
      more    <= 1'b0;
      done    <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          p     <= '0;
          more  <= 1'b0;
          mask  <= '0;
          w_pe  <= '0;
          state <= S_PTR;
        end
        S_PTR: state <= (node < num_nodes) ? S_PTRW : S_NEXT;
        S_PTRW: begin
          base    <= a_rd_data + 32'(chunk) * 32'(N_MAC);
          row_end <= b_rd_data;
          if (b_rd_data > a_rd_data + (32'(chunk) + 1) * 32'(N_MAC)) more <= 1'b1;
          s       <= '0;
          state   <= S_IDX;
        end
        S_IDX: state <= (idx < row_end) ? S_IDXW : S_NEXT;
        S_IDXW: begin
          bank  <= j[PW-1:0];
          state <= S_FEAT;
        end
        S_FEAT: begin
          w_pe[p][s[SW-1:0]] <= fb_rd_data[bank][col[MS-1:0]][W_BITS-1:0];
          mask[p][s[SW-1:0]] <= 1'b1;
          s     <= s + 1'b1;
          state <= (s == (SW+1)'(N_MAC - 1)) ? S_NEXT : S_IDX;
        end
        S_NEXT: begin
          if (p == PW'(NUM_PE - 1)) begin
            done  <= 1'b1;
            state <= S_IDLE;
          end else begin
            p     <= p + 1'b1;
            state <= S_PTR;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy = (state != S_IDLE);

endmodule
