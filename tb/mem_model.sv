// mem_model -- Behavioural model of the host memory controller and of the
// DRAM and PIM devices behind it, for simulation only.  It accepts read and
// write requests on NL lane ports with random back-pressure (a full request
// queue), returns reads after a random latency and in random order on the
// lane that issued them, and keeps written bytes in a sparse store.  Lines
// never written read as init_byte().  Lines are keyed either by the device
// address (KEY_DEV = 1, so the address mapping is exercised) or by the
// physical address.  Not synthesizable.
module mem_model
  import pimmmu_pkg::*;
  import tb_ref_pkg::*;
#(
  parameter bit          KEY_DEV  = 1'b1,
  parameter int unsigned NL       = NUM_CH,
  parameter int unsigned RD_PCT   = 70,   // % of cycles the read queue accepts
  parameter int unsigned WR_PCT   = 70,
  parameter int unsigned MAX_LAT  = 30
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic     [NL-1:0]       rd_valid,
  output logic     [NL-1:0]       rd_ready,
  input  dev_addr_t               rd_addr [NL],
  input  pa_t                     rd_pa   [NL],
  input  logic     [TAG_W-1:0]    rd_tag  [NL],
  output logic     [NL-1:0]       rsp_valid,
  output logic     [TAG_W-1:0]    rsp_tag [NL],
  output line_t                   rsp_data[NL],
  input  logic     [NL-1:0]       wr_valid,
  output logic     [NL-1:0]       wr_ready,
  input  dev_addr_t               wr_addr [NL],
  input  pa_t                     wr_pa   [NL],
  input  logic [LINE_BYTES-1:0]   wr_be   [NL],
  input  line_t                   wr_data [NL]
);
  typedef struct { logic [TAG_W-1:0] tag; longint key; longint due; } pend_t;

  line_t  store [longint];
  pend_t  pend  [NL][$];
  longint cyc = 0;
  int     n_rd = 0, n_wr = 0, n_rd_stall = 0, n_wr_stall = 0, n_ooo = 0, n_pim_rd = 0, n_pim_wr = 0;
  int     n_partial_wr = 0;

  function automatic longint key_of(dev_addr_t d, pa_t pa);
    if (KEY_DEV) return (longint'(1) << 40) | longint'(d);
    else         return longint'(pa >> 6);
  endfunction

  function automatic line_t read_line(longint k);
    line_t l;
    if (store.exists(k)) return store[k];
    for (int i = 0; i < LINE_BYTES; i++) l[8*i +: 8] = init_byte(k, i);
    return l;
  endfunction

  // Byte at physical address pa (the key is derived with the reference map).
  function automatic logic [7:0] peek(pa_t pa, pa_t pim_base, pa_t pim_limit);
    line_t l;
    pa_t   a = {pa[PA_W-1:6], 6'd0};
    l = read_line(key_of(ref_dev(a, pim_base, pim_limit), a));
    return l[8*int'(pa[5:0]) +: 8];
  endfunction

  function automatic bit written(pa_t pa, pa_t pim_base, pa_t pim_limit);
    pa_t a = {pa[PA_W-1:6], 6'd0};
    return store.exists(key_of(ref_dev(a, pim_base, pim_limit), a));
  endfunction

  always @(posedge clk) begin
    cyc++;
    for (int l = 0; l < NL; l++) begin
      rsp_valid[l] <= 1'b0;
      if (rst_n) begin
        // accept
        if (rd_valid[l] && rd_ready[l]) begin
          automatic pend_t p;
          p.tag = rd_tag[l]; p.key = key_of(rd_addr[l], rd_pa[l]);
          p.due = cyc + 1 + longint'($urandom_range(MAX_LAT));
          pend[l].push_back(p);
          n_rd++;
          if (KEY_DEV && rd_addr[l].is_pim) n_pim_rd++;
        end else if (rd_valid[l]) n_rd_stall++;
        if (wr_valid[l] && wr_ready[l]) begin
          automatic longint k; automatic line_t cur;
          k = key_of(wr_addr[l], wr_pa[l]);
          cur = read_line(k);
          for (int i = 0; i < LINE_BYTES; i++) if (wr_be[l][i]) cur[8*i +: 8] = wr_data[l][8*i +: 8];
          store[k] = cur;
          n_wr++;
          if (KEY_DEV && wr_addr[l].is_pim) n_pim_wr++;
          if (wr_be[l] != '1) n_partial_wr++;
        end else if (wr_valid[l]) n_wr_stall++;
        // return one due read, chosen at random among the due ones
        begin
          automatic int due_idx [$];
          foreach (pend[l][i]) if (pend[l][i].due <= cyc) due_idx.push_back(i);
          if (due_idx.size() > 0) begin
            automatic int pick = due_idx[$urandom_range(due_idx.size() - 1)];
            if (pick != 0) n_ooo++;
            rsp_valid[l] <= 1'b1;
            rsp_tag[l]   <= pend[l][pick].tag;
            rsp_data[l]  <= read_line(pend[l][pick].key);
            pend[l].delete(pick);
          end
        end
        rd_ready[l] <= ($urandom_range(99) < RD_PCT);
        wr_ready[l] <= ($urandom_range(99) < WR_PCT);
      end else begin
        rd_ready[l] <= 1'b0;
        wr_ready[l] <= 1'b0;
      end
    end
  end
endmodule
