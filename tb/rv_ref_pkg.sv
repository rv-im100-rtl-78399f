// rv_ref_pkg: an instruction-set reference model of RV64IM_Zicsr (machine
// mode only) used by the core and SoC testbenches. It executes one
// instruction per call of step(), straight from the RISC-V specification and
// independently of the pipeline RTL, so the testbenches can compare the
// architectural state the pipeline reaches with the state this model
// reaches. Data memory is a byte map; stores at or above 0x1000_0000 are
// MMIO and a store to 0x1000_0000 appends its low byte to uart_bytes. Traps
// jump to mtvec and set mepc/mcause/mtval; MRET returns to mepc. Cycle
// counters are not modelled (programs that compare state must not read them).
// The model follows the RISC-V specification; the MMIO address and the machine-mode CSR subset mirror this design's choices, not the paper.
package rv_ref_pkg;
  typedef logic [63:0] u64;

  class rv_ref;
    u64          x [32];
    u64          pc;
    logic [31:0] prog [int];
    logic [7:0]  mem [longint];
    u64          mtvec, mepc, mcause, mtval, mscratch, mie_r;
    logic        mie_b, mpie_b;
    byte         uart_bytes [$];
    int unsigned retired;
    int unsigned traps;

    function new();
      foreach (x[i]) x[i] = '0;
      pc = '0; mtvec = '0; mepc = '0; mcause = '0; mtval = '0; mscratch = '0; mie_r = '0;
      mie_b = 1'b0; mpie_b = 1'b0; retired = 0; traps = 0;
    endfunction

    function automatic u64 sx(input logic [31:0] v); return {{32{v[31]}}, v}; endfunction

    function automatic u64 rd_mem(input u64 a, input int n);
      u64 v; v = '0;
      for (int i = 0; i < n; i++) begin
        if (a >= 64'h1000_0000)      v[8*i +: 8] = 8'h00;
        else if (mem.exists(a + i))  v[8*i +: 8] = mem[a + i];
        else                         v[8*i +: 8] = 8'h00;
      end
      return v;
    endfunction

    function automatic void wr_mem(input u64 a, input int n, input u64 v);
      if (a >= 64'h1000_0000) begin
        if (a == 64'h1000_0000) uart_bytes.push_back(byte'(v[7:0]));
      end else begin
        for (int i = 0; i < n; i++) mem[a + i] = v[8*i +: 8];
      end
    endfunction

    function automatic u64 csr_read(input logic [11:0] a);
      case (a)
        12'h300: return u64'({51'b0, 2'b11, 3'b0, mpie_b, 3'b0, mie_b, 3'b0});
        12'h301: return {2'b10, 62'b0} | u64'(1 << 8) | u64'(1 << 12);
        12'h304: return mie_r;
        12'h305: return mtvec;
        12'h340: return mscratch;
        12'h341: return mepc;
        12'h342: return mcause;
        12'h343: return mtval;
        default: return '0;
      endcase
    endfunction

    function automatic void csr_write(input logic [11:0] a, input u64 v);
      case (a)
        12'h300: begin mie_b = v[3]; mpie_b = v[7]; end
        12'h304: mie_r = v;
        12'h305: mtvec = {v[63:2], 2'b00};
        12'h340: mscratch = v;
        12'h341: mepc = {v[63:2], 2'b00};
        12'h342: mcause = v;
        12'h343: mtval = v;
        default: ;
      endcase
    endfunction

    function automatic void trap(input int cause, input u64 tval);
      mepc = pc; mcause = u64'(cause); mtval = tval;
      mpie_b = mie_b; mie_b = 1'b0;
      pc = mtvec; traps++;
    endfunction

    // signed/unsigned division with the RISC-V special cases
    function automatic u64 div64(input u64 a, input u64 b, input bit sgn, input bit rem);
      if (b == 0) return rem ? a : '1;
      if (sgn) begin
        if (a == 64'h8000_0000_0000_0000 && b == '1) return rem ? '0 : a;
        return rem ? u64'($signed(a) % $signed(b)) : u64'($signed(a) / $signed(b));
      end
      return rem ? a % b : a / b;
    endfunction

    function automatic logic [31:0] div32(input logic [31:0] a, input logic [31:0] b, input bit sgn, input bit rem);
      if (b == 0) return rem ? a : '1;
      if (sgn) begin
        if (a == 32'h8000_0000 && b == '1) return rem ? '0 : a;
        return rem ? 32'($signed(a) % $signed(b)) : 32'($signed(a) / $signed(b));
      end
      return rem ? a % b : a / b;
    endfunction

    function automatic u64 mulh(input u64 a, input u64 b, input bit sa, input bit sb);
      logic [127:0] ea, eb, p;
      ea = sa ? {{64{a[63]}}, a} : {64'b0, a};
      eb = sb ? {{64{b[63]}}, b} : {64'b0, b};
      p  = ea * eb;
      return p[127:64];
    endfunction

    // execute one instruction; returns 1 if it was a jump-to-self (halt)
    function automatic bit step();
      logic [31:0] in;
      logic [6:0]  op, f7;
      logic [2:0]  f3;
      int          rd, rs1, rs2;
      u64          a, b, r, immi, imms, immb, immu, immj, npc, addr;
      bit          wr, halt;
      in  = prog.exists(int'(pc >> 2)) ? prog[int'(pc >> 2)] : 32'h0;
      op  = in[6:0]; f3 = in[14:12]; f7 = in[31:25];
      rd  = int'(in[11:7]); rs1 = int'(in[19:15]); rs2 = int'(in[24:20]);
      a   = x[rs1]; b = x[rs2];
      immi = {{52{in[31]}}, in[31:20]};
      imms = {{52{in[31]}}, in[31:25], in[11:7]};
      immb = {{51{in[31]}}, in[31], in[7], in[30:25], in[11:8], 1'b0};
      immu = {{32{in[31]}}, in[31:12], 12'b0};
      immj = {{43{in[31]}}, in[31], in[19:12], in[20], in[30:21], 1'b0};
      npc = pc + 4; wr = 0; r = '0; halt = 0;
      case (op)
        7'b0110111: begin r = immu; wr = 1; end
        7'b0010111: begin r = pc + immu; wr = 1; end
        7'b1101111: begin
          r = pc + 4; wr = 1; npc = pc + immj;
          if (immj == 0) halt = 1;
        end
        7'b1100111: begin r = pc + 4; wr = 1; npc = (a + immi) & ~u64'(1); end
        7'b1100011: begin
          bit t;
          case (f3)
            3'd0: t = (a == b);
            3'd1: t = (a != b);
            3'd4: t = ($signed(a) < $signed(b));
            3'd5: t = ($signed(a) >= $signed(b));
            3'd6: t = (a < b);
            default: t = (a >= b);
          endcase
          if (t) npc = pc + immb;
        end
        7'b0000011: begin
          addr = a + immi;
          case (f3)
            3'd0: r = rd_mem(addr, 1);
            3'd1: r = rd_mem(addr, 2);
            3'd2: r = rd_mem(addr, 4);
            3'd3: r = rd_mem(addr, 8);
            3'd4: r = rd_mem(addr, 1);
            3'd5: r = rd_mem(addr, 2);
            default: r = rd_mem(addr, 4);
          endcase
          if (f3 == 3'd0) r = {{56{r[7]}},  r[7:0]};
          if (f3 == 3'd1) r = {{48{r[15]}}, r[15:0]};
          if (f3 == 3'd2) r = {{32{r[31]}}, r[31:0]};
          if ((f3 == 3'd1 || f3 == 3'd5) && addr[0] ||
              (f3 == 3'd2 || f3 == 3'd6) && addr[1:0] != 0 ||
              (f3 == 3'd3) && addr[2:0] != 0) begin
            trap(4, addr); return 0;
          end
          wr = 1;
        end
        7'b0100011: begin
          addr = a + imms;
          if ((f3 == 3'd1 && addr[0]) || (f3 == 3'd2 && addr[1:0] != 0) || (f3 == 3'd3 && addr[2:0] != 0)) begin
            trap(6, addr); return 0;
          end
          wr_mem(addr, 1 << f3[1:0], b);
        end
        7'b0010011, 7'b0110011: begin
          u64 bb; bb = (op == 7'b0010011) ? immi : b;
          if (op == 7'b0110011 && f7 == 7'h01) begin
            case (f3)
              3'd0: r = a * b;
              3'd1: r = mulh(a, b, 1, 1);
              3'd2: r = mulh(a, b, 1, 0);
              3'd3: r = mulh(a, b, 0, 0);
              3'd4: r = div64(a, b, 1, 0);
              3'd5: r = div64(a, b, 0, 0);
              3'd6: r = div64(a, b, 1, 1);
              default: r = div64(a, b, 0, 1);
            endcase
          end else begin
            case (f3)
              3'd0: r = (op == 7'b0110011 && f7[5]) ? a - bb : a + bb;
              3'd1: r = a << bb[5:0];
              3'd2: r = u64'($signed(a) < $signed(bb));
              3'd3: r = u64'(a < bb);
              3'd4: r = a ^ bb;
              3'd5: r = in[30] ? u64'($signed(a) >>> bb[5:0]) : a >> bb[5:0];
              3'd6: r = a | bb;
              default: r = a & bb;
            endcase
          end
          wr = 1;
        end
        7'b0011011, 7'b0111011: begin
          logic [31:0] aw, bw, rw;
          aw = a[31:0]; bw = (op == 7'b0011011) ? immi[31:0] : b[31:0];
          if (op == 7'b0111011 && f7 == 7'h01) begin
            case (f3)
              3'd0: rw = aw * bw;
              3'd4: rw = div32(aw, bw, 1, 0);
              3'd5: rw = div32(aw, bw, 0, 0);
              3'd6: rw = div32(aw, bw, 1, 1);
              default: rw = div32(aw, bw, 0, 1);
            endcase
          end else begin
            case (f3)
              3'd0: rw = (op == 7'b0111011 && f7[5]) ? aw - bw : aw + bw;
              3'd1: rw = aw << bw[4:0];
              default: rw = in[30] ? 32'($signed(aw) >>> bw[4:0]) : aw >> bw[4:0];
            endcase
          end
          r = sx(rw); wr = 1;
        end
        7'b0001111: ;
        7'b1110011: begin
          if (f3 == 3'd0) begin
            if (in == 32'h0000_0073) begin trap(11, 0); return 0; end
            if (in == 32'h0010_0073) begin trap(3, 0);  return 0; end
            if (in == 32'h3020_0073) begin
              npc = mepc; mie_b = mpie_b; mpie_b = 1'b1;
            end
          end else begin
            u64 old, src, nv;
            old = csr_read(in[31:20]);
            src = f3[2] ? u64'(rs1) : a;
            case (f3[1:0])
              2'b01:   nv = src;
              2'b10:   nv = old | src;
              default: nv = old & ~src;
            endcase
            if (f3[1:0] == 2'b01 || rs1 != 0) csr_write(in[31:20], nv);
            r = old; wr = 1;
          end
        end
        default: begin trap(2, u64'(in)); return 0; end
      endcase
      if (npc[1]) begin trap(0, npc); return 0; end
      if (wr && rd != 0) x[rd] = r;
      pc = npc;
      retired++;
      return halt;
    endfunction
  endclass
endpackage
