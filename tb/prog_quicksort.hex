00008137
168000ef
124000ef
0000006f
10b55c63
fe010113
01212823
00010937
01312623
01412423
00112e23
00812c23
00912a23
00050a13
00058993
00490913
013a07b3
4017d793
00279793
012787b3
0007a683
00098413
000a0493
04944863
00249793
012787b3
0007a603
00241713
01270733
06d65c63
00148493
00249793
012787b3
0007a603
fed648e3
00072603
00c6dc63
fff40413
00241713
01270733
00072603
fec6c8e3
04945663
414407b3
40998733
04e7de63
000a0513
00040593
00048a13
f4dff0ef
f73a4ce3
01c12083
01812403
01412483
01012903
00c12983
00812a03
02010113
00008067
00072603
fac6c2e3
0007a603
00072583
00148493
fff40413
00b7a023
00c72023
f51ff06f
00098593
00048513
00040993
ef5ff0ef
f33a40e3
fa9ff06f
00008067
0000f737
00072a23
0000f637
00a62223
0000f6b7
0006a423
0000f7b7
0007a623
05d00693
01470713
00d7a023
00072783
fe078ee3
0000f7b7
0107a703
0000006f
ff010113
000107b7
00812423
0007a403
00112623
07100713
1f400793
800016b7
00178793
00e68023
0007c703
fe071ae3
fff40593
00000513
e6dff0ef
00100793
0287da63
000107b7
00478793
00100713
0080006f
02e40063
0007a603
00170713
00478793
0007a683
fec6d6e3
00100513
0080006f
00000513
00c12083
00812403
01010113
00008067
63697571
726f736b
00000a74
