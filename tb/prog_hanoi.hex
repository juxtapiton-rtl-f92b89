00008137
114000ef
0d0000ef
0000006f
0c050263
fe010113
01312623
01512223
20800993
00261a93
00812c23
00912a23
01212823
01412423
01612023
00112e23
00050413
00058493
00060913
00068a13
01598ab3
fff40413
00090693
000a0613
00048593
00040513
fa9ff0ef
00249793
00f987b3
0007a583
21402703
000a0693
fff58593
00b7a023
000aa783
00170713
20e02a23
00178793
00faa023
00048a13
00040663
00068493
fadff06f
01c12083
01812403
01412483
01012903
00c12983
00812a03
00412a83
00012b03
02010113
00008067
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
000107b7
0007a503
ff010113
00812423
00912223
00112623
20800413
00a42023
00042223
00042423
20002a23
06800713
1f800793
800016b7
00178793
00e68023
0007c703
fe071ae3
00100693
00200613
00000593
ea5ff0ef
00042683
00442783
0000e737
00d72023
0000e637
00f62223
00842783
0000e6b7
0000f737
00f6a423
00072a23
0000f5b7
00100513
00a5a223
0000f7b7
20000513
00a7a423
0000f5b7
00500513
00a5a623
04000693
01470713
00d7a023
00072783
fe078ee3
00c12083
00812403
0000f7b7
01078793
21402503
0007a783
00412483
01010113
00008067
6f6e6168
00000a69
656e6f64
0000000a
