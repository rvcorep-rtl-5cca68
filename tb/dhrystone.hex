00008137
00001297
c0c28293
00003317
41030313
0062f863
0002a023
00428293
ff5ff06f
21c000ef
2b1000ef
0000006f
00001717
bfd74703
04100793
00f70463
00008067
00052783
00001717
bec72703
00978793
40e787b3
00f52023
00008067
00001797
bdc78793
0007a603
00060863
00062703
00e52023
0007a603
00c60613
00001597
bb45a583
00a00513
5dc0006f
ff010113
01212023
00001917
ba490913
00092783
00812423
00052403
0007a703
0047af03
0087ae83
0107ae03
0147a303
0187a883
01c7a803
0247a583
0287a603
02c7a683
00912223
00112623
00050493
0207a503
00e42023
0004a703
00500793
02a42023
01e42223
01d42423
01c42823
00642a23
01142c23
01042e23
02b42223
02c42423
02d42623
00f4a623
00f42623
00e42023
00040513
f39ff0ef
00442783
08078063
0004a783
00c12083
00812403
0007af83
0047af03
0087ae83
00c7ae03
0107a303
0147a883
0187a803
01c7a583
0207a603
0247a683
0287a703
02c7a783
01f4a023
01e4a223
01d4a423
01c4a623
0064a823
0114aa23
0104ac23
00b4ae23
02c4a023
02d4a223
02e4a423
02f4a623
00012903
00412483
01010113
00008067
0084a503
00600793
00f42623
00840593
5c0000ef
00092783
00c42503
00c40613
0007a783
00c12083
00412483
00f42023
00812403
00012903
00a00593
01010113
4780006f
00001717
a3c70713
00072683
00001797
a2d7c783
fbf78793
0017b793
00d7e7b3
00f72023
04200793
00001717
a0f70823
00008067
04100793
00001717
a0f700a3
00001797
9e07ae23
00008067
f6010113
08812c23
09512223
0a010413
07b12623
08112e23
08912a23
09212823
09312623
09412423
09612023
07712e23
07812c23
07912a23
07a12823
00001797
8f478793
fc010113
0007a283
00f10693
fc010113
00001717
8fc70713
0107a883
0147a803
0187a503
01c7d583
01e7c603
0047af03
0087ae83
00c7ae03
00f10793
ff07f793
ff06f693
00072f83
00200393
00d7a023
0077a423
0057a823
02800393
00001297
94d2ac23
00001697
95468693
00f6a023
0007a223
0077a623
00472303
f9f42023
0317a023
0307a223
02a7a423
02b79623
02c78723
01e7aa23
01d7ac23
01c7ae23
01e74783
00872883
00c72803
01072503
01472583
01872603
01c75683
f8f40f23
00a00793
00001717
02f72023
00001797
8c07aa23
7d000793
f8642223
f9142423
f9042623
f8a42823
f8b42a23
f8c42c23
f8d41e23
f6f42623
00001d97
834d8d93
00001a97
8b0a8a93
00100513
4f4000ef
4d0000ef
00001797
88878793
00a7a023
f6c42783
1af05863
f6c42783
00100993
00001917
81c90913
00178c93
00001c17
870c0c13
00001497
86448493
00100b93
00700b13
e51ff0ef
e19ff0ef
01c95703
00092f03
00492e83
00892e03
00c92303
01092883
01892683
01492603
01e94783
fa040593
f8040513
fae41e23
fbe42023
fbd42223
fbc42423
fa642623
fb142823
fad42c23
fac42a23
faf40f23
f7742e23
2dc000ef
00153793
f7840613
00300593
00200513
00fc2023
f7642c23
218000ef
f7842683
00300793
00300613
00001597
8ac58593
00000517
7dc50513
f6f42a23
204000ef
00000797
7c478793
0007a503
c0dff0ef
0004c703
04000793
1ae7f463
04100d13
00300a13
0140006f
0004c703
001d0793
0ff7fd13
09a76263
04300593
000d0513
234000ef
f7c42703
fee510e3
f7c40593
00000513
2b4000ef
01edc703
000dae83
004dae03
008da303
00cda883
010da503
014da583
018da603
01cdd683
fae40f23
0004c703
001d0793
fbd42023
fbc42223
fa642423
fb142623
faa42823
fab42a23
fac42c23
fad41e23
013aa023
0ff7fd13
00098a13
f9a772e3
001a1513
01450533
f7842583
00198993
4c4000ef
00050793
f7440513
f6f42a23
ae1ff0ef
e93c92e3
30c000ef
00050793
00000717
6bc70713
00000513
00070493
00f72023
310000ef
00000797
6a878793
0007a783
0004a483
40f484b3
00000797
68c78793
0097a023
0a905463
00100793
00000717
68470713
00f72023
f6c42903
00048513
00090593
44c000ef
00591793
412787b3
00050713
00679513
40f50533
00351513
01250533
00048593
00651513
00000797
62e7aa23
41c000ef
00000797
62a7a223
f6040113
09c12083
09812403
09412483
09012903
08c12983
08812a03
08412a83
08012b03
07c12b83
07812c03
07412c83
07012d03
06c12d83
00000513
0a010113
00008067
00900513
efdff06f
f6c42683
00000797
5e078793
0007a703
00269793
00d787b3
00179793
f6f42623
d20706e3
f49ff06f
00250513
00b505b3
00b62023
00008067
00560713
00171793
00e787b3
00379793
00e787b3
00379793
00261613
00271813
01050533
00f60833
00d52023
00d52223
06e52c23
010586b3
0106a803
00e6aa23
00e6ac23
00180713
00e6a823
00052703
00c585b3
00f585b3
000017b7
00b787b3
fae7aa23
00500793
00000717
54f72a23
00008067
0ff57513
0ff5f593
00b50663
00000513
00008067
00000797
52a786a3
00100513
00008067
ff010113
00812423
00912223
00112623
00050413
00058493
0034c583
00244503
fbdff0ef
fe051ae3
00048593
00040513
190000ef
00000793
00a05a63
00a00793
00000717
4ef72223
00100793
00c12083
00812403
00412483
00078513
01010113
00008067
ffe50513
00153513
00008067
ff010113
00812423
00912223
00112623
00050413
00058493
fddff0ef
00300793
00050463
00040793
00f4a023
00200793
04f40a63
0287e863
00040a63
00000717
47872703
06400793
04e7dc63
00c12083
00812403
0004a023
00412483
01010113
00008067
00400713
00e41463
00f4a023
00c12083
00812403
00412483
01010113
00008067
00c12083
00812403
00100793
00f4a023
00412483
01010113
00008067
00c12083
00812403
00300793
00f4a023
00412483
01010113
00008067
fe010113
00b12223
00c12423
00d12623
00e12823
00f12a23
01012c23
01112e23
02010113
00008067
00000717
3dc70713
00072503
05f5e7b7
10078793
00f50533
00a72023
00008067
00008067
fe010113
00b12223
00c12423
00d12623
00e12823
00f12a23
01012c23
01112e23
00000513
02010113
00008067
00050793
0005c703
00178793
00158593
fee78fa3
fe0718e3
00008067
00054783
00079a63
0340006f
00054783
02078063
00068593
0005c703
00150513
00158693
fef704e3
40e78533
00008067
0015c703
40e78533
00008067
0005c703
fe9ff06f
02060063
00c50633
00050793
0005c703
00178793
00158593
fee78fa3
fef618e3
00008067
00050793
00000513
02058063
0015f713
0015d593
00070463
00f50533
00179793
fe0596e3
00008067
00008067
00050713
04058463
00100793
02a5f063
0005d663
0180006f
0005c863
00159593
00179793
fee5eae3
02078663
00000513
00b76663
40b70733
00f56533
0017d793
0015d593
fe0796e3
00008067
fff00513
00008067
00000513
00008067
02058e63
00100793
02a5f063
0005d663
0180006f
0005c863
00159593
00179793
fea5eae3
00078e63
0017d793
00b56463
40b50533
0015d593
fe0798e3
00008067
00008067
00050713
00b546b3
fff00513
04058a63
41f5d793
41f75613
00b7c5b3
00e64733
40f585b3
40c70733
00100793
00e5fc63
00159593
00179793
fee5ece3
00000513
02078063
00000513
00b76663
40b70733
00f56533
0017d793
0015d593
fe0796e3
0006c463
00008067
40a00533
00008067
41f55793
00050693
00a7c533
40f50533
04058263
41f5d793
00b7c5b3
40f585b3
00050713
00100793
00a5fa63
00159593
00179793
fea5ece3
00078e63
0017d793
00b76463
40b70733
0015d593
fe0798e3
00070513
0006c463
00008067
40a00533
00008067
00000697
15c6a683
00500713
00000797
10c78793
02e68063
04400713
400006b7
00178793
00e68023
0007c703
fe071ae3
00008067
00000697
1246a683
00100713
fce69ce3
00000697
1116c683
04100713
fce694e3
00000697
1006c683
04200713
fae69ce3
00000697
1286a683
00700713
fae694e3
00001697
81c6a683
7da00713
00000797
0a878793
f8e688e3
00000797
08c78793
f85ff06f
59524844
4e4f5453
52502045
4152474f
53202c4d
20454d4f
49525453
0000474e
59524844
4e4f5453
52502045
4152474f
31202c4d
20545327
49525453
0000474e
59524844
4e4f5453
52502045
4152474f
33202c4d
20445227
49525453
0000474e
59524844
4e4f5453
52502045
4152474f
32202c4d
20444e27
49525453
0000474e
59524844
4e4f5453
41462045
000a4c49
59524844
4e4f5453
4b4f2045
0000000a
